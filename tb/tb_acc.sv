// tb_acc: FOLD=3; random input gaps and output backpressure; every output must be the
// sum of the next three inputs, in order.
module tb_acc;
  import hass_pkg::*;
  localparam int F = 3;
  logic clk = 0, rst_n = 0, in_valid, in_ready, out_valid, out_ready;
  acc_t in_data, out_data;
  longint sent[$];
  int checks = 0, failures = 0, outs = 0;
  acc #(.FOLD(F)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);
  always #5 clk = ~clk;
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (outs < 300) begin
      @(negedge clk);
      if (!in_valid || in_ready_q) begin
        in_valid = ($urandom % 3) != 0;
        in_data  = acc_t'($signed($urandom)) >>> 4;
      end
      out_ready = ($urandom % 3) != 0;
      #1;
      if (out_valid && out_ready) begin
        longint e;
        e = sent.pop_front() + sent.pop_front() + sent.pop_front();
        checks++; outs++;
        if (longint'(out_data) != e) begin failures++; $display("FAIL %0d %0d", out_data, e); end
      end
      in_ready_q = in_ready;
      if (in_valid && in_ready) sent.push_back(longint'(in_data));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic in_ready_q = 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
