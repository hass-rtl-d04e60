// tb_sync_fifo: random push/pop traffic against a queue model; checks order, the
// occupancy, full/empty flags and that a full FIFO refuses a write.
module tb_sync_fifo;
  localparam int W = 12, D = 4;
  logic clk = 0, rst_n = 0, in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [2:0] count;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, fulls = 0;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .count);
  always #5 clk = ~clk;
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((k / 500) % 2 ? 70 : 35);
      out_ready = ($urandom % 100) < ((k / 500) % 2 ? 35 : 70);
      in_data   = W'($urandom);
      #1;
      checks++;
      if (int'(count) != q.size() || in_ready != (q.size() < D) || out_valid != (q.size() > 0) ||
          (out_valid && out_data != q[0])) failures++;
      if (q.size() == D) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && q.size() + ((out_valid && out_ready) ? 1 : 0) < D + ((out_valid && out_ready) ? 1 : 0) && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
