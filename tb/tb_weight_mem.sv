// tb_weight_mem: writes random vectors to random addresses, reads all addresses back
// asynchronously against a model array.
module tb_weight_mem;
  import hass_pkg::*;
  localparam int M = 9, D = 12;
  logic clk = 0, wr_en;
  logic [3:0] wr_addr, rd_addr;
  data_t wr_data [M];
  data_t rd_data [M];
  data_t model [D][M];
  bit written [D];
  int checks = 0, failures = 0;
  weight_mem #(.M(M), .DEPTH(D)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);
  always #5 clk = ~clk;
  initial begin
    wr_en = 0; wr_addr = 0; rd_addr = 0;
    foreach (wr_data[l]) wr_data[l] = 0;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) == 0 || k < D;
      wr_addr = (k < D) ? 4'(k) : 4'($urandom % D);
      foreach (wr_data[l]) wr_data[l] = data_t'($urandom);
      rd_addr = 4'($urandom % D);
      #1;
      if (written[rd_addr]) begin
        checks++;
        foreach (rd_data[l]) if (rd_data[l] != model[rd_addr][l]) begin failures++; break; end
      end
      @(posedge clk);
      if (wr_en) begin model[wr_addr] = wr_data; written[wr_addr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
