// tb_adder_tree: an odd-sized tree (N=5) and the default size against plain sums.
module tb_adder_tree;
  import hass_pkg::*;
  acc_t in5 [5];
  acc_t in4 [4];
  acc_t s5, s4;
  int checks = 0, failures = 0;
  adder_tree #(.N(5)) dut5 (.in_i(in5), .sum_o(s5));
  adder_tree dut4 (.in_i(in4), .sum_o(s4));
  initial begin
    for (int k = 0; k < 1000; k++) begin
      longint e5, e4;
      e5 = 0; e4 = 0;
      foreach (in5[j]) begin in5[j] = acc_t'($signed($urandom)) >>> ($urandom % 8); e5 += longint'(in5[j]); end
      foreach (in4[j]) begin in4[j] = acc_t'($signed($urandom)); e4 += longint'(in4[j]); end
      #1;
      checks += 2;
      if (longint'(s5) != e5) begin failures++; $display("FAIL5 %0d %0d", s5, e5); end
      if (longint'(s4) != e4) begin failures++; $display("FAIL4 %0d %0d", s4, e4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
