// tb_zero_checker: every combination of zero / non-zero activation and weight.
module tb_zero_checker;
  import hass_pkg::*;
  data_t a, w;
  logic zf, nz;
  int checks = 0, failures = 0;
  zero_checker dut (.act_i(a), .wgt_i(w), .zero_flag(zf), .nz_valid(nz));
  initial begin
    for (int k = 0; k < 1000; k++) begin
      a = (k % 4 == 0 || k % 4 == 1) ? data_t'(0) : data_t'($urandom | 1);
      w = (k % 4 == 0 || k % 4 == 2) ? data_t'(0) : data_t'($urandom | 2);
      if (k % 7 == 0) w = 16'sh8000;
      #1;
      checks++;
      if (zf !== (a == 0 || w == 0) || nz !== !(a == 0 || w == 0)) begin
        failures++;
        $display("FAIL a=%0d w=%0d zf=%0b nz=%0b", a, w, zf, nz);
      end
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
