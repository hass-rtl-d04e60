// tb_clip: random and corner values through clip, compared with |x| < tau -> 0.
module tb_clip;
  import hass_pkg::*;
  import tb_ref_pkg::*;
  data_t a, w, ao, wo;
  thr_t ta, tw;
  int checks = 0, failures = 0;
  clip dut (.act_i(a), .wgt_i(w), .tau_a(ta), .tau_w(tw), .act_o(ao), .wgt_o(wo));

  task automatic check1();
    #1;
    checks++;
    if (longint'(ao) != ref_clip(longint'(a), longint'(ta)) ||
        longint'(wo) != ref_clip(longint'(w), longint'(tw))) begin
      failures++;
      $display("FAIL a=%0d ta=%0d -> %0d ; w=%0d tw=%0d -> %0d", a, ta, ao, w, tw, wo);
    end
  endtask

  initial begin
    // corners: exactly at threshold passes, one below is cut, most negative value
    a = 16'sd5;  ta = 16'd5; w = -16'sd4; tw = 16'd5; check1();
    a = -16'sd5; ta = 16'd6; w = 16'sh8000; tw = 16'hffff; check1();
    a = 16'sh8000; ta = 16'd0; w = 16'sd0; tw = 16'd0; check1();
    a = 16'sh7fff; ta = 16'h8000; w = 16'sh8000; tw = 16'h8000; check1();
    for (int k = 0; k < 2000; k++) begin
      a = data_t'($urandom); w = data_t'($urandom);
      ta = thr_t'($urandom % 40000); tw = thr_t'($urandom % 40000);
      if (k % 2 == 0) begin a = a >>> 8; w = w >>> 8; ta = ta >> 8; tw = tw >> 8; end
      check1();
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
