// tb_mac: random advance / switch / head-grant / next-grant sequences against a
// software model holding the accumulator, the keep flag and the head-vector share.
// part (combinational) is checked before each edge, acc after it.
module tb_mac;
  import hass_pkg::*;
  logic clk = 0, rst_n = 0, adv, switch_v, en_head, en_next;
  data_t w, i;
  acc_t acc, part;
  longint m_acc, m_part, prod;
  bit m_keep;
  int checks = 0, failures = 0;
  mac dut (.clk, .rst_n, .adv, .switch_v, .en_head, .en_next, .w, .i, .acc, .part);
  always #5 clk = ~clk;
  initial begin
    adv = 0; switch_v = 0; en_head = 0; en_next = 0; w = 0; i = 0;
    m_acc = 0; m_keep = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      adv      = ($urandom % 6) != 0;
      switch_v = ($urandom % 4) == 0;
      // one pair per cycle: a head grant or (only when switching) a next grant
      en_head  = ($urandom % 3) != 0;
      en_next  = switch_v && !en_head && ($urandom % 2);
      w        = data_t'($urandom);
      i        = data_t'($urandom);
      prod     = longint'(w) * longint'(i);
      m_part   = (m_keep ? m_acc : 0) + (en_head ? prod : 0);
      #1;
      checks++;
      if (longint'(part) != m_part) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d part=%0d model=%0d", k, part, m_part);
      end
      if (adv) begin
        if (switch_v) begin m_acc = en_next ? prod : 0; m_keep = en_next; end
        else          begin m_acc = m_part;             m_keep = m_keep || en_head; end
      end
      @(posedge clk); #1;
      checks++;
      if (longint'(acc) != m_acc) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d acc=%0d model=%0d", k, acc, m_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
