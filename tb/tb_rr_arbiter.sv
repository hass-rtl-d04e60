// tb_rr_arbiter: random pending masks; the grants must be the first N pending lanes in
// circular order from a pointer that the testbench tracks itself (lane after the last
// grant), at most limit of them (random, sometimes above N), assigned to MACs 0,1,...
module tb_rr_arbiter;
  localparam int M = 9, N = 4;
  logic clk = 0, rst_n = 0, advance;
  logic [M-1:0] pending, gnt_mask;
  logic [N-1:0] gnt_valid;
  logic [3:0] gnt_idx [N];
  logic [2:0] gnt_count, limit;
  int ptr, checks = 0, failures = 0;
  rr_arbiter #(.M(M), .N(N)) dut (.clk, .rst_n, .pending, .limit, .advance, .gnt_valid, .gnt_idx, .gnt_mask, .gnt_count);
  always #5 clk = ~clk;
  initial begin
    pending = '0; limit = 3'd4; advance = 0; ptr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int exp_idx [N];
      int n, last;
      logic [M-1:0] emask;
      @(negedge clk);
      pending = M'($urandom);
      advance = ($urandom % 4) != 0;
      limit   = ($urandom % 2) ? 3'(N) : 3'($urandom % 8);
      n = 0; emask = '0; last = -1;
      for (int j = 0; j < M; j++) begin
        int l;
        l = (ptr + j) % M;
        if (pending[l] && n < N && n < int'(limit)) begin exp_idx[n] = l; emask[l] = 1; n++; last = l; end
      end
      #1;
      begin
        bit bad;
        bad = (int'(gnt_count) != n) || (gnt_mask != emask);
        for (int q = 0; q < N; q++)
          if (gnt_valid[q] != (q < n) || (q < n && int'(gnt_idx[q]) != exp_idx[q])) bad = 1;
        checks++;
        if (bad) failures++;
      end
      if (advance && n > 0) ptr = (last + 1) % M;
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
