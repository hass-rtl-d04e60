// rr_arbiter: round-robin dispatch of non-zero pairs to the MACs of an SPE.
//
// pending marks the lanes of the current vector whose pair is non-zero and has not yet
// been computed. Every cycle the arbiter scans the M lanes starting at its round-robin
// pointer and grants the first (up to) N pending lanes, the k-th grant going to MAC k.
// gnt_mask and gnt_count tell the SPE which lanes were taken and how many (the count
// goes to the SPE counter). When advance is high the grants are consumed and the
// pointer moves to the lane after the last one granted, so that over successive cycles
// the lanes are served in rotation. limit caps the number of grants below N (the SPE
// uses it when the MACs left over in the last cycle of one vector start on the next
// vector). The scan is combinational; the pointer is the only state. The multi-grant scan and the pointer rule are this design's own; the drawing
// only names a round-robin arbiter feeding several MACs.
module rr_arbiter #(
  parameter int unsigned M = 9,
  parameter int unsigned N = 4,
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [M-1:0]  pending,
  input  logic [CW-1:0] limit,
  input  logic          advance,
  output logic [N-1:0]  gnt_valid,
  output logic [IW-1:0] gnt_idx [N],
  output logic [M-1:0]  gnt_mask,
  output logic [CW-1:0] gnt_count
);
  logic [IW-1:0] ptr;
  logic [IW-1:0] last_idx;

  always_comb begin
    logic [IW-1:0] idx;
    int unsigned cnt;
    gnt_valid = '0;
    gnt_mask  = '0;
    last_idx  = ptr;
    cnt       = 0;
    for (int unsigned k = 0; k < N; k++) gnt_idx[k] = '0;
    for (int unsigned j = 0; j < M; j++) begin
      idx = IW'((int'(ptr) + j) % M);
      if (pending[idx] && cnt < N && cnt < int'(limit)) begin
        gnt_valid[cnt] = 1'b1;
        gnt_idx[cnt]   = IW'(idx);
        gnt_mask[idx]  = 1'b1;
        last_idx       = IW'(idx);
        cnt            = cnt + 1;
      end
    end
    gnt_count = CW'(cnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && gnt_count != '0)
      ptr <= (int'(last_idx) == M - 1) ? '0 : last_idx + 1'b1;
  end
endmodule
