// spe: Sparse Vector Dot Product Engine.
//
// The SPE computes the dot product of M activation/weight pairs with N MACs, skipping
// every pair in which either value is zero after clipping. Its dynamic scheduler is:
//   * M clip units (thresholds tau_a, tau_w) followed by M zero checkers;
//   * two vector slots, each holding the clipped pairs of one vector and a pending mask
//     of its non-zero pairs not yet computed. One slot is the head (the vector being
//     finished), the other holds the prefetched next vector;
//   * one counter per slot, loaded with the number of zeros of its vector and adding the
//     dispatched pairs each cycle; the head counter marks the cycle in which the head
//     vector's last pair is dispatched;
//   * two round-robin arbiters, one serving the head slot and one the next slot.
// Each cycle the head arbiter gives up to N pending pairs to MACs 0..gA-1. In the head
// vector's last cycle the MACs left over (gA..N-1) take pairs of the next vector, so
// the MACs stay busy across vector boundaries. The next vector always keeps at least
// one pair for a later cycle, so at most one vector ends per cycle. In the last cycle
// the adder tree adds the MACs' shares of the head vector (see mac); the sum is
// registered and written into the output Buffer (a FIFO of BUF_DEPTH entries) in the
// next cycle; then the slots swap roles.
//
// Timing: over a stream of vectors the MACs compute N non-zero pairs per cycle, apart
// from the final cycle of a vector that cannot be shared (an all-zero vector, a next
// vector with one pair left, or no next vector yet). The average interval thus comes
// close to (1-S)*M/N cycles, without rounding up per vector, and is never above
// max(1, ceil(nnz/N)) for a vector. A vector is taken (in_ready) while the next slot is free or the head ends in
// this cycle. A result appears at out_valid two cycles after its last dispatch cycle.
// Dispatching pauses (stall) when the Buffer would have no room for the result.
//
// Interface: in_valid/in_ready transfer a whole vector (in_act, in_wgt); out_valid/
// out_ready drain the Buffer. Following the paper: clip, zero check, counter, arbiter,
// MACs with clear mux, adder tree, output buffer and prefetching so the MACs are busy
// every cycle. This design's own choices: the whole-vector input handshake, the two
// slots and the sharing rule, one cycle per all-zero vector and the buffer
// backpressure rule.
module spe
  import hass_pkg::*;
#(
  parameter int unsigned M         = 9,
  parameter int unsigned N         = 4,
  parameter int unsigned BUF_DEPTH = 4,
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned KW = $clog2(M + 1),
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned BW = $clog2(BUF_DEPTH + 1)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  thr_t  tau_a,
  input  thr_t  tau_w,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_act [M],
  input  data_t in_wgt [M],
  output logic  out_valid,
  input  logic  out_ready,
  output acc_t  out_data,
  output logic  busy,
  output logic  stall
);
  // ---- clip and zero check of the incoming vector
  data_t        c_act [M];
  data_t        c_wgt [M];
  logic [M-1:0] zflag, nzmask;
  logic [KW-1:0] nzeros;

  for (genvar l = 0; l < M; l++) begin : g_lane
    clip u_clip (.act_i(in_act[l]), .wgt_i(in_wgt[l]), .tau_a(tau_a), .tau_w(tau_w),
                 .act_o(c_act[l]), .wgt_o(c_wgt[l]));
    zero_checker u_zc (.act_i(c_act[l]), .wgt_i(c_wgt[l]),
                       .zero_flag(zflag[l]), .nz_valid(nzmask[l]));
  end

  always_comb begin
    nzeros = '0;
    for (int unsigned l = 0; l < M; l++) nzeros = nzeros + KW'(zflag[l]);
  end

  // ---- two vector slots; hd selects the head slot
  logic          hd;
  logic          s_valid [2];
  data_t         s_act   [2][M];
  data_t         s_wgt   [2][M];
  logic [M-1:0]  s_pend  [2];
  logic [KW-1:0] s_count [2];
  logic          s_load  [2];

  // head and next arbiters (the round-robin pointer belongs to the role, not the slot)
  logic [CW-1:0] n_limit;
  logic [N-1:0]  h_gv,    n_gv;
  logic [IW-1:0] h_gidx [N];
  logic [IW-1:0] n_gidx [N];
  logic [M-1:0]  h_gmask, n_gmask;
  logic          h_last;
  logic          nx;                 // index of the next slot
  logic          fin;                // head vector ends in this cycle
  logic [CW-1:0] g_head, g_next;
  logic          emit_q;
  acc_t          result_q;
  logic [BW-1:0] buf_count;
  logic          buf_in_ready;
  logic          can_go, advance, load;

  always_comb begin
    int unsigned rem;
    nx       = !hd;
    // room for a result finishing now: occupancy after this cycle's push and pop
    can_go   = (int'(buf_count) + int'(emit_q) - int'(out_valid && out_ready)) < int'(BUF_DEPTH);
    advance  = s_valid[hd] && can_go;
    h_last   = (int'(s_count[hd]) + int'(g_head)) == int'(M);
    fin      = advance && h_last;
    // the next vector may use the MACs the head leaves free in its last cycle, but
    // keeps at least one pair so that it cannot end in the same cycle
    rem = 0;
    for (int unsigned l = 0; l < M; l++) rem = rem + int'(s_pend[nx][l]);
    n_limit = '0;
    if (s_valid[nx] && h_last && rem > 1)
      n_limit = CW'(((N - int'(g_head)) < (rem - 1)) ? (N - int'(g_head)) : (rem - 1));
    busy     = s_valid[hd];
    stall    = s_valid[hd] && !can_go;
  end

  assign in_ready = !s_valid[nx] || fin;
  assign load     = in_valid && in_ready;

  // target slot: the head slot when both are empty or when the head leaves now while
  // the next slot is full; otherwise the next slot
  always_comb begin
    s_load[0] = 1'b0;
    s_load[1] = 1'b0;
    if (!s_valid[hd] || s_valid[nx]) s_load[hd] = load;
    else                             s_load[nx] = load;
  end

  rr_arbiter #(.M(M), .N(N)) u_arb_head (
    .clk, .rst_n, .pending(s_pend[hd]), .limit(CW'(N)), .advance,
    .gnt_valid(h_gv), .gnt_idx(h_gidx), .gnt_mask(h_gmask), .gnt_count(g_head));

  rr_arbiter #(.M(M), .N(N)) u_arb_next (
    .clk, .rst_n, .pending(s_pend[nx]), .limit(n_limit), .advance,
    .gnt_valid(n_gv), .gnt_idx(n_gidx), .gnt_mask(n_gmask), .gnt_count(g_next));

  for (genvar s = 0; s < 2; s++) begin : g_slot
    logic [CW-1:0] grants;
    logic [M-1:0]  gmask;
    assign grants = (s == int'(hd)) ? g_head  : g_next;
    assign gmask  = (s == int'(hd)) ? h_gmask : n_gmask;

    spe_counter #(.M(M), .N(N)) u_cnt (
      .clk, .rst_n, .load(s_load[s]), .load_zeros(nzeros), .advance, .grants,
      .last(), .first(), .count(s_count[s]));

    always_ff @(posedge clk) begin
      if (s_load[s]) begin
        s_act[s] <= c_act;
        s_wgt[s] <= c_wgt;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s_valid[s] <= 1'b0;
        s_pend[s]  <= '0;
      end else if (s_load[s]) begin
        s_valid[s] <= 1'b1;
        s_pend[s]  <= nzmask;
      end else if (advance) begin
        s_pend[s] <= s_pend[s] & ~gmask;
        if (fin && s == int'(hd)) s_valid[s] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hd <= 1'b0;
    else if (fin) hd <= nx;
  end

  // ---- MACs: MAC k takes head grant k, or next-vector grant k-g_head
  acc_t  mac_part [N];
  logic  m_head   [N];
  logic  m_next   [N];
  data_t m_w      [N];
  data_t m_i      [N];

  always_comb begin
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned j;
      j         = k - int'(g_head);
      m_head[k] = h_gv[k];
      m_next[k] = 1'b0;
      m_w[k]    = s_wgt[hd][h_gidx[k]];
      m_i[k]    = s_act[hd][h_gidx[k]];
      if (!m_head[k]) begin
        m_w[k] = '0;
        m_i[k] = '0;
        for (int unsigned q = 0; q < N; q++) begin
          if (q == j && k >= int'(g_head)) begin
            m_next[k] = n_gv[q];
            m_w[k] = s_wgt[nx][n_gidx[q]];
            m_i[k] = s_act[nx][n_gidx[q]];
          end
        end
      end
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_mac
    mac u_mac (
      .clk, .rst_n,
      .adv     (advance),
      .switch_v(fin),
      .en_head (m_head[k]),
      .en_next (m_next[k]),
      .w       (m_w[k]),
      .i       (m_i[k]),
      .acc     (),
      .part    (mac_part[k]));
  end

  // ---- adder tree and output buffer
  acc_t dot;
  adder_tree #(.N(N)) u_tree (.in_i(mac_part), .sum_o(dot));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emit_q   <= 1'b0;
      result_q <= '0;
    end else begin
      emit_q <= fin;
      if (fin) result_q <= dot;
    end
  end

  logic [ACC_W-1:0] buf_out;
  sync_fifo #(.WIDTH(ACC_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid(emit_q), .in_ready(buf_in_ready), .in_data(result_q),
    .out_valid, .out_ready, .out_data(buf_out), .count(buf_count));
  assign out_data = acc_t'(buf_out);

  // The head counter and the head pending mask must agree: the vector ends exactly
  // when its last non-zero pair is dispatched. The next vector never ends early.
  a_last_matches_pending: assert property (@(posedge clk) disable iff (!rst_n)
      advance |-> (h_last == ((s_pend[hd] & ~h_gmask) == '0)));
  a_next_not_done: assert property (@(posedge clk) disable iff (!rst_n)
      (advance && s_valid[nx] && !s_load[nx]) |-> ((s_pend[nx] & ~n_gmask) != '0 || s_pend[nx] == '0));
  a_buf_room: assert property (@(posedge clk) disable iff (!rst_n) emit_q |-> buf_in_ready);
endmodule
