// sparse_layer: one hardware layer of the sparse dataflow pipeline.
//
// I_PAR x O_PAR SPEs work in parallel: SPE (i,o) takes data bundle i of the input beat
// (M activations, e.g. one 3x3 window of one input channel) and the weight vector of
// output filter o for that bundle from its own weight memory. Behind each SPE an ACC
// folds FOLD consecutive dot products (time-wise folding over the input channels), and
// for every output filter an adder '+' sums the I_PAR folded results (accumulation
// across SPEs). The sum is requantised to 16 bits (shift right by FRAC_W, saturate).
//
// Input order: for each output position, for each filter group g < GROUPS, for each
// fold f < FOLD, one beat; the weight address g*FOLD+f is kept by a counter, so the
// producer repeats a window once per filter group. A beat is taken by all SPEs at once
// (in_ready is the AND of the SPE readys). Because the SPEs skip different numbers of
// zeros, they finish at different times; their output buffers absorb the difference and
// an output beat (O_PAR values, outputs[0..O_PAR-1]) leaves when every ACC holds a
// result. A fully connected layer is the same module with M set to the length of its
// input chunk.
//
// Weights are written before use through wr_* (SPE index wr_i, wr_o and address).
// Following the paper: the SPE array, ACC per SPE, adder across SPEs, per-layer
// thresholds. This design's own: beat order, broadcast and join handshakes, the
// requantisation, no bias.
module sparse_layer
  import hass_pkg::*;
#(
  parameter int unsigned M         = 9,
  parameter int unsigned N         = 7,
  parameter int unsigned I_PAR     = 2,
  parameter int unsigned O_PAR     = 64,
  parameter int unsigned FOLD      = 32,
  parameter int unsigned GROUPS    = 1,
  parameter int unsigned BUF_DEPTH = 4,
  localparam int unsigned WDEPTH = FOLD * GROUPS,
  localparam int unsigned AW  = (WDEPTH > 1) ? $clog2(WDEPTH) : 1,
  localparam int unsigned IIW = (I_PAR > 1) ? $clog2(I_PAR) : 1,
  localparam int unsigned OIW = (O_PAR > 1) ? $clog2(O_PAR) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  thr_t           tau_a,
  input  thr_t           tau_w,
  // weight loading
  input  logic           wr_en,
  input  logic [IIW-1:0] wr_i,
  input  logic [OIW-1:0] wr_o,
  input  logic [AW-1:0]  wr_addr,
  input  data_t          wr_data [M],
  // input beats: I_PAR data bundles of M activations
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t          in_act [I_PAR][M],
  // output beats: O_PAR values
  output logic           out_valid,
  input  logic           out_ready,
  output data_t          out_data [O_PAR],
  // status
  output logic           stall_any,
  output logic           busy_any
);
  logic [AW-1:0] waddr;
  logic [I_PAR*O_PAR-1:0] spe_in_ready, spe_out_valid, spe_out_ready;
  logic [I_PAR*O_PAR-1:0] acc_valid, spe_stall, spe_busy;
  acc_t acc_data [I_PAR][O_PAR];
  logic accept, all_valid;

  always_comb begin
    in_ready  = &spe_in_ready;
    accept    = in_valid && in_ready;
    all_valid = &acc_valid;
    out_valid = all_valid;
    stall_any = |spe_stall;
    busy_any  = |spe_busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) waddr <= '0;
    else if (accept) waddr <= (int'(waddr) == WDEPTH - 1) ? '0 : waddr + 1'b1;
  end

  for (genvar gi = 0; gi < I_PAR; gi++) begin : g_i
    for (genvar go = 0; go < O_PAR; go++) begin : g_o
      localparam int unsigned K = gi * O_PAR + go;
      data_t wvec [M];
      acc_t  spe_data;

      weight_mem #(.M(M), .DEPTH(WDEPTH)) u_wmem (
        .clk, .wr_en(wr_en && int'(wr_i) == gi && int'(wr_o) == go),
        .wr_addr, .wr_data, .rd_addr(waddr), .rd_data(wvec));

      spe #(.M(M), .N(N), .BUF_DEPTH(BUF_DEPTH)) u_spe (
        .clk, .rst_n, .tau_a, .tau_w,
        .in_valid(accept), .in_ready(spe_in_ready[K]),
        .in_act(in_act[gi]), .in_wgt(wvec),
        .out_valid(spe_out_valid[K]), .out_ready(spe_out_ready[K]), .out_data(spe_data),
        .busy(spe_busy[K]), .stall(spe_stall[K]));

      acc #(.FOLD(FOLD)) u_acc (
        .clk, .rst_n,
        .in_valid(spe_out_valid[K]), .in_ready(spe_out_ready[K]), .in_data(spe_data),
        .out_valid(acc_valid[K]), .out_ready(out_ready && all_valid),
        .out_data(acc_data[gi][go]));
    end
  end

  // '+' across the I_PAR SPEs of each output filter, then requantisation
  always_comb begin
    for (int unsigned o = 0; o < O_PAR; o++) begin
      acc_t s;
      s = '0;
      for (int unsigned i = 0; i < I_PAR; i++) s = s + acc_data[i][o];
      out_data[o] = requant(s);
    end
  end
endmodule
