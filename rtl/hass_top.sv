// hass_top: sparse dataflow accelerator pipeline of a convolutional layer and a fully
// connected layer.
//
// Layers are pipelined through FIFOs with valid/ready handshakes. The convolutional
// layer (CONV_I_PAR x CONV_O_PAR SPEs of CONV_N MACs, M = 9 pairs per SPE for a 3x3
// kernel) receives windowed activations on conv_in_* from a sliding-window stage that
// is outside this design. Each of its output beats (CONV_O_PAR channels of one output
// position) is written into the inter-layer FIFO and becomes one input vector of the
// fully connected layer (FC_M = CONV_O_PAR), which folds FC_FOLD such vectors, i.e. the
// flattened output of FC_FOLD positions, into FC_O_PAR outputs on out_*. Every layer
// has its own activation and weight thresholds and its own weight-load port.
//
// The default convolutional layer matches the first layer of the ResNet-18 design
// point of the paper's design-space exploration (128 SPEs with 7 MACs each); how the
// 128 SPEs split into input and output parallelism, and every size of the fully
// connected layer, are this design's own choices. Pooling layers are not part of it.
module hass_top
  import hass_pkg::*;
#(
  parameter int unsigned CONV_M      = 9,
  parameter int unsigned CONV_N      = 7,
  parameter int unsigned CONV_I_PAR  = 2,
  parameter int unsigned CONV_O_PAR  = 64,
  parameter int unsigned CONV_FOLD   = 32,
  parameter int unsigned CONV_GROUPS = 1,
  parameter int unsigned FC_N        = 16,
  parameter int unsigned FC_O_PAR    = 10,
  parameter int unsigned FC_FOLD     = 4,
  parameter int unsigned BUF_DEPTH   = 4,
  parameter int unsigned IL_DEPTH    = 4,
  localparam int unsigned FC_M  = CONV_O_PAR,
  localparam int unsigned CAW   = (CONV_FOLD * CONV_GROUPS > 1) ? $clog2(CONV_FOLD * CONV_GROUPS) : 1,
  localparam int unsigned CIW   = (CONV_I_PAR > 1) ? $clog2(CONV_I_PAR) : 1,
  localparam int unsigned COW   = (CONV_O_PAR > 1) ? $clog2(CONV_O_PAR) : 1,
  localparam int unsigned FAW   = (FC_FOLD > 1) ? $clog2(FC_FOLD) : 1,
  localparam int unsigned FOW   = (FC_O_PAR > 1) ? $clog2(FC_O_PAR) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // per-layer thresholds
  input  thr_t           conv_tau_a,
  input  thr_t           conv_tau_w,
  input  thr_t           fc_tau_a,
  input  thr_t           fc_tau_w,
  // weight loading
  input  logic           conv_wr_en,
  input  logic [CIW-1:0] conv_wr_i,
  input  logic [COW-1:0] conv_wr_o,
  input  logic [CAW-1:0] conv_wr_addr,
  input  data_t          conv_wr_data [CONV_M],
  input  logic           fc_wr_en,
  input  logic [FOW-1:0] fc_wr_o,
  input  logic [FAW-1:0] fc_wr_addr,
  input  data_t          fc_wr_data [FC_M],
  // windowed activations into the convolutional layer
  input  logic           conv_in_valid,
  output logic           conv_in_ready,
  input  data_t          conv_in_act [CONV_I_PAR][CONV_M],
  // results of the fully connected layer
  output logic           out_valid,
  input  logic           out_ready,
  output data_t          out_data [FC_O_PAR],
  // status
  output logic           conv_stall,
  output logic           fc_stall,
  output logic           conv_busy,
  output logic           fc_busy
);
  // ---- convolutional layer
  logic  c_out_valid, c_out_ready;
  data_t c_out_data [CONV_O_PAR];

  sparse_layer #(.M(CONV_M), .N(CONV_N), .I_PAR(CONV_I_PAR), .O_PAR(CONV_O_PAR),
                 .FOLD(CONV_FOLD), .GROUPS(CONV_GROUPS), .BUF_DEPTH(BUF_DEPTH)) u_conv (
    .clk, .rst_n, .tau_a(conv_tau_a), .tau_w(conv_tau_w),
    .wr_en(conv_wr_en), .wr_i(conv_wr_i), .wr_o(conv_wr_o), .wr_addr(conv_wr_addr),
    .wr_data(conv_wr_data),
    .in_valid(conv_in_valid), .in_ready(conv_in_ready), .in_act(conv_in_act),
    .out_valid(c_out_valid), .out_ready(c_out_ready), .out_data(c_out_data),
    .stall_any(conv_stall), .busy_any(conv_busy));

  // ---- inter-layer FIFO
  logic [FC_M*DATA_W-1:0] il_in, il_out;
  logic  il_valid, il_ready;
  data_t f_in_act [1][FC_M];

  always_comb begin
    for (int unsigned c = 0; c < FC_M; c++) begin
      il_in[c*DATA_W +: DATA_W] = c_out_data[c];
      f_in_act[0][c]            = data_t'(il_out[c*DATA_W +: DATA_W]);
    end
  end

  sync_fifo #(.WIDTH(FC_M * DATA_W), .DEPTH(IL_DEPTH)) u_il_fifo (
    .clk, .rst_n,
    .in_valid(c_out_valid), .in_ready(c_out_ready), .in_data(il_in),
    .out_valid(il_valid), .out_ready(il_ready), .out_data(il_out), .count());

  // ---- fully connected layer
  sparse_layer #(.M(FC_M), .N(FC_N), .I_PAR(1), .O_PAR(FC_O_PAR),
                 .FOLD(FC_FOLD), .GROUPS(1), .BUF_DEPTH(BUF_DEPTH)) u_fc (
    .clk, .rst_n, .tau_a(fc_tau_a), .tau_w(fc_tau_w),
    .wr_en(fc_wr_en), .wr_i('0), .wr_o(fc_wr_o), .wr_addr(fc_wr_addr), .wr_data(fc_wr_data),
    .in_valid(il_valid), .in_ready(il_ready), .in_act(f_in_act),
    .out_valid, .out_ready, .out_data,
    .stall_any(fc_stall), .busy_any(fc_busy));
endmodule
