// weight_mem: on-chip weight memory of one SPE.
//
// Holds DEPTH weight vectors of M 16-bit weights, stored densely (zeros included, no
// encoding); clipping and zero skipping happen at run time in the SPE. Written one
// vector per cycle through the write port when the weights are loaded; read
// asynchronously, so the vector addressed by rd_addr is available in the same cycle as
// the activation vector it is paired with (distributed-RAM style). The storage format
// and the ports are this design's own choices.
module weight_mem
  import hass_pkg::*;
#(
  parameter int unsigned M     = 9,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data [M],
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_data [M]
);
  logic [M*DATA_W-1:0] mem [DEPTH];
  logic [M*DATA_W-1:0] wr_flat, rd_flat;

  always_comb begin
    for (int unsigned l = 0; l < M; l++) wr_flat[l*DATA_W +: DATA_W] = wr_data[l];
    rd_flat = mem[rd_addr];
    for (int unsigned l = 0; l < M; l++) rd_data[l] = data_t'(rd_flat[l*DATA_W +: DATA_W]);
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_flat;
  end
endmodule
