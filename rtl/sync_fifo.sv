// sync_fifo: synchronous first-word-fall-through FIFO with a valid/ready handshake.
//
// It serves as the output Buffer of every SPE and as the FIFO between two layers of the
// dataflow pipeline; its depth is the knob of the buffering strategy, which absorbs the
// short-term variation of the data-dependent processing rates. A word is written when
// in_valid and in_ready are both high and read when out_valid and out_ready are both
// high; the head word is visible on out_data while out_valid is high. in_ready depends
// only on the occupancy, never on in_valid. count gives the occupancy (the SPE uses it
// to decide whether it may finish another vector). DEPTH >= 2.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [CW-1:0]    count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic push, pop;

  always_comb begin
    in_ready  = int'(count) < int'(DEPTH);
    out_valid = count != '0;
    out_data  = mem[rd_ptr];
    push      = in_valid && in_ready;
    pop       = out_valid && out_ready;
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (int'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (int'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  // A push into a full FIFO or a pop from an empty one cannot happen by construction.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) int'(count) <= int'(DEPTH));
endmodule
