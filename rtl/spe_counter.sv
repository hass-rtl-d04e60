// spe_counter: iteration counter and state control of an SPE.
//
// When a vector enters the SPE, the number of its zero pairs (the zero flags) is loaded
// into the counter at once; afterwards, every dispatch cycle adds the number of pairs
// the arbiter granted. last is high in the dispatch cycle at whose end the count
// reaches M, i.e. when every pair of the vector is either skipped or computed. first is
// high until the first dispatch cycle of a vector has passed. The SPE keeps one counter
// per vector slot and compares count plus the head grants with M itself (its head and
// next grants share one decision), so last and first are spare outputs there. A load
// takes priority over an advance in the same cycle.
module spe_counter #(
  parameter int unsigned M = 9,
  parameter int unsigned N = 4,
  localparam int unsigned KW = $clog2(M + 1),
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [KW-1:0] load_zeros,
  input  logic          advance,
  input  logic [CW-1:0] grants,
  output logic          last,
  output logic          first,
  output logic [KW-1:0] count
);
  always_comb last = (int'(count) + int'(grants)) == int'(M);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      first <= 1'b0;
    end else if (load) begin
      count <= load_zeros;
      first <= 1'b1;
    end else if (advance) begin
      count <= count + KW'(grants);
      first <= 1'b0;
    end
  end
endmodule
