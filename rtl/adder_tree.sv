// adder_tree: sums the N MAC partial sums of an SPE into its dot product.
//
// A balanced binary tree built by recursion: the inputs are split into two halves, each
// half is summed by a smaller tree and the two results are added. Combinational; the
// SPE registers the result at the end of the last dispatch cycle of a vector.
// Pipelining is not specified and is left out. Verilator's lint may report sl and sh as
// undriven: both are driven by the output ports of the two smaller trees, which that
// lint does not follow through a recursive instance; simulation and synthesis agree.
module adder_tree
  import hass_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  acc_t in_i [N],
  output acc_t sum_o
);
  if (N == 1) begin : g_leaf
    assign sum_o = in_i[0];
  end else begin : g_split
    localparam int unsigned NL = N / 2;
    localparam int unsigned NR = N - NL;
    acc_t lo [NL];
    acc_t hi [NR];
    acc_t sl, sh;
    for (genvar k = 0; k < NL; k++) begin : g_lo
      assign lo[k] = in_i[k];
    end
    for (genvar k = 0; k < NR; k++) begin : g_hi
      assign hi[k] = in_i[NL+k];
    end
    adder_tree #(.N(NL)) u_lo (.in_i(lo), .sum_o(sl));
    adder_tree #(.N(NR)) u_hi (.in_i(hi), .sum_o(sh));
    assign sum_o = sl + sh;
  end
endmodule
