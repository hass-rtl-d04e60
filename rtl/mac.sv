// mac: multiply-accumulate unit of an SPE.
//
// The accumulator register is fed back through a two-way multiplexer whose other input
// is the constant 0 (keep selects the feedback). A MAC may get one pair per cycle from
// either of two vectors: the head vector, whose dot product is being finished, or the
// next vector, which the SPE starts on MACs that have nothing left to do in the head
// vector's last cycle.
//   part = (keep ? acc : 0) + (en_head ? w*i : 0)   this MAC's share of the head vector
//   on adv:  switch_v=0: acc <= part
//            switch_v=1: acc <= en_next ? w*i : 0   (head finished; start the next one)
// keep is an internal flag telling whether acc already belongs to the head vector; it
// is set by a head grant and, on switch_v, by a next-vector grant. part is
// combinational and feeds the SPE adder tree in the head vector's last cycle. The
// multiplexer with its 0 input follows the SPE drawing; the two-vector operation, the
// keep flag and the accumulator width are this design's choices.
module mac
  import hass_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  adv,
  input  logic  switch_v,
  input  logic  en_head,
  input  logic  en_next,
  input  data_t w,
  input  data_t i,
  output acc_t  acc,
  output acc_t  part
);
  logic keep;
  acc_t prod;
  always_comb begin
    prod = acc_t'(w * i);
    part = (keep ? acc : acc_t'(0)) + (en_head ? prod : acc_t'(0));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      keep <= 1'b0;
    end else if (adv) begin
      if (switch_v) begin
        acc  <= en_next ? prod : acc_t'(0);
        keep <= en_next;
      end else begin
        acc  <= part;
        keep <= keep || en_head;
      end
    end
  end
endmodule
