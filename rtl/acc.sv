// acc: time-wise folding accumulator behind an SPE.
//
// A layer with more input channels than it has SPEs iterates over them: the SPE
// produces FOLD partial dot products for one output value, and ACC adds them. Every
// FOLD-th accepted input completes a sum, which is held in a one-entry output register
// until out_ready takes it; meanwhile no further input is accepted. Handshakes are
// valid/ready on both sides; a completed sum is visible one cycle after its last input.
module acc
  import hass_pkg::*;
#(
  parameter int unsigned FOLD = 32,
  localparam int unsigned FW = (FOLD > 1) ? $clog2(FOLD) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  acc_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output acc_t out_data
);
  acc_t          sum;
  logic [FW-1:0] cnt;
  acc_t          nxt;

  always_comb begin
    in_ready = !out_valid || out_ready;
    nxt      = ((cnt == '0) ? acc_t'(0) : sum) + in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (int'(cnt) == FOLD - 1) begin
          out_data  <= nxt;
          out_valid <= 1'b1;
          cnt       <= '0;
        end else begin
          sum <= nxt;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
