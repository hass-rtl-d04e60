// tb_resnet18_spe_rates: one SPE per 3x3 layer of the ResNet-18 design point (16
// layers), each with the MACs per SPE chosen for that layer and fed windows whose pairs
// are zero with that layer's average sparsity (both from the paper's design-space
// exploration). Every result is checked against a model. The cycles each SPE needs for
// its VEC windows must lie between two bounds: at most one loading cycle plus the sum
// of max(1, ceil(nnz/N)) over the windows (no sharing of MACs between windows), and at
// least ceil(total nnz / N) (every MAC busy in every cycle). The average cycles per
// window is printed next to t = ceil((1-S)*9/N); the paper chose N so that t is one
// cycle for every layer.
module tb_resnet18_spe_rates;
  import hass_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 16, M = 9, VEC = 400;
  localparam int NMAC [L] = '{7, 5, 6, 4, 6, 3, 4, 2, 4, 3, 3, 2, 3, 2, 2, 2};
  localparam int SPCT [L] = '{31, 54, 37, 63, 41, 68, 61, 81, 62, 75, 67, 86, 67, 88, 87, 87};
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, done = 0;
  always #5 clk = ~clk;

  for (genvar k = 0; k < L; k++) begin : g_layer
    logic in_valid = 0, in_ready, out_valid, busy, stall;
    data_t in_act [M];
    data_t in_wgt [M];
    acc_t out_data;
    longint expq [$];
    int upper = 1, total_nnz = 0, cycles = 0, nres = 0;   // one cycle to load the first window
    bit counting = 0;

    spe #(.M(M), .N(NMAC[k]), .BUF_DEPTH(4)) u_spe (
      .clk, .rst_n, .tau_a(16'd0), .tau_w(16'd0), .in_valid, .in_ready, .in_act, .in_wgt,
      .out_valid, .out_ready(1'b1), .out_data, .busy, .stall);

    always @(posedge clk) if (counting) cycles++;
    always @(negedge clk) if (rst_n && out_valid) begin
      checks++; nres++;
      if (longint'(out_data) != expq.pop_front()) failures++;
    end

    initial begin
      foreach (in_act[l]) begin in_act[l] = 0; in_wgt[l] = 0; end
      wait (rst_n);
      @(negedge clk);
      for (int v = 0; v < VEC; v++) begin
        longint e; int nnz;
        e = 0; nnz = 0;
        foreach (in_act[l]) begin
          in_act[l] = rnd_val(0, 500);
          in_wgt[l] = rnd_val(0, 500);
          if (($urandom % 100) < SPCT[k]) begin
            if ($urandom % 2) in_act[l] = 0; else in_wgt[l] = 0;
          end else nnz++;
          e += longint'(in_act[l]) * longint'(in_wgt[l]);
        end
        expq.push_back(e);
        upper += (nnz == 0) ? 1 : (nnz + NMAC[k] - 1) / NMAC[k];
        total_nnz += nnz;
        in_valid = 1;
        while (!in_ready) @(negedge clk);
        if (v == 0) counting = 1;   // cycles are counted from the first accepting edge
        @(posedge clk); #1;
      end
      in_valid = 0;
      wait (u_spe.busy == 0);
      counting = 0;
      repeat (4) @(posedge clk);
      checks += 2;
      if (nres != VEC) failures++;
      if (cycles > upper || cycles < (total_nnz + NMAC[k] - 1) / NMAC[k]) begin
        failures++;
        $display("FAIL layer %0d: %0d cycles, expected %0d to %0d", k + 1, cycles,
                 (total_nnz + NMAC[k] - 1) / NMAC[k], upper);
      end
      $display("layer %2d  S=0.%0d  N=%0d  t(S)=%0d  measured %0d.%02d cycles/window (no sharing: %0d.%02d)",
               k + 1, SPCT[k], NMAC[k],
               (((100 - SPCT[k]) * M) + 100 * NMAC[k] - 1) / (100 * NMAC[k]), cycles / VEC, (cycles % VEC) * 100 / VEC,
               upper / VEC, (upper % VEC) * 100 / VEC);
      done++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (done == L);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
