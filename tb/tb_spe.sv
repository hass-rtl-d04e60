// tb_spe: the SPE against an independent model of the clipped dot product.
// Phase 1 feeds vectors back to back with the output always drained. A cycle model of
// the scheduler (head vector, prefetched next vector, leftover MACs shared with the
// next vector in the head's last cycle) predicts in_ready in every cycle, which is
// checked, and the cycle in which each result must appear. Phase 2 adds input
// gaps and output backpressure (the Buffer fills and the SPE stalls); only values are
// checked. Vectors span all-zero, dense and clipped cases.
module tb_spe;
  import hass_pkg::*;
  import tb_ref_pkg::*;
  localparam int M = 9, N = 3, BD = 2;
  logic clk = 0, rst_n = 0, in_valid, in_ready, out_valid, out_ready, busy, stall;
  thr_t tau_a, tau_w;
  data_t in_act [M];
  data_t in_wgt [M];
  acc_t out_data;
  longint expq[$];
  int     cycq[$];   // phase 1: cycle in which each result must appear
  int checks = 0, failures = 0, cycle = 0, stalls = 0, nres = 0, multi = 0, allzero = 0;
  int phase, start_cycle, shared = 0;

  spe #(.M(M), .N(N), .BUF_DEPTH(BD)) dut (.clk, .rst_n, .tau_a, .tau_w, .in_valid, .in_ready,
    .in_act, .in_wgt, .out_valid, .out_ready, .out_data, .busy, .stall);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle++;
    if (stall) stalls++;
  end

  task automatic new_vector(input int kind);
    int pz;
    pz = (kind == 0) ? 100 : (kind == 1) ? 0 : 20 + $urandom % 60;
    foreach (in_act[l]) begin
      in_act[l] = data_t'(rnd_val(pz, 300));
      in_wgt[l] = data_t'(rnd_val(pz / 2, 300));
    end
  endtask

  function automatic void model(output longint e, output int t);
    int nnz;
    e = 0; nnz = 0;
    foreach (in_act[l]) begin
      longint a, w;
      a = ref_clip(longint'(in_act[l]), longint'(tau_a));
      w = ref_clip(longint'(in_wgt[l]), longint'(tau_w));
      if (a != 0 && w != 0) nnz++;
      e += a * w;
    end
    t = (nnz == 0) ? 1 : (nnz + N - 1) / N;
  endfunction

  function automatic int model_nnz();
    int nnz;
    nnz = 0;
    foreach (in_act[l])
      if (ref_clip(longint'(in_act[l]), longint'(tau_a)) != 0 &&
          ref_clip(longint'(in_wgt[l]), longint'(tau_w)) != 0) nnz++;
    return nnz;
  endfunction

  // output checker
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    longint e;
    e = expq.pop_front();
    checks++; nres++;
    if (longint'(out_data) != e) begin
      failures++;
      if (failures < 10) $display("FAIL value %0d expected %0d", out_data, e);
    end
    if (phase == 1) begin
      int c;
      c = cycq.pop_front();
      checks++;
      if (cycle != c) begin
        failures++; if (failures < 10) $display("FAIL latency: out at %0d, expected %0d", cycle, c);
      end
    end
  end

  initial begin
    in_valid = 0; out_ready = 1; tau_a = 16'd20; tau_w = 16'd15; phase = 1;
    new_vector(2);
    repeat (2) @(posedge clk);
    rst_n = 1;
    start_cycle = cycle;
    // ---- phase 1: back to back, cycle model of the scheduler
    // State of the model: head vector (hv, hr = non-zero pairs left) and prefetched
    // next vector (nv, nr). In a cycle the head takes gA = min(N, hr) MACs; if that
    // ends it, the next vector takes up to N-gA MACs but leaves one pair. A vector is
    // taken while the next slot is free or the head ends.
    begin
      int k, hv, hr, nv, nr, ga, gb, fin, rdy, nnz, sum_t;
      longint e; int t;
      k = 0; hv = 0; hr = 0; nv = 0; nr = 0; sum_t = 0;
      @(negedge clk);
      new_vector(2);
      in_valid = 1;
      while (k < 300 || hv) begin
        ga  = hv ? ((hr < N) ? hr : N) : 0;
        fin = hv && (ga == hr);
        gb  = (nv && fin && nr > 1) ? (((N - ga) < (nr - 1)) ? (N - ga) : (nr - 1)) : 0;
        rdy = !nv || fin;
        if (gb > 0) shared++;
        checks++;
        if (int'(in_ready) != rdy) begin
          failures++; if (failures < 10) $display("FAIL in_ready %0d expected %0d at %0d", in_ready, rdy, cycle);
        end
        if (fin) cycq.push_back(cycle + 2);
        model(e, t);
        nnz = model_nnz();
        if (fin) begin
          hv = nv; hr = nr - gb; nv = 0;
        end else begin
          hr = hr - ga;
        end
        if (in_valid && rdy) begin
          expq.push_back(e);
          sum_t += t;
          if (t > 1) multi++;
          if (nnz == 0) allzero++;
          if (!hv) begin hv = 1; hr = nnz; end
          else begin nv = 1; nr = nnz; end
          k++;
        end
        @(posedge clk); #1;
        if (in_valid && rdy) begin
          new_vector(k % 5 == 0 ? 0 : k % 5 == 1 ? 1 : 2);
          if (k == 300) in_valid = 0;
        end
      end
      repeat (4) @(posedge clk);
      checks++;
      if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
      $display("phase 1: %0d vectors, sum of per-vector t = %0d, cycles = %0d, shared cycles = %0d",
               300, sum_t, cycle - start_cycle, shared);
    end
    // ---- phase 2: gaps and backpressure
    phase = 2;
    tau_a = 16'd0; tau_w = 16'd40;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      out_ready = ($urandom % 3) == 0;
      new_vector(2);
      #1;
      if (in_valid && in_ready) begin longint e; int t; model(e, t); expq.push_back(e); end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (50) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    checks++;
    if (stalls == 0 || multi == 0 || allzero == 0 || shared == 0) begin failures++; $display("FAIL coverage stalls=%0d multi=%0d allzero=%0d shared=%0d", stalls, multi, allzero, shared); end
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
