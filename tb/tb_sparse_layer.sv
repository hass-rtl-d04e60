// tb_sparse_layer: a small layer (M=9, N=3, 2x3 SPEs, FOLD=2, GROUPS=2) with random
// sparse weights and activations. Beats follow the layer's order (position, filter
// group, fold); every output beat is compared with a model of the clipped
// convolution, summed over folds and input bundles and requantised. Random input gaps
// and output backpressure make the SPEs drift apart and stall.
module tb_sparse_layer;
  import hass_pkg::*;
  import tb_ref_pkg::*;
  localparam int M = 9, N = 3, IP = 2, OP = 3, F = 2, G = 2, P = 40;
  logic clk = 0, rst_n = 0;
  thr_t tau_a = 16'd10, tau_w = 16'd12;
  logic wr_en;
  logic [0:0] wr_i;
  logic [1:0] wr_o, wr_addr;
  data_t wr_data [M];
  logic in_valid, in_ready, out_valid, out_ready, stall_any, busy_any;
  data_t in_act [IP][M];
  data_t out_data [OP];
  shortint W [IP][OP][F*G][M];
  shortint A [P][F][IP][M];
  int checks = 0, failures = 0, stalls = 0, outs = 0;

  sparse_layer #(.M(M), .N(N), .I_PAR(IP), .O_PAR(OP), .FOLD(F), .GROUPS(G), .BUF_DEPTH(2)) dut (
    .clk, .rst_n, .tau_a, .tau_w, .wr_en, .wr_i, .wr_o, .wr_addr, .wr_data,
    .in_valid, .in_ready, .in_act, .out_valid, .out_ready, .out_data, .stall_any, .busy_any);

  always #5 clk = ~clk;
  always @(posedge clk) if (stall_any) stalls++;

  function automatic longint expect_out(int p, int g, int o);
    longint s;
    s = 0;
    for (int f = 0; f < F; f++)
      for (int i = 0; i < IP; i++)
        for (int l = 0; l < M; l++)
          s += ref_clip(longint'(A[p][f][i][l]), longint'(tau_a)) *
               ref_clip(longint'(W[i][o][g*F+f][l]), longint'(tau_w));
    return ref_requant(s, FRAC_W);
  endfunction

  // output checker
  initial begin
    for (int p = 0; p < P; p++)
      for (int g = 0; g < G; g++) begin
        do @(negedge clk); while (!(out_valid && out_ready));
        for (int o = 0; o < OP; o++) begin
          checks++;
          if (longint'(out_data[o]) != expect_out(p, g, o)) begin
            failures++;
            if (failures < 10) $display("FAIL p=%0d g=%0d o=%0d got %0d exp %0d", p, g, o, out_data[o], expect_out(p, g, o));
          end
        end
        outs++;
      end
  end

  initial out_ready = 0;
  always @(posedge clk) #2 out_ready = ($urandom % 3) != 0;

  initial begin
    in_valid = 0; wr_en = 0; wr_i = 0; wr_o = 0; wr_addr = 0;
    foreach (wr_data[l]) wr_data[l] = 0;
    foreach (in_act[i, l]) in_act[i][l] = 0;
    foreach (W[i, o, a, l]) W[i][o][a][l] = rnd_val(40, 400);
    foreach (A[p, f, i, l]) A[p][f][i][l] = rnd_val((p % 4) * 25, 400);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load weights
    for (int i = 0; i < IP; i++)
      for (int o = 0; o < OP; o++)
        for (int a = 0; a < F*G; a++) begin
          @(negedge clk);
          wr_en = 1; wr_i = 1'(i); wr_o = 2'(o); wr_addr = 2'(a);
          foreach (wr_data[l]) wr_data[l] = data_t'(W[i][o][a][l]);
        end
    @(negedge clk);
    wr_en = 0;
    // stream beats
    for (int p = 0; p < P; p++)
      for (int g = 0; g < G; g++)
        for (int f = 0; f < F; f++) begin
          @(negedge clk);
          while (($urandom % 5) == 0) @(negedge clk);
          in_valid = 1;
          foreach (in_act[i, l]) in_act[i][l] = data_t'(A[p][f][i][l]);
          // in_ready is sampled at the falling edge, when out_ready no longer moves
          while (!in_ready) @(negedge clk);
          @(posedge clk);
          #1 in_valid = 0;
        end
    wait (outs == P * G);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
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
