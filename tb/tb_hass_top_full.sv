// tb_hass_top_full: end-to-end test of the accelerator pipeline (convolutional layer, inter-layer
// FIFO, fully connected layer) with every parameter at its default (128 convolution
// SPEs of 7 MACs, 64-wide fully connected vectors). Random sparse weights are loaded into
// every SPE's weight memory, then IMAGES inputs are streamed: for each of FC_FOLD output
// positions, for each filter group, CONV_FOLD beats of CONV_I_PAR windows. Every output
// of the fully connected layer is compared with a model that clips, convolves,
// requantises, flattens and applies the fully connected layer. The output is held
// back for two bursts out of every three, starting at reset, so that back-pressure
// reaches the convolutional layer and the input. The testbench counts
// how often each mechanism of the design occurs and fails if one never does: zero
// skipping, clipping, multi-cycle vectors, all-zero vectors, folding, a vector's last
// cycle shared with the next vector, SPE buffer stalls, a full inter-layer FIFO and
// input back-pressure.
module tb_hass_top_full;
  import hass_pkg::*;
  import tb_ref_pkg::*;
  localparam int CM = 9;
  localparam int CI = 2, CO = 64, CF = 32, CG = 1;
  localparam int FM = CO, FO = 10, FF = 4;
  localparam int IMAGES = 8;
  localparam int CAW = (CF * CG > 1) ? $clog2(CF * CG) : 1;
  localparam int CIW = (CI > 1) ? $clog2(CI) : 1;
  localparam int COW = (CO > 1) ? $clog2(CO) : 1;
  localparam int FAW = (FF > 1) ? $clog2(FF) : 1;
  localparam int FOW = (FO > 1) ? $clog2(FO) : 1;
  localparam int POS = FF / CG;   // output positions per image

  logic clk = 0, rst_n = 0;
  thr_t conv_tau_a = 16'd8, conv_tau_w = 16'd10, fc_tau_a = 16'd4, fc_tau_w = 16'd6;
  logic conv_wr_en = 0, fc_wr_en = 0;
  logic [CIW-1:0] conv_wr_i = '0;
  logic [COW-1:0] conv_wr_o = '0;
  logic [CAW-1:0] conv_wr_addr = '0;
  data_t conv_wr_data [CM];
  logic [FOW-1:0] fc_wr_o = '0;
  logic [FAW-1:0] fc_wr_addr = '0;
  data_t fc_wr_data [FM];
  logic conv_in_valid = 0, conv_in_ready;
  data_t conv_in_act [CI][CM];
  logic out_valid, out_ready;
  data_t out_data [FO];
  logic conv_stall, fc_stall, conv_busy, fc_busy;

  shortint CW [CI][CO][CF*CG][CM];
  shortint FW [FO][FF][FM];
  shortint A [IMAGES][POS][CF][CI][CM];
  longint  expect_q [$];
  int checks = 0, failures = 0, outs = 0, cycle = 0;
  int n_zero_skip = 0, n_clip = 0, n_multi = 0, n_allzero = 0, n_fold = 0;
  int n_conv_stall = 0, n_fc_stall = 0, n_il_full = 0, n_in_bp = 0, n_share = 0;

  hass_top dut (
    .clk, .rst_n, .conv_tau_a, .conv_tau_w, .fc_tau_a, .fc_tau_w,
    .conv_wr_en, .conv_wr_i, .conv_wr_o, .conv_wr_addr, .conv_wr_data,
    .fc_wr_en, .fc_wr_o, .fc_wr_addr, .fc_wr_data,
    .conv_in_valid, .conv_in_ready, .conv_in_act,
    .out_valid, .out_ready, .out_data, .conv_stall, .fc_stall, .conv_busy, .fc_busy);

  always #5 clk = ~clk;

  // ---- mechanism counters (SPE (0,0) of each layer, layer status, FIFO between layers)
  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (conv_stall) n_conv_stall++;
    if (fc_stall) n_fc_stall++;
    if (dut.u_il_fifo.in_valid && !dut.u_il_fifo.in_ready) n_il_full++;
    if (conv_in_valid && !conv_in_ready) n_in_bp++;
    if (dut.u_conv.g_i[0].g_o[0].u_spe.load) begin
      n_zero_skip += $countones(dut.u_conv.g_i[0].g_o[0].u_spe.zflag);
      if (dut.u_conv.g_i[0].g_o[0].u_spe.nzmask == '0) n_allzero++;
      if ($countones(dut.u_conv.g_i[0].g_o[0].u_spe.nzmask) > 7) n_multi++;
      for (int l = 0; l < CM; l++)
        if (dut.u_conv.g_i[0].g_o[0].u_spe.in_act[l] != 0 && dut.u_conv.g_i[0].g_o[0].u_spe.c_act[l] == 0) n_clip++;
    end
    if (dut.u_fc.g_i[0].g_o[0].u_spe.load)
      for (int l = 0; l < FM; l++)
        if (dut.u_fc.g_i[0].g_o[0].u_spe.in_act[l] != 0 && dut.u_fc.g_i[0].g_o[0].u_spe.c_act[l] == 0) n_clip++;
    if (dut.u_conv.g_i[0].g_o[0].u_acc.out_valid && dut.u_conv.g_i[0].g_o[0].u_acc.out_ready) n_fold++;
    if (dut.u_conv.g_i[0].g_o[0].u_spe.advance && dut.u_conv.g_i[0].g_o[0].u_spe.g_next != 0) n_share++;
    if (dut.u_fc.g_i[0].g_o[0].u_spe.advance && dut.u_fc.g_i[0].g_o[0].u_spe.g_next != 0) n_share++;
  end

  // ---- reference model
  task automatic model_image(int img);
    longint cv [FF][FM];
    for (int p = 0; p < POS; p++)
      for (int g = 0; g < CG; g++)
        for (int o = 0; o < CO; o++) begin
          longint s;
          s = 0;
          for (int f = 0; f < CF; f++)
            for (int i = 0; i < CI; i++)
              for (int l = 0; l < CM; l++)
                s += ref_clip(longint'(A[img][p][f][i][l]), longint'(conv_tau_a)) *
                     ref_clip(longint'(CW[i][o][g*CF+f][l]), longint'(conv_tau_w));
          cv[p*CG+g][o] = ref_requant(s, FRAC_W);
        end
    for (int o = 0; o < FO; o++) begin
      longint s;
      s = 0;
      for (int b = 0; b < FF; b++)
        for (int c = 0; c < FM; c++)
          s += ref_clip(cv[b][c], longint'(fc_tau_a)) * ref_clip(longint'(FW[o][b][c]), longint'(fc_tau_w));
      expect_q.push_back(ref_requant(s, FRAC_W));
    end
  endtask

  // ---- output side: bursts of back-pressure, checks
  initial begin
    out_ready = 0;
    forever begin
      @(posedge clk); #2;
      out_ready = ((cycle / 1000) % 3) == 2;
    end
  end
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    for (int o = 0; o < FO; o++) begin
      longint e;
      e = expect_q.pop_front();
      checks++;
      if (longint'(out_data[o]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL output %0d[%0d]: got %0d expected %0d", outs, o, out_data[o], e);
      end
    end
    outs++;
  end

  initial begin
    foreach (conv_wr_data[l]) conv_wr_data[l] = 0;
    foreach (fc_wr_data[l]) fc_wr_data[l] = 0;
    foreach (conv_in_act[i, l]) conv_in_act[i][l] = 0;
    foreach (CW[i, o, a, l]) CW[i][o][a][l] = rnd_val((a % 4 == 0) ? 0 : 45, 300);
    foreach (FW[o, b, c]) FW[o][b][c] = rnd_val(50, 200);
    foreach (A[n, p, f, i, l]) A[n][p][f][i][l] = rnd_val((f % 4 == 3 || (p % 3 == 2 && f == CF - 1)) ? 100 : (f % 4) * 30, 300);
    for (int n = 0; n < IMAGES; n++) model_image(n);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weight loading
    for (int i = 0; i < CI; i++)
      for (int o = 0; o < CO; o++)
        for (int a = 0; a < CF*CG; a++) begin
          @(negedge clk);
          conv_wr_en = 1; conv_wr_i = CIW'(i); conv_wr_o = COW'(o); conv_wr_addr = CAW'(a);
          foreach (conv_wr_data[l]) conv_wr_data[l] = data_t'(CW[i][o][a][l]);
        end
    for (int o = 0; o < FO; o++)
      for (int b = 0; b < FF; b++) begin
        @(negedge clk);
        conv_wr_en = 0;
        fc_wr_en = 1; fc_wr_o = FOW'(o); fc_wr_addr = FAW'(b);
        foreach (fc_wr_data[c]) fc_wr_data[c] = data_t'(FW[o][b][c]);
      end
    @(negedge clk);
    conv_wr_en = 0; fc_wr_en = 0;
    // input stream
    for (int n = 0; n < IMAGES; n++)
      for (int p = 0; p < POS; p++)
        for (int g = 0; g < CG; g++)
          for (int f = 0; f < CF; f++) begin
            @(negedge clk);
            conv_in_valid = 1;
            foreach (conv_in_act[i, l]) conv_in_act[i][l] = data_t'(A[n][p][f][i][l]);
            while (!conv_in_ready) @(negedge clk);
            @(posedge clk);
            #1 conv_in_valid = 0;
          end
    wait (outs == IMAGES);
    repeat (5) @(posedge clk);
    checks++;
    if (expect_q.size() != 0 || out_valid) begin failures++; $display("FAIL extra or missing outputs"); end
    $display("mechanisms: zero_skip=%0d clip=%0d multi_cycle=%0d all_zero=%0d fold=%0d shared_last_cycle=%0d conv_stall=%0d fc_stall=%0d il_fifo_full=%0d input_backpressure=%0d cycles=%0d",
             n_zero_skip, n_clip, n_multi, n_allzero, n_fold, n_share, n_conv_stall, n_fc_stall, n_il_full, n_in_bp, cycle);
    checks += 10;
    if (n_zero_skip == 0) failures++;
    if (n_clip == 0) failures++;
    if (n_multi == 0) failures++;
    if (n_allzero == 0) failures++;
    if (n_fold == 0) failures++;
    if (n_share == 0) failures++;
    if (n_conv_stall == 0) failures++;
    if (n_fc_stall == 0) failures++;
    if (n_il_full == 0) failures++;
    if (n_in_bp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
