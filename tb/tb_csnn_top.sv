// tb_csnn_top: end-to-end test of the accelerator at its default size.
//
// Runs the network 28x28-32C3-32C3-P3-10C3-F10 for T = 5 time steps with
// random weights, biases and an m-TTFS style random input image (a pixel
// that spikes keeps spiking in later time steps), and compares the ten class
// scores, the class, the number of output events of all layers and of the
// pooled layer with a behavioural reference written independently of the RTL
// (frame-based sliding-window convolution on 2D arrays, the 180-degree
// rotation applied only here). The reference visits the input events of one
// channel in the same order as the queues deliver them (column 0..8, row-major
// inside a column), which makes its saturating sums exact.
//
// It also checks the event-rate claim: the cycles spent reading input queues
// must equal events + empty queue columns + hazard stalls while reading
// (+1 per queue),
// i.e. one event per clock, and counts that every mechanism of the design
// occurred: stalls, forwarding, empty columns, border masking, saturation,
// pooling, m-TTFS re-firing and idle units.
`timescale 1ns/1ps
module tb_csnn_top;
  import csnn_pkg::*;

  localparam int T = T_STEPS;
  localparam int W0 = 28;
  localparam int W2 = 10;                // after 3x3 pooling: ceil(28/3)

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start = 0, busy, done;
  layer_cfg_t [N_LAYERS-1:0] layer_cfg;
  cfg_wr_t cfg_wr;
  logic in_open = 0, in_close = 0, in_valid = 0;
  logic [T_W-1:0] in_t = 0;
  logic [PIX_W-1:0] in_x = 0, in_y = 0;
  logic [3:0] cls;
  logic signed [SCORE_W-1:0] scores [N_CLASSES];
  stats_t stats;

  csnn_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- network and reference state ----------------
  int lc_in [3] = '{1, 32, 32};
  int lc_out[3] = '{32, 32, 10};
  int lw    [3] = '{W0, W0, W2};
  bit lpool [3] = '{0, 1, 0};
  int lvt   [3] = '{40, 40, 30};

  int K [3][32][32][9];          // kernels as trained (not rotated)
  int Bv[3][32];
  int FW[N_CLASSES][FC_IN];

  bit sp_in [T][32][W0][W0];     // events feeding the current layer
  bit sp_out[T][32][W0][W0];
  int ref_events = 0, ref_pooled = 0, ref_refire = 0;
  int ref_lev[3] = '{0, 0, 0};   // output events per layer
  longint ref_score[N_CLASSES];

  function automatic int sat8(int a);
    if (a > 127) return 127;
    if (a < -128) return -128;
    return a;
  endfunction

  task automatic ref_run();
    int V[W0][W0];
    bit S[W0][W0];
    for (int l = 0; l < 3; l++) begin
      int w = lw[l];
      foreach (sp_out[t, c, y, x]) sp_out[t][c][y][x] = 0;
      for (int co = 0; co < lc_out[l]; co++) begin
        foreach (V[y, x]) begin V[y][x] = 0; S[y][x] = 0; end
        for (int t = 0; t < T; t++) begin
          for (int ci = 0; ci < lc_in[l]; ci++)
            for (int s = 0; s < 9; s++)
              for (int y = 0; y < w; y++)
                for (int x = 0; x < w; x++)
                  if (sp_in[t][ci][y][x] && (3 * (y % 3) + x % 3) == s)
                    for (int dy = -1; dy <= 1; dy++)
                      for (int dx = -1; dx <= 1; dx++) begin
                        int ny = y + dy, nx = x + dx;
                        // sliding window: out(p) += K[p-q rotated] for event q
                        if (ny >= 0 && nx >= 0 && ny < w && nx < w)
                          V[ny][nx] = sat8(V[ny][nx] + K[l][co][ci][3 * (1 - dy) + (1 - dx)]);
                      end
          for (int y = 0; y < w; y++)
            for (int x = 0; x < w; x++) begin
              bit f;
              V[y][x] = sat8(V[y][x] + Bv[l][co]);
              f = (V[y][x] > lvt[l]) || S[y][x];
              if (f && S[y][x]) ref_refire++;
              S[y][x] = f;
              if (f) begin
                if (lpool[l]) sp_out[t][co][y / 3][x / 3] = 1;
                else begin sp_out[t][co][y][x] = 1; ref_events++; ref_lev[l]++; end
              end
            end
        end
      end
      if (lpool[l])
        foreach (sp_out[t, c, y, x]) if (sp_out[t][c][y][x]) begin ref_events++; ref_pooled++; ref_lev[l]++; end
      sp_in = sp_out;
    end
    foreach (ref_score[k]) ref_score[k] = 0;
    for (int t = 0; t < T; t++)
      for (int c = 0; c < 10; c++)
        for (int y = 0; y < W2; y++)
          for (int x = 0; x < W2; x++)
            if (sp_in[t][c][y][x])
              for (int k = 0; k < N_CLASSES; k++)
                ref_score[k] += FW[k][(c * FC_EDGE + y) * FC_EDGE + x];
  endtask

  // ---------------- host helpers ----------------
  task automatic host_wr(cfg_sel_e sel, int unit, int cl, int addr, kernel_t d);
    cfg_wr_t w;
    w.we = 1; w.sel = sel; w.unit = 3'(unit); w.cls = 4'(cl);
    w.addr = 16'(addr); w.data = d;
    // driven on the falling edge, sampled by the next rising edge
    @(negedge clk);
    cfg_wr = w;
  endtask

  // ---------------- measurement ----------------
  longint ci_wait_cycles = 0, ci_stalls = 0, queues_read = 0, empty_conv = 0, idle_unit_sweeps = 0;
  int hw_lev[4] = '{0, 0, 0, 0};
  always @(posedge clk) if (busy && rst_n) begin
    for (int p = 0; p < N_UNITS; p++) hw_lev[dut.u_ctrl.l] += int'(dut.st_spk[p]);
    if (int'(dut.u_ctrl.st) == 4) ci_wait_cycles++;
    if (int'(dut.u_ctrl.st) == 4 && dut.ev_stall && !dut.rd_done_any) ci_stalls++;
    if (int'(dut.u_ctrl.st) == 3) queues_read++;
    if (!dut.cls_mode && dut.rd_empty[dut.rd_bank]) empty_conv++;
    if (dut.th_start && !dut.th_clear && dut.active != '1) idle_unit_sweeps++;
  end

  initial begin
    cfg_wr = '0;
    for (int l = 0; l < 3; l++) begin
      layer_cfg[l].c_in  = CH_W'(lc_in[l]);
      layer_cfg[l].c_out = CH_W'(lc_out[l]);
      layer_cfg[l].w     = PIX_W'(lw[l]);
      layer_cfg[l].h     = PIX_W'(lw[l]);
      layer_cfg[l].pool  = lpool[l];
      layer_cfg[l].vt    = DATA_W'(lvt[l]);
    end
    // random parameters
    foreach (K[l, co, ci, k]) K[l][co][ci][k] = int'($urandom_range(0, 36)) - 14;
    foreach (Bv[l, co]) Bv[l][co] = int'($urandom_range(0, 6)) - 4;
    foreach (FW[k, n]) FW[k][n] = int'($urandom_range(0, 255)) - 128;
    // m-TTFS input: first spike time 0..4 for ~9% of pixels, then every step
    foreach (sp_in[t, c, y, x]) sp_in[t][c][y][x] = 0;
    for (int y = 0; y < W0; y++)
      for (int x = 0; x < W0; x++)
        if ($urandom_range(0, 99) < 9) begin
          automatic int tf = int'($urandom_range(0, T - 1));
          for (int t = tf; t < T; t++) sp_in[t][0][y][x] = 1;
        end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // load ROMs (kernels rotated by 180 degrees) and FC weights
    for (int l = 0; l < 3; l++)
      for (int co = 0; co < lc_out[l]; co++) begin
        kernel_t kr;
        for (int ci = 0; ci < lc_in[l]; ci++) begin
          for (int k = 0; k < 9; k++) kr[k] = DATA_W'(K[l][co][ci][8 - k]);
          host_wr(SEL_KERNEL, co % N_UNITS, 0, (l * CPB + co / N_UNITS) * MAX_CH + ci, kr);
        end
        kr = '0; kr[0] = DATA_W'(Bv[l][co]);
        host_wr(SEL_BIAS, co % N_UNITS, 0, l * CPB + co / N_UNITS, kr);
      end
    for (int k = 0; k < N_CLASSES; k++)
      for (int n = 0; n < FC_IN; n++) begin
        kernel_t kr = '0;
        kr[0] = DATA_W'(FW[k][n]);
        host_wr(SEL_FC, 0, k, n, kr);
      end
    @(negedge clk);
    cfg_wr = '0;
    @(posedge clk);

    // write the input queues, one per time step
    for (int t = 0; t < T; t++) begin
      in_t <= T_W'(t); in_open <= 1; @(posedge clk); in_open <= 0;
      for (int y = 0; y < W0; y++)
        for (int x = 0; x < W0; x++)
          if (sp_in[t][0][y][x]) begin
            in_valid <= 1; in_x <= PIX_W'(x); in_y <= PIX_W'(y); @(posedge clk);
          end
      in_valid <= 0; @(posedge clk);
      in_close <= 1; @(posedge clk); in_close <= 0;
    end

    ref_run();

    start <= 1; @(posedge clk); start <= 0;
    wait (done);
    @(posedge clk);

    for (int k = 0; k < N_CLASSES; k++)
      check(longint'(scores[k]) == ref_score[k],
            $sformatf("score[%0d] %0d expected %0d", k, scores[k], ref_score[k]));
    begin
      int best = 0;
      for (int k = 1; k < N_CLASSES; k++) if (ref_score[k] > ref_score[best]) best = k;
      check(cls == 4'(best), $sformatf("class %0d expected %0d", cls, best));
    end
    for (int l = 0; l < 3; l++)
      check(hw_lev[l] == ref_lev[l], $sformatf("layer %0d: %0d output events, expected %0d", l, hw_lev[l], ref_lev[l]));
    check(stats.spikes == 32'(ref_events), $sformatf("events %0d expected %0d", stats.spikes, ref_events));
    check(stats.pooled == 32'(ref_pooled), $sformatf("pooled %0d expected %0d", stats.pooled, ref_pooled));
    // one clock per event: queue reading time = events + empty columns + stalls + 1 per queue
    // (a stall in the cycle after the last entry holds back nothing)
    check(ci_wait_cycles == longint'(stats.conv_events) + empty_conv + ci_stalls + queues_read,
          $sformatf("queue read cycles %0d != events %0d + empty %0d + stalls %0d + queues %0d",
                    ci_wait_cycles, stats.conv_events, empty_conv, ci_stalls, queues_read));
    check(stats.stalls > 0,     "no S2-S3 stall happened");
    check(stats.forwards > 0,   "no S2-S4 forward happened");
    check(empty_conv > 0,       "no empty queue column was read");
    check(stats.oob > 0,        "no border masking happened");
    check(stats.sat > 0,        "no saturation happened");
    check(stats.pooled > 0,     "no pooled event");
    check(ref_refire > 0,       "no m-TTFS re-firing");
    check(idle_unit_sweeps > 0, "no sweep with idle units");
    $display("queues=%0d read_cycles=%0d empty_conv=%0d idle_sweeps=%0d", queues_read, ci_wait_cycles, empty_conv, idle_unit_sweeps);
    $display("cycles=%0d conv_events=%0d empty_cols=%0d stalls=%0d forwards=%0d oob=%0d sat=%0d spikes=%0d pooled=%0d refire=%0d",
             stats.cycles, stats.conv_events, stats.empty_cols, stats.stalls, stats.forwards,
             stats.oob, stats.sat, stats.spikes, stats.pooled, ref_refire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
