// tb_csnn_ctrl: checks the layer / channel / time-step schedule.
//
// The control unit runs the network 28x28-32C3-32C3-P3-10C3-F10 against a
// behavioural datapath that answers a queue read with rd_done after a random
// number of cycles, keeps conv_busy high a few random cycles longer (pipeline
// drain) and answers a thresholding sweep with th_done after a random delay.
// Every command the controller issues (MemPot clear, queue read with its bank,
// queue and kernel address, thresholding with its output queue and bias
// address, classification read) is compared in order with the schedule
// computed here from the loop nest, and the per-group `active` mask, the
// open/close pairing of output queues and the handshakes are checked.
// Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_csnn_ctrl;
  import csnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start = 0, rd_done = 0, conv_busy = 0, th_done = 0;
  layer_cfg_t [N_LAYERS-1:0] cfg;
  layer_cfg_t lcfg;
  logic [KROM_AW-1:0] k_raddr;
  logic [BROM_AW-1:0] b_raddr;
  logic [N_UNITS-1:0] active;
  logic thr_phase, th_start, th_clear, wr_open, wr_close, rd_start, cls_mode, cls_clear, busy, done;
  logic [AEQ_QW-1:0] wr_q, rd_q;
  logic [$clog2(N_UNITS)-1:0] rd_bank;
  logic [CH_W-1:0] cls_ch;

  csnn_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int lc_in[3] = '{1, 32, 32}, lc_out[3] = '{32, 32, 10};

  // command = {kind, a, b, c, d}; kind 0 clear, 1 read, 2 threshold, 3 class read
  typedef struct packed { int kind, a, b, c, d; } cmd_t;
  cmd_t exp_cmds[$], got_cmds[$];

  function automatic int qidx(int par, int cl, int t);
    return (par * CPB + cl) * T_STEPS + t;
  endfunction

  initial begin
    for (int l = 0; l < 3; l++) begin
      for (int g = 0; g * N_UNITS < lc_out[l]; g++) begin
        exp_cmds.push_back('{0, l, g, 0, 0});
        for (int t = 0; t < T_STEPS; t++) begin
          for (int ci = 0; ci < lc_in[l]; ci++)
            exp_cmds.push_back('{1, ci % N_UNITS, qidx(l % 2, ci / N_UNITS, t), (l * CPB + g) * MAX_CH + ci, 0});
          exp_cmds.push_back('{2, qidx(1 - l % 2, g, t), l * CPB + g, 0, 0});
        end
      end
    end
    for (int c = 0; c < lc_out[2]; c++)
      for (int t = 0; t < T_STEPS; t++)
        exp_cmds.push_back('{3, c % N_UNITS, qidx(1, c / N_UNITS, t), c, 0});
  end

  // behavioural datapath
  int rd_wait = -1, busy_wait = -1, th_wait = -1;
  bit q_open = 0;
  int opens = 0, closes = 0, active_bad = 0;
  always @(posedge clk) begin
    if (rd_start) begin
      if (cls_mode) got_cmds.push_back('{3, int'(rd_bank), int'(rd_q), int'(cls_ch), 0});
      else          got_cmds.push_back('{1, int'(rd_bank), int'(rd_q), int'(k_raddr), 0});
    end
    if (th_start && th_clear) got_cmds.push_back('{0, int'(dut.l), int'(dut.g), 0, 0});
    if (th_start && !th_clear) begin
      got_cmds.push_back('{2, int'(wr_q), int'(b_raddr), 0, 0});
      for (int p = 0; p < N_UNITS; p++)
        if (active[p] != ((int'(dut.g) * N_UNITS + p) < lc_out[dut.l])) active_bad++;
    end
    if (wr_open) begin
      if (q_open || !th_start) active_bad++;
      q_open <= 1; opens++;
    end
    if (wr_close) begin
      if (!q_open) active_bad++;
      q_open <= 0; closes++;
    end
  end

  always @(negedge clk) begin
    rd_done = 0; th_done = 0;
    if (rd_start) begin rd_wait = int'($urandom_range(1, 12)); conv_busy = 1; end
    else if (rd_wait > 0) rd_wait--;
    else if (rd_wait == 0) begin rd_done = 1; rd_wait = -1; busy_wait = int'($urandom_range(0, 3)); end
    else if (busy_wait > 0) busy_wait--;
    else if (busy_wait == 0) begin conv_busy = 0; busy_wait = -1; end
    if (th_start) th_wait = int'($urandom_range(2, 8));
    else if (th_wait > 0) th_wait--;
    else if (th_wait == 0) begin th_done = 1; th_wait = -1; end
  end

  int cycles = 0;
  initial begin
    for (int l = 0; l < 3; l++) begin
      cfg[l] = '0;
      cfg[l].c_in = CH_W'(lc_in[l]); cfg[l].c_out = CH_W'(lc_out[l]);
      cfg[l].w = 28; cfg[l].h = 28;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
    check(!busy, "idle after done");
    check(got_cmds.size() == exp_cmds.size(), $sformatf("%0d commands, expected %0d", got_cmds.size(), exp_cmds.size()));
    for (int n = 0; n < exp_cmds.size() && n < got_cmds.size(); n++)
      check(got_cmds[n] == exp_cmds[n], $sformatf("command %0d: %p expected %p", n, got_cmds[n], exp_cmds[n]));
    check(opens == closes && opens == 50, $sformatf("%0d queue opens, %0d closes, expected 50", opens, closes));
    check(active_bad == 0, $sformatf("%0d active-mask or open/close errors", active_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
