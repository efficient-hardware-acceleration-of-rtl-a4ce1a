// tb_csnn_unit: checks one parallel unit (AEQ bank, MemPot, kernel and bias
// memories, convolution unit and thresholding unit) on its own.
//
// The unit's AEQ read port is looped back into its own event input, so the
// unit convolves its own input queue. Sequence per case: load a kernel and a
// bias, write T input queues (random pixel events) through the host port,
// clear MemPot, then for every time step stream the input queue through the
// convolution unit, threshold into an output queue, and read that queue back.
// The output events are compared with a frame-based reference (sliding 3x3
// window on a 2D array, bias, V > Vt or already fired), one case without and
// one with 3x3 max-pooling. Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_csnn_unit;
  import csnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic k_we = 0, b_we = 0, thr_phase = 0, active = 1, pool_en = 0;
  logic [KROM_AW-1:0] k_waddr = 0, k_raddr = 0;
  logic [BROM_AW-1:0] b_waddr = 0, b_raddr = 0;
  kernel_t k_wdata;
  data_t b_wdata = 0, vt = 0;
  logic [PIX_W-1:0] fmap_w = 28, fmap_h = 28;
  logic conv_stall, conv_busy, th_start = 0, th_clear = 0, th_done;
  logic wr_open = 0, wr_close = 0, ext_sel = 0, rd_start = 0;
  logic [AEQ_QW-1:0] wr_q = 0, rd_q = 0;
  logic [NCOL-1:0] ext_we = 0;
  tile_addr_t [NCOL-1:0] ext_data;
  logic rd_valid, rd_empty_col, rd_done, st_accept, st_fwd, st_pool;
  tile_addr_t rd_ev;
  logic [3:0] rd_s, st_oob, st_sat, st_spk;
  logic feed = 0;

  csnn_unit dut (
    .clk, .rst_n, .k_we, .k_waddr, .k_wdata, .b_we, .b_waddr, .b_wdata,
    .k_raddr, .b_raddr, .thr_phase, .active, .fmap_w, .fmap_h, .vt, .pool_en,
    .ev_valid(feed && rd_valid), .ev(rd_ev), .ev_s(rd_s), .conv_stall, .conv_busy,
    .th_start, .th_clear, .th_done, .wr_open, .wr_close, .wr_q, .ext_sel, .ext_we, .ext_data,
    .rd_start, .rd_q, .rd_stall(feed && conv_stall), .rd_valid, .rd_ev, .rd_s, .rd_empty_col, .rd_done,
    .st_accept, .st_fwd, .st_oob, .st_sat, .st_spk, .st_pool
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int T = 3;
  int Kt[9], bias, thr, w;
  bit in_sp[T][28][28];
  int V[28][28];
  bit S[28][28];
  bit out_ref[28][28], out_hw[28][28];

  function automatic int sat8(int a);
    return a > 127 ? 127 : (a < -128 ? -128 : a);
  endfunction

  task automatic wait_for(ref logic sig);
    while (!sig) @(negedge clk);
  endtask

  // reference: one time step
  task automatic ref_step(int t, bit pool);
    foreach (out_ref[y, x]) out_ref[y][x] = 0;
    for (int s = 0; s < 9; s++)
      for (int y = 0; y < w; y++)
        for (int x = 0; x < w; x++)
          if (in_sp[t][y][x] && 3 * (y % 3) + x % 3 == s)
            for (int dy = -1; dy <= 1; dy++)
              for (int dx = -1; dx <= 1; dx++)
                if (y + dy >= 0 && x + dx >= 0 && y + dy < w && x + dx < w)
                  V[y + dy][x + dx] = sat8(V[y + dy][x + dx] + Kt[3 * (1 - dy) + (1 - dx)]);
    for (int y = 0; y < w; y++)
      for (int x = 0; x < w; x++) begin
        V[y][x] = sat8(V[y][x] + bias);
        S[y][x] = (V[y][x] > thr) || S[y][x];
        if (S[y][x]) begin
          if (pool) out_ref[y / 3][x / 3] = 1;
          else      out_ref[y][x] = 1;
        end
      end
  endtask

  task automatic run_case(bit pool, int width, int density);
    w = width;
    fmap_w = PIX_W'(w); fmap_h = PIX_W'(w);
    pool_en = pool;
    for (int k = 0; k < 9; k++) Kt[k] = int'($urandom_range(0, 40)) - 12;
    bias = int'($urandom_range(0, 6)) - 4;
    thr = 30;
    vt = data_t'(thr);
    // kernel (rotated by 180 degrees) and bias
    @(negedge clk);
    k_we = 1; k_waddr = 5; for (int k = 0; k < 9; k++) k_wdata[k] = data_t'(Kt[8 - k]);
    b_we = 1; b_waddr = 2; b_wdata = data_t'(bias);
    @(negedge clk);
    k_we = 0; b_we = 0; k_raddr = 5; b_raddr = 2;
    // input queues 0..T-1 through the host port
    foreach (in_sp[t, y, x]) in_sp[t][y][x] = (y < w && x < w) && ($urandom_range(0, 99) < density);
    ext_sel = 1;
    for (int t = 0; t < T; t++) begin
      wr_open = 1; wr_q = AEQ_QW'(t);
      @(negedge clk);
      wr_open = 0;
      for (int y = 0; y < w; y++)
        for (int x = 0; x < w; x++)
          if (in_sp[t][y][x]) begin
            ext_we = '0;
            ext_we[3 * (y % 3) + x % 3] = 1;
            for (int m = 0; m < NCOL; m++) ext_data[m] = '{i: TA_W'(x / 3), j: TA_W'(y / 3)};
            @(negedge clk);
          end
      ext_we = '0;
      @(negedge clk);
      wr_close = 1;
      @(negedge clk);
      wr_close = 0;
    end
    ext_sel = 0;
    // clear MemPot
    foreach (V[y, x]) begin V[y][x] = 0; S[y][x] = 0; end
    thr_phase = 1; th_clear = 1; th_start = 1;
    @(negedge clk);
    th_start = 0;
    wait_for(th_done);
    @(negedge clk);
    th_clear = 0; thr_phase = 0;
    for (int t = 0; t < T; t++) begin
      // convolution of input queue t
      feed = 1; rd_start = 1; rd_q = AEQ_QW'(t);
      @(negedge clk);
      rd_start = 0;
      wait_for(rd_done);
      @(negedge clk);
      while (conv_busy) @(negedge clk);
      feed = 0;
      // threshold into queue 20 + t
      thr_phase = 1; th_start = 1; wr_open = 1; wr_q = AEQ_QW'(20 + t);
      @(negedge clk);
      th_start = 0; wr_open = 0;
      wait_for(th_done);
      @(negedge clk);
      thr_phase = 0; wr_close = 1;
      @(negedge clk);
      wr_close = 0;
      // read the output queue back
      foreach (out_hw[y, x]) out_hw[y][x] = 0;
      rd_start = 1; rd_q = AEQ_QW'(20 + t);
      @(negedge clk);
      rd_start = 0;
      while (!rd_done) begin
        if (rd_valid) out_hw[3 * rd_ev.j + rd_s / 3][3 * rd_ev.i + rd_s % 3] = 1;
        @(negedge clk);
      end
      ref_step(t, pool);
      begin
        int bad = 0, n = 0;
        foreach (out_ref[y, x]) begin
          if (out_ref[y][x] != out_hw[y][x]) bad++;
          n += out_ref[y][x];
        end
        check(bad == 0, $sformatf("pool=%0d t=%0d: %0d of the output pixels differ (%0d events expected)", pool, t, bad, n));
      end
    end
  endtask

  initial begin
    k_wdata = '0; ext_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_case(0, 28, 12);
    run_case(1, 28, 12);
    run_case(0, 10, 30);
    run_case(1, 14, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
