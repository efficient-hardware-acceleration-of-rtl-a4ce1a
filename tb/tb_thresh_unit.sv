// tb_thresh_unit: checks the bias / threshold / max-pool sweep.
//
// A real mempot holds random potentials and spike bits of a W x H fmap. The
// testbench starts sweeps and compares, against values it computes itself
// from a 2D picture of the fmap: the written-back potentials (saturating
// bias addition), the spike bits (V > V_t or already set), the AEQ writes
// (unpooled: one event per firing neuron in its column; pooled: one event
// (i/3, j/3) in column 3*(j%3)+i%3 per tile with any firing neuron), the
// clear sweep, the sweep length (one tile per cycle plus the 5-stage
// pipeline) and the paper's pooling example (0,1)[0..8] -> (0,0)[3].
`timescale 1ns/1ps
module tb_thresh_unit;
  import csnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start = 0, clear = 0, pool_en = 0;
  data_t bias, vt;
  logic [PIX_W-1:0] fmap_w, fmap_h;
  mp_req_t  [NCOL-1:0] mp_req, tb_req, th_req;
  mp_word_t [NCOL-1:0] mp_rdata;
  logic [NCOL-1:0] aeq_we;
  tile_addr_t [NCOL-1:0] aeq_data;
  logic busy, done, st_pool;
  logic [3:0] st_spk, st_sat;
  logic tb_own = 1;

  mempot u_mp (.clk, .req(mp_req), .rdata(mp_rdata));
  assign mp_req = tb_own ? tb_req : th_req;

  thresh_unit dut (.clk, .rst_n, .start, .clear, .bias, .vt, .pool_en, .fmap_w, .fmap_h,
                   .mp_req(th_req), .mp_rdata, .aeq_we, .aeq_data, .busy, .done,
                   .st_spk, .st_pool, .st_sat);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int V [30][30];
  bit S [30][30];
  int ev_cnt [30][30];           // events seen per (pixel or pooled pixel)
  int cycles;

  function automatic int sat8(int a);
    return a > 127 ? 127 : (a < -128 ? -128 : a);
  endfunction

  task automatic load(int w, int h);
    tb_own = 1;
    tb_req = '0;
    @(posedge clk);
    for (int y = 0; y < 30; y++)
      for (int x = 0; x < 30; x++) begin
        V[y][x] = int'($urandom_range(0, 255)) - 128;
        S[y][x] = ($urandom_range(0, 9) == 0);
        for (int m = 0; m < NCOL; m++) tb_req[m].we = 0;
        tb_req[3 * (y % 3) + x % 3].we = 1;
        tb_req[3 * (y % 3) + x % 3].waddr = '{i: TA_W'(x / 3), j: TA_W'(y / 3)};
        tb_req[3 * (y % 3) + x % 3].wdata = '{spk: S[y][x], v: DATA_W'(V[y][x])};
        @(posedge clk);
      end
    tb_req = '0;
    @(posedge clk);
  endtask

  // AEQ write monitor
  always @(posedge clk) if (!tb_own)
    for (int m = 0; m < NCOL; m++)
      if (aeq_we[m]) begin
        if (pool_en) ev_cnt[aeq_data[m].j * 3 + m / 3][aeq_data[m].i * 3 + m % 3]++;
        else         ev_cnt[aeq_data[m].j * 3 + m / 3][aeq_data[m].i * 3 + m % 3]++;
      end

  task automatic sweep(bit clr);
    foreach (ev_cnt[y, x]) ev_cnt[y][x] = 0;
    tb_own = 0;
    clear <= clr; start <= 1; @(posedge clk); start <= 0;
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
    @(posedge clk);
    tb_own = 1;
  endtask

  task automatic read_word(int x, int y, output mp_word_t wd);
    tb_req = '0;
    tb_req[3 * (y % 3) + x % 3].raddr = '{i: TA_W'(x / 3), j: TA_W'(y / 3)};
    @(posedge clk); #0.1;
    wd = mp_rdata[3 * (y % 3) + x % 3];
  endtask

  task automatic run_case(int w, int h, bit pool, int b, int t);
    int tx = (w + 2) / 3, ty = (h + 2) / 3;
    bit fire [30][30];
    fmap_w = PIX_W'(w); fmap_h = PIX_W'(h); pool_en = pool; bias = DATA_W'(b); vt = DATA_W'(t);
    load(w, h);
    sweep(0);

    check(cycles == tx * ty + 5, $sformatf("sweep length %0d expected %0d", cycles, tx * ty + 5));
    for (int y = 0; y < 3 * ty; y++)
      for (int x = 0; x < 3 * tx; x++) begin
        mp_word_t wd;
        int nv = sat8(V[y][x] + b);
        fire[y][x] = (x < w && y < h) && ((nv > t) || S[y][x]);
        read_word(x, y, wd);
        check(int'(wd.v) == nv, $sformatf("V(%0d,%0d)=%0d expected %0d (V=%0d S=%0d)", x, y, wd.v, nv, V[y][x], S[y][x]));
        check(wd.spk == fire[y][x], $sformatf("spike bit (%0d,%0d)", x, y));
      end
    if (!pool) begin
      for (int y = 0; y < 3 * ty; y++)
        for (int x = 0; x < 3 * tx; x++)
          check(ev_cnt[y][x] == int'(fire[y][x]), $sformatf("event (%0d,%0d) count %0d", x, y, ev_cnt[y][x]));
    end else begin
      for (int j = 0; j < ty; j++)
        for (int i = 0; i < tx; i++) begin
          bit any = 0;
          for (int y = 3 * j; y < 3 * j + 3; y++)
            for (int x = 3 * i; x < 3 * i + 3; x++) any |= fire[y][x];
          // pooled pixel (i, j) of the ceil(w/3) x ceil(h/3) fmap
          check(ev_cnt[j][i] == int'(any), $sformatf("pooled event (%0d,%0d) count %0d", i, j, ev_cnt[j][i]));
        end
    end
  endtask

  initial begin
    tb_req = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_case(28, 28, 0, 5, 20);
    run_case(28, 28, 1, -3, 0);
    run_case(10, 7, 0, 100, 60);      // saturating bias
    run_case(10, 10, 1, 0, 127);      // only already-fired neurons fire
    // paper example: every neuron of tile (0,1) fires -> pooled (0,0)[3]
    fmap_w = 28; fmap_h = 28; pool_en = 1; bias = 0; vt = 0;
    tb_own = 1;
    tb_req = '0;
    @(posedge clk);
    for (int y = 0; y < 30; y++) for (int x = 0; x < 30; x++) begin
      tb_req = '0;
      tb_req[3 * (y % 3) + x % 3].we = 1;
      tb_req[3 * (y % 3) + x % 3].waddr = '{i: TA_W'(x / 3), j: TA_W'(y / 3)};
      tb_req[3 * (y % 3) + x % 3].wdata = '{spk: 1'b0, v: (x < 3 && y >= 3 && y < 6) ? 8'sd5 : -8'sd5};
      @(posedge clk);
    end
    tb_req = '0;
    begin
      int seen = 0;
      fork
        sweep(0);
        while (!done) begin
          @(posedge clk);
          if (aeq_we != 0) begin
            seen++;
            check(aeq_we == 9'b000001000 && aeq_data[3] == '{i: 0, j: 0},
                  "pooled example (0,1)[0..8] -> (0,0)[3]");
          end
        end
      join
      check(seen == 1, "pooled example: exactly one event");
    end
    // clear sweep
    sweep(1);
    for (int y = 0; y < 30; y++) for (int x = 0; x < 30; x++) begin
      mp_word_t wd;
      read_word(x, y, wd);
      check(wd == '0, $sformatf("clear (%0d,%0d)", x, y));
    end
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
