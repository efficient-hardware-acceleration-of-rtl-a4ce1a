// tb_conv_unit: checks the event-driven convolution pipeline.
//
// Events (i, j)[s] are fed like an AEQ would (held while `stall` is high) to
// the convolution unit connected to a real mempot that starts at zero. The
// resulting potentials are compared with a frame-based reference: for an
// event at pixel q every in-bounds neighbour p = q + (dx, dy) is incremented
// by the trained kernel element K[1-dy][1-dx] with 8-bit saturation, in
// event order. The unit receives the kernel rotated by 180 degrees, as it is
// stored in the kernel ROM. Streams: random events (back-to-back events of
// different columns produce S2-S3 stalls and S2-S4 forwards), events of one
// column only (must never stall: one event per cycle), border events, and
// the paper's address and permutation example (event (0,0)[5]: column 0
// address i = 1 and K[0] to PE 1; event (0,1)[1]: K[0] to PE 6).
`timescale 1ns/1ps
module tb_conv_unit;
  import csnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic ev_valid = 0;
  tile_addr_t ev;
  logic [3:0] ev_s;
  logic stall, busy, st_accept, st_fwd;
  logic [3:0] st_oob, st_sat;
  logic [PIX_W-1:0] fmap_w, fmap_h;
  kernel_t kernel;
  mp_req_t  [NCOL-1:0] mp_req, cv_req, tb_req;
  mp_word_t [NCOL-1:0] mp_rdata;
  logic tb_own = 1;

  mempot u_mp (.clk, .req(mp_req), .rdata(mp_rdata));
  assign mp_req = tb_own ? tb_req : cv_req;

  conv_unit dut (.clk, .rst_n, .ev_valid, .ev, .ev_s, .stall, .fmap_w, .fmap_h, .kernel,
                 .mp_req(cv_req), .mp_rdata, .busy, .st_accept, .st_fwd, .st_oob, .st_sat);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int Kt[9];                  // trained kernel
  int V [30][30];
  int stalls, fwds;
  always @(posedge clk) begin
    if (stall) stalls++;
    if (st_fwd) fwds++;
  end

  function automatic int sat8(int a);
    return a > 127 ? 127 : (a < -128 ? -128 : a);
  endfunction

  task automatic clear_mem();
    tb_own = 1;
    tb_req = '0;
    @(posedge clk);
    for (int j = 0; j < TILE_MAX; j++)
      for (int i = 0; i < TILE_MAX; i++) begin
        for (int m = 0; m < NCOL; m++) begin
          tb_req[m].we = 1;
          tb_req[m].waddr = '{i: TA_W'(i), j: TA_W'(j)};
          tb_req[m].wdata = '0;
        end
        @(posedge clk);
      end
    tb_req = '0;
    @(posedge clk);
    foreach (V[y, x]) V[y][x] = 0;
  endtask

  task automatic new_kernel(int lo, int hi);
    for (int k = 0; k < 9; k++) Kt[k] = int'($urandom_range(0, hi - lo)) + lo;
    for (int k = 0; k < 9; k++) kernel[k] = DATA_W'(Kt[8 - k]);
  endtask

  // reference update for one event at pixel (x, y)
  task automatic ref_event(int x, int y);
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        int nx = x + dx, ny = y + dy;
        if (nx >= 0 && ny >= 0 && nx < int'(fmap_w) && ny < int'(fmap_h))
          V[ny][nx] = sat8(V[ny][nx] + Kt[3 * (1 - dy) + (1 - dx)]);
      end
  endtask

  // send a list of pixel events; returns cycles from first to last acceptance
  int xs[$], ys[$];
  int accept_cycles;
  task automatic send();
    tb_own = 0;
    accept_cycles = 0;
    foreach (xs[n]) begin
      ev_valid <= 1;
      ev   <= '{i: TA_W'(xs[n] / 3), j: TA_W'(ys[n] / 3)};
      ev_s <= 4'(3 * (ys[n] % 3) + xs[n] % 3);
      @(posedge clk);
      accept_cycles++;
      while (stall) begin @(posedge clk); accept_cycles++; end
      ref_event(xs[n], ys[n]);
    end
    ev_valid <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    @(posedge clk);
    tb_own = 1;
    xs.delete(); ys.delete();
  endtask

  task automatic compare(string tag);
    for (int y = 0; y < int'(fmap_h); y++)
      for (int x = 0; x < int'(fmap_w); x++) begin
        mp_word_t wd;
        tb_req = '0;
        tb_req[3 * (y % 3) + x % 3].raddr = '{i: TA_W'(x / 3), j: TA_W'(y / 3)};
        @(posedge clk); #0.1;
        wd = mp_rdata[3 * (y % 3) + x % 3];
        check(int'(wd.v) == V[y][x], $sformatf("%s V(%0d,%0d)=%0d expected %0d", tag, x, y, wd.v, V[y][x]));
      end
    tb_req = '0;
  endtask

  initial begin
    tb_req = '0;
    ev = '0; ev_s = 0;
    fmap_w = 28; fmap_h = 28;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);

    // paper example (Fig. 9)
    new_kernel(-20, 20);
    ev = '{i: 0, j: 0}; ev_s = 5; #0.1;
    check(dut.s1_addr[0].i == 1 && dut.s1_addr[0].j == 0, "event (0,0)[5]: column 0 at i_mem = 1");
    check(dut.perm[5][1] == kernel[0], "event (0,0)[5]: K[0] to PE 1");
    ev = '{i: 0, j: 1}; ev_s = 1; #0.1;
    check(dut.s1_addr[0].i == 0, "event (0,1)[1]: column 0 at i_mem = 0");
    check(dut.perm[1][6] == kernel[0], "event (0,1)[1]: K[0] to PE 6");
    ev = '{i: 0, j: 0}; ev_s = 0; #0.1;
    check(dut.s1_en[8] == 0, "event (0,0)[0]: column 8 out of bounds");

    // 1) random events, random kernel
    for (int r = 0; r < 4; r++) begin
      clear_mem();
      new_kernel(-30, 30);
      stalls = 0; fwds = 0;
      for (int n = 0; n < 300; n++) begin
        xs.push_back(int'($urandom_range(0, 27)));
        ys.push_back(int'($urandom_range(0, 27)));
      end
      send();
      compare("random");
      check(stalls > 0 && fwds > 0, $sformatf("random stream: stalls %0d forwards %0d", stalls, fwds));
    end

    // 2) one column, all tiles: no hazards, one event per cycle
    clear_mem();
    new_kernel(-5, 5);
    stalls = 0;
    for (int j = 0; j < 9; j++) for (int i = 0; i < 9; i++) begin
      xs.push_back(3 * i + 1); ys.push_back(3 * j + 2);
    end
    send();
    check(stalls == 0, "same-column stream stalled");
    check(accept_cycles == 81, $sformatf("81 events took %0d cycles", accept_cycles));
    compare("column");

    // 3) border and saturation: a small fmap with many events at the corners
    clear_mem();
    fmap_w = 7; fmap_h = 5;
    new_kernel(60, 127);
    for (int n = 0; n < 40; n++) begin
      xs.push_back((n % 2) ? 6 : 0); ys.push_back((n % 3 == 0) ? 4 : 0);
    end
    send();
    compare("border");
    fmap_w = 28; fmap_h = 28;

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
