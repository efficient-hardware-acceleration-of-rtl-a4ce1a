// tb_aeq: checks the interlaced address event queue bank.
//
// Several queues are filled with random events (0 to 12 per column, up to
// nine columns written in the same cycle), some columns left empty, then read
// back with random consumer stalls. Checks: every column returns its events
// in write order with the right column number, queues do not disturb each
// other, and the read takes exactly (events + empty columns + stall cycles)
// cycles, i.e. one event per clock and one wasted cycle per empty column.
// Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_aeq;
  import csnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic wr_open = 0, wr_close = 0, rd_start = 0, rd_stall = 0;
  logic [AEQ_QW-1:0] wr_q = 0, rd_q = 0;
  logic [NCOL-1:0] wr_we = 0;
  tile_addr_t [NCOL-1:0] wr_data;
  logic rd_valid, rd_empty_col, rd_busy, rd_done;
  tile_addr_t rd_ev;
  logic [3:0] rd_s;

  aeq dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  tile_addr_t exp_q[AEQ_QUEUES][NCOL][$];

  task automatic fill(int q);
    int n[NCOL];
    int left;
    foreach (n[s]) n[s] = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(1, 12));
    @(negedge clk); wr_open = 1; wr_q = AEQ_QW'(q);
    @(negedge clk); wr_open = 0;
    foreach (exp_q[q][s]) exp_q[q][s].delete();
    do begin
      left = 0;
      for (int s = 0; s < NCOL; s++) begin
        wr_we[s] = 0;
        if (n[s] > 0 && $urandom_range(0, 1)) begin
          tile_addr_t a;
          a.i = TA_W'($urandom_range(0, TILE_MAX - 1));
          a.j = TA_W'($urandom_range(0, TILE_MAX - 1));
          wr_we[s] = 1; wr_data[s] = a;
          exp_q[q][s].push_back(a);
          n[s]--;
        end
        left += n[s];
      end
      @(negedge clk);
    end while (left > 0 || wr_we != 0);
    wr_we = 0;
    @(negedge clk); wr_close = 1;
    @(negedge clk); wr_close = 0;
  endtask

  task automatic drain(int q);
    int cycles = 0, stalls = 0, events = 0, empties = 0, got[NCOL];
    foreach (got[s]) got[s] = 0;
    @(negedge clk); rd_start = 1; rd_q = AEQ_QW'(q);
    @(negedge clk); rd_start = 0;
    while (!rd_done) begin
      rd_stall = ($urandom_range(0, 4) == 0);
      #0.5;
      cycles++;
      if (rd_stall) stalls++;
      else if (rd_valid) begin
        events++;
        check(got[rd_s] < exp_q[q][rd_s].size(), $sformatf("q%0d col %0d: extra event", q, rd_s));
        if (got[rd_s] < exp_q[q][rd_s].size())
          check(rd_ev == exp_q[q][rd_s][got[rd_s]],
                $sformatf("q%0d col %0d entry %0d: %p expected %p", q, rd_s, got[rd_s], rd_ev, exp_q[q][rd_s][got[rd_s]]));
        got[rd_s]++;
      end else if (rd_empty_col) empties++;
      @(negedge clk);
    end
    rd_stall = 0;
    for (int s = 0; s < NCOL; s++)
      check(got[s] == exp_q[q][s].size(), $sformatf("q%0d col %0d: %0d events, expected %0d", q, s, got[s], exp_q[q][s].size()));
    begin
      int exp_empty = 0;
      for (int s = 0; s < NCOL; s++) if (exp_q[q][s].size() == 0) exp_empty++;
      check(empties == exp_empty, $sformatf("q%0d: %0d empty columns, expected %0d", q, empties, exp_empty));
      check(cycles == events + empties + stalls,
            $sformatf("q%0d: %0d read cycles for %0d events, %0d empty, %0d stalls", q, cycles, events, empties, stalls));
    end
  endtask

  initial begin
    wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      int qs[4] = '{0, 7, 23, AEQ_QUEUES - 1};
      foreach (qs[k]) fill(qs[k]);
      foreach (qs[k]) drain(qs[(k + r) % 4]);
    end
    // a completely empty queue costs nine cycles
    @(negedge clk); wr_open = 1; wr_q = 5;
    @(negedge clk); wr_open = 0; wr_close = 1;
    @(negedge clk); wr_close = 0;
    foreach (exp_q[5][s]) exp_q[5][s].delete();
    drain(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
