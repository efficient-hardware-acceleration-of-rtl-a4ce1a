// tb_mempot: checks the interlaced membrane potential memory.
//
// All nine columns are written with random words at random tile addresses,
// every column with its own address in the same cycle, and read back one
// cycle later (synchronous read). A shadow array is the reference. Also
// checked: a read of the address written in the same cycle returns the old
// word (read-first), and the word appears in the following cycle.
// Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_mempot;
  import csnn_pkg::*;

  logic clk = 0;
  always #1 clk = ~clk;

  mp_req_t  [NCOL-1:0] req;
  mp_word_t [NCOL-1:0] rdata;

  mempot dut (.clk, .req, .rdata);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  mp_word_t shadow[NCOL][TILE_MAX][TILE_MAX];

  function automatic tile_addr_t rnd_addr();
    tile_addr_t a;
    a.i = TA_W'($urandom_range(0, TILE_MAX - 1));
    a.j = TA_W'($urandom_range(0, TILE_MAX - 1));
    return a;
  endfunction

  initial begin
    req = '0;
    // initialise every word
    for (int j = 0; j < TILE_MAX; j++)
      for (int i = 0; i < TILE_MAX; i++) begin
        @(negedge clk);
        for (int s = 0; s < NCOL; s++) begin
          req[s].we = 1;
          req[s].waddr = '{i: TA_W'(i), j: TA_W'(j)};
          req[s].wdata = mp_word_t'($urandom);
          shadow[s][j][i] = req[s].wdata;
        end
      end
    @(negedge clk);
    req = '0;
    // random reads and writes, all columns in parallel
    for (int n = 0; n < 2000; n++) begin
      tile_addr_t ra[NCOL];
      mp_word_t   exp_w[NCOL];
      @(negedge clk);
      for (int s = 0; s < NCOL; s++) begin
        ra[s] = rnd_addr();
        // sometimes write the address being read (read-first)
        req[s].raddr = ra[s];
        req[s].we    = $urandom_range(0, 1);
        req[s].waddr = ($urandom_range(0, 3) == 0) ? ra[s] : rnd_addr();
        req[s].wdata = mp_word_t'($urandom);
        exp_w[s] = shadow[s][ra[s].j][ra[s].i];
      end
      @(posedge clk);
      #0.5;
      for (int s = 0; s < NCOL; s++) begin
        check(rdata[s] == exp_w[s], $sformatf("col %0d (%0d,%0d): %h expected %h", s, ra[s].i, ra[s].j, rdata[s], exp_w[s]));
        if (req[s].we) shadow[s][req[s].waddr.j][req[s].waddr.i] = req[s].wdata;
      end
    end
    // read-after-write in the next cycle returns the new word
    @(negedge clk);
    req = '0;
    req[4].we = 1; req[4].waddr = '{i: 3, j: 7}; req[4].wdata = '{spk: 1'b1, v: -8'sd77};
    @(negedge clk);
    req[4].we = 0; req[4].raddr = '{i: 3, j: 7};
    @(negedge clk);
    check(rdata[4].spk && rdata[4].v == -8'sd77, "word written in the previous cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
