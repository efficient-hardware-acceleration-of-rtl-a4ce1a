// tb_bias_rom: checks the bias memory of one unit.
//
// Every entry is written with a random 8-bit bias through the host
// port, then all entries are read back in random order through the
// asynchronous read port (data valid in the same cycle as the address) and
// compared with a shadow copy. Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_bias_rom;
  import csnn_pkg::*;

  logic clk = 0;
  always #1 clk = ~clk;

  logic wr_en = 0;
  logic [BROM_AW-1:0] wr_addr = 0, raddr = 0;
  data_t wr_data, rdata;

  bias_rom dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  data_t shadow[BROM_DEPTH];

  initial begin
    wr_data = '0;
    for (int a = 0; a < BROM_DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = BROM_AW'(a);
      wr_data = data_t'($urandom);
      shadow[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 2 * BROM_DEPTH; n++) begin
      automatic int a = int'($urandom_range(0, BROM_DEPTH - 1));
      raddr = BROM_AW'(a);
      #0.2;
      check(rdata == shadow[a], $sformatf("entry %0d: %h expected %h", a, rdata, shadow[a]));
      @(negedge clk);
    end
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
