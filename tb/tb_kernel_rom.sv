// tb_kernel_rom: checks the kernel memory of one unit.
//
// Every entry is written with a random 9-weight kernel through the host
// port, then all entries are read back in random order through the
// asynchronous read port (data valid in the same cycle as the address) and
// compared with a shadow copy. Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_kernel_rom;
  import csnn_pkg::*;

  logic clk = 0;
  always #1 clk = ~clk;

  logic wr_en = 0;
  logic [KROM_AW-1:0] wr_addr = 0, raddr = 0;
  kernel_t wr_data, rdata;

  kernel_rom dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  kernel_t shadow[KROM_DEPTH];

  initial begin
    wr_data = '0;
    for (int a = 0; a < KROM_DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = KROM_AW'(a);
      for (int k = 0; k < NCOL; k++) wr_data[k] = data_t'($urandom);
      shadow[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 2 * KROM_DEPTH; n++) begin
      automatic int a = int'($urandom_range(0, KROM_DEPTH - 1));
      raddr = KROM_AW'(a);
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
