// bias_rom: bias memory of one parallel unit.
//
// Holds the scalar bias b[c_out] of every output channel handled by this unit
// for every layer, at address l*CPB + g (c_out = g*N_UNITS + unit). The
// thresholding unit adds it to all nine neurons of a window in every time
// step. Like the kernel ROM it is written once by the host before inference
// (this design's choice; the paper calls it a ROM) and read asynchronously.
module bias_rom
  import csnn_pkg::*;
(
  input  logic                clk,
  input  logic                wr_en,
  input  logic [BROM_AW-1:0]  wr_addr,
  input  data_t               wr_data,
  input  logic [BROM_AW-1:0]  raddr,
  output data_t               rdata
);
  data_t mem [BROM_DEPTH];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;

  assign rdata = mem[raddr];
endmodule
