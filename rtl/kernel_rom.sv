// kernel_rom: kernel weight memory of one parallel unit.
//
// Holds the 3x3 kernels K[c_out, c_in, l] of every output channel handled by
// this unit (c_out = g*N_UNITS + unit, g = 0..CPB-1), stored already rotated
// by 180 degrees as the convolution unit expects. One entry is a whole kernel
// (9 weights), so the convolution unit gets all nine weights at once.
// Entry address: (l*CPB + g)*MAX_CH + c_in.
//
// The paper calls this a ROM; its contents come from training, so here it is
// a RAM written once by the host through `wr_*` before inference (this
// design's choice), read asynchronously through `raddr`/`rdata`. The read
// address changes only between input channels, while no event is in flight.
module kernel_rom
  import csnn_pkg::*;
(
  input  logic                clk,
  input  logic                wr_en,
  input  logic [KROM_AW-1:0]  wr_addr,
  input  kernel_t             wr_data,
  input  logic [KROM_AW-1:0]  raddr,
  output kernel_t             rdata
);
  kernel_t mem [KROM_DEPTH];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;

  assign rdata = mem[raddr];
endmodule
