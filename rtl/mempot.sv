// mempot: membrane potential memory of one output channel, interlaced over
// nine column memories.
//
// Each of the NCOL = 9 columns is a simple dual-port RAM (one read, one write
// per cycle) of MP_DEPTH words, addressed by the tile address (i, j) of the
// neuron. A word holds the potential V_m and the m-TTFS spike indicator bit.
// Because of the interlacing, the 9 neurons of any 3x3 window sit in 9
// different columns and can be read and written in the same cycle, so each
// column can be wired permanently to one processing element.
//
// Timing: synchronous read, data valid one cycle after the address
// (req.raddr sampled at the clock edge, rdata valid after it). A read of the
// word written at the same edge returns the old contents (read-first); the
// clients forward around this. Writes take effect at the clock edge.
// The memory is not reset; the thresholding unit clears it by writing zeros
// before every output channel. One column, one RAM, is the paper's
// organisation; read-first behaviour and the word layout are choices of this
// design.
module mempot
  import csnn_pkg::*;
(
  input  logic                 clk,
  input  mp_req_t  [NCOL-1:0]  req,
  output mp_word_t [NCOL-1:0]  rdata
);

  for (genvar s = 0; s < NCOL; s++) begin : g_col
    mp_word_t mem [MP_DEPTH];

    always_ff @(posedge clk) begin
      rdata[s] <= mem[mp_lin(req[s].raddr)];
      if (req[s].we)
        mem[mp_lin(req[s].waddr)] <= req[s].wdata;
    end
  end

endmodule
