// aeq: address event queue bank, interlaced over nine column memories.
//
// A binary fmap is stored as queues of address events: a spike of the neuron
// in tile (i, j), column s, is the entry (i, j) in queue column s. One bank
// holds AEQ_QUEUES such queues (one per layer parity, local channel and time
// step), each with a fixed region of MP_DEPTH entries per column, which is
// enough for a completely full fmap.
//
// Write side (used by a thresholding unit or by the host input port):
//   wr_open  pulse with wr_q: start filling queue wr_q, all 9 column write
//            counters go to 0.
//   wr_we[s] / wr_data[s]: append one event to column s; up to 9 in a cycle.
//   wr_close pulse: terminate all 9 columns. The last event of each column is
//            held back one write so that it can be stored with its
//            end-of-queue (eoq) bit set; an empty column gets a single entry
//            with valid = 0 and eoq = 1. wr_close must come at least one cycle
//            after the last wr_we.
// Read side (drives the convolution units or the classification unit):
//   rd_start pulse with rd_q: read queue rd_q column 0 to 8, one entry per
//            cycle. rd_valid/rd_ev/rd_s present the current entry; it is
//            consumed in every cycle in which rd_stall is low. An entry with
//            eoq set moves to the next column; an empty column costs one
//            cycle. rd_done pulses when column 8 ends.
// The column memories are read asynchronously (distributed RAM style), so a
// held entry stays visible while the consumer stalls.
//
// From the paper: the interlaced columns, 9 parallel write counters with
// write enables, one read counter plus a column-select counter, valid and
// end-of-queue bits and the wasted cycle for an empty column. This design's
// own choices: fixed per-queue regions instead of packed queues, the
// hold-back register used to set the eoq bit, and the asynchronous read.
module aeq
  import csnn_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  // write side
  input  logic                       wr_open,
  input  logic [AEQ_QW-1:0]          wr_q,
  input  logic [NCOL-1:0]            wr_we,
  input  tile_addr_t [NCOL-1:0]      wr_data,
  input  logic                       wr_close,
  // read side
  input  logic                       rd_start,
  input  logic [AEQ_QW-1:0]          rd_q,
  input  logic                       rd_stall,
  output logic                       rd_valid,
  output tile_addr_t                 rd_ev,
  output logic [3:0]                 rd_s,
  output logic                       rd_empty_col,
  output logic                       rd_busy,
  output logic                       rd_done
);

  localparam int CW = $clog2(MP_DEPTH + 1);

  // ---------------- write logic ----------------
  logic [AEQ_AW-1:0] wbase;
  logic              wopen;
  // read-side state, declared here because every column reads with it
  logic [AEQ_AW-1:0] rbase;
  logic [CW-1:0]     rcnt;
  aeq_entry_t [NCOL-1:0] col_out;

  for (genvar s = 0; s < NCOL; s++) begin : g_col
    aeq_entry_t     mem [AEQ_DEPTH];
    logic [CW-1:0]  wcnt;
    logic           pend_v;
    tile_addr_t     pend;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wcnt   <= '0;
        pend_v <= 1'b0;
        pend   <= '0;
      end else if (wr_open) begin
        wcnt   <= '0;
        pend_v <= 1'b0;
      end else if (wr_close) begin
        pend_v <= 1'b0;
      end else if (wr_we[s]) begin
        pend   <= wr_data[s];
        pend_v <= 1'b1;
        if (pend_v) wcnt <= wcnt + 1'b1;
      end
    end

    always_ff @(posedge clk) begin
      if (wopen && wr_close)
        mem[wbase + AEQ_AW'(wcnt)] <= pend_v ? aeq_entry_t'{1'b1, 1'b1, pend}
                                             : aeq_entry_t'{1'b0, 1'b1, '0};
      else if (wopen && wr_we[s] && pend_v)
        mem[wbase + AEQ_AW'(wcnt)] <= aeq_entry_t'{1'b1, 1'b0, pend};
    end

    assign col_out[s] = mem[rbase + AEQ_AW'(rcnt)];

    // A column never holds more events than there are tiles.
    assert property (@(posedge clk) disable iff (!rst_n)
                     (wr_we[s] && pend_v) |-> wcnt < CW'(MP_DEPTH - 1))
      else $error("aeq: column %0d overflow", s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbase <= '0;
      wopen <= 1'b0;
    end else if (wr_open) begin
      wbase <= AEQ_AW'(wr_q) * AEQ_AW'(MP_DEPTH);
      wopen <= 1'b1;
    end else if (wr_close) begin
      wopen <= 1'b0;
    end
  end

  // ---------------- read logic ----------------
  logic [3:0]        col;
  logic              running;
  aeq_entry_t        cur;

  always_comb begin
    cur = col_out[0];
    for (int s = 0; s < NCOL; s++)
      if (col == 4'(s)) cur = col_out[s];
  end

  assign rd_valid     = running && cur.valid;
  assign rd_ev        = cur.a;
  assign rd_s         = col;
  assign rd_empty_col = running && !cur.valid && !rd_stall;
  assign rd_busy      = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      rbase   <= '0;
      rcnt    <= '0;
      col     <= '0;
      rd_done <= 1'b0;
    end else begin
      rd_done <= 1'b0;
      if (rd_start) begin
        running <= 1'b1;
        rbase   <= AEQ_AW'(rd_q) * AEQ_AW'(MP_DEPTH);
        rcnt    <= '0;
        col     <= '0;
      end else if (running && !rd_stall) begin
        if (cur.eoq) begin
          rcnt <= '0;
          if (col == 4'(NCOL - 1)) begin
            running <= 1'b0;
            rd_done <= 1'b1;
          end else begin
            col <= col + 1'b1;
          end
        end else begin
          rcnt <= rcnt + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (wr_we != '0) |-> wopen)
    else $error("aeq: write to a queue that is not open");

endmodule
