// csnn_ctrl: control unit that schedules layers, channels and time steps.
//
// It runs the paper's layer dataflow: for every layer l and every output
// channel (N_UNITS output channels at a time, one per unit, "group" g)
//   clear MemPot (V_m <- 0, spike bits <- 0)
//   for t = 0 .. T-1
//     for c_in = 0 .. C_in-1
//       stream AEQ[c_in, l-1, t] through the convolution units using
//       kernel K[c_out, c_in, l], then wait until the pipelines are empty
//     threshold MemPot with bias b[c_out] and V_t into AEQ[c_out, l, t]
// and, after the last layer, streams every AEQ of the last layer into the
// classification unit.
//
// AEQ queue numbering inside a bank: q = (parity*CPB + c/N_UNITS)*T + t,
// with parity = l%2 for the events that feed layer l (the host writes the
// input image as parity 0, channel 0), so a layer reads one half of every
// bank while it writes the other. Input channel c lives in bank c % N_UNITS.
//
// Interface: pulse `start` while idle; `done` pulses at the end of the
// classification. `busy` is high in between. All outputs are registers or
// decoded from the state. The loop order follows the paper; the grouping
// of output channels over units, the queue numbering, the MemPot clear sweep
// and the pipeline drain between input channels are this design's choices.
module csnn_ctrl
  import csnn_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  layer_cfg_t [N_LAYERS-1:0]   cfg,
  // status from the datapath
  input  logic                        rd_done,      // any AEQ bank finished
  input  logic                        conv_busy,    // any conv pipeline busy
  input  logic                        th_done,      // thresholding sweep done
  // layer configuration of the current layer
  output layer_cfg_t                  lcfg,
  // kernel / bias selection
  output logic [KROM_AW-1:0]          k_raddr,
  output logic [BROM_AW-1:0]          b_raddr,
  output logic [N_UNITS-1:0]          active,
  // thresholding
  output logic                        thr_phase,
  output logic                        th_start,
  output logic                        th_clear,
  // AEQ write (all units)
  output logic                        wr_open,
  output logic                        wr_close,
  output logic [AEQ_QW-1:0]           wr_q,
  // AEQ read (one bank)
  output logic                        rd_start,
  output logic [$clog2(N_UNITS)-1:0]  rd_bank,
  output logic [AEQ_QW-1:0]           rd_q,
  // classification
  output logic                        cls_mode,
  output logic                        cls_clear,
  output logic [CH_W-1:0]             cls_ch,
  output logic                        busy,
  output logic                        done
);

  localparam int LW = $clog2(N_LAYERS + 1);
  localparam int GW = $clog2(CPB + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_CLR_W, S_CI, S_CI_W, S_DRAIN, S_TH, S_TH_W, S_TH_CLOSE,
    S_CLS, S_CLS_W, S_DONE
  } state_e;

  state_e          st;
  logic [LW-1:0]   l;
  logic [GW-1:0]   g;
  logic [T_W-1:0]  t;
  logic [CH_W-1:0] ci;

  function automatic logic [AEQ_QW-1:0] qidx(logic par, int c_local, logic [T_W-1:0] tt);
    return AEQ_QW'(((int'(par) * CPB + c_local) * T_STEPS) + int'(tt));
  endfunction

  assign lcfg     = cfg[(l < LW'(N_LAYERS)) ? l : LW'(N_LAYERS - 1)];
  assign k_raddr  = KROM_AW'((int'(l) * CPB + int'(g)) * MAX_CH + int'(ci));
  assign b_raddr  = BROM_AW'(int'(l) * CPB + int'(g));
  always_comb
    for (int p = 0; p < N_UNITS; p++)
      active[p] = (int'(g) * N_UNITS + p) < int'(lcfg.c_out);

  assign thr_phase = (st == S_CLR) || (st == S_CLR_W) || (st == S_TH) || (st == S_TH_W);
  assign th_start  = (st == S_CLR) || (st == S_TH);
  assign th_clear  = (st == S_CLR);
  assign wr_open   = (st == S_TH);
  assign wr_close  = (st == S_TH_CLOSE);
  assign wr_q      = qidx(~l[0], int'(g), t);
  assign rd_start  = (st == S_CI) || (st == S_CLS);
  assign rd_bank   = ($clog2(N_UNITS))'(int'(ci) % N_UNITS);
  assign rd_q      = qidx(l[0], int'(ci) / N_UNITS, t);
  assign cls_mode  = (st == S_CLS) || (st == S_CLS_W);
  assign cls_ch    = ci;
  assign busy      = (st != S_IDLE);
  assign done      = (st == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; l <= '0; g <= '0; t <= '0; ci <= '0; cls_clear <= 1'b0;
    end else begin
      cls_clear <= 1'b0;
      unique case (st)
        S_IDLE:  if (start) begin
                   l <= '0; g <= '0; t <= '0; ci <= '0;
                   st <= S_CLR;
                 end
        S_CLR:   st <= S_CLR_W;
        S_CLR_W: if (th_done) begin
                   t <= '0; ci <= '0;
                   st <= S_CI;
                 end
        S_CI:    st <= S_CI_W;
        S_CI_W:  if (rd_done) st <= S_DRAIN;
        S_DRAIN: if (!conv_busy) begin
                   if (ci + 1'b1 == lcfg.c_in) begin
                     ci <= '0;
                     st <= S_TH;
                   end else begin
                     ci <= ci + 1'b1;
                     st <= S_CI;
                   end
                 end
        S_TH:    st <= S_TH_W;
        S_TH_W:  if (th_done) st <= S_TH_CLOSE;
        S_TH_CLOSE: begin
                   if (t == T_W'(T_STEPS - 1)) begin
                     t <= '0;
                     if ((int'(g) + 1) * N_UNITS >= int'(lcfg.c_out)) begin
                       g <= '0;
                       if (l == LW'(N_LAYERS - 1)) begin
                         // the last layer's events have parity N_LAYERS % 2
                         l <= l + 1'b1;
                         ci <= '0;
                         cls_clear <= 1'b1;
                         st <= S_CLS;
                       end else begin
                         l <= l + 1'b1;
                         st <= S_CLR;
                       end
                     end else begin
                       g <= g + 1'b1;
                       st <= S_CLR;
                     end
                   end else begin
                     t <= t + 1'b1;
                     st <= S_CI;
                   end
                 end
        S_CLS:   st <= S_CLS_W;
        S_CLS_W: if (rd_done) begin
                   if (t == T_W'(T_STEPS - 1)) begin
                     t <= '0;
                     if (ci + 1'b1 == cfg[N_LAYERS-1].c_out) st <= S_DONE;
                     else begin
                       ci <= ci + 1'b1;
                       st <= S_CLS;
                     end
                   end else begin
                     t <= t + 1'b1;
                     st <= S_CLS;
                   end
                 end
        S_DONE:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
