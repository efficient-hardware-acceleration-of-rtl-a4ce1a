// csnn_top: event-driven accelerator for convolutional spiking neural networks
// with m-TTFS coded integrate-and-fire neurons.
//
// Dataflow. Binary fmaps exist only as address event queues (AEQs). N_UNITS
// parallel units each hold an AEQ bank, a MemPot memory, kernel and bias ROMs,
// a 4-stage convolution unit with 9 PEs and a 5-stage thresholding unit. The
// control unit walks the layers; for each group of N_UNITS output channels and
// each time step it streams the events of every input channel from the bank
// that holds them to all units at once (one event per cycle, minus hazard
// stalls and one cycle per empty queue column), then lets every unit threshold
// its MemPot into a new queue of its own bank. After the last layer the
// classification unit reads the last layer's queues and outputs the class.
//
// Host interface (all synchronous to clk, active-low asynchronous reset):
//  * cfg_wr: writes kernels (9 rotated weights per entry, per unit), biases
//    and fully connected weights; use while idle.
//  * in_open / in_valid+in_x+in_y / in_close: write the binary input image of
//    time step in_t as a queue of pixel events (at most one per cycle;
//    in_close at least one cycle after the last event); use while idle.
//  * layer_cfg: channels, fmap size, pooling and threshold of each conv layer;
//    keep stable during a run.
//  * start pulse -> busy ... done pulse; then cls/scores hold the result and
//    stats the activity counters of the run.
// Input binarisation of camera frames happens outside this block.
module csnn_top
  import csnn_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  input  layer_cfg_t [N_LAYERS-1:0]   layer_cfg,
  input  cfg_wr_t                     cfg_wr,
  input  logic                        in_open,
  input  logic                        in_close,
  input  logic [T_W-1:0]              in_t,
  input  logic                        in_valid,
  input  logic [PIX_W-1:0]            in_x,
  input  logic [PIX_W-1:0]            in_y,
  output logic [3:0]                  cls,
  output logic signed [SCORE_W-1:0]   scores [N_CLASSES],
  output stats_t                      stats
);

  localparam int UW = $clog2(N_UNITS);

  // ---------------- control ----------------
  layer_cfg_t            lcfg;
  logic [KROM_AW-1:0]    k_raddr;
  logic [BROM_AW-1:0]    b_raddr;
  logic [N_UNITS-1:0]    active;
  logic                  thr_phase, th_start, th_clear;
  logic                  c_wr_open, c_wr_close;
  logic [AEQ_QW-1:0]     c_wr_q, rd_q;
  logic                  rd_start;
  logic [UW-1:0]         rd_bank;
  logic                  cls_mode, cls_clear;
  logic [CH_W-1:0]       cls_ch;
  logic                  rd_done_any, conv_busy_any;
  logic [N_UNITS-1:0]    th_done_u;

  csnn_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg(layer_cfg),
    .rd_done(rd_done_any), .conv_busy(conv_busy_any), .th_done(th_done_u[0]),
    .lcfg, .k_raddr, .b_raddr, .active,
    .thr_phase, .th_start, .th_clear,
    .wr_open(c_wr_open), .wr_close(c_wr_close), .wr_q(c_wr_q),
    .rd_start, .rd_bank, .rd_q,
    .cls_mode, .cls_clear, .cls_ch, .busy, .done
  );

  // ---------------- host input events -> interlaced address events ----------
  tile_addr_t [NCOL-1:0] in_data;
  logic       [NCOL-1:0] in_we;
  always_comb begin
    tile_addr_t a;
    int s;
    a.i = TA_W'(int'(in_x) / 3);
    a.j = TA_W'(int'(in_y) / 3);
    s   = 3 * (int'(in_y) % 3) + int'(in_x) % 3;
    for (int m = 0; m < NCOL; m++) begin
      in_data[m] = a;
      in_we[m]   = in_valid && !busy && (s == m);
    end
  end

  // ---------------- units ----------------
  logic       [N_UNITS-1:0] conv_stall, conv_busy, rd_valid, rd_empty, rd_done;
  tile_addr_t [N_UNITS-1:0] rd_ev;
  logic [N_UNITS-1:0][3:0]  rd_s;
  logic [N_UNITS-1:0]       st_accept, st_fwd, st_pool;
  logic [N_UNITS-1:0][3:0]  st_oob, st_sat, st_spk;

  // selected event stream
  logic       ev_valid;
  tile_addr_t ev;
  logic [3:0] ev_s;
  logic       ev_stall;
  assign ev_valid = rd_valid[rd_bank];
  assign ev       = rd_ev[rd_bank];
  assign ev_s     = rd_s[rd_bank];
  assign ev_stall = !cls_mode && (conv_stall != '0);

  for (genvar p = 0; p < N_UNITS; p++) begin : g_unit
    localparam bit HOST = (p == 0);
    csnn_unit u_unit (
      .clk, .rst_n,
      .k_we   (cfg_wr.we && cfg_wr.sel == SEL_KERNEL && cfg_wr.unit == UW'(p)),
      .k_waddr(KROM_AW'(cfg_wr.addr)),
      .k_wdata(cfg_wr.data),
      .b_we   (cfg_wr.we && cfg_wr.sel == SEL_BIAS && cfg_wr.unit == UW'(p)),
      .b_waddr(BROM_AW'(cfg_wr.addr)),
      .b_wdata(cfg_wr.data[0]),
      .k_raddr, .b_raddr,
      .thr_phase, .active(active[p]),
      .fmap_w(lcfg.w), .fmap_h(lcfg.h), .vt(lcfg.vt), .pool_en(lcfg.pool),
      .ev_valid(ev_valid && !cls_mode), .ev, .ev_s,
      .conv_stall(conv_stall[p]), .conv_busy(conv_busy[p]),
      .th_start, .th_clear, .th_done(th_done_u[p]),
      .wr_open (busy ? c_wr_open  : (HOST && in_open)),
      .wr_close(busy ? c_wr_close : (HOST && in_close)),
      .wr_q    (busy ? c_wr_q     : AEQ_QW'(in_t)),
      .ext_sel (!busy),
      .ext_we  (HOST ? in_we : '0),
      .ext_data(in_data),
      .rd_start(rd_start && rd_bank == UW'(p)),
      .rd_q, .rd_stall(ev_stall),
      .rd_valid(rd_valid[p]), .rd_ev(rd_ev[p]), .rd_s(rd_s[p]),
      .rd_empty_col(rd_empty[p]), .rd_done(rd_done[p]),
      .st_accept(st_accept[p]), .st_fwd(st_fwd[p]), .st_oob(st_oob[p]),
      .st_sat(st_sat[p]), .st_spk(st_spk[p]), .st_pool(st_pool[p])
    );
  end

  assign rd_done_any   = |rd_done;
  assign conv_busy_any = |conv_busy;

  // ---------------- classification ----------------
  class_unit u_class (
    .clk, .rst_n, .clear(cls_clear),
    .ev_valid(ev_valid && cls_mode), .ev, .ev_s, .ch(cls_ch),
    .w_en  (cfg_wr.we && cfg_wr.sel == SEL_FC),
    .w_cls (cfg_wr.cls),
    .w_addr(FC_AW'(cfg_wr.addr)),
    .w_data(cfg_wr.data[0]),
    .scores, .cls
  );

  // ---------------- activity counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else if (start && !busy) begin
      stats <= '0;
    end else if (busy) begin
      stats.cycles <= stats.cycles + 1;
      if (!cls_mode) begin
        stats.conv_events <= stats.conv_events + 32'(st_accept[0] && ev_valid);
        stats.stalls      <= stats.stalls + 32'(conv_stall[0]);
        stats.forwards    <= stats.forwards + 32'(st_fwd[0]);
        stats.oob         <= stats.oob + 32'(st_oob[0]);
      end
      stats.empty_cols <= stats.empty_cols + 32'(rd_empty[rd_bank]);
      begin
        logic [31:0] sp, pl, sa;
        sp = '0; pl = '0; sa = '0;
        for (int p = 0; p < N_UNITS; p++) begin
          sp += 32'(st_spk[p]);
          pl += 32'(st_pool[p]);
          sa += 32'(st_sat[p]);
        end
        stats.spikes <= stats.spikes + sp;
        stats.pooled <= stats.pooled + pl;
        stats.sat    <= stats.sat + sa;
      end
    end
  end

endmodule
