// csnn_unit: one parallel processing unit of the accelerator.
//
// A unit bundles what the paper replicates for parallelism: an AEQ bank, a
// MemPot memory, a kernel ROM, a bias ROM, a convolution unit and a
// thresholding unit. Unit p processes the output channels
// c_out = g*N_UNITS + p (g = 0, 1, ...) and stores their output events in its
// own AEQ bank. All units run in lock step on the same input event stream,
// which the top level takes from the bank that holds the current input
// channel and broadcasts; each unit applies its own kernel K[c_out, c_in, l].
//
// MemPot has a single client at a time: the convolution unit while input
// events are integrated, the thresholding unit (`thr_phase` = 1) while the
// fmap is thresholded or cleared. The AEQ write port is driven by the
// thresholding unit (gated by `active`, which is low when the unit has no
// output channel in the current group) or, with `ext_sel`, by the host input
// port. The AEQ read port is exported to the top level.
//
// The unit contents follow the paper; how the units share input events and
// how output channels are distributed over them is not described in the
// paper and is this design's choice.
module csnn_unit
  import csnn_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // host writes into kernel and bias ROMs
  input  logic                  k_we,
  input  logic [KROM_AW-1:0]    k_waddr,
  input  kernel_t               k_wdata,
  input  logic                  b_we,
  input  logic [BROM_AW-1:0]    b_waddr,
  input  data_t                 b_wdata,
  // control
  input  logic [KROM_AW-1:0]    k_raddr,
  input  logic [BROM_AW-1:0]    b_raddr,
  input  logic                  thr_phase,
  input  logic                  active,
  input  logic [PIX_W-1:0]      fmap_w,
  input  logic [PIX_W-1:0]      fmap_h,
  input  data_t                 vt,
  input  logic                  pool_en,
  // convolution event input (broadcast)
  input  logic                  ev_valid,
  input  tile_addr_t            ev,
  input  logic [3:0]            ev_s,
  output logic                  conv_stall,
  output logic                  conv_busy,
  // thresholding
  input  logic                  th_start,
  input  logic                  th_clear,
  output logic                  th_done,
  // AEQ write side
  input  logic                  wr_open,
  input  logic                  wr_close,
  input  logic [AEQ_QW-1:0]     wr_q,
  input  logic                  ext_sel,
  input  logic [NCOL-1:0]       ext_we,
  input  tile_addr_t [NCOL-1:0] ext_data,
  // AEQ read side
  input  logic                  rd_start,
  input  logic [AEQ_QW-1:0]     rd_q,
  input  logic                  rd_stall,
  output logic                  rd_valid,
  output tile_addr_t            rd_ev,
  output logic [3:0]            rd_s,
  output logic                  rd_empty_col,
  output logic                  rd_done,
  // status
  output logic                  st_accept,
  output logic                  st_fwd,
  output logic [3:0]            st_oob,
  output logic [3:0]            st_sat,
  output logic [3:0]            st_spk,
  output logic                  st_pool
);

  kernel_t kernel;
  data_t   bias;

  kernel_rom u_krom (
    .clk, .wr_en(k_we), .wr_addr(k_waddr), .wr_data(k_wdata),
    .raddr(k_raddr), .rdata(kernel)
  );

  bias_rom u_brom (
    .clk, .wr_en(b_we), .wr_addr(b_waddr), .wr_data(b_wdata),
    .raddr(b_raddr), .rdata(bias)
  );

  mp_req_t  [NCOL-1:0] cv_req, th_req, mp_req;
  mp_word_t [NCOL-1:0] mp_rdata;

  mempot u_mempot (.clk, .req(mp_req), .rdata(mp_rdata));

  assign mp_req = thr_phase ? th_req : cv_req;

  logic [3:0] cv_sat, th_sat;

  conv_unit u_conv (
    .clk, .rst_n,
    .ev_valid, .ev, .ev_s, .stall(conv_stall),
    .fmap_w, .fmap_h, .kernel,
    .mp_req(cv_req), .mp_rdata,
    .busy(conv_busy), .st_accept, .st_fwd, .st_oob, .st_sat(cv_sat)
  );

  logic       [NCOL-1:0] th_we;
  tile_addr_t [NCOL-1:0] th_data;
  logic                  th_busy;
  logic       [3:0]      th_spk;
  logic                  th_pool;

  thresh_unit u_thresh (
    .clk, .rst_n,
    .start(th_start), .clear(th_clear), .bias, .vt, .pool_en, .fmap_w, .fmap_h,
    .mp_req(th_req), .mp_rdata,
    .aeq_we(th_we), .aeq_data(th_data),
    .busy(th_busy), .done(th_done), .st_spk(th_spk), .st_pool(th_pool), .st_sat(th_sat)
  );

  assign st_sat  = active ? cv_sat + th_sat : '0;
  assign st_spk  = active ? th_spk : '0;
  assign st_pool = active && th_pool;

  aeq u_aeq (
    .clk, .rst_n,
    .wr_open (ext_sel ? wr_open  : (wr_open  && active)),
    .wr_q,
    .wr_we   (ext_sel ? ext_we   : (active ? th_we : '0)),
    .wr_data (ext_sel ? ext_data : th_data),
    .wr_close(ext_sel ? wr_close : (wr_close && active)),
    .rd_start, .rd_q, .rd_stall,
    .rd_valid, .rd_ev, .rd_s, .rd_empty_col, .rd_busy(), .rd_done
  );

endmodule
