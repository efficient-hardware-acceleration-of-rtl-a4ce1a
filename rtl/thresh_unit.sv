// thresh_unit: bias, threshold and max-pooling unit for one output channel.
//
// After all input events of a time step have been integrated, this unit
// visits every neuron of MemPot by sliding a 3x3 window over the fmap with a
// stride of 3, i.e. one tile (i, j) per cycle, j outer and i inner. In each
// window the nine neurons (one per MemPot column) are processed in parallel.
// Five pipeline stages:
//   S1  tile address counters (i, j)_mem, plus the counters of the max-pooled
//       output address (i, j)_out and column s_out.
//   S2  MemPot read.
//   S3  saturating addition of the scalar bias b to the nine potentials.
//   S4  nine comparators: a neuron fires when V_m > V_t or when its spike
//       indicator bit is already set (m-TTFS: once a neuron has fired it fires
//       in every later time step). The bias-updated potential and the new
//       spike bit are written back to MemPot.
//   S5  AEQ write. Without pooling, neuron m's event (i, j)_mem goes to AEQ
//       column m with write enable = its comparator. With 3x3 pooling, the
//       nine comparators are ORed and, if any fired, the single event
//       (i, j)_out is written to AEQ column s_out.
// With `clear` set the same sweep writes zero potentials and clear spike
// bits instead (start of a new output channel) and writes no events.
// Every neuron is read once, so there are no data hazards.
//
// Pooling address: the pooled pixel of tile (i, j) is pixel (i, j) of the
// pooled fmap, so i_out = i/3, j_out = j/3 and s_out = 3*(j%3) + i%3. These
// are produced by counters that run with the tile counters, using only
// increments and compares as in the paper's algorithm; the counter values are
// those of the current tile. Neurons of a partially filled edge tile that lie
// outside the W x H fmap never fire; a partial edge tile still forms a
// pooling window (the pooled fmap is ceil(W/3) x ceil(H/3)).
//
// Interface: pulse `start` with the configuration stable; `done` pulses when
// the last window has left S5. `busy` is high in between. Pipeline stages,
// bias adders, comparators, OR gate and pooling selection follow the paper;
// the clear sweep, the write-back in S4 (the figure caption's choice; the
// stage list in the text places it in S5) and the edge handling are this
// design's choices.
module thresh_unit
  import csnn_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  clear,
  input  data_t                 bias,
  input  data_t                 vt,
  input  logic                  pool_en,
  input  logic [PIX_W-1:0]      fmap_w,
  input  logic [PIX_W-1:0]      fmap_h,
  // MemPot ports
  output mp_req_t  [NCOL-1:0]   mp_req,
  input  mp_word_t [NCOL-1:0]   mp_rdata,
  // AEQ write port
  output logic       [NCOL-1:0] aeq_we,
  output tile_addr_t [NCOL-1:0] aeq_data,
  // status
  output logic                  busy,
  output logic                  done,
  output logic [3:0]            st_spk,     // events written this cycle
  output logic                  st_pool,    // a pooled event was written
  output logic [3:0]            st_sat      // saturated bias additions
);

  typedef struct packed {
    logic            v;
    tile_addr_t      a;      // (i, j)_mem
    logic [NCOL-1:0] en;     // neuron inside the fmap
    tile_addr_t      pa;     // (i, j)_out
    logic [3:0]      ps;     // s_out
    logic            last;
  } ctl_t;

  // ---------------- S1: counters ----------------
  logic             run, clr;
  tile_addr_t       a;
  logic [PIX_W+1:0] px, py;          // first pixel of the tile
  logic [1:0]       so_i;            // 0,1,2,...
  logic [3:0]       so_j;            // 0,3,6,...
  tile_addr_t       pa;
  logic             last_i, last_j;

  assign last_i = (px + 3) >= (PIX_W+2)'(fmap_w);
  assign last_j = (py + 3) >= (PIX_W+2)'(fmap_h);

  ctl_t s1, s2, s3, s4;
  always_comb begin
    s1.v    = run;
    s1.a    = a;
    s1.pa   = pa;
    s1.ps   = 4'(so_i) + so_j;
    s1.last = last_i && last_j;
    for (int m = 0; m < NCOL; m++)
      s1.en[m] = (px + (PIX_W+2)'(m % 3) < (PIX_W+2)'(fmap_w)) &&
                 (py + (PIX_W+2)'(m / 3) < (PIX_W+2)'(fmap_h));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; clr <= 1'b0; a <= '0; px <= '0; py <= '0;
      so_i <= '0; so_j <= '0; pa <= '0;
    end else if (start) begin
      run <= 1'b1; clr <= clear; a <= '0; px <= '0; py <= '0;
      so_i <= '0; so_j <= '0; pa <= '0;
    end else if (run) begin
      if (!last_i) begin
        a.i <= a.i + 1'b1;
        px  <= px + 3;
        if (so_i == 2'd2) begin
          so_i <= '0;
          pa.i <= pa.i + 1'b1;
        end else begin
          so_i <= so_i + 1'b1;
        end
      end else begin
        a.i  <= '0;
        px   <= '0;
        so_i <= '0;
        pa.i <= '0;
        a.j  <= a.j + 1'b1;
        py   <= py + 3;
        if (so_j == 4'd6) begin
          so_j <= '0;
          pa.j <= pa.j + 1'b1;
        end else begin
          so_j <= so_j + 4'd3;
        end
        if (last_j) run <= 1'b0;
      end
    end
  end

  // ---------------- S2..S5 ----------------
  mp_word_t [NCOL-1:0] s4_w;       // bias-updated words
  logic     [NCOL-1:0] s3_sat;
  logic     [NCOL-1:0] s4_fire;
  logic     [NCOL-1:0] s5_fire;
  logic                s5_any;
  ctl_t                s5;

  always_comb
    for (int m = 0; m < NCOL; m++) begin
      s3_sat[m] = s3.v && !clr && sat_hit(mp_rdata[m].v, bias);
      s4_fire[m] = s4.v && !clr && s4.en[m] && ((s4_w[m].v > vt) || s4_w[m].spk);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2 <= '0; s3 <= '0; s4 <= '0; s5 <= '0;
      s4_w <= '0; s5_fire <= '0; s5_any <= 1'b0;
    end else begin
      s2 <= s1;
      s3 <= s2;
      s4 <= s3;
      s5 <= s4;
      for (int m = 0; m < NCOL; m++) begin
        s4_w[m].v   <= clr ? data_t'(0) : sat_add(mp_rdata[m].v, bias);
        s4_w[m].spk <= clr ? 1'b0 : mp_rdata[m].spk;
      end
      s5_fire <= s4_fire;
      s5_any  <= |s4_fire;          // 9-input OR for max-pooling
    end
  end

  // MemPot: read in S2, write back in S4 with the new spike bit.
  always_comb
    for (int m = 0; m < NCOL; m++) begin
      mp_req[m].raddr     = s2.a;
      mp_req[m].we        = s4.v;
      mp_req[m].waddr     = s4.a;
      mp_req[m].wdata.v   = s4_w[m].v;
      mp_req[m].wdata.spk = s4_fire[m];
    end

  // S5: AEQ write enables and data.
  always_comb
    for (int m = 0; m < NCOL; m++) begin
      if (pool_en) begin
        aeq_we[m]   = s5.v && s5_any && (s5.ps == 4'(m));
        aeq_data[m] = s5.pa;
      end else begin
        aeq_we[m]   = s5.v && s5_fire[m];
        aeq_data[m] = s5.a;
      end
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) done <= 1'b0;
    else        done <= s5.v && s5.last;

  assign busy = run || s2.v || s3.v || s4.v || s5.v;

  always_comb begin
    st_spk = '0;
    st_sat = '0;
    for (int m = 0; m < NCOL; m++) begin
      st_spk += 4'(aeq_we[m]);
      st_sat += 4'(s3_sat[m]);
    end
  end
  assign st_pool = pool_en && (aeq_we != '0);

  // At most one pooled event per window.
  assert property (@(posedge clk) disable iff (!rst_n)
                   pool_en |-> $onehot0(aeq_we))
    else $error("thresh_unit: more than one pooled event per window");

endmodule
