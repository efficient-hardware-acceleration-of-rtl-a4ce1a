// conv_unit: event-driven 3x3 convolution unit with nine processing elements.
//
// For every input address event (i, j)[s] coming from an AEQ, the nine
// neurons of the 3x3 neighbourhood around the spiking pixel are updated in
// parallel: neighbour PE m (wired to MemPot column m) adds one kernel weight
// to the potential it reads from its column. The pipeline has four stages:
//   S1  address calculation (combinational on the AEQ output): for each column
//       the tile address i+-1 / j+-1 of the neighbour in that column, and an
//       out-of-bounds flag when the neighbour falls outside the W x H fmap.
//   S2  MemPot read address out; kernel permutation: the 9 possible
//       assignments of kernel weights to PEs are formed and one is selected
//       per PE with a 9:1 multiplexer indexed by the event's column s_in.
//   S3  MemPot data in; saturating addition of the weight (one adder per PE).
//       A 2:1 multiplexer per PE forwards the value written back in the
//       previous cycle when the addresses match (S2-S4 hazard).
//   S4  write back to the same address.
// S2-S3 hazard: when the event in S2 overlaps the event in S3 in any column,
// S1, S2 and the AEQ stall for one cycle (`stall`) and a bubble enters S3; the
// hazard then becomes an S2-S4 hazard and is forwarded. Without hazards one
// event is accepted per cycle.
//
// The kernel ROM holds kernels already rotated by 180 degrees, so the
// neighbour at offset (dx, dy) from the event gets kernel[3*(dy+1)+(dx+1)].
// The spike indicator bit of a MemPot word is carried through unchanged.
//
// Interface: ev_valid/ev/ev_s from the AEQ read port; `stall` back to it.
// `kernel` must be stable while events flow. `busy` is high while any event
// is in S2..S4. Stage split, adders, permutation multiplexers, forwarding and
// stalling follow the paper; the explicit write-back register used for
// forwarding and the pixel-based border test (which also masks the unused
// pixels of the last, partially filled tile row or column) are this design's
// own choices.
module conv_unit
  import csnn_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // event input (AEQ read port)
  input  logic                  ev_valid,
  input  tile_addr_t            ev,
  input  logic [3:0]            ev_s,
  output logic                  stall,
  // configuration
  input  logic [PIX_W-1:0]      fmap_w,
  input  logic [PIX_W-1:0]      fmap_h,
  input  kernel_t               kernel,
  // MemPot ports
  output mp_req_t  [NCOL-1:0]   mp_req,
  input  mp_word_t [NCOL-1:0]   mp_rdata,
  // status
  output logic                  busy,
  output logic                  st_accept,   // event accepted this cycle
  output logic                  st_fwd,      // a forward was used this cycle
  output logic [3:0]            st_oob,      // PEs masked for the event in S2
  output logic [3:0]            st_sat       // saturated additions in S3
);

  // ---------------- S1: address calculation ----------------
  tile_addr_t [NCOL-1:0] s1_addr;
  logic       [NCOL-1:0] s1_en;

  always_comb begin
    for (int m = 0; m < NCOL; m++) begin
      int dx, dy, px, py, xi, yi;
      dx = nb_off(m % 3, int'(ev_s) % 3);
      dy = nb_off(m / 3, int'(ev_s) / 3);
      xi = (int'(ev_s) % 3) + dx;               // in-tile position, -1..3
      yi = (int'(ev_s) / 3) + dy;
      px = 3 * int'(ev.i) + xi;                 // neighbour pixel
      py = 3 * int'(ev.j) + yi;
      s1_addr[m].i = TA_W'(int'(ev.i) + ((xi < 0) ? -1 : (xi > 2) ? 1 : 0));
      s1_addr[m].j = TA_W'(int'(ev.j) + ((yi < 0) ? -1 : (yi > 2) ? 1 : 0));
      s1_en[m] = (px >= 0) && (py >= 0) && (px < int'(fmap_w)) && (py < int'(fmap_h));
      if (!s1_en[m]) s1_addr[m] = '0;
    end
  end

  // ---------------- S2 ----------------
  logic                  s2_v;
  tile_addr_t [NCOL-1:0] s2_addr;
  logic       [NCOL-1:0] s2_en;
  logic       [3:0]      s2_s;
  // ---------------- S3 ----------------
  logic                  s3_v;
  tile_addr_t [NCOL-1:0] s3_addr;
  logic       [NCOL-1:0] s3_en;
  kernel_t               s3_k;
  // ---------------- S4 ----------------
  logic                  s4_v;
  tile_addr_t [NCOL-1:0] s4_addr;
  logic       [NCOL-1:0] s4_en;
  mp_word_t   [NCOL-1:0] s4_d;
  // last write-back, for forwarding
  logic       [NCOL-1:0] wl_v;
  tile_addr_t [NCOL-1:0] wl_addr;
  mp_word_t   [NCOL-1:0] wl_d;

  // S2-S3 hazard detection: 9 comparators against S3.
  logic [NCOL-1:0] haz;
  always_comb
    for (int m = 0; m < NCOL; m++)
      haz[m] = s2_v && s3_v && s2_en[m] && s3_en[m] && (s2_addr[m] == s3_addr[m]);
  assign stall = |haz;

  // Kernel permutation: all 9 permutations, then a 9:1 multiplexer per PE.
  kernel_t [NCOL-1:0] perm;
  always_comb
    for (int p = 0; p < NCOL; p++)
      for (int m = 0; m < NCOL; m++)
        perm[p][m] = kernel[3 * (nb_off(m / 3, p / 3) + 1) + (nb_off(m % 3, p % 3) + 1)];

  kernel_t s2_k;
  always_comb begin
    s2_k = perm[0];
    for (int p = 0; p < NCOL; p++)
      if (s2_s == 4'(p)) s2_k = perm[p];
  end

  // S3: forwarding multiplexer and saturating adders.
  mp_word_t [NCOL-1:0] s3_old, s3_new;
  logic     [NCOL-1:0] s3_fwd, s3_sat;
  always_comb
    for (int m = 0; m < NCOL; m++) begin
      s3_fwd[m]   = s3_v && s3_en[m] && wl_v[m] && (wl_addr[m] == s3_addr[m]);
      s3_old[m]   = s3_fwd[m] ? wl_d[m] : mp_rdata[m];
      s3_new[m].spk = s3_old[m].spk;
      s3_new[m].v   = sat_add(s3_old[m].v, s3_k[m]);
      s3_sat[m]   = s3_v && s3_en[m] && sat_hit(s3_old[m].v, s3_k[m]);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_addr <= '0; s2_en <= '0; s2_s <= '0;
      s3_v <= 1'b0; s3_addr <= '0; s3_en <= '0; s3_k <= '0;
      s4_v <= 1'b0; s4_addr <= '0; s4_en <= '0; s4_d <= '0;
      wl_v <= '0;   wl_addr <= '0; wl_d  <= '0;
    end else begin
      // S1 -> S2 (held while stalled)
      if (!stall) begin
        s2_v    <= ev_valid;
        s2_addr <= s1_addr;
        s2_en   <= s1_en;
        s2_s    <= ev_s;
      end
      // S2 -> S3 (bubble while stalled)
      s3_v    <= s2_v && !stall;
      s3_addr <= s2_addr;
      s3_en   <= s2_en;
      s3_k    <= s2_k;
      // S3 -> S4
      s4_v    <= s3_v;
      s4_addr <= s3_addr;
      s4_en   <= s3_en;
      s4_d    <= s3_new;
      // S4 write-back register for forwarding
      for (int m = 0; m < NCOL; m++)
        wl_v[m] <= s4_v && s4_en[m];
      wl_addr <= s4_addr;
      wl_d    <= s4_d;
    end
  end

  // MemPot ports: read in S2, write in S4.
  always_comb
    for (int m = 0; m < NCOL; m++) begin
      mp_req[m].raddr = s2_addr[m];
      mp_req[m].we    = s4_v && s4_en[m];
      mp_req[m].waddr = s4_addr[m];
      mp_req[m].wdata = s4_d[m];
    end

  assign busy      = s2_v || s3_v || s4_v;
  assign st_accept = ev_valid && !stall;
  assign st_fwd    = |s3_fwd;
  always_comb begin
    st_oob = '0;
    st_sat = '0;
    for (int m = 0; m < NCOL; m++) begin
      st_oob += 4'(s2_v && !stall && !s2_en[m]);
      st_sat += 4'(s3_sat[m]);
    end
  end

  // A stall needs an event in S2 and an overlapping event in S3, and the
  // bubble it inserts keeps S2 and S3 apart in the next cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   stall |-> (s2_v && s3_v) ##1 !stall)
    else $error("conv_unit: stall rule violated");

endmodule
