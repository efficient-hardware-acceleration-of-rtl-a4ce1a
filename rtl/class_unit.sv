// class_unit: final fully connected layer (F10) and classification.
//
// Reads the address events of the last convolutional layer from the AEQs,
// one event per cycle, for every channel and time step. An event of channel
// `ch` at tile (i, j), column s is the pixel x = 3i + s%3, y = 3j + s/3 of that
// channel, i.e. input neuron n = (ch*FC_EDGE + y)*FC_EDGE + x of the layer.
// For each event the ten class scores are incremented in parallel by the
// weights W[k][n] (binary inputs need no multiplier). Because a neuron that
// has fired keeps firing under m-TTFS coding, an early spike is counted in
// more time steps and weighs more. After the last event the class is the
// index of the largest score (lowest index on ties).
//
// Interface: `clear` zeroes the scores; ev_valid/ev/ev_s/ch deliver events
// (accepted every cycle, scores updated one cycle later); weights are written
// by the host through `w_*`. `scores` and `cls` are combinational on the
// score registers.
//
// The paper only states that this unit performs the final classification with
// a small fully connected layer and omits its internals; the accumulate-over-
// time-steps scheme, the absence of an FC bias and the arg-max are this
// design's choices.
module class_unit
  import csnn_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      ev_valid,
  input  tile_addr_t                ev,
  input  logic [3:0]                ev_s,
  input  logic [CH_W-1:0]           ch,
  input  logic                      w_en,
  input  logic [3:0]                w_cls,
  input  logic [FC_AW-1:0]          w_addr,
  input  data_t                     w_data,
  output logic signed [SCORE_W-1:0] scores [N_CLASSES],
  output logic [3:0]                cls
);

  logic [FC_AW-1:0] n;
  always_comb begin
    int x, y;
    x = 3 * int'(ev.i) + int'(ev_s) % 3;
    y = 3 * int'(ev.j) + int'(ev_s) / 3;
    n = FC_AW'((int'(ch) * FC_EDGE + y) * FC_EDGE + x);
  end

  for (genvar k = 0; k < N_CLASSES; k++) begin : g_cls
    data_t mem [FC_IN];
    always_ff @(posedge clk)
      if (w_en && w_cls == 4'(k)) mem[w_addr] <= w_data;

    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)        scores[k] <= '0;
      else if (clear)    scores[k] <= '0;
      else if (ev_valid) scores[k] <= scores[k] + SCORE_W'(mem[n]);
  end

  always_comb begin
    cls = '0;
    for (int k = 1; k < N_CLASSES; k++)
      if (scores[k] > scores[cls]) cls = 4'(k);
  end

endmodule
