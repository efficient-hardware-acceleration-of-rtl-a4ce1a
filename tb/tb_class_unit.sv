// tb_class_unit: checks the fully connected classification unit.
//
// Random 8-bit weights are loaded for all ten classes; then random events of
// random channels, tiles and columns are applied, with gaps, over several
// "time steps", and the ten scores and the arg-max class are compared with
// sums computed here from pixel coordinates (x = 3i + s%3, y = 3j + s/3,
// input index (ch*10 + y)*10 + x). A final case makes two classes tie and
// expects the lower index. Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_class_unit;
  import csnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic clear = 0, ev_valid = 0, w_en = 0;
  tile_addr_t ev;
  logic [3:0] ev_s = 0, w_cls = 0, cls;
  logic [CH_W-1:0] ch = 0;
  logic [FC_AW-1:0] w_addr = 0;
  data_t w_data = 0;
  logic signed [SCORE_W-1:0] scores [N_CLASSES];

  class_unit dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int W[N_CLASSES][FC_IN];
  longint ref_s[N_CLASSES];

  task automatic compare(string tag);
    int best = 0;
    for (int k = 0; k < N_CLASSES; k++) begin
      check(longint'(scores[k]) == ref_s[k], $sformatf("%s score %0d: %0d expected %0d", tag, k, scores[k], ref_s[k]));
      if (ref_s[k] > ref_s[best]) best = k;
    end
    check(cls == 4'(best), $sformatf("%s class %0d expected %0d", tag, cls, best));
  endtask

  initial begin
    ev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N_CLASSES; k++)
      for (int n = 0; n < FC_IN; n++) begin
        W[k][n] = int'($urandom_range(0, 255)) - 128;
        @(negedge clk);
        w_en = 1; w_cls = 4'(k); w_addr = FC_AW'(n); w_data = data_t'(W[k][n]);
      end
    @(negedge clk);
    w_en = 0;
    for (int r = 0; r < 3; r++) begin
      clear = 1;
      @(negedge clk);
      clear = 0;
      foreach (ref_s[k]) ref_s[k] = 0;
      for (int e = 0; e < 600; e++) begin
        automatic int c = int'($urandom_range(0, 9)), x = int'($urandom_range(0, 9)), y = int'($urandom_range(0, 9));
        ev_valid = $urandom_range(0, 3) != 0;
        ch = CH_W'(c);
        ev = '{i: TA_W'(x / 3), j: TA_W'(y / 3)};
        ev_s = 4'(3 * (y % 3) + x % 3);
        if (ev_valid)
          for (int k = 0; k < N_CLASSES; k++) ref_s[k] += W[k][(c * FC_EDGE + y) * FC_EDGE + x];
        @(negedge clk);
      end
      ev_valid = 0;
      @(negedge clk);
      compare("random");
    end
    // tie between classes 3 and 8 at the top: the lower index wins
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int k = 0; k < N_CLASSES; k++) begin
      w_en = 1; w_cls = 4'(k); w_addr = 0; w_data = (k == 3 || k == 8) ? 8'sd100 : 8'sd5;
      @(negedge clk);
    end
    w_en = 0;
    ev_valid = 1; ch = 0; ev = '0; ev_s = 0;
    @(negedge clk);
    ev_valid = 0;
    @(negedge clk);
    check(cls == 4'd3 && scores[8] == 100, $sformatf("tie: class %0d expected 3", cls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
