// engine -- double engine: the retina response of two neighbouring cells.
//
// The engine serves cells (XM_IDX, XP_IDX) and (XM_IDX, XP_IDX+1) of the
// (x-, x+) grid. For every cluster (x, z) it receives it forms, for each
// cell, the distance s = |4x - intercept(z)| between the cluster and the
// cell's track receptor on that plane, looks up the Gaussian receptor
// response exp(-s^2/2sigma^2) (zero beyond 2 sigma) and adds it to the cell's
// weight. This is the chain of the engine diagram: X minus LUT s, absolute
// value, LUT exp, accumulator. LUT s is indexed by the plane position z and
// holds the intercept of cell A; cell B lies one grid step further in x+, so
// its intercept is LUT s + Delta and one LUT s serves both cells. LUT exp has
// two read ports, one per cell. Both tables are 1024 x 16 bit and are
// filled at time zero by initial loops from the grid geometry in retina_pkg.
//
// An end-of-event token follows the clusters down the same pipeline; when
// it reaches the accumulator the two sums are copied to w_a/w_b, res_valid
// pulses for one cycle and the accumulators restart from zero, so the next
// event can accumulate while the previous result is being examined.
//
// Timing: 3-stage pipeline, in_valid in cycle t updates the accumulator at
// the clock edge ending cycle t+2; res_valid rises 3 cycles after the
// end-of-event token is taken. One token per cycle, no back-pressure.
// Weights saturate at 2^WGT_W-1.
module engine
  import retina_pkg::*;
#(
  parameter int XM_IDX = 0,
  parameter int XP_IDX = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  token_t           in_tok,
  output logic [WGT_W-1:0] w_a,
  output logic [WGT_W-1:0] w_b,
  output logic             res_valid
);

  // LUT s (intercept of cell A versus z) and LUT exp (receptor response
  // versus distance), 1024 words of 16 bits each, filled from the geometry.
  logic [LUT_W-1:0] lut_s   [1024];
  logic [LUT_W-1:0] lut_exp [1024];

  initial begin
    for (int a = 0; a < 1024; a++) begin
      lut_s[a]   = LUT_W'(intercept_q(XM_IDX, XP_IDX, a));
      lut_exp[a] = exp_weight(a);
    end
  end

  // ---- stage 1: X - LUT s, |.|
  logic              s1_valid, s1_eoe;
  logic [D_W-1:0]    s1_da, s1_db;

  function automatic logic [D_W-1:0] sat_abs(logic signed [LUT_W+1:0] v);
    logic [LUT_W+1:0] a;
    a = v[LUT_W+1] ? (LUT_W+2)'(-v) : (LUT_W+2)'(v);
    return (a > (LUT_W+2)'(2**D_W - 1)) ? D_W'(2**D_W - 1) : a[D_W-1:0];
  endfunction

  logic signed [LUT_W+1:0] diff_a, diff_b;
  always_comb begin
    diff_a = (LUT_W+2)'(signed'({2'b00, in_tok.x, 2'b00}))
           - (LUT_W+2)'(signed'(lut_s[in_tok.z]));
    diff_b = diff_a - (LUT_W+2)'(DXP_Q);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0;
      s1_eoe   <= 1'b0;
      s1_da    <= '0;
      s1_db    <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_eoe   <= in_valid && in_tok.eoe;
      s1_da    <= sat_abs(diff_a);
      s1_db    <= sat_abs(diff_b);
    end
  end

  // ---- stage 2: LUT exp
  logic             s2_valid, s2_eoe;
  logic [LUT_W-1:0] s2_ea, s2_eb;
  always_ff @(posedge clk) begin
    if (rst) begin
      s2_valid <= 1'b0;
      s2_eoe   <= 1'b0;
      s2_ea    <= '0;
      s2_eb    <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_eoe   <= s1_eoe;
      s2_ea    <= lut_exp[s1_da];
      s2_eb    <= lut_exp[s1_db];
    end
  end

  // ---- stage 3: accumulate, latch at end of event
  logic [WGT_W-1:0] acc_a, acc_b;

  function automatic logic [WGT_W-1:0] sat_add(logic [WGT_W-1:0] a, logic [LUT_W-1:0] b);
    logic [WGT_W:0] s;
    s = {1'b0, a} + (WGT_W+1)'(b);
    return s[WGT_W] ? '1 : s[WGT_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_a     <= '0;
      acc_b     <= '0;
      w_a       <= '0;
      w_b       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (s2_valid && s2_eoe) begin
        w_a       <= acc_a;
        w_b       <= acc_b;
        acc_a     <= '0;
        acc_b     <= '0;
        res_valid <= 1'b1;
      end else if (s2_valid) begin
        acc_a <= sat_add(acc_a, s2_ea);
        acc_b <= sat_add(acc_b, s2_eb);
      end
    end
  end

endmodule
