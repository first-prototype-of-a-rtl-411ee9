// track_unit -- interpolation of the track parameters of one local maximum.
//
// A peak_t record holds the maximum's weight W0 and its neighbours along x-
// (wm_lo, wm_hi) and x+ (wp_lo, wp_hi). Each parameter is refined within its
// cell separately, by one of two methods selected by mode:
//   INTERP_COM   centre of mass of the three weights,
//                  d = (W+ - W-) / (W- + W0 + W+)   (in grid steps),
//                followed by the bias correction d += alpha*d, alpha =
//                ALPHA_Q8/256;
//   INTERP_GAUSS Gaussian interpolation,
//                  d = (ln W+ - ln W-) / (2 (2 ln W0 - ln W- - ln W+)),
//                with ln taken from a 1024 x 16-bit table of 4096*ln(w).
//                The three weights are first shifted right together until
//                W0 fits in 10 bits, which leaves the ratios unchanged.
// The offset is clamped to one grid step and added to the cell index:
// track.xm and track.xp are in grid units with 8 fractional bits
// (physical x = x(cell 0) + value/256 * Delta).
// Both formulas, the log table size and the bias correction follow the
// paper; the value of alpha (0.82, the small-offset limit for sigma = Delta),
// the number formats and the clamp are this design's.
//
// Timing: in_ready in idle; one cycle to form numerators and denominators,
// 32 cycles of division (both parameters in parallel); out_valid rises on the
// 34th clock edge after the one that takes the peak and stays until
// taken. Ten of these units per region work
// side by side.
module track_unit
  import retina_pkg::*;
#(
  parameter int unsigned ALPHA_Q8 = 211
) (
  input  logic    clk,
  input  logic    rst,
  input  interp_e mode,
  input  logic    in_valid,
  input  peak_t   in_pk,
  output logic    in_ready,
  output logic    out_valid,
  output track_t  out_trk,
  input  logic    out_ready
);
  localparam int NW = 32;
  localparam int DW = WGT_W + 2;
  localparam int LOG_W = 10;

  typedef enum logic [1:0] {S_IDLE, S_CALC, S_DIV, S_OUT} state_e;
  state_e state_q;

  peak_t pk_q;

  logic [LUT_W-1:0] log_lut [2**LOG_W];
  initial for (int a = 0; a < 2**LOG_W; a++) log_lut[a] = log_weight(a);

  // ---- numerators and denominators
  logic signed [NW:0] num_m, num_p;
  logic [DW-1:0]      den_m, den_p;

  function automatic int unsigned norm_shift(logic [WGT_W-1:0] w);
    int unsigned n;
    n = 0;
    for (int b = 0; b < WGT_W; b++) if (w[b]) n = b + 1;
    return (n > LOG_W) ? n - LOG_W : 0;
  endfunction

  function automatic logic signed [NW:0] lg(logic [WGT_W-1:0] w, int unsigned sh);
    logic [WGT_W-1:0] v;
    v = w >> sh;
    return (NW+1)'(log_lut[v[LOG_W-1:0]]);
  endfunction

  always_comb begin
    int unsigned sh;
    logic signed [NW:0] l0, lml, lmh, lpl, lph, dm, dp;
    sh  = norm_shift(pk_q.w0);
    l0  = lg(pk_q.w0, sh);
    lml = lg(pk_q.wm_lo, sh);
    lmh = lg(pk_q.wm_hi, sh);
    lpl = lg(pk_q.wp_lo, sh);
    lph = lg(pk_q.wp_hi, sh);
    dm  = 2 * (2 * l0 - lml - lmh);
    dp  = 2 * (2 * l0 - lpl - lph);
    if (mode == INTERP_GAUSS) begin
      num_m = lmh - lml;
      num_p = lph - lpl;
      den_m = (dm > 0) ? DW'(dm) : '0;
      den_p = (dp > 0) ? DW'(dp) : '0;
    end else begin
      num_m = (NW+1)'(pk_q.wm_hi) - (NW+1)'(pk_q.wm_lo);
      num_p = (NW+1)'(pk_q.wp_hi) - (NW+1)'(pk_q.wp_lo);
      den_m = DW'(pk_q.wm_lo) + DW'(pk_q.w0) + DW'(pk_q.wm_hi);
      den_p = DW'(pk_q.wp_lo) + DW'(pk_q.w0) + DW'(pk_q.wp_hi);
    end
  end

  function automatic logic [NW-1:0] mag_q8(logic signed [NW:0] n);
    logic [NW:0] a;
    a = n[NW] ? -n : n;
    return NW'(a << FRAC);
  endfunction

  // ---- dividers
  logic          div_start;
  logic          dm_done, dp_done, dm_busy, dp_busy;
  logic [NW-1:0] qm, qp;
  logic          neg_m_q, neg_p_q, zero_m_q, zero_p_q;
  interp_e       mode_q;

  assign div_start = (state_q == S_CALC);

  seq_div #(.NW(NW), .DW(DW)) u_div_m (
    .clk, .rst, .start(div_start), .dividend(mag_q8(num_m)), .divisor(den_m),
    .busy(dm_busy), .done(dm_done), .quotient(qm));
  seq_div #(.NW(NW), .DW(DW)) u_div_p (
    .clk, .rst, .start(div_start), .dividend(mag_q8(num_p)), .divisor(den_p),
    .busy(dp_busy), .done(dp_done), .quotient(qp));

  localparam logic [NW-1:0] ONE = NW'(1) << FRAC;

  function automatic logic signed [POS_W-1:0] finish(logic [NW-1:0] q, logic neg, logic zero,
                                                     interp_e md, logic [5:0] idx);
    logic [NW+8:0] c;
    logic [NW-1:0] m;
    if (zero) m = '0;
    else if (md == INTERP_COM) begin
      c = (NW+9)'(q) + (((NW+9)'(q) * (NW+9)'(ALPHA_Q8)) >> 8);
      m = (c > (NW+9)'(ONE)) ? ONE : NW'(c);
    end else
      m = (q > ONE) ? ONE : q;
    return (POS_W'(idx) << FRAC) + (neg ? -POS_W'(m) : POS_W'(m));
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q   <= S_IDLE;
      pk_q      <= '0;
      out_valid <= 1'b0;
      out_trk   <= '0;
      neg_m_q   <= 1'b0;
      neg_p_q   <= 1'b0;
      zero_m_q  <= 1'b0;
      zero_p_q  <= 1'b0;
      mode_q    <= INTERP_COM;
    end else begin
      unique case (state_q)
        S_IDLE: if (in_valid) begin
          pk_q    <= in_pk;
          state_q <= S_CALC;
        end
        S_CALC: begin
          neg_m_q  <= num_m[NW];
          neg_p_q  <= num_p[NW];
          zero_m_q <= (den_m == '0) || (num_m == '0);
          zero_p_q <= (den_p == '0) || (num_p == '0);
          mode_q   <= mode;
          state_q  <= S_DIV;
        end
        S_DIV: if (dm_done) begin
          out_valid  <= 1'b1;
          out_trk.evt <= pk_q.evt;
          out_trk.w0  <= pk_q.w0;
          out_trk.xm  <= finish(qm, neg_m_q, zero_m_q, mode_q, {1'b0, pk_q.xm_idx});
          out_trk.xp  <= finish(qp, neg_p_q, zero_p_q, mode_q, pk_q.xp_idx);
          state_q     <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          state_q   <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign in_ready = (state_q == S_IDLE);

  a_div_pair: assert property (@(posedge clk) disable iff (rst) dm_done == dp_done)
    else $error("track_unit: dividers out of step");

endmodule
