// tb_track_unit -- peaks built from Gaussian-shaped weights with a known
// offset of the track inside the cell. In centre-of-mass mode the result is
// compared with the formula (W+ - W-)/(W- + W0 + W+) * (1 + 211/256),
// clamped to one step, evaluated in real arithmetic (within 3/256 of a
// step); in Gaussian mode with the true offset (within 6/256). Also checks
// the 34-cycle latency and that the unit holds its result under stall.
module tb_track_unit;
  import retina_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  interp_e mode;
  logic    in_valid, in_ready, out_valid, out_ready;
  peak_t   in_pk;
  track_t  out_trk;

  track_unit dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic real com(real lo, real c, real hi);
    real d;
    d = (hi - lo) / (lo + c + hi);
    d = d * (1.0 + 211.0 / 256.0);
    if (d > 1.0) d = 1.0;
    if (d < -1.0) d = -1.0;
    return d;
  endfunction

  initial begin
    in_valid  = 1'b0;
    out_ready = 1'b1;
    in_pk     = '0;
    mode      = INTERP_COM;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < 40; n++) begin
      real um, up, a, s;
      real w0, wml, wmh, wpl, wph, em, ep;
      int lat;
      mode = (n % 2) ? INTERP_GAUSS : INTERP_COM;
      um = (real'($urandom_range(0, 1000)) - 500.0) / 1001.0;   // offsets in (-0.5, 0.5)
      up = (real'($urandom_range(0, 1000)) - 500.0) / 1001.0;
      a  = 2000.0 + real'($urandom_range(0, 2000000));
      s  = 1.0;                                                 // sigma = one step
      w0  = a * $exp(-0.5 * (um*um + up*up) / (s*s));
      wml = a * $exp(-0.5 * ((1.0+um)*(1.0+um) + up*up));
      wmh = a * $exp(-0.5 * ((1.0-um)*(1.0-um) + up*up));
      wpl = a * $exp(-0.5 * (um*um + (1.0+up)*(1.0+up)));
      wph = a * $exp(-0.5 * (um*um + (1.0-up)*(1.0-up)));
      in_pk.evt    = EVT_W'(n);
      in_pk.xm_idx = 5'($urandom_range(1, 30));
      in_pk.xp_idx = 6'($urandom_range(1, 62));
      in_pk.w0     = WGT_W'(longint'(w0));
      in_pk.wm_lo  = WGT_W'(longint'(wml));
      in_pk.wm_hi  = WGT_W'(longint'(wmh));
      in_pk.wp_lo  = WGT_W'(longint'(wpl));
      in_pk.wp_hi  = WGT_W'(longint'(wph));
      if (mode == INTERP_COM) begin
        em = com(real'(in_pk.wm_lo), real'(in_pk.w0), real'(in_pk.wm_hi));
        ep = com(real'(in_pk.wp_lo), real'(in_pk.w0), real'(in_pk.wp_hi));
      end else begin
        em = um;    // the weights peak at x0 + u along each axis
        ep = up;
      end
      in_valid = 1'b1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 1'b0;
      lat = 0;
      out_ready = (n % 3 != 0);
      while (!out_valid) begin @(negedge clk); lat++; end
      check(lat == 34, $sformatf("latency %0d cycles", lat));
      if (!out_ready) begin
        track_t held;
        held = out_trk;
        repeat (3) @(negedge clk);
        check(out_valid && out_trk == held, "result not held under stall");
        out_ready = 1'b1;
      end
      begin
        real gm, gp, tol;
        gm  = real'(out_trk.xm) / 256.0 - real'(in_pk.xm_idx);
        gp  = real'(out_trk.xp) / 256.0 - real'(in_pk.xp_idx);
        tol = (mode == INTERP_COM) ? 3.0 / 256.0 : 6.0 / 256.0;
        check(absr(gm - em) <= tol && absr(gp - ep) <= tol && out_trk.evt == EVT_W'(n) &&
              out_trk.w0 == in_pk.w0,
              $sformatf("peak %0d mode %0d: got (%.4f, %.4f) expected (%.4f, %.4f)",
                        n, mode, gm, gp, em, ep));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
