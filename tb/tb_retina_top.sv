// tb_retina_top -- end-to-end test of the whole retina at its default size.
//
// Generates straight tracks through the 8 planes, turns them into strip
// samples on the 128 analog channels, and checks the reconstructed track
// parameters against the generated ones (within 0.35 grid step), for both
// interpolation methods. It also checks the latency of an isolated event
// (last sample to first track, below 100 cycles), finds tracks on the
// region borders, two tracks in one event, back-to-back events under output
// back-pressure, and a noise burst that overflows the cluster lanes and
// holds the engine pools busy long enough to stall the next end-of-event
// mark. Each of these mechanisms is counted; one that never happens counts
// as a failure.
module tb_retina_top;
  import retina_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #1 clk = ~clk;

  logic                 s_valid [N_LAYERS][N_LANES];
  logic [ADC_W-1:0]     s_adc   [N_LAYERS][N_LANES];
  logic [ADC_W-1:0]     adc_thr = 12'd100;
  logic [WGT_W-1:0]     wgt_thr = 24'd200000;
  interp_e              mode    = INTERP_COM;
  logic                 trk_valid, trk_ready, search_go;
  track_t               trk;
  logic [1:0]           trk_region;
  logic [N_LAYERS*N_LANES-1:0] overflow;

  retina_top dut (
    .clk, .rst, .s_valid, .s_adc, .adc_thr, .wgt_thr, .interp_mode(mode),
    .trk_valid, .trk, .trk_region, .trk_ready, .overflow, .search_go
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------- event stimulus
  bit hits [N_LAYERS][N_STRIPS];

  task automatic clear_hits();
    foreach (hits[l, s]) hits[l][s] = 1'b0;
  endtask

  // straight track with x- and x+ given in grid units (cells)
  task automatic add_track(real xm_cell, real xp_cell);
    real xp_q_t, xm_q_t, c, xq;
    int strip;
    xp_q_t = -161.0 + xp_cell * 70.0;
    xm_q_t = (xm_cell - 15.5) * 70.0;
    for (int k = 0; k < N_LAYERS; k++) begin
      c  = (real'(40 + 80*k) - 320.0) / (-280.0);
      xq = xp_q_t + xm_q_t * c;                // quarter of a half strip
      strip = int'($floor(xq / 8.0 + 0.5));    // 8 quarter units per strip
      if (strip >= 0 && strip < N_STRIPS) hits[k][strip] = 1'b1;
    end
  endtask

  longint last_sample_cyc [int];
  int     n_events = 0;

  task automatic send_event();
    for (int s = 0; s < LANE_STRIPS; s++) begin
      @(negedge clk);
      for (int l = 0; l < N_LAYERS; l++)
        for (int c = 0; c < N_LANES; c++) begin
          s_valid[l][c] = 1'b1;
          s_adc[l][c]   = hits[l][c*LANE_STRIPS + s] ? 12'd600 : 12'd20;
        end
    end
    last_sample_cyc[n_events] = cyc;
    n_events++;
    @(negedge clk);
    foreach (s_valid[l, c]) s_valid[l][c] = 1'b0;
  endtask

  // ---------------------------------------------------------- track record
  typedef struct { track_t t; longint at; } rec_t;
  rec_t got [$];
  always @(posedge clk)
    if (!rst && trk_valid && trk_ready) got.push_back('{trk, cyc});

  // expected tracks per event
  typedef struct { real xm; real xp; } truth_t;
  truth_t truth [int][$];

  task automatic gen(real xm_cell, real xp_cell);
    add_track(xm_cell, xp_cell);
    truth[n_events].push_back('{xm_cell, xp_cell});
  endtask

  // ---------------------------------------------------- mechanism counters
  int n_multi_region = 0, n_eoe_stall = 0, n_trk_bp = 0, n_border = 0;
  int n_com = 0, n_gauss = 0, n_two = 0;

  for (genvar b = 0; b < N_BOARDS; b++) begin : g_mon
    for (genvar i = 0; i < 2*N_LANES; i++) begin : g_in
      always @(posedge clk)
        if (!rst && dut.g_board[b].u_daq.u_sw.u_disp.h_pop[i] &&
            !dut.g_board[b].u_daq.u_sw.u_disp.h_ent[i].tok.eoe &&
            $countones(dut.g_board[b].u_daq.u_sw.u_disp.h_ent[i].mask) > 1)
          n_multi_region++;
    end
  end
  for (genvar r = 0; r < N_REGIONS; r++) begin : g_mon_r
    for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
      always @(posedge clk)
        if (!rst && dut.g_region[r].u_reg.u_pool.in_valid[g] &&
            dut.g_region[r].u_reg.u_pool.in_tok[g].eoe &&
            !dut.g_region[r].u_reg.u_pool.in_ready[g])
          n_eoe_stall++;
    end
  end
  always @(posedge clk) if (!rst && trk_valid && !trk_ready) n_trk_bp++;

  // ------------------------------------------------------------ checking
  function automatic real absr(real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check_event(int e, string what);
    foreach (truth[e][n]) begin
      bit found = 1'b0;
      real bxm = 0.0, bxp = 0.0;
      foreach (got[g]) if (got[g].t.evt == EVT_W'(e)) begin
        real xm = real'(got[g].t.xm) / 256.0;
        real xp = real'(got[g].t.xp) / 256.0;
        if (absr(xm - truth[e][n].xm) < 0.35 && absr(xp - truth[e][n].xp) < 0.35) begin
          found = 1'b1; bxm = xm; bxp = xp;
        end
      end
      check(found, $sformatf("%s: event %0d track (%.2f, %.2f) not reconstructed",
                             what, e, truth[e][n].xm, truth[e][n].xp));
      if (found && (int'($floor(truth[e][n].xp)) % REG_XP == 0 ||
                    int'($floor(truth[e][n].xp)) % REG_XP == REG_XP-1)) n_border++;
    end
  endtask

  function automatic longint first_track_at(int e);
    longint t = -1;
    foreach (got[g]) if (got[g].t.evt == EVT_W'(e) && (t < 0 || got[g].at < t)) t = got[g].at;
    return t;
  endfunction

  task automatic idle(int n);
    repeat (n) @(posedge clk);
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    foreach (s_valid[l, c]) begin s_valid[l][c] = 1'b0; s_adc[l][c] = '0; end
    trk_ready = 1'b1;
    repeat (5) @(posedge clk);
    rst = 1'b0;
    idle(5);

    // isolated single tracks, both interpolation methods
    for (int n = 0; n < 8; n++) begin
      real xm, xp;
      int e;
      mode = (n < 4) ? INTERP_COM : INTERP_GAUSS;
      if (mode == INTERP_COM) n_com++; else n_gauss++;
      xm = 3.0 + real'($urandom_range(0, 2500)) / 100.0;
      xp = 4.0 + real'($urandom_range(0, 5500)) / 100.0;
      clear_hits();
      e = n_events;
      gen(xm, xp);
      send_event();
      idle(150);
      check_event(e, mode == INTERP_COM ? "centre of mass" : "gaussian");
      begin
        longint t;
        t = first_track_at(e);
        check(t > 0 && t - last_sample_cyc[e] < 100,
              $sformatf("latency of event %0d is %0d cycles", e, t - last_sample_cyc[e]));
        if (n == 0) $display("latency, last sample to track: %0d cycles", t - last_sample_cyc[e]);
      end
    end

    // tracks on the region borders
    mode = INTERP_COM;
    for (int k = 0; k < 6; k++) begin
      real xps [6];
      int e;
      xps = '{15.6, 16.3, 31.7, 32.4, 47.8, 48.2};
      clear_hits();
      e = n_events;
      gen(10.0 + 2.0 * k, xps[k]);
      send_event();
      idle(150);
      check_event(e, "region border");
    end

    // two tracks in one event
    begin
      int e;
      clear_hits();
      e = n_events;
      gen(8.3, 12.6);
      gen(22.7, 44.2);
      send_event();
      idle(150);
      check_event(e, "two tracks");
      if (truth[e].size() == 2) n_two++;
    end

    // back-to-back events under output back-pressure
    fork
      begin
        for (int n = 0; n < 8; n++) begin
          mode = (n % 2) ? INTERP_GAUSS : INTERP_COM;
          clear_hits();
          gen(4.0 + 3.0 * n, 6.0 + 6.5 * n);
          send_event();
        end
      end
      begin
        repeat (600) begin
          @(negedge clk);
          trk_ready = ($urandom_range(0, 3) != 0);
        end
        trk_ready = 1'b1;
      end
    join
    idle(300);
    for (int e = n_events - 8; e < n_events; e++) check_event(e, "back-to-back");

    // noise burst: every other strip of planes 0 and 1 fires; the lanes
    // overflow and the many maxima keep the pools busy while the output is
    // held, so the next event's end mark has to wait.
    check(overflow == '0, "overflow flagged before the noise burst");
    clear_hits();
    for (int s = 0; s < N_STRIPS; s += 2) begin hits[0][s] = 1'b1; hits[1][s] = 1'b1; end
    for (int l = 2; l < N_LAYERS; l++)
      for (int s = 0; s < N_STRIPS; s++) hits[l][s] = ($urandom_range(0, 3) == 0);
    @(negedge clk);
    trk_ready = 1'b0;
    wgt_thr   = 24'd30000;
    send_event();
    clear_hits();
    begin
      int e;
      e = n_events;
      gen(20.2, 30.7);
      send_event();
      idle(400);
      wgt_thr   = 24'd200000;
      trk_ready = 1'b1;
      idle(3000);
      check(overflow != '0, "noise burst did not overflow a cluster lane");
      check_event(e, "event after the noise burst");
    end

    // mechanisms
    $display("mechanisms: multi-region clusters %0d, end-of-event stalls %0d, output back-pressure %0d, border tracks %0d, com %0d, gauss %0d, two-track %0d, overflow %0d",
             n_multi_region, n_eoe_stall, n_trk_bp, n_border, n_com, n_gauss, n_two, overflow != '0);
    check(n_multi_region > 0, "no cluster was routed to two regions");
    check(n_eoe_stall > 0,    "no end-of-event stall");
    check(n_trk_bp > 0,       "no output back-pressure");
    check(n_border > 0,       "no track on a region border");
    check(n_com > 0 && n_gauss > 0, "an interpolation method unused");
    check(n_two > 0,          "no two-track event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
