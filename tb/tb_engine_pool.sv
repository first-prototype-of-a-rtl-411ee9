// tb_engine_pool -- region 1 of the grid fed with two events of track and
// noise clusters (every cluster offered to all 16 engine groups). The
// testbench computes every cell's weight itself, and the neighbour
// columns that regions 0 and 2 would supply, finds the local maxima with
// the pool's rule, and checks the peak records (cell, weight, four
// neighbours) one by one. The peak output is stalled in the first event so
// that the next event's end-of-event token must wait (in_ready low).
module tb_engine_pool;
  import retina_pkg::*;
  `include "tb_ref.svh"

  localparam int REGION = 1;
  localparam int C0 = REGION * REG_XP;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic             in_valid [N_GROUPS];
  token_t           in_tok   [N_GROUPS];
  logic             in_ready [N_GROUPS];
  logic [WGT_W-1:0] thr;
  logic             final_o, go, pk_valid, pk_ready, busy;
  logic [WGT_W-1:0] edge_lo [N_XM], edge_hi [N_XM], nb_lo [N_XM], nb_hi [N_XM];
  peak_t            pk;

  engine_pool #(.REGION(REGION)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected weights, columns C0-1 .. C0+16
  longint wexp [N_XM][REG_XP+2];
  typedef struct { int x; int z; int k; } clu_t;
  clu_t clus [$];

  function automatic longint we(int r, int c);   // c relative to the region
    if (r < 0 || r >= N_XM) return 0;
    return wexp[r][c+1];
  endfunction

  task automatic make_event(real xm_cell, real xp_cell, int noise);
    clus.delete();
    for (int k = 0; k < N_LAYERS; k++) begin
      real xq;
      int x;
      xq = -161.0 + xp_cell * 70.0 + (xm_cell - 15.5) * 70.0 * (real'(40 + 80*k) - 320.0) / (-280.0);
      x = 2 * int'($floor(xq / 8.0 + 0.5));
      if (x >= 0 && x <= 1022) clus.push_back('{x, 40 + 80*k, k});
    end
    repeat (noise) begin
      int k;
      k = $urandom_range(0, N_LAYERS-1);
      clus.push_back('{int'($urandom_range(0, 1022)), 40 + 80*k, k});
    end
    for (int r = 0; r < N_XM; r++)
      for (int c = -1; c <= int'(REG_XP); c++) begin
        longint s;
        s = 0;
        foreach (clus[n]) s += ref_resp(ref_dist(clus[n].x, clus[n].z, r, C0 + c));
        wexp[r][c+1] = s;
      end
  endtask

  task automatic send_clusters();
    foreach (clus[n]) begin
      @(negedge clk);
      for (int g = 0; g < N_GROUPS; g++) begin
        in_valid[g] = 1'b1;
        in_tok[g]   = '{eoe: 1'b0, layer: L_W'(clus[n].k), z: Z_W'(clus[n].z), x: X_W'(clus[n].x)};
      end
    end
    @(negedge clk);
    for (int g = 0; g < N_GROUPS; g++) begin
      in_tok[g] = '0;
      in_tok[g].eoe = 1'b1;
    end
    // hold each group's end mark until it is taken
    begin
      bit all_taken;
      bit taken [N_GROUPS];
      for (int g = 0; g < N_GROUPS; g++) taken[g] = 1'b0;
      all_taken = 1'b0;
      while (!all_taken) begin
        @(posedge clk);
        all_taken = 1'b1;
        for (int g = 0; g < N_GROUPS; g++) begin
          if (in_valid[g] && in_ready[g]) taken[g] = 1'b1;
          all_taken &= taken[g];
        end
        @(negedge clk);
        for (int g = 0; g < N_GROUPS; g++) if (taken[g]) in_valid[g] = 1'b0;
      end
    end
  endtask

  // peaks expected in the order of the pool (cell index), with their weights
  typedef struct { int r; int c; longint w0, ml, mh, pl, ph; } cell_t;
  cell_t exp_pk [$];

  task automatic expect_peaks();
    exp_pk.delete();
    for (int r = 0; r < N_XM; r++)
      for (int c = 0; c < REG_XP; c++) begin
        longint w;
        w = we(r, c);
        if (w >= longint'(thr) && w > 0 && w > we(r, c-1) && w >= we(r, c+1) &&
            w > we(r-1, c) && w >= we(r+1, c))
          exp_pk.push_back('{r, c, w, we(r-1, c), we(r+1, c), we(r, c-1), we(r, c+1)});
      end
  endtask

  int stall_seen = 0;
  always @(posedge clk)
    for (int g = 0; g < N_GROUPS; g++)
      if (!rst && in_valid[g] && in_tok[g].eoe && !in_ready[g] && busy) stall_seen++;

  task automatic go_and_check(int ev, bit stall_out);
    wait (final_o);
    @(negedge clk);
    for (int r = 0; r < N_XM; r++) begin
      nb_lo[r] = WGT_W'(we(r, -1));
      nb_hi[r] = WGT_W'(we(r, REG_XP));
      check(edge_lo[r] == WGT_W'(we(r, 0)) && edge_hi[r] == WGT_W'(we(r, REG_XP-1)),
            $sformatf("event %0d row %0d: border weights %0d %0d expected %0d %0d",
                      ev, r, edge_lo[r], edge_hi[r], we(r, 0), we(r, REG_XP-1)));
    end
    expect_peaks();
    check(exp_pk.size() > 0, "no peak expected");
    go = 1'b1;
    @(negedge clk);
    go = 1'b0;
    pk_ready = !stall_out;
  endtask

  task automatic collect(int ev, cell_t ex [$]);
    foreach (ex[n]) begin
      @(posedge clk);
      while (!(pk_valid && pk_ready)) @(posedge clk);
      check(pk.xm_idx == 5'(ex[n].r) && pk.xp_idx == 6'(C0 + ex[n].c) &&
            pk.w0 == WGT_W'(ex[n].w0) &&
            pk.wm_lo == WGT_W'(ex[n].ml) && pk.wm_hi == WGT_W'(ex[n].mh) &&
            pk.wp_lo == WGT_W'(ex[n].pl) && pk.wp_hi == WGT_W'(ex[n].ph) &&
            pk.evt == EVT_W'(ev),
            $sformatf("event %0d peak %0d: got cell (%0d,%0d) w %0d expected (%0d,%0d) w %0d",
                      ev, n, pk.xm_idx, pk.xp_idx, pk.w0, ex[n].r, C0 + ex[n].c, ex[n].w0));
    end
    repeat (3) @(posedge clk);
    check(!pk_valid && !busy, "extra peaks");
  endtask

  initial begin
    thr = 24'd150000;
    go = 1'b0;
    pk_ready = 1'b1;
    for (int g = 0; g < N_GROUPS; g++) begin in_valid[g] = 1'b0; in_tok[g] = '0; end
    for (int r = 0; r < N_XM; r++) begin nb_lo[r] = '0; nb_hi[r] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // event 0: track near the lower border of the region, peak output stalled
    make_event(12.3, 16.2, 10);
    send_clusters();
    go_and_check(0, 1'b1);
    begin
      cell_t ex0 [$];
      ex0 = exp_pk;
      // event 1 arrives while event 0's peaks are still held
      make_event(25.6, 27.4, 20);
      fork
        send_clusters();
        begin
          repeat (60) @(negedge clk);
          check(busy, "pool not busy while peaks wait");
          pk_ready = 1'b1;
          collect(0, ex0);
        end
      join
    end
    check(stall_seen > 0, "end of event not held while busy");
    go_and_check(1, 1'b0);
    collect(1, exp_pk);
    $display("stall cycles %0d", stall_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
