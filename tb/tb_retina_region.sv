// tb_retina_region -- region 0 on its own: the four board inputs deliver
// the clusters of a straight track (board b carries planes 2b and 2b+1)
// plus a few noise clusters, then their end-of-event tokens; go follows
// final_o as if the other regions were always ready, and the neighbour
// column is empty. Checks that a track comes out within 0.35 grid steps of
// the generated parameters, with both interpolation methods, and that it
// comes out in under 100 cycles from the last end-of-event token.
module tb_retina_region;
  import retina_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic             in_valid [N_BOARDS];
  token_t           in_tok   [N_BOARDS];
  logic             in_ready [N_BOARDS];
  logic [WGT_W-1:0] thr;
  interp_e          mode;
  logic             final_o, go;
  logic [WGT_W-1:0] edge_lo [N_XM], edge_hi [N_XM], nb_lo [N_XM], nb_hi [N_XM];
  logic             trk_valid, trk_ready;
  track_t           trk;

  retina_region #(.REGION(0)) dut (.*);

  assign go = final_o;

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

  task automatic send(int b, token_t t);
    in_valid[b] = 1'b1;
    in_tok[b]   = t;
    @(posedge clk);
    while (!in_ready[b]) @(posedge clk);
    @(negedge clk);
    in_valid[b] = 1'b0;
  endtask

  initial begin
    thr = 24'd200000;
    trk_ready = 1'b1;
    for (int b = 0; b < N_BOARDS; b++) begin in_valid[b] = 1'b0; in_tok[b] = '0; end
    for (int r = 0; r < N_XM; r++) begin nb_lo[r] = '0; nb_hi[r] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int ev = 0; ev < 6; ev++) begin
      real xm_c, xp_c;
      int  t0, lat;
      bit  found;
      mode = (ev % 2) ? INTERP_GAUSS : INTERP_COM;
      xm_c = 4.0 + real'($urandom_range(0, 2400)) / 100.0;
      xp_c = 2.0 + real'($urandom_range(0, 1200)) / 100.0;
      fork
        for (int b = 0; b < N_BOARDS; b++) begin
          automatic int bb = b;
          fork
            begin
              for (int p = 0; p < 2; p++) begin
                int k;
                real xq;
                token_t t;
                k  = 2 * bb + p;
                xq = -161.0 + xp_c * 70.0 + (xm_c - 15.5) * 70.0 * (real'(40 + 80*k) - 320.0) / (-280.0);
                t  = '0;
                t.layer = L_W'(k);
                t.z = Z_W'(40 + 80 * k);
                t.x = X_W'(2 * int'($floor(xq / 8.0 + 0.5)));
                if (xq >= 0.0 && xq < 4088.0) send(bb, t);
                t.x = X_W'($urandom_range(0, 1022));
                send(bb, t);                                  // one noise cluster
              end
              begin
                token_t t;
                t = '0;
                t.eoe = 1'b1;
                send(bb, t);
              end
            end
          join_none
        end
      join
      wait fork;
      t0 = 0;
      found = 1'b0;
      lat = 0;
      while (lat < 200 && !found) begin
        @(posedge clk);
        lat++;
        if (trk_valid) begin
          if (absr(real'(trk.xm) / 256.0 - xm_c) < 0.35 && absr(real'(trk.xp) / 256.0 - xp_c) < 0.35)
            found = 1'b1;
        end
      end
      check(found, $sformatf("event %0d: track (%.2f, %.2f) not found", ev, xm_c, xp_c));
      check(lat < 100, $sformatf("event %0d: %0d cycles", ev, lat));
      repeat (60) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
