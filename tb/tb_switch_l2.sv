// tb_switch_l2 -- second switch level of region 2, 4 inputs to the 16
// engine groups (x- rows 2g, 2g+1, x+ columns 32..47).
// Every event, each input offers up to two clusters with x values unique in
// the event, then its end-of-event token; outputs stall at random. For
// every output the testbench computes which clusters must arrive (some cell
// it serves lies within 2 sigma, s < 140 quarter units) and which may
// (s < 150, the routing margin), and checks that each output sees all the
// clusters it must, none it may not, none twice, and one end-of-event token
// per event after the event's clusters.
module tb_switch_l2;
  import retina_pkg::*;
  `include "tb_ref.svh"

  localparam int NI = N_BOARDS, NO = N_GROUPS;
  localparam int EVENTS = 12;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic   in_valid  [NI];
  token_t in_tok    [NI];
  logic   in_ready  [NI];
  logic   out_valid [NO];
  token_t out_tok   [NO];
  logic   out_ready [NO];

  switch_l2 #(.REGION(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // minimum distance between cluster and the cells output o serves
  function automatic int min_dist(int o, int x, int z);
    int m;
    m = 1 << 20;
    for (int i = 2 * o; i < 2 * o + 2; i++)
      for (int j = 2 * REG_XP; j < 3 * REG_XP; j++)
        if (ref_dist(x, z, i, j) < m) m = ref_dist(x, z, i, j);
    return m;
  endfunction

  typedef struct { int x; int z; int k; } clu_t;
  clu_t sent [EVENTS][$];
  bit   got  [EVENTS][NO][int];     // received x values
  int   eoe_n [NO];
  int   inputs_done;

  for (genvar i = 0; i < NI; i++) begin : g_drv
    initial begin
      in_valid[i] = 1'b0;
      in_tok[i]   = '0;
      @(negedge clk);
      while (rst) @(negedge clk);
      for (int e = 0; e < EVENTS; e++) begin
        int n;
        n = $urandom_range(0, 2);
        for (int c = 0; c <= n; c++) begin
          token_t t;
          t = '0;
          if (c == n) t.eoe = 1'b1;
          else begin
            int k, x;
            k = $urandom_range(0, N_LAYERS-1);
            x = 2 * (i * 2 + c) + 16 * $urandom_range(0, 63);   // unique per input and slot
            t.layer = L_W'(k);
            t.z     = Z_W'(40 + 80 * k);
            t.x     = X_W'(x);
            sent[e].push_back('{x, 40 + 80 * k, k});
          end
          in_valid[i] = 1'b1;
          in_tok[i]   = t;
          @(posedge clk);
          while (!in_ready[i]) @(posedge clk);
          @(negedge clk);
          in_valid[i] = 1'b0;
          repeat ($urandom_range(0, 1)) @(negedge clk);
        end
      end
      inputs_done++;
    end
  end

  for (genvar o = 0; o < NO; o++) begin : g_mon
    always @(posedge clk) begin
      if (!rst) out_ready[o] <= ($urandom_range(0, 4) != 0);
      if (!rst && out_valid[o] && out_ready[o]) begin
        if (out_tok[o].eoe) eoe_n[o]++;
        else if (eoe_n[o] < EVENTS) begin
          int x;
          x = int'(out_tok[o].x);
          check(!got[eoe_n[o]][o].exists(x), $sformatf("output %0d: x %0d twice", o, x));
          got[eoe_n[o]][o][x] = 1'b1;
        end
      end
    end
  end

  initial begin
    inputs_done = 0;
    for (int o = 0; o < NO; o++) begin out_ready[o] = 1'b0; eoe_n[o] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    wait (inputs_done == NI);
    repeat (300) @(posedge clk);
    for (int o = 0; o < NO; o++)
      check(eoe_n[o] == EVENTS, $sformatf("output %0d: %0d end-of-event tokens", o, eoe_n[o]));
    for (int e = 0; e < EVENTS; e++)
      for (int o = 0; o < NO; o++) begin
        int n_must;
        n_must = 0;
        foreach (sent[e][n]) begin
          int d;
          d = min_dist(o, sent[e][n].x, sent[e][n].z);
          if (d < 140) begin
            n_must++;
            check(got[e][o].exists(sent[e][n].x),
                  $sformatf("event %0d output %0d: cluster x %0d (s=%0d) missing", e, o, sent[e][n].x, d));
          end else if (d >= 150)
            check(!got[e][o].exists(sent[e][n].x),
                  $sformatf("event %0d output %0d: cluster x %0d (s=%0d) not needed", e, o, sent[e][n].x, d));
        end
        check(got[e][o].size() >= n_must, "fewer clusters than needed");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
