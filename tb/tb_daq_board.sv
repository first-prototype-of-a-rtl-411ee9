// tb_daq_board -- board 0 (planes 0 and 1): random strip hits on its 32
// channels, frame after frame. The testbench clusters the hits itself and
// checks that every region output receives each cluster that has a cell of
// that region within 2 sigma, with the right plane, z and x, no cluster that
// is far from all of the region's cells, and one end-of-event token per frame.
module tb_daq_board;
  import retina_pkg::*;
  `include "tb_ref.svh"

  localparam int FRAMES = 6;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic             s_valid [2*N_LANES];
  logic [ADC_W-1:0] s_adc   [2*N_LANES];
  logic [ADC_W-1:0] adc_thr;
  logic             out_valid [N_REGIONS];
  token_t           out_tok   [N_REGIONS];
  logic             out_ready [N_REGIONS];
  logic [2*N_LANES-1:0] overflow;

  daq_board #(.BOARD(0)) dut (.*);

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

  function automatic int min_dist(int r, int x, int z);
    int m;
    m = 1 << 20;
    for (int i = 0; i < N_XM; i++)
      for (int j = r * REG_XP; j < (r + 1) * REG_XP; j++)
        if (ref_dist(x, z, i, j) < m) m = ref_dist(x, z, i, j);
    return m;
  endfunction

  typedef struct { int x; int k; } clu_t;
  clu_t sent [FRAMES][$];
  bit   got  [FRAMES][N_REGIONS][int];
  int   eoe_n [N_REGIONS];

  for (genvar r = 0; r < N_REGIONS; r++) begin : g_mon
    always @(posedge clk) begin
      if (!rst) out_ready[r] <= ($urandom_range(0, 5) != 0);
      if (!rst && out_valid[r] && out_ready[r]) begin
        if (out_tok[r].eoe) eoe_n[r]++;
        else if (eoe_n[r] < FRAMES) begin
          int key;
          key = int'(out_tok[r].layer) * 2048 + int'(out_tok[r].x);
          check(out_tok[r].z == Z_W'(40 + 80 * int'(out_tok[r].layer)), "z does not match plane");
          check(!got[eoe_n[r]][r].exists(key), "cluster twice");
          got[eoe_n[r]][r][key] = 1'b1;
        end
      end
    end
  end

  initial begin
    adc_thr = 12'd300;
    for (int r = 0; r < N_REGIONS; r++) begin out_ready[r] = 1'b0; eoe_n[r] = 0; end
    for (int n = 0; n < 2*N_LANES; n++) begin s_valid[n] = 1'b0; s_adc[n] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int f = 0; f < FRAMES; f++) begin
      bit hit [2][N_STRIPS];
      for (int p = 0; p < 2; p++) begin
        for (int s = 0; s < N_STRIPS; s++) hit[p][s] = ($urandom_range(0, 11) == 0);
        for (int c = 0; c < N_LANES; c++) begin
          int s;
          s = 0;
          while (s < LANE_STRIPS) begin
            if (hit[p][c*LANE_STRIPS + s]) begin
              int a;
              a = s;
              while (s + 1 < LANE_STRIPS && hit[p][c*LANE_STRIPS + s + 1]) s++;
              sent[f].push_back('{2*c*LANE_STRIPS + a + s, p});
            end
            s++;
          end
        end
      end
      for (int s = 0; s < LANE_STRIPS; s++) begin
        @(negedge clk);
        for (int p = 0; p < 2; p++)
          for (int c = 0; c < N_LANES; c++) begin
            s_valid[p*N_LANES + c] = 1'b1;
            s_adc[p*N_LANES + c]   = hit[p][c*LANE_STRIPS + s] ? 12'd900 : 12'd40;
          end
        // a slower readout: one sample every four cycles
        repeat (3) begin
          @(negedge clk);
          for (int n = 0; n < 2*N_LANES; n++) s_valid[n] = 1'b0;
        end
      end
    end
    repeat (400) @(posedge clk);
    check(overflow == '0, "lane overflow");
    for (int r = 0; r < N_REGIONS; r++)
      check(eoe_n[r] == FRAMES, $sformatf("region %0d: %0d end-of-event tokens", r, eoe_n[r]));
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < N_REGIONS; r++)
        foreach (sent[f][n]) begin
          int d, key;
          d   = min_dist(r, sent[f][n].x, 40 + 80 * sent[f][n].k);
          key = sent[f][n].k * 2048 + sent[f][n].x;
          if (d < 140) check(got[f][r].exists(key),
                             $sformatf("frame %0d region %0d: cluster %0d missing", f, r, key));
          else if (d >= 150) check(!got[f][r].exists(key),
                                   $sformatf("frame %0d region %0d: cluster %0d not needed", f, r, key));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
