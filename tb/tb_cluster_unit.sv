// tb_cluster_unit -- random strip patterns on the 16 channels of plane 5.
// The testbench finds the runs of hit strips itself and checks every lane's
// token stream: the clusters (x = first + last strip, plane 5, its z) in
// order, then one end-of-event token per frame. A last frame with every
// other strip hit, read while the outputs are stalled, must set the
// overflow flags.
module tb_cluster_unit;
  import retina_pkg::*;

  localparam int LAYER = 5;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic             s_valid   [N_LANES];
  logic [ADC_W-1:0] s_adc     [N_LANES];
  logic [ADC_W-1:0] thr;
  logic             out_valid [N_LANES];
  token_t           out_tok   [N_LANES];
  logic             out_ready [N_LANES];
  logic [N_LANES-1:0] overflow;

  cluster_unit #(.LAYER(LAYER)) dut (.*);

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

  token_t exp_q [N_LANES][$];
  bit     stall = 1'b0;

  for (genvar c = 0; c < N_LANES; c++) begin : g_mon
    always @(posedge clk) begin
      if (!rst && out_valid[c] && out_ready[c]) begin
        check(exp_q[c].size() > 0 && out_tok[c] == exp_q[c][0],
              $sformatf("lane %0d: got %0h expected %0h", c, out_tok[c],
                        exp_q[c].size() > 0 ? exp_q[c][0] : '0));
        if (exp_q[c].size() > 0) void'(exp_q[c].pop_front());
      end
    end
    assign out_ready[c] = !stall;
  end

  task automatic frame(bit alternate);
    bit hit [N_LANES][LANE_STRIPS];
    for (int c = 0; c < N_LANES; c++) begin
      int s;
      for (s = 0; s < LANE_STRIPS; s++)
        hit[c][s] = alternate ? (s % 2 == 0) : ($urandom_range(0, 3) == 0);
      // expected clusters
      s = 0;
      while (s < LANE_STRIPS) begin
        if (hit[c][s]) begin
          int a;
          token_t t;
          a = s;
          while (s + 1 < LANE_STRIPS && hit[c][s+1]) s++;
          t.eoe = 1'b0; t.layer = L_W'(LAYER); t.z = Z_W'(40 + 80 * LAYER);
          t.x = X_W'((c * 32 + a) + (c * 32 + s));
          exp_q[c].push_back(t);
        end
        s++;
      end
      begin
        token_t t;
        t = '0; t.eoe = 1'b1; t.layer = L_W'(LAYER); t.z = Z_W'(40 + 80 * LAYER);
        exp_q[c].push_back(t);
      end
    end
    for (int s = 0; s < LANE_STRIPS; s++) begin
      @(negedge clk);
      for (int c = 0; c < N_LANES; c++) begin
        s_valid[c] = 1'b1;
        s_adc[c]   = hit[c][s] ? ADC_W'(thr + 1 + $urandom_range(0, 500)) : ADC_W'($urandom_range(0, thr));
      end
      // random gaps between samples, as with a slower readout clock
      if ($urandom_range(0, 2) == 0) begin
        @(negedge clk);
        for (int c = 0; c < N_LANES; c++) s_valid[c] = 1'b0;
      end
    end
    @(negedge clk);
    for (int c = 0; c < N_LANES; c++) s_valid[c] = 1'b0;
  endtask

  initial begin
    thr = 12'd200;
    for (int c = 0; c < N_LANES; c++) begin s_valid[c] = 1'b0; s_adc[c] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int f = 0; f < 10; f++) frame(1'b0);
    repeat (20) @(posedge clk);
    for (int c = 0; c < N_LANES; c++) check(exp_q[c].size() == 0, $sformatf("lane %0d: tokens missing", c));
    check(overflow == '0, "overflow without a stall");
    // overflow: 16 clusters per lane while the output is stalled
    stall = 1'b1;
    frame(1'b1);
    repeat (5) @(posedge clk);
    check(overflow == '1, "overflow not flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
