// tb_engine -- checks one double engine against sums of Gaussian receptor
// responses computed in the testbench, over three events of random clusters
// (some close to the cells' receptors, some far), and checks that the result
// appears exactly 3 cycles after the end-of-event token.
module tb_engine;
  import retina_pkg::*;
  `include "tb_ref.svh"

  localparam int XI = 11, XJ = 36;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic             in_valid;
  token_t           in_tok;
  logic [WGT_W-1:0] w_a, w_b;
  logic             res_valid;

  engine #(.XM_IDX(XI), .XP_IDX(XJ)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 1'b0;
    in_tok   = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int ev = 0; ev < 3; ev++) begin
      longint ea, eb;
      int n;
      ea = 0; eb = 0; n = 0;
      for (int h = 0; h < 40; h++) begin
        int k, x, z;
        k = $urandom_range(0, N_LAYERS-1);
        z = 40 + 80 * k;
        if (h % 2 == 0) x = (ref_intercept(XI, XJ, z) + int'($urandom_range(0, 300)) - 150) / 4;
        else            x = $urandom_range(0, 1022);
        if (x < 0) x = 0;
        if (x > 1022) x = 1022;
        ea += ref_resp(ref_dist(x, z, XI, XJ));
        eb += ref_resp(ref_dist(x, z, XI, XJ + 1));
        if (ref_resp(ref_dist(x, z, XI, XJ)) > 0) n++;
        @(negedge clk);
        in_valid = ($urandom_range(0, 3) != 0);
        if (!in_valid) begin
          ea -= ref_resp(ref_dist(x, z, XI, XJ));
          eb -= ref_resp(ref_dist(x, z, XI, XJ + 1));
        end
        in_tok = '{eoe: 1'b0, layer: L_W'(k), z: Z_W'(z), x: X_W'(x)};
      end
      @(negedge clk);
      in_valid = 1'b1;
      in_tok   = '0;
      in_tok.eoe = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      // the token was taken at the edge before this negedge: result 3 cycles later
      check(!res_valid, "result too early");
      @(negedge clk);
      check(!res_valid, "result too early");
      @(negedge clk);
      check(res_valid, "result not 3 cycles after end of event");
      check(w_a == WGT_W'(ea), $sformatf("event %0d cell A: got %0d expected %0d", ev, w_a, ea));
      check(w_b == WGT_W'(eb), $sformatf("event %0d cell B: got %0d expected %0d", ev, w_b, eb));
      check(n > 0, "no cluster near the receptor");
      @(negedge clk);
      check(!res_valid, "result pulse longer than a cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
