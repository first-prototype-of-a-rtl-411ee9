// tb_dispatcher -- random traffic through a 5 x 6 dispatcher with a sparse
// connectivity matrix and random output stalls. Every cluster token carries
// its input and sequence number; the testbench checks that each output
// receives exactly the tokens whose mask (restricted to the connected
// outputs) names it, in the order of each input, and that the merged
// end-of-event token of an event arrives after all the event's clusters
// and once per output.
module tb_dispatcher;
  import retina_pkg::*;

  localparam int NI = 5, NO = 6;
  localparam logic [NI*NO-1:0] CONN = 30'b111111_101010_010101_110011_111110;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic          in_valid  [NI];
  token_t        in_tok    [NI];
  logic [NO-1:0] in_mask   [NI];
  logic          in_ready  [NI];
  logic          out_valid [NO];
  token_t        out_tok   [NO];
  logic          out_ready [NO];

  dispatcher #(.N_IN(NI), .N_OUT(NO), .CONN(CONN)) dut (.*);

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

  localparam int EVENTS = 20;
  // expected tokens per output: x field = {input(3), seq(7)}
  int exp_q [NO][NI][$];
  int evt_of [NI][int];        // event number of a token (by x)
  int got_eoe [NO];
  int sent_done [NI];

  // drivers
  for (genvar i = 0; i < NI; i++) begin : g_drv
    initial begin
      int seq;
      seq = 0;
      in_valid[i] = 1'b0;
      in_tok[i]   = '0;
      in_mask[i]  = '0;
      @(negedge clk);
      while (rst) @(negedge clk);
      for (int e = 0; e < EVENTS; e++) begin
        int n;
        n = $urandom_range(0, 6);
        for (int k = 0; k <= n; k++) begin
          token_t t;
          logic [NO-1:0] m;
          bit eoe;
          eoe = (k == n);
          m = NO'($urandom());
          t = '0;
          t.eoe = eoe;
          t.x = X_W'({3'(i), 7'(seq)});
          if (!eoe) begin
            for (int o = 0; o < NO; o++)
              if (m[o] && CONN[i*NO+o]) exp_q[o][i].push_back(int'(t.x));
            evt_of[i][int'(t.x)] = e;
            seq++;
          end
          in_valid[i] = 1'b1;
          in_tok[i]   = t;
          in_mask[i]  = m;
          @(posedge clk);
          while (!in_ready[i]) @(posedge clk);
          @(negedge clk);
          in_valid[i] = 1'b0;
          repeat ($urandom_range(0, 2)) @(negedge clk);
        end
      end
      sent_done[i] = 1;
    end
  end

  // monitors
  for (genvar o = 0; o < NO; o++) begin : g_mon
    always @(posedge clk) begin
      if (!rst) out_ready[o] <= ($urandom_range(0, 3) != 0);
      if (!rst && out_valid[o] && out_ready[o]) begin
        if (out_tok[o].eoe) begin
          // every token of event got_eoe[o] must already have arrived
          for (int i = 0; i < NI; i++)
            if (exp_q[o][i].size() > 0)
              check(evt_of[i][exp_q[o][i][0]] > got_eoe[o],
                    $sformatf("output %0d: end of event %0d before its clusters", o, got_eoe[o]));
          got_eoe[o]++;
        end else begin
          int i, x;
          x = int'(out_tok[o].x);
          i = x >> 7;
          check(i < NI && exp_q[o][i].size() > 0 && exp_q[o][i][0] == x,
                $sformatf("output %0d: unexpected token %0h", o, x));
          if (i < NI && exp_q[o][i].size() > 0 && exp_q[o][i][0] == x) void'(exp_q[o][i].pop_front());
        end
      end
    end
  end

  initial begin
    for (int o = 0; o < NO; o++) begin out_ready[o] = 1'b0; got_eoe[o] = 0; end
    for (int i = 0; i < NI; i++) sent_done[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    wait (sent_done[0] && sent_done[1] && sent_done[2] && sent_done[3] && sent_done[4]);
    repeat (200) @(posedge clk);
    for (int o = 0; o < NO; o++) begin
      check(got_eoe[o] == EVENTS, $sformatf("output %0d: %0d end-of-event tokens", o, got_eoe[o]));
      for (int i = 0; i < NI; i++)
        check(exp_q[o][i].size() == 0, $sformatf("output %0d: %0d tokens of input %0d lost", o, exp_q[o][i].size(), i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
