// tb_track_merger -- four random producers into one merger with random
// output stalls. Checks that every word arrives once, with the right source
// index, in each producer's order, and that a producer that waits is served
// within N_IN words (round robin).
module tb_track_merger;
  localparam int NI = 4;
  typedef logic [15:0] word_t;

  logic clk = 1'b0, rst = 1'b1;
  always #1 clk = ~clk;

  logic  in_valid [NI];
  word_t in_data  [NI];
  logic  in_ready [NI];
  logic  out_valid, out_ready;
  word_t out_data;
  logic [1:0] out_src;

  track_merger #(.N_IN(NI), .T(word_t)) dut (.*);

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

  localparam int WORDS = 60;
  int next_exp [NI];
  int wait_cnt [NI];
  int done_cnt;

  for (genvar i = 0; i < NI; i++) begin : g_src
    initial begin
      in_valid[i] = 1'b0;
      in_data[i]  = '0;
      @(negedge clk);
      while (rst) @(negedge clk);
      for (int n = 0; n < WORDS; n++) begin
        in_valid[i] = 1'b1;
        in_data[i]  = word_t'({4'(i), 12'(n)});
        @(posedge clk);
        while (!in_ready[i]) @(posedge clk);
        @(negedge clk);
        in_valid[i] = 1'b0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
    end
  end

  always @(posedge clk) begin
    if (!rst) begin
      out_ready <= ($urandom_range(0, 2) != 0);
      for (int i = 0; i < NI; i++) begin
        if (in_valid[i] && !in_ready[i]) wait_cnt[i]++;
        else wait_cnt[i] = 0;
      end
      for (int i = 0; i < NI; i++)
        if (wait_cnt[i] > 4 * NI * 3) begin
          check(1'b0, $sformatf("input %0d starved", i));
          wait_cnt[i] = 0;
        end
      if (out_valid && out_ready) begin
        int s, n;
        s = int'(out_data[15:12]);
        n = int'(out_data[11:0]);
        check(s < NI && s == int'(out_src) && n == next_exp[s],
              $sformatf("got word %0h from source %0d", out_data, out_src));
        if (s < NI) next_exp[s] = n + 1;
        done_cnt++;
      end
    end
  end

  initial begin
    out_ready = 1'b0;
    done_cnt  = 0;
    for (int i = 0; i < NI; i++) begin next_exp[i] = 0; wait_cnt[i] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    wait (done_cnt == NI * WORDS);
    repeat (10) @(posedge clk);
    check(done_cnt == NI * WORDS, "words lost or duplicated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
