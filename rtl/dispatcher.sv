// dispatcher -- N_IN x N_OUT token dispatcher, the building block of both
// switch levels.
//
// Every input carries tokens with a destination mask (one bit per output).
// A cluster token is delivered to every output whose bit is set and that
// the connectivity matrix CONN allows (CONN[i*N_OUT+o] = 1 connects input i
// to output o); the token leaves its input buffer once all of them have
// taken it, and a token with no destination is discarded. End-of-event
// tokens are merged: an output sends one end-of-event token after every
// input has presented its own, so each output sees all clusters of an event
// before the event's end mark. Each output serves the inputs in round-robin
// order and has an output register; each input has a FIFO of IN_DEPTH.
// Throughput: one token per output per cycle. Latency: two cycles from an
// input to an output when nothing is queued.
// The paper describes the switch as built from a basic 16x16-way
// dispatcher in which only some input/output pairs are connected; the
// arbitration, the buffering and the end-of-event merging are this
// design's own.
module dispatcher
  import retina_pkg::*;
#(
  parameter int unsigned N_IN     = 16,
  parameter int unsigned N_OUT    = 16,
  parameter int unsigned IN_DEPTH = 4,
  parameter logic [N_IN*N_OUT-1:0] CONN = '1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid  [N_IN],
  input  token_t           in_tok    [N_IN],
  input  logic [N_OUT-1:0] in_mask   [N_IN],
  output logic             in_ready  [N_IN],
  output logic             out_valid [N_OUT],
  output token_t           out_tok   [N_OUT],
  input  logic             out_ready [N_OUT]
);
  typedef struct packed {
    token_t           tok;
    logic [N_OUT-1:0] mask;
  } entry_t;

  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1;

  // ---- input buffers
  logic             h_valid [N_IN];
  entry_t           h_ent   [N_IN];
  logic             h_pop   [N_IN];
  logic [N_OUT-1:0] done_q  [N_IN];     // outputs that already took the head

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    entry_t wr;
    always_comb begin
      wr.tok  = in_tok[i];
      for (int o = 0; o < N_OUT; o++) wr.mask[o] = in_mask[i][o] && CONN[i*N_OUT+o];
    end
    sync_fifo #(.T(entry_t), .DEPTH(IN_DEPTH)) u_fifo (
      .clk, .rst,
      .wr_valid(in_valid[i]), .wr_data(wr), .wr_ready(in_ready[i]),
      .rd_valid(h_valid[i]), .rd_data(h_ent[i]), .rd_ready(h_pop[i])
    );
  end

  // ---- end-of-event merging
  logic all_eoe;
  always_comb begin
    all_eoe = 1'b1;
    for (int i = 0; i < N_IN; i++) all_eoe &= h_valid[i] && h_ent[i].tok.eoe;
  end

  logic [N_OUT-1:0] eoe_sent_q;

  // ---- per-output arbitration
  logic [IW-1:0]    rr_q    [N_OUT];
  logic             can_load[N_OUT];
  logic             grant_v [N_OUT];
  logic [IW-1:0]    grant_i [N_OUT];
  logic             send_eoe[N_OUT];

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      can_load[o] = !out_valid[o] || out_ready[o];
      send_eoe[o] = can_load[o] && all_eoe && !eoe_sent_q[o];
      grant_v[o]  = 1'b0;
      grant_i[o]  = '0;
      for (int k = N_IN - 1; k >= 0; k--) begin
        int unsigned i;
        i = (int'(rr_q[o]) + k) % N_IN;
        if (can_load[o] && h_valid[i] && !h_ent[i].tok.eoe &&
            h_ent[i].mask[o] && !done_q[i][o]) begin
          grant_v[o] = 1'b1;
          grant_i[o] = IW'(i);
        end
      end
    end
  end

  // ---- input pop
  logic [N_OUT-1:0] taken [N_IN];
  logic             eoe_pop;
  always_comb begin
    eoe_pop = all_eoe;
    for (int o = 0; o < N_OUT; o++) eoe_pop &= eoe_sent_q[o] || send_eoe[o];
    for (int i = 0; i < N_IN; i++) begin
      for (int o = 0; o < N_OUT; o++)
        taken[i][o] = done_q[i][o] || (grant_v[o] && grant_i[o] == IW'(i));
      if (h_ent[i].tok.eoe) h_pop[i] = h_valid[i] && eoe_pop;
      else                  h_pop[i] = h_valid[i] && ((taken[i] & h_ent[i].mask) == h_ent[i].mask);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      eoe_sent_q <= '0;
      for (int i = 0; i < N_IN; i++) done_q[i] <= '0;
      for (int o = 0; o < N_OUT; o++) begin
        rr_q[o]      <= '0;
        out_valid[o] <= 1'b0;
        out_tok[o]   <= '0;
      end
    end else begin
      for (int i = 0; i < N_IN; i++)
        done_q[i] <= (h_pop[i] || h_ent[i].tok.eoe) ? '0 : taken[i];
      eoe_sent_q <= eoe_pop ? '0 : (eoe_sent_q | send_eoe_vec());
      for (int o = 0; o < N_OUT; o++) begin
        if (send_eoe[o]) begin
          out_valid[o]   <= 1'b1;
          out_tok[o]     <= '0;
          out_tok[o].eoe <= 1'b1;
        end else if (grant_v[o]) begin
          out_valid[o] <= 1'b1;
          out_tok[o]   <= h_ent[grant_i[o]].tok;
          rr_q[o]      <= (grant_i[o] == IW'(N_IN-1)) ? '0 : grant_i[o] + 1'b1;
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  function automatic logic [N_OUT-1:0] send_eoe_vec();
    for (int o = 0; o < N_OUT; o++) send_eoe_vec[o] = send_eoe[o];
  endfunction

  // ---- handshake rules
  for (genvar o = 0; o < N_OUT; o++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (rst)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_tok[o]))
      else $error("dispatcher output %0d changed while stalled", o);
  end

endmodule
