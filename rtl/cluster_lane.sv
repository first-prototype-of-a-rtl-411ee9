// cluster_lane -- cluster finder for one analog readout channel (32 strips).
//
// The channel delivers its 32 strips one after another, one pulse-height
// sample per s_valid; the lane counts the strips itself (strip 0 after reset
// and after every 32nd sample). A strip is hit when its sample exceeds thr.
// A run of adjacent hit strips a..b is one cluster, emitted as a token with
// x = a + b in plane-wide strip numbers (the cluster centre in half-strip
// units). After the 32nd strip the lane emits an end-of-event token, one
// cycle later. Tokens pass through a FIFO of FIFO_DEPTH; the readout cannot
// be paused, so a token that finds the FIFO full is dropped and the sticky
// overflow flag is set (cleared by reset).
// The geometric centre (no pulse-height weighting) and the per-channel
// clusters (a run crossing a 32-strip boundary gives two clusters) are this
// design's choices.
module cluster_lane
  import retina_pkg::*;
#(
  parameter int LAYER      = 0,
  parameter int LANE       = 0,
  parameter int FIFO_DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             s_valid,
  input  logic [ADC_W-1:0] s_adc,
  input  logic [ADC_W-1:0] thr,
  output logic             out_valid,
  output token_t           out_tok,
  input  logic             out_ready,
  output logic             overflow
);
  localparam int unsigned SW = $clog2(LANE_STRIPS);
  localparam int BASE = LANE * LANE_STRIPS;

  logic [SW-1:0] idx;
  logic          open_q;
  logic [SW-1:0] start_q;
  logic          eoe_pend;
  logic [1:0]    eoe_owed;     // end-of-event tokens waiting for FIFO room

  logic          push;
  token_t        push_tok;
  logic          fifo_ready;

  wire hit  = s_valid && (s_adc > thr);
  wire last = (idx == SW'(LANE_STRIPS-1));

  function automatic token_t mk_cluster(logic [SW-1:0] a, logic [SW-1:0] b);
    token_t t;
    t.eoe   = 1'b0;
    t.layer = L_W'(LAYER);
    t.z     = Z_W'(z_of_layer(LAYER));
    t.x     = X_W'(2*BASE) + X_W'(a) + X_W'(b);
    return t;
  endfunction

  logic cluster;
  logic push_eoe;
  assign push_eoe = eoe_pend || (eoe_owed != '0);

  always_comb begin
    push     = 1'b0;
    push_tok = '0;
    cluster  = 1'b0;
    if (push_eoe) begin
      push           = 1'b1;
      push_tok.eoe   = 1'b1;
      push_tok.layer = L_W'(LAYER);
      push_tok.z     = Z_W'(z_of_layer(LAYER));
    end
    if (s_valid) begin
      if (open_q && !hit) begin                 // run ended on the previous strip
        cluster = 1'b1;
        if (!push_eoe) push_tok = mk_cluster(start_q, idx - 1'b1);
      end else if (last && hit) begin           // run reaches the channel end
        cluster = 1'b1;
        if (!push_eoe) push_tok = mk_cluster(open_q ? start_q : idx, idx);
      end
      if (!push_eoe) push = cluster;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      idx      <= '0;
      open_q   <= 1'b0;
      start_q  <= '0;
      eoe_pend <= 1'b0;
      eoe_owed <= '0;
      overflow <= 1'b0;
    end else begin
      eoe_pend <= s_valid && last;
      // owed count: +1 for a new end mark, -1 when one enters the FIFO
      eoe_owed <= eoe_owed + 2'(eoe_pend) - 2'(push_eoe && fifo_ready);
      if ((push && !fifo_ready) || (cluster && push_eoe)) overflow <= 1'b1;
      if (s_valid) begin
        idx <= last ? '0 : idx + 1'b1;
        if (last) open_q <= 1'b0;
        else if (hit && !open_q) begin
          open_q  <= 1'b1;
          start_q <= idx;
        end else if (!hit) open_q <= 1'b0;
      end
    end
  end

  sync_fifo #(.T(token_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst,
    .wr_valid(push), .wr_data(push_tok), .wr_ready(fifo_ready),
    .rd_valid(out_valid), .rd_data(out_tok), .rd_ready(out_ready)
  );

endmodule
