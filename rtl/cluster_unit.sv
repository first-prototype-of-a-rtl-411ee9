// cluster_unit -- clustering of one detector plane.
//
// A plane of 512 strips is read by 4 ASICs, each multiplexing its strips on
// 4 analog outputs, so 16 channels of 32 strips arrive in parallel. The
// cluster unit holds one cluster_lane per channel and presents 16 token
// streams (clusters, then an end-of-event token per channel and event) to
// the first switch level. thr is the pulse-height threshold for a strip to
// count as hit. overflow[n] is the sticky drop flag of lane n.
// The plane, strip and channel counts follow the prototype; the per-channel
// clustering is this design's choice (see cluster_lane).
module cluster_unit
  import retina_pkg::*;
#(
  parameter int LAYER = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             s_valid   [N_LANES],
  input  logic [ADC_W-1:0] s_adc     [N_LANES],
  input  logic [ADC_W-1:0] thr,
  output logic             out_valid [N_LANES],
  output token_t           out_tok   [N_LANES],
  input  logic             out_ready [N_LANES],
  output logic [N_LANES-1:0] overflow
);
  for (genvar n = 0; n < N_LANES; n++) begin : g_lane
    cluster_lane #(.LAYER(LAYER), .LANE(n)) u_lane (
      .clk, .rst,
      .s_valid(s_valid[n]), .s_adc(s_adc[n]), .thr,
      .out_valid(out_valid[n]), .out_tok(out_tok[n]), .out_ready(out_ready[n]),
      .overflow(overflow[n])
    );
  end
endmodule
