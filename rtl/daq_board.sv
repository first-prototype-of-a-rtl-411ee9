// daq_board -- digital part of one readout board: two planes, switch 32:4.
//
// Board BOARD reads planes 2*BOARD and 2*BOARD+1, 16 analog channels each
// (32 inputs). Inputs 0..15 are the channels of the first plane, 16..31 of
// the second. Each plane's cluster unit turns the pulse-height samples into
// cluster tokens, and the first-level switch sends every cluster to the
// retina regions that need it: output r goes to region r (output BOARD to
// the board's own region, the others over the inter-board links).
// adc_thr is the strip threshold; overflow collects the lanes' drop flags.
// Two planes per board and the 32:4 switch follow the paper; ADC control
// and the ASIC readout sequencing are outside this module.
module daq_board
  import retina_pkg::*;
#(
  parameter int BOARD = 0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               s_valid [2*N_LANES],
  input  logic [ADC_W-1:0]   s_adc   [2*N_LANES],
  input  logic [ADC_W-1:0]   adc_thr,
  output logic               out_valid [N_REGIONS],
  output token_t             out_tok   [N_REGIONS],
  input  logic               out_ready [N_REGIONS],
  output logic [2*N_LANES-1:0] overflow
);
  logic   c_valid [2*N_LANES];
  token_t c_tok   [2*N_LANES];
  logic   c_ready [2*N_LANES];

  for (genvar n = 0; n < 2; n++) begin : g_plane
    logic             sv [N_LANES];
    logic [ADC_W-1:0] sa [N_LANES];
    logic             cv [N_LANES];
    token_t           ct [N_LANES];
    logic             cr [N_LANES];
    for (genvar c = 0; c < N_LANES; c++) begin : g_map
      assign sv[c] = s_valid[n*N_LANES + c];
      assign sa[c] = s_adc[n*N_LANES + c];
      assign c_valid[n*N_LANES + c] = cv[c];
      assign c_tok[n*N_LANES + c]   = ct[c];
      assign cr[c] = c_ready[n*N_LANES + c];
    end
    cluster_unit #(.LAYER(2*BOARD + n)) u_cu (
      .clk, .rst, .s_valid(sv), .s_adc(sa), .thr(adc_thr),
      .out_valid(cv), .out_tok(ct), .out_ready(cr),
      .overflow(overflow[n*N_LANES +: N_LANES])
    );
  end

  switch_l1 #(.BOARD(BOARD)) u_sw (
    .clk, .rst,
    .in_valid(c_valid), .in_tok(c_tok), .in_ready(c_ready),
    .out_valid, .out_tok, .out_ready
  );

endmodule
