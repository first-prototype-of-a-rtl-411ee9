// retina_top -- the complete prototype: 8 detector planes read by 4 DAQ
// boards, a fully meshed link network between them, and the 4 retina
// regions of the TEL62 board with their merged track output.
//
// Inputs are the digitised samples of the 128 analog channels (8 planes x
// 16 channels, 32 strips each, one sample per s_valid), the strip
// threshold adc_thr, the weight threshold wgt_thr for a local maximum and
// the interpolation method. Board b output r is wired to region r input b;
// the inter-board links are taken as plain wires. The search for maxima
// starts in all regions together once every region holds the complete
// weights of the event (go = AND of the final_o flags), and each region
// reads its neighbours' border columns. Tracks leave on one valid/ready
// stream tagged with the region; the host link itself is not modelled.
// Latency from the last sample of an event to its first track is about 50
// clock cycles.
module retina_top
  import retina_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          s_valid [N_LAYERS][N_LANES],
  input  logic [ADC_W-1:0]              s_adc   [N_LAYERS][N_LANES],
  input  logic [ADC_W-1:0]              adc_thr,
  input  logic [WGT_W-1:0]              wgt_thr,
  input  interp_e                       interp_mode,
  output logic                          trk_valid,
  output track_t                        trk,
  output logic [$clog2(N_REGIONS)-1:0]  trk_region,
  input  logic                          trk_ready,
  output logic [N_LAYERS*N_LANES-1:0]   overflow,
  output logic                          search_go
);
  // board b -> region r
  logic   b_valid [N_BOARDS][N_REGIONS];
  token_t b_tok   [N_BOARDS][N_REGIONS];
  logic   b_ready [N_BOARDS][N_REGIONS];

  for (genvar b = 0; b < N_BOARDS; b++) begin : g_board
    logic             sv [2*N_LANES];
    logic [ADC_W-1:0] sa [2*N_LANES];
    for (genvar n = 0; n < 2; n++) begin : g_pl
      for (genvar c = 0; c < N_LANES; c++) begin : g_ch
        assign sv[n*N_LANES + c] = s_valid[2*b + n][c];
        assign sa[n*N_LANES + c] = s_adc[2*b + n][c];
      end
    end
    daq_board #(.BOARD(b)) u_daq (
      .clk, .rst, .s_valid(sv), .s_adc(sa), .adc_thr,
      .out_valid(b_valid[b]), .out_tok(b_tok[b]), .out_ready(b_ready[b]),
      .overflow(overflow[b*2*N_LANES +: 2*N_LANES])
    );
  end

  logic             r_final [N_REGIONS];
  logic [WGT_W-1:0] r_edge_lo [N_REGIONS][N_XM];
  logic [WGT_W-1:0] r_edge_hi [N_REGIONS][N_XM];
  logic             r_trk_valid [N_REGIONS];
  track_t           r_trk       [N_REGIONS];
  logic             r_trk_ready [N_REGIONS];

  always_comb begin
    search_go = 1'b1;
    for (int r = 0; r < N_REGIONS; r++) search_go &= r_final[r];
  end

  for (genvar r = 0; r < N_REGIONS; r++) begin : g_region
    logic             iv [N_BOARDS];
    token_t           it [N_BOARDS];
    logic             ir [N_BOARDS];
    logic [WGT_W-1:0] nb_lo [N_XM];
    logic [WGT_W-1:0] nb_hi [N_XM];
    for (genvar b = 0; b < N_BOARDS; b++) begin : g_mesh
      assign iv[b] = b_valid[b][r];
      assign it[b] = b_tok[b][r];
      assign b_ready[b][r] = ir[b];
    end
    for (genvar i = 0; i < N_XM; i++) begin : g_nb
      assign nb_lo[i] = (r > 0)             ? r_edge_hi[(r > 0) ? r-1 : 0][i] : '0;
      assign nb_hi[i] = (r < N_REGIONS - 1) ? r_edge_lo[(r < N_REGIONS-1) ? r+1 : r][i] : '0;
    end
    retina_region #(.REGION(r)) u_reg (
      .clk, .rst,
      .in_valid(iv), .in_tok(it), .in_ready(ir),
      .thr(wgt_thr), .mode(interp_mode),
      .final_o(r_final[r]), .go(search_go),
      .edge_lo(r_edge_lo[r]), .edge_hi(r_edge_hi[r]),
      .nb_lo, .nb_hi,
      .trk_valid(r_trk_valid[r]), .trk(r_trk[r]), .trk_ready(r_trk_ready[r])
    );
  end

  track_merger #(.N_IN(N_REGIONS), .T(track_t)) u_out (
    .clk, .rst,
    .in_valid(r_trk_valid), .in_data(r_trk), .in_ready(r_trk_ready),
    .out_valid(trk_valid), .out_data(trk), .out_src(trk_region), .out_ready(trk_ready)
  );

endmodule
