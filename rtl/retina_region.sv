// retina_region -- one FPGA of the retina board: a quarter of the cell grid.
//
// The four inputs carry the clusters that the four DAQ boards routed to this
// region. The second-level switch (4:16) spreads them over 16 engine groups
// of the engine pool (256 double engines, x+ columns 16*REGION..+15). The
// local maxima found by the pool go to the first idle one of ten track
// units, whose results a round-robin merger joins into the region's track
// stream. final_o/go and the border columns (edge_*, nb_*) coordinate the
// search with the neighbouring regions, see engine_pool.
// Structure (switch 4:16, 256 double engines, 10 centre-of-mass units per
// FPGA) follows the paper's architecture; the peak distribution and the
// merging are this design's.
module retina_region
  import retina_pkg::*;
#(
  parameter int REGION = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid [N_BOARDS],
  input  token_t           in_tok   [N_BOARDS],
  output logic             in_ready [N_BOARDS],
  input  logic [WGT_W-1:0] thr,
  input  interp_e          mode,
  output logic             final_o,
  input  logic             go,
  output logic [WGT_W-1:0] edge_lo [N_XM],
  output logic [WGT_W-1:0] edge_hi [N_XM],
  input  logic [WGT_W-1:0] nb_lo   [N_XM],
  input  logic [WGT_W-1:0] nb_hi   [N_XM],
  output logic             trk_valid,
  output track_t           trk,
  input  logic             trk_ready
);
  logic   g_valid [N_GROUPS];
  token_t g_tok   [N_GROUPS];
  logic   g_ready [N_GROUPS];

  switch_l2 #(.REGION(REGION)) u_sw (
    .clk, .rst,
    .in_valid, .in_tok, .in_ready,
    .out_valid(g_valid), .out_tok(g_tok), .out_ready(g_ready)
  );

  logic  pk_valid, pk_ready, busy;
  peak_t pk;

  engine_pool #(.REGION(REGION)) u_pool (
    .clk, .rst,
    .in_valid(g_valid), .in_tok(g_tok), .in_ready(g_ready),
    .thr, .final_o, .go,
    .edge_lo, .edge_hi, .nb_lo, .nb_hi,
    .pk_valid, .pk, .pk_ready, .busy
  );

  // ---- peak to the first idle track unit
  logic   tu_in_ready  [N_TRK_UNITS];
  logic   tu_in_valid  [N_TRK_UNITS];
  logic   tu_out_valid [N_TRK_UNITS];
  track_t tu_out_trk   [N_TRK_UNITS];
  logic   tu_out_ready [N_TRK_UNITS];

  always_comb begin
    logic found;
    found    = 1'b0;
    pk_ready = 1'b0;
    for (int u = 0; u < N_TRK_UNITS; u++) begin
      tu_in_valid[u] = 1'b0;
      if (!found && tu_in_ready[u]) begin
        found          = 1'b1;
        pk_ready       = 1'b1;
        tu_in_valid[u] = pk_valid;
      end
    end
  end

  for (genvar u = 0; u < N_TRK_UNITS; u++) begin : g_tu
    track_unit u_tu (
      .clk, .rst, .mode,
      .in_valid(tu_in_valid[u]), .in_pk(pk), .in_ready(tu_in_ready[u]),
      .out_valid(tu_out_valid[u]), .out_trk(tu_out_trk[u]), .out_ready(tu_out_ready[u])
    );
  end

  logic [$clog2(N_TRK_UNITS)-1:0] src_unused;
  track_merger #(.N_IN(N_TRK_UNITS), .T(track_t)) u_merge (
    .clk, .rst,
    .in_valid(tu_out_valid), .in_data(tu_out_trk), .in_ready(tu_out_ready),
    .out_valid(trk_valid), .out_data(trk), .out_src(src_unused), .out_ready(trk_ready)
  );

endmodule
