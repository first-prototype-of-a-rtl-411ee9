// engine_pool -- the 256 double engines of one retina region, the search for
// local maxima and the hand-off of maxima to the track units.
//
// Region REGION holds x+ columns 16*REGION..16*REGION+15 of the 32 x 64 cell
// grid, all 32 x- rows: 32 rows of 8 double engines, 512 cells. Engine group
// g (rows 2g and 2g+1, 16 engines) takes its clusters from switch output g.
//
// Event flow. Clusters accumulate in the engines until the group's
// end-of-event token, which makes the engines copy their sums to their
// result registers. When every group holds its result, final_o rises. The
// search starts on go, which the top raises when all regions are final (the
// maxima at a region border need the neighbour region's border column,
// nb_lo/nb_hi, taken from the same event). On go every cell decides in one
// cycle whether it is a local maximum: weight >= thr, strictly above its
// left (x+ - 1) and lower (x- - 1) neighbours and not below its right and
// upper neighbours (the asymmetry keeps one maximum out of a tie). The
// maxima are then sent one per cycle, lowest cell first, as peak_t records
// carrying the weight and its four neighbours. While maxima remain to be
// sent (busy) the groups hold back their next end-of-event token; clusters
// of the next event keep accumulating meanwhile.
//
// Local maximum by comparison with the nearest neighbours, and the hand-off
// of the weights around it, follow the paper; the threshold, the tie rule,
// the cross-region handshake and the serial hand-off are this design's.
module engine_pool
  import retina_pkg::*;
#(
  parameter int REGION = 0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid [N_GROUPS],
  input  token_t           in_tok   [N_GROUPS],
  output logic             in_ready [N_GROUPS],
  input  logic [WGT_W-1:0] thr,
  output logic             final_o,
  input  logic             go,
  output logic [WGT_W-1:0] edge_lo [N_XM],   // this region's first column
  output logic [WGT_W-1:0] edge_hi [N_XM],   // this region's last column
  input  logic [WGT_W-1:0] nb_lo   [N_XM],   // column left of the region
  input  logic [WGT_W-1:0] nb_hi   [N_XM],   // column right of the region
  output logic             pk_valid,
  output peak_t            pk,
  input  logic             pk_ready,
  output logic             busy
);
  localparam int ROWS_PER_GROUP = N_XM / N_GROUPS;
  localparam int N_CELLS = N_XM * REG_XP;
  localparam int KW = $clog2(N_CELLS);

  logic [WGT_W-1:0] w [N_XM][REG_XP];
  logic             res_v [N_XM][ENG_PER_ROW];

  logic [N_GROUPS-1:0] latched_q, resd_q;
  logic [N_CELLS-1:0]  pending_q;
  logic [WGT_W-1:0]    nb_lo_q [N_XM];
  logic [WGT_W-1:0]    nb_hi_q [N_XM];
  logic [EVT_W-1:0]    evt_q;

  assign busy = |pending_q;

  // ---- engines
  for (genvar r = 0; r < N_XM; r++) begin : g_row
    for (genvar p = 0; p < ENG_PER_ROW; p++) begin : g_eng
      localparam int G = r / ROWS_PER_GROUP;
      engine #(.XM_IDX(r), .XP_IDX(REGION*REG_XP + 2*p)) u_eng (
        .clk, .rst,
        .in_valid (in_valid[G] && in_ready[G]),
        .in_tok   (in_tok[G]),
        .w_a      (w[r][2*p]),
        .w_b      (w[r][2*p+1]),
        .res_valid(res_v[r][p])
      );
    end
    assign edge_lo[r] = w[r][0];
    assign edge_hi[r] = w[r][REG_XP-1];
  end

  // ---- end-of-event gating
  always_comb
    for (int g = 0; g < N_GROUPS; g++)
      in_ready[g] = !in_tok[g].eoe || (!latched_q[g] && !busy);

  assign final_o = &resd_q;

  // ---- neighbour weights, grid edges read as zero
  function automatic logic [WGT_W-1:0] wget(int r, int c, logic use_q);
    if (r < 0 || r >= N_XM) return '0;
    if (c < 0)       return (REGION == 0) ? '0 : (use_q ? nb_lo_q[r] : nb_lo[r]);
    if (c >= REG_XP) return (REGION == N_REGIONS-1) ? '0 : (use_q ? nb_hi_q[r] : nb_hi[r]);
    return w[r][c];
  endfunction

  logic [N_CELLS-1:0] is_max;
  always_comb
    for (int r = 0; r < N_XM; r++)
      for (int c = 0; c < REG_XP; c++)
        is_max[r*REG_XP + c] = (w[r][c] >= thr) && (w[r][c] != '0)
                             && (w[r][c] >  wget(r, c-1, 1'b0))
                             && (w[r][c] >= wget(r, c+1, 1'b0))
                             && (w[r][c] >  wget(r-1, c, 1'b0))
                             && (w[r][c] >= wget(r+1, c, 1'b0));

  // ---- serial hand-off of the maxima, lowest cell index first
  logic          sel_v;
  logic [KW-1:0] sel_k;
  always_comb begin
    sel_v = 1'b0;
    sel_k = '0;
    for (int k = N_CELLS - 1; k >= 0; k--)
      if (pending_q[k]) begin
        sel_v = 1'b1;
        sel_k = KW'(k);
      end
  end

  int sel_r, sel_c;
  assign sel_r = int'(sel_k) / REG_XP;
  assign sel_c = int'(sel_k) % REG_XP;

  always_ff @(posedge clk) begin
    if (rst) begin
      latched_q <= '0;
      resd_q    <= '0;
      pending_q <= '0;
      evt_q     <= '0;
      pk_valid  <= 1'b0;
      pk        <= '0;
      for (int r = 0; r < N_XM; r++) begin
        nb_lo_q[r] <= '0;
        nb_hi_q[r] <= '0;
      end
    end else begin
      for (int g = 0; g < N_GROUPS; g++) begin
        if (in_valid[g] && in_ready[g] && in_tok[g].eoe) latched_q[g] <= 1'b1;
        if (res_v[g*ROWS_PER_GROUP][0]) resd_q[g] <= 1'b1;
      end
      if (go) begin
        latched_q <= '0;
        resd_q    <= '0;
        pending_q <= is_max;
        evt_q     <= evt_q + 1'b1;
        for (int r = 0; r < N_XM; r++) begin
          nb_lo_q[r] <= nb_lo[r];
          nb_hi_q[r] <= nb_hi[r];
        end
      end else if (sel_v && (!pk_valid || pk_ready)) begin
        pending_q[sel_k] <= 1'b0;
      end
      if (!go && sel_v && (!pk_valid || pk_ready)) begin
        pk_valid  <= 1'b1;
        pk.evt    <= evt_q - 1'b1;
        pk.xm_idx <= 5'(sel_r);
        pk.xp_idx <= 6'(REGION*REG_XP + sel_c);
        pk.w0     <= w[sel_r][sel_c];
        pk.wm_lo  <= wget(sel_r-1, sel_c, 1'b1);
        pk.wm_hi  <= wget(sel_r+1, sel_c, 1'b1);
        pk.wp_lo  <= wget(sel_r, sel_c-1, 1'b1);
        pk.wp_hi  <= wget(sel_r, sel_c+1, 1'b1);
      end else if (pk_ready) begin
        pk_valid <= 1'b0;
      end
    end
  end

  a_go_final: assert property (@(posedge clk) disable iff (rst) go |-> final_o)
    else $error("engine_pool: go without final results");
  a_pk_hold: assert property (@(posedge clk) disable iff (rst)
    pk_valid && !pk_ready |=> pk_valid && $stable(pk))
    else $error("engine_pool: peak changed while stalled");

endmodule
