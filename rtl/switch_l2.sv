// switch_l2 -- second switch level, in a retina FPGA: 4 inputs to 16 outputs.
//
// Input b carries the clusters that DAQ board b routed to this region.
// Output g feeds engine group g: the 16 double engines of x- rows 2g and
// 2g+1, all x+ columns of the region, which receive the group's stream in
// parallel. A routing LUT indexed by {plane, x} (8192 words of 16 bits)
// marks the groups with at least one cell whose receptor lies within
// 2 sigma of the cluster; it is filled from the grid geometry of REGION.
// The 4:16 shape and LUT routing follow the paper; the grouping of engines
// by x- row pairs and the LUT indexing are this design's.
// Timing: as the dispatcher (two cycles, one token per output per cycle).
module switch_l2
  import retina_pkg::*;
#(
  parameter int REGION = 0
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   in_valid  [N_BOARDS],
  input  token_t in_tok    [N_BOARDS],
  output logic   in_ready  [N_BOARDS],
  output logic   out_valid [N_GROUPS],
  output token_t out_tok   [N_GROUPS],
  input  logic   out_ready [N_GROUPS]
);
  localparam int ROWS_PER_GROUP = N_XM / N_GROUPS;

  logic [N_GROUPS-1:0] route_lut [2**(X_W+L_W)];

  initial begin
    for (int a = 0; a < 2**(X_W+L_W); a++) begin
      int layer, x;
      layer = a >> X_W;
      x     = a % (2**X_W);
      route_lut[a] = '0;
      for (int g = 0; g < N_GROUPS; g++)
        for (int k = 0; k < ROWS_PER_GROUP; k++)
          if (row_sees(g*ROWS_PER_GROUP + k, REGION*REG_XP, REGION*REG_XP + REG_XP - 1,
                       x, z_of_layer(layer)))
            route_lut[a][g] = 1'b1;
    end
  end

  logic [N_GROUPS-1:0] mask [N_BOARDS];
  always_comb
    for (int i = 0; i < N_BOARDS; i++) mask[i] = route_lut[{in_tok[i].layer, in_tok[i].x}];

  dispatcher #(.N_IN(N_BOARDS), .N_OUT(N_GROUPS)) u_disp (
    .clk, .rst,
    .in_valid, .in_tok, .in_mask(mask), .in_ready,
    .out_valid, .out_tok, .out_ready
  );

endmodule
