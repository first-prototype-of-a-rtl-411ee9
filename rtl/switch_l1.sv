// switch_l1 -- first switch level, on a DAQ board: 32 inputs to 4 outputs.
//
// The 32 inputs are the 16 cluster streams of each of the board's two planes
// (planes 2*BOARD and 2*BOARD+1; input n*16+c is plane n, channel c). Output
// r feeds retina region r, whose FPGA holds x+ columns 16r..16r+15: output
// BOARD goes straight down to the board's own region, the other three travel
// over the inter-board links. A routing LUT indexed by {plane bit, x}
// (2048 words of 4 bits) marks the regions holding at least one cell whose
// receptor lies within 2 sigma of the cluster on its plane, i.e. where the
// cluster line |x - x+ - x-(z-z+)/z-| < 2 sigma crosses the region. The LUT is
// filled from the grid geometry. Routing by LUT and the 32:4 shape follow
// the paper; the LUT's indexing and exact content are this design's.
// Timing: as the dispatcher (two cycles, one token per output per cycle).
module switch_l1
  import retina_pkg::*;
#(
  parameter int BOARD = 0
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   in_valid  [2*N_LANES],
  input  token_t in_tok    [2*N_LANES],
  output logic   in_ready  [2*N_LANES],
  output logic   out_valid [N_REGIONS],
  output token_t out_tok   [N_REGIONS],
  input  logic   out_ready [N_REGIONS]
);
  localparam int N_IN = 2 * N_LANES;

  logic [N_REGIONS-1:0] route_lut [2**(X_W+1)];

  initial begin
    for (int a = 0; a < 2**(X_W+1); a++) begin
      int layer, x;
      layer = 2 * BOARD + (a >> X_W);
      x     = a % (2**X_W);
      route_lut[a] = '0;
      for (int r = 0; r < N_REGIONS; r++)
        for (int i = 0; i < N_XM; i++)
          if (row_sees(i, r*REG_XP, r*REG_XP + REG_XP - 1, x, z_of_layer(layer)))
            route_lut[a][r] = 1'b1;
    end
  end

  logic [N_REGIONS-1:0] mask [N_IN];
  always_comb
    for (int i = 0; i < N_IN; i++) mask[i] = route_lut[{in_tok[i].layer[0], in_tok[i].x}];

  dispatcher #(.N_IN(N_IN), .N_OUT(N_REGIONS)) u_disp (
    .clk, .rst,
    .in_valid, .in_tok, .in_mask(mask), .in_ready,
    .out_valid, .out_tok, .out_ready
  );

endmodule
