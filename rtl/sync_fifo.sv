// sync_fifo -- small synchronous FIFO with valid/ready on both sides.
//
// DEPTH entries (a power of two) of type T. wr_ready is low when full,
// rd_valid is high when not empty; a word written in cycle t can be read in
// cycle t+1. Reset empties the FIFO. Used as the input buffer of every
// dispatcher port and as the output buffer of the cluster lanes.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst,
  input  logic wr_valid,
  input  T     wr_data,
  output logic wr_ready,
  output logic rd_valid,
  output T     rd_data,
  input  logic rd_ready
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T               mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    cnt;

  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_valid && rd_ready;

  assign wr_ready = (cnt != (AW+1)'(DEPTH));
  assign rd_valid = (cnt != '0);
  assign rd_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

endmodule
