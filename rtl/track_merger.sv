// track_merger -- round-robin merge of N_IN result streams into one.
//
// Each input is a valid/ready stream of type T; the merger forwards one word
// per cycle through an output register, taking the inputs in turn, and
// tells in out_src which input the word came from. It joins the ten track
// units of a region into the region's output and the four regions into the
// single stream sent to the host computer. The order of the results is this
// design's choice: tracks of one event can arrive in any order and carry
// their event number.
module track_merger #(
  parameter int unsigned N_IN = 4,
  parameter type         T    = logic [7:0],
  localparam int unsigned SW  = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid [N_IN],
  input  T              in_data  [N_IN],
  output logic          in_ready [N_IN],
  output logic          out_valid,
  output T              out_data,
  output logic [SW-1:0] out_src,
  input  logic          out_ready
);
  logic [SW-1:0] rr_q;
  logic          gv;
  logic [SW-1:0] gi;
  wire           can_load = !out_valid || out_ready;

  always_comb begin
    gv = 1'b0;
    gi = '0;
    for (int k = N_IN - 1; k >= 0; k--) begin
      int unsigned i;
      i = (int'(rr_q) + k) % N_IN;
      if (in_valid[i]) begin
        gv = 1'b1;
        gi = SW'(i);
      end
    end
    for (int i = 0; i < N_IN; i++) in_ready[i] = can_load && gv && (gi == SW'(i));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rr_q      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_src   <= '0;
    end else if (can_load) begin
      out_valid <= gv;
      if (gv) begin
        out_data <= in_data[gi];
        out_src  <= gi;
        rr_q     <= (gi == SW'(N_IN-1)) ? '0 : gi + 1'b1;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
    out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("track_merger: output changed while stalled");
endmodule
