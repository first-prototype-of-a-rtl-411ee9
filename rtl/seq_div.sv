// seq_div -- unsigned restoring divider, one quotient bit per cycle.
//
// start loads dividend and divisor; NW cycles later done pulses for one
// cycle with quotient = dividend / divisor (all ones when divisor is zero).
// busy is high in between; start is ignored while busy.
module seq_div #(
  parameter int unsigned NW = 32,
  parameter int unsigned DW = 26
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quotient
);
  localparam int unsigned CW = $clog2(NW + 1);

  logic [DW-1:0] dvs_q;
  logic [DW:0]   rem_q;
  logic [CW-1:0] cnt_q;

  logic [DW:0]   shifted;
  logic [DW+1:0] trial;
  always_comb begin
    shifted = {rem_q[DW-1:0], quotient[NW-1]};
    trial   = {1'b0, shifted} - {2'b00, dvs_q};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      quotient <= '0;
      rem_q    <= '0;
      dvs_q    <= '0;
      cnt_q    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        busy     <= 1'b1;
        quotient <= dividend;
        dvs_q    <= divisor;
        rem_q    <= '0;
        cnt_q    <= CW'(NW);
      end else if (busy) begin
        if (!trial[DW+1]) begin
          rem_q    <= trial[DW:0];
          quotient <= {quotient[NW-2:0], 1'b1};
        end else begin
          rem_q    <= shifted;
          quotient <= {quotient[NW-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
