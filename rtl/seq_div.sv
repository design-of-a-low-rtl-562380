// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// o_quot = floor(i_num / i_den) for an NW-bit numerator and DW-bit
// denominator; a zero denominator gives a zero quotient (the caller's choice
// for an all-zero row). Pulse i_start; o_done pulses NW + 1 clocks later.
//
// The published design says only that each row is divided by its norm; using
// one reciprocal per row from this iterative divider is this design's choice.
module seq_div #(
  parameter int NW = 53,
  parameter int DW = 42
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_start,
  input  logic [NW-1:0] i_num,
  input  logic [DW-1:0] i_den,
  output logic          o_done,
  output logic [NW-1:0] o_quot
);
  logic [NW-1:0] num, quot;
  logic [DW:0]   rem;
  logic [DW-1:0] den;
  logic [$clog2(NW+1)-1:0] cnt;
  logic          busy;

  logic [DW:0] rem_sh;
  assign rem_sh = {rem[DW-1:0], num[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num <= '0; quot <= '0; rem <= '0; den <= '0; cnt <= '0; busy <= 1'b0;
      o_done <= 1'b0; o_quot <= '0;
    end else begin
      o_done <= 1'b0;
      if (i_start) begin
        num <= i_num; den <= i_den; rem <= '0; quot <= '0; cnt <= '0; busy <= 1'b1;
      end else if (busy) begin
        num <= num << 1;
        if (rem_sh >= {1'b0, den}) begin
          rem  <= rem_sh - {1'b0, den};
          quot <= {quot[NW-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          quot <= {quot[NW-2:0], 1'b0};
        end
        if (int'(cnt) == NW - 1) begin
          busy   <= 1'b0;
          o_done <= 1'b1;
          if (den == '0)                   o_quot <= '0;
          else if (rem_sh >= {1'b0, den})  o_quot <= {quot[NW-2:0], 1'b1};
          else                             o_quot <= {quot[NW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
