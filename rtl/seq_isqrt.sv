// seq_isqrt: integer square root, one result bit per clock.
//
// Computes o_root = floor(sqrt(i_rad)) for an unsigned N-bit radicand with
// the digit-by-digit (restoring) method: two radicand bits are brought down
// per clock and one root bit decided. Pulse i_start with i_rad; o_done pulses
// N/2 + 1 clocks later with o_root valid (held until the next start).
//
// The singular value as the norm of a row follows the published algorithm;
// how the square root is taken is this design's choice.
module seq_isqrt #(
  parameter int N = 84
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           i_start,
  input  logic [N-1:0]   i_rad,
  output logic           o_done,
  output logic [N/2-1:0] o_root
);
  localparam int R = N / 2;
  logic [N-1:0]   rad;
  logic [R+1:0]   rem;
  logic [R-1:0]   root;
  logic [$clog2(R+1)-1:0] cnt;
  logic           busy;

  logic [R+1:0] rem_sh, trial;
  always_comb begin
    rem_sh = {rem[R-1:0], rad[N-1:N-2]};
    trial  = {root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rad <= '0; rem <= '0; root <= '0; cnt <= '0; busy <= 1'b0;
      o_done <= 1'b0; o_root <= '0;
    end else begin
      o_done <= 1'b0;
      if (i_start) begin
        rad <= i_rad; rem <= '0; root <= '0; cnt <= '0; busy <= 1'b1;
      end else if (busy) begin
        rad <= rad << 2;
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[R-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[R-2:0], 1'b0};
        end
        if (int'(cnt) == R - 1) begin
          busy   <= 1'b0;
          o_done <= 1'b1;
          o_root <= (rem_sh >= trial) ? {root[R-2:0], 1'b1} : {root[R-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
