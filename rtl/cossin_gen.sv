// cossin_gen: sin and cos of the Jacobi rotation angle of one row pair.
//
// Given alpha = |ui|^2, beta = |uj|^2 and gamma = ui.uj, the rotation
//   ui' = c*ui - s*uj,  uj' = s*ui + c*uj
// makes the two rows orthogonal when tan(2*theta) = 2*gamma / (beta - alpha),
// with |theta| <= pi/4. The block finds 2*theta with a CORDIC in vectoring
// mode on the vector (beta - alpha, 2*gamma), both signs flipped when
// beta < alpha so that the vector lies in the right half plane, halves the
// angle, and turns it into (cos, sin) with a CORDIC in rotation mode started
// from (1/K, 0). One micro-rotation is done per clock. The inputs are first
// shifted by a common amount so that the larger one fills the CORDIC word;
// only their ratio matters. The CORDIC method is this design's choice: the
// source architecture only names the block and its sin/cos outputs.
//
// Interface: pulse i_start with alpha/beta/gamma valid in the same clock.
// o_done pulses when o_cos/o_sin hold the result; they stay until the next
// start. Timing: o_done follows i_start by 2*CORDIC_ITER + 3 clocks.
module cossin_gen
  import svd_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic i_start,
  input  acc_t i_alpha,
  input  acc_t i_beta,
  input  acc_t i_gamma,
  output logic o_done,
  output cs_t  o_cos,
  output cs_t  o_sin
);
  localparam int W    = 34;            // vectoring word
  localparam int TOP  = W - 4;         // position of the leading one after scaling
  localparam int IW   = ACC_W + 2;     // width of beta-alpha and 2*gamma
  localparam int RW   = CS_W + 2;      // rotation word

  typedef enum logic [2:0] {S_IDLE, S_SCALE, S_VEC, S_ROT, S_DONE} state_e;
  state_e state;

  logic signed [IW-1:0] dx, dy;        // captured difference vector
  logic signed [W-1:0]  vx, vy;
  logic signed [RW-1:0] rx, ry;
  cs_t                  z;
  logic [$clog2(CORDIC_ITER+1)-1:0] it;

  // Leading-one position of |dx| | |dy|.
  logic [IW-1:0] mag;
  int            msb;
  always_comb begin
    mag = (dx[IW-1] ? -dx : dx) | (dy[IW-1] ? -dy : dy);
    msb = -1;
    for (int b = 0; b < IW; b++) if (mag[b]) msb = b;
  end

  logic signed [IW-1:0] sx, sy;
  always_comb begin
    if (msb > TOP) begin
      sx = dx >>> (msb - TOP);
      sy = dy >>> (msb - TOP);
    end else if (msb >= 0) begin
      sx = dx <<< (TOP - msb);
      sy = dy <<< (TOP - msb);
    end else begin
      sx = '0;
      sy = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      dx <= '0; dy <= '0; vx <= '0; vy <= '0; rx <= '0; ry <= '0;
      z <= '0; it <= '0; o_done <= 1'b0; o_cos <= '0; o_sin <= '0;
    end else begin
      o_done <= 1'b0;
      case (state)
        S_IDLE: if (i_start) begin
          // Vector (beta-alpha, 2 gamma) folded into the right half plane.
          if (i_beta < i_alpha) begin
            dx <= IW'(i_alpha) - IW'(i_beta);
            dy <= -(IW'(i_gamma) <<< 1);
          end else begin
            dx <= IW'(i_beta) - IW'(i_alpha);
            dy <= IW'(i_gamma) <<< 1;
          end
          state <= S_SCALE;
        end
        S_SCALE: begin
          vx <= W'(sx);
          vy <= W'(sy);
          z  <= '0;
          it <= '0;
          state <= S_VEC;
        end
        S_VEC: begin
          if (vy >= 0) begin
            vx <= vx + (vy >>> it);
            vy <= vy - (vx >>> it);
            z  <= z + atan_tab(int'(it));
          end else begin
            vx <= vx - (vy >>> it);
            vy <= vy + (vx >>> it);
            z  <= z - atan_tab(int'(it));
          end
          if (int'(it) == CORDIC_ITER - 1) begin
            it <= '0;
            state <= S_ROT;
          end else begin
            it <= it + 1'b1;
          end
        end
        S_ROT: begin
          if (int'(it) == 0) begin
            // z holds 2*theta: start rotation mode with theta and (1/K, 0).
            // First micro-rotation folded into this clock.
            if ((z >>> 1) >= 0) begin
              rx <= RW'(CORDIC_INV_GAIN);
              ry <= RW'(CORDIC_INV_GAIN);
              z  <= (z >>> 1) - atan_tab(0);
            end else begin
              rx <= RW'(CORDIC_INV_GAIN);
              ry <= -RW'(CORDIC_INV_GAIN);
              z  <= (z >>> 1) + atan_tab(0);
            end
          end else if (z >= 0) begin
            rx <= rx - (ry >>> it);
            ry <= ry + (rx >>> it);
            z  <= z - atan_tab(int'(it));
          end else begin
            rx <= rx + (ry >>> it);
            ry <= ry - (rx >>> it);
            z  <= z + atan_tab(int'(it));
          end
          if (int'(it) == CORDIC_ITER - 1) state <= S_DONE;
          else                             it <= it + 1'b1;
        end
        S_DONE: begin
          o_cos  <= CS_W'(rx);
          o_sin  <= CS_W'(ry);
          o_done <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
