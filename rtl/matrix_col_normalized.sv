// matrix_col_normalized: singular values and normalised U rows.
//
// After the rotations, each row b_k of the working matrix is sigma_k times a
// unit vector, with sigma_k = ||b_k||. The rows are read twice. The first read
// (NormGen stream) sums the squares of row k exactly (all 2*FRAC_W
// fractional bits kept); at its last element the block
// takes the square root (sigma_k, with G guard bits below the element
// format) and one reciprocal 2^RF / sigma_k with iterative units. The second read (NormUpdate stream) multiplies every
// element of row k by that reciprocal, giving the normalised row, while the
// V row passes through unchanged. The two reads of consecutive rows overlap:
// the scheduler streams the first read of row k+1 together with the second
// read of row k. Computing sigma as the square root of the sum of squares,
// and dividing through one reciprocal per row, are this design's choices.
//
// Interface: i_advance (pulsed by the scheduler at the start of a read
// phase) makes the most recently computed sigma/reciprocal current and emits
// that sigma on o_s_*. o_ready is high when no sigma computation is pending.
// Timing: o_ready returns ACC-to-sigma-to-reciprocal = about
// DATA_W + AW/2 + FRAC_W + 2*G + RF + 6 clocks after i_ng_last; the normalised
// elements follow i_nu_valid by two clocks.
module matrix_col_normalized
  import svd_pkg::*;
#(
  parameter int AW = 12,
  parameter int RF = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  // First read: U row for the norm.
  input  logic          i_ng_valid,
  input  logic          i_ng_last,
  input  data_t         i_ng_data,
  output logic          o_ready,
  // Phase change.
  input  logic          i_advance,
  output logic          o_s_valid,
  output data_t         o_s_data,
  // Second read: U and V rows.
  input  logic          i_nu_valid,
  input  logic [AW+1:0] i_nu_tag,     // {uok, vok, addr}
  input  data_t         i_nu_u,
  input  data_t         i_nu_v,
  output logic          o_u_valid,
  output data_t         o_u_data,
  output logic          o_v_valid,
  output data_t         o_v_data,
  output logic [AW-1:0] o_addr
);
  localparam int SQ_N = 2 * DATA_W + AW + (AW % 2); // sum of squares bits (even)
  localparam int G    = 16;                      // extra sigma fraction bits
  localparam int SG_W = SQ_N / 2 + G;            // sigma bits (FRAC_W+G fraction)
  localparam int NUMW = FRAC_W + G + RF + 1;     // reciprocal numerator bits
  localparam int PW   = 2 * DATA_W;

  // ---- first read: sum of squares ----
  logic signed [PW-1:0] sq;
  logic                 sq_valid, sq_last;
  logic [SQ_N-1:0]      ssum;          // exact, 2*FRAC_W fractional bits
  logic                 ss_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sq <= '0; sq_valid <= 1'b0; sq_last <= 1'b0; ssum <= '0; ss_last <= 1'b0;
    end else begin
      sq       <= i_ng_data * i_ng_data;
      sq_valid <= i_ng_valid;
      sq_last  <= i_ng_valid && i_ng_last;
      ss_last  <= sq_last;
      if (ss_last)       ssum <= '0;
      else if (sq_valid) ssum <= ssum + SQ_N'(sq);
    end
  end

  // ---- sigma and reciprocal ----
  logic              sq_done, div_done;
  logic [SG_W-1:0]   root;
  logic [NUMW-1:0]   quot;
  logic              pending;

  seq_isqrt #(.N(SQ_N + 2 * G)) u_isqrt (
    .clk, .rst_n, .i_start(ss_last),
    .i_rad({ssum, {(2*G){1'b0}}}),
    .o_done(sq_done), .o_root(root)
  );

  seq_div #(.NW(NUMW), .DW(SG_W)) u_div (
    .clk, .rst_n, .i_start(sq_done),
    .i_num(NUMW'(1) << (FRAC_W + G + RF)), .i_den(root),
    .o_done(div_done), .o_quot(quot)
  );

  logic [SG_W-1:0] next_sigma;
  logic [NUMW-1:0] next_recip, cur_recip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 1'b0; next_sigma <= '0; next_recip <= '0; cur_recip <= '0;
      o_s_valid <= 1'b0; o_s_data <= '0;
    end else begin
      if (i_ng_valid && i_ng_last) pending <= 1'b1;
      else if (div_done)           pending <= 1'b0;
      if (sq_done)  next_sigma <= root;            // FRAC_W + G fraction bits
      if (div_done) next_recip <= quot;
      o_s_valid <= i_advance;
      if (i_advance) begin
        cur_recip <= next_recip;
        o_s_data  <= ((next_sigma >> G) > SG_W'(2**(DATA_W-1) - 1)) ? {1'b0, {(DATA_W-1){1'b1}}}
                                                                    : data_t'(next_sigma >> G);
      end
    end
  end

  assign o_ready = !pending;

  // ---- second read: scale U, pass V ----
  localparam int MW = DATA_W + NUMW + 1;
  logic signed [MW-1:0] prod;
  logic                 p_valid;
  logic [AW+1:0]        p_tag;
  data_t                p_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod <= '0; p_valid <= 1'b0; p_tag <= '0; p_v <= '0;
      o_u_valid <= 1'b0; o_v_valid <= 1'b0; o_u_data <= '0; o_v_data <= '0; o_addr <= '0;
    end else begin
      prod    <= MW'(i_nu_u) * $signed({1'b0, cur_recip});
      p_valid <= i_nu_valid;
      p_tag   <= i_nu_tag;
      p_v     <= i_nu_v;
      o_u_valid <= p_valid && p_tag[AW+1];
      o_v_valid <= p_valid && p_tag[AW];
      o_u_data  <= data_t'((prod + (MW'(1) <<< (RF-1))) >>> RF);
      o_v_data  <= p_v;
      o_addr    <= p_tag[AW-1:0];
    end
  end
endmodule
