// svd_pkg: number formats, CORDIC constants and the cyclic pair schedule
// shared by every block of the streaming one-sided Jacobi SVD engine.
//
// Number formats (a choice of this design; the source architecture does not
// state one): matrix elements are signed fixed point, DATA_W bits with FRAC_W
// fractional bits. Sums of products (alpha, beta, gamma, row norms) are kept in
// ACC_W bits with FRAC_W fractional bits. sin/cos are signed CS_W bits with
// CS_FRAC fractional bits; CORDIC angles are radians with CS_FRAC fractional
// bits.
//
// Pair schedule (generalised from the 8-row / 4-PU example of the source
// architecture): a block of 2P rows is processed by P PUs in log2(P)+1
// levels. At level L the block splits into groups of G = 2P/2^L rows, each
// handled by H = G/2 PUs. In step r (0..H-1) of a level, PU q of a group pairs
// the group's left row q with its right row H + ((q + r) mod H). One sweep is
// P + P/2 + ... + 1 = 2P-1 steps and visits every pair of the block once.
package svd_pkg;

  localparam int DATA_W  = 32;
  localparam int FRAC_W  = 20;
  localparam int ACC_W   = 64;
  localparam int CS_W    = 24;
  localparam int CS_FRAC = 22;
  localparam int CORDIC_ITER = 22;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [CS_W-1:0]   cs_t;

  // 1.0 in the element format (identity entries of V).
  localparam data_t DATA_ONE = data_t'(1) <<< FRAC_W;
  // 1/K, the inverse CORDIC gain, 0.6072529350 * 2^CS_FRAC.
  localparam cs_t CORDIC_INV_GAIN = cs_t'(2547003);

  // atan(2^-i) * 2^CS_FRAC, rounded.
  function automatic cs_t atan_tab(input int i);
    case (i)
      0: return cs_t'(3294199);  1: return cs_t'(1944679);
      2: return cs_t'(1027515);  3: return cs_t'(521583);
      4: return cs_t'(261803);   5: return cs_t'(131029);
      6: return cs_t'(65531);    7: return cs_t'(32767);
      default: return (i < CS_FRAC+1) ? (cs_t'(1) <<< (CS_FRAC - i)) : '0;
    endcase
  endfunction

  // Which slot of a PU a row sits in.
  typedef enum logic {SLOT_I = 1'b0, SLOT_J = 1'b1} slot_e;

  // Level and step of sweep step s (0 .. 2P-2) for P PUs.
  function automatic void step_decode(input int p, input int s,
                                      output int level, output int r);
    int h, rem;
    h = p; rem = s; level = 0;
    for (int l = 0; l < 16; l++) begin
      if (h > 0 && rem >= h) begin
        rem -= h; h = h / 2; level++;
      end
    end
    r = rem;
  endfunction

  // Row (0 .. 2P-1 inside the block) that PU k holds in slot sl at (level, r).
  function automatic int pair_row(input int p, input int level, input int r,
                                  input int k, input slot_e sl);
    int h, g, q;
    h = p >> level;
    g = k / h;
    q = k % h;
    if (sl == SLOT_I) return g * 2 * h + q;
    else              return g * 2 * h + h + ((q + r) % h);
  endfunction

  // Source index (2*PU + slot) holding block row x at (level, r).
  function automatic int row_loc(input int p, input int level, input int r,
                                 input int x);
    int h, g, l;
    h = p >> level;
    g = x / (2 * h);
    l = x % (2 * h);
    if (l < h) return 2 * (g * h + l);
    else       return 2 * (g * h + ((l - h - r + h) % h)) + 1;
  endfunction

endpackage
