// svd_schedule: cyclic data scheduler and sequencer of the PU array.
//
// The input matrix arrives as rows of the working matrix (the rows of A^T,
// i.e. the columns of A), one element per clock. Rows are taken in blocks of
// 2P, P = NUM_PU, and each block is processed on its own:
//  1. Load: rows 0..P-1 of the block go to slot i of PU 0..P-1, rows P..2P-1
//     to slot j of the same PUs. While a j row arrives its PU reads the i row
//     back and accumulates alpha/beta/gamma of its first pair. The matching V
//     rows (rows of the identity) are generated here.
//  2. Sweeps: each sweep has 2P-1 steps (see svd_pkg for the pair order). In
//     a step every PU computes sin/cos, then all PUs read their pairs in
//     lock-step through update_matrix; this block routes every rotated row to
//     the PU and slot that holds it in the next step (a crossbar whose
//     selects are recomputed once per step) and the receiving PUs accumulate
//     the next pair's alpha/beta/gamma as the rows arrive. After the last
//     step of the last sweep the rows stay where they are, so that row x
//     ends in PU x/2, slot x%2.
//  3. Output: 2P+1 read phases. Phase x reads row x for its norm (NormGen)
//     and row x-1 for the normalised output (NormUpdate), so the two reads of
//     the source architecture overlap; between phases it waits until the
//     normaliser has sigma and the reciprocal of the next row.
// The load/sweep/output order, the pair order and the row reuse follow the
// source architecture; the crossbar form of the routing, the drain waits and
// the configuration inputs are this design's choices.
//
// Configuration (sampled at i_start): i_cfg_rows rows (a multiple of 2P, at
// most MAX_LEN), each i_cfg_cols elements long (at most MAX_LEN), and
// i_cfg_sweeps sweeps per block (at least 1). The V rows are i_cfg_rows long.
// Input handshake: an element is taken when o_a_ready and i_a_valid are both
// high. o_done pulses when the last output element has been issued.
module svd_schedule
  import svd_pkg::*;
#(
  parameter int NUM_PU  = 32,
  parameter int MAX_LEN = 4096,
  parameter int AW      = $clog2(MAX_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_start,
  input  logic [AW:0]   i_cfg_rows,
  input  logic [AW:0]   i_cfg_cols,
  input  logic [7:0]    i_cfg_sweeps,
  output logic          o_busy,
  output logic          o_done,
  // Input matrix stream.
  input  logic          i_a_valid,
  input  data_t         i_a_data,
  output logic          o_a_ready,
  // From the PUs (index 2*k + slot).
  input  logic          i_pu_valid,      // PU 0 rotation output valid
  input  logic [AW+1:0] i_pu_tag,        // PU 0 rotation output tag
  input  data_t         i_pu_u [2*NUM_PU],
  input  data_t         i_pu_v [2*NUM_PU],
  input  logic          i_cs_done,       // PU 0 sin/cos ready
  // To the PUs: write side (crossbar output).
  output logic          o_wr_valid,
  output logic [AW-1:0] o_wr_addr,
  output logic          o_wr_uok,
  output logic          o_wr_vok,
  output logic [NUM_PU-1:0] o_wr_i,
  output logic [NUM_PU-1:0] o_wr_j,
  output data_t         o_din_u [2*NUM_PU],
  output data_t         o_din_v [2*NUM_PU],
  output logic [NUM_PU-1:0] o_acc_en,
  output logic [NUM_PU-1:0] o_acc_ram_i,
  output logic [NUM_PU-1:0] o_acc_clr,
  output logic          o_cs_start,
  // To the PUs: rotation reads.
  output logic          o_rd_en,
  output logic [AW-1:0] o_rd_addr,
  output logic          o_rd_uok,
  output logic          o_rd_vok,
  // To the PUs: final reads.
  output logic [NUM_PU-1:0] o_ng_rd,
  output slot_e         o_ng_slot,
  output logic [AW-1:0] o_ng_addr,
  output logic [NUM_PU-1:0] o_nu_rd,
  output slot_e         o_nu_slot,
  output logic [AW-1:0] o_nu_addr,
  // To the output selector and the normaliser.
  output logic          o_ng_valid,
  output logic          o_ng_last,
  output logic [$clog2(NUM_PU)-1:0] o_ng_pu,
  output logic          o_nu_valid,
  output logic [AW+1:0] o_nu_tag,
  output logic [$clog2(NUM_PU)-1:0] o_nu_pu,
  output logic          o_advance,
  input  logic          i_norm_ready,
  output logic [AW:0]   o_out_row,        // global index of the row being output
  // Progress, for monitoring.
  output logic [3:0]    o_level,          // level of the current step (0 = stage a/b)
  output logic [7:0]    o_sweep
);
  localparam int P    = NUM_PU;
  localparam int NS   = 2 * P;            // slots / rows per block
  localparam int XW   = $clog2(NS + 1) + 1;
  localparam int STEPS = 2 * P - 1;
  localparam int DRAIN = 8;
  localparam int PUW  = $clog2(P) > 0 ? $clog2(P) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LROW, S_LOAD, S_WAIT, S_CS, S_CSW, S_USET, S_UPD,
    S_OPH, S_ORD, S_OWAIT
  } state_e;
  state_e state, after_wait;

  logic [AW:0]  rows, cols, len, e;
  logic [7:0]   sweeps, sweep;
  logic [AW:0]  blk_base;          // global index of the block's first row
  logic [XW-1:0] x;                // row of the block (load / output phase)
  int unsigned  step;
  logic [3:0]   drain;
  logic [$clog2(NS)-1:0] sel [NS];
  int           cur_level, cur_r;

  // ---- pair order ----
  logic last_step;
  assign last_step = (step == STEPS - 1) && (sweep == sweeps - 1'b1);

  // ---- input stream ----
  logic load_take;
  assign o_a_ready = (state == S_LOAD) && (e < cols);
  assign load_take = (state == S_LOAD) && ((e >= cols) || i_a_valid);

  assign o_busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; after_wait <= S_IDLE;
      rows <= '0; cols <= '0; len <= '0; e <= '0; sweeps <= 8'd1; sweep <= '0;
      blk_base <= '0; x <= '0; step <= 0; drain <= '0;
      cur_level <= 0; cur_r <= 0;
      for (int d = 0; d < NS; d++) sel[d] <= '0;
      o_done <= 1'b0; o_cs_start <= 1'b0;
      o_acc_clr <= '0; o_acc_en <= '0; o_acc_ram_i <= '0;
      o_rd_en <= 1'b0; o_rd_addr <= '0; o_rd_uok <= 1'b0; o_rd_vok <= 1'b0;
      o_ng_rd <= '0; o_ng_slot <= SLOT_I; o_ng_addr <= '0;
      o_nu_rd <= '0; o_nu_slot <= SLOT_I; o_nu_addr <= '0;
      o_ng_valid <= 1'b0; o_ng_last <= 1'b0; o_ng_pu <= '0;
      o_nu_valid <= 1'b0; o_nu_tag <= '0; o_nu_pu <= '0;
      o_advance <= 1'b0; o_out_row <= '0;
    end else begin
      o_done <= 1'b0;
      o_cs_start <= 1'b0;
      o_acc_clr <= '0;
      o_rd_en <= 1'b0;
      o_ng_rd <= '0; o_nu_rd <= '0; o_ng_valid <= 1'b0; o_nu_valid <= 1'b0;
      o_ng_last <= 1'b0; o_advance <= 1'b0;
      case (state)
        S_IDLE: if (i_start) begin
          rows   <= i_cfg_rows;
          cols   <= i_cfg_cols;
          len    <= (i_cfg_cols > i_cfg_rows) ? i_cfg_cols : i_cfg_rows;
          sweeps <= (i_cfg_sweeps == 0) ? 8'd1 : i_cfg_sweeps;
          blk_base <= '0;
          x <= '0;
          state <= S_LROW;
        end
        // Start of a loaded row: clear the accumulator of a PU receiving a j row.
        S_LROW: begin
          e <= '0;
          o_acc_en    <= '0;
          o_acc_ram_i <= '0;
          if (int'(x) >= P) begin
            o_acc_clr[int'(x) - P]   <= 1'b1;
            o_acc_en[int'(x) - P]    <= 1'b1;
            o_acc_ram_i[int'(x) - P] <= 1'b1;
          end
          state <= S_LOAD;
        end
        S_LOAD: if (load_take) begin
          if (e == len - 1'b1) begin
            if (int'(x) == NS - 1) begin
              step <= 0; sweep <= '0;
              after_wait <= S_CS;
              drain <= '0;
              state <= S_WAIT;
            end else begin
              x <= x + 1'b1;
              state <= S_LROW;
            end
          end else begin
            e <= e + 1'b1;
          end
        end
        S_WAIT: begin
          o_acc_ram_i <= '0;
          if (int'(drain) == DRAIN - 1) begin
            o_acc_en <= '0;
            state <= after_wait;
          end
          drain <= drain + 1'b1;
        end
        S_CS: begin
          begin
            int lv, rr;
            step_decode(P, int'(step), lv, rr);
            cur_level <= lv;
            cur_r     <= rr;
          end
          o_cs_start <= 1'b1;
          state <= S_CSW;
        end
        S_CSW: if (i_cs_done) state <= S_USET;
        // Crossbar selects for the next step; the receiving PUs start new sums.
        S_USET: begin
          int nl, nr;
          if (last_step) begin
            nl = cur_level; nr = cur_r;
          end else begin
            step_decode(P, (int'(step) + 1) % STEPS, nl, nr);
          end
          for (int k = 0; k < P; k++) begin
            sel[2*k]   <= $clog2(NS)'(row_loc(P, cur_level, cur_r, pair_row(P, nl, nr, k, SLOT_I)));
            sel[2*k+1] <= $clog2(NS)'(row_loc(P, cur_level, cur_r, pair_row(P, nl, nr, k, SLOT_J)));
          end
          o_acc_clr <= '1;
          o_acc_en  <= '1;
          e <= '0;
          state <= S_UPD;
        end
        S_UPD: begin
          o_rd_en   <= 1'b1;
          o_rd_addr <= AW'(e);
          o_rd_uok  <= e < cols;
          o_rd_vok  <= e < rows;
          if (e == len - 1'b1) begin
            drain <= '0;
            state <= S_WAIT;
            if (last_step) begin
              x <= '0;
              after_wait <= S_OPH;
            end else begin
              after_wait <= S_CS;
              if (step == STEPS - 1) begin
                step  <= 0;
                sweep <= sweep + 1'b1;
              end else begin
                step <= step + 1;
              end
            end
          end
          e <= e + 1'b1;
        end
        // Output phase x: NormGen of row x, NormUpdate of row x-1.
        S_OPH: begin
          e <= '0;
          if (x != 0) begin
            o_advance <= 1'b1;
            o_out_row <= blk_base + (AW+1)'(x) - 1'b1;
          end
          state <= S_ORD;
        end
        S_ORD: begin
          if (int'(x) < NS) begin
            o_ng_rd[int'(x) / 2] <= e < cols;
            o_ng_slot  <= slot_e'(x[0]);
            o_ng_addr  <= AW'(e);
            o_ng_valid <= e < cols;
            o_ng_last  <= e == cols - 1'b1;
            o_ng_pu    <= PUW'(int'(x) / 2);
          end
          if (x != 0) begin
            o_nu_rd[(int'(x) - 1) / 2] <= 1'b1;
            o_nu_slot  <= slot_e'(~x[0]);
            o_nu_addr  <= AW'(e);
            o_nu_valid <= 1'b1;
            o_nu_tag   <= {e < cols, e < rows, AW'(e)};
            o_nu_pu    <= PUW'((int'(x) - 1) / 2);
          end
          if (e == len - 1'b1) begin
            drain <= '0;
            state <= S_OWAIT;
          end
          e <= e + 1'b1;
        end
        S_OWAIT: begin
          if (int'(drain) < DRAIN) drain <= drain + 1'b1;
          else if (i_norm_ready) begin
            if (int'(x) == NS) begin
              if (blk_base + (AW+1)'(NS) >= rows) begin
                o_done <= 1'b1;
                state <= S_IDLE;
              end else begin
                blk_base <= blk_base + (AW+1)'(NS);
                x <= '0;
                state <= S_LROW;
              end
            end else begin
              x <= x + 1'b1;
              state <= S_OPH;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- write side: input stream while loading, crossbar while rotating ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_wr_valid <= 1'b0; o_wr_addr <= '0; o_wr_uok <= 1'b0; o_wr_vok <= 1'b0;
      o_wr_i <= '0; o_wr_j <= '0;
      for (int d = 0; d < NS; d++) begin
        o_din_u[d] <= '0; o_din_v[d] <= '0;
      end
    end else if (i_pu_valid) begin
      o_wr_valid <= 1'b1;
      o_wr_addr  <= i_pu_tag[AW-1:0];
      o_wr_uok   <= i_pu_tag[AW+1];
      o_wr_vok   <= i_pu_tag[AW];
      o_wr_i     <= '1;
      o_wr_j     <= '1;
      for (int d = 0; d < NS; d++) begin
        o_din_u[d] <= i_pu_u[sel[d]];
        o_din_v[d] <= i_pu_v[sel[d]];
      end
    end else if (load_take) begin
      o_wr_valid <= 1'b1;
      o_wr_addr  <= AW'(e);
      o_wr_uok   <= e < cols;
      o_wr_vok   <= e < rows;
      o_wr_i     <= '0;
      o_wr_j     <= '0;
      if (int'(x) < P) o_wr_i[int'(x)]     <= 1'b1;
      else             o_wr_j[int'(x) - P] <= 1'b1;
      for (int d = 0; d < NS; d++) begin
        o_din_u[d] <= (e < cols) ? i_a_data : '0;
        o_din_v[d] <= (e == blk_base + (AW+1)'(x)) ? DATA_ONE : '0;
      end
    end else begin
      o_wr_valid <= 1'b0;
    end
  end

  assign o_level = 4'(cur_level);
  assign o_sweep = sweep;

  // The scheduler never loads while rotated rows are still arriving.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    !(i_pu_valid && load_take));
endmodule
