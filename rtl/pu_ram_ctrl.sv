// pu_ram_ctrl: the four row buffers of a processing unit and their port
// multiplexing.
//
// A PU holds one row pair: rows i and j of the working matrix U and the same
// rows of V, one RAM each. The same four RAMs serve every phase of the
// computation, which is the RAM-sharing idea of the architecture:
//  * loading and every rotation step: the incoming row pair (from the input
//    stream or from the PUs of the previous step) is written, and is passed on
//    to param_gen (o_pg_*) to accumulate alpha, beta, gamma. While a j row is
//    loaded (i_acc_ram_i), the partner i row is read back from its RAM at the
//    same address instead, since it arrived earlier;
//  * rotation: all four rows are read in address order for update_matrix
//    (o_up_*). The rotated rows are written back (into this or another PU) at
//    an address that trails the read address, so a RAM never loses a word it
//    still has to read;
//  * final reads: the U row of one slot is read for the norm (NormGen), and
//    the U and V rows of a slot, normally the other one, for the normalised
//    output (NormUpdate).
// The port multiplexing and the trailing-address discipline are this design's
// own; the source architecture gives the four-RAM arrangement, the reuse and
// the port names.
//
// Timing: every read returns data one clock later; o_pg_* and o_up_* are
// therefore one clock behind the write / read request that caused them.
module pu_ram_ctrl
  import svd_pkg::*;
#(
  parameter int MAX_LEN = 4096,
  parameter int AW      = $clog2(MAX_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  // Write side: incoming row pair.
  input  logic          i_wr_valid,
  input  logic [AW-1:0] i_wr_addr,
  input  logic          i_wr_uok,     // element is inside the U row
  input  logic          i_wr_vok,     // element is inside the V row
  input  logic          i_wr_i,       // write slot i
  input  logic          i_wr_j,       // write slot j
  input  data_t         i_din_u_rowi,
  input  data_t         i_din_u_rowj,
  input  data_t         i_din_v_rowi,
  input  data_t         i_din_v_rowj,
  input  logic          i_acc_en,     // feed this stream to param_gen
  input  logic          i_acc_ram_i,  // take row i from its RAM (loading row j)
  input  logic          i_acc_clr,
  // To param_gen.
  output logic          o_pg_clr,
  output logic          o_pg_valid,
  output data_t         o_pg_ui,
  output data_t         o_pg_uj,
  // Rotation reads.
  input  logic          i_rd_en,
  input  logic [AW-1:0] i_rd_addr,
  input  logic          i_rd_uok,
  input  logic          i_rd_vok,
  output logic          o_up_valid,
  output logic [AW+1:0] o_up_tag,     // {uok, vok, addr}
  output data_t         o_up_u_rowi,
  output data_t         o_up_u_rowj,
  output data_t         o_up_v_rowi,
  output data_t         o_up_v_rowj,
  // Final reads.
  input  logic          i_ng_rd,
  input  slot_e         i_ng_slot,
  input  logic [AW-1:0] i_ng_addr,
  input  logic          i_nu_rd,
  input  slot_e         i_nu_slot,
  input  logic [AW-1:0] i_nu_addr,
  output data_t         o_dout_NormGen_u_data,
  output data_t         o_dout_NormUpdate_u_data,
  output data_t         o_dout_NormUpdate_v_data
);
  // RAM order: 0 = U row i, 1 = U row j, 2 = V row i, 3 = V row j.
  logic          we    [4];
  logic [AW-1:0] raddr [4];
  data_t         wdata [4];
  data_t         rdata [4];

  assign wdata[0] = i_din_u_rowi;
  assign wdata[1] = i_din_u_rowj;
  assign wdata[2] = i_din_v_rowi;
  assign wdata[3] = i_din_v_rowj;

  always_comb begin
    we[0] = i_wr_valid && i_wr_uok && i_wr_i;
    we[1] = i_wr_valid && i_wr_uok && i_wr_j;
    we[2] = i_wr_valid && i_wr_vok && i_wr_i;
    we[3] = i_wr_valid && i_wr_vok && i_wr_j;

    // U RAMs: load-time partner read, then the final reads, else rotation.
    for (int s = 0; s < 2; s++) begin
      if (s == 0 && i_acc_ram_i)                   raddr[s] = i_wr_addr;
      else if (i_ng_rd && i_ng_slot == slot_e'(s)) raddr[s] = i_ng_addr;
      else if (i_nu_rd && i_nu_slot == slot_e'(s)) raddr[s] = i_nu_addr;
      else                                         raddr[s] = i_rd_addr;
    end
    for (int s = 0; s < 2; s++) begin
      if (i_nu_rd && i_nu_slot == slot_e'(s)) raddr[2+s] = i_nu_addr;
      else                                    raddr[2+s] = i_rd_addr;
    end
  end

  for (genvar r = 0; r < 4; r++) begin : g_ram
    pu_ram #(.W(DATA_W), .DEPTH(MAX_LEN), .AW(AW)) u_ram (
      .clk, .i_we(we[r]), .i_waddr(i_wr_addr), .i_wdata(wdata[r]),
      .i_re(1'b1), .i_raddr(raddr[r]), .o_rdata(rdata[r])
    );
  end

  // One-clock alignment of everything that accompanies a RAM read.
  logic   pg_use_ram;
  data_t  uj_d, ui_d;
  slot_e  ng_slot_d, nu_slot_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_pg_clr <= 1'b0; o_pg_valid <= 1'b0; pg_use_ram <= 1'b0;
      ui_d <= '0; uj_d <= '0;
      o_up_valid <= 1'b0; o_up_tag <= '0;
      ng_slot_d <= SLOT_I; nu_slot_d <= SLOT_I;
    end else begin
      o_pg_clr   <= i_acc_clr;
      o_pg_valid <= i_wr_valid && i_wr_uok && i_acc_en;
      pg_use_ram <= i_acc_ram_i;
      ui_d       <= i_din_u_rowi;
      uj_d       <= i_din_u_rowj;
      o_up_valid <= i_rd_en;
      o_up_tag   <= {i_rd_uok, i_rd_vok, i_rd_addr};
      ng_slot_d  <= i_ng_slot;
      nu_slot_d  <= i_nu_slot;
    end
  end

  assign o_pg_ui = pg_use_ram ? rdata[0] : ui_d;
  assign o_pg_uj = uj_d;

  assign o_up_u_rowi = rdata[0];
  assign o_up_u_rowj = rdata[1];
  assign o_up_v_rowi = rdata[2];
  assign o_up_v_rowj = rdata[3];

  assign o_dout_NormGen_u_data    = (ng_slot_d == SLOT_J) ? rdata[1] : rdata[0];
  assign o_dout_NormUpdate_u_data = (nu_slot_d == SLOT_J) ? rdata[1] : rdata[0];
  assign o_dout_NormUpdate_v_data = (nu_slot_d == SLOT_J) ? rdata[3] : rdata[2];
endmodule
