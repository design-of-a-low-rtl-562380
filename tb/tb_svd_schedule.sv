// tb_svd_schedule: the pair order and row routing against the 8-row,
// 4-PU example of the source architecture.
//
// The PU array is replaced by a small model: each PU slot remembers which
// row it holds (the row number is the data), answers a rotation read three
// clocks later, and reports sin/cos done a few clocks after the start. The
// testbench checks, at the start of each step, that the pairs held by PU 1..4
// are exactly those of the published example ((1,5),(2,6),(3,7),(4,8), then
// the j rows shifted, then the half and quarter stages), for two sweeps and
// two blocks; that loading writes the right slot with identity V rows; that
// each step streams one element per clock; and that the final reads visit
// rows 1..8 in order at PU x/2, slot x%2, overlapping the two reads.
`timescale 1ns/1ps
module tb_svd_schedule;
  import svd_pkg::*;
  localparam int P = 4, NS = 8, AW = 4, ROWS = 16, COLS = 5, SWEEPS = 2;
  localparam int LEN = (COLS > ROWS) ? COLS : ROWS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // Pairs of the published example, rows numbered from 1, PU1..PU4, 7 steps.
  int fig [7][4][2] = '{
    '{'{1,5}, '{2,6}, '{3,7}, '{4,8}},
    '{'{1,6}, '{2,7}, '{3,8}, '{4,5}},
    '{'{1,7}, '{2,8}, '{3,5}, '{4,6}},
    '{'{1,8}, '{2,5}, '{3,6}, '{4,7}},
    '{'{1,3}, '{2,4}, '{5,7}, '{6,8}},
    '{'{1,4}, '{2,3}, '{5,8}, '{6,7}},
    '{'{1,2}, '{3,4}, '{5,6}, '{7,8}}};

  logic start = 0, busy, done, a_valid = 0, a_ready;
  data_t a_data = '0;
  logic pu_valid = 0, cs_done = 0;
  logic [AW+1:0] pu_tag = '0;
  data_t pu_u [NS], pu_v [NS], din_u [NS], din_v [NS];
  logic wr_valid, wr_uok, wr_vok, cs_start, rd_en, rd_uok, rd_vok;
  logic [AW-1:0] wr_addr, rd_addr, ng_addr, nu_addr;
  logic [P-1:0] wr_i, wr_j, acc_en, acc_ram_i, acc_clr, ng_rd, nu_rd;
  slot_e ng_slot, nu_slot;
  logic ng_valid, ng_last, nu_valid, advance;
  logic [1:0] ng_pu, nu_pu;
  logic [AW+1:0] nu_tag;
  logic [AW:0] out_row;
  logic [3:0] level;
  logic [7:0] sweep;

  svd_schedule #(.NUM_PU(P), .MAX_LEN(16)) dut (
    .clk, .rst_n, .i_start(start), .i_cfg_rows((AW+1)'(ROWS)), .i_cfg_cols((AW+1)'(COLS)),
    .i_cfg_sweeps(8'(SWEEPS)), .o_busy(busy), .o_done(done),
    .i_a_valid(a_valid), .i_a_data(a_data), .o_a_ready(a_ready),
    .i_pu_valid(pu_valid), .i_pu_tag(pu_tag), .i_pu_u(pu_u), .i_pu_v(pu_v), .i_cs_done(cs_done),
    .o_wr_valid(wr_valid), .o_wr_addr(wr_addr), .o_wr_uok(wr_uok), .o_wr_vok(wr_vok),
    .o_wr_i(wr_i), .o_wr_j(wr_j), .o_din_u(din_u), .o_din_v(din_v),
    .o_acc_en(acc_en), .o_acc_ram_i(acc_ram_i), .o_acc_clr(acc_clr), .o_cs_start(cs_start),
    .o_rd_en(rd_en), .o_rd_addr(rd_addr), .o_rd_uok(rd_uok), .o_rd_vok(rd_vok),
    .o_ng_rd(ng_rd), .o_ng_slot(ng_slot), .o_ng_addr(ng_addr),
    .o_nu_rd(nu_rd), .o_nu_slot(nu_slot), .o_nu_addr(nu_addr),
    .o_ng_valid(ng_valid), .o_ng_last(ng_last), .o_ng_pu(ng_pu),
    .o_nu_valid(nu_valid), .o_nu_tag(nu_tag), .o_nu_pu(nu_pu),
    .o_advance(advance), .i_norm_ready(1'b1), .o_out_row(out_row), .o_level(level), .o_sweep(sweep));

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  // ---- PU array model ----
  int slot_row [NS];          // row (global, from 0) each slot holds
  int held [NS];              // snapshot at sin/cos start
  logic rd_d [3];
  logic [AW+1:0] tag_d [3];
  int step_no = 0, blk = 0, rd_count = 0, next_out = 0, overlap = 0, loaded = 0;
  always @(posedge clk) begin
    rd_d[0] <= rd_en; tag_d[0] <= {rd_uok, rd_vok, rd_addr};
    rd_d[1] <= rd_d[0]; tag_d[1] <= tag_d[0];
    pu_valid <= rd_d[1]; pu_tag <= tag_d[1];
  end
  always_comb for (int d = 0; d < NS; d++) begin
    pu_u[d] = data_t'(held[d] + 1);
    pu_v[d] = '0;
  end
  always @(posedge clk) if (rst_n) begin
    if (wr_valid) begin
      for (int k = 0; k < P; k++) begin
        if (wr_i[k] && wr_uok) slot_row[2*k]   = int'(din_u[2*k]) - 1;
        if (wr_j[k] && wr_uok) slot_row[2*k+1] = int'(din_u[2*k+1]) - 1;
        if ((wr_i[k] || wr_j[k]) && !pu_valid_q && wr_vok) begin
          int row;
          row = wr_i[k] ? int'(din_u[2*k]) - 1 : int'(din_u[2*k+1]) - 1;
          if (wr_uok) chk(din_v[2*k] == ((int'(wr_addr) == row) ? DATA_ONE : '0), "identity V row");
        end
      end
    end
    if (rd_en) rd_count++;
    if (cs_start) begin
      int s;
      chk(step_no == 0 || rd_count == LEN, $sformatf("rotation stream length %0d", rd_count));
      rd_count = 0;
      s = step_no % 7;
      for (int k = 0; k < P; k++) begin
        chk(slot_row[2*k] == fig[s][k][0] - 1 + 8 * blk && slot_row[2*k+1] == fig[s][k][1] - 1 + 8 * blk,
            $sformatf("block %0d step %0d PU%0d holds (%0d,%0d), expected (%0d,%0d)", blk, s, k + 1,
                      slot_row[2*k] + 1 - 8 * blk, slot_row[2*k+1] + 1 - 8 * blk, fig[s][k][0], fig[s][k][1]));
      end
      for (int d = 0; d < NS; d++) held[d] = slot_row[d];
      step_no++;
    end
    if (ng_valid && ng_addr == 0) begin
      int x;
      x = 2 * int'(ng_pu) + int'(ng_slot);
      chk(x == next_out && slot_row[x] == x + 8 * blk, $sformatf("final read of row %0d at PU%0d slot %0d", next_out, ng_pu, ng_slot));
      next_out++;
    end
    if (ng_valid && nu_valid) overlap++;
    if (next_out == NS && advance) begin
      chk(step_no == 7 * SWEEPS, $sformatf("steps per block %0d", step_no));
      blk++; step_no = 0; next_out = 0;
    end
  end
  logic pu_valid_q;
  always @(posedge clk) pu_valid_q <= pu_valid;

  initial begin
    for (int d = 0; d < NS; d++) begin slot_row[d] = -1; held[d] = -1; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    start <= 1; @(posedge clk); start <= 0;
    for (int r = 0; r < ROWS; r++)
      for (int e = 0; e < COLS; e++) begin
        a_valid <= 1; a_data <= data_t'(r + 1);
        @(posedge clk);
        while (!a_ready) @(posedge clk);
      end
    a_valid <= 0;
    while (!done) @(posedge clk);
    chk(overlap > 0, "final reads never overlapped");
    chk(blk == 2, $sformatf("blocks %0d", blk));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // sin/cos done five clocks after start.
  initial forever begin
    @(posedge clk);
    if (cs_start) begin repeat (4) @(posedge clk); cs_done <= 1; @(posedge clk); cs_done <= 0; end
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
