// tb_normalized_src_sel: checks the PU output selector of the final reads.
//
// Every PU presents a distinct data word on each final-read output; random
// selections and flags are applied each clock and the selected words and the
// delayed flags must appear two clocks later.
//
// Only the selector's place in the data path is published; the
// two-clock latency is this design's own.
`timescale 1ns/1ps
module tb_normalized_src_sel;
  import svd_pkg::*;
  localparam int NP = 8, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic ng_valid = 0, ng_last = 0, nu_valid = 0;
  logic [2:0] ng_pu = '0, nu_pu = '0;
  logic [AW+1:0] nu_tag = '0, o_tag;
  data_t ngd [NP], nuu [NP], nuv [NP];
  logic o_ngv, o_ngl, o_nuv;
  data_t o_ngd, o_nuu, o_nuv_d;
  normalized_src_sel #(.NUM_PU(NP), .AW(AW)) dut (
    .clk, .rst_n, .i_ng_valid(ng_valid), .i_ng_last(ng_last), .i_ng_pu(ng_pu),
    .i_nu_valid(nu_valid), .i_nu_tag(nu_tag), .i_nu_pu(nu_pu),
    .i_ng_data(ngd), .i_nu_u(nuu), .i_nu_v(nuv),
    .o_ng_valid(o_ngv), .o_ng_last(o_ngl), .o_ng_data(o_ngd),
    .o_nu_valid(o_nuv), .o_nu_tag(o_tag), .o_nu_u(o_nuu), .o_nu_v(o_nuv_d));
  int checks = 0, failures = 0;
  logic [2:0] h_ngpu [$], h_nupu [$];
  logic [AW+1:0] h_tag [$];
  logic [2:0] h_fl [$];
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 100; t++) begin
      logic [2:0] a, b, f;
      logic [AW+1:0] tg;
      a = 3'($urandom); b = 3'($urandom); f = 3'($urandom); tg = (AW+2)'($urandom);
      // PU data for this read: what the RAMs return one clock later.
      ng_pu <= a; nu_pu <= b; {ng_valid, ng_last, nu_valid} <= f; nu_tag <= tg;
      h_ngpu.push_back(a); h_nupu.push_back(b); h_fl.push_back(f); h_tag.push_back(tg);
      @(posedge clk);
      for (int k = 0; k < NP; k++) begin
        ngd[k] <= data_t'(1000 * t + k); nuu[k] <= data_t'(2000 * t + k); nuv[k] <= data_t'(3000 * t + k);
      end
      if (t >= 1) begin
        logic [2:0] ea, eb, ef;
        int tt;
        #1;
        tt = t - 1;
        ea = h_ngpu.pop_front(); eb = h_nupu.pop_front(); ef = h_fl.pop_front();
        checks++;
        if ({o_ngv, o_ngl, o_nuv} !== ef || o_tag !== h_tag.pop_front() ||
            o_ngd != data_t'(1000 * tt + int'(ea)) || o_nuu != data_t'(2000 * tt + int'(eb)) ||
            o_nuv_d != data_t'(3000 * tt + int'(eb))) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d: %0d %0d %0d", tt, o_ngd, o_nuu, o_nuv_d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial for (int k = 0; k < NP; k++) begin ngd[k] = '0; nuu[k] = '0; nuv[k] = '0; end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
