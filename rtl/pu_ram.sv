// pu_ram: simple dual-port row buffer, one write port and one read port.
//
// Holds one matrix row of up to DEPTH elements. A write and a read may happen
// in the same clock; the read returns the stored word one clock later
// (synchronous read, the usual block-RAM behaviour). Reading and writing the
// same address in one clock returns the old word.
//
// The published PU uses four RAMs per PU; their port arrangement and read
// latency are this design's choice.
module pu_ram #(
  parameter int W     = 32,
  parameter int DEPTH = 4096,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          i_we,
  input  logic [AW-1:0] i_waddr,
  input  logic [W-1:0]  i_wdata,
  input  logic          i_re,
  input  logic [AW-1:0] i_raddr,
  output logic [W-1:0]  o_rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (i_we) mem[i_waddr] <= i_wdata;
  end

  always_ff @(posedge clk) begin
    if (i_re) o_rdata <= mem[i_raddr];
  end
endmodule
