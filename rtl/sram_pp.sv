// sram_pp: 8 KB on-chip SRAM macro with two banks for ping-pong buffering.
//
// The macro is split into two equal banks. The compute side works on bank
// `bank_sel` while the DMA side works on the other bank, so a tile can be
// loaded (or results unloaded) while the array computes on the previous one;
// the host flips bank_sel between kernels. The paper gives the size, width
// and two-bank organisation; the port set is this design's choice: the
// compute side has one read and one write port (weight-stationary passes
// read old partial sums while writing new ones), the DMA side one
// read/write port. Reads are synchronous with one cycle of latency.
// Written as a plain array; a foundry macro would replace it in a real flow.
//
// Interface: WIDTH bits per word, BYTES per macro, bank depth BYTES*4/WIDTH.
module sram_pp #(
  parameter int WIDTH = 128,
  parameter int BYTES = 8192,
  localparam int BANK_DEPTH = BYTES * 8 / WIDTH / 2,
  localparam int AW = $clog2(BANK_DEPTH)
) (
  input  logic             clk,
  input  logic             bank_sel,
  // compute side, bank = bank_sel
  input  logic             c_re,
  input  logic [AW-1:0]    c_raddr,
  output logic [WIDTH-1:0] c_rdata,
  input  logic             c_we,
  input  logic [AW-1:0]    c_waddr,
  input  logic [WIDTH-1:0] c_wdata,
  // DMA side, bank = !bank_sel
  input  logic             d_re,
  input  logic             d_we,
  input  logic [AW-1:0]    d_addr,
  input  logic [WIDTH-1:0] d_wdata,
  output logic [WIDTH-1:0] d_rdata
);

  logic [WIDTH-1:0] mem [2][BANK_DEPTH];

  always_ff @(posedge clk) begin
    if (c_we) mem[bank_sel][c_waddr] <= c_wdata;
    if (d_we) mem[!bank_sel][d_addr] <= d_wdata;
    if (c_re) c_rdata <= mem[bank_sel][c_raddr];
    if (d_re) d_rdata <= mem[!bank_sel][d_addr];
  end

endmodule
