// data_memory: the 1024 x 64-bit on-chip Data Memory (DM) of Crypto-RV.
//
// The host streams constants, initial states and messages into DM over its 64-bit DMA
// channel (port a) and reads digests back from it; the Buffer transfer engine reads and
// writes it on port b. Both ports are synchronous: a read returns the addressed word on the
// clock edge after the address is presented (read-first when the same port also writes).
// The two ports are fully independent, which is what lets the host refill one half of DM
// while the core works from the other (double buffering).
// Depth and width follow the paper; the two-port, one-cycle-latency organisation is this
// design's choice (it maps onto FPGA block RAM). Contents are not reset.
module data_memory #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  // port a: host DMA
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port b: core
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    b_rdata <= mem[b_addr];
  end
endmodule
