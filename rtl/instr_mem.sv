// instr_mem: instruction memory (IM) holding the command program of the sequencer.
//
// The host writes 32-bit command words through the PIO interface (port w); the sequencer
// fetches them on port r with one cycle of read latency. The paper names IM and says PIO
// fills it; its depth is not given, so 1024 words is this design's choice.
module instr_mem #(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
