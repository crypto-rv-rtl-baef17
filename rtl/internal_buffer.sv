// internal_buffer: the 128 x 64-bit internal Buffer (B) of Crypto-RV.
//
// B keeps round constants, chaining states and message words next to the crypto units so
// that a whole hash runs without going back to memory. It is a flip-flop register file:
// all 128 words are visible at once on `words` (the units pick constants, message blocks and
// round keys from it in the same cycle), and it has two write ports: port a for the DM<->B
// transfer engine and port b for results written back by the crypto units. A write takes
// effect at the clock edge; if both ports write the same word in one cycle, port b wins.
// Size is the paper's; the register-file organisation, the two write ports and the reset to
// zero are this design's choices.
module internal_buffer #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] words [DEPTH]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) words[i] <= '0;
    end else begin
      if (a_we) words[a_addr] <= a_wdata;
      if (b_we) words[b_addr] <= b_wdata;
    end
  end

  // Two writers to one word in one cycle means the program overlapped a transfer with a
  // result write-back on the same buffer region.
  a_same_word_write : assert property (@(posedge clk) disable iff (!rst_n)
    !(a_we && b_we && a_addr == b_addr))
    else $warning("internal_buffer: both ports write word %0d", a_addr);
endmodule
