// sha3_unit: Keccak-f[1600] permutation engine shared by SHA3-256, SHA3-512, SHAKE-128 and
// SHAKE-256.
//
// Two complete Keccak rounds (theta, rho, pi, chi, iota each) are chained combinationally in
// front of one 1600-bit state register, so the 24-round permutation takes 12 cycles. A mux in
// front of the first round chooses between the external State_in (first cycle of a command,
// when `load` is set) and the fed-back register (all later cycles). The two iota steps of
// cycle i take round constants RC[2i] and RC[2i+1] from the shared constant table.
// The sponge around the permutation (XOR of the rate part with a message block, the choice
// of rate and output length per mode) is done by the sequencer, which presents the XORed
// state on state_in; the state register itself is kept here and is visible on state_out.
// Timing: `start` (accepted while not busy) begins a permutation; the clock edge that accepts
// it already computes rounds 0-1, so after 12 edges state_out holds the permuted state and
// `done` is high for the one cycle after that 12th edge (11 edges after the start edge).
// The result is held until the next start.
// If `load` is low at start the permutation continues from the current state_out.
// Structure (mux, two stacked round datapaths, one register, State_in/State_out 1600 bits) is
// the paper's (Fig. 3); the handshake is this design's own.
module sha3_unit
  import crypto_rv_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          load,
  input  logic [1599:0] state_in,
  output logic          busy,
  output logic          done,
  output logic [1599:0] state_out
);
  logic [3:0]    iter_q;   // round pair being computed, 0..11
  logic          run_q;
  logic [1599:0] mux_o, mid, nxt;

  assign busy = run_q;

  always_comb begin
    logic [3:0] it;
    it    = run_q ? iter_q : 4'd0;
    mux_o = (!run_q && load) ? state_in : state_out;
    mid   = keccak_round(mux_o, KECCAK_RC[64*(2*it)     +: 64]);
    nxt   = keccak_round(mid,   KECCAK_RC[64*(2*it + 1) +: 64]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_out <= '0; iter_q <= '0; run_q <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !run_q) begin
        state_out <= nxt;          // round pair 0
        iter_q    <= 4'd1;
        run_q     <= 1'b1;
      end else if (run_q) begin
        state_out <= nxt;
        iter_q    <= iter_q + 4'd1;
        if (iter_q == 4'd11) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end
endmodule
