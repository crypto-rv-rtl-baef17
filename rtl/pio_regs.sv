// pio_regs: the 32-bit programmed-I/O register interface of Crypto-RV.
//
// The host writes command words into instruction memory and starts and watches the
// co-processor through a simple 32-bit register port (the AXI-Lite side of the host bridge
// is outside this design). Word addresses:
//   0x000-0x3FF  instruction memory (write only)
//   0x800 CTRL   write bit 0 = 1: start the program at IM word 0 (`go` pulses one cycle)
//   0x801 STATUS {30'b0, halted, running}
//   0x802 STALL  cycles a command waited for a busy engine
//   0x803 OVLP   cycles in which a DM<->Buffer transfer overlapped a crypto computation
//   0x804 CMDS   commands issued
//   0x805 CYCLES cycles from `go` to HALT
// Reads return data on the clock edge after pio_re (one cycle latency). The paper says a
// 32-bit PIO channel carries configuration and control to IM and control registers; the
// register map and the counters are this design's own.
module pio_regs #(
  parameter int unsigned IM_AW = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pio_we,
  input  logic             pio_re,
  input  logic [11:0]      pio_addr,
  input  logic [31:0]      pio_wdata,
  output logic [31:0]      pio_rdata,
  // to instruction memory
  output logic             im_we,
  output logic [IM_AW-1:0] im_waddr,
  output logic [31:0]      im_wdata,
  // to / from the sequencer
  output logic             go,
  input  logic             running,
  input  logic             halted,
  input  logic [31:0]      stall_cycles,
  input  logic [31:0]      overlap_cycles,
  input  logic [31:0]      cmd_count
);
  logic [31:0] cycles_q;

  assign im_we    = pio_we && !pio_addr[11];
  assign im_waddr = pio_addr[IM_AW-1:0];
  assign im_wdata = pio_wdata;
  assign go       = pio_we && (pio_addr == 12'h800) && pio_wdata[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycles_q  <= '0;
      pio_rdata <= '0;
    end else begin
      if (go)           cycles_q <= '0;
      else if (running) cycles_q <= cycles_q + 32'd1;
      if (pio_re) begin
        case (pio_addr)
          12'h801: pio_rdata <= {30'd0, halted, running};
          12'h802: pio_rdata <= stall_cycles;
          12'h803: pio_rdata <= overlap_cycles;
          12'h804: pio_rdata <= cmd_count;
          12'h805: pio_rdata <= cycles_q;
          default: pio_rdata <= '0;
        endcase
      end
    end
  end
endmodule
