// crypto_controller: command sequencer of Crypto-RV (state controller, decoder and operand
// address calculation).
//
// After `go`, it fetches 32-bit command words from instruction memory, starting at word 0,
// and executes them in order until OP_HALT (encoding in crypto_rv_pkg). Two engines can be
// busy at the same time:
//   * the transfer engine (LOAD: DM -> Buffer, STORE: Buffer -> DM), and
//   * the compute engine: one of the three crypto units plus the write-back of its result
//     into the Buffer (one word per cycle on the Buffer's port b).
// A LOAD/STORE issues when the transfer engine is idle; a crypto command issues when both
// the compute engine and the transfer engine are idle (so the block it reads is complete).
// Otherwise the command stalls. Every crypto unit copies its operands out of the Buffer in
// the cycle it starts, so a LOAD issued right after a crypto command refills the Buffer
// while the unit computes: this is the double buffering of the paper. OP_WAIT stalls until
// the engines named in its mask are idle; the program uses it before a STORE of a result.
// Operands are picked from the Buffer by base addresses in the command:
//   SHA2: state B[sb..sb+7], message B[mb..mb+15], round constant B[kb + round];
//         the new state is written back over B[sb..sb+7].
//   SHA3: the sponge input is (init ? 0 : state) XOR (absorb ? B[mb..mb+rate-1] : 0) in the
//         rate part; after the permutation `n` state words go to B[ob..].
//   AES : input B[ib..ib+7], round keys / RC from B[kb + key_addr ..], result to B[ob..].
// Each command takes at least two cycles (fetch, then decode/issue). Status outputs count
// stall cycles, cycles in which transfer and compute overlap, and issued commands.
// The paper gives this block's role (a state controller and custom instruction decoder in a
// RISC-V pipeline driving the buffer, the units and the address calculation); the command
// set, its encoding and the issue rules are this design's own, since the paper publishes no
// instruction encoding.
module crypto_controller
  import crypto_rv_pkg::*;
#(
  parameter int unsigned IM_AW = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              go,
  output logic              running,
  output logic              halted,
  // instruction memory
  output logic [IM_AW-1:0]  im_addr,
  input  logic [31:0]       im_rdata,
  // transfer engine
  output logic              mv_start,
  output logic              mv_store,
  output logic [DM_AW-1:0]  mv_dm,
  output logic [BUF_AW-1:0] mv_b,
  output logic [7:0]        mv_len,
  input  logic              mv_busy,
  // buffer
  input  word_t             b_words [BUF_DEPTH],
  output logic              wb_we,
  output logic [BUF_AW-1:0] wb_addr,
  output word_t             wb_data,
  // SHA-256/SM3/SHA-512 unit
  output logic              s2_start,
  output sha2_mode_e        s2_mode,
  output word_t             s2_state [8],
  output word_t             s2_msg   [16],
  input  logic [6:0]        s2_k_idx,
  output word_t             s2_k,
  input  logic              s2_busy,
  input  logic              s2_done,
  input  word_t             s2_out   [8],
  // SHA3/SHAKE unit
  output logic              s3_start,
  output logic [1599:0]     s3_state_in,
  input  logic              s3_busy,
  input  logic              s3_done,
  input  logic [1599:0]     s3_state_out,
  // AES/Haraka unit
  output logic              ae_start,
  output aes_mode_e         ae_mode,
  output word_t             ae_in    [8],
  input  logic [6:0]        ae_key_addr,
  output word_t             ae_key   [8],
  input  logic              ae_busy,
  input  logic              ae_done,
  input  word_t             ae_out   [8],
  // status
  output logic [31:0]       stall_cycles,
  output logic [31:0]       overlap_cycles,
  output logic [31:0]       cmd_count
);
  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_EXEC} st_e;
  typedef enum logic [1:0] {WB_SHA2, WB_SHA3, WB_AES} wb_src_e;

  st_e             st_q;
  logic [IM_AW-1:0] pc_q;
  logic [31:0]      ir;
  opcode_e          op;

  // per-operation bases held while a unit runs
  logic [BUF_AW-1:0] kb_q, ob_q;
  logic [4:0]        nout_q;
  wb_src_e           src_q;
  logic              wb_act_q;
  logic [4:0]        wb_idx_q;

  logic ce_busy, issue, can_issue;

  assign ir      = im_rdata;
  assign op      = opcode_e'(ir[31:28]);
  assign im_addr = pc_q;
  assign running = (st_q != S_IDLE);
  assign ce_busy = s2_busy || s3_busy || ae_busy || wb_act_q || s2_done || s3_done || ae_done;

  always_comb begin
    case (op)
      OP_LOAD, OP_STORE: can_issue = !mv_busy;
      OP_SHA2, OP_SHA3, OP_AES: can_issue = !ce_busy && !mv_busy;
      OP_WAIT: can_issue = !(ir[1] && ce_busy) && !(ir[0] && mv_busy);
      default: can_issue = 1'b1;
    endcase
  end
  assign issue = (st_q == S_EXEC) && can_issue;

  // ---- decode fields ----
  logic [BUF_AW-1:0] f_a, f_b, f_c;   // SHA2: [25:19] [18:12] [11:5]
  logic [BUF_AW-1:0] a_i, a_k, a_o;   // AES:  [24:18] [17:11] [10:4]
  assign f_a = ir[25:19];
  assign f_b = ir[18:12];
  assign f_c = ir[11:5];
  assign a_i = ir[24:18];
  assign a_k = ir[17:11];
  assign a_o = ir[10:4];

  // transfer engine command
  assign mv_start = issue && (op == OP_LOAD || op == OP_STORE);
  assign mv_store = (op == OP_STORE);
  assign mv_dm    = ir[27:18];
  assign mv_b     = ir[17:11];
  assign mv_len   = {1'b0, ir[10:4]} + 8'd1;

  // SHA2 operands
  assign s2_start = issue && (op == OP_SHA2);
  assign s2_mode  = sha2_mode_e'(ir[27:26]);
  always_comb begin
    for (int i = 0; i < 8; i++)  s2_state[i] = b_words[BUF_AW'(f_a + BUF_AW'(i))];
    for (int i = 0; i < 16; i++) s2_msg[i]   = b_words[BUF_AW'(f_b + BUF_AW'(i))];
    s2_k = b_words[BUF_AW'(kb_q + s2_k_idx)];
  end

  // SHA3 sponge input
  sha3_mode_e        s3_mode;
  logic              s3_init, s3_absorb;
  logic [BUF_AW-1:0] s3_mb;
  assign s3_start  = issue && (op == OP_SHA3);
  assign s3_mode   = sha3_mode_e'(ir[27:26]);
  assign s3_init   = ir[25];
  assign s3_absorb = ir[24];
  assign s3_mb     = ir[23:17];
  always_comb begin
    int unsigned rate;
    rate = sha3_rate_words(s3_mode);
    for (int i = 0; i < 25; i++) begin
      s3_state_in[64*i +: 64] = (s3_init ? 64'd0 : s3_state_out[64*i +: 64])
                              ^ ((s3_absorb && i < int'(rate)) ? b_words[BUF_AW'(s3_mb + BUF_AW'(i))] : 64'd0);
    end
  end

  // AES/Haraka operands
  assign ae_start = issue && (op == OP_AES);
  assign ae_mode  = aes_mode_e'(ir[27:25]);
  always_comb begin
    for (int i = 0; i < 8; i++) begin
      ae_in[i]  = b_words[BUF_AW'(a_i + BUF_AW'(i))];
      ae_key[i] = b_words[BUF_AW'(kb_q + ae_key_addr + BUF_AW'(i))];
    end
  end

  // ---- write-back of results ----
  always_comb begin
    wb_we   = wb_act_q;
    wb_addr = BUF_AW'(ob_q + BUF_AW'(wb_idx_q));
    case (src_q)
      WB_SHA2: wb_data = s2_out[wb_idx_q[2:0]];
      WB_AES:  wb_data = ae_out[wb_idx_q[2:0]];
      default: wb_data = (wb_idx_q < 5'd25) ? s3_state_out[64*wb_idx_q +: 64] : 64'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; pc_q <= '0; halted <= 1'b0;
      kb_q <= '0; ob_q <= '0; nout_q <= '0; src_q <= WB_SHA2;
      wb_act_q <= 1'b0; wb_idx_q <= '0;
      stall_cycles <= '0; overlap_cycles <= '0; cmd_count <= '0;
    end else begin
      // sequencing
      case (st_q)
        S_IDLE: if (go) begin
          st_q <= S_FETCH; pc_q <= '0; halted <= 1'b0;
          stall_cycles <= '0; overlap_cycles <= '0; cmd_count <= '0;
        end
        S_FETCH: st_q <= S_EXEC;
        default: begin
          if (issue) begin
            cmd_count <= cmd_count + 32'd1;
            if (op == OP_HALT) begin
              st_q <= S_IDLE; halted <= 1'b1;
            end else begin
              st_q <= S_FETCH; pc_q <= pc_q + 1'b1;
            end
            case (op)
              OP_SHA2: begin kb_q <= f_c; ob_q <= f_a; nout_q <= 5'd8; src_q <= WB_SHA2; end
              OP_SHA3: begin ob_q <= ir[16:10]; nout_q <= ir[9:5]; src_q <= WB_SHA3; end
              OP_AES: begin
                kb_q <= a_k; ob_q <= a_o; src_q <= WB_AES;
                case (ae_mode)
                  AES_128, AES_128_DEC: nout_q <= 5'd2;
                  HARAKA_512P: nout_q <= 5'd8;
                  default:     nout_q <= 5'd4;
                endcase
              end
              default: ;
            endcase
          end else begin
            stall_cycles <= stall_cycles + 32'd1;
          end
        end
      endcase
      if (mv_busy && (s2_busy || s3_busy || ae_busy)) overlap_cycles <= overlap_cycles + 32'd1;

      // write-back
      if ((s2_done || s3_done || ae_done) && nout_q != 0) begin
        wb_act_q <= 1'b1; wb_idx_q <= '0;
      end else if (wb_act_q) begin
        if (wb_idx_q == nout_q - 5'd1) wb_act_q <= 1'b0;
        wb_idx_q <= wb_idx_q + 5'd1;
      end
    end
  end

  a_wb_done_once : assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({s2_done, s3_done, ae_done}));
endmodule
