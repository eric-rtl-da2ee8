// decryption_unit: the Decryption Unit of the HDE.
//
// It decrypts the program package as it streams in, one 32-bit word per
// handshake, with the XOR cipher of the prototype: a word is decrypted by
// XORing it with the PUF-based key, the inverse of the compiler's
// encryption. The key is masked by the target-bit mask, so only the
// instruction bits chosen at compile time are touched (all ones: whole
// words).
//
// Package layout on `in_*` (the paper gives the contents, the order is this
// design's choice):
//   ENC_FULL    : n_words program words, then 8 signature words.
//   ENC_PARTIAL : before every group of 32 program words one map word whose
//                 bit i tells whether word i of the group is encrypted, then
//                 the 8 signature words. This is the paper's one extra bit per
//                 instruction, with instructions counted as 32-bit words.
//   ENC_PARTIAL_RVC : the paper's one bit per 16 bits for code that
//                 contains compressed instructions. Before every group of 16
//                 program words there is one map word with a bit per 16-bit
//                 parcel (2i: low parcel of word i, 2i+1: high parcel). The
//                 unit finds the instruction boundaries itself. A parcel
//                 starts an instruction unless it is the second half of a
//                 32-bit instruction, and an instruction is 32 bits wide when
//                 the low two bits of its decrypted first parcel are 2'b11.
//                 The bit of the start parcel applies to the whole
//                 instruction, and the bits of second halves are ignored.
//                 Low parcels are decrypted with key bits 15:0 and high
//                 parcels with 31:16, whatever instruction they belong to.
//                 The program part is taken to be code only. The group
//                 size and parcel bits are this design's choice.
// The signature words are passed on still encrypted to the Validation Unit,
// which decrypts them itself (it holds the key as well).
//
// Control: `start` (accepted in idle when `key_valid` is high) latches the
// key, `mode`, `mask` and `n_words` (at least 1). `busy` is high from the
// accepted start until the last signature word has been taken; `done` pulses
// in the cycle after that.
//
// Handshakes: valid/ready on `in_*` and `out_*`. `out_valid` never depends on
// `out_ready`; `in_ready` does (a word passes straight through, no buffer,
// one word per cycle when `out_ready` is high). Map words and signature words
// are always taken at once. `out_last` marks the last program word and
// `out_idx` is its index in the program. `sig_valid` is a one-cycle strobe
// with the signature word and its index (0 = H0). Simulation assertions
// check that a stalled input word stays valid and unchanged until taken and
// that `n_words` is not zero.
module decryption_unit
  import eric_pkg::*;
#(
  parameter int unsigned CNT_W = 24  // program length counter (words)
) (
  input  logic             clk,
  input  logic             rst_n,
  // key from the Key Management Unit
  input  key_t             key,
  input  logic             key_valid,
  // control
  input  logic             start,
  input  enc_mode_e        mode,
  input  word_t            mask,
  input  logic [CNT_W-1:0] n_words,
  output logic             busy,
  output logic             done,
  // encrypted package in
  input  logic             in_valid,
  output logic             in_ready,
  input  word_t            in_data,
  // decrypted program out (to main memory and Signature Generator)
  output logic             out_valid,
  input  logic             out_ready,
  output word_t            out_data,
  output logic             out_last,
  output logic [CNT_W-1:0] out_idx,
  // encrypted signature out (to Validation Unit)
  output logic             sig_valid,
  output word_t            sig_data,
  output logic [2:0]       sig_idx
);

  typedef enum logic [1:0] {S_IDLE, S_PROG, S_SIG} state_e;

  state_e           state;
  key_t             key_q;
  enc_mode_e        mode_q;
  word_t            mask_q;
  logic [CNT_W-1:0] last_idx_q;
  logic [CNT_W-1:0] word_idx;
  logic [4:0]       grp_pos;
  logic [31:0]      map_q;
  logic             map_have;
  logic [2:0]       sig_cnt;

  logic             pend_q;      // RVC: this word's low parcel ends a 32-bit instruction
  logic             pend_enc_q;  // RVC: that instruction is encrypted

  logic  need_map;
  logic  in_fire;
  logic  enc_lo, enc_hi;         // decrypt low / high parcel of this word
  logic  pend_nxt;               // RVC: high parcel starts a 32-bit instruction
  logic  [4:0] grp_last;
  key_t  km;
  logic  [1:0] lo_op, hi_op;   // RVC: decrypted length bits of a first parcel

  assign need_map = (state == S_PROG) && (mode_q != ENC_FULL) && !map_have;
  assign grp_last = (mode_q == ENC_PARTIAL_RVC) ? 5'(MAP_GROUP_RVC - 1) : 5'(MAP_GROUP - 1);
  assign km       = key_q & mask_q;

  // Which parcels of the current program word are encrypted.
  always_comb begin
    enc_lo   = 1'b1;
    enc_hi   = 1'b1;
    pend_nxt = 1'b0;
    lo_op    = '0;
    hi_op    = '0;
    case (mode_q)
      ENC_PARTIAL: begin
        enc_lo = map_q[grp_pos];
        enc_hi = map_q[grp_pos];
      end
      ENC_PARTIAL_RVC: begin
        enc_lo   = pend_q ? pend_enc_q : map_q[{grp_pos[3:0], 1'b0}];
        lo_op    = in_data[1:0] ^ (enc_lo ? km[1:0] : 2'b00);
        if (!pend_q && lo_op == 2'b11) begin
          enc_hi = enc_lo;                    // second half of the same instruction
        end else begin
          enc_hi   = map_q[{grp_pos[3:0], 1'b1}];
          hi_op    = in_data[17:16] ^ (enc_hi ? km[17:16] : 2'b00);
          pend_nxt = (hi_op == 2'b11);
        end
      end
      default: ;                              // ENC_FULL
    endcase
  end

  assign out_valid = in_valid && (state == S_PROG) && !need_map;
  assign out_data  = in_data ^ (km & {{16{enc_hi}}, {16{enc_lo}}});
  assign out_last  = (word_idx == last_idx_q);
  assign out_idx   = word_idx;

  always_comb begin
    case (state)
      S_PROG:  in_ready = need_map ? 1'b1 : out_ready;
      S_SIG:   in_ready = 1'b1;
      default: in_ready = 1'b0;
    endcase
  end
  assign in_fire = in_valid && in_ready;

  assign sig_valid = in_valid && (state == S_SIG);
  assign sig_data  = in_data;
  assign sig_idx   = sig_cnt;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      key_q      <= '0;
      mode_q     <= ENC_FULL;
      mask_q     <= '0;
      last_idx_q <= '0;
      word_idx   <= '0;
      grp_pos    <= '0;
      map_q      <= '0;
      map_have   <= 1'b0;
      pend_q     <= 1'b0;
      pend_enc_q <= 1'b0;
      sig_cnt    <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start && key_valid) begin
            key_q      <= key;
            mode_q     <= mode;
            mask_q     <= mask;
            last_idx_q <= n_words - 1'b1;
            word_idx   <= '0;
            grp_pos    <= '0;
            map_have   <= 1'b0;
            pend_q     <= 1'b0;
            pend_enc_q <= 1'b0;
            sig_cnt    <= '0;
            state      <= S_PROG;
          end
        end
        S_PROG: begin
          if (in_fire) begin
            if (need_map) begin
              map_q    <= in_data;
              map_have <= 1'b1;
            end else begin
              grp_pos    <= grp_pos + 5'd1;
              word_idx   <= word_idx + 1'b1;
              pend_q     <= pend_nxt;
              pend_enc_q <= enc_hi;
              if (grp_pos == grp_last) begin
                grp_pos  <= '0;
                map_have <= 1'b0;
              end
              if (out_last) state <= S_SIG;
            end
          end
        end
        S_SIG: begin
          if (in_fire) begin
            sig_cnt <= sig_cnt + 3'd1;
            if (sig_cnt == 3'(SIG_WORDS - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Protocol checks (simulation): a package needs at least one program
  // word, and a word offered on in_* must stay offered, unchanged, until it
  // is taken.
  logic  in_stalled_q;
  word_t in_data_q;
  always_ff @(posedge clk) begin
    in_stalled_q <= rst_n && in_valid && !in_ready && (state != S_IDLE);
    in_data_q    <= in_data;
    if (rst_n && state == S_IDLE && start && key_valid)
      a_nonempty: assert (n_words != '0) else $error("decryption_unit: start with n_words == 0");
    if (rst_n && in_stalled_q)
      a_in_hold: assert (in_valid && in_data == in_data_q)
        else $error("decryption_unit: in_valid dropped or in_data changed while stalled");
  end

endmodule
