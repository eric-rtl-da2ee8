// signature_generator: the Signature Generator (SHA-256 Signature Unit) of
// the HDE.
//
// It recomputes the program's signature from the decrypted instructions while
// the program is being decrypted. The signature function is SHA-256, as in
// the prototype, taken over the program as a byte string in memory order:
// each incoming 32-bit word is a little-endian instruction word, so its bytes
// are swapped into the big-endian SHA-256 word. Padding (a single 1 bit,
// zeros, and the 64-bit message length) is added here after the word flagged
// `in_last`, so the hash covers exactly the program words received since
// `init`.
//
// Words are collected into a 16-word block buffer. When the buffer is full
// it is handed to sha256_core, and `in_ready` stays low while the core runs
// (65 cycles); there is no second buffer. A block therefore costs 16 input
// cycles + 1 (core start) + 65 (compression) + 1 (capture) = 83 cycles. After the last block `digest` (H0 in bits 255:224)
// is valid and `digest_valid` stays high until the next `init`.
// `init` may be pulsed at any time and starts a new message.
module signature_generator
  import eric_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         in_valid,
  output logic         in_ready,
  input  word_t        in_data,
  input  logic         in_last,
  output logic [255:0] digest,
  output logic         digest_valid
);

  typedef enum logic [2:0] {S_IDLE, S_ABSORB, S_PAD, S_GO, S_COMP, S_DONE} state_e;

  state_e       state;
  state_e       after_comp;
  logic [31:0]  blk [16];
  logic [4:0]   cnt;          // words in the block buffer
  logic [63:0]  n_bits;       // message length so far
  logic         one_written;  // padding 1 bit already placed
  logic         final_blk;    // block in the core is the last one
  logic         core_start, core_done;
  logic [255:0] core_h_out;
  logic [511:0] blk_flat;

  always_comb begin
    for (int i = 0; i < 16; i++) blk_flat[511 - 32*i -: 32] = blk[i];
  end

  assign in_ready   = (state == S_ABSORB);
  assign core_start = (state == S_GO);

  sha256_core u_core (
    .clk  (clk),
    .rst_n(rst_n),
    .start(core_start),
    .block(blk_flat),
    .h_in (digest),
    .busy (),
    .done (core_done),
    .h_out(core_h_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      after_comp   <= S_ABSORB;
      cnt          <= '0;
      n_bits       <= '0;
      one_written  <= 1'b0;
      final_blk    <= 1'b0;
      digest       <= '0;
      digest_valid <= 1'b0;
      for (int i = 0; i < 16; i++) blk[i] <= '0;
    end else if (init) begin
      state        <= S_ABSORB;
      cnt          <= '0;
      n_bits       <= '0;
      one_written  <= 1'b0;
      final_blk    <= 1'b0;
      digest       <= SHA256_IV;
      digest_valid <= 1'b0;
    end else begin
      case (state)
        S_ABSORB: begin
          if (in_valid) begin
            blk[cnt[3:0]] <= bswap32(in_data);
            n_bits        <= n_bits + 64'd32;
            if (cnt == 5'd15) begin
              cnt        <= '0;
              after_comp <= in_last ? S_PAD : S_ABSORB;
              state      <= S_GO;
            end else begin
              cnt   <= cnt + 5'd1;
              state <= in_last ? S_PAD : S_ABSORB;
            end
          end
        end
        S_PAD: begin
          if (!one_written) begin
            blk[cnt[3:0]] <= 32'h8000_0000;
            one_written   <= 1'b1;
          end else if (cnt == 5'd14) begin
            blk[14]   <= n_bits[63:32];
            blk[15]   <= n_bits[31:0];
            final_blk <= 1'b1;
          end else begin
            blk[cnt[3:0]] <= 32'h0;
          end
          if (one_written && cnt == 5'd14) begin
            cnt   <= '0;
            state <= S_GO;
          end else if (cnt == 5'd15) begin
            cnt        <= '0;
            after_comp <= S_PAD;
            state      <= S_GO;
          end else begin
            cnt <= cnt + 5'd1;
          end
        end
        S_GO: begin
          state <= S_COMP;
        end
        S_COMP: begin
          if (core_done) begin
            digest <= core_h_out;
            if (final_blk) begin
              digest_valid <= 1'b1;
              state        <= S_DONE;
            end else begin
              state <= after_comp;
            end
          end
        end
        default: ;  // S_IDLE, S_DONE: wait for init
      endcase
    end
  end

endmodule
