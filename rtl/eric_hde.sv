// eric_hde: Hardware Decryption Engine, the target-side half of the
// framework.
//
// The engine sits between the path that delivers a program package to the
// SoC and the main memory of the processor. A package is a program encrypted
// for this one device with its PUF-based key, plus the program's SHA-256
// signature, encrypted too. The engine
//   1. derives the device key: the PUF Key Generator fires 32 arbiter PUFs
//      (8-bit challenges) into a 32-bit PUF key, and the Key Management Unit
//      turns it into the PUF-based key (configurable by `key_cfg`);
//   2. decrypts the package as it streams in (Decryption Unit, XOR cipher,
//      full or partial encryption, partial per 32-bit word or per instruction
//      in compressed code) and writes each plaintext word to main
//      memory at `load_base + 4*index`;
//   3. recomputes SHA-256 over the decrypted words (Signature Generator);
//   4. decrypts the shipped signature and compares (Validation Unit). Only on
//      a match does `exec_enable` rise, releasing the program to the
//      processor in the trusted zone.
// The processor and the main memory are outside this module: memory writes
// leave on `mem_*`, and `exec_enable` is meant to hold the core until the
// program has been authorised. Writing words to memory before validation
// (with execution withheld) is this design's choice; the paper says only that
// the program is sent to the trusted zone after a match.
//
// Interface and timing:
//   key_ready    high once the PUF-based key exists (2 + SETTLE_CYCLES + 1
//                clock edges after reset); `key_regen` fires the PUFs again.
//   load_start   one-cycle request, accepted when key_ready is high and
//                `busy` is low; latches mode, mask, word count and base.
//   busy         high from the accepted start until result_valid.
//   pkg_*        valid/ready stream of package words (see decryption_unit).
//   mem_*        one write per cycle; `mem_ready` low stalls the stream.
//   result_valid with auth_pass or auth_fail, held until the next load.
// The stream stalls while the SHA-256 core compresses a block (65 cycles
// per 16 program words).
module eric_hde
  import eric_pkg::*;
#(
  parameter int unsigned   CNT_W         = 24,
  parameter int unsigned   ADDR_W        = 32,
  parameter int unsigned   PUF_STAGES    = 8,
  parameter logic [31:0]   DEVICE_SEED   = 32'h5eed_0001,
  parameter logic [KEY_W*PUF_STAGES-1:0] PUF_CHALLENGES = {(KEY_W*PUF_STAGES/8){8'h5b}},
  parameter int unsigned   SETTLE_CYCLES = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // key generation and management
  input  logic              key_regen,
  input  key_t              key_cfg,
  output logic              key_ready,
  // load control
  input  logic              load_start,
  input  enc_mode_e         load_mode,
  input  word_t             load_mask,
  input  logic [CNT_W-1:0]  load_n_words,
  input  logic [ADDR_W-1:0] load_base,
  output logic              busy,
  // encrypted program package
  input  logic              pkg_valid,
  output logic              pkg_ready,
  input  word_t             pkg_data,
  // main memory write port
  output logic              mem_we,
  output logic [ADDR_W-1:0] mem_addr,
  output word_t             mem_wdata,
  input  logic              mem_ready,
  // authorisation
  output logic              result_valid,
  output logic              auth_pass,
  output logic              auth_fail,
  output logic              exec_enable
);

  key_t             puf_key;
  logic             puf_key_valid;
  key_t             pbk;
  logic             pbk_valid;

  logic             start_acc;
  logic [ADDR_W-1:0] base_q;

  logic             dec_out_valid, dec_out_ready, dec_out_last;
  word_t            dec_out_data;
  logic [CNT_W-1:0] dec_out_idx;
  logic             dec_sig_valid;
  word_t            dec_sig_data;
  logic [2:0]       dec_sig_idx;

  logic             sg_ready;
  logic [255:0]     digest;
  logic             digest_valid;

  // ---------------------------------------------------------------- keys
  puf_key_generator #(
    .NUM_PUFS     (KEY_W),
    .STAGES       (PUF_STAGES),
    .DEVICE_SEED  (DEVICE_SEED),
    .CHALLENGES   (PUF_CHALLENGES),
    .SETTLE_CYCLES(SETTLE_CYCLES)
  ) u_pkg (
    .clk          (clk),
    .rst_n        (rst_n),
    .regen        (key_regen),
    .puf_key      (puf_key),
    .puf_key_valid(puf_key_valid)
  );

  key_management_unit u_kmu (
    .clk          (clk),
    .rst_n        (rst_n),
    .puf_key      (puf_key),
    .puf_key_valid(puf_key_valid),
    .key_cfg      (key_cfg),
    .pbk          (pbk),
    .pbk_valid    (pbk_valid)
  );

  assign key_ready = pbk_valid;

  // ------------------------------------------------------------ control
  // `busy` spans a load from the accepted start to its verdict.
  assign start_acc = load_start && pbk_valid && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q <= '0;
      busy   <= 1'b0;
    end else if (start_acc) begin
      base_q <= load_base;
      busy   <= 1'b1;
    end else if (result_valid) begin
      busy   <= 1'b0;
    end
  end

  // ---------------------------------------------------------- decryption
  decryption_unit #(
    .CNT_W(CNT_W)
  ) u_dec (
    .clk      (clk),
    .rst_n    (rst_n),
    .key      (pbk),
    .key_valid(pbk_valid),
    .start    (start_acc),
    .mode     (load_mode),
    .mask     (load_mask),
    .n_words  (load_n_words),
    .busy     (),
    .done     (),
    .in_valid (pkg_valid),
    .in_ready (pkg_ready),
    .in_data  (pkg_data),
    .out_valid(dec_out_valid),
    .out_ready(dec_out_ready),
    .out_data (dec_out_data),
    .out_last (dec_out_last),
    .out_idx  (dec_out_idx),
    .sig_valid(dec_sig_valid),
    .sig_data (dec_sig_data),
    .sig_idx  (dec_sig_idx)
  );

  // A program word leaves only when memory and Signature Generator both take it.
  assign dec_out_ready = mem_ready && sg_ready;
  assign mem_we        = dec_out_valid && dec_out_ready;
  assign mem_addr      = base_q + ADDR_W'({dec_out_idx, 2'b00});
  assign mem_wdata     = dec_out_data;

  // ----------------------------------------------------------- signature
  signature_generator u_sig (
    .clk         (clk),
    .rst_n       (rst_n),
    .init        (start_acc),
    .in_valid    (dec_out_valid && mem_ready),
    .in_ready    (sg_ready),
    .in_data     (dec_out_data),
    .in_last     (dec_out_last),
    .digest      (digest),
    .digest_valid(digest_valid)
  );

  // ---------------------------------------------------------- validation
  validation_unit u_val (
    .clk         (clk),
    .rst_n       (rst_n),
    .init        (start_acc),
    .key         (pbk),
    .sig_valid   (dec_sig_valid),
    .sig_data    (dec_sig_data),
    .sig_idx     (dec_sig_idx),
    .digest      (digest),
    .digest_valid(digest_valid),
    .result_valid(result_valid),
    .pass        (auth_pass),
    .fail        (auth_fail),
    .exec_enable (exec_enable)
  );

endmodule
