// key_management_unit_tb: checks the Key Management Unit.
//
// Random PUF keys and configuration words are applied; one clock later the
// PUF-based key must equal the reference function and pbk_valid must follow
// puf_key_valid. It also checks that different configurations of one PUF
// key give different PUF-based keys and that the PUF key itself is never
// passed out unchanged. Finally it maps several chips onto one shared
// PUF-based key: the key function is a bijection, so for any PUF key and
// any wanted key the configuration cfg = puf_key ^ mix^-1(wanted) exists.
// The inverse mix is written here independently: the xor-shifts are undone
// by repeated shifting, and the multiplications by the inverses of the odd
// constants modulo 2^32.
module key_management_unit_tb;
  import sha256_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic [31:0] puf_key = 0, key_cfg = 0, pbk;
  logic        puf_key_valid = 0, pbk_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  key_management_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] mix_inv(logic [31:0] h);
    h = h ^ (h >> 16);
    h = h * 32'h7ed1_b41d;             // inverse of 0xc2b2ae35
    h = h ^ (h >> 13) ^ (h >> 26);
    h = h * 32'ha5cb_9243;             // inverse of 0x85ebca6b
    h = h ^ (h >> 16);
    return h;
  endfunction

  initial begin
    logic [31:0] prev;
    repeat (2) @(negedge clk);
    checks++;
    if (pbk_valid !== 1'b0 || pbk !== 32'h0) failures++;
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      puf_key       = $urandom;
      key_cfg       = (i % 5 == 0) ? 32'h0 : $urandom;
      puf_key_valid = (i % 7) != 3;
      @(negedge clk);   // one register stage
      checks++;
      if (pbk !== kmu_ref(puf_key, key_cfg)) begin
        failures++; $display("pbk %h exp %h", pbk, kmu_ref(puf_key, key_cfg));
      end
      checks++;
      if (pbk_valid !== puf_key_valid) failures++;
      checks++;
      if (pbk === puf_key) failures++;
    end
    // Same PUF key, new configuration: a new PUF-based key.
    puf_key = 32'hcafe_f00d; key_cfg = 32'h1;
    @(negedge clk); prev = pbk;
    key_cfg = 32'h2;
    @(negedge clk);
    checks++;
    if (pbk === prev) failures++;
    // Several chips, one PUF-based key: each chip gets its own configuration.
    for (int d = 0; d < 4; d++) begin
      logic [31:0] shared = 32'h0bad_c0de;
      puf_key = $urandom;
      key_cfg = puf_key ^ mix_inv(shared);
      @(negedge clk);
      checks++;
      if (pbk !== shared) begin failures++; $display("chip %0d: pbk %h exp %h", d, pbk, shared); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
