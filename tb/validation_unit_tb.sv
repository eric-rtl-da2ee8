// validation_unit_tb: checks the Validation Unit.
//
// For each case the testbench encrypts a random 256-bit signature with a
// random key, sends its eight words in a random order and presents a digest.
// Matching digest: pass and exec_enable must rise. Digest with one bit
// flipped, or a signature encrypted with another key: fail, no exec_enable.
// No verdict may appear before all eight words and the digest are present,
// and the verdict must appear one edge after the last of them.
module validation_unit_tb;
  import eric_pkg::*;

  logic         clk = 0, rst_n = 0, init = 0;
  logic [31:0]  key = 0;
  logic         sig_valid = 0;
  logic [31:0]  sig_data = 0;
  logic [2:0]   sig_idx = 0;
  logic [255:0] digest = 0;
  logic         digest_valid = 0;
  logic         result_valid, pass, fail, exec_enable;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  validation_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // kind 0: match, 1: digest bit flipped, 2: wrong key
  task automatic one(input int kind, input bit digest_first);
    logic [255:0] s;
    logic [31:0]  enc_key;
    int order[8];
    s = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    key = $urandom;
    enc_key = (kind == 2) ? key ^ 32'h0000_0100 : key;
    init = 1; digest_valid = 0;
    @(negedge clk);
    init = 0;
    checks++;
    if (result_valid || pass || fail || exec_enable) failures++;
    for (int i = 0; i < 8; i++) order[i] = i;
    order.shuffle();
    if (digest_first) begin
      digest = (kind == 1) ? s ^ (256'd1 << ($urandom % 256)) : s;
      digest_valid = 1;
    end
    for (int i = 0; i < 8; i++) begin
      sig_valid = 1;
      sig_idx   = 3'(order[i]);
      sig_data  = s[255 - 32*order[i] -: 32] ^ enc_key;
      @(negedge clk);
      sig_valid = 0;
      if (i < 7) begin
        checks++;
        if (result_valid) failures++;
      end
    end
    if (!digest_first) begin
      repeat (3) @(negedge clk);
      checks++;
      if (result_valid) failures++;
      digest = (kind == 1) ? s ^ (256'd1 << ($urandom % 256)) : s;
      digest_valid = 1;
      @(negedge clk);
    end
    @(negedge clk);
    checks++;
    if (!result_valid || pass !== (kind == 0) || fail !== (kind != 0) || exec_enable !== pass) begin
      failures++; $display("kind %0d: valid %0b pass %0b fail %0b", kind, result_valid, pass, fail);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) one(r % 3, r % 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
