// signature_generator_tb: checks the SHA-256 Signature Generator.
//
// First the FIPS 180-2 "abc" vector through the independent reference, then
// messages of 1..40 and 100 words of random little-endian words, compared with
// the reference digest. Lengths 13, 14, 15 and 16 exercise the padding cases
// that need one or two extra blocks. Input valid is dropped at random and
// in_ready is respected. The number of cycles for one full block is checked
// against 16 + 1 + 65 + 1.
module signature_generator_tb;
  import sha256_ref_pkg::*;

  logic         clk = 0, rst_n = 0;
  logic         init = 0, in_valid = 0, in_last = 0, in_ready;
  logic [31:0]  in_data = 0;
  logic [255:0] digest;
  logic         digest_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  signature_generator dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hash(input logic [31:0] words[$], output logic [255:0] d, output int cycles);
    int i = 0;
    int t0;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    t0 = 0;
    while (i < words.size()) begin
      logic fire;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_data  = words[i];
      in_last  = (i == words.size() - 1);
      #1 fire = in_valid && in_ready;
      @(posedge clk); t0++;
      if (fire) i++;
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    while (!digest_valid) begin @(posedge clk); t0++; end
    d = digest;
    cycles = t0;
  endtask

  initial begin
    logic [31:0] words[$];
    logic [31:0] be[$];
    logic [255:0] d, exp;
    int cyc;
    int lens[$] = '{1, 2, 7, 13, 14, 15, 16, 17, 29, 30, 31, 32, 33, 40, 100};

    // Reference sanity on a word-aligned message: SHA-256("abcd").
    be.push_back(32'h61626364);
    checks++;
    if (sha256_be(be) !== 256'h88d4266fd4e6338d13b845fcf289579d209c897823b9217da3e161936f031589) begin
      failures++; $display("reference model wrong");
    end

    repeat (3) @(posedge clk); rst_n = 1;

    // "abcd" through the DUT: the word in memory order is 0x64636261.
    words = '{32'h64636261};
    hash(words, d, cyc);
    checks++;
    if (d !== 256'h88d4266fd4e6338d13b845fcf289579d209c897823b9217da3e161936f031589) begin
      failures++; $display("abcd digest %h", d);
    end

    foreach (lens[li]) begin
      words.delete();
      for (int i = 0; i < lens[li]; i++) words.push_back($urandom);
      hash(words, d, cyc);
      exp = sha256_bytes_le(words);
      checks++;
      if (d !== exp) begin
        failures++; $display("len %0d: got %h exp %h", lens[li], d, exp);
      end
    end

    // Timing: 16 words offered every cycle fill one block in 16 cycles, then
    // start (1), compression (65) and capture (1); padding the second block
    // takes 15 cycles, then 1 + 65 + 1 again: digest_valid rises at edge
    // 16+67+15+67 = 165 and the loop, sampling before the update, sees it
    // one edge later.
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    words.delete();
    for (int i = 0; i < 16; i++) words.push_back(i);
    begin
      int n = 0, i = 0;
      while (!digest_valid) begin
        logic fire;
        @(negedge clk);
        in_valid = (i < 16);
        in_data  = (i < 16) ? words[i] : 0;
        in_last  = (i == 15);
        #1 fire = in_valid && in_ready;
        @(posedge clk); n++;
        if (fire) i++;
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (n != 16 + 67 + 15 + 67 + 1) begin
        failures++; $display("latency %0d", n);
      end
      checks++;
      if (digest !== sha256_bytes_le(words)) failures++;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
