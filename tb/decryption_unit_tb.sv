// decryption_unit_tb: checks the Decryption Unit.
//
// The testbench encrypts random programs itself (XOR with key & mask, per
// word or by map bits) and streams the package in with random gaps on the
// input and random back-pressure on out_ready. Every program word that
// leaves must equal the plaintext word of its index, with out_last only on
// the last one; map words must never leave; the eight signature words must
// leave unchanged (still encrypted) on sig_* with indices 0..7; done must
// pulse once. Packages cover full encryption, partial encryption with a map,
// a target-bit mask, and compressed code (ENC_PARTIAL_RVC) built from a
// random instruction list by the reference package. With no gaps a full package of N words must take
// N + 8 cycles (one word per cycle).
module decryption_unit_tb;
  import eric_pkg::*;
  import sha256_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic [31:0] key = 0;
  logic        key_valid = 0;
  logic        start = 0;
  enc_mode_e   mode = ENC_FULL;
  logic [31:0] mask = '1;
  logic [23:0] n_words = 0;
  logic        busy, done;
  logic        in_valid = 0, in_ready;
  logic [31:0] in_data = 0;
  logic        out_valid, out_ready = 0, out_last;
  logic [31:0] out_data;
  logic [23:0] out_idx;
  logic        sig_valid;
  logic [31:0] sig_data;
  logic [2:0]  sig_idx;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  decryption_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs one package; returns the number of clock edges from the first
  // package word offered to done.
  task automatic run(input enc_mode_e m, input logic [31:0] msk, input int n,
                     input bit gaps, output int cycles);
    logic [31:0] plain[$], pkg[$], sig[8];
    logic [31:0] map;
    int i, got_prog, got_sig, done_seen, edges;
    bit held = 0;
    key  = $urandom;
    if (m == ENC_PARTIAL_RVC) rvc_package(key & msk, n, 50, plain, pkg);
    else for (int w = 0; w < n; w++) begin
      if (m == ENC_PARTIAL && w % 32 == 0) begin
        map = $urandom;
        pkg.push_back(map);
      end
      plain.push_back($urandom);
      pkg.push_back(plain[w] ^ (((m == ENC_FULL) || map[w % 32]) ? (key & msk) : 32'h0));
    end
    for (int s = 0; s < 8; s++) begin sig[s] = $urandom; pkg.push_back(sig[s]); end

    @(negedge clk);
    key_valid = 1; mode = m; mask = msk; n_words = 24'(n); start = 1;
    @(negedge clk);
    start = 0; key = ~key;  // the unit must use the key latched at start
    checks++;
    if (!busy) failures++;
    i = 0; got_prog = 0; got_sig = 0; done_seen = 0; edges = 0;
    while (!done_seen && edges < 20000) begin
      logic fire;
      // a word once offered stays offered until taken
      in_valid  = (i < pkg.size()) && (!gaps || held || ($urandom % 3 != 0));
      in_data   = (i < pkg.size()) ? pkg[i] : 32'h0;
      out_ready = !gaps || ($urandom % 4 != 0);
      #1;
      fire = in_valid && in_ready;
      held = in_valid && !in_ready;
      if (out_valid && out_ready) begin
        checks++;
        if (out_idx != 24'(got_prog) || out_data !== plain[got_prog] ||
            out_last !== (got_prog == n - 1)) begin
          failures++;
          $display("word %0d: idx %0d data %h exp %h last %0b", got_prog, out_idx, out_data, plain[got_prog], out_last);
        end
        got_prog++;
      end
      if (out_valid && !fire) begin
        checks++;
        if (out_ready) failures++;  // a word offered with ready must be taken
      end
      if (sig_valid) begin
        checks++;
        if (sig_idx != 3'(got_sig) || sig_data !== sig[got_sig]) begin
          failures++; $display("sig %0d: %h", got_sig, sig_data);
        end
        got_sig++;
      end
      @(posedge clk); edges++;
      if (fire) i++;
      @(negedge clk);
      if (done) done_seen = 1;
    end
    in_valid = 0;
    checks++;
    if (got_prog != n || got_sig != 8 || i != pkg.size() || !done_seen) begin
      failures++; $display("counts prog %0d sig %0d words %0d done %0b", got_prog, got_sig, i, done_seen);
    end
    checks++;
    if (busy) failures++;
    cycles = edges;
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(ENC_FULL, '1, 1, 0, cyc);
    run(ENC_FULL, '1, 40, 0, cyc);
    checks++;
    if (cyc != 40 + 8) begin failures++; $display("full package took %0d cycles", cyc); end
    run(ENC_FULL, '1, 100, 1, cyc);
    run(ENC_PARTIAL, '1, 31, 1, cyc);
    run(ENC_PARTIAL, '1, 32, 1, cyc);
    run(ENC_PARTIAL, '1, 33, 1, cyc);
    run(ENC_PARTIAL, '1, 100, 0, cyc);
    checks++;
    if (cyc != 100 + 4 + 8) begin failures++; $display("partial package took %0d cycles", cyc); end
    run(ENC_PARTIAL, 32'hffff_f000, 77, 1, cyc);   // immediate/register fields only
    run(ENC_FULL, 32'h000f_8000, 50, 1, cyc);      // one register field only
    // compressed code: one map bit per 16-bit parcel, instruction boundaries
    run(ENC_PARTIAL_RVC, '1, 1, 1, cyc);
    run(ENC_PARTIAL_RVC, '1, 16, 1, cyc);
    run(ENC_PARTIAL_RVC, '1, 17, 1, cyc);
    for (int r = 0; r < 6; r++) run(ENC_PARTIAL_RVC, '1, 40 + r * 13, 1, cyc);
    run(ENC_PARTIAL_RVC, 32'hfff0_fff0, 63, 1, cyc); // low opcode bits left clear
    run(ENC_PARTIAL_RVC, '1, 100, 0, cyc);
    checks++;
    if (cyc != 100 + 7 + 8) begin failures++; $display("rvc package took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
