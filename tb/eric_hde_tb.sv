// eric_hde_tb: end-to-end test of the Hardware Decryption Engine at its
// default parameters.
//
// The testbench plays the software source: it knows the device's PUF-based
// key (worked out from the PUF and key-management models in
// sha256_ref_pkg, standing for the enrolment the framework assumes has
// happened), signs each program with SHA-256, encrypts program and signature
// with the XOR cipher and streams the package into the engine. A memory
// model stores what the engine writes, and the testbench checks the memory
// image and the verdict.
//
// Cases: full encryption; partial encryption with about 10% and 50% of the
// words encrypted; compressed code with one map bit per 16-bit parcel
// (ENC_PARTIAL_RVC); encryption of selected instruction bits only; a package
// with one flipped bit (must fail); a package made for another chip (must
// fail); an unprotected program from an unknown source (must fail); a new
// key configuration (old packages fail, new ones pass); PUF regeneration;
// 24 packages of random size, mode and mask, every third with one bit
// flipped; and a 32 KiB program. Memory back-pressure is applied in some loads.
// Each mechanism is counted and must occur at least once. The load time of
// a 32-word full package is checked against the cycle formula of the
// Signature Generator.
module eric_hde_tb;
  import eric_pkg::*;
  import sha256_ref_pkg::*;

  // Default device of eric_hde, and a second chip for the wrong-device case.
  localparam logic [31:0]  SEED_DEV   = 32'h5eed_0001;
  localparam logic [31:0]  SEED_OTHER = 32'h5eed_0777;
  localparam logic [255:0] CHALL      = {32{8'h5b}};

  logic        clk = 0, rst_n = 0;
  logic        key_regen = 0;
  logic [31:0] key_cfg = 32'h0000_0001;
  logic        key_ready;
  logic        load_start = 0;
  enc_mode_e   load_mode = ENC_FULL;
  logic [31:0] load_mask = '1;
  logic [23:0] load_n_words = 0;
  logic [31:0] load_base = 0;
  logic        busy;
  logic        pkg_valid = 0, pkg_ready;
  logic [31:0] pkg_data = 0;
  logic        mem_we;
  logic [31:0] mem_addr, mem_wdata;
  logic        mem_ready = 1;
  logic        result_valid, auth_pass, auth_fail, exec_enable;

  int checks = 0, failures = 0;
  int n_full = 0, n_partial = 0, n_mask = 0, n_mem_stall = 0, n_sha_stall = 0;
  int n_pass = 0, n_fail_tamper = 0, n_fail_device = 0, n_fail_unsigned = 0;
  int n_rekey = 0, n_regen = 0, n_multiblock = 0, n_rvc = 0;

  logic [31:0] mem [logic [31:0]];
  bit stall_mem = 0;

  always #20 clk = ~clk;   // 25 MHz, the prototype's clock

  eric_hde dut (.*);

  always @(posedge clk) begin
    if (mem_we) mem[mem_addr] = mem_wdata;
  end

  // stall counters (sampled before the edge)
  always @(negedge clk) begin
    #2;
    if (dut.dec_out_valid && !mem_ready) n_mem_stall++;
    if (dut.dec_out_valid && mem_ready && !dut.sg_ready) n_sha_stall++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] puf_key_of(logic [31:0] seed);
    logic [31:0] k;
    for (int i = 0; i < 32; i++)
      k[i] = arbiter_response(seed ^ (32'(i) * 32'h0100_0193), 8, 32'(CHALL[8*i +: 8]));
    return k;
  endfunction

  // Software source: build a package. enc_pct: share of words encrypted in
  // partial mode. sign_key: key used for the signature (normally = key).
  function automatic void make_pkg(input logic [31:0] plain[$], input enc_mode_e m,
                                   input logic [31:0] msk, input int enc_pct,
                                   input logic [31:0] key, input bit protect,
                                   output logic [31:0] pkg[$]);
    logic [31:0] map;
    logic [255:0] sig;
    pkg.delete();
    foreach (plain[w]) begin
      if (m == ENC_PARTIAL && w % 32 == 0) begin
        map = 0;
        for (int b = 0; b < 32; b++) map[b] = ($urandom % 100) < enc_pct;
        pkg.push_back(map);
      end
      pkg.push_back(plain[w] ^ ((protect && (m == ENC_FULL || map[w % 32])) ? (key & msk) : 32'h0));
    end
    sig = sha256_bytes_le(plain);
    for (int s = 0; s < 8; s++) pkg.push_back(sig[255 - 32*s -: 32] ^ (protect ? key : 32'h0));
  endfunction

  // Software source for compressed code (ENC_PARTIAL_RVC): a random program
  // of 16- and 32-bit instructions, about pct% of them encrypted, signed.
  function automatic void make_rvc_pkg(input int n, input int pct, input logic [31:0] msk,
                                       input logic [31:0] key,
                                       output logic [31:0] plain[$], output logic [31:0] pkg[$]);
    logic [31:0] pl[$], pk[$];
    logic [255:0] sig;
    rvc_package(key & msk, n, pct, pl, pk);
    sig = sha256_bytes_le(pl);
    for (int s = 0; s < 8; s++) pk.push_back(sig[255 - 32*s -: 32] ^ key);
    plain = pl;
    pkg   = pk;
  endfunction

  // Target side: stream a package in and wait for the verdict.
  task automatic load(input logic [31:0] pkg[$], input enc_mode_e m, input logic [31:0] msk,
                      input int n, input logic [31:0] base, input bit gaps,
                      output bit passed, output int cycles);
    int i = 0, edges = 0;
    bit held = 0;
    @(negedge clk);
    load_mode = m; load_mask = msk; load_n_words = 24'(n); load_base = base;
    load_start = 1;
    @(negedge clk);
    load_start = 0;
    checks++;
    if (!busy) begin failures++; $display("load not accepted"); end
    while (!result_valid && edges < 100000) begin
      logic fire;
      pkg_valid = (i < pkg.size()) && (!gaps || held || $urandom % 4 != 0);
      pkg_data  = (i < pkg.size()) ? pkg[i] : 32'h0;
      mem_ready = !stall_mem || ($urandom % 3 != 0);
      #1 fire = pkg_valid && pkg_ready;
      held = pkg_valid && !pkg_ready;   // an offered word stays offered
      @(posedge clk); edges++;
      if (fire) i++;
      @(negedge clk);
    end
    // A load that never reaches a verdict is a failure; reset the engine so
    // that the remaining cases can still run.
    if (!result_valid) begin
      failures++;
      $display("load of %0d words timed out; resetting the engine", n);
      rst_n = 0;
      pkg_valid = 0;
      @(negedge clk);
      rst_n = 1;
      wait (key_ready);
      @(negedge clk);
    end
    pkg_valid = 0;
    mem_ready = 1;
    checks++;
    if (i != pkg.size()) begin failures++; $display("only %0d of %0d words taken", i, pkg.size()); end
    checks++;
    if (auth_pass === auth_fail || exec_enable !== auth_pass) failures++;
    passed = auth_pass;
    cycles = edges;
    @(negedge clk);
    checks++;
    if (busy) failures++;
  endtask

  function automatic int mem_mismatches(input logic [31:0] plain[$], input logic [31:0] base);
    int bad = 0;
    foreach (plain[w]) if (!mem.exists(base + 4*w) || mem[base + 4*w] !== plain[w]) bad++;
    return bad;
  endfunction

  task automatic expect_pass(input logic [31:0] plain[$], input enc_mode_e m, input logic [31:0] msk,
                             input int pct, input logic [31:0] key, input logic [31:0] base,
                             input bit gaps, output int cycles);
    logic [31:0] pkg[$];
    bit ok;
    if (m == ENC_PARTIAL_RVC) make_rvc_pkg(plain.size(), pct, msk, key, plain, pkg);
    else make_pkg(plain, m, msk, pct, key, 1, pkg);
    load(pkg, m, msk, plain.size(), base, gaps, ok, cycles);
    checks++;
    if (!ok) begin failures++; $display("expected pass (mode %0d, %0d words)", m, plain.size()); end
    else n_pass++;
    checks++;
    if (mem_mismatches(plain, base) != 0) begin
      failures++; $display("memory image wrong in %0d words", mem_mismatches(plain, base));
    end
    if (m == ENC_FULL && msk == '1) n_full++;
    if (m == ENC_PARTIAL) n_partial++;
    if (m == ENC_PARTIAL_RVC) n_rvc++;
    if (msk != '1) n_mask++;
    if (plain.size() > 13) n_multiblock++;
  endtask

  task automatic expect_fail(input logic [31:0] pkg[$], input enc_mode_e m, input int n,
                             output bit failed);
    bit ok;
    int cyc;
    load(pkg, m, '1, n, 32'h8000_0000, 1, ok, cyc);
    checks++;
    if (ok) begin failures++; $display("expected fail"); end
    failed = !ok;
  endtask

  function automatic void random_program(input int n, output logic [31:0] p[$]);
    p.delete();
    for (int i = 0; i < n; i++) p.push_back($urandom);
  endfunction

  initial begin
    logic [31:0] pbk, pbk_other, pbk_new, plain[$], pkg[$];
    int cyc;
    bit f;

    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (key_ready);
    pbk       = kmu_ref(puf_key_of(SEED_DEV), key_cfg);
    pbk_other = kmu_ref(puf_key_of(SEED_OTHER), key_cfg);
    $display("device PUF-based key %h, other chip %h", pbk, pbk_other);
    checks++;
    if (pbk === pbk_other) failures++;

    // 1. full encryption, no gaps: check the load time.
    //    32 words: 2 blocks of 16 + 1 + 65 + 1 cycles, padding block 15 + 1 + 65 + 1,
    //    then one edge for the verdict.
    random_program(32, plain);
    expect_pass(plain, ENC_FULL, '1, 0, pbk, 32'h8000_0000, 0, cyc);
    checks++;
    if (cyc != 2 * (16 + 67) + 15 + 67 + 1) begin failures++; $display("full 32-word load took %0d cycles", cyc); end
    $display("32-word full package verified in %0d cycles", cyc);

    // 2. full encryption with memory back-pressure and input gaps
    stall_mem = 1;
    random_program(77, plain);
    expect_pass(plain, ENC_FULL, '1, 0, pbk, 32'h8000_1000, 1, cyc);
    stall_mem = 0;

    // 3. partial encryption, about 10% and 50% of the words
    random_program(100, plain);
    expect_pass(plain, ENC_PARTIAL, '1, 10, pbk, 32'h8000_2000, 1, cyc);
    random_program(65, plain);
    expect_pass(plain, ENC_PARTIAL, '1, 50, pbk, 32'h8000_3000, 0, cyc);

    // 4. only selected instruction bits encrypted (rs1 and rd fields)
    random_program(40, plain);
    expect_pass(plain, ENC_FULL, 32'h000f_8f80, 0, pbk, 32'h8000_4000, 1, cyc);
    random_program(20, plain);
    expect_pass(plain, ENC_PARTIAL, 32'hfff0_0000, 50, pbk, 32'h8000_5000, 1, cyc);

    // 4b. compressed code: one map bit per 16-bit parcel, per instruction
    random_program(200, plain);
    expect_pass(plain, ENC_PARTIAL_RVC, '1, 50, pbk, 32'h8000_5800, 1, cyc);
    random_program(33, plain);
    expect_pass(plain, ENC_PARTIAL_RVC, 32'hfff0_fff0, 10, pbk, 32'h8000_5c00, 0, cyc);
    make_rvc_pkg(48, 50, '1, pbk, plain, pkg);
    pkg[20] ^= 32'h0000_0001;   // may move an instruction boundary: must fail
    expect_fail(pkg, ENC_PARTIAL_RVC, 48, f);
    if (f) n_fail_tamper++;

    // 5. one flipped bit in transit
    random_program(50, plain);
    make_pkg(plain, ENC_FULL, '1, 0, pbk, 1, pkg);
    pkg[17] ^= 32'h0000_0400;
    expect_fail(pkg, ENC_FULL, 50, f);
    if (f) n_fail_tamper++;
    // flipped bit in the signature
    make_pkg(plain, ENC_FULL, '1, 0, pbk, 1, pkg);
    pkg[pkg.size() - 3] ^= 32'h8000_0000;
    expect_fail(pkg, ENC_FULL, 50, f);
    if (f) n_fail_tamper++;

    // 6. package encrypted for another chip
    make_pkg(plain, ENC_FULL, '1, 0, pbk_other, 1, pkg);
    expect_fail(pkg, ENC_FULL, 50, f);
    if (f) n_fail_device++;

    // 7. unprotected program from an unknown source (plain program, plain hash)
    make_pkg(plain, ENC_FULL, '1, 0, pbk, 0, pkg);
    expect_fail(pkg, ENC_FULL, 50, f);
    if (f) n_fail_unsigned++;

    // 8. new key configuration: old packages stop working, new ones work
    @(negedge clk);
    key_cfg = 32'h0bad_cafe;
    repeat (2) @(negedge clk);
    pbk_new = kmu_ref(puf_key_of(SEED_DEV), key_cfg);
    make_pkg(plain, ENC_FULL, '1, 0, pbk, 1, pkg);
    expect_fail(pkg, ENC_FULL, 50, f);
    random_program(30, plain);
    expect_pass(plain, ENC_FULL, '1, 0, pbk_new, 32'h8000_6000, 1, cyc);
    if (f) n_rekey++;

    // 9. PUFs fired again: same key, packages still verify
    //    (the key management register adds one cycle to the PUF's valid)
    @(negedge clk); key_regen = 1; @(negedge clk); key_regen = 0;
    @(negedge clk);
    checks++;
    if (key_ready) failures++;
    wait (key_ready);
    random_program(16, plain);
    expect_pass(plain, ENC_PARTIAL, '1, 50, pbk_new, 32'h8000_7000, 1, cyc);
    n_regen++;

    // 10. random packages: size, mode, mask, share and memory stalls drawn at
    //     random; every third one has one bit flipped in transit
    for (int r = 0; r < 24; r++) begin
      enc_mode_e   m;
      logic [31:0] msk;
      int          n, flip;
      n    = 1 + $urandom % 300;
      m    = enc_mode_e'($urandom % 3);
      msk  = ($urandom % 2) ? 32'hffff_ffff : $urandom | 32'h1;
      stall_mem = $urandom % 2;
      random_program(n, plain);
      if (r % 3 == 2) begin
        if (m == ENC_PARTIAL_RVC) make_rvc_pkg(n, 30, msk, pbk_new, plain, pkg);
        else make_pkg(plain, m, msk, 30, pbk_new, 1, pkg);
        // flip a bit of a program or signature word (map words excluded: a
        // map bit of a word past the program end, or of the second half of
        // a 32-bit instruction, has no effect)
        do flip = $urandom % pkg.size();
        while (flip < pkg.size() - 8 &&
               ((m == ENC_PARTIAL && flip % 33 == 0) || (m == ENC_PARTIAL_RVC && flip % 17 == 0)));
        pkg[flip] ^= 32'h1 << ($urandom % 32);
        load(pkg, m, msk, n, 32'h9000_0000, 1, f, cyc);
        checks++;
        if (f) begin failures++; $display("random tampered package %0d passed", r); end
        if (!f) n_fail_tamper++;
      end else begin
        expect_pass(plain, m, msk, 30, pbk_new, 32'h9000_0000 + 32'(r) * 32'h1000, 1, cyc);
      end
      stall_mem = 0;
    end

    // 11. a 32 KiB program, fully encrypted
    random_program(8192, plain);
    expect_pass(plain, ENC_FULL, '1, 0, pbk_new, 32'h8001_0000, 0, cyc);
    $display("32 KiB program verified in %0d cycles (%0.2f ms at 25 MHz)", cyc, cyc * 40.0e-6);

    $display("mechanisms: full=%0d partial=%0d rvc=%0d bitmask=%0d multiblock=%0d mem_stall=%0d sha_stall=%0d pass=%0d",
             n_full, n_partial, n_rvc, n_mask, n_multiblock, n_mem_stall, n_sha_stall, n_pass);
    $display("            fail_tamper=%0d fail_other_chip=%0d fail_unprotected=%0d rekey=%0d regen=%0d",
             n_fail_tamper, n_fail_device, n_fail_unsigned, n_rekey, n_regen);
    checks++; if (n_full == 0) failures++;
    checks++; if (n_partial == 0) failures++;
    checks++; if (n_rvc == 0) failures++;
    checks++; if (n_mask == 0) failures++;
    checks++; if (n_multiblock == 0) failures++;
    checks++; if (n_mem_stall == 0) failures++;
    checks++; if (n_sha_stall == 0) failures++;
    checks++; if (n_pass == 0) failures++;
    checks++; if (n_fail_tamper == 0) failures++;
    checks++; if (n_fail_device == 0) failures++;
    checks++; if (n_fail_unsigned == 0) failures++;
    checks++; if (n_rekey == 0) failures++;
    checks++; if (n_regen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
