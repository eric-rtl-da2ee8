// eric_workload_tb: the engine loading benchmark-sized programs in the three
// encryption configurations evaluated for the prototype: fully encrypted,
// about 10% of instructions encrypted and about 50% encrypted. A fourth run
// loads 64 KiB of compressed code (16- and 32-bit instructions) with about
// 50% of the instructions encrypted, one map bit per 16-bit parcel.
//
// The benchmark binaries themselves are not available here, so each run uses
// a synthetic program of PROG_WORDS random 32-bit words (64 KiB by default,
// the order of size of the small embedded benchmarks). For each
// configuration the testbench builds the package (independent SHA-256 and
// XOR cipher), loads it at the engine's default parameters, checks the
// verdict and every memory word, and prints the load time. The expected
// load time follows from the Signature Generator's 83 cycles per 16-word
// block: the encryption share does not change it, partial mode only adds the
// cycles of its map words, which arrive while the stream is otherwise
// stalled.
module eric_workload_tb;
  import eric_pkg::*;
  import sha256_ref_pkg::*;

  localparam int PROG_WORDS = 16384;
  localparam logic [31:0]  SEED_DEV = 32'h5eed_0001;
  localparam logic [255:0] CHALL    = {32{8'h5b}};
  localparam logic [31:0]  CFG      = 32'h0000_0001;

  logic        clk = 0, rst_n = 0;
  logic        key_ready, busy, pkg_ready, mem_we;
  logic        load_start = 0, pkg_valid = 0;
  enc_mode_e   load_mode = ENC_FULL;
  logic [31:0] pkg_data = 0, mem_addr, mem_wdata;
  logic        result_valid, auth_pass, auth_fail, exec_enable;
  int checks = 0, failures = 0;
  logic [31:0] mem [logic [31:0]];

  always #20 clk = ~clk;   // 25 MHz

  eric_hde dut (
    .clk(clk), .rst_n(rst_n), .key_regen(1'b0), .key_cfg(CFG), .key_ready(key_ready),
    .load_start(load_start), .load_mode(load_mode), .load_mask(32'hffff_ffff),
    .load_n_words(24'(PROG_WORDS)), .load_base(32'h8000_0000), .busy(busy),
    .pkg_valid(pkg_valid), .pkg_ready(pkg_ready), .pkg_data(pkg_data),
    .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata), .mem_ready(1'b1),
    .result_valid(result_valid), .auth_pass(auth_pass), .auth_fail(auth_fail),
    .exec_enable(exec_enable));

  always @(posedge clk) if (mem_we) mem[mem_addr] = mem_wdata;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] device_pbk();
    logic [31:0] k;
    for (int i = 0; i < 32; i++)
      k[i] = arbiter_response(SEED_DEV ^ (32'(i) * 32'h0100_0193), 8, 32'(CHALL[8*i +: 8]));
    return kmu_ref(k, CFG);
  endfunction

  initial begin
    logic [31:0] plain[$], pkg[$], map, key;
    logic [255:0] sig;
    int pct[4] = '{100, 10, 50, 50};
    int enc_words, cycles, bad, i;
    // Stream cycles: program blocks plus the padding block, then the verdict edge.
    int base_cycles = (PROG_WORDS / 16) * 83 + (15 + 1 + 65 + 1) + 1;

    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (key_ready);
    key = device_pbk();
    for (int w = 0; w < PROG_WORDS; w++) plain.push_back($urandom);
    sig = sha256_bytes_le(plain);

    foreach (pct[c]) begin
      pkg.delete();
      enc_words = 0;
      load_mode = (pct[c] == 100) ? ENC_FULL : (c == 3) ? ENC_PARTIAL_RVC : ENC_PARTIAL;
      if (load_mode == ENC_PARTIAL_RVC) begin
        plain.delete();
        rvc_package(key, PROG_WORDS, pct[c], plain, pkg);
        sig = sha256_bytes_le(plain);
        enc_words = -1;
      end else foreach (plain[w]) begin
        if (load_mode == ENC_PARTIAL && w % 32 == 0) begin
          for (int b = 0; b < 32; b++) map[b] = ($urandom % 100) < pct[c];
          pkg.push_back(map);
        end
        if (load_mode == ENC_FULL || map[w % 32]) begin
          pkg.push_back(plain[w] ^ key); enc_words++;
        end else pkg.push_back(plain[w]);
      end
      for (int s = 0; s < 8; s++) pkg.push_back(sig[255 - 32*s -: 32] ^ key);
      mem.delete();

      @(negedge clk); load_start = 1; @(negedge clk); load_start = 0;
      i = 0; cycles = 0;
      while (!result_valid && cycles < 1000000) begin
        logic fire;
        pkg_valid = i < pkg.size();
        pkg_data  = (i < pkg.size()) ? pkg[i] : 32'h0;
        #1 fire = pkg_valid && pkg_ready;
        @(posedge clk); cycles++;
        if (fire) i++;
        @(negedge clk);
      end
      pkg_valid = 0;
      bad = 0;
      foreach (plain[w]) if (!mem.exists(32'h8000_0000 + 4*w) || mem[32'h8000_0000 + 4*w] !== plain[w]) bad++;
      checks++;
      if (!auth_pass || !exec_enable) begin failures++; $display("%0d%%: not authorised", pct[c]); end
      checks++;
      if (bad != 0) begin failures++; $display("%0d%%: %0d memory words wrong", pct[c], bad); end
      // Map words are taken while the stream is free: each map group starts
      // with one extra cycle, except where it falls in a stall.
      checks++;
      if (cycles < base_cycles || cycles > base_cycles + PROG_WORDS / 16) begin
        failures++; $display("%0d%%: %0d cycles, expected %0d..%0d", pct[c], cycles, base_cycles, base_cycles + PROG_WORDS / 16);
      end
      if (enc_words < 0)
        $display("config %0d%% encrypted, compressed code: package %0d words, verified in %0d cycles (%0.3f ms at 25 MHz)",
                 pct[c], pkg.size(), cycles, cycles * 40.0e-6);
      else
        $display("config %0d%% encrypted: %0d of %0d words encrypted, package %0d words, verified in %0d cycles (%0.3f ms at 25 MHz)",
                 pct[c], enc_words, PROG_WORDS, pkg.size(), cycles, cycles * 40.0e-6);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
