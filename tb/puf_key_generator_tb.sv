// puf_key_generator_tb: checks the PUF Key Generator.
//
// Two generators stand for two chips. After reset each must raise
// puf_key_valid after 2 + SETTLE_CYCLES clock edges with the key bit i equal
// to the model response of PUF i to challenge byte i. The two chips' keys
// must differ. A regen pulse must drop puf_key_valid and bring back the same
// key (the PUF key is a stable identity).
module puf_key_generator_tb;
  import sha256_ref_pkg::*;

  localparam logic [31:0]  SEED_A = 32'h5eed_0001;
  localparam logic [31:0]  SEED_B = 32'h5eed_0002;
  localparam logic [255:0] CH     = 256'h0011_2233_4455_6677_8899_aabb_ccdd_eeff_0123_4567_89ab_cdef_fedc_ba98_7654_3210;
  localparam int           SETTLE = 2;

  logic        clk = 0, rst_n = 0, regen = 0;
  logic [31:0] key_a, key_b;
  logic        valid_a, valid_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  puf_key_generator #(.DEVICE_SEED(SEED_A), .CHALLENGES(CH), .SETTLE_CYCLES(SETTLE)) u_a (
    .clk(clk), .rst_n(rst_n), .regen(regen), .puf_key(key_a), .puf_key_valid(valid_a));
  puf_key_generator #(.DEVICE_SEED(SEED_B), .CHALLENGES(CH), .SETTLE_CYCLES(SETTLE)) u_b (
    .clk(clk), .rst_n(rst_n), .regen(1'b0), .puf_key(key_b), .puf_key_valid(valid_b));

  function automatic logic [31:0] expected_key(logic [31:0] seed);
    logic [31:0] k;
    for (int i = 0; i < 32; i++)
      k[i] = arbiter_response(seed ^ (32'(i) * 32'h0100_0193), 8, 32'(CH[8*i +: 8]));
    return k;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    logic [31:0] first;
    repeat (2) @(negedge clk);
    checks++;
    if (valid_a !== 1'b0) failures++;
    rst_n = 1;
    n = 0;
    do begin @(posedge clk); #1 n++; end while (!valid_a && n < 100);
    checks++;
    if (n != 2 + SETTLE) begin failures++; $display("key valid after %0d edges", n); end
    checks++;
    if (key_a !== expected_key(SEED_A)) begin failures++; $display("key_a %h exp %h", key_a, expected_key(SEED_A)); end
    checks++;
    if (key_b !== expected_key(SEED_B)) begin failures++; $display("key_b %h exp %h", key_b, expected_key(SEED_B)); end
    checks++;
    if (key_a === key_b) failures++;
    $display("chip A key %h, chip B key %h", key_a, key_b);
    first = key_a;
    // regenerate
    @(negedge clk); regen = 1; @(negedge clk); regen = 0;
    checks++;
    if (valid_a !== 1'b0) failures++;
    n = 0;
    do begin @(posedge clk); #1 n++; end while (!valid_a && n < 100);
    checks++;
    if (n != 1 + SETTLE) begin failures++; $display("regen valid after %0d more edges", n); end
    checks++;
    if (key_a !== first) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
