// arbiter_puf_tb: checks the arbiter PUF model.
//
// For all 256 challenges of an 8-stage PUF the response after a rising
// enable is compared with the delay model restated in sha256_ref_pkg. It
// also checks that the response repeats for the same challenge (stable
// identity), that it holds while enable stays high, that it is not constant
// over challenges, and that a second instance (another chip) disagrees on a
// reasonable share of challenges.
module arbiter_puf_tb;
  import sha256_ref_pkg::*;

  localparam logic [31:0] SEED_A = 32'h1234_5678;
  localparam logic [31:0] SEED_B = 32'h9abc_def0;

  logic       enable = 0;
  logic [7:0] challenge = 0;
  logic       resp_a, resp_b;
  int checks = 0, failures = 0;

  arbiter_puf #(.STAGES(8), .SEED(SEED_A)) u_a (.enable(enable), .challenge(challenge), .response(resp_a));
  arbiter_puf #(.STAGES(8), .SEED(SEED_B)) u_b (.enable(enable), .challenge(challenge), .response(resp_b));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones = 0, differ = 0;
    logic first[256];
    for (int c = 0; c < 256; c++) begin
      challenge = 8'(c);
      #5 enable = 1;
      #5;
      checks++;
      if (resp_a !== arbiter_response(SEED_A, 8, 32'(c))) begin
        failures++; $display("challenge %0d: response %0b", c, resp_a);
      end
      checks++;
      if (resp_b !== arbiter_response(SEED_B, 8, 32'(c))) failures++;
      first[c] = resp_a;
      ones += resp_a;
      differ += (resp_a != resp_b);
      // changing the challenge while enable stays high does not change it
      challenge = ~challenge;
      #5;
      checks++;
      if (resp_a !== first[c]) failures++;
      enable = 0;
    end
    // Second pass: same responses again.
    for (int c = 0; c < 256; c++) begin
      challenge = 8'(c);
      #5 enable = 1;
      #5;
      checks++;
      if (resp_a !== first[c]) failures++;
      enable = 0;
    end
    checks++;
    if (ones < 16 || ones > 240) begin failures++; $display("ones %0d", ones); end
    checks++;
    if (differ < 16) begin failures++; $display("differ %0d", differ); end
    $display("ones=%0d of 256, differing from second chip=%0d", ones, differ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
