// arbiter_puf: behavioural model of one arbiter PUF (not synthesizable logic:
// a real arbiter PUF is a hand-placed delay race whose outcome comes from
// manufacturing variation).
//
// Structure: a rising edge on `enable` enters two nominally identical paths.
// Each of the STAGES switch stages holds two 2:1 multiplexers selected by one
// challenge bit. An arbiter flip-flop takes the top path on D and the bottom
// path on its clock: the response is 1 when the top path arrives first.
// This follows the 5-stage scheme of the arbiter PUF figure; the prototype
// uses 8-bit challenges, so STAGES defaults to 8.
//
// Model: every multiplexer input has its own delay, a fixed nominal delay
// plus a pseudo-random offset derived from SEED, stage, multiplexer and
// selected input. SEED stands for one piece of silicon: two instances with
// different SEEDs behave like two chips. The race is resolved arithmetically
// at the rising edge of `enable` (zero simulation time): the arrival times
// of both paths are summed over the stages and compared.
// Switch wiring (this model's choice): challenge bit 0 passes both paths
// straight through a stage, challenge bit 1 crosses them.
//
// Interface: challenge must be stable when enable rises; response is
// updated at the rising edge of enable and held until the next one.
module arbiter_puf #(
  parameter int unsigned STAGES = 8,
  parameter logic [31:0] SEED   = 32'h0000_0001
) (
  input  logic              enable,
  input  logic [STAGES-1:0] challenge,
  output logic              response
);

  localparam int unsigned NOMINAL_PS = 1000;  // nominal multiplexer delay
  localparam int unsigned SPREAD_PS  = 64;    // spread of the process variation

  // Delay of one multiplexer input, in ps. mux 0 = top, mux 1 = bottom.
  function automatic int unsigned mux_delay(int unsigned stage, int unsigned mux,
                                            int unsigned sel);
    logic [31:0] h;
    h = SEED ^ (32'(stage) * 32'h9e37_79b9) ^ (32'(mux) << 20) ^ (32'(sel) << 24);
    h = eric_pkg::kmu_mix(h);
    return NOMINAL_PS + int'(h % SPREAD_PS);
  endfunction

  function automatic logic race(logic [STAGES-1:0] c);
    int unsigned t_top, t_bot, n_top, n_bot;
    t_top = 0;
    t_bot = 0;
    for (int unsigned i = 0; i < STAGES; i++) begin
      if (c[i]) begin
        n_top = t_bot + mux_delay(i, 0, 1);
        n_bot = t_top + mux_delay(i, 1, 1);
      end else begin
        n_top = t_top + mux_delay(i, 0, 0);
        n_bot = t_bot + mux_delay(i, 1, 0);
      end
      t_top = n_top;
      t_bot = n_bot;
    end
    // Arbiter: D (top) must settle before the clock edge (bottom).
    return (t_top < t_bot);
  endfunction

  always @(posedge enable) begin
    response <= race(challenge);
  end

endmodule
