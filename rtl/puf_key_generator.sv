// puf_key_generator: the PUF Key Generator (PKG) of the HDE.
//
// It owns NUM_PUFS arbiter PUFs of STAGES stages each (the prototype: 32 PUFs
// with an 8-bit challenge and a 1-bit response, giving a 32-bit PUF key).
// PUF i receives challenge bits CHALLENGES[8*i +: 8] and supplies bit i of the
// key. DEVICE_SEED selects the simulated piece of silicon; PUF i is modelled
// with seed DEVICE_SEED ^ (i * 0x01000193).
//
// Sequence (this design's choice; the paper gives only the function): after
// reset, or on a `regen` pulse, the generator drives the shared enable low
// for one cycle, raises it, waits SETTLE_CYCLES cycles for the race to
// resolve and then captures all responses into `puf_key` and raises
// `puf_key_valid`. The key is valid after 2 + SETTLE_CYCLES rising clock
// edges once reset is released. A `regen` pulse (sampled once the key is
// valid) clears `puf_key_valid` for 1 + SETTLE_CYCLES edges while the
// PUFs are fired again.
module puf_key_generator #(
  parameter int unsigned             NUM_PUFS      = 32,
  parameter int unsigned             STAGES        = 8,
  parameter logic [31:0]             DEVICE_SEED   = 32'h5eed_0001,
  parameter logic [NUM_PUFS*STAGES-1:0] CHALLENGES = {(NUM_PUFS*STAGES/8){8'h5b}},
  parameter int unsigned             SETTLE_CYCLES = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                regen,
  output logic [NUM_PUFS-1:0] puf_key,
  output logic                puf_key_valid
);

  typedef enum logic [1:0] {S_ARM, S_FIRE, S_WAIT, S_DONE} state_e;

  state_e              state;
  logic                enable;
  logic [NUM_PUFS-1:0] responses;
  logic [7:0]          settle_cnt;

  for (genvar i = 0; i < NUM_PUFS; i++) begin : g_puf
    arbiter_puf #(
      .STAGES(STAGES),
      .SEED  (DEVICE_SEED ^ (32'(i) * 32'h0100_0193))
    ) u_puf (
      .enable   (enable),
      .challenge(CHALLENGES[i*STAGES +: STAGES]),
      .response (responses[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_ARM;
      enable        <= 1'b0;
      settle_cnt    <= '0;
      puf_key       <= '0;
      puf_key_valid <= 1'b0;
    end else begin
      case (state)
        S_ARM: begin
          enable <= 1'b0;
          state  <= S_FIRE;
        end
        S_FIRE: begin
          enable     <= 1'b1;
          settle_cnt <= '0;
          state      <= S_WAIT;
        end
        S_WAIT: begin
          if (settle_cnt == 8'(SETTLE_CYCLES - 1)) begin
            puf_key       <= responses;
            puf_key_valid <= 1'b1;
            state         <= S_DONE;
          end else begin
            settle_cnt <= settle_cnt + 8'd1;
          end
        end
        default: begin  // S_DONE
          if (regen) begin
            puf_key_valid <= 1'b0;
            enable        <= 1'b0;
            state         <= S_FIRE;
          end
        end
      endcase
    end
  end

endmodule
