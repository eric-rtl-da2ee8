// key_management_unit: the Key Management Unit (KMU) of the HDE.
//
// The KMU never hands out the PUF key itself. It passes the PUF key through a
// key-generation function and supplies the result, the PUF-based key, to the
// Decryption and Validation Units. A configuration word `key_cfg` enters the
// function, so the owner of the device can move to a new PUF-based key (and
// so to a new set of trusted software sources) without touching the PUF.
// The compiler side holds the same function and the PUF-based key.
//
// Function (this design's choice; the paper names a secure hash only as an
// example): pbk = kmu_mix(puf_key ^ key_cfg), see eric_pkg.
//
// Timing: one register stage. `pbk` and `pbk_valid` follow `puf_key`,
// `puf_key_valid` and `key_cfg` one clock later.
module key_management_unit
  import eric_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  key_t puf_key,
  input  logic puf_key_valid,
  input  key_t key_cfg,
  output key_t pbk,
  output logic pbk_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pbk       <= '0;
      pbk_valid <= 1'b0;
    end else begin
      pbk       <= kmu_mix(puf_key ^ key_cfg);
      pbk_valid <= puf_key_valid;
    end
  end

endmodule
