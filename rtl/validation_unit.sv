// validation_unit: the Validation Unit of the HDE.
//
// It receives the signature that came with the program, still encrypted,
// decrypts it with the PUF-based key (XOR cipher, like the program), and
// compares it with the signature the Signature Generator recomputed from the
// decrypted program. On a match the program is authorised for execution.
// A mismatch means the package was changed in transit (tampering or bit
// flips) or was encrypted for another device or key.
//
// Interface: `init` clears the unit for a new package. Signature words arrive
// as strobes `sig_valid`/`sig_data`/`sig_idx` (index 0 = H0) in any order.
// Once all eight words are in and `digest_valid` is high, the comparison is
// made in one cycle: `result_valid` rises together with exactly one of
// `pass` and `fail`, and all three hold until the next `init`.
// `exec_enable` is the authorisation given to the processor side; it equals
// `pass`.
module validation_unit
  import eric_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  key_t         key,
  input  logic         sig_valid,
  input  word_t        sig_data,
  input  logic [2:0]   sig_idx,
  input  logic [255:0] digest,
  input  logic         digest_valid,
  output logic         result_valid,
  output logic         pass,
  output logic         fail,
  output logic         exec_enable
);

  sig_t       sig_q;    // decrypted shipped signature, [7] = H0
  logic [7:0] sig_have;

  assign exec_enable = pass;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig_q        <= '0;
      sig_have     <= '0;
      result_valid <= 1'b0;
      pass         <= 1'b0;
      fail         <= 1'b0;
    end else if (init) begin
      sig_have     <= '0;
      result_valid <= 1'b0;
      pass         <= 1'b0;
      fail         <= 1'b0;
    end else begin
      if (sig_valid && !result_valid) begin
        sig_q[3'd7 - sig_idx]    <= sig_data ^ key;
        sig_have[3'd7 - sig_idx] <= 1'b1;
      end
      if (!result_valid && (&sig_have) && digest_valid) begin
        result_valid <= 1'b1;
        pass         <= (sig_q == digest);
        fail         <= (sig_q != digest);
      end
    end
  end

endmodule
