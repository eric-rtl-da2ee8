// sha256_core: SHA-256 compression function, one round per clock.
//
// Helper of the Signature Generator. It compresses one 512-bit message block
// into a 256-bit chaining value as defined in FIPS 180-4: 64 rounds, each
// using one word of a 16-word sliding message-schedule window, followed by
// the addition of the incoming chaining value.
//
// Interface: pulse `start` (while `busy` is low) with `block` (W0 in bits
// 511:480) and `h_in` (H0 in bits 255:224). `busy` is high for 65 cycles;
// in the last of them the result is written to `h_out` and `done` pulses
// one cycle later, i.e. `done` is high 65 clock edges after the start edge.
module sha256_core
  import eric_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  input  logic [255:0] h_in,
  output logic         busy,
  output logic         done,
  output logic [255:0] h_out
);

  function automatic logic [31:0] rotr(logic [31:0] x, int unsigned n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0]  w [16];
  logic [31:0]  a, b, c, d, e, f, g, h;
  logic [255:0] h_in_q;
  logic [5:0]   t;
  logic         fin;

  logic [31:0] big_s0, big_s1, ch, maj, t1, t2, w_next;

  always_comb begin
    big_s1 = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    ch     = (e & f) ^ (~e & g);
    t1     = h + big_s1 + ch + sha256_k(t) + w[0];
    big_s0 = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    maj    = (a & b) ^ (a & c) ^ (b & c);
    t2     = big_s0 + maj;
    w_next = (rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10)) + w[9]
           + (rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3)) + w[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      fin    <= 1'b0;
      t      <= '0;
      h_out  <= '0;
      h_in_q <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          fin    <= 1'b0;
          t      <= '0;
          h_in_q <= h_in;
          {a, b, c, d, e, f, g, h} <= h_in;
          for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
        end
      end else if (!fin) begin
        h <= g;
        g <= f;
        f <= e;
        e <= d + t1;
        d <= c;
        c <= b;
        b <= a;
        a <= t1 + t2;
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= w_next;
        t     <= t + 6'd1;
        if (t == 6'd63) fin <= 1'b1;
      end else begin
        h_out <= { h_in_q[255:224] + a, h_in_q[223:192] + b,
                   h_in_q[191:160] + c, h_in_q[159:128] + d,
                   h_in_q[127:96]  + e, h_in_q[95:64]   + f,
                   h_in_q[63:32]   + g, h_in_q[31:0]    + h };
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
