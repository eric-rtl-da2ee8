// eric_pkg: types, constants and pure functions shared by the blocks of the
// Hardware Decryption Engine (HDE).
//
// The engine works on 32-bit words (RISC-V instruction words as they sit in
// little-endian memory), a 32-bit key and a 256-bit SHA-256 signature that
// travels as eight 32-bit words. Following the prototype, the cipher is an
// XOR cipher, the signature function is SHA-256 and the key is 32 bits wide,
// generated by 32 arbiter PUFs with 8-bit challenges.
//
// kmu_mix() is the key-derivation function of the Key Management Unit. The
// function itself is this design's choice (a 32-bit integer mixing function,
// the finaliser of MurmurHash3); only its role is fixed.
package eric_pkg;

  localparam int unsigned WORD_W     = 32;             // program word
  localparam int unsigned KEY_W      = 32;             // PUF key and PUF-based key
  localparam int unsigned SIG_W      = 256;            // SHA-256 digest
  localparam int unsigned SIG_WORDS  = SIG_W / WORD_W; // 8 signature words
  localparam int unsigned MAP_GROUP     = 32;          // words per map word, ENC_PARTIAL
  localparam int unsigned MAP_GROUP_RVC = 16;          // words per map word, ENC_PARTIAL_RVC

  typedef logic [WORD_W-1:0]           word_t;
  typedef logic [KEY_W-1:0]            key_t;
  typedef logic [SIG_WORDS-1:0][31:0]  sig_t;          // [7] = H0 ... [0] = H7

  // How the program part of a package was encrypted.
  //   ENC_FULL        : every program word is encrypted.
  //   ENC_PARTIAL     : one map word precedes each group of 32 program words;
  //                     map bit i set means word i of the group is encrypted.
  //   ENC_PARTIAL_RVC : for code with 16-bit compressed instructions. One map
  //                     word precedes each group of 16 program words, with two
  //                     bits per word, one per 16-bit parcel (bit 2i: low
  //                     parcel of word i, bit 2i+1: high parcel). The bit of
  //                     the parcel where an instruction starts says whether
  //                     the whole instruction is encrypted.
  // In all modes only the bits set in the target-bit mask are encrypted,
  // so a mask of all ones encrypts whole words. The key is aligned to the
  // word: the low parcel of a word uses key bits 15:0, the high parcel key
  // bits 31:16.
  typedef enum logic [1:0] {
    ENC_FULL        = 2'd0,
    ENC_PARTIAL     = 2'd1,
    ENC_PARTIAL_RVC = 2'd2
  } enc_mode_e;

  function automatic word_t bswap32(word_t w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

  // Key Management Unit function: 32-bit avalanche mix.
  function automatic key_t kmu_mix(key_t x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h85eb_ca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2_ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // SHA-256 initial hash value, H0 in the top word.
  localparam logic [255:0] SHA256_IV = {
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19
  };

  // SHA-256 round constants (FIPS 180-4, 4.2.2).
  function automatic logic [31:0] sha256_k(logic [5:0] t);
    case (t)
      6'd0 : return 32'h428a2f98;  6'd1 : return 32'h71374491;
      6'd2 : return 32'hb5c0fbcf;  6'd3 : return 32'he9b5dba5;
      6'd4 : return 32'h3956c25b;  6'd5 : return 32'h59f111f1;
      6'd6 : return 32'h923f82a4;  6'd7 : return 32'hab1c5ed5;
      6'd8 : return 32'hd807aa98;  6'd9 : return 32'h12835b01;
      6'd10: return 32'h243185be;  6'd11: return 32'h550c7dc3;
      6'd12: return 32'h72be5d74;  6'd13: return 32'h80deb1fe;
      6'd14: return 32'h9bdc06a7;  6'd15: return 32'hc19bf174;
      6'd16: return 32'he49b69c1;  6'd17: return 32'hefbe4786;
      6'd18: return 32'h0fc19dc6;  6'd19: return 32'h240ca1cc;
      6'd20: return 32'h2de92c6f;  6'd21: return 32'h4a7484aa;
      6'd22: return 32'h5cb0a9dc;  6'd23: return 32'h76f988da;
      6'd24: return 32'h983e5152;  6'd25: return 32'ha831c66d;
      6'd26: return 32'hb00327c8;  6'd27: return 32'hbf597fc7;
      6'd28: return 32'hc6e00bf3;  6'd29: return 32'hd5a79147;
      6'd30: return 32'h06ca6351;  6'd31: return 32'h14292967;
      6'd32: return 32'h27b70a85;  6'd33: return 32'h2e1b2138;
      6'd34: return 32'h4d2c6dfc;  6'd35: return 32'h53380d13;
      6'd36: return 32'h650a7354;  6'd37: return 32'h766a0abb;
      6'd38: return 32'h81c2c92e;  6'd39: return 32'h92722c85;
      6'd40: return 32'ha2bfe8a1;  6'd41: return 32'ha81a664b;
      6'd42: return 32'hc24b8b70;  6'd43: return 32'hc76c51a3;
      6'd44: return 32'hd192e819;  6'd45: return 32'hd6990624;
      6'd46: return 32'hf40e3585;  6'd47: return 32'h106aa070;
      6'd48: return 32'h19a4c116;  6'd49: return 32'h1e376c08;
      6'd50: return 32'h2748774c;  6'd51: return 32'h34b0bcb5;
      6'd52: return 32'h391c0cb3;  6'd53: return 32'h4ed8aa4a;
      6'd54: return 32'h5b9cca4f;  6'd55: return 32'h682e6ff3;
      6'd56: return 32'h748f82ee;  6'd57: return 32'h78a5636f;
      6'd58: return 32'h84c87814;  6'd59: return 32'h8cc70208;
      6'd60: return 32'h90befffa;  6'd61: return 32'ha4506ceb;
      6'd62: return 32'hbef9a3f7;  default: return 32'hc67178f2;
    endcase
  endfunction

endpackage
