// knl_pkg: shared types, constants and feedback functions of the keyed
// NLFSR challenge obfuscation.
//
// The 56-bit obfuscation state is the concatenation of two maximum-length
// NLFSRs, 29 and 27 bits wide. Both shift towards bit 0; the feedback bit
// enters at the top bit. Each feedback is XORed with bit 0 of the other
// register, which couples the two states.
//   29-bit feedback: s[0]^s[3]^s[5]^s[6]^s[11]^s[12]^s[16]^s[19]^s[22]^s[23]
//                    ^s[27] ^ (s[28] & s[20])
//   27-bit feedback: s[0]^s[1]^s[2]^s[4]^s[8]^s[10]^s[11]^s[14]^s[17]^s[19]
//                    ^s[21] ^ (s[10] & s[6])
// Tap positions, the single AND of each register and the cross coupling
// follow the paper's NLFSR drawing; with these taps each register alone has
// period 2^n-1. The packing of the 56-bit state, {s29, s27} with the 29-bit
// register in bits 55:27, is this design's choice.
//
// Cycle counts (112 warm-up, 56 flush, 128 misalignment) and the 7 repeated
// PUF evaluations per response bit are the paper's numbers.
package knl_pkg;

  localparam int unsigned CHAL_W = 56;
  localparam int unsigned N29    = 29;
  localparam int unsigned N27    = 27;

  localparam int unsigned WARMUP_CYC   = 112;
  localparam int unsigned FLUSH_CYC    = 56;
  localparam int unsigned MISALIGN_CYC = 128;
  localparam int unsigned N_EVAL       = 7;

  localparam int unsigned LFSR_W = 8;
  localparam int unsigned CASR_W = 11;

  typedef logic [CHAL_W-1:0] chal_t;

  // Operation applied to the NLFSR register on a core clock edge.
  typedef enum logic [2:0] {
    NL_HOLD        = 3'd0, // keep the state
    NL_STEP        = 3'd1, // one NLFSR step
    NL_LOAD_UNST   = 3'd2, // load the enrolled unstable challenge (PRNG seeding)
    NL_SEED        = 3'd3, // shift one random bit in from the top (masked only)
    NL_KEY_MIX     = 3'd4, // XOR key shares into the state (masked only)
    NL_CHAL_MIX    = 3'd5  // unmasked: load key^challenge; masked: XOR challenge
  } nl_op_e;

  // Linear part of the 29-bit feedback (without the AND term).
  function automatic logic lin29(input logic [N29-1:0] s);
    return s[0] ^ s[3] ^ s[5] ^ s[6] ^ s[11] ^ s[12] ^ s[16] ^ s[19]
         ^ s[22] ^ s[23] ^ s[27];
  endfunction

  // Linear part of the 27-bit feedback (without the AND term).
  function automatic logic lin27(input logic [N27-1:0] s);
    return s[0] ^ s[1] ^ s[2] ^ s[4] ^ s[8] ^ s[10] ^ s[11] ^ s[14]
         ^ s[17] ^ s[19] ^ s[21];
  endfunction

  // One step of the coupled, unmasked 56-bit NLFSR.
  function automatic chal_t nlfsr_step(input chal_t st);
    logic [N29-1:0] a;
    logic [N27-1:0] b;
    logic fa, fb;
    a  = st[CHAL_W-1:N27];
    b  = st[N27-1:0];
    fa = lin29(a) ^ (a[28] & a[20]) ^ b[0];
    fb = lin27(b) ^ (b[10] & b[6])  ^ a[0];
    return {fa, a[N29-1:1], fb, b[N27-1:1]};
  endfunction

endpackage
