// masked_nlfsr56: two-share (Boolean-masked) keyed NLFSR.
//
// Every state bit is held in two shares, s1 and s2, whose XOR is the value of
// the unmasked NLFSR (nlfsr56). XORs and shifts act on each share alone; the
// two AND terms are replaced by masked_and gates remasked with r1 (29-bit
// register) and r2 (27-bit register). The shares are never combined except
// at the output, where both shares are ANDed with unmask_en before the XOR,
// so the unmasking XOR does not toggle while unmask_en is low (warm-up).
//
// Operations (one per rising clk edge):
//   NL_SEED      both shares shift towards bit 0, seed_bit enters at bit 55
//                of both shares (serial seeding with one random number)
//   NL_KEY_MIX   s1 ^= key_s1, s2 ^= key_s2 (key remasking)
//   NL_CHAL_MIX  s1 ^= chal (the challenge's second share is zero)
//   NL_STEP      one masked NLFSR step
//   NL_LOAD_UNST s1 = unst_chal, s2 = 0 (PRNG seeding with the PUF)
//   NL_HOLD      keep
// Masked datapath, masked AND, remask sources and output gating follow the
// paper. Serial seeding through the top bit of the 56-bit concatenation and
// the unstable-challenge load are this design's choices.
module masked_nlfsr56
  import knl_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  nl_op_e op,
  input  chal_t  key_s1,     // key share 1
  input  chal_t  key_s2,     // key share 2
  input  chal_t  chal,       // external challenge (first share)
  input  chal_t  unst_chal,  // enrolled unstable challenge
  input  logic   seed_bit,   // PRNG bit for serial seeding
  input  logic   r1,         // remask bit, 29-bit register AND
  input  logic   r2,         // remask bit, 27-bit register AND
  input  logic   unmask_en,  // ungate the share-combining XOR
  output chal_t  obf_chal    // unmasked obfuscated challenge (0 when gated)
);

  chal_t s1, s2;

  // Share views of the two registers.
  logic [N29-1:0] a1, a2;
  logic [N27-1:0] b1, b2;
  logic za1, za2, zb1, zb2;
  logic fa1, fa2, fb1, fb2;

  assign a1 = s1[CHAL_W-1:N27];
  assign a2 = s2[CHAL_W-1:N27];
  assign b1 = s1[N27-1:0];
  assign b2 = s2[N27-1:0];

  // 29-bit register: x = bit 28, y = bit 20.
  masked_and u_and29 (
    .x1(a1[28]), .x2(a2[28]), .y1(a1[20]), .y2(a2[20]), .r(r1),
    .z1(za1), .z2(za2)
  );

  // 27-bit register: x = bit 10, y = bit 6.
  masked_and u_and27 (
    .x1(b1[10]), .x2(b2[10]), .y1(b1[6]), .y2(b2[6]), .r(r2),
    .z1(zb1), .z2(zb2)
  );

  always_comb begin
    fa1 = lin29(a1) ^ za1 ^ b1[0];
    fa2 = lin29(a2) ^ za2 ^ b2[0];
    fb1 = lin27(b1) ^ zb1 ^ a1[0];
    fb2 = lin27(b2) ^ zb2 ^ a2[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
    end else begin
      unique case (op)
        NL_STEP: begin
          s1 <= {fa1, a1[N29-1:1], fb1, b1[N27-1:1]};
          s2 <= {fa2, a2[N29-1:1], fb2, b2[N27-1:1]};
        end
        NL_SEED: begin
          s1 <= {seed_bit, s1[CHAL_W-1:1]};
          s2 <= {seed_bit, s2[CHAL_W-1:1]};
        end
        NL_KEY_MIX: begin
          s1 <= s1 ^ key_s1;
          s2 <= s2 ^ key_s2;
        end
        NL_CHAL_MIX: s1 <= s1 ^ chal;
        NL_LOAD_UNST: begin
          s1 <= unst_chal;
          s2 <= '0;
        end
        default: ;
      endcase
    end
  end

  // Gated unmasking: both XOR inputs are forced low unless enabled.
  always_comb obf_chal = (s1 & {CHAL_W{unmask_en}}) ^ (s2 & {CHAL_W{unmask_en}});

endmodule
