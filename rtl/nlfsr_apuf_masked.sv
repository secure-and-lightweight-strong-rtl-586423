// nlfsr_apuf_masked: Boolean-masked keyed-NLFSR challenge obfuscation with
// clock randomization around a strong PUF.
//
// The secret key arrives in two shares. Per request the controller
//   seeds the PRNG (CASR + LFSR, 19 bits) serially with raw PUF bits drawn
//   from an enrolled unstable challenge, enables the clock randomizer,
//   shifts one 56-bit PRNG number into both NLFSR shares, XORs the key
//   shares in (remasking the key), steps 128 times to misalign in time,
//   XORs the external challenge into share 1, steps 112 (warm-up) and 56
//   (flush) times, and then evaluates the PUF 7 times per response bit on
//   the unmasked state, with another 56-step flush per further bit.
// PRNG output logic (one new value per system clock), with the paper's
// 1-based labels "LFSR 3 ^ CASR 2", "LFSR 7 ^ CASR 4", "LFSR 5 ^ CASR 10"
// mapped to 0-based indices:
//   r_and27 = lfsr[2] ^ casr[1], r_and29 = lfsr[6] ^ casr[3],
//   r_key   = lfsr[4] ^ casr[9]  (random number that seeds the NLFSR).
//
// Interface as nlfsr_apuf, with key_s1/key_s2 instead of key. puf_chal is
// zero except while the PUF is being evaluated.
// Structure, PRNG taps and algorithm follow the paper; the seeding order
// (CASR first, its cell 11 feeding the LFSR), request handshake and PUF
// timing are this design's choices.
module nlfsr_apuf_masked
  import knl_pkg::*;
#(
  parameter int unsigned PUF_LAT = 2
) (
  input  logic       sys_clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] n_resp,
  input  chal_t      key_s1,
  input  chal_t      key_s2,
  input  chal_t      chal,
  input  chal_t      unst_chal,
  output logic       busy,
  output logic       done,
  output logic       resp_bit,
  output logic       resp_valid,
  output logic       core_clk,
  output chal_t      puf_chal,
  output logic       puf_trig,
  input  logic       puf_resp
);

  nl_op_e              nl_op;
  logic                seed_en, seed_shift, seed_bit, clkrnd_en, seed_tick;
  logic                rclk_rise, unmask_en, casr_out;
  logic [LFSR_W-1:0]   lfsr;
  logic [CASR_W-1:0]   casr;
  logic                r_and27, r_and29, r_key;

  assign seed_tick = seed_shift & rclk_rise;

  casr11 u_casr (
    .sys_clk, .rst_n,
    .seed_en   (seed_en),
    .seed_tick (seed_tick),
    .seed_in   (seed_bit),
    .seed_out  (casr_out),
    .c         (casr)
  );

  clock_randomizer u_clkrnd (
    .sys_clk, .rst_n,
    .en        (clkrnd_en),
    .seed_en   (seed_en),
    .seed_tick (seed_tick),
    .seed_in   (casr_out),
    .rand_clk  (core_clk),
    .rclk_rise (rclk_rise),
    .skip      (),
    .lfsr      (lfsr)
  );

  // PRNG output logic.
  always_comb begin
    r_and27 = lfsr[2] ^ casr[1];
    r_and29 = lfsr[6] ^ casr[3];
    r_key   = lfsr[4] ^ casr[9];
  end

  obf_ctrl #(.MASKED(1'b1), .PUF_LAT(PUF_LAT)) u_ctrl (
    .clk             (core_clk),
    .rst_n,
    .start, .n_resp, .busy, .done, .resp_bit, .resp_valid,
    .nl_op           (nl_op),
    .unmask_en       (unmask_en),
    .prng_seed_en    (seed_en),
    .prng_seed_shift (seed_shift),
    .prng_seed_bit   (seed_bit),
    .clkrnd_en       (clkrnd_en),
    .puf_trig, .puf_resp
  );

  masked_nlfsr56 u_mnlfsr (
    .clk       (core_clk),
    .rst_n,
    .op        (nl_op),
    .key_s1, .key_s2, .chal, .unst_chal,
    .seed_bit  (r_key),
    .r1        (r_and29),
    .r2        (r_and27),
    .unmask_en (unmask_en),
    .obf_chal  (puf_chal)
  );

  a_gated_unmask: assert property (@(posedge core_clk) disable iff (!rst_n)
    !unmask_en |-> (puf_chal == '0));

endmodule
