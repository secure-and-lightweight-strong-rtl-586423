// nlfsr_apuf: unmasked keyed-NLFSR challenge obfuscation around a strong PUF.
//
// The external challenge is XORed with the secret key and loaded into the
// 56-bit NLFSR, which is stepped 112 times (warm-up) and 56 more times
// (flush) before its state is applied to the arbiter PUF as the obfuscated
// challenge. Each response bit is the majority of 7 PUF evaluations; later
// bits each take another 56-step flush. The core (controller and NLFSR)
// runs on the randomized clock of clock_randomizer, whose LFSR is first
// seeded with 8 raw PUF bits drawn from an enrolled unstable challenge.
//
// Interface: sys_clk/rst_n (asynchronous, active low); request start/n_resp
// with busy/done; resp_bit qualified by resp_valid. These outputs, like the
// PUF port (puf_chal, puf_trig, puf_resp), belong to core_clk, which is
// brought out for the PUF and the host. The key and challenges must be held
// stable while busy.
// The datapath and algorithm follow the paper's unmasked implementation,
// which also carries a clock randomizer. Seeding that randomizer from the PUF
// without a CASR is this design's choice.
module nlfsr_apuf
  import knl_pkg::*;
#(
  parameter int unsigned PUF_LAT = 2
) (
  input  logic       sys_clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] n_resp,
  input  chal_t      key,
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
  logic                seed_en, seed_shift, seed_bit, clkrnd_en;
  logic                rclk_rise;

  clock_randomizer u_clkrnd (
    .sys_clk, .rst_n,
    .en        (clkrnd_en),
    .seed_en   (seed_en),
    .seed_tick (seed_shift & rclk_rise),
    .seed_in   (seed_bit),
    .rand_clk  (core_clk),
    .rclk_rise (rclk_rise),
    .skip      (),
    .lfsr      ()
  );

  obf_ctrl #(.MASKED(1'b0), .PUF_LAT(PUF_LAT)) u_ctrl (
    .clk             (core_clk),
    .rst_n,
    .start, .n_resp, .busy, .done, .resp_bit, .resp_valid,
    .nl_op           (nl_op),
    .unmask_en       (),  // no shares to combine in this variant
    .prng_seed_en    (seed_en),
    .prng_seed_shift (seed_shift),
    .prng_seed_bit   (seed_bit),
    .clkrnd_en       (clkrnd_en),
    .puf_trig, .puf_resp
  );

  nlfsr56 u_nlfsr (
    .clk       (core_clk),
    .rst_n,
    .op        (nl_op),
    .key, .chal, .unst_chal,
    .state     (puf_chal)
  );

endmodule
