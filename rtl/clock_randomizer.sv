// clock_randomizer: conditional clock divider driven by an 8-bit LFSR.
//
// A maximum-length 8-bit Fibonacci LFSR (feedback s[6]^s[5]^s[1]^s[0],
// entering at bit 7, period 255) advances on every system clock edge. Its
// bit 0 is the skip signal. A toggle flip-flop produces rand_clk: on each
// system clock edge it inverts unless skip is high, in which case it holds.
// rand_clk is therefore sys_clk/2 with randomly stretched phases, and its
// pattern repeats every 255 system cycles (510 once the toggle phase is
// counted). While en is low the skip signal is ignored and rand_clk is a
// plain sys_clk/2.
//
// rclk_rise is high in the system cycle whose closing edge raises rand_clk.
// The LFSR is seeded serially: while seed_en is high it does not step; on an
// edge with seed_tick high it shifts seed_in in at bit 7. The owner of the
// PRNG drives seed_tick as (seed strobe & rclk_rise), so that one bit is
// taken per rand_clk cycle in which the core logic asks for a shift.
//
// LFSR taps, skip from bit 0 and the toggle flop with a skip-controlled mux
// follow the paper's clock randomizer drawing. The enable gating, reset
// values (LFSR 8'h01, rand_clk low) and the seeding qualifier are this
// design's choices.
module clock_randomizer
  import knl_pkg::*;
(
  input  logic              sys_clk,
  input  logic              rst_n,
  input  logic              en,        // enable random skipping
  input  logic              seed_en,   // serial seeding in progress
  input  logic              seed_tick, // shift one seed bit in
  input  logic              seed_in,   // serial seed bit
  output logic              rand_clk,  // randomized clock
  output logic              rclk_rise, // next sys_clk edge raises rand_clk
  output logic              skip,      // effective skip of this cycle
  output logic [LFSR_W-1:0] lfsr       // LFSR state (PRNG output logic)
);

  logic fb;

  always_comb begin
    fb        = lfsr[6] ^ lfsr[5] ^ lfsr[1] ^ lfsr[0];
    skip      = en & lfsr[0];
    rclk_rise = ~rand_clk & ~skip;
  end

  always_ff @(posedge sys_clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= LFSR_W'(1);
    end else if (seed_en) begin
      if (seed_tick) lfsr <= {seed_in, lfsr[LFSR_W-1:1]};
    end else begin
      lfsr <= {fb, lfsr[LFSR_W-1:1]};
    end
  end

  always_ff @(posedge sys_clk or negedge rst_n) begin
    if (!rst_n)    rand_clk <= 1'b0;
    else if (!skip) rand_clk <= ~rand_clk;
  end

endmodule
