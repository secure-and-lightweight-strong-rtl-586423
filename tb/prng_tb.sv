// prng_tb: the pseudo random number generator of the masked variant, i.e.
// the 8-bit LFSR inside clock_randomizer and the 11-cell CASR, wired as in
// nlfsr_apuf_masked: one serial seed chain (input -> CASR cell 1 ... cell 11
// -> LFSR bit 7) and three outputs, each the XOR of one LFSR bit and one
// CASR cell. The testbench
//   - seeds 19 random bits serially (one bit per system cycle) and checks
//     the resulting LFSR and CASR states against a model of the chain,
//   - then lets both run freely and checks every cycle, for one whole
//     combined period, the three outputs against the reference sequences,
//   - checks that the joint 19-bit state first returns after exactly
//     255 * 2047 = 521985 cycles, the "close to 2^19" cycle length of the
//     combined generator, and
//   - counts the ones of each output over that period: since the periods
//     are coprime every pair of LFSR and CASR states occurs once, so each
//     output must be 1 in exactly 128 * 1023 + 127 * 1024 = 260992 cycles.
// The random skipping of the clock randomizer stays off here (en = 0); its
// own testbench covers it.
module prng_tb;
  import knl_ref_pkg::ref_lfsr;
  import knl_ref_pkg::ref_casr;

  localparam int PERIOD = 255 * 2047;

  logic sys_clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 sys_clk = ~sys_clk;

  logic        seed_en, seed_tick, seed_in, casr_out;
  logic        rand_clk, rclk_rise, skip;
  logic [7:0]  lfsr;
  logic [10:0] casr;
  logic        r_and27, r_and29, r_key;

  casr11 u_casr (
    .sys_clk, .rst_n, .seed_en, .seed_tick, .seed_in,
    .seed_out (casr_out),
    .c        (casr)
  );

  clock_randomizer u_clkrnd (
    .sys_clk, .rst_n,
    .en       (1'b0),
    .seed_en, .seed_tick,
    .seed_in  (casr_out),
    .rand_clk, .rclk_rise, .skip, .lfsr
  );

  // the three PRNG outputs, as in nlfsr_apuf_masked
  always_comb begin
    r_and27 = lfsr[2] ^ casr[1];
    r_and29 = lfsr[6] ^ casr[3];
    r_key   = lfsr[4] ^ casr[9];
  end

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (PERIOD + 2000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [7:0]  ref_l, l0;
    bit [10:0] ref_c, c0;
    bit [18:0] seed;
    int ones [3];
    int first_return;
    seed_en = 0; seed_tick = 0; seed_in = 0;
    repeat (2) @(negedge sys_clk);
    rst_n = 1;

    // serial seeding; neither register may end all-zero
    seed = 19'($urandom);
    if (seed[18:8] == 0) seed[9] = 1'b1;
    if (seed[7:0] == 0)  seed[0] = 1'b1;
    ref_l = 8'h01; ref_c = 11'h001;
    seed_en = 1; seed_tick = 1;
    for (int k = 0; k < 19; k++) begin
      seed_in = seed[k];
      @(posedge sys_clk);
      ref_l = {ref_c[10], ref_l[7:1]};
      ref_c = {ref_c[9:0], seed[k]};
      #1;
      check(lfsr == ref_l && casr == ref_c,
            $sformatf("seed tick %0d: lfsr %h casr %h, expected %h %h",
                      k, lfsr, casr, ref_l, ref_c));
    end
    // one cycle with seed_en high and no tick: both registers hold
    seed_tick = 0;
    @(posedge sys_clk); #1;
    check(lfsr == ref_l && casr == ref_c, "state must hold without seed_tick");
    @(negedge sys_clk);
    seed_en = 0;

    // free running for one combined period
    l0 = ref_l; c0 = ref_c;
    first_return = 0;
    foreach (ones[i]) ones[i] = 0;
    for (int n = 1; n <= PERIOD; n++) begin
      @(posedge sys_clk); #1;
      ref_l = ref_lfsr(ref_l);
      ref_c = ref_casr(ref_c);
      check(r_and27 == (ref_l[2] ^ ref_c[1]) && r_and29 == (ref_l[6] ^ ref_c[3])
            && r_key == (ref_l[4] ^ ref_c[9]),
            $sformatf("cycle %0d: outputs %b%b%b", n, r_and27, r_and29, r_key));
      ones[0] += int'(r_and27);
      ones[1] += int'(r_and29);
      ones[2] += int'(r_key);
      if (first_return == 0 && lfsr == l0 && casr == c0) first_return = n;
    end
    check(first_return == PERIOD,
          $sformatf("joint state returns after %0d cycles, expected %0d",
                    first_return, PERIOD));
    foreach (ones[i])
      check(ones[i] == 260992,
            $sformatf("output %0d is 1 in %0d of %0d cycles, expected 260992",
                      i, ones[i], PERIOD));
    $display("combined period %0d cycles; ones per output %0d %0d %0d",
             first_return, ones[0], ones[1], ones[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
