// clock_randomizer_tb: checks the LFSR-driven conditional clock divider.
// With en low rand_clk must toggle on every system edge. With en high the
// LFSR must follow the reference sequence (period 255), rand_clk must hold
// exactly on the edges where the reference bit 0 is 1, and rclk_rise must
// predict every rising edge of rand_clk. Serial seeding must load the
// shifted bits and hold the LFSR between ticks.
module clock_randomizer_tb;
  import knl_ref_pkg::ref_lfsr;

  logic sys_clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  logic en, seed_en, seed_tick, seed_in;
  logic rand_clk, rclk_rise, skip;
  logic [7:0] lfsr;
  bit [7:0] ref_s, first, seedv;
  bit prev_clk, prev_rise;
  int checks = 0, failures = 0, skips = 0, period = 0;

  clock_randomizer dut (.*);

  always #5 sys_clk = ~sys_clk;

  initial begin
    repeat (5000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    $display("FAIL %s at %0t", s, $time);
  endtask

  initial begin
    en = 0; seed_en = 0; seed_tick = 0; seed_in = 0;
    repeat (2) @(negedge sys_clk);
    rst_n = 1;
    ref_s = 8'h01;
    // en low: plain divide by two, LFSR still stepping
    for (int i = 0; i < 20; i++) begin
      prev_clk = rand_clk;
      prev_rise = rclk_rise;
      @(negedge sys_clk);
      ref_s = ref_lfsr(ref_s);
      checks += 3;
      if (rand_clk == prev_clk) fail("no toggle while disabled");
      if (prev_rise != (rand_clk && !prev_clk)) fail("rclk_rise wrong");
      if (lfsr !== ref_s) fail("lfsr sequence (disabled)");
    end
    // en high: skip on lfsr[0]
    en = 1;
    #1;
    first = ref_s;
    for (int i = 0; i < 600; i++) begin
      bit sk;
      sk = ref_s[0];
      prev_clk = rand_clk;
      prev_rise = rclk_rise;
      checks++;
      if (skip !== sk) fail("skip");
      @(negedge sys_clk);
      ref_s = ref_lfsr(ref_s);
      if (sk) skips++;
      checks += 3;
      if ((rand_clk == prev_clk) != sk) fail("rand_clk skip pattern");
      if (prev_rise != (rand_clk && !prev_clk)) fail("rclk_rise wrong");
      if (lfsr !== ref_s) fail("lfsr sequence");
      if (period == 0 && ref_s == first) period = i + 1;
    end
    checks++;
    if (period != 255) fail($sformatf("LFSR period %0d", period));
    checks++;
    if (skips < 200) fail("too few skips");
    // serial seeding, one bit every other cycle
    en = 0;
    seedv = 8'($urandom);
    seed_en = 1;
    for (int i = 0; i < 8; i++) begin
      seed_in = seedv[i];
      seed_tick = 1;
      @(negedge sys_clk);
      seed_tick = 0;
      @(negedge sys_clk);
    end
    checks++;
    if (lfsr !== seedv) fail($sformatf("seeded lfsr %h exp %h", lfsr, seedv));
    seed_en = 0;
    $display("skipped edges: %0d", skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
