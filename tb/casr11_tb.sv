// casr11_tb: checks the 11-cell hybrid CA against the reference rule,
// its period of 2047, serial seeding (11 bits, c[0] first in, seed_out =
// cell 11) and that the state holds between seeding ticks.
module casr11_tb;
  import knl_ref_pkg::ref_casr;

  logic sys_clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  logic seed_en, seed_tick, seed_in, seed_out;
  logic [10:0] c;
  bit [10:0] ref_s, seedv;
  int checks = 0, failures = 0, period = 0;

  casr11 dut (.*);

  always #5 sys_clk = ~sys_clk;

  initial begin
    repeat (10000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seed_en = 0; seed_tick = 0; seed_in = 0;
    repeat (2) @(negedge sys_clk);
    rst_n = 1;
    ref_s = 11'h001;
    checks++;
    if (c !== ref_s) failures++;
    for (int i = 0; i < 2100; i++) begin
      @(negedge sys_clk);
      ref_s = ref_casr(ref_s);
      checks++;
      if (c !== ref_s) begin
        failures++;
        if (failures < 5) $display("FAIL step %0d got %h exp %h", i, c, ref_s);
      end
      if (period == 0 && ref_s == 11'h001) period = i + 1;
    end
    checks++;
    if (period != 2047) begin
      failures++;
      $display("FAIL period %0d", period);
    end
    seedv = 11'($urandom);
    seed_en = 1;
    for (int i = 0; i < 11; i++) begin
      seed_in = seedv[10 - i];
      seed_tick = 1;
      @(negedge sys_clk);
      seed_tick = 0;
      repeat (2) @(negedge sys_clk);
    end
    checks += 2;
    if (c !== seedv) begin
      failures++;
      $display("FAIL seeded %h exp %h", c, seedv);
    end
    if (seed_out !== seedv[10]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
