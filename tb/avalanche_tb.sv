// avalanche_tb: strict avalanche criterion of the obfuscation, measured on
// the unmasked NLFSR. With one random key, NCHAL random external challenges
// are each run through load + 112 warm-up + 56 flush steps, and again
// once for every single toggled challenge bit (all 56 positions; bits 0
// and 55 are printed). For every toggled position and every one of the 56
// obfuscated challenge bits the fraction of runs in which the output bit
// changed must lie within 0.5 +- 0.04 (8 standard deviations at 10000
// runs), 3136 checks in all. A 56-bit LFSR obfuscation
// would give 0 or 1 for every bit.
module avalanche_tb;
  import knl_pkg::*;

  localparam int NCHAL = 10000;

  logic   clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  nl_op_e op;
  chal_t  key, chal, unst_chal, state;
  int checks = 0, failures = 0;
  int flips [56][56];  // [toggled input bit][output bit]

  nlfsr56 dut (.*);

  initial begin
    repeat (NCHAL * 57 * 172 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic obfuscate(chal_t c, output chal_t res);
    chal = c;
    op = NL_CHAL_MIX;
    @(negedge clk);
    op = NL_STEP;
    repeat (WARMUP_CYC + FLUSH_CYC) @(negedge clk);
    op = NL_HOLD;
    res = state;
  endtask

  initial begin
    chal_t c, r0, r1;
    real p, pmin, pmax, amin, amax;
    op = NL_HOLD; chal = '0; unst_chal = '0;
    key = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (flips[t, i]) flips[t][i] = 0;
    for (int n = 0; n < NCHAL; n++) begin
      c = {$urandom, $urandom};
      obfuscate(c, r0);
      for (int t = 0; t < 56; t++) begin
        obfuscate(c ^ (56'd1 << t), r1);
        for (int i = 0; i < 56; i++) flips[t][i] += int'(r0[i] ^ r1[i]);
      end
    end
    amin = 1.0; amax = 0.0;
    for (int t = 0; t < 56; t++) begin
      pmin = 1.0; pmax = 0.0;
      for (int i = 0; i < 56; i++) begin
        p = real'(flips[t][i]) / NCHAL;
        if (p < pmin) pmin = p;
        if (p > pmax) pmax = p;
        checks++;
        if (p < 0.46 || p > 0.54) begin
          failures++;
          $display("FAIL toggled bit %0d: output bit %0d changes with p=%f", t, i, p);
        end
      end
      if (t == 0 || t == 55)
        $display("toggled bit %0d: change probability per output bit %f .. %f", t, pmin, pmax);
      if (pmin < amin) amin = pmin;
      if (pmax > amax) amax = pmax;
    end
    $display("all 56 toggled bits: change probability per output bit %f .. %f", amin, amax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
