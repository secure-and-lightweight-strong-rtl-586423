// nlfsr56_tb: checks the unmasked NLFSR against the reference model.
// Parallel key^challenge load, 500 steps compared bit-for-bit each cycle,
// hold, unstable-challenge load, and the 112+56-step warm-up/flush result
// for random keys and challenges.
module nlfsr56_tb;
  import knl_pkg::*;
  import knl_ref_pkg::ref_step;
  import knl_ref_pkg::ref_steps;

  logic   clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  nl_op_e op;
  chal_t  key, chal, unst_chal, state;
  bit [55:0] exp_st;
  int checks = 0, failures = 0;

  nlfsr56 dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    checks++;
    if (state !== chal_t'(exp_st)) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, state, exp_st);
    end
  endtask

  initial begin
    op = NL_HOLD;
    key = '0; chal = '0; unst_chal = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_st = '0;
    @(negedge clk); check("reset");
    for (int t = 0; t < 4; t++) begin
      key  = {$urandom, $urandom};
      chal = {$urandom, $urandom};
      op = NL_CHAL_MIX;
      @(negedge clk);
      exp_st = key ^ chal;
      check("load");
      op = NL_STEP;
      for (int i = 0; i < 168; i++) begin
        @(negedge clk);
        exp_st = ref_step(exp_st);
        if (t == 0) check("step");
      end
      checks++;
      if (state !== chal_t'(ref_steps(key ^ chal, 168))) begin
        failures++;
        $display("FAIL warm-up+flush result");
      end
    end
    op = NL_STEP;
    for (int i = 0; i < 332; i++) begin
      @(negedge clk);
      exp_st = ref_step(exp_st);
      check("long step");
    end
    op = NL_HOLD;
    repeat (3) @(negedge clk);
    check("hold");
    unst_chal = {$urandom, $urandom};
    op = NL_LOAD_UNST;
    @(negedge clk);
    exp_st = unst_chal;
    check("unstable load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
