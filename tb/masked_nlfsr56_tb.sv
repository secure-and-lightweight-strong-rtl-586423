// masked_nlfsr56_tb: runs the masked NLFSR through the masked evaluation
// sequence with fresh random remask bits every cycle and checks that the
// unmasked value (read through obf_chal) follows the unmasked reference:
// serial seeding leaves value 0 with non-zero shares, key mixing gives the
// key, stepping follows ref_step, challenge mixing XORs the challenge in.
// Also checks the output gating (obf_chal = 0 while unmask_en is low) and
// that share 1 alone differs from the value (the state is really masked).
module masked_nlfsr56_tb;
  import knl_pkg::*;
  import knl_ref_pkg::ref_step;
  import knl_ref_pkg::ref_steps;

  logic   clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  nl_op_e op;
  chal_t  key_s1, key_s2, chal, unst_chal, obf_chal;
  logic   seed_bit, r1, r2, unmask_en;
  bit [55:0] v, rnd;
  int checks = 0, failures = 0, masked_seen = 0;

  masked_nlfsr56 dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    r1 <= 1'($urandom);
    r2 <= 1'($urandom);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_val(string what, bit [55:0] e);
    unmask_en = 1'b1;
    #1;
    checks++;
    if (obf_chal !== chal_t'(e)) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, obf_chal, e);
    end
    if (dut.s1 != chal_t'(e)) masked_seen++;
    unmask_en = 1'b0;
    #1;
    checks++;
    if (obf_chal !== '0) begin
      failures++;
      $display("FAIL %s: gating leaks %h", what, obf_chal);
    end
  endtask

  initial begin
    op = NL_HOLD; unmask_en = 0; seed_bit = 0; r1 = 0; r2 = 0;
    key_s1 = '0; key_s2 = '0; chal = '0; unst_chal = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      unst_chal = {$urandom, $urandom};
      op = NL_LOAD_UNST;
      @(negedge clk);
      check_val("unstable load", unst_chal);
      rnd = {$urandom, $urandom};
      op = NL_SEED;
      for (int i = 0; i < 56; i++) begin
        seed_bit = rnd[i];
        @(negedge clk);
      end
      check_val("seeded value", 56'd0);
      checks++;
      if (dut.s1 !== rnd || dut.s2 !== rnd) begin
        failures++;
        $display("FAIL seed shares %h %h exp %h", dut.s1, dut.s2, rnd);
      end
      key_s1 = {$urandom, $urandom};
      key_s2 = {$urandom, $urandom};
      op = NL_KEY_MIX;
      @(negedge clk);
      v = key_s1 ^ key_s2;
      check_val("key mix", v);
      op = NL_STEP;
      for (int i = 0; i < 128; i++) begin
        @(negedge clk);
        v = ref_step(v);
        if (i % 16 == 15) check_val("misalign step", v);
      end
      chal = {$urandom, $urandom};
      op = NL_CHAL_MIX;
      @(negedge clk);
      v ^= chal;
      check_val("challenge mix", v);
      op = NL_STEP;
      for (int i = 0; i < 168; i++) begin
        @(negedge clk);
        v = ref_step(v);
        check_val("warm-up step", v);
      end
      checks++;
      if (v != ref_steps(ref_steps(key_s1 ^ key_s2, 128) ^ chal, 168)) begin
        failures++;
        $display("FAIL reference mismatch");
      end
      op = NL_HOLD;
    end
    checks++;
    if (masked_seen < 100) begin
      failures++;
      $display("FAIL share 1 equals the unmasked value too often");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
