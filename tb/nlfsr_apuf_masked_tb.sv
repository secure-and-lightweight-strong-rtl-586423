// nlfsr_apuf_masked_tb: end-to-end test of the masked obfuscation variant
// with the behavioural arbiter PUF. For two requests (3 and 2 response
// bits) it checks every challenge applied to the PUF against the reference
//   ref_steps(ref_steps(key_s1 ^ key_s2, 128) ^ challenge, 168 + 56*i),
// every response bit against the noise-free PUF response, the core-clock
// latency of the first bit, that the challenge port is zero outside PUF
// evaluations (gated unmasking), that the NLFSR shares are masked (share 1
// differs from the value), and that the randomized clock skips edges.
module nlfsr_apuf_masked_tb;
  import knl_pkg::*;
  import knl_ref_pkg::ref_steps;
  import knl_ref_pkg::apuf_ideal;

  localparam int LAT = 2;

  logic sys_clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 sys_clk = ~sys_clk;

  logic       start, busy, done, resp_bit, resp_valid, core_clk, puf_trig, puf_resp;
  logic [7:0] n_resp;
  chal_t      key_s1, key_s2, chal, unst_chal, puf_chal;
  int         flips, unstable_evals, evals;

  nlfsr_apuf_masked #(.PUF_LAT(LAT)) dut (.*);
  apuf_model u_puf (.clk(core_clk), .chal(puf_chal), .trig(puf_trig), .unst(unst_chal),
                    .resp(puf_resp), .flips, .unstable_evals, .evals);

  int checks = 0, failures = 0, sys_cnt = 0, core_cnt = 0;
  always @(posedge sys_clk) sys_cnt++;
  always @(posedge core_clk) core_cnt++;

  initial begin
    repeat (60000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", s, $time);
    end
  endtask

  task automatic request(int n);
    bit [55:0] exp_c;
    int nbits, c0, s0, first, open_cyc, masked_cyc, busy_cyc;
    key_s1 = {$urandom, $urandom};
    key_s2 = {$urandom, $urandom};
    chal   = {$urandom, $urandom};
    n_resp = 8'(n);
    exp_c = ref_steps(ref_steps(key_s1 ^ key_s2, 128) ^ chal, 168);
    nbits = 0; first = -1; open_cyc = 0; masked_cyc = 0; busy_cyc = 0;
    @(negedge core_clk);
    start = 1;
    c0 = core_cnt;
    s0 = sys_cnt;
    while (!done) begin
      @(negedge core_clk);
      if (puf_chal != '0) open_cyc++;
      if (busy) begin
        busy_cyc++;
        if (dut.u_mnlfsr.s1 != (dut.u_mnlfsr.s1 ^ dut.u_mnlfsr.s2)) masked_cyc++;
      end
      if (puf_trig && puf_chal != unst_chal)
        chk(puf_chal == exp_c, $sformatf("challenge %h exp %h", puf_chal, exp_c));
      if (resp_valid) begin
        chk(resp_bit == apuf_ideal(exp_c), "response bit");
        if (first < 0) first = core_cnt - c0;
        exp_c = ref_steps(exp_c, 56);
        nbits++;
      end
    end
    chk(nbits == n, "number of response bits");
    chk(first == 1 + 1 + 19 * (LAT + 2) + 1 + 56 + 1 + 128 + 1 + 168 + 7 * (1 + LAT),
        $sformatf("latency %0d core cycles", first));
    chk(open_cyc == (LAT + 1) * (19 + 7 * n), $sformatf("challenge visible %0d cycles", open_cyc));
    chk(masked_cyc > busy_cyc / 2, "state held in masked form");
    chk(sys_cnt - s0 > 2 * (core_cnt - c0) + 20, "randomized clock slower than sys/2");
    $display("request: %0d core cycles, %0d system cycles", core_cnt - c0, sys_cnt - s0);
    start = 0;
    @(negedge core_clk);
    @(negedge core_clk);
    chk(!done && !busy, "idle");
  endtask

  initial begin
    start = 0; n_resp = 0; key_s1 = '0; key_s2 = '0; chal = '0;
    unst_chal = {$urandom, $urandom};
    repeat (3) @(negedge sys_clk);
    rst_n = 1;
    request(3);
    request(2);
    chk(unstable_evals == 38, "PRNG seeding evaluations");
    chk(flips > 0, "PUF noise exercised the vote");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
