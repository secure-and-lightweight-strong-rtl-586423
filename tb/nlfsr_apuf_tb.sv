// nlfsr_apuf_tb: end-to-end test of the unmasked obfuscation variant with
// the behavioural arbiter PUF. For two requests (3 and 2 response bits) it
// checks every challenge applied to the PUF against the reference
// key^challenge run for 112+56 (+56 per further bit) NLFSR steps, every
// response bit against the noise-free PUF response of that challenge, the
// core-clock latency of the first bit, and that the randomized clock skips
// system clock edges once enabled.
module nlfsr_apuf_tb;
  import knl_pkg::*;
  import knl_ref_pkg::ref_steps;
  import knl_ref_pkg::apuf_ideal;

  localparam int LAT = 2;

  logic sys_clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 sys_clk = ~sys_clk;

  logic       start, busy, done, resp_bit, resp_valid, core_clk, puf_trig, puf_resp;
  logic [7:0] n_resp;
  chal_t      key, chal, unst_chal, puf_chal;
  int         flips, unstable_evals, evals;

  nlfsr_apuf #(.PUF_LAT(LAT)) dut (.*);
  apuf_model u_puf (.clk(core_clk), .chal(puf_chal), .trig(puf_trig), .unst(unst_chal),
                    .resp(puf_resp), .flips, .unstable_evals, .evals);

  int checks = 0, failures = 0, sys_cnt = 0, core_cnt = 0;
  always @(posedge sys_clk) sys_cnt++;
  always @(posedge core_clk) core_cnt++;

  initial begin
    repeat (40000) @(posedge sys_clk);
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
    int k, nbits, c0, s0, first;
    key  = {$urandom, $urandom};
    chal = {$urandom, $urandom};
    n_resp = 8'(n);
    exp_c = ref_steps(key ^ chal, 168);
    k = 0; nbits = 0; first = -1;
    @(negedge core_clk);
    start = 1;
    c0 = core_cnt;
    s0 = sys_cnt;
    while (!done) begin
      @(negedge core_clk);
      if (puf_trig && puf_chal != unst_chal) begin
        chk(puf_chal == exp_c, $sformatf("challenge %h exp %h", puf_chal, exp_c));
        k++;
        if (k == 7) begin
          k = 0;
        end
      end
      if (resp_valid) begin
        chk(resp_bit == apuf_ideal(exp_c), "response bit");
        if (first < 0) first = core_cnt - c0;
        exp_c = ref_steps(exp_c, 56);
        nbits++;
      end
    end
    chk(nbits == n, "number of response bits");
    // start seen at the first edge; then 1 + 8*(LAT+2) + 1 + 1 + 168 + 7*(1+LAT)
    chk(first == 1 + 1 + 8 * (LAT + 2) + 1 + 1 + 168 + 7 * (1 + LAT),
        $sformatf("latency %0d core cycles", first));
    chk(sys_cnt - s0 > 2 * (core_cnt - c0) + 20, "randomized clock slower than sys/2");
    $display("request: %0d core cycles, %0d system cycles", core_cnt - c0, sys_cnt - s0);
    start = 0;
    @(negedge core_clk);
    @(negedge core_clk);
    chk(!done && !busy, "idle");
  endtask

  initial begin
    start = 0; n_resp = 0; key = '0; chal = '0;
    unst_chal = {$urandom, $urandom};
    repeat (3) @(negedge sys_clk);
    rst_n = 1;
    request(3);
    request(2);
    chk(unstable_evals == 16, "PRNG seeding evaluations");
    chk(flips > 0, "PUF noise exercised the vote");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
