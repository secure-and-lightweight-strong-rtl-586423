// knl_top_tb: end-to-end test of the test-chip top at its default
// parameters, with one behavioural arbiter PUF per variant. Both variants
// serve requests at the same time (two requests each, 4 and 2 response
// bits). Every PUF challenge and response bit is checked against the
// reference models, and every mechanism of the design is counted and must
// occur: PRNG seeding from the unstable challenge, clock randomizer
// enable, skipped system clock edges, serial NLFSR seeding, key remasking,
// time misalignment, challenge mixing, warm-up, flush (including the flush
// between response bits), repeated evaluations out-voting PUF noise, and
// gating of the unmasked challenge outside evaluations. It also checks that
// the latency to the first response bit is fixed in core cycles (masked
// 229 more than plain) while in system cycles it varies between the two
// masked requests, as the reseeded clock randomizer intends.
module knl_top_tb;
  import knl_pkg::*;
  import knl_ref_pkg::ref_steps;
  import knl_ref_pkg::apuf_ideal;

  logic sys_clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 sys_clk = ~sys_clk;

  logic       u_start, u_busy, u_done, u_resp_bit, u_resp_valid, u_core_clk, u_puf_trig, u_puf_resp;
  logic       m_start, m_busy, m_done, m_resp_bit, m_resp_valid, m_core_clk, m_puf_trig, m_puf_resp;
  logic [7:0] u_n_resp, m_n_resp;
  chal_t      u_key, u_chal, u_unst_chal, u_puf_chal;
  chal_t      m_key_s1, m_key_s2, m_chal, m_unst_chal, m_puf_chal;
  int         u_flips, u_unst, u_evals, m_flips, m_unst, m_evals;

  knl_top dut (.*);

  apuf_model u_apuf (.clk(u_core_clk), .chal(u_puf_chal), .trig(u_puf_trig), .unst(u_unst_chal),
                     .resp(u_puf_resp), .flips(u_flips), .unstable_evals(u_unst), .evals(u_evals));
  apuf_model m_apuf (.clk(m_core_clk), .chal(m_puf_chal), .trig(m_puf_trig), .unst(m_unst_chal),
                     .resp(m_puf_resp), .flips(m_flips), .unstable_evals(m_unst), .evals(m_evals));

  int checks = 0, failures = 0;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", s, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge sys_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_seed_shift, n_clk_en, n_skip, n_nl_seed, n_key_mix, n_misalign, n_chal_mix;
  int n_warmup, n_flush, n_inter_flush, n_vote_fix, n_gated, n_resp_total;
  logic u_clk_q, m_clk_q;
  // latency to the first response bit: in core cycles and in system cycles
  int sys_cyc;
  int u_core_lat [$], m_core_lat [$], u_sys_lat [$], m_sys_lat [$];

  always @(posedge sys_clk) begin
    if (dut.u_plain.u_ctrl.prng_seed_shift && dut.u_plain.u_clkrnd.rclk_rise) n_seed_shift++;
    if (dut.u_masked.u_ctrl.prng_seed_shift && dut.u_masked.u_clkrnd.rclk_rise) n_seed_shift++;
    // a system edge on which an enabled randomized clock does not move
    if (dut.u_plain.u_clkrnd.en && u_core_clk == u_clk_q) n_skip++;
    if (dut.u_masked.u_clkrnd.en && m_core_clk == m_clk_q) n_skip++;
    u_clk_q <= u_core_clk;
    m_clk_q <= m_core_clk;
    sys_cyc++;
  end

  always @(posedge m_core_clk) begin
    case (dut.u_masked.u_ctrl.st.name())
      "S_CLK_EN":   n_clk_en++;
      "S_NL_SEED":  n_nl_seed++;
      "S_KEY_MIX":  n_key_mix++;
      "S_MISALIGN": n_misalign++;
      "S_CHAL_MIX": n_chal_mix++;
      "S_WARMUP":   n_warmup++;
      "S_FLUSH":    n_flush++;
      default: ;
    endcase
    if (!dut.u_masked.u_ctrl.unmask_en && m_busy) begin
      n_gated++;
      chk(m_puf_chal == '0, "masked challenge visible outside evaluation");
    end
  end

  always @(posedge u_core_clk) begin
    case (dut.u_plain.u_ctrl.st.name())
      "S_CLK_EN":   n_clk_en++;
      "S_CHAL_MIX": n_chal_mix++;
      "S_WARMUP":   n_warmup++;
      "S_FLUSH":    n_flush++;
      default: ;
    endcase
  end

  // ---------------- request drivers with reference checks ----------------
  task automatic run_plain(int n);
    bit [55:0] exp_c;
    int nb, lat, t0;
    u_key = {$urandom, $urandom};
    u_chal = {$urandom, $urandom};
    u_n_resp = 8'(n);
    exp_c = ref_steps(u_key ^ u_chal, 168);
    nb = 0;
    lat = 0;
    @(negedge u_core_clk);
    u_start = 1;
    t0 = sys_cyc;
    while (!u_done) begin
      @(negedge u_core_clk);
      if (nb == 0) lat++;
      if (u_puf_trig && u_puf_chal != u_unst_chal) chk(u_puf_chal == exp_c, "plain challenge");
      if (u_resp_valid) begin
        chk(u_resp_bit == apuf_ideal(exp_c), "plain response");
        exp_c = ref_steps(exp_c, 56);
        nb++;
        if (nb > 1) n_inter_flush++;
        if (nb == 1) begin
          u_core_lat.push_back(lat);
          u_sys_lat.push_back(sys_cyc - t0);
        end
      end
    end
    chk(nb == n, "plain response count");
    n_resp_total += nb;
    u_start = 0;
    @(negedge u_core_clk);
    @(negedge u_core_clk);
  endtask

  task automatic run_masked(int n);
    bit [55:0] exp_c;
    int nb, lat, t0;
    m_key_s1 = {$urandom, $urandom};
    m_key_s2 = {$urandom, $urandom};
    m_chal = {$urandom, $urandom};
    m_n_resp = 8'(n);
    exp_c = ref_steps(ref_steps(m_key_s1 ^ m_key_s2, 128) ^ m_chal, 168);
    nb = 0;
    lat = 0;
    @(negedge m_core_clk);
    m_start = 1;
    t0 = sys_cyc;
    while (!m_done) begin
      @(negedge m_core_clk);
      if (nb == 0) lat++;
      if (m_puf_trig && m_puf_chal != m_unst_chal) chk(m_puf_chal == exp_c, "masked challenge");
      if (m_resp_valid) begin
        chk(m_resp_bit == apuf_ideal(exp_c), "masked response");
        exp_c = ref_steps(exp_c, 56);
        nb++;
        if (nb > 1) n_inter_flush++;
        if (nb == 1) begin
          m_core_lat.push_back(lat);
          m_sys_lat.push_back(sys_cyc - t0);
        end
      end
    end
    chk(nb == n, "masked response count");
    n_resp_total += nb;
    m_start = 0;
    @(negedge m_core_clk);
    @(negedge m_core_clk);
  endtask

  initial begin
    u_start = 0; m_start = 0; u_n_resp = 0; m_n_resp = 0;
    u_key = '0; u_chal = '0; m_key_s1 = '0; m_key_s2 = '0; m_chal = '0;
    u_unst_chal = {$urandom, $urandom};
    m_unst_chal = {$urandom, $urandom};
    u_clk_q = 0; m_clk_q = 0; sys_cyc = 0;
    {n_seed_shift, n_clk_en, n_skip, n_nl_seed, n_key_mix, n_misalign, n_chal_mix} = '0;
    {n_warmup, n_flush, n_inter_flush, n_vote_fix, n_gated, n_resp_total} = '0;
    repeat (3) @(negedge sys_clk);
    rst_n = 1;
    fork
      begin run_plain(4);  run_plain(2);  end
      begin run_masked(4); run_masked(2); end
    join
    n_vote_fix = u_flips + m_flips;
    $display("seed shifts %0d, clock enables %0d, skipped edges %0d", n_seed_shift, n_clk_en, n_skip);
    $display("NLFSR seed %0d, key mix %0d, misalign %0d, challenge mix %0d", n_nl_seed, n_key_mix, n_misalign, n_chal_mix);
    $display("warm-up %0d, flush %0d, flushes between bits %0d", n_warmup, n_flush, n_inter_flush);
    $display("noisy evaluations out-voted %0d, gated cycles %0d, responses %0d", n_vote_fix, n_gated, n_resp_total);
    chk(n_seed_shift == 2 * (8 + 19), "PRNG seeding bits");
    chk(u_unst + m_unst == 2 * (8 + 19), "unstable-challenge evaluations");
    chk(n_clk_en == 4, "clock randomizer enabled per request");
    chk(n_skip > 0, "skipped clock edges");
    chk(n_nl_seed == 2 * 56, "NLFSR serial seeding");
    chk(n_key_mix == 2, "key remasking");
    chk(n_misalign == 2 * 128, "time misalignment");
    chk(n_chal_mix == 4, "challenge mixing");
    chk(n_warmup == 4 * 112, "warm-up");
    chk(n_flush == 2 * 56 * (4 + 2), "flush");
    chk(n_inter_flush == 2 * (3 + 1), "flush between response bits");
    chk(n_vote_fix > 0, "repeated evaluations out-voting noise");
    chk(n_gated > 0, "gated unmasking");
    // fixed latency in core cycles; the masked sequence is longer by
    // 19 - 8 further seed bits (4 cycles each), 56 NLFSR seeding cycles,
    // the key mix and 128 misalignment cycles: 44 + 56 + 1 + 128 = 229
    chk(u_core_lat.size() == 2 && m_core_lat.size() == 2, "latencies recorded");
    $display("first-bit latency, core cycles: plain %0d %0d, masked %0d %0d",
             u_core_lat[0], u_core_lat[1], m_core_lat[0], m_core_lat[1]);
    $display("first-bit latency, system cycles: plain %0d %0d, masked %0d %0d",
             u_sys_lat[0], u_sys_lat[1], m_sys_lat[0], m_sys_lat[1]);
    chk(u_core_lat[0] == u_core_lat[1] && m_core_lat[0] == m_core_lat[1],
        "core-cycle latency equal for every request");
    chk(m_core_lat[0] - u_core_lat[0] == 229, "masked latency exceeds plain by 229 core cycles");
    // the clock randomizer, seeded afresh per request, moves the response in time
    chk(m_sys_lat[0] != m_sys_lat[1], "masked system-cycle latency varies between requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
