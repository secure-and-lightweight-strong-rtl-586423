// obf_ctrl_tb: runs the masked (MASKED=1) and unmasked (MASKED=0)
// sequencers against a scripted PUF and checks
//  - the order and length of every NLFSR operation run (load unstable
//    challenge, 56 seed shifts, key mix, 128 misalignment steps, challenge
//    mix, 112+56 warm-up/flush steps, 56 flush steps per further bit),
//  - the number of PUF triggers (seed bits + 7 per response bit),
//  - that every raw seeding bit reaches the PRNG seed port in order,
//  - that each response bit is the majority of its 7 evaluations,
//  - that unmask_en is never high while the NLFSR changes,
//  - the clock randomizer enable sequence and the cycle latency.
module obf_ctrl_tb;
  import knl_pkg::*;

  localparam int LAT = 2;
  localparam int NR  = 3;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
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

  // ---------------- two DUTs ----------------
  logic       start [2];
  logic [7:0] n_resp;
  logic       busy [2], done [2], resp_bit [2], resp_valid [2];
  nl_op_e     nl_op [2];
  logic       unmask_en [2], seed_en [2], seed_shift [2], seed_bit [2];
  logic       clkrnd_en [2], puf_trig [2], puf_resp [2];

  obf_ctrl #(.MASKED(1'b0), .PUF_LAT(LAT)) dut0 (
    .clk, .rst_n, .start(start[0]), .n_resp, .busy(busy[0]), .done(done[0]),
    .resp_bit(resp_bit[0]), .resp_valid(resp_valid[0]), .nl_op(nl_op[0]),
    .unmask_en(unmask_en[0]), .prng_seed_en(seed_en[0]),
    .prng_seed_shift(seed_shift[0]), .prng_seed_bit(seed_bit[0]),
    .clkrnd_en(clkrnd_en[0]), .puf_trig(puf_trig[0]), .puf_resp(puf_resp[0]));

  obf_ctrl #(.MASKED(1'b1), .PUF_LAT(LAT)) dut1 (
    .clk, .rst_n, .start(start[1]), .n_resp, .busy(busy[1]), .done(done[1]),
    .resp_bit(resp_bit[1]), .resp_valid(resp_valid[1]), .nl_op(nl_op[1]),
    .unmask_en(unmask_en[1]), .prng_seed_en(seed_en[1]),
    .prng_seed_shift(seed_shift[1]), .prng_seed_bit(seed_bit[1]),
    .clkrnd_en(clkrnd_en[1]), .puf_trig(puf_trig[1]), .puf_resp(puf_resp[1]));

  // ---------------- per-DUT monitor ----------------
  task automatic run_one(int m);
    int sb, ntrig, nshift, nresp, cyc, first_resp, last_resp;
    int exp_first, exp_gap;
    bit seed_bits[$], ones_q[$];
    nl_op_e run_op;
    int run_len;
    string runs, exp_runs;
    bit evalbits[$];
    int ones;

    sb = m ? 19 : 8;
    ntrig = 0; nshift = 0; nresp = 0; cyc = 0; first_resp = -1; last_resp = -1;
    runs = ""; run_op = NL_HOLD; run_len = 0;
    start[m] = 1;
    @(negedge clk);
    while (!done[m] && cyc < 5000) begin
      // checks in the middle of the cycle
      if (nl_op[m] != NL_HOLD) chk(!unmask_en[m], "unmask while NLFSR changes");
      if (nl_op[m] inside {NL_SEED, NL_KEY_MIX, NL_CHAL_MIX, NL_STEP})
        chk(clkrnd_en[m], "clock randomizer off after seeding");
      if (seed_shift[m]) begin
        chk(seed_en[m] && !clkrnd_en[m], "seed mode during shift");
        chk(seed_bit[m] == seed_bits[nshift], "seed bit order");
        nshift++;
      end
      if (nl_op[m] != run_op) begin
        if (run_op != NL_HOLD) runs = {runs, $sformatf("%s:%0d ", run_op.name(), run_len)};
        run_op = nl_op[m];
        run_len = 0;
      end
      run_len++;
      if (resp_valid[m]) begin
        ones = 0;
        foreach (evalbits[i]) ones += evalbits[i];
        chk(evalbits.size() == 7, "seven evaluations per bit");
        chk(resp_bit[m] == (ones >= 4), "majority vote");
        evalbits.delete();
        if (first_resp < 0) first_resp = cyc;
        else chk(cyc - last_resp == 56 + 7 * (1 + LAT) + 1, "response spacing");
        last_resp = cyc;
        nresp++;
      end
      if (puf_trig[m]) begin
        bit b;
        b = 1'($urandom);
        if (ntrig >= sb) evalbits.push_back(b);
        else seed_bits.push_back(b);
        ntrig++;
        @(posedge clk);
        puf_resp[m] <= b;
      end else begin
        @(posedge clk);
      end
      @(negedge clk);
      cyc++;
    end
    if (run_op != NL_HOLD) runs = {runs, $sformatf("%s:%0d ", run_op.name(), run_len)};
    exp_runs = m ? "NL_LOAD_UNST:1 NL_SEED:56 NL_KEY_MIX:1 NL_STEP:128 NL_CHAL_MIX:1 NL_STEP:168 "
                 : "NL_LOAD_UNST:1 NL_CHAL_MIX:1 NL_STEP:168 ";
    for (int i = 1; i < NR; i++) exp_runs = {exp_runs, "NL_STEP:56 "};
    chk(runs == exp_runs, $sformatf("operation runs: %s", runs));
    chk(ntrig == sb + 7 * NR, $sformatf("trigger count %0d", ntrig));
    chk(nshift == sb, "seed shift count");
    chk(nresp == NR, "response count");
    exp_first = 1 + sb * (LAT + 2) + 1 + (m ? 56 + 1 + 128 + 1 : 1) + 112 + 56 + 7 * (1 + LAT);
    chk(first_resp == exp_first, $sformatf("first response at %0d exp %0d", first_resp, exp_first));
    chk(!busy[m] && done[m], "done");
    start[m] = 0;
    @(negedge clk);
    @(negedge clk);
    chk(!done[m] && !busy[m], "back to idle");
    chk(clkrnd_en[m], "clock randomizer stays on until the next request");
  endtask

  initial begin
    start[0] = 0; start[1] = 0; puf_resp[0] = 0; puf_resp[1] = 0;
    n_resp = 8'(NR);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy[0] && !busy[1], "idle after reset");
    run_one(0);
    run_one(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
