// obf_ctrl: sequencer of the challenge obfuscation evaluation algorithm.
//
// Runs on the randomized core clock. One request (start high while idle)
// produces n_resp response bits (at least one) and then holds done until
// start drops. The sequence is:
//   1. load the enrolled unstable challenge into the NLFSR and evaluate the
//      PUF SEED_BITS times; each raw response bit is shifted serially into
//      the PRNG (19 bits: CASR then LFSR, or 8 bits for the LFSR alone).
//   2. enable the clock randomizer.
//   masked (MASKED=1):
//   3. shift 56 PRNG bits serially into both NLFSR shares,
//   4. XOR the key shares into the NLFSR (remasking the key),
//   5. step the NLFSR 128 times (time misalignment),
//   6. XOR the external challenge into share 1;
//   unmasked (MASKED=0):
//   3-6. load key ^ challenge in parallel;
//   7. step 112 times (warm-up),
//   8. step 56 times (flush),
//   9. evaluate the PUF N_EVAL (7) times with the state as challenge and
//      output the majority as one response bit (resp_valid for one cycle),
//  10. repeat from 8 until n_resp bits are out.
// unmask_en is high only while the PUF evaluates (steps 1 and 9).
//
// PUF interface: puf_trig is high for one cycle; puf_resp is sampled at the
// end of the PUF_LAT-th cycle after it. Steps 1-10 and their cycle counts
// follow the paper's evaluation algorithms; the 7 repeated evaluations are
// the paper's, combining them by majority is this design's reading. The
// request/done handshake, PUF_LAT, the use of raw (unvoted) evaluations for
// seeding and running the seeding at every request are this design's own.
module obf_ctrl
  import knl_pkg::*;
#(
  parameter bit          MASKED    = 1'b1,
  parameter int unsigned SEED_BITS = MASKED ? (LFSR_W + CASR_W) : LFSR_W,
  parameter int unsigned PUF_LAT   = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  // request
  input  logic       start,
  input  logic [7:0] n_resp,
  output logic       busy,
  output logic       done,
  output logic       resp_bit,
  output logic       resp_valid,
  // NLFSR datapath
  output nl_op_e     nl_op,
  output logic       unmask_en,
  // PRNG seeding and clock randomizer
  output logic       prng_seed_en,
  output logic       prng_seed_shift,
  output logic       prng_seed_bit,
  output logic       clkrnd_en,
  // strong PUF
  output logic       puf_trig,
  input  logic       puf_resp
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD_UNST, S_SEED_TRIG, S_SEED_WAIT, S_SEED_SHIFT, S_CLK_EN,
    S_NL_SEED, S_KEY_MIX, S_MISALIGN, S_CHAL_MIX, S_WARMUP, S_FLUSH,
    S_EVAL_TRIG, S_EVAL_WAIT, S_OUT, S_DONE
  } state_e;

  state_e     st;
  logic [7:0] cnt;     // cycle counter inside a state
  logic [7:0] bcnt;    // seed bits / evaluations done
  logic [7:0] rcnt;    // response bits done
  logic [3:0] ones;    // ones among the repeated evaluations
  logic       seed_q;  // last raw PUF bit for seeding
  logic       maj_q;   // voted response

  localparam logic [7:0] LAT_M1 = 8'(PUF_LAT - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      cnt       <= '0;
      bcnt      <= '0;
      rcnt      <= '0;
      ones      <= '0;
      seed_q    <= 1'b0;
      maj_q     <= 1'b0;
      clkrnd_en <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: begin
          cnt  <= '0;
          bcnt <= '0;
          rcnt <= '0;
          if (start) begin
            clkrnd_en <= 1'b0;
            st        <= S_LOAD_UNST;
          end
        end
        S_LOAD_UNST: st <= S_SEED_TRIG;
        S_SEED_TRIG: begin
          cnt <= '0;
          st  <= S_SEED_WAIT;
        end
        S_SEED_WAIT: begin
          cnt <= cnt + 8'd1;
          if (cnt == LAT_M1) begin
            seed_q <= puf_resp;
            st     <= S_SEED_SHIFT;
          end
        end
        S_SEED_SHIFT: begin
          bcnt <= bcnt + 8'd1;
          st   <= (bcnt == 8'(SEED_BITS - 1)) ? S_CLK_EN : S_SEED_TRIG;
        end
        S_CLK_EN: begin
          clkrnd_en <= 1'b1;
          cnt       <= '0;
          st        <= MASKED ? S_NL_SEED : S_CHAL_MIX;
        end
        S_NL_SEED: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(CHAL_W - 1)) st <= S_KEY_MIX;
        end
        S_KEY_MIX: begin
          cnt <= '0;
          st  <= S_MISALIGN;
        end
        S_MISALIGN: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(MISALIGN_CYC - 1)) st <= S_CHAL_MIX;
        end
        S_CHAL_MIX: begin
          cnt <= '0;
          st  <= S_WARMUP;
        end
        S_WARMUP: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(WARMUP_CYC - 1)) begin
            cnt <= '0;
            st  <= S_FLUSH;
          end
        end
        S_FLUSH: begin
          cnt <= cnt + 8'd1;
          if (cnt == 8'(FLUSH_CYC - 1)) begin
            bcnt <= '0;
            ones <= '0;
            st   <= S_EVAL_TRIG;
          end
        end
        S_EVAL_TRIG: begin
          cnt <= '0;
          st  <= S_EVAL_WAIT;
        end
        S_EVAL_WAIT: begin
          cnt <= cnt + 8'd1;
          if (cnt == LAT_M1) begin
            ones <= ones + 4'(puf_resp);
            bcnt <= bcnt + 8'd1;
            if (bcnt == 8'(N_EVAL - 1)) begin
              maj_q <= (ones + 4'(puf_resp)) > 4'(N_EVAL / 2);
              st    <= S_OUT;
            end else begin
              st <= S_EVAL_TRIG;
            end
          end
        end
        S_OUT: begin
          cnt  <= '0;
          rcnt <= rcnt + 8'd1;
          st   <= (rcnt + 8'd1 >= n_resp) ? S_DONE : S_FLUSH;
        end
        S_DONE: if (!start) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (st)
      S_LOAD_UNST:                      nl_op = NL_LOAD_UNST;
      S_NL_SEED:                        nl_op = NL_SEED;
      S_KEY_MIX:                        nl_op = NL_KEY_MIX;
      S_CHAL_MIX:                       nl_op = NL_CHAL_MIX;
      S_MISALIGN, S_WARMUP, S_FLUSH:    nl_op = NL_STEP;
      default:                          nl_op = NL_HOLD;
    endcase
    unmask_en       = st inside {S_SEED_TRIG, S_SEED_WAIT, S_EVAL_TRIG, S_EVAL_WAIT};
    puf_trig        = st inside {S_SEED_TRIG, S_EVAL_TRIG};
    prng_seed_en    = st inside {S_LOAD_UNST, S_SEED_TRIG, S_SEED_WAIT, S_SEED_SHIFT};
    prng_seed_shift = (st == S_SEED_SHIFT);
    prng_seed_bit   = seed_q;
    resp_valid      = (st == S_OUT);
    resp_bit        = maj_q;
    busy            = (st != S_IDLE) && (st != S_DONE);
    done            = (st == S_DONE);
  end

  // The shares may only be combined while the PUF is being evaluated.
  a_no_unmask_in_warmup: assert property (@(posedge clk) disable iff (!rst_n)
    (st inside {S_NL_SEED, S_KEY_MIX, S_MISALIGN, S_CHAL_MIX, S_WARMUP, S_FLUSH}) |-> !unmask_en);

endmodule
