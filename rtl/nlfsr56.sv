// nlfsr56: unmasked keyed NLFSR challenge register (56 bits).
//
// Holds the obfuscated challenge of the strong PUF. On NL_CHAL_MIX it loads
// key ^ external challenge in parallel; on NL_STEP it advances the coupled
// 29-bit + 27-bit NLFSR one step (see knl_pkg::nlfsr_step); on NL_LOAD_UNST
// it loads the enrolled unstable challenge used to draw random bits from the
// PUF. Other operations hold the state. The state is the challenge applied
// to the PUF: there is no separate challenge register.
//
// Timing: one operation per rising edge of clk (the randomized core clock).
// Asynchronous active-low reset clears the state.
// The feedback, coupling and parallel key^challenge load follow the paper;
// the operation encoding and the unstable-challenge load path are this
// design's own.
module nlfsr56
  import knl_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  nl_op_e op,
  input  chal_t  key,        // secret key (single share)
  input  chal_t  chal,       // external challenge
  input  chal_t  unst_chal,  // enrolled challenge with unstable responses
  output chal_t  state       // obfuscated challenge to the PUF
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
    end else begin
      unique case (op)
        NL_STEP:      state <= nlfsr_step(state);
        NL_CHAL_MIX:  state <= key ^ chal;
        NL_LOAD_UNST: state <= unst_chal;
        default:      state <= state;
      endcase
    end
  end

endmodule
