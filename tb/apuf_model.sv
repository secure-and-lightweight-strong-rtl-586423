// apuf_model: behavioural stand-in for the 56-stage arbiter PUF.
//
// Not synthesizable logic: a simulation model with the PUF's port. On a
// rising clk edge with trig high it evaluates the challenge and holds the
// bit on resp until the next trigger. The response of a stable challenge is
// the additive delay model knl_ref_pkg::apuf_ideal; to exercise the
// repeated-evaluation vote it flips the 2nd and 5th of every run of
// consecutive evaluations of the same challenge (2 of 7, so the majority is
// still the ideal bit). The enrolled unstable challenge (unst) answers with
// random bits. flips and unstable_evals count these events.
module apuf_model
  import knl_ref_pkg::*;
(
  input  logic        clk,
  input  logic [55:0] chal,
  input  logic        trig,
  input  logic [55:0] unst,
  output logic        resp,
  output int          flips,
  output int          unstable_evals,
  output int          evals
);

  logic [55:0] last_chal;
  int          run;

  initial begin
    resp = 1'b0;
    flips = 0;
    unstable_evals = 0;
    evals = 0;
    run = 0;
    last_chal = '0;
  end

  always @(posedge clk) begin
    if (trig) begin
      evals++;
      if (chal == unst) begin
        resp <= 1'($urandom);
        unstable_evals++;
        run = 0;
      end else begin
        run = (chal == last_chal) ? run + 1 : 0;
        if (run % 7 == 1 || run % 7 == 4) begin
          resp <= ~apuf_ideal(chal);
          flips++;
        end else begin
          resp <= apuf_ideal(chal);
        end
      end
      last_chal = chal;
    end
  end

endmodule
