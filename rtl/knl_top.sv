// knl_top: test-chip top with the two keyed-NLFSR obfuscation variants.
//
// Holds, side by side and sharing only sys_clk and rst_n:
//   u_plain  (nlfsr_apuf)         unmasked NLFSR with clock randomization
//   u_masked (nlfsr_apuf_masked)  masked NLFSR, clock randomization, CASR PRNG
// Each variant has its own request port (u_* / m_*), its own randomized core
// clock output and its own strong-PUF port: the 56-stage arbiter PUFs, the
// secret-key store (OTP flash or weak PUF) and the non-volatile copy of the
// unstable challenge are outside this RTL and connect through these ports.
// All request, response and PUF signals of a variant are timed by its
// *_core_clk output.
// The pairing of the two variants follows the paper's test chip, which also
// holds an LFSR-based baseline that is not part of this design. Separate
// ports per variant are this design's choice.
module knl_top
  import knl_pkg::*;
(
  input  logic       sys_clk,
  input  logic       rst_n,
  // unmasked variant
  input  logic       u_start,
  input  logic [7:0] u_n_resp,
  input  chal_t      u_key,
  input  chal_t      u_chal,
  input  chal_t      u_unst_chal,
  output logic       u_busy,
  output logic       u_done,
  output logic       u_resp_bit,
  output logic       u_resp_valid,
  output logic       u_core_clk,
  output chal_t      u_puf_chal,
  output logic       u_puf_trig,
  input  logic       u_puf_resp,
  // masked variant
  input  logic       m_start,
  input  logic [7:0] m_n_resp,
  input  chal_t      m_key_s1,
  input  chal_t      m_key_s2,
  input  chal_t      m_chal,
  input  chal_t      m_unst_chal,
  output logic       m_busy,
  output logic       m_done,
  output logic       m_resp_bit,
  output logic       m_resp_valid,
  output logic       m_core_clk,
  output chal_t      m_puf_chal,
  output logic       m_puf_trig,
  input  logic       m_puf_resp
);

  nlfsr_apuf u_plain (
    .sys_clk, .rst_n,
    .start      (u_start),
    .n_resp     (u_n_resp),
    .key        (u_key),
    .chal       (u_chal),
    .unst_chal  (u_unst_chal),
    .busy       (u_busy),
    .done       (u_done),
    .resp_bit   (u_resp_bit),
    .resp_valid (u_resp_valid),
    .core_clk   (u_core_clk),
    .puf_chal   (u_puf_chal),
    .puf_trig   (u_puf_trig),
    .puf_resp   (u_puf_resp)
  );

  nlfsr_apuf_masked u_masked (
    .sys_clk, .rst_n,
    .start      (m_start),
    .n_resp     (m_n_resp),
    .key_s1     (m_key_s1),
    .key_s2     (m_key_s2),
    .chal       (m_chal),
    .unst_chal  (m_unst_chal),
    .busy       (m_busy),
    .done       (m_done),
    .resp_bit   (m_resp_bit),
    .resp_valid (m_resp_valid),
    .core_clk   (m_core_clk),
    .puf_chal   (m_puf_chal),
    .puf_trig   (m_puf_trig),
    .puf_resp   (m_puf_resp)
  );

endmodule
