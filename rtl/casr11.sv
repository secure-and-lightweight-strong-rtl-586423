// casr11: 11-cell hybrid cellular automata shift register (PRNG half).
//
// Null-boundary one-dimensional linear CA. Cell 1 (c[0]) follows rule 150
// (left ^ self ^ right), cells 2..11 follow rule 90 (left ^ right), giving
// the maximum period 2047 from any non-zero state. With the 8-bit LFSR of the
// clock randomizer (period 255, coprime to 2047) it forms the PRNG.
//
// Serial seeding: on a system clock edge with seed_en and seed_tick high the
// cells act as a shift register, c[0] <= seed_in, c[k] <= c[k-1]; c[10]
// (cell 11) is seed_out and feeds the LFSR's serial input, so 11 + 8 = 19
// bits seed both. With seed_en high and seed_tick low the state holds.
// Otherwise the CA steps on every system clock edge.
//
// The rule-150 cell 1 and the neighbour connections follow the paper's CASR
// drawing (cells 4..9, not drawn, are taken as rule 90; the resulting period
// of 2047 confirms the reading). Reset value 11'h001 is this design's choice.
module casr11
  import knl_pkg::*;
(
  input  logic              sys_clk,
  input  logic              rst_n,
  input  logic              seed_en,
  input  logic              seed_tick,
  input  logic              seed_in,
  output logic              seed_out,
  output logic [CASR_W-1:0] c          // c[k-1] is cell k
);

  logic [CASR_W-1:0] nxt;

  always_comb begin
    // left neighbour, right neighbour, and the self term of cell 1
    nxt      = {c[CASR_W-2:0], 1'b0} ^ {1'b0, c[CASR_W-1:1]}
             ^ {{(CASR_W-1){1'b0}}, c[0]};
    seed_out = c[CASR_W-1];
  end

  always_ff @(posedge sys_clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= CASR_W'(1);
    end else if (seed_en) begin
      if (seed_tick) c <= {c[CASR_W-2:0], seed_in};
    end else begin
      c <= nxt;
    end
  end

endmodule
