// masked_and: first-order Boolean-masked AND of two 2-share inputs.
//
// With x = x1^x2 and y = y1^y2 the output shares are
//   z1 = ((x1 & y1) ^ (x1 | ~y2)) ^ r
//   z2 = ((x2 & y1) ^ (x2 | ~y2)) ^ r
// so that z1 ^ z2 = x & y. Each share uses one AND, one OR and the shared
// inverter on y2, as in the paper's masked AND drawing, and both output
// shares are remasked with the same fresh random bit r every cycle.
// Purely combinational; the inputs come straight from state registers, so
// no glitchy logic precedes the gate.
module masked_and (
  input  logic x1, x2,  // shares of x
  input  logic y1, y2,  // shares of y
  input  logic r,       // fresh random remask bit
  output logic z1, z2   // shares of x & y
);

  logic y2_n;

  always_comb begin
    y2_n = ~y2;
    z1   = ((x1 & y1) ^ (x1 | y2_n)) ^ r;
    z2   = ((x2 & y1) ^ (x2 | y2_n)) ^ r;
  end

endmodule
