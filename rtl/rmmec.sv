// rmmec: 4-bit Reconfigurable Multiplier / Mantissa-Exponent Comparator.
//
// The basic nibble block of the SIMD MAC.  With mode_cmp = 0 it is a 4x4
// unsigned multiplier: the four shifted partial products of a are added
// under control of the bits of b, giving an 8-bit product on p.  With
// mode_cmp = 1 the same block compares two 4-bit exponent slices: it
// forms a - b, returns the larger operand on max_o and packs
// {a >= b, 3'b000, |a - b|} on p, which is what exponent alignment needs
// (the maximum and the distance to it).
//
// Purely combinational.  That a 4-bit block can be switched between
// multiplier and exponent comparator by a mode signal, and that six of them
// form the MAC's multiplier array, follows the design; the internal
// structure and the compare-mode output packing are this implementation's.
module rmmec (
  input  logic       mode_cmp,
  input  logic [3:0] a,
  input  logic [3:0] b,
  output logic [7:0] p,
  output logic [3:0] max_o
);
  logic [7:0] pp [4];
  logic [4:0] diff;
  logic       a_ge_b;

  always_comb begin
    for (int j = 0; j < 4; j++)
      pp[j] = b[j] ? (8'(a) << j) : 8'd0;
    diff   = {1'b0, a} - {1'b0, b};
    a_ge_b = ~diff[4];
    if (mode_cmp) begin
      p     = {a_ge_b, 3'b000, a_ge_b ? diff[3:0] : 4'(-diff[3:0])};
      max_o = a_ge_b ? a : b;
    end else begin
      p     = pp[0] + pp[1] + pp[2] + pp[3];
      max_o = 4'd0;
    end
  end
endmodule
