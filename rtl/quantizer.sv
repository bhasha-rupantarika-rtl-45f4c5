// quantizer: quantisation of matrix-engine results for the shared buffer.
//
// fp = 1: a BF16 value is converted to FP8 (E4M3, bias 7).  The exponent is
//   rebiased, the mantissa truncated from 7 to 3 bits; values above 448
//   saturate to +-448, values below the smallest E4M3 normal (2^-6) flush
//   to signed zero.
// fp = 0: a 16-bit integer result is scaled down by an arithmetic right
//   shift of `shift` places and saturated to INT8.
// Combinational.  The quantisation stage between the matrix engine and
// the shared buffer is part of the design; its formats and rules are this
// implementation's choices.
module quantizer (
  input  logic        fp,
  input  logic [3:0]  shift,
  input  logic [15:0] d,
  output logic [7:0]  q
);
  logic signed [9:0]  e;    // E4M3 biased exponent
  logic signed [15:0] sv;   // shifted integer

  always_comb begin
    e  = $signed({2'b00, d[14:7]}) - 10'sd120;
    sv = $signed(d) >>> shift;
    if (fp) begin
      if (d[14:7] == 8'd0 || e < 1)         q = {d[15], 7'h00};
      else if (e > 15 || (e == 15 && d[6:4] == 3'b111)) q = {d[15], 7'h7e};
      else                                  q = {d[15], e[3:0], d[6:4]};
    end else begin
      if (sv > 16'sd127)       q = 8'h7f;
      else if (sv < -16'sd128) q = 8'h80;
      else                     q = sv[7:0];
    end
  end
endmodule
