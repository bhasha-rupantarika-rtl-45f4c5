// simd_mac: five-stage SIMD multiply-accumulate unit of the NLPE.
//
// Each cycle it takes two 24-bit SIMD operands A and B and multiplies them
// lane by lane in one of four precisions (mode):
//   INT4 : 6 lanes of 4-bit two's complement, A[4i+3:4i]
//   FP4  : 6 lanes of E2M1 (bias 1),          A[4i+3:4i]
//   FP8  : 3 lanes of E4M3 (bias 7),          A[8i+7:8i]
//   BF16 : 1 lane,                            A[15:0]
// The lane products and one addend C are summed into an accumulator
// ("quire") that spans the beats of a dot product: the beat flagged `first`
// starts it from C, the beat flagged `last` releases the normalised result.
// A single beat with first and last both set is a plain multi-lane
// multiply-add.  Result format: INT4 -> INT16, FP4 -> FP8 (E4M3, out[7:0]),
// FP8 -> BF16, BF16 -> BF16; C uses the same format as the result so that a
// result can be fed back as the next addend.
//
// Pipeline (one operand pair per cycle, result 5 cycles after `last`):
//   S1 input processing decoder: sign, exponent and mantissa (hidden bit
//      restored, exponent field 0 read as subnormal) of every lane and of C.
//   S2 RMMEC array: six 4x4 nibble multipliers (rmmec) form the mantissa
//      products; BF16 uses four of them as the nibble slices of one 8x8
//      product.  The exponent comparator finds the largest product exponent.
//   S3 subtractor array and alignment: each product (with GUARD extra low
//      bits) is shifted right by its distance to the maximum exponent, then
//      all terms are added.
//   S4 accumulation: the block sum and the running quire are aligned to
//      the larger of their exponents and added; when the sum nears the top of
//      the quire it is shifted down one place (exponent recalibration).
//   S5 normalisation: leading-one detection, truncation of the mantissa,
//      restructuring into the output format.  Overflow saturates to the
//      largest finite value and raises `exc`; results below the smallest
//      normal number flush to zero.
//
// The precisions and lane counts, the 24-bit operands, the five stages, the
// RMMEC nibble array, max-exponent alignment with a subtractor array,
// leading-zero normalisation, truncation and the exception flag follow the
// design.  The lane formats (E2M1, E4M3), the output format per mode, the
// 16-bit addend, the first/last accumulation protocol, the guard bits and
// flush-to-zero are this implementation's choices.  The RMMECs are used in
// multiply mode only; exponent comparison is done by a separate comparator.
//
// The compare outputs (max_o) of the RMMEC blocks are left unused, since
// exponents are compared by a separate comparator; normalisation keeps
// only the leading bits of the shifted quire.  The linter lists both as
// unused.
module simd_mac
  import nlpe_pkg::*;
#(
  parameter int GUARD = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        first,
  input  logic        last,
  input  mac_mode_e   mode,
  input  logic [23:0] a,
  input  logic [23:0] b,
  input  logic [15:0] c,
  output logic        out_valid,
  output logic [15:0] out,
  output logic        exc
);
  localparam int NT = 7;                 // 6 product terms + addend
  localparam int SW = 16 + GUARD + 4;    // block-sum width (signed)
  localparam int AW = 48;                // quire width (signed)
  localparam int EXW = 12;               // exponent width (signed)

  typedef logic signed [EXW-1:0] exp_t;

  // ---------------------------------------------------------------- helpers
  // Decoded floating/int operand: magnitude, exponent of its LSB, sign.
  typedef struct packed {
    logic        s;
    logic [15:0] m;
    exp_t        e;
  } dec_t;

  function automatic dec_t dec_int4(input logic [3:0] x);
    dec_t d;
    d.s = x[3];
    d.m = 16'(x[3] ? 4'(-x) : x);
    d.e = '0;
    return d;
  endfunction

  function automatic dec_t dec_fp(input logic [15:0] x, input int eb, input int mb, input int bias);
    // generic sign/exponent/mantissa decoder, eb exponent bits, mb fraction bits
    dec_t d;
    int   ef, mf;
    ef  = int'((x >> mb) & ((1 << eb) - 1));
    mf  = int'(x & 16'((1 << mb) - 1));
    d.s = x[eb + mb];
    d.m = 16'((ef != 0) ? (mf | (1 << mb)) : mf);
    d.e = exp_t'(((ef == 0) ? 1 : ef) - bias - mb);
    return d;
  endfunction

  function automatic logic signed [AW-1:0] ashr(input logic signed [AW-1:0] x, input int sh);
    if (sh >= AW) return (x < 0) ? '1 : '0;
    return x >>> sh;
  endfunction

  // ------------------------------------------------- S1: input decoder
  dec_t      s1_a [6];
  dec_t      s1_b [6];
  dec_t      s1_c;
  logic      s1_v, s1_first, s1_last;
  mac_mode_e s1_mode;

  dec_t      da [6];
  dec_t      db [6];
  dec_t      dc;

  always_comb begin
    for (int i = 0; i < 6; i++) begin
      da[i] = '0;
      db[i] = '0;
    end
    dc = '0;
    unique case (mode)
      MODE_INT4: begin
        for (int i = 0; i < 6; i++) begin
          da[i] = dec_int4(a[4*i +: 4]);
          db[i] = dec_int4(b[4*i +: 4]);
        end
        dc.s = c[15];
        dc.m = c[15] ? 16'(-c) : c;
        dc.e = '0;
      end
      MODE_FP4: begin
        for (int i = 0; i < 6; i++) begin
          da[i] = dec_fp(16'(a[4*i +: 4]), 2, 1, FP4_BIAS);
          db[i] = dec_fp(16'(b[4*i +: 4]), 2, 1, FP4_BIAS);
        end
        dc = dec_fp(16'(c[7:0]), 4, 3, FP8_BIAS);
      end
      MODE_FP8: begin
        for (int i = 0; i < 3; i++) begin
          da[i] = dec_fp(16'(a[8*i +: 8]), 4, 3, FP8_BIAS);
          db[i] = dec_fp(16'(b[8*i +: 8]), 4, 3, FP8_BIAS);
        end
        dc = dec_fp(c, 8, 7, BF16_BIAS);
      end
      MODE_BF16: begin
        da[0] = dec_fp(a[15:0], 8, 7, BF16_BIAS);
        db[0] = dec_fp(b[15:0], 8, 7, BF16_BIAS);
        dc    = dec_fp(c, 8, 7, BF16_BIAS);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_mode <= MODE_INT4;
      s1_c <= '0;
      for (int i = 0; i < 6; i++) begin s1_a[i] <= '0; s1_b[i] <= '0; end
    end else begin
      s1_v <= in_valid; s1_first <= first; s1_last <= last; s1_mode <= mode;
      s1_c <= dc;
      for (int i = 0; i < 6; i++) begin s1_a[i] <= da[i]; s1_b[i] <= db[i]; end
    end
  end

  // ------------------------------------- S2: RMMEC array + exponent compare
  logic [3:0] rm_a [6];
  logic [3:0] rm_b [6];
  logic [7:0] rm_p [6];
  logic [3:0] rm_max [6];

  always_comb begin
    for (int i = 0; i < 6; i++) begin
      rm_a[i] = s1_a[i].m[3:0];
      rm_b[i] = s1_b[i].m[3:0];
    end
    if (s1_mode == MODE_BF16) begin
      // nibble slices of the 8-bit BF16 significands
      rm_a[0] = s1_a[0].m[3:0]; rm_b[0] = s1_b[0].m[3:0];   // L x L
      rm_a[1] = s1_a[0].m[3:0]; rm_b[1] = s1_b[0].m[7:4];   // L x H
      rm_a[2] = s1_a[0].m[7:4]; rm_b[2] = s1_b[0].m[3:0];   // H x L
      rm_a[3] = s1_a[0].m[7:4]; rm_b[3] = s1_b[0].m[7:4];   // H x H
      rm_a[4] = '0; rm_b[4] = '0;
      rm_a[5] = '0; rm_b[5] = '0;
    end
  end

  for (genvar g = 0; g < 6; g++) begin : g_rmmec
    rmmec u_rmmec (.mode_cmp(1'b0), .a(rm_a[g]), .b(rm_b[g]), .p(rm_p[g]), .max_o(rm_max[g]));
  end

  logic [15:0] t_m [NT];   // term magnitudes
  exp_t        t_e [NT];   // term LSB exponents
  logic        t_s [NT];   // term signs
  exp_t        emax;

  always_comb begin
    for (int i = 0; i < 6; i++) begin
      t_m[i] = 16'(rm_p[i]);
      t_e[i] = s1_a[i].e + s1_b[i].e;
      t_s[i] = s1_a[i].s ^ s1_b[i].s;
    end
    if (s1_mode == MODE_BF16) begin
      t_m[0] = (16'(rm_p[3]) << 8) + (16'(rm_p[1]) << 4) + (16'(rm_p[2]) << 4) + 16'(rm_p[0]);
      for (int i = 1; i < 6; i++) t_m[i] = '0;
    end
    t_m[6] = s1_first ? s1_c.m : 16'd0;
    t_e[6] = s1_c.e;
    t_s[6] = s1_c.s;
    // exponent difference and comparator: maximum over non-zero terms
    emax = exp_t'(-2048);
    for (int i = 0; i < NT; i++)
      if (t_m[i] != 0 && t_e[i] > emax) emax = t_e[i];
    if (emax == exp_t'(-2048)) emax = '0;
  end

  logic [15:0] s2_m [NT];
  exp_t        s2_e [NT];
  logic        s2_s [NT];
  exp_t        s2_emax;
  logic        s2_v, s2_first, s2_last;
  mac_mode_e   s2_mode;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_first <= 1'b0; s2_last <= 1'b0; s2_mode <= MODE_INT4;
      s2_emax <= '0;
      for (int i = 0; i < NT; i++) begin s2_m[i] <= '0; s2_e[i] <= '0; s2_s[i] <= 1'b0; end
    end else begin
      s2_v <= s1_v; s2_first <= s1_first; s2_last <= s1_last; s2_mode <= s1_mode;
      s2_emax <= emax;
      for (int i = 0; i < NT; i++) begin s2_m[i] <= t_m[i]; s2_e[i] <= t_e[i]; s2_s[i] <= t_s[i]; end
    end
  end

  // --------------------------------------- S3: subtractor array + alignment
  logic signed [SW-1:0] blk_sum;
  always_comb begin
    blk_sum = '0;
    for (int i = 0; i < NT; i++) begin
      automatic int          sh  = int'(s2_emax - s2_e[i]);
      automatic logic [SW-1:0] al = (sh >= SW) ? '0 : ((SW'(s2_m[i]) << GUARD) >> sh);
      blk_sum = s2_s[i] ? blk_sum - $signed(al) : blk_sum + $signed(al);
    end
  end

  logic signed [SW-1:0] s3_sum;
  exp_t                 s3_e;
  logic                 s3_v, s3_first, s3_last;
  mac_mode_e            s3_mode;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_v <= 1'b0; s3_first <= 1'b0; s3_last <= 1'b0; s3_mode <= MODE_INT4;
      s3_sum <= '0; s3_e <= '0;
    end else begin
      s3_v <= s2_v; s3_first <= s2_first; s3_last <= s2_last; s3_mode <= s2_mode;
      s3_sum <= blk_sum;
      s3_e   <= s2_emax - exp_t'(GUARD);
    end
  end

  // ----------------------------------------------- S4: quire accumulation
  logic signed [AW-1:0] acc_m, acc_m_nx;
  exp_t                 acc_e, acc_e_nx;
  logic                 s4_v;
  mac_mode_e            s4_mode;

  always_comb begin
    automatic logic signed [AW-1:0] base_m = s3_first ? '0 : acc_m;
    automatic exp_t                 base_e = s3_first ? s3_e : acc_e;
    automatic logic signed [AW-1:0] blk_m  = AW'(s3_sum);
    automatic exp_t                 e_new;
    automatic logic signed [AW-1:0] sum;
    if (base_m == 0)       e_new = s3_e;
    else if (blk_m == 0)   e_new = base_e;
    else                   e_new = (base_e > s3_e) ? base_e : s3_e;
    sum = ashr(base_m, int'(e_new - base_e)) + ashr(blk_m, int'(e_new - s3_e));
    if (sum >= (AW'(1) <<< (AW - 2)) || sum < -(AW'(1) <<< (AW - 2))) begin
      sum   = sum >>> 1;
      e_new = e_new + exp_t'(1);
    end
    acc_m_nx = sum;
    acc_e_nx = e_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_m <= '0; acc_e <= '0; s4_v <= 1'b0; s4_mode <= MODE_INT4;
    end else begin
      s4_v    <= s3_v & s3_last;
      s4_mode <= s3_mode;
      if (s3_v) begin
        acc_m <= acc_m_nx;
        acc_e <= acc_e_nx;
      end
    end
  end

  // --------------------- S5: normalisation, rounding and restructuring
  logic [15:0] res;
  logic        res_exc;

  always_comb begin
    automatic logic              sg  = acc_m[AW-1];
    automatic logic [AW-1:0]     mag = sg ? AW'(-acc_m) : AW'(acc_m);
    automatic int                lead = -1;
    automatic logic [AW-1:0]     nrm;
    automatic int                x;
    automatic int                mb, bias, emx;
    automatic logic [6:0]        frac;
    res = '0;
    res_exc = 1'b0;
    for (int i = 0; i < AW; i++) if (mag[i]) lead = i;
    if (s4_mode == MODE_INT4) begin
      automatic logic signed [AW+16-1:0] iv;
      if (acc_e < 0) iv = (AW+16)'(ashr(acc_m, int'(-acc_e)));
      else           iv = (AW+16)'(acc_m) <<< int'(acc_e);
      if (iv > 32767)       begin res = 16'h7fff; res_exc = 1'b1; end
      else if (iv < -32768) begin res = 16'h8000; res_exc = 1'b1; end
      else                  res = iv[15:0];
    end else begin
      if (s4_mode == MODE_FP4) begin mb = 3; bias = FP8_BIAS;  emx = 15;  end
      else                     begin mb = 7; bias = BF16_BIAS; emx = 254; end
      nrm  = (lead >= 0) ? (mag << (AW - 1 - lead)) : '0;
      frac = 7'(nrm[AW-2 -: 7] >> (7 - mb));
      x    = lead + int'(acc_e) + bias;      // biased exponent of the leading one
      if (lead < 0 || x < 1) begin
        res = '0;                                        // zero / flush to zero
      end else if (x > emx || (mb == 3 && x == emx && frac == 7'd7)) begin
        res_exc = 1'b1;                                  // saturate
        res = (mb == 3) ? {8'h00, sg, 7'h7e} : {sg, 15'h7f7f};
      end else if (mb == 3) begin
        res = {8'h00, sg, 4'(x), frac[2:0]};
      end else begin
        res = {sg, 8'(x), frac};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out <= '0; exc <= 1'b0;
    end else begin
      out_valid <= s4_v;
      if (s4_v) begin
        out <= res;
        exc <= res_exc;
      end
    end
  end

endmodule
