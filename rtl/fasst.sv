// fasst: CORDIC-based Floating-point Activation function unit for
// SoftMax, Sigmoid and Tanh (plus ReLU and a plain exponential).
//
// One operation takes a 16-bit input word holding one BF16 value or two FP8
// (E4M3) values (prec_sel) and returns the same packing on dout.  Inside,
// each value is converted to signed fixed point (16 fraction bits, clamped
// to |x| < 8) and run through up to two iterative CORDIC engines:
//
//   FP CORDIC exponential unit:  t = a*log2(e) is split into integer k and
//     fraction f (the first multiplier); e^(f ln2) is computed by 16
//     hyperbolic rotation-mode iterations (i = 1..14, with i = 4 and 13
//     repeated, started from x = 1/K, y = 0, z = f ln2) as x + y; the result
//     is scaled by 2^k (the second multiplier).
//   FP CORDIC division unit: N/D by 17 linear vectoring-mode iterations,
//     which reduce to non-restoring division (quotient digits +-1, 16
//     fraction bits, |N/D| < 2).
//
// The reconfigurable logic routes the two engines and the two adders:
//   ReLU      max(x, 0)                           no CORDIC
//   EXP       e^x                                 exponential only
//   Sigmoid   1 / (1 + e^-x)                      exp, adder, division
//   Tanh      sgn(x) (1 - e^-2|x|) / (1 + e^-2|x|) exp, both adders, division
//   SMAX_ACC  C[n] = e^x, sum += e^x, outputs e^x  (softmax pass 1)
//   SMAX_NORM outputs C[i] / sum, i = 0, 1, ...   (softmax pass 2)
//   Swish     x * sigmoid(x)                      sigmoid, then multiplier
//   GeLU      x * sigmoid(1.702 x)                input multiplier, sigmoid,
//                                                 output multiplier
// `clr` empties the softmax buffer C1..Cn (SMAX_N entries) and the sum.
// The fixed-point result is converted back to BF16 or E4M3 by leading-one
// detection and truncation (E4M3 saturates at 448, flushes below 2^-6).
//
// Handshake: `start` (with din, af_sel, prec_sel) is accepted while
// `busy` is low; `done` pulses for one cycle with dout valid and dout holds
// until the next operation.  Cycles L from the cycle in which start is
// seen to the cycle in which done is high: ReLU 3, EXP and SMAX_ACC 21,
// Sigmoid, Tanh, Swish and GeLU 38, SMAX_NORM 20 for a BF16 value; an FP8 pair runs
// the two values one after the other and takes 2L - 1.
//
// The CORDIC exponential and division units, the adders, the softmax
// buffer C1..Cn, the reconfigurable output logic, the 3-bit AF_sel, the
// 2-bit Prec_sel and the 16-bit input and output follow the design.  The
// function encodings, the sigmoid form of GeLU (a common approximation),
// the fixed-point format, the iteration counts, range
// reduction, clamping and sequential FP8 lanes are this implementation's.
//
// rst_n is the asynchronous reset of every register and also the disable
// condition of the handshake assertions, which sample it on the clock; the
// linter reports that second, verification-only use as a synchronous one.
// The normalisation function keeps only the leading bits of its shifted
// value, and the upper byte of the FP8 result staging register is unused
// (the two FP8 values are produced one after the other); the linter lists
// both as unused bits.
module fasst
  import nlpe_pkg::*;
#(
  parameter int SMAX_N = 16,
  localparam int SB = $clog2(SMAX_N)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        clr,
  input  af_sel_e     af_sel,
  input  prec_sel_e   prec_sel,
  input  logic [15:0] din,
  output logic        busy,
  output logic        done,
  output logic [15:0] dout
);
  localparam int FW  = 41;                       // fixed-point width, 16 fraction bits
  localparam int CW  = 32;                       // CORDIC width, 24 fraction bits
  localparam logic signed [FW-1:0] ONE   = FW'(65536);
  localparam logic signed [FW-1:0] CLAMP = FW'(8 * 65536 - 1);
  localparam logic signed [FW-1:0] LOG2E = FW'(94548);      // log2(e)  * 2^16
  localparam logic signed [FW-1:0] GELUB = FW'(111542);     // 1.702    * 2^16
  localparam logic signed [CW-1:0] LN2   = CW'(11629080);   // ln(2)    * 2^24
  localparam logic signed [CW-1:0] INVK  = CW'(20258439);   // 1/K_hyp  * 2^24
  localparam int ITER_EXP = 16;
  localparam int ITER_DIV = 17;

  typedef logic signed [FW-1:0] fix_t;
  typedef logic signed [CW-1:0] cor_t;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_EPRE, S_EROT, S_EPOST, S_DIV, S_WRITE} state_e;
  state_e state;

  // ---------------------------------------------------------------- helpers
  // atanh(2^-i) * 2^24; for i >= 8 it equals 2^(24-i) to the last bit
  function automatic cor_t atanh_tab(input int i);
    case (i)
      1: return cor_t'(9215828);
      2: return cor_t'(4285116);
      3: return cor_t'(2108178);
      4: return cor_t'(1049945);
      5: return cor_t'(524459);
      6: return cor_t'(262165);
      7: return cor_t'(131075);
      default: return cor_t'(1) <<< (24 - i);
    endcase
  endfunction

  // iteration index of step s: 1,2,3,4,4,5,...,13,13,14
  function automatic int hyp_idx(input int s);
    if (s < 4)  return s + 1;
    if (s < 14) return s;
    return s - 1;
  endfunction

  // FP8 (E4M3) or BF16 -> fixed point, clamped to |x| < 8
  function automatic fix_t to_fix(input logic [15:0] v, input logic bf);
    logic       s;
    int         e, m, sh;
    fix_t       mag;
    if (bf) begin
      s = v[15]; e = int'(v[14:7]); m = int'(v[6:0]) | ((e != 0) ? 128 : 0);
      if (e == 0) e = 1;
      sh = e - 118;                       // e - 127 - 7 + 16
    end else begin
      s = v[7];  e = int'(v[6:3]);  m = int'(v[2:0]) | ((e != 0) ? 8 : 0);
      if (e == 0) e = 1;
      sh = e + 6;                         // e - 7 - 3 + 16
    end
    if (sh >= 20)      mag = CLAMP;
    else if (sh >= 0)  mag = fix_t'(m) <<< sh;
    else if (sh > -24) mag = fix_t'(m) >>> (-sh);
    else               mag = '0;
    if (mag > CLAMP) mag = CLAMP;
    return s ? -mag : mag;
  endfunction

  // fixed point (16 fraction bits) -> E4M3 in [7:0] or BF16, truncating
  function automatic logic [15:0] to_fp(input fix_t v, input logic bf);
    logic       s;
    fix_t       mag;
    int         lead, x;
    logic [FW-1:0] nrm;
    logic [6:0] fr;
    s    = v[FW-1];
    mag  = s ? -v : v;
    lead = -1;
    for (int i = 0; i < FW; i++) if (mag[i]) lead = i;
    if (lead < 0) return 16'h0000;
    nrm = FW'(mag) << (FW - 1 - lead);
    fr  = nrm[FW-2 -: 7];
    if (bf) begin
      x = lead - 16 + 127;
      if (x < 1) return 16'h0000;
      return {s, 8'(x), fr};
    end
    x = lead - 16 + 7;
    if (x < 1) return 16'h0000;
    if (x > 15 || (x == 15 && fr[6:4] == 3'b111)) return {8'h00, s, 7'h7e};
    return {8'h00, s, 4'(x), fr[6:4]};
  endfunction

  // ---------------------------------------------------------------- state
  af_sel_e     op;
  logic        bf, lane, neg;
  logic [15:0] src;
  fix_t        exp_arg, den, res;
  cor_t        cx, cy, cz;
  fix_t        kexp;
  logic [4:0]  step;
  fix_t        rr, qq;
  logic [31:0] cbuf [SMAX_N];
  logic [39:0] sum;
  logic [SB:0] cnt, rdp;
  logic [15:0] dout_n;
  fix_t        xin;

  fix_t        t_prod;
  cor_t        cdx, cdy;
  int          hi;

  always_comb begin
    t_prod = (exp_arg * LOG2E) >>> 16;            // a * log2(e), 16 fraction bits
    hi     = hyp_idx(int'(step));
    cdx    = cy >>> hi;
    cdy    = cx >>> hi;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; dout <= '0; dout_n <= '0;
      op <= AF_RELU; bf <= 1'b0; lane <= 1'b0; neg <= 1'b0; src <= '0;
      exp_arg <= '0; den <= ONE; res <= '0; xin <= '0;
      cx <= '0; cy <= '0; cz <= '0; kexp <= '0; step <= '0; rr <= '0; qq <= '0;
      sum <= '0; cnt <= '0; rdp <= '0;
      for (int i = 0; i < SMAX_N; i++) cbuf[i] <= '0;
    end else begin
      done <= 1'b0;
      if (clr && state == S_IDLE) begin
        sum <= '0; cnt <= '0; rdp <= '0;
      end
      unique case (state)
        S_IDLE: if (start) begin
          op    <= af_sel;
          bf    <= (prec_sel == PREC_BF16);
          src   <= din;
          lane  <= 1'b0;
          dout_n <= '0;
          state <= S_LOAD;
        end
        // pick the value, apply the input-side routing
        S_LOAD: begin
          automatic fix_t x = to_fix(lane ? {8'h00, src[15:8]} : src, bf);
          neg <= x[FW-1];
          xin <= x;
          unique case (op)
            AF_RELU:    begin res <= x[FW-1] ? '0 : x; state <= S_WRITE; end
            AF_SIGMOID, AF_SWISH: begin exp_arg <= -x; state <= S_EPRE; end
            AF_GELU:    begin exp_arg <= -((x * GELUB) >>> 16); state <= S_EPRE; end
            AF_TANH:    begin exp_arg <= x[FW-1] ? (x <<< 1) : -(x <<< 1); state <= S_EPRE; end
            AF_SMAX_NORM: begin
              den   <= (sum == 0) ? ONE : fix_t'(sum);
              rr    <= fix_t'(cbuf[rdp[SB-1:0]]);
              qq    <= '0;
              step  <= '0;
              rdp   <= rdp + 1'b1;
              state <= S_DIV;
            end
            default:    begin exp_arg <= x; state <= S_EPRE; end   // EXP, SMAX_ACC
          endcase
        end
        // range reduction: a*log2e = k + f, z0 = f*ln2
        S_EPRE: begin
          kexp  <= t_prod >>> 16;
          cz    <= cor_t'((t_prod[15:0] * 48'(LN2)) >> 16);
          cx    <= INVK;
          cy    <= '0;
          step  <= '0;
          state <= S_EROT;
        end
        // hyperbolic rotation iterations
        S_EROT: begin
          if (!cz[CW-1]) begin
            cx <= cx + cdx; cy <= cy + cdy; cz <= cz - atanh_tab(hi);
          end else begin
            cx <= cx - cdx; cy <= cy - cdy; cz <= cz + atanh_tab(hi);
          end
          step <= step + 1'b1;
          if (int'(step) == ITER_EXP - 1) state <= S_EPOST;
        end
        // scale by 2^k and route the exponential
        S_EPOST: begin
          automatic fix_t e24 = fix_t'(cx + cy);
          automatic fix_t ev  = (kexp >= 8) ? (e24 <<< (kexp - 8)) : (e24 >>> (8 - kexp));
          unique case (op)
            AF_SIGMOID, AF_SWISH, AF_GELU: begin
              den <= ONE + ev; rr <= ONE; qq <= '0; step <= '0; state <= S_DIV;
            end
            AF_TANH: begin
              den <= ONE + ev; rr <= ONE - ev; qq <= '0; step <= '0; state <= S_DIV;
            end
            AF_SMAX_ACC: begin
              if (int'(cnt) < SMAX_N) begin
                cbuf[cnt[SB-1:0]] <= ev[31:0];
                cnt <= cnt + 1'b1;
              end
              sum   <= sum + ev[39:0];
              res   <= ev;
              state <= S_WRITE;
            end
            default: begin res <= ev; state <= S_WRITE; end
          endcase
        end
        // non-restoring (linear vectoring CORDIC) division
        S_DIV: begin
          if (!rr[FW-1]) begin
            rr <= (rr - den) <<< 1;
            qq <= qq + (fix_t'(1) <<< (16 - int'(step)));
          end else begin
            rr <= (rr + den) <<< 1;
            qq <= qq - (fix_t'(1) <<< (16 - int'(step)));
          end
          step <= step + 1'b1;
          if (int'(step) == ITER_DIV - 1) begin
            state <= S_WRITE;
          end
        end
        S_WRITE: begin
          automatic fix_t r = res;
          automatic logic [15:0] f;
          if (op == AF_SIGMOID || op == AF_SMAX_NORM) r = qq;
          if (op == AF_TANH) r = neg ? -qq : qq;
          if (op == AF_SWISH || op == AF_GELU) begin  // x * sigmoid(b x)
            automatic logic signed [47:0] pm = 48'(xin) * 48'(qq);
            r = fix_t'(pm >>> 16);
          end
          if (r[FW-1] && op != AF_TANH && op != AF_SWISH && op != AF_GELU) r = '0;  // rounding residue below zero
          f = to_fp(r, bf);
          if (bf) begin
            dout  <= f;
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (!lane) begin
            dout_n[7:0] <= f[7:0];
            lane  <= 1'b1;
            state <= S_LOAD;
          end else begin
            dout  <= {f[7:0], dout_n[7:0]};
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("fasst: start while busy");
endmodule
