// tb_fasst: self-checking test of the activation-function unit.
//
// ReLU, EXP, Sigmoid, Tanh, Swish and GeLU (x * sigmoid(1.702 x)) are
// applied to random BF16 values and random
// FP8 pairs in (-8, 8); results are decoded and compared with $exp-based
// reference values within the output format's truncation error plus the
// fixed-point resolution (2^-11 absolute for BF16, 2^-6 for FP8).  A
// softmax over random vectors of 2..12 BF16 values (accumulate pass, then
// normalise pass) is checked the same way.  The start-to-done cycle count
// of every operation must match its fixed latency.
module tb_fasst;
  import nlpe_pkg::*;
  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0, clr = 1'b0;
  af_sel_e     af_sel = AF_RELU;
  prec_sel_e   prec_sel = PREC_BF16;
  logic [15:0] din = '0;
  logic        busy, done;
  logic [15:0] dout;
  int checks = 0, failures = 0;

  fasst dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction
  function automatic real bf(input logic [15:0] x);
    real v = (x[14:7] == 0) ? 0.0 : real'(128 + x[6:0]) * p2(int'(x[14:7]) - 134);
    return x[15] ? -v : v;
  endfunction
  function automatic real f8(input logic [7:0] x);
    real v = (x[6:3] == 0) ? real'(x[2:0]) * p2(-9) : real'(8 + x[2:0]) * p2(int'(x[6:3]) - 10);
    return x[7] ? -v : v;
  endfunction
  function automatic real absr(input real x);
    return x < 0 ? -x : x;
  endfunction
  function automatic real f_ref(input af_sel_e f, input real x);
    case (f)
      AF_RELU:    return x > 0 ? x : 0.0;
      AF_SIGMOID: return 1.0 / (1.0 + $exp(-x));
      AF_TANH:    return ($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x));
      AF_SWISH:   return x / (1.0 + $exp(-x));
      AF_GELU:    return x / (1.0 + $exp(-1.702 * x));
      default:    return $exp(x);
    endcase
  endfunction
  function automatic int lat(input af_sel_e f);
    case (f)
      AF_RELU:                 return 3;
      AF_SIGMOID, AF_TANH, AF_SWISH, AF_GELU: return 38;
      default:                 return 21;
    endcase
  endfunction

  function automatic logic [15:0] rnd_bf();
    return {1'($urandom), 8'($urandom_range(118, 129)), 7'($urandom)};
  endfunction
  function automatic logic [7:0] rnd_f8();
    return {1'($urandom), 4'($urandom_range(1, 9)), 3'($urandom)};
  endfunction

  int cyc;
  task automatic op(input af_sel_e f, input prec_sel_e p, input logic [15:0] d);
    @(negedge clk);
    af_sel = f; prec_sel = p; din = d; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic chk(input real got, input real expv, input logic isbf, input string what);
    real tol = isbf ? absr(expv) * p2(-6) + p2(-11) : absr(expv) * p2(-3) + p2(-6);
    if (!isbf && absr(expv) > 448.0) tol = absr(expv);   // saturation
    checks++;
    if (absr(got - expv) > tol) begin
      failures++;
      $display("FAIL %s got %g expected %g", what, got, expv);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      automatic int     fi = $urandom_range(0, 5);
      automatic af_sel_e f = af_sel_e'(fi < 4 ? fi : fi + 2);   // all but the softmax passes
      if (t % 2 == 0) begin
        automatic logic [15:0] x = rnd_bf();
        op(f, PREC_BF16, x);
        chk(bf(dout), f_ref(f, bf(x)), 1'b1, $sformatf("bf16 f%0d x=%g", f, bf(x)));
        checks++;
        if (cyc != lat(f)) begin failures++; $display("FAIL latency f%0d %0d", f, cyc); end
      end else begin
        automatic logic [7:0] x0 = rnd_f8(), x1 = rnd_f8();
        op(f, PREC_FP8, {x1, x0});
        chk(f8(dout[7:0]),  f_ref(f, f8(x0)), 1'b0, $sformatf("fp8 lo f%0d x=%g", f, f8(x0)));
        chk(f8(dout[15:8]), f_ref(f, f8(x1)), 1'b0, $sformatf("fp8 hi f%0d x=%g", f, f8(x1)));
        checks++;
        if (cyc != 2 * lat(f) - 1) begin failures++; $display("FAIL latency fp8 f%0d %0d", f, cyc); end
      end
    end
    // softmax
    for (int t = 0; t < 20; t++) begin
      automatic int n = $urandom_range(2, 12);
      automatic real xs[] = new[n];
      automatic real s = 0.0;
      @(negedge clk);
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      for (int i = 0; i < n; i++) begin
        automatic logic [15:0] x = {1'($urandom), 8'($urandom_range(118, 128)), 7'($urandom)};
        xs[i] = bf(x);
        s += $exp(xs[i]);
        op(AF_SMAX_ACC, PREC_BF16, x);
        chk(bf(dout), $exp(xs[i]), 1'b1, "softmax exp");
      end
      for (int i = 0; i < n; i++) begin
        op(AF_SMAX_NORM, PREC_BF16, 16'h0000);
        chk(bf(dout), $exp(xs[i]) / s, 1'b1, $sformatf("softmax %0d/%0d", i, n));
        checks++;
        if (cyc != 20) begin failures++; $display("FAIL latency softmax %0d", cyc); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
