// tb_nmv: self-checking test of the non-linear vector array with 3 lanes.
//
// A shared buffer model (registered read) is filled with random BF16 words
// or FP8 pairs; vectors of random length are run through ReLU, EXP,
// Sigmoid, Tanh and SoftMax, and every word of the NMV memory buffer is
// compared with $exp-based reference values.  For the element-wise
// functions the run must finish in well under len times the single-lane
// latency, which shows the lanes working in parallel.
module tb_nmv;
  import nlpe_pkg::*;
  localparam int LANES = 3, DEPTH = 32;
  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  af_sel_e     af_sel = AF_RELU;
  prec_sel_e   prec_sel = PREC_BF16;
  logic [7:0]  len = 8'd1;
  logic        busy, done;
  logic [4:0]  sh_raddr, ob_raddr = '0;
  logic [15:0] sh_rdata, ob_rdata;
  logic [15:0] shm [DEPTH];
  int checks = 0, failures = 0, n_parallel = 0;

  nmv #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) sh_rdata <= shm[sh_raddr];

  initial begin
    #20000000;
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
      default:    return $exp(x);
    endcase
  endfunction

  task automatic chk(input real got, input real expv, input logic isbf, input string what);
    real tol = isbf ? absr(expv) * p2(-6) + p2(-11) : absr(expv) * p2(-3) + p2(-6);
    if (!isbf && absr(expv) > 448.0) tol = absr(expv);
    checks++;
    if (absr(got - expv) > tol) begin
      failures++;
      $display("FAIL %s got %g expected %g", what, got, expv);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 30; t++) begin
      automatic af_sel_e   f  = (t % 5 == 4) ? AF_SMAX_ACC : af_sel_e'($urandom_range(0, 3));
      automatic prec_sel_e p  = prec_sel_e'($urandom_range(0, 1));
      automatic int        n  = $urandom_range(1, (f == AF_SMAX_ACC) ? ((p == PREC_BF16) ? 16 : 8) : DEPTH);
      automatic int        cyc = 0;
      automatic real       s  = 0.0;
      for (int i = 0; i < n; i++) begin
        if (p == PREC_BF16) shm[i] = {1'($urandom), 8'($urandom_range(118, 128)), 7'($urandom)};
        else shm[i] = {1'($urandom), 4'($urandom_range(1, 9)), 3'($urandom), 1'($urandom), 4'($urandom_range(1, 9)), 3'($urandom)};
        if (f == AF_SMAX_ACC) begin
          if (p == PREC_BF16) s += $exp(bf(shm[i]));
          else s += $exp(f8(shm[i][7:0])) + $exp(f8(shm[i][15:8]));
        end
      end
      @(negedge clk);
      af_sel = f; prec_sel = p; len = 8'(n); start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done) begin @(negedge clk); cyc++; end
      if (f != AF_SMAX_ACC && f != AF_RELU && n > 2 * LANES) begin
        automatic int single = (f == AF_SIGMOID || f == AF_TANH) ? 38 : 21;
        if (p == PREC_FP8) single = 2 * single - 1;
        checks++;
        if (cyc > (n * single) / 2) begin
          failures++;
          $display("FAIL no lane parallelism: %0d cycles for %0d words", cyc, n);
        end else n_parallel++;
      end
      for (int i = 0; i < n; i++) begin
        ob_raddr = 5'(i);
        @(negedge clk);
        if (f == AF_SMAX_ACC) begin
          if (p == PREC_BF16) chk(bf(ob_rdata), $exp(bf(shm[i])) / s, 1'b1, "softmax bf16");
          else begin
            chk(f8(ob_rdata[7:0]),  $exp(f8(shm[i][7:0])) / s, 1'b0, "softmax fp8 lo");
            chk(f8(ob_rdata[15:8]), $exp(f8(shm[i][15:8])) / s, 1'b0, "softmax fp8 hi");
          end
        end else if (p == PREC_BF16) chk(bf(ob_rdata), f_ref(f, bf(shm[i])), 1'b1, $sformatf("f%0d bf16 [%0d]", f, i));
        else begin
          chk(f8(ob_rdata[7:0]),  f_ref(f, f8(shm[i][7:0])),  1'b0, $sformatf("f%0d fp8 lo [%0d]", f, i));
          chk(f8(ob_rdata[15:8]), f_ref(f, f8(shm[i][15:8])), 1'b0, $sformatf("f%0d fp8 hi [%0d]", f, i));
        end
      end
    end
    checks++;
    if (n_parallel == 0) begin failures++; $display("FAIL parallel dispatch never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
