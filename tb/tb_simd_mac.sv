// tb_simd_mac: self-checking test of the five-stage SIMD MAC.
//
// Random dot products of 1..4 beats in all four precisions are issued, with
// random idle cycles between beats.  The expected value is computed with
// `real` arithmetic from an independent decoding of the lane formats.
// INT4 results must match exactly; floating-point results must lie within
// the truncation error of the output format plus the alignment error of
// the guard bits, saturate with exc set above the largest finite value,
// and arrive exactly 5 cycles after the last beat.
module tb_simd_mac;
  import nlpe_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        in_valid = 1'b0, first = 1'b0, last = 1'b0;
  mac_mode_e   mode = MODE_INT4;
  logic [23:0] a = '0, b = '0;
  logic [15:0] c = '0;
  logic        out_valid, exc;
  logic [15:0] out;

  int checks = 0, failures = 0, n_sat = 0;
  int cycle = 0;

  simd_mac dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #2000000;
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

  function automatic real fpv(input int bits, input int eb, input int mb, input int bias);
    int  s = (bits >> (eb + mb)) & 1;
    int  e = (bits >> mb) & ((1 << eb) - 1);
    int  m = bits & ((1 << mb) - 1);
    real v;
    if (e == 0) v = real'(m) * p2(1 - bias - mb);
    else        v = real'(m + (1 << mb)) * p2(e - bias - mb);
    return s ? -v : v;
  endfunction

  function automatic real lane(input logic [23:0] x, input int i, input mac_mode_e md);
    case (md)
      MODE_INT4: return real'($signed(x[4*i +: 4]));
      MODE_FP4:  return fpv(int'(x[4*i +: 4]), 2, 1, 1);
      MODE_FP8:  return fpv(int'(x[8*i +: 8]), 4, 3, 7);
      default:   return fpv(int'(x[15:0]), 8, 7, 127);
    endcase
  endfunction

  function automatic real cval(input logic [15:0] x, input mac_mode_e md);
    case (md)
      MODE_INT4: return real'($signed(x));
      MODE_FP4:  return fpv(int'(x[7:0]), 4, 3, 7);
      default:   return fpv(int'(x), 8, 7, 127);
    endcase
  endfunction

  function automatic real absr(input real x);
    return x < 0 ? -x : x;
  endfunction

  function automatic logic [15:0] rnd_bf16();
    logic [15:0] v = 16'($urandom);
    v[14:7] = 8'(120 + $urandom_range(0, 14));
    return v;
  endfunction

  // expected results, in issue order
  real       q_ref[$];
  real       q_tol[$];
  mac_mode_e q_mode[$];
  int        q_cyc[$];

  // checker
  always @(negedge clk) if (out_valid) begin
    automatic real       r   = q_ref.pop_front();
    automatic real       tol = q_tol.pop_front();
    automatic mac_mode_e md  = q_mode.pop_front();
    automatic int        cy  = q_cyc.pop_front();
    automatic real       got;
    automatic real       maxv;
    checks++;
    // five register stages: visible after the 5th edge, counting the one that sampled the last beat
    if (cycle - cy + 1 != 5) begin
      failures++;
      $display("FAIL latency %0d", cycle - cy + 1);
    end
    case (md)
      MODE_INT4: begin got = real'($signed(out)); maxv = 32767.0; end
      MODE_FP4:  begin got = fpv(int'(out[7:0]), 4, 3, 7); maxv = 480.0; end
      default:   begin got = fpv(int'(out), 8, 7, 127); maxv = 3.4028e38; end
    endcase
    checks++;
    if (absr(r) > maxv * 1.001) begin
      n_sat++;
      if (!(exc && absr(got) >= maxv * 0.9)) begin
        failures++;
        $display("FAIL saturation mode %0d expv %g got %g exc %b", md, r, got, exc);
      end
    end else if (absr(r) < maxv * 0.999) begin
      if (absr(got - r) > tol || exc) begin
        failures++;
        $display("FAIL mode %0d expv %g got %g tol %g (out %h)", md, r, got, tol, out);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      automatic mac_mode_e md    = mac_mode_e'($urandom_range(0, 3));
      automatic int        beats = $urandom_range(1, 4);
      automatic real       expv   = 0.0;
      automatic real       maxt  = 0.0;
      automatic int        nl    = (md == MODE_FP8) ? 3 : (md == MODE_BF16) ? 1 : 6;
      automatic int        mbits = (md == MODE_FP4) ? 3 : 7;
      automatic real       minn  = (md == MODE_FP4) ? p2(-6) : p2(-126);
      for (int bt = 0; bt < beats; bt++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        mode = md;
        a = 24'($urandom); b = 24'($urandom);
        if (md == MODE_BF16) begin a[15:0] = rnd_bf16(); b[15:0] = rnd_bf16(); end
        if (md == MODE_FP4 && t % 5 == 0) begin a = 24'h777777; b = 24'h777777; end
        case (md)
          MODE_INT4: c = 16'($urandom_range(0, 2000)) - 16'd1000;
          MODE_FP4:  c = {8'h00, 8'($urandom) & 8'hf7};  // keep |C| <= 240
          MODE_FP8:  c = rnd_bf16();
          default:   c = rnd_bf16();
        endcase
        in_valid = 1'b1; first = (bt == 0); last = (bt == beats - 1);
        if (bt == 0) begin
          expv  = cval(c, md);
          maxt = absr(expv);
        end
        for (int i = 0; i < nl; i++) begin
          automatic real pr = lane(a, i, md) * lane(b, i, md);
          expv += pr;
          if (absr(pr) > maxt) maxt = absr(pr);
        end
        if (last) begin
          q_ref.push_back(expv);
          q_mode.push_back(md);
          q_cyc.push_back(cycle + 1);   // sampled at the coming edge
          if (md == MODE_INT4) q_tol.push_back(0.0);
          else q_tol.push_back(absr(expv) * p2(-mbits) + real'(beats) * 8.0 * maxt * p2(-8) + minn);
        end
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (q_ref.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", q_ref.size());
    end
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("saturated results: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
