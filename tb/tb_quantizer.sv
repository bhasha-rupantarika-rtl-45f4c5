// tb_quantizer: checks BF16 -> E4M3 quantisation over every BF16 sign and
// exponent with random mantissas (value compared in `real`: the result
// must be the largest E4M3 magnitude not above the input, saturated at 448,
// or zero below 2^-6), and integer shift-and-saturate on random inputs.
module tb_quantizer;
  logic        fp;
  logic [3:0]  shift;
  logic [15:0] d;
  logic [7:0]  q;
  int checks = 0, failures = 0;

  quantizer dut (.*);

  initial begin
    #1000000;
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

  function automatic real e4m3(input logic [7:0] x);
    real v = (x[6:3] == 0) ? real'(x[2:0]) * p2(-9) : real'(8 + x[2:0]) * p2(int'(x[6:3]) - 10);
    return x[7] ? -v : v;
  endfunction

  real v, mag, got, expm;
  int  x, s, expv;

  initial begin
    fp = 1'b1; shift = '0;
    #1;
    for (int e = 1; e < 255; e++)
      for (int n = 0; n < 8; n++) begin
        d = {1'($urandom), 8'(e), 7'($urandom)};
        v = real'(128 + d[6:0]) * p2(e - 127 - 7);
        mag = v;
        // expected magnitude: truncate to 4 significant bits, clamp
        if (mag < p2(-6)) expm = 0.0;
        else if (mag >= 448.0) expm = 448.0;
        else expm = real'(8 + d[6:4]) * p2(e - 127 - 3);
        #1;
        got = e4m3(q);
        checks++;
        if ((got < 0 ? -got : got) != expm || (expm != 0.0 && q[7] != d[15])) begin
          failures++;
          $display("FAIL fp d=%h q=%h got %g exp %g fp=%b t=%0t", d, q, got, expm, fp, $time);
        end
      end
    fp = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      d = 16'($urandom); shift = 4'($urandom);
      x = int'($signed(d));
      s = x >>> shift;
      expv = (s > 127) ? 127 : (s < -128) ? -128 : s;
      #1;
      checks++;
      if (int'($signed(q)) != expv) begin
        failures++;
        $display("FAIL int d=%0d sh=%0d q=%0d exp %0d", x, shift, $signed(q), expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
