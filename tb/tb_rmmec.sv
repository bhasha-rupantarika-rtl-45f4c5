// tb_rmmec: exhaustive self-check of the RMMEC nibble block.
// All 256 operand pairs are applied in both modes; multiply results are
// checked against the integer product, compare results against the larger
// operand, the a >= b flag and the absolute difference.
module tb_rmmec;
  logic       mode_cmp;
  logic [3:0] a, b;
  logic [7:0] p;
  logic [3:0] max_o;
  int checks = 0, failures = 0;

  rmmec dut (.mode_cmp, .a, .b, .p, .max_o);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          mode_cmp = m[0]; a = 4'(i); b = 4'(j);
          #1;
          checks++;
          if (m == 0) begin
            if (p != 8'(i * j)) begin
              failures++;
              $display("FAIL mul %0d*%0d got %0d", i, j, p);
            end
          end else begin
            automatic int mx = (i >= j) ? i : j;
            automatic int d  = (i >= j) ? i - j : j - i;
            if (max_o != 4'(mx) || p[3:0] != 4'(d) || p[7] != (i >= j)) begin
              failures++;
              $display("FAIL cmp %0d,%0d got max %0d p %h", i, j, max_o, p);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
