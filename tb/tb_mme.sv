// tb_mme: self-checking test of the systolic matrix engine at 3 x 4.
//
// Random INT4 matrices of inner length K = 1..8 (and one BF16 run made of
// small integers, which is exact) are written through the data-reorder
// port in k-major order, the engine is started, and every C[r][c] is
// compared with a dot product computed here.  The run time from `start` to
// `done` must be K + ROWS + COLS + 6 cycles for every K.
module tb_mme;
  import nlpe_pkg::*;
  localparam int ROWS = 3, COLS = 4, DEPTH = 16;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        wr_en = 1'b0, wr_sel = 1'b0, start = 1'b0;
  logic [15:0] wr_idx = '0, rd_idx = '0, rd_data;
  logic [23:0] wr_data = '0;
  mac_mode_e   mode = MODE_INT4;
  logic [7:0]  k_len = 8'd1;
  logic        busy, done, exc_any;
  int checks = 0, failures = 0;

  mme #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [23:0] A [ROWS][8];
  logic [23:0] B [COLS][8];

  function automatic logic [15:0] bf16_of_int(input int v);
    // exact BF16 encoding of a small integer (|v| < 256)
    int m = v < 0 ? -v : v;
    int e = 0;
    if (m == 0) return 16'h0000;
    while ((m >> e) > 1) e++;
    return {v < 0, 8'(127 + e), 7'((m << 7 >> e) & 8'h7f)};
  endfunction

  function automatic int int_of_bf16(input logic [15:0] x);
    int e = int'(x[14:7]) - 127;
    int m = int'(x[6:0]) | 128;
    int v;
    if (x[14:7] == 0) return 0;
    v = (e >= 7) ? (m << (e - 7)) : (m >> (7 - e));
    return x[15] ? -v : v;
  endfunction

  task automatic run(input mac_mode_e md, input int K);
    int t0, t1, cyc;
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_sel = 1'b0; wr_idx = 16'(k * ROWS + r); wr_data = A[r][k];
      end
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_sel = 1'b1; wr_idx = 16'(k * COLS + c); wr_data = B[c][k];
      end
    end
    @(negedge clk);
    wr_en = 1'b0; start = 1'b1; mode = md; k_len = 8'(K);
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != K + ROWS + COLS + 6) begin
      failures++;
      $display("FAIL run time %0d for K=%0d", cyc, K);
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        automatic int expv = 0;
        automatic int got;
        for (int k = 0; k < K; k++)
          if (md == MODE_INT4)
            for (int i = 0; i < 6; i++) expv += $signed(A[r][k][4*i +: 4]) * $signed(B[c][k][4*i +: 4]);
          else
            expv += int_of_bf16(A[r][k][15:0]) * int_of_bf16(B[c][k][15:0]);
        rd_idx = 16'(r * COLS + c);
        #1;
        got = (md == MODE_INT4) ? int'($signed(rd_data)) : int_of_bf16(rd_data);
        checks++;
        if (got != expv) begin
          failures++;
          $display("FAIL C[%0d][%0d] = %0d expected %0d", r, c, got, expv);
        end
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 12; t++) begin
      automatic int K = $urandom_range(1, 8);
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < ROWS; r++) A[r][k] = 24'($urandom);
        for (int c = 0; c < COLS; c++) B[c][k] = 24'($urandom);
      end
      run(MODE_INT4, K);
    end
    for (int k = 0; k < 4; k++) begin
      for (int r = 0; r < ROWS; r++) A[r][k] = {8'h00, bf16_of_int($urandom_range(0, 14) - 7)};
      for (int c = 0; c < COLS; c++) B[c][k] = {8'h00, bf16_of_int($urandom_range(0, 14) - 7)};
    end
    run(MODE_BF16, 4);
    checks++;
    if (exc_any) begin failures++; $display("FAIL unexpected exception"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
