// tb_npe: checks one processing element.  INT4 dot products of random
// length are streamed in; the forwarded operands must appear one cycle
// later unchanged, and the stationary result must equal the integer dot
// product and be latched 6 cycles after the last beat (5 MAC stages plus
// the result register).
module tb_npe;
  import nlpe_pkg::*;
  logic        clk = 1'b0, rst_n = 1'b0;
  mac_mode_e   mode = MODE_INT4;
  logic [23:0] a_in = '0, b_in = '0, a_out, b_out;
  npe_ctl_t    ctl_in = '0, ctl_out;
  logic [15:0] res;
  logic        res_valid, res_exc;
  int checks = 0, failures = 0, cycle = 0;
  int q_exp[$], q_cyc[$];

  npe dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // forwarding check
  logic [23:0] a_d, b_d;
  npe_ctl_t    c_d;
  always @(posedge clk) begin
    if (rst_n && cycle > 5) begin
      checks++;
      if (a_out !== a_d || b_out !== b_d || ctl_out !== c_d) begin
        failures++;
        $display("FAIL forwarding");
      end
    end
    a_d <= a_in; b_d <= b_in; c_d <= ctl_in;
  end

  always @(negedge clk) if (res_valid) begin
    automatic int e = q_exp.pop_front();
    automatic int cy = q_cyc.pop_front();
    checks++;
    if ($signed(res) != e || cycle - cy + 1 != 6) begin
      failures++;
      $display("FAIL res %0d exp %0d latency %0d", $signed(res), e, cycle - cy + 1);
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      automatic int n = $urandom_range(1, 8);
      automatic int acc = 0;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        a_in = 24'($urandom); b_in = 24'($urandom);
        ctl_in = '{valid: 1'b1, first: (k == 0), last: (k == n - 1)};
        for (int i = 0; i < 6; i++) acc += $signed(a_in[4*i +: 4]) * $signed(b_in[4*i +: 4]);
        if (k == n - 1) begin q_exp.push_back(acc); q_cyc.push_back(cycle + 1); end
      end
    end
    @(negedge clk);
    ctl_in = '0;
    repeat (12) @(negedge clk);
    checks++;
    if (q_exp.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
