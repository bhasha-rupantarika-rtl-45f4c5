// tb_sram_buf: writes random words to every address of a 24 x 64 buffer,
// reads them back in a shuffled order and checks data and the one-cycle
// read latency, including a read of an address being written (old data).
module tb_sram_buf;
  localparam int W = 24, D = 64;
  logic         clk = 1'b0, we = 1'b0;
  logic [5:0]   waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sram_buf #(.W(W), .D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 6'(i); wdata = W'($urandom); model[i] = wdata;
    end
    for (int k = 0; k < 3 * D; k++) begin
      automatic int ra = $urandom_range(0, D - 1);
      automatic logic [W-1:0] exp_d = model[ra];
      @(negedge clk);
      raddr = 6'(ra);
      we = ($urandom_range(0, 1) == 1);
      waddr = 6'($urandom_range(0, D - 1));
      if (k % 7 == 0) waddr = 6'(ra);
      wdata = W'($urandom);
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        $display("FAIL addr %0d got %h exp %h", ra, rdata, exp_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
