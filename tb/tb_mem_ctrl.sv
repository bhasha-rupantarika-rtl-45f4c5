// tb_mem_ctrl: self-checking test of the AXI memory controller against the
// behavioural AXI memory, which holds ready and valid off for random
// cycles.  Random read commands must return the memory words in order with
// the right positions; random write commands must leave the source
// buffer's words at the right addresses.  The test also checks that
// back-pressure actually occurred.
module tb_mem_ctrl;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        cmd_valid = 1'b0, cmd_write = 1'b0;
  logic [31:0] cmd_addr = '0;
  logic [7:0]  cmd_len = 8'd1;
  logic        cmd_ready, done, err, rd_valid;
  logic [31:0] rd_data, src_data;
  logic [7:0]  rd_cnt, src_idx;
  logic [31:0] src_buf [256];
  int checks = 0, failures = 0;

  logic [31:0] araddr, awaddr, rdata, wdata;
  logic [7:0]  arlen, awlen;
  logic [2:0]  arsize, awsize;
  logic [1:0]  arburst, awburst, rresp, bresp;
  logic [3:0]  wstrb;
  logic        arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;

  mem_ctrl dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr, .cmd_len, .done, .err,
    .rd_valid, .rd_data, .rd_cnt, .src_idx, .src_data,
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid),
    .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid),
    .m_rready(rready), .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst),
    .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast),
    .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready));

  axi_mem_model #(.WORDS(1024)) u_mem (.*);

  always #5 clk = ~clk;
  always @(posedge clk) src_data <= src_buf[src_idx];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got_n;
  always @(posedge clk) if (rd_valid) begin
    checks++;
    if (rd_data !== u_mem.mem[(cmd_addr + 32'(rd_cnt)) % 1024] || rd_cnt != 8'(got_n)) begin
      failures++;
      $display("FAIL read word %0d: %h", rd_cnt, rd_data);
    end
    got_n++;
  end

  initial begin
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      automatic int n = $urandom_range(1, 20);
      automatic logic w = 1'($urandom);
      automatic int a = $urandom_range(0, 1000);
      for (int i = 0; i < n; i++) src_buf[i] = $urandom;
      got_n = 0;
      @(negedge clk);
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 1'b1; cmd_write = w; cmd_addr = 32'(a); cmd_len = 8'(n);
      @(negedge clk);
      cmd_valid = 1'b0;
      while (!done) @(negedge clk);
      if (w) begin
        for (int i = 0; i < n; i++) begin
          checks++;
          if (u_mem.mem[(a + i) % 1024] !== src_buf[i]) begin
            failures++;
            $display("FAIL write word %0d", i);
          end
        end
      end else begin
        checks++;
        if (got_n != n) begin failures++; $display("FAIL %0d words read of %0d", got_n, n); end
      end
    end
    checks++;
    if (u_mem.stalls == 0 || err) begin failures++; $display("FAIL no back-pressure seen or err"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
