// axi_mem_model: behavioural AXI4 slave memory for testbenches, standing
// in for the off-chip DRAM.  Single-beat transactions (the only kind the
// memory controller issues) are served from a word array of WORDS entries
// (byte address / 4).  Every ready and valid it drives is held off for a
// random 0..3 cycles to exercise back-pressure; `stalls` counts the cycles
// in which a valid request waited for ready.
module axi_mem_model #(
  parameter int WORDS = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic [2:0]  arsize,
  input  logic [1:0]  arburst,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic [2:0]  awsize,
  input  logic [1:0]  awburst,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready
);
  logic [31:0] mem [WORDS];
  int stalls = 0;
  logic        aw_got = 1'b0, w_got = 1'b0;
  logic [31:0] aw_a = '0, w_d = '0;

  initial begin
    arready = 1'b0; rvalid = 1'b0; rdata = '0; rresp = 2'b00; rlast = 1'b1;
    awready = 1'b0; wready = 1'b0; bvalid = 1'b0; bresp = 2'b00;
  end

  always @(posedge clk) begin
    if ((arvalid && !arready) || (awvalid && !awready) || (wvalid && !wready)) stalls++;
  end

  // read channel
  initial forever begin
    @(posedge clk);
    if (rst_n && arvalid && !rvalid) begin
      repeat ($urandom_range(0, 3)) @(posedge clk);
      arready <= 1'b1;
      @(posedge clk);
      arready <= 1'b0;
      rdata   <= mem[(araddr >> 2) % WORDS];
      repeat ($urandom_range(0, 3)) @(posedge clk);
      rvalid  <= 1'b1;
      @(posedge clk);
      while (!rready) @(posedge clk);
      rvalid  <= 1'b0;
    end
  end

  // write channels
  initial forever begin
    @(posedge clk);
    if (rst_n && awvalid && wvalid) begin
      repeat ($urandom_range(0, 3)) @(posedge clk);
      awready <= 1'b1; wready <= 1'b1;
      @(posedge clk);
      awready <= 1'b0; wready <= 1'b0;
      mem[(awaddr >> 2) % WORDS] = wdata;
      repeat ($urandom_range(0, 3)) @(posedge clk);
      bvalid <= 1'b1;
      @(posedge clk);
      while (!bready) @(posedge clk);
      bvalid <= 1'b0;
    end
  end
endmodule
