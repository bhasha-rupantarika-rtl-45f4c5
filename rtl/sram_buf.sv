// sram_buf: synchronous scratchpad memory, one write port and one read port.
//
// Every on-chip buffer of the NLPE is one of these: the input memory
// buffer, the kernel-weight (WT) and input (IN) banks of the matrix engine,
// the shared memory buffer and the memory buffer of the non-linear vector
// array.  A write with we = 1 stores wdata at waddr on the rising edge; the
// word at raddr appears on rdata one cycle after it is presented (read is
// registered).  A read of the address being written returns the old word.
// The memory is written as an array so that a synthesis tool can map it to
// block RAM or an SRAM macro; sizes are set by the instantiating block.
module sram_buf #(
  parameter int W = 24,
  parameter int D = 64,
  localparam int AW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [D];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
