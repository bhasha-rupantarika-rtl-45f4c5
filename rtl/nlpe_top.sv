// nlpe_top: the NLP engine (NLPE), a transformer-inference accelerator for
// low-precision neural machine translation.
//
// Data path (left to right):
//   off-chip memory --AXI--> memory control (mem_ctrl) --> input memory
//   buffer --> data reorder --> SIMD matrix multiply engine (mme, a
//   ROWS x COLS systolic array of SIMD MACs) --> quantisation --> shared
//   memory buffer --> non-linear MIMD vector array (nmv, LANES FASST
//   activation units) --> NMV memory buffer --> memory control --> AXI.
// The control unit is an instruction decoder: it accepts one 32-bit
// instruction at a time (instr_valid/instr_ready) and runs it to the end
// before taking the next (see nlpe_pkg for the format):
//   LOAD    n words from off-chip word address f2 into the input buffer at a
//   REORDER n input-buffer vectors from a into the WT (f1[0]=0) or IN bank
//           set of the engine, element i to bank i % ROWS (or COLS)
//   MATMUL  C = A x B^T with inner length K = b in mode f1[1:0]; the
//           ROWS*COLS results (row-major) are quantised if f1[2] is set
//           (FP8 if f1[3], else INT8 with right shift a[3:0]) and written to
//           the shared buffer from address f2
//   NAF     activation f1[2:0] in precision f2[0] on n shared-buffer words
//           from a, results to the NMV buffer from address 0
//   STORE   n words of the shared (f1[0]=0) or NMV buffer from a to
//           off-chip word address f2
//   BASE    set a 28-bit off-chip base word address; LOAD and STORE use
//           base + f2, so a 256M-word (1 GiB) space is reachable
// `idle` is high when no instruction is in flight; `exc` is sticky and
// reports a saturated matrix result, `err` an AXI error response.
//
// The units and their order follow the design's block diagram; the
// instruction set, the one-instruction-at-a-time sequencing, buffer sizes
// and word layouts are this implementation's choices.  Matrix operands are
// 24-bit SIMD vectors held in the low 24 bits of 32-bit off-chip words;
// 16-bit results are stored in the low half of a 32-bit word.
//
// rst_n is the asynchronous reset of every register and also the disable
// condition of the handshake assertions, which sample it on the clock; the
// linter reports that second, verification-only use as a synchronous one.
// Bits 31:24 of a word read from off-chip are not used: operand words carry
// one 24-bit SIMD vector in their low bits.
module nlpe_top
  import nlpe_pkg::*;
#(
  parameter int ROWS      = 16,
  parameter int COLS      = 16,
  parameter int LANES     = 4,
  parameter int MME_DEPTH = 64,
  parameter int IB_DEPTH  = 256,
  parameter int SH_DEPTH  = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        instr_valid,
  output logic        instr_ready,
  input  logic [31:0] instr,
  output logic        idle,
  output logic        exc,
  output logic        err,
  // AXI4 master to off-chip memory
  output logic [31:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  output logic        m_arvalid,
  input  logic        m_arready,
  input  logic [31:0] m_rdata,
  input  logic [1:0]  m_rresp,
  input  logic        m_rlast,
  input  logic        m_rvalid,
  output logic        m_rready,
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wlast,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready
);
  localparam int IA = $clog2(IB_DEPTH);
  localparam int SA = $clog2(SH_DEPTH);
  localparam int NR = ROWS * COLS;

  typedef enum logic [3:0] {
    S_IDLE, S_MEMCMD, S_MEMWAIT, S_REORD, S_MMSTART, S_MMWAIT, S_DRAIN,
    S_NAFSTART, S_NAFWAIT
  } state_e;
  state_e     state;
  instr_t     ir;
  logic [15:0] cnt;
  logic [27:0] ext_base;

  // ------------------------------------------------------------ memory control
  logic        mc_done, mc_rd_valid, mc_cmd_ready;
  logic [31:0] mc_rd_data, mc_src_data;
  logic [7:0]  mc_rd_cnt, mc_src_idx;

  mem_ctrl #(.AW(32), .DW(32)) u_mem_ctrl (
    .clk, .rst_n,
    .cmd_valid(state == S_MEMCMD), .cmd_ready(mc_cmd_ready), .cmd_write(ir.op == OP_STORE),
    .cmd_addr(32'(ext_base) + 32'(ir.f2)), .cmd_len(ir.b), .done(mc_done), .err,
    .rd_valid(mc_rd_valid), .rd_data(mc_rd_data), .rd_cnt(mc_rd_cnt),
    .src_idx(mc_src_idx), .src_data(mc_src_data),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready);

  // ------------------------------------------------------------ input buffer
  logic [IA-1:0] ib_raddr;
  logic [23:0]   ib_rdata;

  sram_buf #(.W(24), .D(IB_DEPTH)) u_in_buf (
    .clk, .we(mc_rd_valid && ir.op == OP_LOAD),
    .waddr(IA'(ir.a) + IA'(mc_rd_cnt)), .wdata(mc_rd_data[23:0]),
    .raddr(ib_raddr), .rdata(ib_rdata));

  // ------------------------------------------------------------ data reorder
  logic        ro_v;
  logic [15:0] ro_idx;
  assign ib_raddr = IA'(ir.a) + IA'(cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ro_v <= 1'b0; ro_idx <= '0; end
    else begin
      ro_v   <= (state == S_REORD) && (cnt < 16'(ir.b));
      ro_idx <= cnt;
    end
  end

  // ------------------------------------------------------------ matrix engine
  logic        mme_done, mme_exc, mme_busy;
  logic [15:0] mme_rd;

  mme #(.ROWS(ROWS), .COLS(COLS), .DEPTH(MME_DEPTH)) u_mme (
    .clk, .rst_n,
    .wr_en(ro_v), .wr_sel(ir.f1[0]), .wr_idx(ro_idx), .wr_data(ib_rdata),
    .start(state == S_MMSTART), .mode(mac_mode_e'(ir.f1[1:0])), .k_len(ir.b),
    .busy(mme_busy), .done(mme_done), .exc_any(mme_exc),
    .rd_idx(cnt), .rd_data(mme_rd));

  // ------------------------------------------------------------ quantisation
  logic [7:0] q8;
  quantizer u_quant (.fp(ir.f1[3]), .shift(ir.a[3:0]), .d(mme_rd), .q(q8));

  // ------------------------------------------------------------ shared buffer
  logic          sh_we;
  logic [SA-1:0] sh_waddr, sh_raddr, nmv_sh_raddr;
  logic [15:0]   sh_wdata, sh_rdata;

  assign sh_we    = (state == S_DRAIN);
  assign sh_waddr = SA'(ir.f2) + SA'(cnt);
  assign sh_wdata = ir.f1[2] ? {8'h00, q8} : mme_rd;
  assign sh_raddr = (ir.op == OP_NAF) ? SA'(ir.a) + nmv_sh_raddr : SA'(ir.a) + SA'(mc_src_idx);

  sram_buf #(.W(16), .D(SH_DEPTH)) u_shared_buf (
    .clk, .we(sh_we), .waddr(sh_waddr), .wdata(sh_wdata),
    .raddr(sh_raddr), .rdata(sh_rdata));

  // ------------------------------------------------------------ non-linear vector array
  logic          nmv_done, nmv_busy;
  logic [15:0]   ob_rdata;

  nmv #(.LANES(LANES), .DEPTH(SH_DEPTH)) u_nmv (
    .clk, .rst_n,
    .start(state == S_NAFSTART), .af_sel(af_sel_e'(ir.f1[2:0])),
    .prec_sel(prec_sel_e'({1'b0, ir.f2[0]})), .len(ir.b),
    .busy(nmv_busy), .done(nmv_done),
    .sh_raddr(nmv_sh_raddr), .sh_rdata(sh_rdata),
    .ob_raddr(SA'(ir.a) + SA'(mc_src_idx)), .ob_rdata(ob_rdata));

  assign mc_src_data = {16'h0000, ir.f1[0] ? ob_rdata : sh_rdata};

  // ------------------------------------------------------------ instruction decoder
  assign instr_ready = (state == S_IDLE);
  assign idle        = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ir <= '0; cnt <= '0; exc <= 1'b0; ext_base <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (instr_valid) begin
          ir  <= instr_t'(instr);
          cnt <= '0;
          unique case (opcode_e'(instr[31:28]))
            OP_LOAD, OP_STORE: state <= (instr[7:0] == 8'd0) ? S_IDLE : S_MEMCMD;
            OP_REORDER:        state <= S_REORD;
            OP_MATMUL:         state <= S_MMSTART;
            OP_NAF:            state <= S_NAFSTART;
            OP_BASE:           ext_base <= instr[27:0];
            default:           state <= S_IDLE;
          endcase
        end
        S_MEMCMD:  state <= S_MEMWAIT;
        S_MEMWAIT: if (mc_done) state <= S_IDLE;
        S_REORD: begin
          if (cnt >= 16'(ir.b)) state <= S_IDLE;
          cnt <= cnt + 16'd1;
        end
        S_MMSTART: state <= S_MMWAIT;
        S_MMWAIT: if (mme_done) begin
          if (mme_exc) exc <= 1'b1;
          cnt   <= '0;
          state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (cnt == 16'(NR - 1)) state <= S_IDLE;
          cnt <= cnt + 16'd1;
        end
        S_NAFSTART: state <= S_NAFWAIT;
        S_NAFWAIT:  if (nmv_done) state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  // Every unit is idle when the control unit starts it.
  assert property (@(posedge clk) disable iff (!rst_n) state == S_MEMCMD |-> mc_cmd_ready)
    else $error("nlpe_top: memory control busy at command");
  assert property (@(posedge clk) disable iff (!rst_n) state == S_MMSTART |-> !mme_busy)
    else $error("nlpe_top: matrix engine busy at start");
  assert property (@(posedge clk) disable iff (!rst_n) state == S_NAFSTART |-> !nmv_busy)
    else $error("nlpe_top: vector array busy at start");
endmodule
