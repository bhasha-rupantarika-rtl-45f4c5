// mem_ctrl: memory control of the NLPE, an AXI4 master combining the
// Memory Read Unit (MRU) and the Memory Write Unit (MWU).
//
// A command (cmd_valid/cmd_ready) names a direction, an off-chip word
// address and a word count.  A read fetches `len` consecutive DW-bit words
// and hands each one out on rd_valid/rd_data with its position rd_cnt, for
// the caller to store in an on-chip buffer.  A write asks for word i of the
// source buffer on src_idx, takes it from src_data one cycle later (the
// buffers have a registered read), and sends it.  `done` pulses when the
// last word has been received or acknowledged.
//
// Each word is one AXI4 transaction of a single beat (len 0, full-width
// size, INCR burst) at byte address (addr + i) * DW/8; one transaction is
// outstanding at a time, so the unit tolerates any ready/valid delay of the
// memory side.  A non-OKAY response sets the sticky `err` flag.
//
// The memory control block on an AXI port, reading into the engine and
// writing results back, follows the design; the command interface, the
// single-beat transactions and the error flag are this implementation's.
//
// rst_n is the asynchronous reset of every register and also the disable
// condition of the handshake assertions, which sample it on the clock; the
// linter reports that second, verification-only use as a synchronous one.
module mem_ctrl #(
  parameter int AW = 32,
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  logic          cmd_write,
  input  logic [AW-1:0] cmd_addr,    // word address
  input  logic [7:0]    cmd_len,     // words, >= 1
  output logic          done,
  output logic          err,
  // MRU data out
  output logic          rd_valid,
  output logic [DW-1:0] rd_data,
  output logic [7:0]    rd_cnt,
  // MWU data in
  output logic [7:0]    src_idx,
  input  logic [DW-1:0] src_data,
  // AXI4 master
  output logic [AW-1:0] m_araddr,
  output logic [7:0]    m_arlen,
  output logic [2:0]    m_arsize,
  output logic [1:0]    m_arburst,
  output logic          m_arvalid,
  input  logic          m_arready,
  input  logic [DW-1:0] m_rdata,
  input  logic [1:0]    m_rresp,
  input  logic          m_rlast,
  input  logic          m_rvalid,
  output logic          m_rready,
  output logic [AW-1:0] m_awaddr,
  output logic [7:0]    m_awlen,
  output logic [2:0]    m_awsize,
  output logic [1:0]    m_awburst,
  output logic          m_awvalid,
  input  logic          m_awready,
  output logic [DW-1:0] m_wdata,
  output logic [DW/8-1:0] m_wstrb,
  output logic          m_wlast,
  output logic          m_wvalid,
  input  logic          m_wready,
  input  logic [1:0]    m_bresp,
  input  logic          m_bvalid,
  output logic          m_bready
);
  localparam int SZ = $clog2(DW / 8);
  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_FETCH, S_LATCH, S_AW, S_B, S_DONE} state_e;
  state_e        state;
  logic [AW-1:0] base;
  logic [7:0]    len, i;
  logic          aw_done, w_done;

  assign cmd_ready = (state == S_IDLE);
  assign m_arlen   = 8'd0;
  assign m_arsize  = 3'(SZ);
  assign m_arburst = 2'b01;
  assign m_awlen   = 8'd0;
  assign m_awsize  = 3'(SZ);
  assign m_awburst = 2'b01;
  assign m_wstrb   = '1;
  assign m_wlast   = 1'b1;
  assign m_araddr  = (base + AW'(i)) << SZ;
  assign m_awaddr  = (base + AW'(i)) << SZ;
  assign m_arvalid = (state == S_AR);
  assign m_rready  = (state == S_R);
  assign m_awvalid = (state == S_AW) && !aw_done;
  assign m_wvalid  = (state == S_AW) && !w_done;
  assign m_bready  = (state == S_B);
  assign src_idx   = i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; base <= '0; len <= 8'd1; i <= '0; done <= 1'b0; err <= 1'b0;
      rd_valid <= 1'b0; rd_data <= '0; rd_cnt <= '0; m_wdata <= '0; aw_done <= 1'b0; w_done <= 1'b0;
    end else begin
      done     <= 1'b0;
      rd_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          base  <= cmd_addr;
          len   <= (cmd_len == 8'd0) ? 8'd1 : cmd_len;
          i     <= '0;
          state <= cmd_write ? S_FETCH : S_AR;
        end
        // ---------------- MRU
        S_AR: if (m_arready) state <= S_R;
        S_R: if (m_rvalid) begin
          rd_valid <= 1'b1;
          rd_data  <= m_rdata;
          rd_cnt   <= i;
          if (m_rresp != 2'b00) err <= 1'b1;
          state <= S_DONE;
          if (i != len - 8'd1) state <= S_AR;
        end
        // ---------------- MWU
        S_FETCH: state <= S_LATCH;          // src_idx presented, data next cycle
        S_LATCH: begin
          m_wdata <= src_data;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          state   <= S_AW;
        end
        S_AW: begin
          if (m_awvalid && m_awready) aw_done <= 1'b1;
          if (m_wvalid && m_wready)   w_done  <= 1'b1;
          if ((aw_done || m_awready) && (w_done || m_wready)) state <= S_B;
        end
        S_B: if (m_bvalid) begin
          if (m_bresp != 2'b00) err <= 1'b1;
          if (i == len - 8'd1) state <= S_DONE;
          else begin
            i     <= i + 8'd1;
            state <= S_FETCH;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      // advance the read index after the word has been handed out
      if (state == S_R && m_rvalid && i != len - 8'd1) i <= i + 8'd1;
    end
  end

  // AXI rule: a valid, once raised, holds its payload until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr))
    else $error("mem_ctrl: AR dropped before ready");
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr))
    else $error("mem_ctrl: AW dropped before ready");
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata))
    else $error("mem_ctrl: W dropped before ready");
  // single-beat reads: every read beat is the last of its burst
  assert property (@(posedge clk) disable iff (!rst_n) m_rvalid |-> m_rlast)
    else $error("mem_ctrl: read burst longer than one beat");
endmodule
