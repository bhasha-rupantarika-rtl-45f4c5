// nmv: Non-linear MIMD Vector array.
//
// LANES activation units (fasst) work side by side on a vector of `len`
// 16-bit words (one BF16 value or two FP8 values per word) read from the
// shared memory buffer.  Its control unit reads word i (sh_raddr; data one
// cycle later on sh_rdata), places it in the input register of a free lane
// and starts that lane; every lane runs its own multi-cycle CORDIC
// operation, so up to LANES words are in flight (MIMD).  A finished lane
// holds its result with the word index until the store logic writes it into
// the NMV memory buffer at the same index (one write per cycle, lowest lane
// first); only then can the lane take a new word.  Results may therefore
// complete out of order; each lands at its own index.
//
// SoftMax needs the whole vector in one softmax buffer, so it runs on lane
// 0 alone in two passes: the buffer is cleared, every word is sent with
// SMAX_ACC (results discarded), then `len` SMAX_NORM operations write
// e^x_i / sum to indices 0..len-1.
//
// Interface: start with af_sel, prec_sel and len latched (config
// registers) while busy is low; done pulses when the last result is in
// the memory buffer.  The buffer is read through ob_raddr/ob_rdata (one
// cycle latency).
//
// The array of FASST lanes with input registers, the control unit, the
// status and config registers and the memory buffer follow the design; the
// lane count, dispatch and write-back policy and the softmax sequencing are
// this implementation's choices.  The weight registers, tile-reuse control,
// scalar compute and reduce/ALU/shift-multiply blocks of the design are not
// built, because their function is not described.
//
// rst_n is the asynchronous reset of every register and also the disable
// condition of the handshake assertions, which sample it on the clock; the
// linter reports that second, verification-only use as a synchronous one.
module nmv
  import nlpe_pkg::*;
#(
  parameter int LANES  = 4,
  parameter int DEPTH  = 64,
  parameter int SMAX_N = 16,
  localparam int DA = $clog2(DEPTH),
  localparam int LB = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  af_sel_e       af_sel,
  input  prec_sel_e     prec_sel,
  input  logic [7:0]    len,
  output logic          busy,
  output logic          done,
  // shared memory buffer read port
  output logic [DA-1:0] sh_raddr,
  input  logic [15:0]   sh_rdata,
  // NMV memory buffer read port
  input  logic [DA-1:0] ob_raddr,
  output logic [15:0]   ob_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_CLR, S_RD, S_GO, S_WAIT, S_NORM, S_NGO, S_FIN} state_e;
  state_e     state;
  af_sel_e    cfg_af;
  prec_sel_e  cfg_prec;
  logic [7:0] cfg_len, idx;
  logic       smax;

  // lanes
  logic        l_start [LANES];
  logic        l_busy  [LANES];
  logic        l_done  [LANES];
  logic [15:0] l_dout  [LANES];
  af_sel_e     l_af    [LANES];
  logic [15:0] in_reg  [LANES];   // Input Reg-0 of each lane
  logic        pend    [LANES];
  logic [7:0]  pidx    [LANES];
  logic [7:0]  lidx    [LANES];   // index of the word a lane is working on
  logic        ldisc   [LANES];   // result to be discarded (softmax pass 1)
  logic        l_clr;

  logic          claim_ok;
  logic [LB-1:0] claim, sel;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fasst #(.SMAX_N(SMAX_N)) u_fasst (
      .clk, .rst_n, .start(l_start[l]), .clr(l_clr && l == 0),
      .af_sel(l_af[l]), .prec_sel(cfg_prec), .din(in_reg[l]),
      .busy(l_busy[l]), .done(l_done[l]), .dout(l_dout[l]));
  end

  // a free lane: idle and its previous result already written
  always_comb begin
    claim_ok = 1'b0;
    claim    = '0;
    if (smax) begin
      claim_ok = !l_busy[0] && !pend[0] && !l_start[0];
    end else begin
      for (int l = LANES - 1; l >= 0; l--)
        if (!l_busy[l] && !pend[l] && !l_start[l]) begin
          claim_ok = 1'b1;
          claim    = LB'(l);
        end
    end
  end

  // write-back: lowest pending lane
  logic         wb_en;
  logic [DA-1:0] wb_addr;
  logic [15:0]  wb_data;
  always_comb begin
    wb_en = 1'b0; sel = '0;
    for (int l = LANES - 1; l >= 0; l--)
      if (pend[l]) begin wb_en = 1'b1; sel = LB'(l); end
    wb_addr = DA'(pidx[sel]);
    wb_data = l_dout[sel];
  end

  sram_buf #(.W(16), .D(DEPTH)) u_obuf (
    .clk, .we(wb_en), .waddr(wb_addr), .wdata(wb_data),
    .raddr(ob_raddr), .rdata(ob_rdata));

  logic all_idle;
  always_comb begin
    all_idle = 1'b1;
    for (int l = 0; l < LANES; l++)
      if (l_busy[l] || pend[l] || l_start[l]) all_idle = 1'b0;
  end

  logic [LB-1:0] go_lane;
  assign sh_raddr = DA'(idx);
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cfg_af <= AF_RELU; cfg_prec <= PREC_BF16; cfg_len <= '0;
      idx <= '0; smax <= 1'b0; done <= 1'b0; l_clr <= 1'b0; go_lane <= '0;
      for (int l = 0; l < LANES; l++) begin
        l_start[l] <= 1'b0; l_af[l] <= AF_RELU; in_reg[l] <= '0;
        pend[l] <= 1'b0; pidx[l] <= '0; lidx[l] <= '0; ldisc[l] <= 1'b0;
      end
    end else begin
      done  <= 1'b0;
      l_clr <= 1'b0;
      for (int l = 0; l < LANES; l++) l_start[l] <= 1'b0;
      // capture finished results, release written ones
      for (int l = 0; l < LANES; l++) begin
        if (wb_en && sel == LB'(l)) pend[l] <= 1'b0;
        if (l_done[l] && !ldisc[l]) begin
          pend[l] <= 1'b1;
          pidx[l] <= lidx[l];
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          cfg_af   <= af_sel;
          cfg_prec <= prec_sel;
          cfg_len  <= len;
          smax     <= (af_sel == AF_SMAX_ACC || af_sel == AF_SMAX_NORM);
          idx      <= '0;
          if (len == 8'd0)                                          state <= S_FIN;
          else if (af_sel == AF_SMAX_ACC || af_sel == AF_SMAX_NORM) state <= S_CLR;
          else                                                      state <= S_RD;
        end
        S_CLR: begin
          l_clr <= 1'b1;
          state <= S_RD;
        end
        // read word idx while a lane is free
        S_RD: if (claim_ok) begin
          go_lane <= claim;
          state   <= S_GO;
        end
        // word arrived: load the input register and start the lane
        S_GO: begin
          in_reg[go_lane]  <= sh_rdata;
          l_af[go_lane]    <= smax ? AF_SMAX_ACC : cfg_af;
          l_start[go_lane] <= 1'b1;
          lidx[go_lane]    <= idx;
          ldisc[go_lane]   <= smax;
          if (idx == cfg_len - 8'd1) begin
            idx   <= '0;
            state <= smax ? S_NORM : S_WAIT;
          end else begin
            idx   <= idx + 8'd1;
            state <= S_RD;
          end
        end
        // softmax pass 2 on lane 0
        S_NORM: if (claim_ok) state <= S_NGO;
        S_NGO: begin
          l_af[0]    <= AF_SMAX_NORM;
          l_start[0] <= 1'b1;
          lidx[0]    <= idx;
          ldisc[0]   <= 1'b0;
          if (idx == cfg_len - 8'd1) state <= S_WAIT;
          else begin
            idx   <= idx + 8'd1;
            state <= S_NORM;
          end
        end
        S_WAIT: if (all_idle) state <= S_FIN;
        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("nmv: start while busy");
endmodule
