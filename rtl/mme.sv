// mme: SIMD Matrix Multiply Engine, an output-stationary systolic array.
//
// ROWS x COLS processing elements (npe) compute C = A x B^T where row r of
// A and row c of B are sequences of K packed SIMD vectors (24 bits each):
//   C[r][c] = sum over k of  A[r][k] . B[c][k]   (lane-wise products summed)
// in the precision given by `mode` (6xINT4, 6xFP4, 3xFP8 or 1xBF16 lanes).
//
// Buffers.  The kernel-weight buffer (WT) has one bank per array row and
// the input buffer (IN) one bank per array column.  Operands arrive as a
// linear stream through the data-reorder write port: element i of the WT
// stream goes to bank i % ROWS at address i / ROWS (so a k-major stream
// A[0][k], A[1][k], ... lands with row r in bank r), and likewise for IN
// with COLS.  This is the address mapper of the engine.
//
// Run.  `start` latches mode and K (config registers) and the FSM reads
// address k = 0..K-1 from all banks at once.  Row r is delayed r cycles
// and column c is delayed c cycles before entering the array (wavefront
// skew); valid/first/last travel with the weights.  The weights move right,
// the embeddings move down, each NPE accumulates its own output.  When the
// bottom-right NPE latches its result every result is final: `done` pulses
// and `busy` drops.  From the cycle in which `start` is seen to the cycle in which `done`
// is high takes K + ROWS + COLS + 6 cycles.  Results are
// read back with rd_idx = r*COLS + c (combinational); `exc_any` reports
// that at least one result saturated.
//
// The systolic array of SIMD NPEs, output-stationary dataflow, horizontal
// weights and vertical embeddings, WT and IN buffers, address mapper, FSM
// and config/status registers follow the design; the array size, buffer
// depth, bank mapping, skew and timing are this implementation's choices.
//
// rst_n is the asynchronous reset of every register and also the disable
// condition of the handshake assertions, which sample it on the clock; the
// linter reports that second, verification-only use as a synchronous one.
module mme
  import nlpe_pkg::*;
#(
  parameter int ROWS  = 16,
  parameter int COLS  = 16,
  parameter int DEPTH = 64,
  localparam int DA = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // data-reorder write port
  input  logic        wr_en,
  input  logic        wr_sel,      // 0 = WT, 1 = IN
  input  logic [15:0] wr_idx,
  input  logic [23:0] wr_data,
  // config / status
  input  logic        start,
  input  mac_mode_e   mode,
  input  logic [7:0]  k_len,       // K >= 1
  output logic        busy,
  output logic        done,
  output logic        exc_any,
  // result read-out
  input  logic [15:0] rd_idx,
  output logic [15:0] rd_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e     state;
  mac_mode_e  cfg_mode;
  logic [7:0] cfg_k, k;

  // ------------------------------------------------------------ buffers
  logic [23:0] wt_q [ROWS];
  logic [23:0] in_q [COLS];
  logic [DA-1:0] rd_addr;

  for (genvar r = 0; r < ROWS; r++) begin : g_wt
    sram_buf #(.W(24), .D(DEPTH)) u_wt (
      .clk, .we(wr_en && !wr_sel && (int'(wr_idx) % ROWS) == r),
      .waddr(DA'(int'(wr_idx) / ROWS)), .wdata(wr_data),
      .raddr(rd_addr), .rdata(wt_q[r]));
  end
  for (genvar c = 0; c < COLS; c++) begin : g_in
    sram_buf #(.W(24), .D(DEPTH)) u_in (
      .clk, .we(wr_en && wr_sel && (int'(wr_idx) % COLS) == c),
      .waddr(DA'(int'(wr_idx) / COLS)), .wdata(wr_data),
      .raddr(rd_addr), .rdata(in_q[c]));
  end

  // ------------------------------------------------------------ FSM
  npe_ctl_t issue_ctl, beat_ctl;
  logic     corner_done;

  assign rd_addr   = DA'(k);
  assign issue_ctl = '{valid: (state == S_RUN), first: (k == 8'd0), last: (k == cfg_k - 8'd1)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cfg_mode <= MODE_INT4; cfg_k <= 8'd1; k <= '0;
      done <= 1'b0; beat_ctl <= '0;
    end else begin
      done     <= 1'b0;
      beat_ctl <= issue_ctl;            // aligned with the registered bank read
      unique case (state)
        S_IDLE: if (start) begin
          cfg_mode <= mode;
          cfg_k    <= (k_len == 8'd0) ? 8'd1 : k_len;
          k        <= '0;
          state    <= S_RUN;
        end
        S_RUN: begin
          if (k == cfg_k - 8'd1) state <= S_DRAIN;
          else k <= k + 8'd1;
        end
        S_DRAIN: if (corner_done) begin
          state <= S_IDLE;
          done  <= 1'b1;
          k     <= '0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);

  // ------------------------------------------------------------ skew
  logic [23:0] a_h   [ROWS][COLS+1];
  npe_ctl_t    ctl_h [ROWS][COLS+1];
  logic [23:0] b_v   [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_skew_r
    logic [23:0] sa [r+1];
    npe_ctl_t    sc [r+1];
    assign sa[0] = wt_q[r];
    assign sc[0] = beat_ctl;
    for (genvar d = 1; d <= r; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) begin sa[d] <= '0; sc[d] <= '0; end
        else        begin sa[d] <= sa[d-1]; sc[d] <= sc[d-1]; end
    end
    assign a_h[r][0]   = sa[r];
    assign ctl_h[r][0] = sc[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_skew_c
    logic [23:0] sb [c+1];
    assign sb[0] = in_q[c];
    for (genvar d = 1; d <= c; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) sb[d] <= '0;
        else        sb[d] <= sb[d-1];
    end
    assign b_v[0][c] = sb[c];
  end

  // ------------------------------------------------------------ array
  logic [15:0] res   [ROWS*COLS];
  logic        res_v [ROWS*COLS];
  logic        res_x [ROWS*COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      npe u_npe (
        .clk, .rst_n, .mode(cfg_mode),
        .a_in(a_h[r][c]), .ctl_in(ctl_h[r][c]), .b_in(b_v[r][c]),
        .a_out(a_h[r][c+1]), .ctl_out(ctl_h[r][c+1]), .b_out(b_v[r+1][c]),
        .res(res[r*COLS+c]), .res_valid(res_v[r*COLS+c]), .res_exc(res_x[r*COLS+c]));
    end
  end

  assign corner_done = res_v[ROWS*COLS-1];

  always_comb begin
    exc_any = 1'b0;
    for (int i = 0; i < ROWS*COLS; i++) exc_any |= res_x[i];
  end

  assign rd_data = (int'(rd_idx) < ROWS*COLS) ? res[int'(rd_idx)] : 16'h0000;

  // a new run may only be started while idle
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("mme: start while busy");
endmodule
