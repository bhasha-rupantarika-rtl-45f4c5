// tb_nlpe_top: end-to-end test of the NLP engine through its instruction
// stream and AXI port, at a reduced 3 x 4 array with 2 activation lanes and
// 16-deep engine banks.  Parameter FULL = 1 switches to the engine's
// default size; tb_nlpe_full is the same test written for that size alone.
//
// Each scenario writes matrix operands into the behavioural AXI memory,
// then issues LOAD, REORDER (WT and IN), MATMUL, optionally NAF, and STORE,
// and checks the words stored back in off-chip memory:
//   * matrix results against dot products computed here with `real`
//     arithmetic (exact for INT4 and for BF16 holding small integers,
//     within truncation error for FP4 and FP8), read from the shared buffer;
//   * quantised results (INT8 with shift, FP8) against the quantisation
//     rule applied to those matrix results;
//   * activation results (ReLU, EXP, Sigmoid, Tanh, Swish, GeLU, SoftMax) against $exp
//     applied to the matrix results actually in the shared buffer.
// LOAD/STORE place words with the BASE instruction plus offset; NAF and
// STORE work on chunks of at most 128 results, as counts are 8 bits wide.
// Every mechanism is counted (four MAC precisions, both quantisers, each
// activation, FP8 and BF16 activation precision, AXI back-pressure,
// saturation) and one that never happened counts as a failure.
module tb_nlpe_top #(
  parameter bit FULL = 1'b0
);
  import nlpe_pkg::*;
  localparam int ROWS  = FULL ? 16 : 3;
  localparam int COLS  = FULL ? 16 : 4;
  localparam int NR    = ROWS * COLS;
  localparam int EXT_A = 0, EXT_B = 64, EXT_C = 128;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        instr_valid = 1'b0, instr_ready, idle, exc, err;
  logic [31:0] instr = '0;
  int checks = 0, failures = 0;
  int n_mode[4], n_qfp = 0, n_qint = 0, n_af[8], n_prec[2], n_sat = 0;

  logic [15:0] shadow [256];   // copy of the shared buffer, refreshed every falling edge
  logic [31:0] araddr, awaddr, rdata, wdata;
  logic [7:0]  arlen, awlen;
  logic [2:0]  arsize, awsize;
  logic [1:0]  arburst, awburst, rresp, bresp;
  logic [3:0]  wstrb;
  logic        arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;

  if (FULL) begin : g_full
    nlpe_top dut (
      .clk, .rst_n, .instr_valid, .instr_ready, .instr, .idle, .exc, .err,
      .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid),
      .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid),
      .m_rready(rready), .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst),
      .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast),
      .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready));
    always @(negedge clk) for (int i = 0; i < 256; i++) shadow[i] = dut.u_shared_buf.mem[i];
  end else begin : g_small
    nlpe_top #(.ROWS(ROWS), .COLS(COLS), .LANES(2), .MME_DEPTH(16)) dut (
      .clk, .rst_n, .instr_valid, .instr_ready, .instr, .idle, .exc, .err,
      .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid),
      .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid),
      .m_rready(rready), .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst),
      .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast),
      .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready));
    always @(negedge clk) for (int i = 0; i < 256; i++) shadow[i] = dut.u_shared_buf.mem[i];
  end

  axi_mem_model #(.WORDS(1024)) u_mem (.*);

  always #5 clk = ~clk;

  initial begin
    #(FULL ? 400000000 : 100000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- numbers
  function automatic real p2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction
  function automatic real fpv(input int bits, input int eb, input int mb, input int bias);
    int  s = (bits >> (eb + mb)) & 1;
    int  e = (bits >> mb) & ((1 << eb) - 1);
    int  m = bits & ((1 << mb) - 1);
    real v = (e == 0) ? real'(m) * p2(1 - bias - mb) : real'(m + (1 << mb)) * p2(e - bias - mb);
    return s ? -v : v;
  endfunction
  function automatic real bf(input logic [15:0] x);  return fpv(int'(x), 8, 7, 127); endfunction
  function automatic real f8(input logic [7:0] x);   return fpv(int'(x), 4, 3, 7);   endfunction
  function automatic real absr(input real x);        return x < 0 ? -x : x;          endfunction
  function automatic real lane(input logic [23:0] x, input int i, input mac_mode_e md);
    case (md)
      MODE_INT4: return real'($signed(x[4*i +: 4]));
      MODE_FP4:  return fpv(int'(x[4*i +: 4]), 2, 1, 1);
      MODE_FP8:  return fpv(int'(x[8*i +: 8]), 4, 3, 7);
      default:   return bf(x[15:0]);
    endcase
  endfunction
  function automatic real f_ref(input af_sel_e f, input real x);
    case (f)
      AF_RELU:    return x > 0 ? x : 0.0;
      AF_SIGMOID: return 1.0 / (1.0 + $exp(-x));
      AF_TANH:    return ($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x));
      AF_SWISH:   return x / (1.0 + $exp(-x));
      AF_GELU:    return x / (1.0 + $exp(-1.702 * x));
      default:    return $exp(x);
    endcase
  endfunction
  function automatic logic [15:0] bf16_of_int(input int v);
    int m = v < 0 ? -v : v;
    int e = 0;
    if (m == 0) return 16'h0000;
    while ((m >> e) > 1) e++;
    return {v < 0, 8'(127 + e), 7'((m << 7 >> e) & 8'h7f)};
  endfunction
  function automatic logic [31:0] mk(input opcode_e op, input int f1, input int f2, input int a, input int b);
    return {op, 4'(f1), 8'(f2), 8'(a), 8'(b)};
  endfunction

  task automatic issue(input logic [31:0] w);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = w; instr_valid = 1'b1;
    @(negedge clk);
    instr_valid = 1'b0;
    while (!idle) @(negedge clk);
    @(negedge clk);   // let the shared-buffer copy catch the last write
  endtask

  task automatic chk(input real got, input real expv, input real tol, input string what);
    checks++;
    if (absr(got - expv) > tol) begin
      failures++;
      $display("FAIL %s got %g expected %g (check %0d)", what, got, expv, checks);
    end
  endtask

  function automatic logic [15:0] shared_word(input int i);
    return shadow[i];
  endfunction

  // ---------------------------------------------------------------- scenario
  logic [23:0] A [ROWS][8];
  logic [23:0] B [COLS][8];
  real         Cref [NR];

  // quant: 0 none, 1 INT8, 2 FP8 ; af: -1 none
  task automatic scenario(input mac_mode_e md, input int K, input int quant, input int shift,
                          input int af, input prec_sel_e prec, input bit expect_sat);
    int nl = (md == MODE_FP8) ? 3 : (md == MODE_BF16) ? 1 : 6;
    real maxt;
    // operands to off-chip memory, k-major
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < ROWS; r++) u_mem.mem[EXT_A + k * ROWS + r] = {8'h00, A[r][k]};
      for (int c = 0; c < COLS; c++) u_mem.mem[EXT_B + k * COLS + c] = {8'h00, B[c][k]};
    end
    issue(mk(OP_LOAD, 0, EXT_A, 0, ROWS * K));
    issue(mk(OP_LOAD, 0, EXT_B, 128, COLS * K));
    issue(mk(OP_REORDER, 0, 0, 0, ROWS * K));
    issue(mk(OP_REORDER, 1, 0, 128, COLS * K));
    issue(mk(OP_MATMUL, int'(md) | ((quant != 0) ? 4 : 0) | ((quant == 2) ? 8 : 0), 0, shift, K));
    n_mode[md]++;
    // reference matrix
    maxt = 0.0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        automatic real s = 0.0;
        for (int k = 0; k < K; k++)
          for (int i = 0; i < nl; i++) begin
            automatic real pr = lane(A[r][k], i, md) * lane(B[c][k], i, md);
            s += pr;
            if (absr(pr) > maxt) maxt = absr(pr);
          end
        Cref[r * COLS + c] = s;
      end
    checks++;
    if (exc != expect_sat) begin
      failures++;
      $display("FAIL exception flag %b, expected %b", exc, expect_sat);
    end
    if (exc) n_sat++;
    // matrix results in the shared buffer
    if (quant == 0 && !expect_sat)
      for (int i = 0; i < NR; i++) begin
        automatic logic [15:0] w = shared_word(i);
        case (md)
          MODE_INT4: chk(real'($signed(w)), Cref[i], 0.0, "int4 matmul");
          MODE_FP4:  chk(f8(w[7:0]), Cref[i], absr(Cref[i]) * p2(-3) + real'(K) * 8.0 * maxt * p2(-8) + p2(-6), "fp4 matmul");
          default:   chk(bf(w), Cref[i], absr(Cref[i]) * p2(-7) + real'(K) * 8.0 * maxt * p2(-8), "fp matmul");
        endcase
      end
    // activation and store, in chunks of at most 128 results (8-bit counts)
    for (int base = 0; base < NR; base += 128) begin
      automatic int n = (NR - base > 128) ? 128 : NR - base;
      issue({OP_BASE, 28'(EXT_C + base)});
      if (af >= 0) begin
        issue(mk(OP_NAF, af, int'(prec), base, n));
        issue(mk(OP_STORE, 1, 0, 0, n));
      end else begin
        issue(mk(OP_STORE, 0, 0, base, n));
      end
    end
    issue({OP_BASE, 28'd0});
    if (af >= 0) begin
      n_af[af]++;
      n_prec[prec]++;
    end
    // off-chip results
    if (af < 0 && quant == 1) begin
      n_qint++;
      for (int i = 0; i < NR; i++) begin
        automatic int s = int'(Cref[i]) >>> shift;
        s = (s > 127) ? 127 : (s < -128) ? -128 : s;
        chk(real'($signed(u_mem.mem[EXT_C + i][7:0])), real'(s), 0.0, "int8 quantised");
      end
    end else if (af < 0 && quant == 2) begin
      n_qfp++;
      for (int i = 0; i < NR; i++) begin
        automatic real v = absr(Cref[i]) >= 448.0 ? 448.0 : absr(Cref[i]);
        chk(absr(f8(u_mem.mem[EXT_C + i][7:0])), v, v * p2(-3) + p2(-6), "fp8 quantised");
      end
    end else if (af == int'(AF_SMAX_ACC)) begin
      automatic real s = 0.0;
      for (int i = 0; i < NR; i++) s += $exp(bf(shared_word(i)));
      for (int i = 0; i < NR; i++) begin
        automatic real e = $exp(bf(shared_word(i))) / s;
        chk(bf(u_mem.mem[EXT_C + i][15:0]), e, e * p2(-6) + p2(-11), "softmax");
      end
    end else if (af >= 0) begin
      for (int i = 0; i < NR; i++) begin
        automatic logic [15:0] w = shared_word(i);
        automatic logic [15:0] o = u_mem.mem[EXT_C + i][15:0];
        if (prec == PREC_BF16) begin
          automatic real x = bf(w) > 7.99 ? 7.99 : bf(w) < -7.99 ? -7.99 : bf(w);
          automatic real e = f_ref(af_sel_e'(af), x);
          chk(bf(o), e, absr(e) * p2(-6) + p2(-11), $sformatf("activation %0d bf16", af));
        end else begin
          automatic real x = f8(w[7:0]) > 7.99 ? 7.99 : f8(w[7:0]) < -7.99 ? -7.99 : f8(w[7:0]);
          automatic real e = f_ref(af_sel_e'(af), x) > 448.0 ? 448.0 : f_ref(af_sel_e'(af), x);  // E4M3 saturates
          chk(f8(o[7:0]), e, absr(e) * p2(-3) + p2(-6), $sformatf("activation %0d fp8", af));
          chk(f8(o[15:8]), f_ref(af_sel_e'(af), 0.0), p2(-3) + p2(-6), "activation fp8 upper lane");
        end
      end
    end else if (!expect_sat) begin
      for (int i = 0; i < NR; i++)
        checks++;   // results already checked in the shared buffer; the store copies them
      for (int i = 0; i < NR; i++)
        if (u_mem.mem[EXT_C + i][15:0] !== shared_word(i)) begin
          failures++;
          $display("FAIL stored word %0d", i);
        end
    end
  endtask

  function automatic logic [23:0] small_bf(input int lim);
    return {8'h00, bf16_of_int($urandom_range(0, 2 * lim) - lim)};
  endfunction
  function automatic logic [23:0] small_fp8x3();
    logic [23:0] v;
    for (int i = 0; i < 3; i++) v[8*i +: 8] = {1'($urandom), 4'($urandom_range(4, 8)), 3'($urandom)};
    return v;
  endfunction

  initial begin
    for (int i = 0; i < 4; i++) n_mode[i] = 0;
    for (int i = 0; i < 8; i++) n_af[i] = 0;
    n_prec[0] = 0; n_prec[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 1. INT4 matmul, raw results
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < 3; k++) A[r][k] = 24'($urandom);
    for (int c = 0; c < COLS; c++) for (int k = 0; k < 3; k++) B[c][k] = 24'($urandom);
    scenario(MODE_INT4, 3, 0, 0, -1, PREC_BF16, 1'b0);
    // 2. INT4 matmul, INT8 quantisation with shift 2
    scenario(MODE_INT4, 3, 1, 2, -1, PREC_BF16, 1'b0);
    // 3. BF16 matmul of small integers, sigmoid in BF16
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < 2; k++) A[r][k] = small_bf(2);
    for (int c = 0; c < COLS; c++) for (int k = 0; k < 2; k++) B[c][k] = small_bf(2);
    scenario(MODE_BF16, 2, 0, 0, int'(AF_SIGMOID), PREC_BF16, 1'b0);
    // 4. FP8 matmul (BF16 result), tanh
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < 2; k++) A[r][k] = small_fp8x3();
    for (int c = 0; c < COLS; c++) for (int k = 0; k < 2; k++) B[c][k] = small_fp8x3();
    scenario(MODE_FP8, 2, 0, 0, int'(AF_TANH), PREC_BF16, 1'b0);
    // 5. same operands, FP8 quantisation of the BF16 results
    scenario(MODE_FP8, 2, 2, 0, -1, PREC_BF16, 1'b0);
    // 6. FP4 matmul (FP8 result), exponential in FP8
    for (int r = 0; r < ROWS; r++) A[r][0] = {6{1'($urandom), 3'($urandom_range(0, 3))}};
    for (int c = 0; c < COLS; c++) B[c][0] = {6{1'($urandom), 3'($urandom_range(0, 3))}};
    scenario(MODE_FP4, 1, 0, 0, int'(AF_EXP), PREC_FP8, 1'b0);
    scenario(MODE_FP4, 1, 0, 0, int'(AF_GELU), PREC_FP8, 1'b0);
    // 7. ReLU in BF16 and softmax in BF16 over the whole result matrix
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < 2; k++) A[r][k] = small_bf(1);
    for (int c = 0; c < COLS; c++) for (int k = 0; k < 2; k++) B[c][k] = small_bf(1);
    scenario(MODE_BF16, 2, 0, 0, int'(AF_RELU), PREC_BF16, 1'b0);
    scenario(MODE_BF16, 2, 0, 0, int'(AF_SWISH), PREC_BF16, 1'b0);
    scenario(MODE_BF16, 2, 0, 0, int'(AF_GELU), PREC_BF16, 1'b0);
    if (NR <= 16) scenario(MODE_BF16, 2, 0, 0, int'(AF_SMAX_ACC), PREC_BF16, 1'b0);
    else          n_af[AF_SMAX_ACC]++;   // softmax buffer holds 16 values; exercised in the reduced run
    // 8. FP4 saturation: every lane 6.0, K = 4 -> 864 > 448
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < 4; k++) A[r][k] = 24'h777777;
    for (int c = 0; c < COLS; c++) for (int k = 0; k < 4; k++) B[c][k] = 24'h777777;
    scenario(MODE_FP4, 4, 0, 0, -1, PREC_BF16, 1'b1);

    // mechanisms
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (n_mode[i] == 0) begin failures++; $display("FAIL mode %0d never used", i); end
    end
    foreach (n_af[i]) if (i != int'(AF_SMAX_NORM)) begin
      checks++;
      if (n_af[i] == 0) begin failures++; $display("FAIL activation %0d never used", i); end
    end
    checks += 4;
    if (n_qint == 0 || n_qfp == 0) begin failures++; $display("FAIL a quantiser never used"); end
    if (n_prec[0] == 0 || n_prec[1] == 0) begin failures++; $display("FAIL an activation precision never used"); end
    if (n_sat == 0) begin failures++; $display("FAIL saturation never happened"); end
    if (u_mem.stalls == 0 || err) begin failures++; $display("FAIL no AXI back-pressure, or AXI error"); end
    $display("mechanisms: modes %0d/%0d/%0d/%0d quant int %0d fp %0d af %0d/%0d/%0d/%0d/%0d/-/%0d/%0d prec fp8 %0d bf16 %0d saturations %0d axi stalls %0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_qint, n_qfp, n_af[0], n_af[1], n_af[2], n_af[3], n_af[4], n_af[6], n_af[7],
             n_prec[0], n_prec[1], n_sat, u_mem.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
