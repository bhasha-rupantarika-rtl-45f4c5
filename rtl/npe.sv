// npe: one neural processing element of the output-stationary systolic array.
//
// The weight vector a_in (with its valid/first/last control) enters from
// the left neighbour and the embedding vector b_in from the neighbour above;
// both are registered and forwarded to the right (a_out, ctl_out) and
// downward (b_out) one cycle later.  Meanwhile the local SIMD MAC multiplies
// the pair and accumulates into its quire, so the partial result of the
// output element stays inside the PE.  When the beat flagged `last` has
// passed through the MAC pipeline (5 cycles) the finished result is latched
// in `res` and `res_valid` pulses for one cycle; `res` then holds until the
// next result.  The precision mode is common to the whole array.
//
// Output-stationary operation with horizontal weights and vertical
// embeddings follows the design; one register per hop and the control that
// rides along with the weights are this implementation's choices.
module npe
  import nlpe_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  mac_mode_e   mode,
  input  logic [23:0] a_in,
  input  npe_ctl_t    ctl_in,
  input  logic [23:0] b_in,
  output logic [23:0] a_out,
  output npe_ctl_t    ctl_out,
  output logic [23:0] b_out,
  output logic [15:0] res,
  output logic        res_valid,
  output logic        res_exc
);
  logic        mac_v, mac_exc;
  logic [15:0] mac_out;

  simd_mac u_mac (
    .clk, .rst_n,
    .in_valid (ctl_in.valid),
    .first    (ctl_in.first),
    .last     (ctl_in.last),
    .mode,
    .a        (a_in),
    .b        (b_in),
    .c        (16'h0000),
    .out_valid(mac_v),
    .out      (mac_out),
    .exc      (mac_exc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; b_out <= '0; ctl_out <= '0;
      res <= '0; res_valid <= 1'b0; res_exc <= 1'b0;
    end else begin
      a_out     <= a_in;
      b_out     <= b_in;
      ctl_out   <= ctl_in;
      res_valid <= mac_v;
      if (mac_v) begin
        res     <= mac_out;
        res_exc <= mac_exc;
      end
    end
  end
endmodule
