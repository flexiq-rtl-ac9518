// pe: one processing element of the precision-scalable systolic array.
//
// The PE holds one stationary 8-bit weight word and has four 4-bit
// multipliers, arranged as in the paper's PE figure: operand nibbles
// X1 = x[3:0], X3 = x[7:4] (activation) and X2 = w[3:0], X4 = w[7:4] (weight).
//
//   8-bit mode: all four multipliers run. The four nibble products are
//     combined with shifts of 0, 4, 4 and 8 into one signed 8x8 product
//     (high nibbles signed, low nibbles unsigned).
//   4-bit mode: the two diagonal multipliers compute X1*X2 and X3*X4 with
//     signed nibbles, i.e. two independent 4-bit input channels. The
//     off-diagonal pair is gated off. The partial sum is split into two
//     PSUM_W/2-bit lanes (16 bits at the default width): X1*X2 is added to
//     the low lane and X3*X4 to the high lane, so each column delivers two
//     sums, 64 per array, that the accumulator aligns separately. The paper
//     says the two 4-bit MAC results "are accumulated to produce 64 16-bit
//     values, which are bit-aligned"; packing them into the 8-bit partial-sum
//     register is this design's choice.
//
// Each multiplier takes 5-bit signed operands so that the same hardware
// serves signed and unsigned nibbles; this is this design's choice, the paper
// only says each PE has four 4-bit MACs.
//
// Timing: the activation (with its precision tag) is passed to the right
// neighbour and the partial sum psum_in + product to the PE below, both
// registered, so the PE has a one-cycle latency in either mode. w_load writes
// the weight register. Which of X1/X2 is the activation is not printed in the
// figure; here the activation is X1/X3.
module pe
  import flexiq_pkg::*;
#(
  parameter int unsigned PSUM_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic [DATA_W-1:0]        w_in,
  input  logic [DATA_W-1:0]        x_in,
  input  prec_t                    prec_in,
  input  logic signed [PSUM_W-1:0] psum_in,
  output logic [DATA_W-1:0]        x_out,
  output prec_t                    prec_out,
  output logic signed [PSUM_W-1:0] psum_out
);

  logic [DATA_W-1:0] w_q;

  // Operand nibbles extended to 5-bit signed; low nibbles are unsigned in
  // 8-bit mode and signed in 4-bit mode.
  logic signed [4:0] x_lo, x_hi, w_lo, w_hi;
  logic signed [9:0] m_ll, m_hl, m_lh, m_hh;
  logic signed [17:0] prod;
  localparam int unsigned LANE_W = PSUM_W / 2;
  logic [LANE_W-1:0] lane_lo, lane_hi;

  always_comb begin
    x_lo = (prec_in == PREC4) ? {x_in[3], x_in[3:0]} : {1'b0, x_in[3:0]};
    w_lo = (prec_in == PREC4) ? {w_q[3],  w_q[3:0]}  : {1'b0, w_q[3:0]};
    x_hi = {x_in[7], x_in[7:4]};
    w_hi = {w_q[7],  w_q[7:4]};
    m_ll = x_lo * w_lo;                                   // X1 x X2
    m_hh = x_hi * w_hi;                                   // X3 x X4
    m_hl = (prec_in == PREC4) ? 10'sd0 : x_hi * w_lo;        // unused in 4-bit mode
    m_lh = (prec_in == PREC4) ? 10'sd0 : x_lo * w_hi;        // unused in 4-bit mode
    prod    = 18'(m_ll) + (18'(m_hl) <<< 4) + (18'(m_lh) <<< 4) + (18'(m_hh) <<< 8);
    lane_lo = psum_in[LANE_W-1:0]      + LANE_W'(m_ll);
    lane_hi = psum_in[PSUM_W-1:LANE_W] + LANE_W'(m_hh);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= '0;
      x_out    <= '0;
      prec_out <= PREC8;
      psum_out <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      x_out    <= x_in;
      prec_out <= prec_in;
      psum_out <= (prec_in == PREC4) ? {lane_hi, lane_lo} : psum_in + PSUM_W'(prod);
    end
  end

endmodule
