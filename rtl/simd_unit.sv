// simd_unit: COLS-lane vector unit between the accumulator and the output
// buffer.
//
// Each lane requantises one accumulated output to an 8-bit activation for
// the next layer: y = clip(round(acc * rq_mult / 2^rq_shift), -128, 127),
// rounding half up, then optionally clamps at zero (ReLU). The clip follows
// the paper's quantisation equation; the paper names the SIMD block but not
// its operations, so this operation set (one multiplier and shift per layer)
// is this design's choice and covers only what a quantised convolution or
// linear layer needs.
//
// Timing: one vector per cycle, result registered (one-cycle latency).
module simd_unit
  import flexiq_pkg::*;
#(
  parameter int unsigned COLS  = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [COLS-1:0][ACC_W-1:0]    in_acc,
  input  logic [15:0]                   rq_mult,
  input  logic [5:0]                    rq_shift,
  input  logic                          relu,
  output logic                          out_valid,
  output logic [COLS-1:0][DATA_W-1:0]   out_data
);

  localparam int unsigned PW = ACC_W + 17;

  logic [COLS-1:0][DATA_W-1:0] y;

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) begin
      logic signed [PW-1:0] p;
      logic signed [PW-1:0] q;
      p = PW'(signed'(in_acc[c])) * PW'(signed'({1'b0, rq_mult}));
      if (rq_shift != 6'd0) p = p + (PW'(1) <<< (rq_shift - 6'd1));
      q = p >>> rq_shift;
      if (relu && q < 0)     y[c] = 8'd0;
      else if (q > 127)      y[c] = 8'd127;
      else if (q < -128)     y[c] = 8'h80;
      else                   y[c] = q[DATA_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= y;
    end
  end

endmodule
