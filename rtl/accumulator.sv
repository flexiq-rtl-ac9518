// accumulator: per-output accumulation of the array's column sums.
//
// For every input vector (pixel) of the tile there is one entry of COLS
// accumulators. Each channel group of the layer adds its column sums to the
// entry of the same pixel. A 4-bit group's sums are in the scale of the
// extracted nibbles and arrive as two PSUM_W/2-bit lanes per column (low
// lane: first 32 channels of the group, high lane: the other 32). Each lane
// is sign-extended and shifted left by its own alignment (the bits dropped
// from the activation plus those dropped from that column's weights, 0..8),
// and both are added to the 8-bit results, as the paper describes
// ("bit-aligned based on the pre-set bit extraction positions and added to
// the 8-bit results in the accumulator"). An 8-bit group's column sum is one
// PSUM_W-bit value and is added unshifted; in_prec (the tag that travels
// with the data through the array) selects the case. in_first starts an
// entry from zero instead of adding (first group of a tile).
//
// Interface / timing: one column-sum vector per cycle on in_valid (read-
// modify-write of entry in_addr in that cycle; consecutive vectors use
// different entries). rd_en/rd_addr read an entry, data valid the next
// cycle. Entry count DEPTH and width ACC_W are this design's choice.
module accumulator
  import flexiq_pkg::*;
#(
  parameter int unsigned COLS   = 32,
  parameter int unsigned PSUM_W = 32,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned DEPTH  = 256
) (
  input  logic                              clk,
  input  logic                              in_valid,
  input  logic                              in_first,
  input  logic [$clog2(DEPTH)-1:0]          in_addr,
  input  prec_t                             in_prec,
  input  logic [COLS-1:0][1:0][SHIFT_W-1:0] in_shift,   // [c][0] low lane, [c][1] high lane
  input  logic [COLS-1:0][PSUM_W-1:0]       in_psum,
  input  logic                              rd_en,
  input  logic [$clog2(DEPTH)-1:0]          rd_addr,
  output logic [COLS-1:0][ACC_W-1:0]        rd_data
);

  logic [COLS-1:0][ACC_W-1:0] mem [DEPTH];
  logic [COLS-1:0][ACC_W-1:0] old_v, new_v;
  localparam int unsigned LANE_W = PSUM_W / 2;

  always_comb begin
    old_v = mem[in_addr];
    for (int c = 0; c < int'(COLS); c++) begin
      logic signed [ACC_W-1:0] aligned, lo, hi;
      lo = ACC_W'(signed'(in_psum[c][LANE_W-1:0]))      <<< in_shift[c][0];
      hi = ACC_W'(signed'(in_psum[c][PSUM_W-1:LANE_W])) <<< in_shift[c][1];
      aligned  = (in_prec == PREC4) ? lo + hi : ACC_W'(signed'(in_psum[c]));
      new_v[c] = (in_first ? '0 : old_v[c]) + aligned;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) mem[in_addr] <= new_v;
    if (rd_en)    rd_data      <= mem[rd_addr];
  end

endmodule
