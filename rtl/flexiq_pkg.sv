// flexiq_pkg: types, constants and the bit-lowering arithmetic shared by the
// FlexiQ 4/8-bit mixed-precision NPU.
//
// The NPU computes convolution / linear layers whose input (feature) channels
// are split in two contiguous parts: the first max_4bit_ch channels are
// computed with 4-bit operands, the rest with 8-bit operands. The 4-bit
// operands are not stored separately: they are extracted at run time from the
// 8-bit values by skipping the high bits that only repeat the sign ("unused
// bits") and rounding away the low ones.
//
// A bit index u (0..4) is the number of unused high bits skipped. The 4-bit
// value is round(x8 / 2^(4-u)), clipped to [-8, 7], so it stands for the
// 8-bit value scaled down by 2^(4-u). u = 0 is the naive "top four bits"
// conversion; u = 4 keeps the low nibble unchanged. The rounding (add the
// highest dropped bit) and the examples 29 -> 7 (u = 2) and -9 -> -4 (u = 3)
// follow the paper's bit-extraction figure; the encoding of u is this
// design's own.
package flexiq_pkg;

  localparam int unsigned DATA_W  = 8;   // high precision operand width
  localparam int unsigned NIB_W   = 4;   // low precision operand width
  localparam int unsigned BIDX_W  = 3;   // bit index, 0..4
  localparam int unsigned MAXU    = 4;   // largest bit index
  localparam int unsigned SHIFT_W = 4;   // accumulator alignment, 0..8
  localparam int unsigned ADDR_W  = 24;  // off-chip word address
  localparam int unsigned CNT_W   = 16;  // channel / pixel counts

  typedef logic [BIDX_W-1:0] bidx_t;

  // Compute precision of a channel group.
  typedef enum logic {
    PREC8 = 1'b0,
    PREC4 = 1'b1
  } prec_t;

  // One layer instruction, as held in the instruction memory. The 4-bit
  // ratio of a layer is changed by rewriting n_ch4 (max_4bit_ch) and n_ch8.
  // A memory word is COLS bytes. With C = n_ch4 + n_ch8 input channels,
  // G = n_ch4/(2*ROWS) + n_ch8/ROWS channel groups, output tile t (COLS
  // output channels) and pixel p:
  //   activations of channels 32b..32b+31:  in_addr  + b*n_pix + p
  //   weights of input channel ch, tile t:  w_addr   + t*C + ch   (byte = output channel)
  //   static bit indices of group g:        idx_addr + t*G + g
  //   outputs:                              out_addr + t*n_pix + p
  //   reordered copy / its permutation:     res_addr + t*n_pix + p / perm_addr + t
  typedef struct packed {
    logic              last;      // last instruction of the program
    logic [CNT_W-1:0]  n_ch4;     // input channels computed in 4-bit (multiple of 2*ROWS)
    logic [CNT_W-1:0]  n_ch8;     // input channels computed in 8-bit (multiple of ROWS)
    logic [CNT_W-1:0]  n_pix;     // input vectors (pixels / tokens) of the layer
    logic [CNT_W-1:0]  n_otile;   // output tiles of COLS output channels
    logic [ADDR_W-1:0] in_addr;
    logic [ADDR_W-1:0] w_addr;
    logic [ADDR_W-1:0] idx_addr;
    logic [ADDR_W-1:0] out_addr;
    logic              dyn_ext;   // detect activation bit index at run time
    logic              relu;      // clamp outputs at zero
    logic [15:0]       rq_mult;   // requantisation multiplier
    logic [5:0]        rq_shift;  // requantisation right shift
    logic              res_en;    // also store a channel-reordered copy
    logic [ADDR_W-1:0] res_addr;
    logic [ADDR_W-1:0] perm_addr;
  } instr_t;

  // Lower an 8-bit value to 4 bits at bit index u (see header).
  function automatic logic signed [NIB_W-1:0] extract4(input logic signed [DATA_W-1:0] x,
                                                       input bidx_t u);
    logic [2:0]               s;
    logic signed [DATA_W:0]   t;
    logic signed [DATA_W:0]   r;
    s = (u >= bidx_t'(MAXU)) ? 3'd0 : 3'(bidx_t'(MAXU) - u);
    t = (DATA_W+1)'(x) >>> s;
    r = (s == 3'd0) ? '0 : (DATA_W+1)'(x[s-1]);
    t = t + r;
    if (t > 9'sd7)        return 4'sd7;
    else if (t < -9'sd8)  return -4'sd8;
    else                  return t[NIB_W-1:0];
  endfunction

  // Number of high bits of x that only repeat its sign, limited to MAXU.
  function automatic bidx_t unused_bits(input logic [DATA_W-2:0] mag);
    bidx_t u;
    u = bidx_t'(MAXU);
    for (int i = int'(MAXU) - 1; i >= 0; i--) begin
      if (mag[DATA_W-2-i]) u = bidx_t'(i);
    end
    return u;
  endfunction

endpackage
