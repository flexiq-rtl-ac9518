// bit_index_mux: the "mux" with a Bit Index input that sits between off-chip
// memory and the input and weight buffers (one instance on each path).
//
// Every lane carries one 8-bit value read from memory and its bit index u.
// In 8-bit mode the value passes unchanged. In 4-bit mode the lane is lowered
// to 4 bits by effective bit extraction (flexiq_pkg::extract4: skip u unused
// sign bits, round off 4-u low bits, clip to [-8, 7]), so the 8-bit model in
// memory serves every 4-bit ratio. The nibble is driven on both halves of the
// output byte; the buffer's nibble write enables decide which half it fills,
// so two memory words (channels r and r+LANES of a 64-channel group) pack into
// one buffer word. Placement of the extraction on the fill path follows the
// paper's NPU figure; the packing is this design's choice.
//
// Purely combinational.
module bit_index_mux
  import flexiq_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  prec_t                        prec,
  input  logic  [LANES-1:0][DATA_W-1:0] din,
  input  bidx_t [LANES-1:0]            bidx,
  output logic  [LANES-1:0][DATA_W-1:0] dout
);

  logic [LANES-1:0][NIB_W-1:0] nib;

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      nib[l]  = extract4(din[l], bidx[l]);
      dout[l] = (prec == PREC4) ? {nib[l], nib[l]} : din[l];
    end
  end

endmodule
