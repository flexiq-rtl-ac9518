// bit_range_detect: run-time detection of the bit extraction position of a
// channel group (the paper's optional "dynamic extract").
//
// As the 8-bit values of a group stream past, each is folded to its
// magnitude bits (x XOR its sign, so that -1 and 0 both give zero) and
// OR-ed into a running register. The number of leading zeros of that OR,
// limited to 4, is the number of high bits no value of the group uses: the
// bit index u for flexiq_pkg::extract4. The OR reduction is the paper's
// method; the sign folding and the limit are this design's choice.
//
// Interface: clear starts a new group (takes priority over in_valid);
// in_valid marks a beat of LANES values. bidx is combinational from the
// register, so it reflects every beat accepted up to the previous edge.
module bit_range_detect
  import flexiq_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          in_valid,
  input  logic [LANES-1:0][DATA_W-1:0]  din,
  output bidx_t                         bidx
);

  logic [DATA_W-2:0] or_q, or_beat;

  always_comb begin
    or_beat = '0;
    for (int l = 0; l < int'(LANES); l++)
      or_beat |= din[l][DATA_W-2:0] ^ {(DATA_W-1){din[l][DATA_W-1]}};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        or_q <= '0;
    else if (clear)    or_q <= '0;
    else if (in_valid) or_q <= or_q | or_beat;
  end

  assign bidx = unused_bits(or_q);

endmodule
