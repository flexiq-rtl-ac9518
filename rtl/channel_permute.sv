// channel_permute: output channel reordering for residual connections.
//
// Channel reordering makes the channels of every layer contiguous by
// precision; where a layer's output also feeds a residual connection, the
// consumer expects another channel order. The NPU then stores the output a
// second time, reordered. Output lane c of this crossbar takes input lane
// perm[c]. The paper gives the function (reorder on the store); the crossbar
// and the limitation to a permutation within one COLS-channel output tile are
// this design's choice. Purely combinational.
module channel_permute
  import flexiq_pkg::*;
#(
  parameter int unsigned COLS = 32
) (
  input  logic [COLS-1:0][DATA_W-1:0]        din,
  input  logic [COLS-1:0][$clog2(COLS)-1:0]  perm,
  output logic [COLS-1:0][DATA_W-1:0]        dout
);

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) dout[c] = din[perm[c]];
  end

endmodule
