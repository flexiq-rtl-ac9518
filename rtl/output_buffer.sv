// output_buffer: on-chip SRAM for finished 8-bit output vectors, written by
// the SIMD unit and read for write-back to off-chip memory.
//
// A word holds the COLS output channels of one pixel. One synchronous write
// port and one synchronous read port (data the cycle after rd_en). The paper
// names the block; its size and ports are this design's choice.
module output_buffer
  import flexiq_pkg::*;
#(
  parameter int unsigned COLS  = 32,
  parameter int unsigned DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [$clog2(DEPTH)-1:0]      wr_addr,
  input  logic [COLS-1:0][DATA_W-1:0]   wr_data,
  input  logic                          rd_en,
  input  logic [$clog2(DEPTH)-1:0]      rd_addr,
  output logic [COLS-1:0][DATA_W-1:0]   rd_data
);

  logic [COLS-1:0][DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data      <= mem[rd_addr];
  end

endmodule
