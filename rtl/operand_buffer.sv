// operand_buffer: on-chip SRAM for array operands; one instance is the input
// buffer, one the weight buffer.
//
// A word is LANES bytes, one per array row (input buffer) or column (weight
// buffer). Writes have a nibble enable per half so that a 4-bit operand word,
// which holds two input channels per byte, is filled from two memory words:
// wr_lo writes bits [3:0] of every byte, wr_hi bits [7:4]; both together write
// an 8-bit word. Reads are synchronous: rd_data is valid the cycle after
// rd_en. One read and one write port. The paper names both buffers but gives
// neither their size nor their organisation; DEPTH is this design's choice.
module operand_buffer
  import flexiq_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          wr_lo,
  input  logic                          wr_hi,
  input  logic [$clog2(DEPTH)-1:0]      wr_addr,
  input  logic [LANES-1:0][DATA_W-1:0]  wr_data,
  input  logic                          rd_en,
  input  logic [$clog2(DEPTH)-1:0]      rd_addr,
  output logic [LANES-1:0][DATA_W-1:0]  rd_data
);

  logic [LANES-1:0][NIB_W-1:0] mem_lo [DEPTH];
  logic [LANES-1:0][NIB_W-1:0] mem_hi [DEPTH];
  logic [LANES-1:0][NIB_W-1:0] wlo, whi, rlo, rhi;

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      wlo[l] = wr_data[l][NIB_W-1:0];
      whi[l] = wr_data[l][DATA_W-1:NIB_W];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_lo) mem_lo[wr_addr] <= wlo;
    if (wr_hi) mem_hi[wr_addr] <= whi;
    if (rd_en) begin
      rlo <= mem_lo[rd_addr];
      rhi <= mem_hi[rd_addr];
    end
  end

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) rd_data[l] = {rhi[l], rlo[l]};
  end

endmodule
