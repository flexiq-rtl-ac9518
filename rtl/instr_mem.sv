// instr_mem: instruction memory of the NPU, one layer instruction
// (flexiq_pkg::instr_t) per entry.
//
// The host writes instructions through the write port; the controller reads
// them. Changing the 4-bit ratio of the model only means rewriting the
// n_ch4 / n_ch8 fields (the paper's max_4bit_ch) of the affected entries,
// which the paper reports as the NPU's only cost of a precision switch.
// Reads are synchronous (data the cycle after rd_en). DEPTH is this design's
// choice.
module instr_mem
  import flexiq_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  instr_t                     wr_data,
  input  logic                       rd_en,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output instr_t                     rd_data
);

  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data      <= mem[rd_addr];
  end

endmodule
