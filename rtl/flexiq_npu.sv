// flexiq_npu: top level of the FlexiQ 4/8-bit mixed-precision NPU.
//
// A weight-stationary systolic array (ROWS x COLS PEs with four 4-bit MACs
// each) computes convolution / linear layers whose input channels are split
// into a 4-bit part and an 8-bit part. Only 8-bit weights and activations
// live in off-chip memory; on their way into the weight and input buffers
// they pass a bit-index mux that, for 4-bit channel groups, extracts the four
// most significant used bits of every value. The array then processes 2*ROWS
// input channels per pass in 4-bit mode and ROWS in 8-bit mode. In 4-bit
// mode each column delivers two 16-bit sums (one per 32-channel half of the
// group), which the accumulator shifts back to the 8-bit scale, each by its
// own extraction positions, before adding them. A SIMD unit requantises the results into the output buffer, from
// where they are written back (and, for residual connections, written a
// second time in another channel order). The controller executes layer
// instructions from the instruction memory; the 4-bit ratio of a layer is its
// n_ch4 field, so the host changes the latency/accuracy trade-off by
// rewriting instructions.
//
// Ports: a host port to write the instruction memory and start a program at
// start_pc (busy while running, done pulses at the end), and one word-wide
// off-chip memory port (requests with valid/ready, read responses in order).
// A memory word is COLS bytes. The block structure follows the paper's NPU
// figure; the memory port, the instruction format and the buffer sizes are
// this design's own.
module flexiq_npu
  import flexiq_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned PSUM_W     = 32,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned BUF_DEPTH  = 256,
  parameter int unsigned IMEM_DEPTH = 64,
  localparam int unsigned MEM_W     = COLS * DATA_W,
  localparam int unsigned IA_W      = $clog2(IMEM_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host
  input  logic                 im_wr_en,
  input  logic [IA_W-1:0]      im_wr_addr,
  input  instr_t               im_wr_data,
  input  logic                 start,
  input  logic [IA_W-1:0]      start_pc,
  output logic                 busy,
  output logic                 done,
  // off-chip memory
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_we,
  output logic [ADDR_W-1:0]    mem_req_addr,
  output logic [MEM_W-1:0]     mem_req_wdata,
  input  logic                 mem_rsp_valid,
  input  logic [MEM_W-1:0]     mem_rsp_rdata
);

  localparam int unsigned BA_W = $clog2(BUF_DEPTH);
  localparam int unsigned RA_W = $clog2(ROWS);

  logic                          im_rd_en;
  logic [IA_W-1:0]               im_rd_addr;
  instr_t                        im_rd_data;
  prec_t                         mux_prec;
  bidx_t [ROWS-1:0]              imux_bidx;
  bidx_t [COLS-1:0]              wmux_bidx;
  logic                          rd_clear, rd_valid;
  bidx_t                         rd_bidx;
  logic                          wb_wr_lo, wb_wr_hi, wb_rd_en;
  logic [RA_W-1:0]               wb_wr_addr, wb_rd_addr;
  logic                          ib_wr_lo, ib_wr_hi, ib_rd_en;
  logic [BA_W-1:0]               ib_wr_addr, ib_rd_addr;
  logic                          sa_w_load, sa_in_valid, sa_out_valid;
  logic [RA_W-1:0]               sa_w_row;
  prec_t                         sa_in_prec, sa_out_prec;
  logic                          acc_in_valid, acc_in_first, acc_rd_en;
  logic [BA_W-1:0]               acc_in_addr, acc_rd_addr;
  logic [COLS-1:0][1:0][SHIFT_W-1:0] acc_in_shift;
  logic                          simd_in_valid, simd_relu, simd_out_valid;
  logic [15:0]                   simd_rq_mult;
  logic [5:0]                    simd_rq_shift;
  logic                          ob_wr_en, ob_rd_en;
  logic [BA_W-1:0]               ob_wr_addr, ob_rd_addr;
  logic [COLS-1:0][$clog2(COLS)-1:0] perm;

  logic [ROWS-1:0][DATA_W-1:0]   mem_in_lanes, imux_out, ib_rd_data;
  logic [COLS-1:0][DATA_W-1:0]   mem_w_lanes, wmux_out, wb_rd_data;
  logic [COLS-1:0][DATA_W-1:0]   simd_out, ob_rd_data, perm_out;
  logic [COLS-1:0][PSUM_W-1:0]   sa_psum;
  logic [COLS-1:0][ACC_W-1:0]    acc_rd_data;

  assign mem_in_lanes = mem_rsp_rdata;
  assign mem_w_lanes  = mem_rsp_rdata;

  instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .wr_en(im_wr_en), .wr_addr(im_wr_addr), .wr_data(im_wr_data),
    .rd_en(im_rd_en), .rd_addr(im_rd_addr), .rd_data(im_rd_data)
  );

  npu_controller #(
    .ROWS(ROWS), .COLS(COLS), .BUF_DEPTH(BUF_DEPTH), .IMEM_DEPTH(IMEM_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .start_pc, .busy, .done,
    .im_rd_en, .im_rd_addr, .im_rd_data,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .mux_prec, .imux_bidx, .wmux_bidx, .rd_clear, .rd_valid, .rd_bidx,
    .wb_wr_lo, .wb_wr_hi, .wb_wr_addr, .wb_rd_en, .wb_rd_addr,
    .ib_wr_lo, .ib_wr_hi, .ib_wr_addr, .ib_rd_en, .ib_rd_addr,
    .sa_w_load, .sa_w_row, .sa_in_valid, .sa_in_prec, .sa_out_valid,
    .acc_in_valid, .acc_in_first, .acc_in_addr, .acc_in_shift, .acc_rd_en, .acc_rd_addr,
    .simd_in_valid, .simd_rq_mult, .simd_rq_shift, .simd_relu, .simd_out_valid,
    .ob_wr_en, .ob_wr_addr, .ob_rd_en, .ob_rd_addr, .ob_rd_data,
    .perm, .perm_data(perm_out)
  );

  bit_index_mux #(.LANES(COLS)) u_wmux (
    .prec(mux_prec), .din(mem_w_lanes), .bidx(wmux_bidx), .dout(wmux_out)
  );

  bit_index_mux #(.LANES(ROWS)) u_imux (
    .prec(mux_prec), .din(mem_in_lanes), .bidx(imux_bidx), .dout(imux_out)
  );

  bit_range_detect #(.LANES(ROWS)) u_range (
    .clk, .rst_n, .clear(rd_clear), .in_valid(rd_valid), .din(mem_in_lanes), .bidx(rd_bidx)
  );

  operand_buffer #(.LANES(COLS), .DEPTH(ROWS)) u_wbuf (
    .clk, .wr_lo(wb_wr_lo), .wr_hi(wb_wr_hi), .wr_addr(wb_wr_addr), .wr_data(wmux_out),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data)
  );

  operand_buffer #(.LANES(ROWS), .DEPTH(BUF_DEPTH)) u_ibuf (
    .clk, .wr_lo(ib_wr_lo), .wr_hi(ib_wr_hi), .wr_addr(ib_wr_addr), .wr_data(imux_out),
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data)
  );

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .PSUM_W(PSUM_W)) u_array (
    .clk, .rst_n,
    .w_load(sa_w_load), .w_row(sa_w_row), .w_data(wb_rd_data),
    .in_valid(sa_in_valid), .in_prec(sa_in_prec), .in_data(ib_rd_data),
    .out_valid(sa_out_valid), .out_prec(sa_out_prec), .out_psum(sa_psum)
  );

  accumulator #(.COLS(COLS), .PSUM_W(PSUM_W), .ACC_W(ACC_W), .DEPTH(BUF_DEPTH)) u_acc (
    .clk, .in_valid(acc_in_valid), .in_first(acc_in_first), .in_addr(acc_in_addr),
    .in_prec(sa_out_prec), .in_shift(acc_in_shift), .in_psum(sa_psum),
    .rd_en(acc_rd_en), .rd_addr(acc_rd_addr), .rd_data(acc_rd_data)
  );

  simd_unit #(.COLS(COLS), .ACC_W(ACC_W)) u_simd (
    .clk, .rst_n, .in_valid(simd_in_valid), .in_acc(acc_rd_data),
    .rq_mult(simd_rq_mult), .rq_shift(simd_rq_shift), .relu(simd_relu),
    .out_valid(simd_out_valid), .out_data(simd_out)
  );

  output_buffer #(.COLS(COLS), .DEPTH(BUF_DEPTH)) u_obuf (
    .clk, .wr_en(ob_wr_en), .wr_addr(ob_wr_addr), .wr_data(simd_out),
    .rd_en(ob_rd_en), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data)
  );

  channel_permute #(.COLS(COLS)) u_perm (
    .din(ob_rd_data), .perm(perm), .dout(perm_out)
  );

  // The array's precision tag at its output must match the group being
  // accumulated: groups never overlap in the array.
`ifndef SYNTHESIS
  a_prec_match: assert property (@(posedge clk) disable iff (!rst_n)
    sa_out_valid |-> (sa_out_prec == sa_in_prec));
  a_square: assert property (@(posedge clk) ROWS == COLS);
`endif

endmodule
