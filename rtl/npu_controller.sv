// npu_controller: sequencer of the FlexiQ NPU.
//
// It runs a program of layer instructions (flexiq_pkg::instr_t) from the
// instruction memory. One instruction computes a whole convolution / linear
// layer: n_otile output tiles of COLS output channels for n_pix input vectors
// over n_ch4 + n_ch8 input channels. Pixels are taken in tiles of at most
// BUF_DEPTH (the input buffer and accumulator depth); for every output tile
// and pixel tile the steps below are run. After the channel reordering done
// offline, the first n_ch4 channels (the paper's
// max_4bit_ch) are computed in 4-bit mode in groups of 2*ROWS channels and the
// remaining n_ch8 in 8-bit mode in groups of ROWS channels, so the NPU
// "receives the number of 8-bit and 4-bit channels and switches the compute
// precision accordingly". For every group it
//   1. reads the group's static bit indices (one memory word). A 4-bit
//      group has two 32-channel halves (low and high nibble of the packed
//      bytes), each with its own indices: activation index of half h in
//      bits [3h+2:3h], weight index of column c in half h in bits
//      [6+3(COLS*h+c) +: 3],
//   2. loads the weights through the weight bit-index mux into the weight
//      buffer (2*ROWS words in 4-bit mode, packed two nibbles per byte),
//   3. in 4-bit mode with dyn_ext set, streams the activations once through
//      the range detector, one 32-channel half after the other, to find the
//      activation bit index of each half at run time,
//   4. loads the activations through the input bit-index mux into the input
//      buffer,
//   5. writes the weight buffer into the array (one row per cycle),
//   6. streams the tile's input vectors through the array, one per cycle, and
//      adds the column sums, each half aligned by (4-u_act)+(4-u_weight) in
//      4-bit mode, into the accumulator.
// After the last group of a tile the accumulator is requantised by the SIMD
// unit into the output buffer and written back, and, with res_en, written a second
// time with its channels permuted (the residual-connection reorder store).
//
// Memory interface: a request port (valid/ready, in-order) and a response
// port (rsp_valid with read data, in request order, any latency). The phases
// run one after another without overlap; that, the tiling, the memory
// layout in flexiq_pkg::instr_t and the one-row-per-cycle weight load are
// this design's own choices.
//
// Timing per group and tile of P vectors (memory without stalls, latency L):
// about 1 + W + A (+ A with dyn_ext) + 3L loading cycles (W = 32 or 64
// weight words, A = P or 2P activation words), ROWS + 1 weight-transfer
// cycles, P stream cycles and ROWS + COLS drain cycles; then per tile
// P + 2 requantisation cycles and 2P (3P with res_en) write-back cycles.
module npu_controller
  import flexiq_pkg::*;
#(
  parameter int unsigned ROWS       = 32,
  parameter int unsigned COLS       = 32,
  parameter int unsigned BUF_DEPTH  = 256,
  parameter int unsigned IMEM_DEPTH = 64,
  localparam int unsigned MEM_W     = COLS * DATA_W,
  localparam int unsigned BA_W      = $clog2(BUF_DEPTH),
  localparam int unsigned RA_W      = $clog2(ROWS),
  localparam int unsigned IA_W      = $clog2(IMEM_DEPTH)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host
  input  logic                          start,
  input  logic [IA_W-1:0]               start_pc,
  output logic                          busy,
  output logic                          done,
  // instruction memory
  output logic                          im_rd_en,
  output logic [IA_W-1:0]               im_rd_addr,
  input  instr_t                        im_rd_data,
  // off-chip memory
  output logic                          mem_req_valid,
  input  logic                          mem_req_ready,
  output logic                          mem_req_we,
  output logic [ADDR_W-1:0]             mem_req_addr,
  output logic [MEM_W-1:0]              mem_req_wdata,
  input  logic                          mem_rsp_valid,
  input  logic [MEM_W-1:0]              mem_rsp_rdata,
  // bit-index muxes and range detector (their data input is mem_rsp_rdata)
  output prec_t                         mux_prec,
  output bidx_t [ROWS-1:0]              imux_bidx,
  output bidx_t [COLS-1:0]              wmux_bidx,
  output logic                          rd_clear,
  output logic                          rd_valid,
  input  bidx_t                         rd_bidx,
  // weight buffer
  output logic                          wb_wr_lo,
  output logic                          wb_wr_hi,
  output logic [RA_W-1:0]               wb_wr_addr,
  output logic                          wb_rd_en,
  output logic [RA_W-1:0]               wb_rd_addr,
  // input buffer
  output logic                          ib_wr_lo,
  output logic                          ib_wr_hi,
  output logic [BA_W-1:0]               ib_wr_addr,
  output logic                          ib_rd_en,
  output logic [BA_W-1:0]               ib_rd_addr,
  // systolic array
  output logic                          sa_w_load,
  output logic [RA_W-1:0]               sa_w_row,
  output logic                          sa_in_valid,
  output prec_t                         sa_in_prec,
  input  logic                          sa_out_valid,
  // accumulator
  output logic                          acc_in_valid,
  output logic                          acc_in_first,
  output logic [BA_W-1:0]               acc_in_addr,
  output logic [COLS-1:0][1:0][SHIFT_W-1:0] acc_in_shift,
  output logic                          acc_rd_en,
  output logic [BA_W-1:0]               acc_rd_addr,
  // SIMD unit
  output logic                          simd_in_valid,
  output logic [15:0]                   simd_rq_mult,
  output logic [5:0]                    simd_rq_shift,
  output logic                          simd_relu,
  input  logic                          simd_out_valid,
  // output buffer
  output logic                          ob_wr_en,
  output logic [BA_W-1:0]               ob_wr_addr,
  output logic                          ob_rd_en,
  output logic [BA_W-1:0]               ob_rd_addr,
  input  logic [COLS-1:0][DATA_W-1:0]   ob_rd_data,
  // residual reorder
  output logic [COLS-1:0][$clog2(COLS)-1:0] perm,
  input  logic [MEM_W-1:0]              perm_data
);

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_FETCH_W, S_TILE, S_TILE_NEXT, S_GRP, S_IDX, S_WLOAD, S_DYN, S_DYN_MID, S_DYN2, S_DYN_END, S_ILOAD,
    S_WXFER, S_STREAM, S_DRAIN, S_OUT, S_PERM, S_WB_RD, S_WB_W1, S_WB_W2, S_NEXT
  } state_t;

  // Purpose of the running memory load.
  typedef enum logic [2:0] {
    L_IDX, L_W, L_DYN, L_IN, L_PERM
  } load_t;

  state_t             state;
  instr_t             ins;
  logic [IA_W-1:0]    pc;
  logic [CNT_W-1:0]   grp, n_grp4, n_grp;
  prec_t              prec;
  logic [CNT_W-1:0]   ch_base;
  bidx_t [1:0]             u_act;   // per half of a 4-bit group
  bidx_t [1:0][COLS-1:0]   u_w;

  // tiling
  logic [CNT_W-1:0]   ot, pt_base, pt_len, n_chan;
  logic [ADDR_W-1:0]  t_in, t_w, t_idx, t_out, t_res, t_perm;

  // load engine: total words, as blocks of l_len words l_stride apart
  load_t              ltype;
  logic [CNT_W:0]     l_total, l_issued, l_recv;
  logic [ADDR_W-1:0]  l_base, l_stride;
  logic [CNT_W-1:0]   l_len;
  logic [CNT_W-1:0]   i_pix;   // issue position within a block
  logic               i_half;  // issue block 0/1
  logic [CNT_W-1:0]   r_pix;   // receive position within a block
  logic               r_half;  // receive block (nibble half) 0/1

  // streaming counters
  logic [CNT_W:0]     s_cnt, o_cnt;

  localparam logic [CNT_W-1:0] ROWS_C = CNT_W'(ROWS);

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------- memory
  logic load_state;
  assign load_state = (state == S_IDX) || (state == S_WLOAD) || (state == S_DYN) || (state == S_DYN2) ||
                      (state == S_ILOAD) || (state == S_PERM);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = l_base + (i_half ? l_stride : '0) + ADDR_W'(i_pix);
    mem_req_wdata = '0;
    if (load_state && (l_issued < l_total)) begin
      mem_req_valid = 1'b1;
    end else if (state == S_WB_W1) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = t_out + ADDR_W'(s_cnt);
      mem_req_wdata = ob_rd_data;
    end else if (state == S_WB_W2) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = t_res + ADDR_W'(s_cnt);
      mem_req_wdata = perm_data;
    end
  end

  // Data paths driven from the response port.
  logic rsp_ok;
  assign rsp_ok = mem_rsp_valid && load_state && (l_recv < l_total);

  always_comb begin
    mux_prec   = (ltype == L_W || ltype == L_IN) ? prec : PREC8;
    imux_bidx  = {ROWS{u_act[r_half]}};
    wmux_bidx  = u_w[r_half];
    rd_clear   = (state == S_GRP) || (state == S_DYN_MID);
    rd_valid   = rsp_ok && (ltype == L_DYN);
    wb_wr_lo   = rsp_ok && (ltype == L_W) && (prec == PREC8 || !r_half);
    wb_wr_hi   = rsp_ok && (ltype == L_W) && (prec == PREC8 ||  r_half);
    wb_wr_addr = RA_W'(r_pix);
    ib_wr_lo   = rsp_ok && (ltype == L_IN) && (prec == PREC8 || !r_half);
    ib_wr_hi   = rsp_ok && (ltype == L_IN) && (prec == PREC8 ||  r_half);
    ib_wr_addr = BA_W'(r_pix);
  end

  // ---------------------------------------------------------------- datapath control
  always_comb begin
    wb_rd_en      = (state == S_WXFER) && (s_cnt < (CNT_W+1)'(ROWS));
    wb_rd_addr    = RA_W'(s_cnt);
    ib_rd_en      = (state == S_STREAM) && (s_cnt < (CNT_W+1)'(pt_len));
    ib_rd_addr    = BA_W'(s_cnt);
    sa_in_prec    = prec;
    acc_in_valid  = sa_out_valid;
    acc_in_first  = (grp == '0);
    acc_in_addr   = BA_W'(o_cnt);
    for (int c = 0; c < int'(COLS); c++)
      for (int h = 0; h < 2; h++)
        acc_in_shift[c][h] = (prec == PREC4)
                           ? SHIFT_W'((bidx_t'(MAXU) - u_act[h]) + (bidx_t'(MAXU) - u_w[h][c]))
                           : '0;
    acc_rd_en     = (state == S_OUT) && (s_cnt < (CNT_W+1)'(pt_len));
    acc_rd_addr   = BA_W'(s_cnt);
    simd_rq_mult  = ins.rq_mult;
    simd_rq_shift = ins.rq_shift;
    simd_relu     = ins.relu;
    ob_wr_en      = simd_out_valid;
    ob_wr_addr    = BA_W'(o_cnt);
    ob_rd_en      = (state == S_WB_RD);
    ob_rd_addr    = BA_W'(s_cnt);
    im_rd_en      = (state == S_FETCH);
    im_rd_addr    = pc;
  end

  // ---------------------------------------------------------------- sequencer
  task automatic start_load(input load_t t, input logic [ADDR_W-1:0] base,
                            input logic [CNT_W:0] total, input logic [CNT_W-1:0] len,
                            input logic [ADDR_W-1:0] stride);
    ltype    <= t;
    l_base   <= base;
    l_total  <= total;
    l_len    <= len;
    l_stride <= stride;
    l_issued <= '0;
    l_recv   <= '0;
    i_pix    <= '0;
    i_half   <= 1'b0;
    r_pix    <= '0;
    r_half   <= 1'b0;
  endtask

  logic [CNT_W:0] in_words;
  logic [ADDR_W-1:0] in_base;
  always_comb begin
    in_words = (prec == PREC4) ? {pt_len, 1'b0} : {1'b0, pt_len};
    in_base  = t_in + ADDR_W'(ch_base / ROWS_C) * ADDR_W'(ins.n_pix);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      ins         <= '0;
      pc          <= '0;
      grp         <= '0;
      n_grp4      <= '0;
      n_grp       <= '0;
      prec        <= PREC8;
      ch_base     <= '0;
      u_act       <= '0;
      u_w         <= '0;
      ltype       <= L_IDX;
      l_total     <= '0;
      l_issued    <= '0;
      l_recv      <= '0;
      l_base      <= '0;
      l_stride    <= '0;
      l_len       <= '0;
      i_pix       <= '0;
      i_half      <= 1'b0;
      ot          <= '0;
      pt_base     <= '0;
      pt_len      <= '0;
      n_chan      <= '0;
      t_in        <= '0;
      t_w         <= '0;
      t_idx       <= '0;
      t_out       <= '0;
      t_res       <= '0;
      t_perm      <= '0;
      r_pix       <= '0;
      r_half      <= 1'b0;
      s_cnt       <= '0;
      o_cnt       <= '0;
      sa_w_load   <= 1'b0;
      sa_w_row    <= '0;
      sa_in_valid <= 1'b0;
      simd_in_valid <= 1'b0;
      perm        <= '0;
      done        <= 1'b0;
    end else begin
      done          <= 1'b0;
      sa_w_load     <= 1'b0;
      sa_in_valid   <= 1'b0;
      simd_in_valid <= 1'b0;

      // load engine bookkeeping
      if (mem_req_valid && mem_req_ready && !mem_req_we) begin
        l_issued <= l_issued + 1'b1;
        if (i_pix == l_len - 1'b1) begin
          i_pix  <= '0;
          i_half <= 1'b1;
        end else i_pix <= i_pix + 1'b1;
      end
      if (rsp_ok) begin
        l_recv <= l_recv + 1'b1;
        unique case (ltype)
          L_IDX: begin
            for (int h = 0; h < 2; h++) begin
              u_act[h] <= bidx_t'(mem_rsp_rdata[BIDX_W*h +: BIDX_W]);
              for (int c = 0; c < int'(COLS); c++)
                u_w[h][c] <= bidx_t'(mem_rsp_rdata[BIDX_W*(2 + int'(COLS)*h + c) +: BIDX_W]);
            end
          end
          L_W, L_DYN, L_IN: begin
            if (r_pix == l_len - 1'b1) begin
              r_pix  <= '0;
              r_half <= 1'b1;
            end else r_pix <= r_pix + 1'b1;
          end
          L_PERM: begin
            for (int c = 0; c < int'(COLS); c++)
              perm[c] <= mem_rsp_rdata[DATA_W*c +: $clog2(COLS)];
          end
          default: ;
        endcase
      end

      if (sa_out_valid || simd_out_valid) o_cnt <= o_cnt + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          pc    <= start_pc;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_FETCH_W;
        S_FETCH_W: begin
          ins    <= im_rd_data;
          n_grp4 <= im_rd_data.n_ch4 / (2 * ROWS_C);
          n_grp  <= im_rd_data.n_ch4 / (2 * ROWS_C) + im_rd_data.n_ch8 / ROWS_C;
          n_chan <= im_rd_data.n_ch4 + im_rd_data.n_ch8;
          ot      <= '0;
          pt_base <= '0;
          state  <= S_TILE;
        end
        S_TILE: begin
          // addresses of this output tile / pixel tile
          pt_len <= (ins.n_pix - pt_base > CNT_W'(BUF_DEPTH)) ? CNT_W'(BUF_DEPTH)
                                                            : ins.n_pix - pt_base;
          t_in   <= ins.in_addr + ADDR_W'(pt_base);
          t_w    <= ins.w_addr + ADDR_W'(ot) * ADDR_W'(n_chan);
          t_idx  <= ins.idx_addr + ADDR_W'(ot) * ADDR_W'(n_grp);
          t_out  <= ins.out_addr + ADDR_W'(ot) * ADDR_W'(ins.n_pix) + ADDR_W'(pt_base);
          t_res  <= ins.res_addr + ADDR_W'(ot) * ADDR_W'(ins.n_pix) + ADDR_W'(pt_base);
          t_perm <= ins.perm_addr + ADDR_W'(ot);
          grp    <= '0;
          state  <= S_GRP;
        end
        S_TILE_NEXT: begin
          if (pt_base + pt_len < ins.n_pix) begin
            pt_base <= pt_base + pt_len;
            state   <= S_TILE;
          end else if (ot + 1'b1 < ins.n_otile) begin
            ot      <= ot + 1'b1;
            pt_base <= '0;
            state   <= S_TILE;
          end else state <= S_NEXT;
        end
        S_GRP: begin
          if (grp == n_grp) begin
            s_cnt <= '0;
            o_cnt <= '0;
            state <= S_OUT;
          end else begin
            if (grp < n_grp4) begin
              prec    <= PREC4;
              ch_base <= grp * 2 * ROWS_C;
            end else begin
              prec    <= PREC8;
              ch_base <= ins.n_ch4 + (grp - n_grp4) * ROWS_C;
            end
            start_load(L_IDX, t_idx + ADDR_W'(grp), 1, 1, '0);
            state <= S_IDX;
          end
        end
        S_IDX: if (l_recv == l_total) begin
          start_load(L_W, t_w + ADDR_W'(ch_base),
                     (prec == PREC4) ? (CNT_W+1)'(2 * ROWS) : (CNT_W+1)'(ROWS),
                     ROWS_C, ADDR_W'(ROWS));
          state <= S_WLOAD;
        end
        S_WLOAD: if (l_recv == l_total) begin
          if (prec == PREC4 && ins.dyn_ext) begin
            // first half (channels 0..ROWS-1 of the group)
            start_load(L_DYN, in_base, (CNT_W+1)'(pt_len), pt_len, '0);
            state <= S_DYN;
          end else begin
            start_load(L_IN, in_base, in_words, pt_len, ADDR_W'(ins.n_pix));
            state <= S_ILOAD;
          end
        end
        S_DYN: if (l_recv == l_total) state <= S_DYN_MID;
        S_DYN_MID: begin
          // detector is cleared in this cycle; second half next
          u_act[0] <= rd_bidx;
          start_load(L_DYN, in_base + ADDR_W'(ins.n_pix), (CNT_W+1)'(pt_len), pt_len, '0);
          state <= S_DYN2;
        end
        S_DYN2: if (l_recv == l_total) state <= S_DYN_END;
        S_DYN_END: begin
          u_act[1] <= rd_bidx;
          start_load(L_IN, in_base, in_words, pt_len, ADDR_W'(ins.n_pix));
          state <= S_ILOAD;
        end
        S_ILOAD: if (l_recv == l_total) begin
          s_cnt   <= '0;
          state   <= S_WXFER;
        end
        S_WXFER: begin
          // buffer read in cycle k, array row write in cycle k+1
          sa_w_load <= wb_rd_en;
          sa_w_row  <= wb_rd_addr;
          if (s_cnt == (CNT_W+1)'(ROWS)) begin
            s_cnt <= '0;
            o_cnt <= '0;
            state <= S_STREAM;
          end else s_cnt <= s_cnt + 1'b1;
        end
        S_STREAM: begin
          sa_in_valid <= ib_rd_en;
          if (s_cnt == (CNT_W+1)'(pt_len)) state <= S_DRAIN;
          else s_cnt <= s_cnt + 1'b1;
        end
        S_DRAIN: if (o_cnt == (CNT_W+1)'(pt_len)) begin
          grp   <= grp + 1'b1;
          state <= S_GRP;
        end
        S_OUT: begin
          simd_in_valid <= acc_rd_en;
          if (s_cnt != (CNT_W+1)'(pt_len)) s_cnt <= s_cnt + 1'b1;
          if (o_cnt == (CNT_W+1)'(pt_len)) begin
            s_cnt <= '0;
            if (ins.res_en) begin
              start_load(L_PERM, t_perm, 1, 1, '0);
              state <= S_PERM;
            end else state <= S_WB_RD;
          end
        end
        S_PERM: if (l_recv == l_total) state <= S_WB_RD;
        S_WB_RD: state <= S_WB_W1;
        S_WB_W1: if (mem_req_ready) begin
          if (ins.res_en) state <= S_WB_W2;
          else if (s_cnt == (CNT_W+1)'(pt_len - 1'b1)) state <= S_TILE_NEXT;
          else begin
            s_cnt <= s_cnt + 1'b1;
            state <= S_WB_RD;
          end
        end
        S_WB_W2: if (mem_req_ready) begin
          if (s_cnt == (CNT_W+1)'(pt_len - 1'b1)) state <= S_TILE_NEXT;
          else begin
            s_cnt <= s_cnt + 1'b1;
            state <= S_WB_RD;
          end
        end
        S_NEXT: begin
          if (ins.last) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            pc    <= pc + 1'b1;
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // The array must not be streamed with a group size it cannot hold.
  a_pix_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_FETCH_W) |-> (im_rd_data.n_pix != '0 && im_rd_data.n_otile != '0));
  a_ch4_groups: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_FETCH_W) |-> (im_rd_data.n_ch4 % (2 * ROWS_C) == '0 && im_rd_data.n_ch8 % ROWS_C == '0));
`endif

endmodule
