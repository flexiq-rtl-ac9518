// tb_flexiq_npu: end-to-end test of the FlexiQ NPU at its default size
// (32 x 32 PEs, no parameter overrides).
//
// A behavioural off-chip memory (with random back-pressure) is filled with
// random 8-bit weights and activations, per-group static bit indices and a
// channel permutation. A three-instruction program is run:
//   I0: 64 channels in 4-bit + 32 in 8-bit (a precision switch inside the
//       layer), static indices chosen so that some activations saturate, ReLU;
//   I1: 128 channels in 4-bit with run-time (dynamic) activation bit index,
//       the residual reorder store, and two output tiles (64 output channels);
//   I2: 64 channels in 8-bit over 300 pixels, i.e. two pixel tiles (256 + 44).
// Then the host rewrites I2 to compute the same 64 channels in 4-bit (a
// change of the 4-bit ratio) and runs it alone. Every output word, and every
// word of the reordered copy, is compared with a reference computed here from
// the memory contents with real-number rounding. Activations of odd
// 32-channel blocks have half the range of even ones, and static indices
// differ between the two 32-channel halves of a 4-bit group. The mechanisms
// exercised (4-bit groups, 8-bit groups, in-layer precision switch, run-time
// bit index with different indices for the two halves of a group, extraction
// saturation, reorder store, ratio rewrite, output and pixel tiling, memory
// back-pressure) are counted and each must occur.
module tb_flexiq_npu;
  import flexiq_pkg::*;

  localparam int ROWS  = 32;
  localparam int COLS  = 32;
  localparam int MEM_W = COLS * 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              im_wr_en = 1'b0;
  logic [5:0]        im_wr_addr = '0;
  instr_t            im_wr_data = '0;
  logic              start = 1'b0;
  logic [5:0]        start_pc = '0;
  logic              busy, done;
  logic              mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [23:0]       mem_req_addr;
  logic [MEM_W-1:0]  mem_req_wdata, mem_rsp_rdata;

  flexiq_npu dut (
    .clk, .rst_n, .im_wr_en, .im_wr_addr, .im_wr_data, .start, .start_pc, .busy, .done,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata
  );

  offchip_mem_model #(.W(MEM_W), .LATENCY(4), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata)
  );

  int checks = 0;
  int failures = 0;
  int n_grp4 = 0, n_grp8 = 0, n_switch = 0, n_dyn = 0, n_sat = 0, n_res = 0, n_rewrite = 0;
  int n_otile = 0, n_ptile = 0, n_dyn_split = 0;

  // ------------------------------------------------------------ reference
  function automatic logic [MEM_W-1:0] mrd(input int a);
    if (u_mem.mem.exists(a)) return u_mem.mem[a];
    return '0;
  endfunction

  task automatic mset(input int a, input int lane, input int v);
    logic [MEM_W-1:0] t;
    t = mrd(a);
    t[8*lane +: 8] = 8'(v);
    u_mem.mem[a] = t;
  endtask

  function automatic int sbyte(input logic [MEM_W-1:0] w, input int lane);
    return int'($signed(w[8*lane +: 8]));
  endfunction

  // 8-bit -> 4-bit, skipping u unused bits, round half up, clip.
  function automatic int low4(input int x, input int u, inout int sat);
    real q;
    int  v;
    q = $floor(real'(x) / (2.0 ** (4 - u)) + 0.5);
    v = int'(q);
    if (v > 7)  begin v = 7;  sat++; end
    if (v < -8) begin v = -8; sat++; end
    return v;
  endfunction

  instr_t prog [3];
  localparam int TILE = 256;                 // pixel tile = buffer depth of the NPU
  localparam int MAXP = 512;
  int     exp_out [4][MAXP][COLS];

  // Reference for one output tile t and one pixel tile [pb, pb + len).
  task automatic reference_tile(input instr_t ins, input int t, input int pb, input int len);
    longint acc [TILE][COLS];
    int g4, g8, G, C, sat;
    g4 = int'(ins.n_ch4) / (2 * ROWS);
    g8 = int'(ins.n_ch8) / ROWS;
    G  = g4 + g8;
    C  = int'(ins.n_ch4) + int'(ins.n_ch8);
    sat = 0;
    for (int p = 0; p < len; p++)
      for (int c = 0; c < COLS; c++) acc[p][c] = 0;
    for (int g = 0; g < G; g++) begin
      logic [MEM_W-1:0] iw;
      int ua [2], uw [2][COLS], base;
      bit four;
      four = (g < g4);
      base = four ? g * 2 * ROWS : int'(ins.n_ch4) + (g - g4) * ROWS;
      iw = mrd(int'(ins.idx_addr) + t * G + g);
      for (int h = 0; h < 2; h++) begin   // index word: two halves of a 4-bit group
        ua[h] = int'(iw[3*h +: 3]);
        for (int c = 0; c < COLS; c++) uw[h][c] = int'(iw[3*(2 + COLS*h + c) +: 3]);
      end
      if (four && ins.dyn_ext) begin
        for (int h = 0; h < 2; h++) begin  // one index per 32-channel half
        int mx;
        mx = 0;
        for (int ch = base + h * ROWS; ch < base + (h + 1) * ROWS; ch++)
          for (int p = 0; p < len; p++) begin
            int x;
            x = sbyte(mrd(int'(ins.in_addr) + (ch / ROWS) * int'(ins.n_pix) + pb + p), ch % ROWS);
            if (x < 0) x = -x - 1;
            if (x > mx) mx = x;
          end
        ua[h] = (mx < 8) ? 4 : (mx < 16) ? 3 : (mx < 32) ? 2 : (mx < 64) ? 1 : 0;
        end
      end
      for (int ch = base; ch < base + (four ? 2 * ROWS : ROWS); ch++)
        for (int p = 0; p < len; p++) begin
          int x, h;
          h = (ch - base >= ROWS) ? 1 : 0;
          x = sbyte(mrd(int'(ins.in_addr) + (ch / ROWS) * int'(ins.n_pix) + pb + p), ch % ROWS);
          for (int c = 0; c < COLS; c++) begin
            int w;
            w = sbyte(mrd(int'(ins.w_addr) + t * C + ch), c);
            if (four)
              acc[p][c] += longint'(low4(x, ua[h], sat) * low4(w, uw[h][c], sat))
                           * (longint'(1) << ((4 - ua[h]) + (4 - uw[h][c])));
            else
              acc[p][c] += longint'(x * w);
          end
        end
    end
    n_sat += sat;
    for (int p = 0; p < len; p++)
      for (int c = 0; c < COLS; c++) begin
        real r;
        int  y;
        r = $floor(real'(acc[p][c]) * real'(ins.rq_mult) / (2.0 ** ins.rq_shift) + 0.5);
        if (r > 127.0) y = 127; else if (r < -128.0) y = -128; else y = int'(r);
        if (ins.relu && y < 0) y = 0;
        exp_out[t][pb + p][c] = y;
      end
  endtask

  task automatic check_outputs(input instr_t ins);
    for (int t = 0; t < int'(ins.n_otile); t++) begin
      logic [MEM_W-1:0] pw;
      for (int pb = 0; pb < int'(ins.n_pix); pb += TILE)
        reference_tile(ins, t, pb, (int'(ins.n_pix) - pb > TILE) ? TILE : int'(ins.n_pix) - pb);
      pw = mrd(int'(ins.perm_addr) + t);
      for (int p = 0; p < int'(ins.n_pix); p++)
        for (int c = 0; c < COLS; c++) begin
          int got;
          got = sbyte(mrd(int'(ins.out_addr) + t * int'(ins.n_pix) + p), c);
          checks++;
          if (got != exp_out[t][p][c]) begin
            failures++;
            if (failures < 10) $display("out mismatch addr %0h tile %0d pix %0d col %0d: got %0d exp %0d",
                                        ins.out_addr, t, p, c, got, exp_out[t][p][c]);
          end
          if (ins.res_en) begin
            int src;
            src = int'(pw[8*c +: 5]);
            got = sbyte(mrd(int'(ins.res_addr) + t * int'(ins.n_pix) + p), c);
            checks++;
            if (got != exp_out[t][p][src]) begin
              failures++;
              if (failures < 10) $display("res mismatch tile %0d pix %0d col %0d: got %0d exp %0d",
                                          t, p, c, got, exp_out[t][p][src]);
            end else n_res++;
          end
        end
    end
  endtask

  // ------------------------------------------------------------ stimulus
  task automatic fill_layer(input instr_t ins, input int a_rng, input int w_rng,
                            input int ua_static, input int uw_base);
    int nch, G;
    nch = int'(ins.n_ch4) + int'(ins.n_ch8);
    G   = int'(ins.n_ch4) / (2 * ROWS) + int'(ins.n_ch8) / ROWS;
    for (int ch = 0; ch < nch; ch++)
      for (int p = 0; p < int'(ins.n_pix); p++)
        mset(int'(ins.in_addr) + (ch / ROWS) * int'(ins.n_pix) + p, ch % ROWS,
             $urandom_range(2 * (a_rng >> ((ch / ROWS) % 2))) - (a_rng >> ((ch / ROWS) % 2)));
    for (int t = 0; t < int'(ins.n_otile); t++) begin
      logic [MEM_W-1:0] pw;
      for (int ch = 0; ch < nch; ch++)
        for (int c = 0; c < COLS; c++) begin
          int r;
          r = w_rng >> ((c + t) % 4);     // columns with different value ranges
          mset(int'(ins.w_addr) + t * nch + ch, c, $urandom_range(2 * r) - r);
        end
      for (int g = 0; g < 8; g++) begin
        logic [MEM_W-1:0] iw;
        iw = '0;
        // the two halves of a 4-bit group get different indices
        iw[2:0] = 3'(ua_static);
        iw[5:3] = 3'((ua_static == 0) ? 1 : ua_static - 1);
        for (int c = 0; c < COLS; c++) begin
          iw[3*(2 + c) +: 3]        = 3'(uw_base + ((c + t) % 4));
          iw[3*(2 + COLS + c) +: 3] = 3'(uw_base + ((c + t + 1) % 4));
        end
        u_mem.mem[int'(ins.idx_addr) + t * G + g] = iw;
      end
      pw = '0;
      for (int c = 0; c < COLS; c++) pw[8*c +: 8] = 8'((c * 7 + 3 + t) % COLS);
      u_mem.mem[int'(ins.perm_addr) + t] = pw;
    end
  endtask

  function automatic instr_t mk(input int i, input int n4, input int n8, input int np,
                                input int nt);
    instr_t t;
    int b;
    b = 'h4000 * (i + 1);
    t = '0;
    t.n_ch4 = 16'(n4);  t.n_ch8 = 16'(n8);  t.n_pix = 16'(np);  t.n_otile = 16'(nt);
    t.in_addr = 24'(b); t.w_addr = 24'(b + 'h1000); t.idx_addr = 24'(b + 'h1800);
    t.out_addr = 24'(b + 'h2000); t.res_addr = 24'(b + 'h2800); t.perm_addr = 24'(b + 'h3000);
    t.rq_mult = 16'd3; t.rq_shift = 6'd12;
    return t;
  endfunction

  task automatic write_instr(input int a, input instr_t t);
    @(negedge clk);
    im_wr_en = 1'b1; im_wr_addr = 6'(a); im_wr_data = t;
    @(negedge clk);
    im_wr_en = 1'b0;
  endtask

  task automatic run(input int pc);
    @(negedge clk);
    start = 1'b1; start_pc = 6'(pc);
    @(negedge clk);
    start = 1'b0;
    @(posedge done);
    @(negedge clk);
  endtask

  // ------------------------------------------------------------ monitors
  prec_t last_prec;
  always @(posedge clk) begin
    if (dut.im_rd_en) last_prec <= PREC8;
    if (dut.sa_w_load && dut.sa_w_row == '0) begin
      if (dut.sa_in_prec == PREC4) n_grp4++; else n_grp8++;
      if (last_prec == PREC4 && dut.sa_in_prec == PREC8) n_switch++;
      last_prec <= dut.sa_in_prec;
    end
    if (dut.rd_valid) n_dyn++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_DYN_END && dut.rd_bidx != dut.u_ctrl.u_act[0]) n_dyn_split++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_TILE) begin
      if (dut.u_ctrl.ot != '0) n_otile++;
      if (dut.u_ctrl.pt_base != '0) n_ptile++;
    end
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    last_prec = PREC8;
    prog[0] = mk(0, 64, 32, 8, 1);
    prog[0].relu = 1'b1;
    prog[1] = mk(1, 128, 0, 6, 2);          // two output tiles
    prog[1].dyn_ext = 1'b1;
    prog[1].res_en  = 1'b1;
    prog[2] = mk(2, 0, 64, 300, 1);         // two pixel tiles (256 + 44)
    prog[2].last = 1'b1;
    // I0: activations need 7 bits but the static index claims 2 unused: saturation.
    fill_layer(prog[0], 40, 100, 2, 0);
    fill_layer(prog[1], 20, 60, 0, 1);
    fill_layer(prog[2], 90, 120, 1, 0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3; i++) write_instr(i, prog[i]);
    run(0);
    for (int i = 0; i < 3; i++) check_outputs(prog[i]);

    // Change the 4-bit ratio of I2 from 0 % to 100 % by rewriting it.
    prog[2].n_ch4 = 16'd64;
    prog[2].n_ch8 = 16'd0;
    write_instr(2, prog[2]);
    n_rewrite++;
    for (int p = 0; p < int'(prog[2].n_pix); p++) u_mem.mem[int'(prog[2].out_addr) + p] = '0;
    // the weight layout depends on the channel count only, which is unchanged
    run(2);
    check_outputs(prog[2]);

    $display("mechanisms: grp4=%0d grp8=%0d switch=%0d dyn=%0d sat=%0d res=%0d rewrite=%0d otile=%0d ptile=%0d dyn_split=%0d stalls=%0d",
             n_grp4, n_grp8, n_switch, n_dyn, n_sat, n_res, n_rewrite, n_otile, n_ptile, n_dyn_split,
             u_mem.stall_cycles);
    checks++; if (n_grp4 == 0)   begin failures++; $display("no 4-bit group ran"); end
    checks++; if (n_grp8 == 0)   begin failures++; $display("no 8-bit group ran"); end
    checks++; if (n_switch == 0) begin failures++; $display("no precision switch"); end
    checks++; if (n_dyn == 0)    begin failures++; $display("no dynamic extraction"); end
    checks++; if (n_sat == 0)    begin failures++; $display("no saturation"); end
    checks++; if (n_res == 0)    begin failures++; $display("no reorder store"); end
    checks++; if (u_mem.stall_cycles == 0) begin failures++; $display("no back-pressure"); end
    checks++; if (n_dyn_split == 0) begin failures++; $display("no group with two run-time indices"); end
    checks++; if (n_otile != 1)  begin failures++; $display("output tiles %0d", n_otile); end
    checks++; if (n_ptile != 2)  begin failures++; $display("pixel tiles %0d", n_ptile); end
    // 4-bit groups: 1 (I0) + 2 x 2 (I1) + 2 x 1 (I2 rewritten) = 7;
    // 8-bit groups: 1 (I0) + 2 x 2 (I2) = 5.
    checks++; if (n_grp4 != 7 || n_grp8 != 5) begin
      failures++; $display("group counts %0d/%0d", n_grp4, n_grp8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
