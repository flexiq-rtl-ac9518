// tb_resnet18_layers: ResNet-18 layer shapes on the full-size NPU.
//
// Runs four layers with the shapes of ResNet-18 at 224 x 224 input (im2col
// form, one instruction each; layer shapes are the standard ResNet-18 ones)
// against the behavioural off-chip memory, with random 8-bit data:
//   A: stage-1 3x3 conv, 576 reduction channels, 56x56 = 3136 vectors (13
//      pixel tiles), 64 outputs (2 tiles), 50 % 4-bit (256 of 576 channels),
//      with the reordered copy for the residual connection;
//   B: stage-2 1x1 downsample, 64 channels, 28x28 = 784 vectors, 128
//      outputs, 100 % 4-bit with run-time activation indices;
//   C: stage-3 3x3 conv, 2304 channels, 14x14 = 196 vectors, 256 outputs,
//      50 % 4-bit, ReLU;
//   D: stage-4 3x3 conv, 4608 channels, 7x7 = 49 vectors, 512 outputs, run
//      once at 0 % and once at 100 % 4-bit by rewriting the instruction.
// Every output byte is compared with a reference model. The cycles of each
// run are counted, and layer D at 100 % 4-bit must take fewer cycles than at
// 0 %, since a 4-bit group reduces twice as many channels per pass.
module tb_resnet18_layers;
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
  int n_grp4 = 0, n_grp8 = 0, n_sat = 0, n_res = 0;

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

  instr_t prog [4];
  localparam int TILE = 256;                 // pixel tile = buffer depth of the NPU
  localparam int MAXP = 4096;
  int     exp_out [16][MAXP][COLS];

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
        begin
          logic [MEM_W-1:0] ww;
          int wq [COLS];
          longint sc [COLS];
          int h;
          h = (ch - base >= ROWS) ? 1 : 0;
          ww = mrd(int'(ins.w_addr) + t * C + ch);
          for (int c = 0; c < COLS; c++) begin
            wq[c] = four ? low4(sbyte(ww, c), uw[h][c], sat) : sbyte(ww, c);
            sc[c] = four ? (longint'(1) << ((4 - ua[h]) + (4 - uw[h][c]))) : 1;
          end
          for (int p = 0; p < len; p++) begin
            int x;
            x = sbyte(mrd(int'(ins.in_addr) + (ch / ROWS) * int'(ins.n_pix) + pb + p), ch % ROWS);
            if (four) x = low4(x, ua[h], sat);
            for (int c = 0; c < COLS; c++) acc[p][c] += longint'(x * wq[c]) * sc[c];
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
      for (int g = 0; g < G; g++) begin
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
    b = 'h100000 * (i + 1);
    t = '0;
    t.n_ch4 = 16'(n4);  t.n_ch8 = 16'(n8);  t.n_pix = 16'(np);  t.n_otile = 16'(nt);
    t.in_addr = 24'(b); t.w_addr = 24'(b + 'h20000); t.idx_addr = 24'(b + 'h40000);
    t.out_addr = 24'(b + 'h50000); t.res_addr = 24'(b + 'h60000); t.perm_addr = 24'(b + 'h70000);
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
  always @(posedge clk) begin
    if (dut.sa_w_load && dut.sa_w_row == '0) begin
      if (dut.sa_in_prec == PREC4) n_grp4++; else n_grp8++;
    end
  end

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_layer(input int a, input instr_t t, output longint cycles);
    longint c0;
    write_instr(a, t);
    c0 = cyc;
    run(a);
    cycles = cyc - c0;
    check_outputs(t);
    $display("layer %0d: C=%0d (%0d in 4-bit) P=%0d out=%0d: %0d cycles, failures so far %0d",
             a, int'(t.n_ch4) + int'(t.n_ch8), t.n_ch4, t.n_pix, 32 * int'(t.n_otile), cycles,
             failures);
  endtask

  initial begin
    longint cy [5];
    cyc = 0;
    prog[0] = mk(0, 256, 320, 3136, 2);
    prog[0].res_en = 1'b1;
    prog[1] = mk(1, 64, 0, 784, 4);
    prog[1].dyn_ext = 1'b1;
    prog[2] = mk(2, 1152, 1152, 196, 8);
    prog[2].relu = 1'b1;
    prog[3] = mk(3, 0, 4608, 49, 16);
    for (int i = 0; i < 4; i++) prog[i].last = 1'b1;
    for (int i = 0; i < 4; i++) prog[i].rq_shift = 6'd15;
    fill_layer(prog[0], 60, 100, 1, 0);
    fill_layer(prog[1], 30, 60, 0, 1);
    fill_layer(prog[2], 20, 40, 2, 1);
    fill_layer(prog[3], 50, 90, 1, 0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4; i++) run_layer(i, prog[i], cy[i]);
    // layer D again at 100 % 4-bit
    prog[3].n_ch4 = 16'd4608;
    prog[3].n_ch8 = 16'd0;
    run_layer(3, prog[3], cy[4]);
    checks++;
    if (!(cy[4] < cy[3])) begin
      failures++;
      $display("100 %% 4-bit layer not faster: %0d vs %0d cycles", cy[4], cy[3]);
    end
    $display("4-bit groups %0d, 8-bit groups %0d, memory stalls %0d", n_grp4, n_grp8,
             u_mem.stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
