// tb_systolic_array: test of the 32 x 32 weight-stationary array.
//
// Random weights are written row by row. Then 40 random activation vectors
// are streamed on consecutive cycles, their precision alternating in runs
// (8-bit, then 4-bit, then 8-bit) with no idle cycle at the switches. Each
// output vector is compared with the column sums computed here: sum over
// rows of x*w in 8-bit mode; in 4-bit mode two 16-bit lane sums, the low
// lane summing the low-nibble products and the high lane the high-nibble
// products (signed nibbles). The latency from input to output must be ROWS + COLS - 1 cycles and
// the outputs must come one per cycle, i.e. a precision switch costs no
// bubble.
module tb_systolic_array;
  import flexiq_pkg::*;

  localparam int ROWS = 32, COLS = 32, N = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                        w_load = 0;
  logic [$clog2(ROWS)-1:0]     w_row = '0;
  logic [COLS-1:0][7:0]        w_data = '0;
  logic                        in_valid = 0;
  prec_t                       in_prec = PREC8;
  logic [ROWS-1:0][7:0]        in_data = '0;
  logic                        out_valid;
  prec_t                       out_prec;
  logic [COLS-1:0][31:0]       out_psum;

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .PSUM_W(32)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] W [ROWS][COLS];
  logic [7:0] X [N][ROWS];
  prec_t      P [N];
  int cyc = 0, t_in0 = -1, t_out0 = -1, n_out = 0, t_last = -1, gaps = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int s8(input logic [7:0] v); return int'($signed(v)); endfunction
  function automatic int s4(input logic [3:0] v); return int'($signed(v)); endfunction

  always @(posedge clk) begin
    if (out_valid) begin
      int k;
      k = n_out;
      if (t_out0 < 0) t_out0 = cyc;
      if (t_last >= 0 && cyc != t_last + 1) gaps++;
      t_last = cyc;
      for (int c = 0; c < COLS; c++) begin
        int e, el, eh;
        e = 0; el = 0; eh = 0;
        for (int r = 0; r < ROWS; r++)
          if (P[k] == PREC8) e += s8(X[k][r]) * s8(W[r][c]);
          else begin
            el += s4(X[k][r][3:0]) * s4(W[r][c][3:0]);
            eh += s4(X[k][r][7:4]) * s4(W[r][c][7:4]);
          end
        if (P[k] == PREC4) e = int'({16'(eh), 16'(el)});
        checks++;
        if (int'($signed(out_psum[c])) != e || out_prec != P[k]) begin
          failures++;
          if (failures < 8) $display("vec %0d col %0d got %0d exp %0d", k, c, $signed(out_psum[c]), e);
        end
      end
      n_out++;
    end
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) W[r][c] = 8'($urandom);
    for (int k = 0; k < N; k++) begin
      P[k] = (k >= 12 && k < 28) ? PREC4 : PREC8;
      for (int r = 0; r < ROWS; r++) X[k][r] = 8'($urandom);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      w_load = 1'b1; w_row = r[$clog2(ROWS)-1:0];
      for (int c = 0; c < COLS; c++) w_data[c] = W[r][c];
    end
    @(negedge clk);
    w_load = 1'b0;
    for (int k = 0; k < N; k++) begin
      in_valid = 1'b1; in_prec = P[k];
      for (int r = 0; r < ROWS; r++) in_data[r] = X[k][r];
      if (k == 0) t_in0 = cyc;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (ROWS + COLS + 5) @(negedge clk);
    checks++;
    if (n_out != N) begin failures++; $display("got %0d outputs", n_out); end
    checks++;
    if (t_out0 - t_in0 != ROWS + COLS - 1) begin
      failures++; $display("latency %0d, expected %0d", t_out0 - t_in0, ROWS + COLS - 1);
    end
    checks++;
    if (gaps != 0) begin failures++; $display("%0d bubbles in the output stream", gaps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
