// tb_accumulator: test of the aligned accumulation.
//
// Several passes of random column-sum vectors (one per cycle, consecutive
// addresses) are accumulated. A first pass fills the entries with unrelated
// sums, so that a following pass with in_first must discard them. That pass
// (8-bit, in_first) and the third one (8-bit) add full 32-bit sums unshifted, even though random shifts are
// applied to the shift inputs; the other passes are 4-bit groups: each column
// carries two signed 16-bit lane sums with random alignment shifts 0..8 per
// lane. A model
// kept here with 64-bit integers and multiplication by 2^shift gives the
// expected entries, which are read back through the read port.
module tb_accumulator;
  import flexiq_pkg::*;

  localparam int COLS = 32, DEPTH = 256, NP = 20;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                          in_valid = 0, in_first = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0]      in_addr = '0, rd_addr = '0;
  prec_t                         in_prec = PREC8;
  logic [COLS-1:0][1:0][SHIFT_W-1:0] in_shift = '0;
  logic [COLS-1:0][31:0]         in_psum = '0;
  logic [COLS-1:0][31:0]         rd_data;

  accumulator #(.COLS(COLS), .PSUM_W(32), .ACC_W(32), .DEPTH(DEPTH)) dut (.*);

  longint model [NP][COLS];
  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 5; pass++) begin
      for (int p = 0; p < NP; p++) begin
        @(negedge clk);
        in_valid = 1'b1; in_first = (pass == 1); in_addr = 8'(p + 7);
        in_prec  = (pass <= 1 || pass == 3) ? PREC8 : PREC4;
        for (int c = 0; c < COLS; c++) begin
          int v, lo, hi, sl, sh;
          v  = int'($urandom_range(4000000)) - 2000000;
          lo = int'($urandom_range(60000)) - 30000;
          hi = int'($urandom_range(60000)) - 30000;
          sl = int'($urandom_range(8));
          sh = int'($urandom_range(8));
          in_shift[c][0] = 4'(sl);
          in_shift[c][1] = 4'(sh);
          if (pass <= 1) model[p][c] = 0;
          if (in_prec == PREC8) begin
            in_psum[c] = 32'(v);
            model[p][c] += longint'(v);
          end else begin
            in_psum[c] = {16'(hi), 16'(lo)};
            model[p][c] += longint'(lo) * (longint'(1) << sl) + longint'(hi) * (longint'(1) << sh);
          end
        end
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    for (int p = 0; p < NP; p++) begin
      rd_en = 1'b1; rd_addr = 8'(p + 7);
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (longint'($signed(rd_data[c])) != model[p][c]) begin
          failures++;
          if (failures < 10) $display("p %0d c %0d got %0d exp %0d", p, c, $signed(rd_data[c]), model[p][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
