// tb_bit_range_detect: test of run-time bit index detection.
//
// Random groups of beats are streamed with values drawn from ranges of
// different widths (including groups of only small negative values). The
// expected index is computed here from the largest magnitude in the group:
// 4 if every value lies in [-8, 7], 3 for [-16, 15], 2 for [-32, 31],
// 1 for [-64, 63], else 0. clear must start a new group.
module tb_bit_range_detect;
  import flexiq_pkg::*;

  localparam int LANES = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     clear = 0, in_valid = 0;
  logic [LANES-1:0][7:0]    din = '0;
  bidx_t                    bidx;

  bit_range_detect #(.LANES(LANES)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int rng, lo, hi, mx, e, beats;
      rng = 4 << (t % 6);                 // 4 .. 128
      lo = -rng; hi = rng - 1;
      if (t % 7 == 3) begin lo = -rng; hi = -1; end
      if (hi > 127) hi = 127;
      if (lo < -128) lo = -128;
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      mx = 0;
      beats = 1 + $urandom_range(5);
      for (int b = 0; b < beats; b++) begin
        in_valid = 1'b1;
        for (int l = 0; l < LANES; l++) begin
          int v, m;
          v = lo + int'($urandom_range(hi - lo));
          din[l] = 8'(v);
          m = (v < 0) ? -v - 1 : v;
          if (m > mx) mx = m;
        end
        @(negedge clk);
      end
      in_valid = 1'b0;
      din = {LANES{8'h7f}};                // must be ignored: not valid
      @(negedge clk);
      e = (mx < 8) ? 4 : (mx < 16) ? 3 : (mx < 32) ? 2 : (mx < 64) ? 1 : 0;
      checks++;
      if (int'(bidx) != e) begin
        failures++;
        if (failures < 10) $display("group %0d max %0d got %0d exp %0d", t, mx, bidx, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
