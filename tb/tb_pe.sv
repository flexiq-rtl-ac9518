// tb_pe: exhaustive test of one processing element.
//
// Every pair of 8-bit activation and weight values is applied in 8-bit mode
// (the PE must add their signed product to psum_in) and every pair of packed
// nibble words in 4-bit mode (the PE must add lo*lo of the signed nibbles to
// the low 16-bit lane of psum_in and hi*hi to the high lane, each lane
// wrapping on its own). The expected values are computed here from integer arithmetic.
// The one-cycle latency of the activation and partial-sum outputs is checked
// on every vector.
module tb_pe;
  import flexiq_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        w_load;
  logic [7:0]  w_in, x_in, x_out;
  prec_t       prec_in, prec_out;
  logic signed [31:0] psum_in, psum_out;

  pe #(.PSUM_W(32)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nib(input logic [3:0] n);
    return int'($signed(n));
  endfunction

  initial begin
    w_load = 0; w_in = 0; x_in = 0; prec_in = PREC8; psum_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 2; m++) begin
      for (int w = 0; w < 256; w++) begin
        @(negedge clk);
        w_load = 1'b1; w_in = 8'(w);
        @(negedge clk);
        w_load = 1'b0;
        for (int x = 0; x < 256; x++) begin
          int exp_v, ps;
          ps = (m == 0) ? int'($urandom_range(2000)) - 1000 : int'($urandom);
          prec_in = (m == 0) ? PREC8 : PREC4;
          x_in = 8'(x);
          psum_in = ps;
          if (m == 0) exp_v = ps + int'($signed(8'(x))) * int'($signed(8'(w)));
          else begin
            logic [15:0] lo, hi;
            lo = 16'(ps) + 16'(nib(4'(x)) * nib(4'(w)));
            hi = 16'(ps >>> 16) + 16'(nib(4'(x >> 4)) * nib(4'(w >> 4)));
            exp_v = int'({hi, lo});
          end
          @(negedge clk);
          checks++;
          if (psum_out != exp_v || x_out != 8'(x) || prec_out != prec_in) begin
            failures++;
            if (failures < 10) $display("mode %0d x=%0d w=%0d got %0d exp %0d", m, x, w, psum_out, exp_v);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
