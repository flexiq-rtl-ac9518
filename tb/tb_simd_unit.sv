// tb_simd_unit: test of requantisation.
//
// Random accumulator values (small and large, both signs), multipliers and
// shifts, with and without ReLU, are compared with
// clip(floor(acc * mult / 2^shift + 0.5), -128, 127) computed here in real
// arithmetic, one cycle after in_valid.
module tb_simd_unit;
  import flexiq_pkg::*;

  localparam int COLS = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    in_valid = 0, relu = 0, out_valid;
  logic [COLS-1:0][31:0]   in_acc = '0;
  logic [15:0]             rq_mult = '0;
  logic [5:0]              rq_shift = '0;
  logic [COLS-1:0][7:0]    out_data;

  simd_unit #(.COLS(COLS), .ACC_W(32)) dut (.*);

  int checks = 0, failures = 0, exp_v [COLS];

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      in_valid = 1'b1;
      relu = t[0];
      rq_mult = 16'($urandom_range(1, 65535));
      rq_shift = 6'($urandom_range(0, 40));
      for (int c = 0; c < COLS; c++) begin
        int a;
        real r;
        a = (c % 2) ? int'($urandom) : int'($urandom_range(2000)) - 1000;
        in_acc[c] = 32'(a);
        r = $floor(real'(a) * real'(rq_mult) / (2.0 ** rq_shift) + 0.5);
        if (r > 127.0) exp_v[c] = 127; else if (r < -128.0) exp_v[c] = -128; else exp_v[c] = int'(r);
        if (relu && exp_v[c] < 0) exp_v[c] = 0;
      end
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid) failures++;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (int'($signed(out_data[c])) != exp_v[c]) begin
          failures++;
          if (failures < 10) $display("acc %0d m %0d s %0d got %0d exp %0d", $signed(in_acc[c]),
                                      rq_mult, rq_shift, $signed(out_data[c]), exp_v[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
