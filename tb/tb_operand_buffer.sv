// tb_operand_buffer: test of the input / weight buffer.
//
// Random words are written with random nibble enables (low only, high only,
// both) into a model kept here; random reads are then compared with the
// model one cycle after rd_en; every third read is of the word just written.
module tb_operand_buffer;
  import flexiq_pkg::*;

  localparam int LANES = 32, DEPTH = 256;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                        wr_lo = 0, wr_hi = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0]    wr_addr = '0, rd_addr = '0;
  logic [LANES-1:0][7:0]       wr_data = '0, rd_data;

  operand_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  logic [LANES-1:0][7:0] model [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_lo = 1; wr_hi = 1; wr_addr = 8'(a);
      for (int l = 0; l < LANES; l++) wr_data[l] = 8'($urandom);
      model[a] = wr_data;
    end
    for (int i = 0; i < 2000; i++) begin
      int m;
      @(negedge clk);
      m = $urandom_range(2);
      wr_lo = (m != 1); wr_hi = (m != 0);
      wr_addr = 8'($urandom);
      for (int l = 0; l < LANES; l++) wr_data[l] = 8'($urandom);
      for (int l = 0; l < LANES; l++) begin
        if (wr_lo) model[wr_addr][l][3:0] = wr_data[l][3:0];
        if (wr_hi) model[wr_addr][l][7:4] = wr_data[l][7:4];
      end
      @(negedge clk);
      wr_lo = 0; wr_hi = 0;
      rd_en = 1'b1;
      rd_addr = (i % 3 == 0) ? wr_addr : 8'($urandom);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      if (rd_data != model[rd_addr]) begin
        failures++;
        if (failures < 10) $display("addr %0d got %h exp %h", rd_addr, rd_data, model[rd_addr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
