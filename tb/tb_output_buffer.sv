// tb_output_buffer: random writes and reads of the output buffer against a
// model kept here; read data is checked one cycle after rd_en.
module tb_output_buffer;
  import flexiq_pkg::*;

  localparam int COLS = 32, DEPTH = 256;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0]  wr_addr = '0, rd_addr = '0;
  logic [COLS-1:0][7:0]      wr_data = '0, rd_data;

  output_buffer #(.COLS(COLS), .DEPTH(DEPTH)) dut (.*);

  logic [COLS-1:0][7:0] model [DEPTH];
  bit                   known [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = 8'($urandom);
      for (int c = 0; c < COLS; c++) wr_data[c] = 8'($urandom);
      model[wr_addr] = wr_data;
      known[wr_addr] = 1'b1;
      @(negedge clk);
      wr_en = 1'b0;
      rd_en = 1'b1;
      rd_addr = (i % 2) ? wr_addr : 8'($urandom);
      @(negedge clk);
      rd_en = 1'b0;
      if (known[rd_addr]) begin
        checks++;
        if (rd_data != model[rd_addr]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
