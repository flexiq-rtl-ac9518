// tb_instr_mem: random layer instructions are written to every entry, some
// entries are rewritten (as a change of the 4-bit ratio would), and all are
// read back and compared with a model one cycle after rd_en.
module tb_instr_mem;
  import flexiq_pkg::*;

  localparam int DEPTH = 64;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0]  wr_addr = '0, rd_addr = '0;
  instr_t                    wr_data = '0, rd_data;

  instr_mem #(.DEPTH(DEPTH)) dut (.*);

  instr_t model [DEPTH];
  int checks = 0, failures = 0;

  function automatic instr_t rnd();
    logic [$bits(instr_t)-1:0] v;
    for (int i = 0; i < $bits(instr_t); i += 32) v[i +: 32] = $urandom;
    return instr_t'(v);
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = 6'(a); wr_data = rnd(); model[a] = wr_data;
    end
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      wr_addr = 6'($urandom);
      wr_data = model[wr_addr];
      wr_data.n_ch4 = 16'($urandom);
      wr_data.n_ch8 = 16'($urandom);
      model[wr_addr] = wr_data;
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1'b1; rd_addr = 6'(a);
      @(negedge clk);
      checks++;
      if (rd_data != model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
