// tb_channel_permute: random permutations and data; output lane c must carry
// input lane perm[c].
module tb_channel_permute;
  import flexiq_pkg::*;

  localparam int COLS = 32;

  logic [COLS-1:0][7:0]              din, dout;
  logic [COLS-1:0][$clog2(COLS)-1:0] perm;

  channel_permute #(.COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int t = 0; t < 200; t++) begin
      int order [COLS];
      for (int c = 0; c < COLS; c++) order[c] = c;
      order.shuffle();
      for (int c = 0; c < COLS; c++) begin
        din[c]  = 8'($urandom);
        perm[c] = 5'(order[c]);
      end
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (dout[c] != din[order[c]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
