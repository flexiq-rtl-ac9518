// tb_bit_index_mux: test of effective bit extraction.
//
// Checks the paper's worked examples (29 at bit index 2 gives 7; -9 at bit
// index 3 gives -4; the naive index 0 gives 2 and -1) and then every 8-bit
// value at every bit index 0..4 against round(x / 2^(4-u)) computed with real
// arithmetic and clipped to [-8, 7]. In 8-bit mode the values must pass
// unchanged.
module tb_bit_index_mux;
  import flexiq_pkg::*;

  localparam int LANES = 8;

  prec_t                   prec;
  logic  [LANES-1:0][7:0]  din, dout;
  bidx_t [LANES-1:0]       bidx;

  bit_index_mux #(.LANES(LANES)) dut (.*);

  int checks = 0, failures = 0;

  function automatic int ref4(input int x, input int u);
    int v;
    v = int'($floor(real'(x) / (2.0 ** (4 - u)) + 0.5));
    if (v > 7) v = 7;
    if (v < -8) v = -8;
    return v;
  endfunction

  task automatic expect4(input int lane, input int e);
    checks++;
    if (int'($signed(dout[lane][3:0])) != e || dout[lane][7:4] != dout[lane][3:0]) begin
      failures++;
      if (failures < 10) $display("lane %0d x=%0d u=%0d got %0h exp %0d",
                                  lane, $signed(din[lane]), bidx[lane], dout[lane], e);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prec = PREC4;
    din = '0; bidx = '0;
    din[0] = 8'd29;  bidx[0] = 3'd2;
    din[1] = -8'sd9; bidx[1] = 3'd3;
    din[2] = 8'd29;  bidx[2] = 3'd0;
    din[3] = -8'sd9; bidx[3] = 3'd0;
    #1;
    expect4(0, 7); expect4(1, -4); expect4(2, 2); expect4(3, -1);
    for (int x = -128; x < 128; x++) begin
      for (int l = 0; l < LANES; l++) begin
        din[l]  = 8'(x + l);
        bidx[l] = 3'(l % 5);
      end
      prec = PREC4;
      #1;
      for (int l = 0; l < LANES; l++) expect4(l, ref4(int'($signed(8'(x + l))), l % 5));
      prec = PREC8;
      #1;
      checks++;
      if (dout != din) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
