// offchip_mem_model: behavioural model of the NPU's off-chip memory, for
// testbenches only.
//
// Word-addressed storage (an associative array, unwritten words read as zero)
// behind the NPU's request/response port. Requests are accepted when
// req_ready is high; ready drops pseudo-randomly when STALL_PCT > 0 so that
// the NPU sees back-pressure. Read data returns in request order LATENCY
// cycles after the request was accepted. Testbenches preload and inspect the
// contents through the mem array by hierarchical reference.
module offchip_mem_model #(
  parameter int unsigned W         = 256,
  parameter int unsigned LATENCY   = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [23:0]   req_addr,
  input  logic [W-1:0]  req_wdata,
  output logic          rsp_valid,
  output logic [W-1:0]  rsp_rdata
);

  logic [W-1:0] mem [int];
  logic [W-1:0] pipe_d [LATENCY];
  logic         pipe_v [LATENCY];
  int unsigned  stall_cycles;
  int unsigned  writes;

  function automatic logic [W-1:0] rd(input int a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready    <= 1'b1;
      stall_cycles <= 0;
      writes       <= 0;
      for (int i = 0; i < int'(LATENCY); i++) begin
        pipe_v[i] <= 1'b0;
        pipe_d[i] <= '0;
      end
    end else begin
      req_ready <= ($urandom_range(99) >= STALL_PCT);
      if (req_valid && !req_ready) stall_cycles <= stall_cycles + 1;
      pipe_v[0] <= req_valid && req_ready && !req_we;
      pipe_d[0] <= rd(int'(req_addr));
      for (int i = 1; i < int'(LATENCY); i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      if (req_valid && req_ready && req_we) begin
        mem[int'(req_addr)] = req_wdata;
        writes <= writes + 1;
      end
    end
  end

  assign rsp_valid = pipe_v[LATENCY-1];
  assign rsp_rdata = pipe_d[LATENCY-1];

endmodule
