// systolic_array: ROWS x COLS weight-stationary array of precision-scalable PEs.
//
// Rows correspond to input channels and columns to output channels, as in the
// paper (32 x 32 PEs). PE(r,c) holds the weight of input channel r and output
// channel c; in 4-bit mode it holds two 4-bit weights (input channels r and
// r+ROWS of the group) and so one pass covers 2*ROWS = 64 input channels.
// Activations enter at the left of each row and move right; partial sums
// move down each column and leave at the bottom.
//
// Interface:
//   w_load/w_row/w_data  write the weight word of every PE in row w_row
//                        (one row per cycle, this design's loading scheme).
//   in_valid/in_prec/in_data  one activation vector per cycle, one 8-bit
//                        word per row (two packed nibbles in 4-bit mode).
//   out_valid/out_prec/out_psum  one column-sum vector per cycle; in 4-bit
//                        mode each column sum is two PSUM_W/2-bit lanes
//                        (low: channels r, high: channels r+ROWS).
// Timing: the input rows are skewed (row r delayed r cycles) and the column
// outputs deskewed, so a vector presented in cycle t appears at the outputs
// in cycle t + ROWS + COLS - 1, whatever the precision. The precision tag
// travels with the data, so groups of different precision may follow each
// other back to back.
module systolic_array
  import flexiq_pkg::*;
#(
  parameter int unsigned ROWS   = 32,
  parameter int unsigned COLS   = 32,
  parameter int unsigned PSUM_W = 32
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            w_load,
  input  logic [$clog2(ROWS)-1:0]         w_row,
  input  logic [COLS-1:0][DATA_W-1:0]     w_data,
  input  logic                            in_valid,
  input  prec_t                           in_prec,
  input  logic [ROWS-1:0][DATA_W-1:0]     in_data,
  output logic                            out_valid,
  output prec_t                           out_prec,
  output logic [COLS-1:0][PSUM_W-1:0]     out_psum
);

  localparam int unsigned LAT = ROWS + COLS - 1;

  // Row inputs after the skew, PE-to-PE activations and partial sums.
  logic  [ROWS-1:0][DATA_W-1:0]             row_x;
  prec_t [ROWS-1:0]                         row_p;
  logic  [ROWS-1:0][COLS:0][DATA_W-1:0]     x_h;
  prec_t [ROWS-1:0][COLS:0]                 p_h;
  logic  [ROWS:0][COLS-1:0][PSUM_W-1:0]     ps_v;

  // Input skew: row r sees its element r cycles late.
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign row_x[r] = in_data[r];
      assign row_p[r] = in_prec;
    end else begin : g_delay
      logic  [r-1:0][DATA_W-1:0] xs;
      prec_t [r-1:0]             ps;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          xs <= '0;
          ps <= {r{PREC8}};
        end else begin
          xs[0] <= in_data[r];
          ps[0] <= in_prec;
          for (int k = 1; k < r; k++) begin
            xs[k] <= xs[k-1];
            ps[k] <= ps[k-1];
          end
        end
      end
      assign row_x[r] = xs[r-1];
      assign row_p[r] = ps[r-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign x_h[r][0] = row_x[r];
    assign p_h[r][0] = row_p[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.PSUM_W(PSUM_W)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .w_load  (w_load && (w_row == r[$clog2(ROWS)-1:0])),
        .w_in    (w_data[c]),
        .x_in    (x_h[r][c]),
        .prec_in (p_h[r][c]),
        .psum_in (ps_v[r][c]),
        .x_out   (x_h[r][c+1]),
        .prec_out(p_h[r][c+1]),
        .psum_out(ps_v[r+1][c])
      );
    end
  end

  assign ps_v[0] = '0;

  // Output deskew: column c is delayed COLS-1-c more cycles.
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    if (c == COLS - 1) begin : g_direct
      assign out_psum[c] = ps_v[ROWS][c];
    end else begin : g_delay
      localparam int unsigned D = COLS - 1 - c;
      logic [D-1:0][PSUM_W-1:0] ds;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) ds <= '0;
        else begin
          ds[0] <= ps_v[ROWS][c];
          for (int k = 1; k < int'(D); k++) ds[k] <= ds[k-1];
        end
      end
      assign out_psum[c] = ds[D-1];
    end
  end

  // Valid and precision follow the data through the array.
  logic  [LAT-1:0] v_sr;
  prec_t [LAT-1:0] p_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0;
      p_sr <= {LAT{PREC8}};
    end else begin
      v_sr <= {v_sr[LAT-2:0], in_valid};
      p_sr <= {p_sr[LAT-2:0], in_prec};
    end
  end
  assign out_valid = v_sr[LAT-1];
  assign out_prec  = p_sr[LAT-1];

  // unused: activations leaving the right edge
  logic unused_edge;
  always_comb begin
    unused_edge = 1'b0;
    for (int r = 0; r < ROWS; r++) unused_edge ^= ^x_h[r][COLS] ^ ^p_h[r][COLS];
  end

endmodule
