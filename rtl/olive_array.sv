// olive_array -- N x N output-stationary systolic array of OliVe MAC units.
//
// Activations enter on the left edge, one exp-int pair per row per cycle,
// and move right one PE per cycle; weights enter at the top and move down.
// With the edges skewed (row/column i delayed by i cycles), PE (i, j) meets
// A[i][k] and W[k][j] in the same cycle and accumulates C[i][j] in place.
//
// Mixed precision: in 8-bit mode each 2x2 PE group computes one 8-bit
// product from four 4-bit partial products (high/low activation part on the
// even/odd row, high/low weight part on the even/odd column). Every group
// has one extra adder, as in the paper, which here sums the four partial
// accumulators; the 8-bit array is then (N/2) x (N/2). When its sum is
// formed (at read-out, not every cycle) is this design's choice; both give
// the same 32-bit result.
//
// Read-out: rd_data is combinational from rd_row. In 4-bit mode it is row
// rd_row of C (N values); in 8-bit mode it is group row rd_row, the N/2 group
// sums in entries 0..N/2-1 and zeros above. clr zeroes every accumulator.
module olive_array
  import olive_pkg::*;
#(
  parameter int N = 64,    // even
  localparam int RW = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              mode8,
  input  exp_int4_t [N-1:0] a_in,
  input  logic [N-1:0]      a_vld,
  input  exp_int4_t [N-1:0] w_in,
  input  logic [RW-1:0]     rd_row,
  output logic [N-1:0][ACC_W-1:0] rd_data
);
  exp_int4_t  ah [N][N+1];   // horizontal links
  logic       vh [N][N+1];
  exp_int4_t  wv [N+1][N];   // vertical links
  logic [ACC_W-1:0] acc [N][N];
  logic [ACC_W-1:0] gsum [N/2][N/2];

  for (genvar i = 0; i < N; i++) begin : g_row
    assign ah[i][0] = a_in[i];
    assign vh[i][0] = a_vld[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      if (i == 0) begin : g_top
        assign wv[0][j] = w_in[j];
      end
      olive_mac #(.LOW_ROW(i % 2 == 1), .LOW_COL(j % 2 == 1)) u_pe (
        .clk, .rst_n, .clr, .mode8,
        .a_in(ah[i][j]), .a_vld_in(vh[i][j]), .w_in(wv[i][j]),
        .a_out(ah[i][j+1]), .a_vld_out(vh[i][j+1]), .w_out(wv[i+1][j]),
        .acc(acc[i][j]));
    end
  end

  // One extra adder per 2x2 PE group (8-bit mode).
  for (genvar gr = 0; gr < N/2; gr++) begin : g_grow
    for (genvar gc = 0; gc < N/2; gc++) begin : g_gcol
      assign gsum[gr][gc] = acc[2*gr][2*gc] + acc[2*gr][2*gc+1]
                          + acc[2*gr+1][2*gc] + acc[2*gr+1][2*gc+1];
    end
  end

  always_comb begin
    rd_data = '0;
    if (!mode8) begin
      for (int j = 0; j < N; j++) rd_data[j] = acc[rd_row][j];
    end else begin
      for (int j = 0; j < N/2; j++) rd_data[j] = gsum[rd_row[RW-2:0]][j];
    end
  end
endmodule
