// tb_olive_array -- checks the systolic array (N = 8) on whole matrix
// products. The testbench applies the edge skew itself: in cycle t, row i
// receives A[i][t-i] and column j receives W[t-j][j]. 4-bit mode uses random
// exponent-integer pairs and compares every C[i][j] with the reference sum
// of products of the pair values. 8-bit mode feeds random 8-bit values x, y
// split as <4, h> / <0, l> over the 2x2 groups and compares each group sum
// with sum x*y. Also checks that clr empties the array.
module tb_olive_array;
  import olive_pkg::*;
  localparam int N = 8, K = 12;
  logic clk = 0, rst_n = 0, clr = 0, mode8 = 0;
  exp_int4_t [N-1:0] a_in, w_in;
  logic [N-1:0] a_vld;
  logic [2:0] rd_row = 0;
  logic [N-1:0][31:0] rd_data;
  int checks = 0, failures = 0;
  exp_int4_t A [N][K], W [K][N];
  logic signed [7:0] X [N/2][K], Y [K][N/2];

  always #5 clk = ~clk;

  olive_array #(.N(N)) dut (.clk, .rst_n, .clr, .mode8, .a_in, .a_vld, .w_in, .rd_row, .rd_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic feed();
    for (int t = 0; t < K + 2 * N; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        int k = t - i;
        a_vld[i] = (k >= 0 && k < K);
        a_in[i]  = a_vld[i] ? A[i][k] : exp_int4_t'($urandom);
        w_in[i]  = (k >= 0 && k < K) ? W[k][i] : exp_int4_t'($urandom);
      end
    end
    @(negedge clk); a_vld = '0;
  endtask

  initial begin
    a_vld = '0; a_in = '0; w_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      // ---- 4-bit mode ----
      mode8 = 0;
      for (int i = 0; i < N; i++) for (int k = 0; k < K; k++) begin
        A[i][k] = exp_int4_t'($urandom); A[i][k].exp_v = 4'($urandom_range(0, 6));
        W[k][i] = exp_int4_t'($urandom); W[k][i].exp_v = 4'($urandom_range(0, 6));
      end
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      #1;
      checks++;
      rd_row = 3'd5;
      #1 if (rd_data != '0) begin failures++; $display("FAIL clr"); end
      feed();
      for (int i = 0; i < N; i++) begin
        rd_row = 3'(i); #1;
        for (int j = 0; j < N; j++) begin
          longint s;
          s = 0;
          for (int k = 0; k < K; k++)
            s += (longint'(A[i][k].int_v) <<< A[i][k].exp_v) * (longint'(W[k][j].int_v) <<< W[k][j].exp_v);
          checks++;
          if (rd_data[j] != 32'(s)) begin
            failures++;
            if (failures < 10) $display("FAIL m4 C[%0d][%0d]=%0d exp %0d", i, j, $signed(rd_data[j]), s);
          end
        end
      end
      // ---- 8-bit mode ----
      mode8 = 1;
      for (int r = 0; r < N/2; r++) for (int k = 0; k < K; k++) begin
        X[r][k] = 8'($urandom); Y[k][r] = 8'($urandom);
        if (X[r][k] == -128) X[r][k] = 127;
        if (Y[k][r] == -128) Y[k][r] = -127;
        A[2*r][k]   = '{int_v: X[r][k][7:4], exp_v: 4'd4};
        A[2*r+1][k] = '{int_v: X[r][k][3:0], exp_v: 4'd0};
        W[k][2*r]   = '{int_v: Y[k][r][7:4], exp_v: 4'd4};
        W[k][2*r+1] = '{int_v: Y[k][r][3:0], exp_v: 4'd0};
      end
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      feed();
      for (int r = 0; r < N/2; r++) begin
        rd_row = 3'(r); #1;
        for (int c = 0; c < N/2; c++) begin
          longint s;
          s = 0;
          for (int k = 0; k < K; k++) s += longint'(X[r][k]) * longint'(Y[k][c]);
          checks++;
          if (rd_data[c] != 32'(s)) begin
            failures++;
            if (failures < 10) $display("FAIL m8 C[%0d][%0d]=%0d exp %0d", r, c, $signed(rd_data[c]), s);
          end
        end
        checks++;
        if (rd_data[N-1:N/2] != '0) begin failures++; $display("FAIL m8 upper half not zero"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
