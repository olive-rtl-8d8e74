// tb_olive_edge -- checks one border decoder row (N = 8) in 4-bit int4,
// 4-bit flint4 and 8-bit modes. Words are loaded every second cycle. For
// every row it collects the valid outputs and compares them, in order, with
// the values the OVP definition gives for the row's bytes (8-bit mode: the
// even row's <4+e, h> plus the odd row's unsigned <e, l> must give the 8-bit
// value). It also checks the skew: row i's first output comes exactly i
// cycles after row 0's, and each row gives exactly 2 outputs per word.
module tb_olive_edge;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  localparam int N = 8, KP = 6;
  logic clk = 0, rst_n = 0, load = 0, mode8 = 0;
  logic [8*N-1:0] word = '0;
  ntype_e ntype = NT_INT4;
  logic [3:0] bias4 = 4'd2, bias8 = 4'd4;
  exp_int4_t [N-1:0] pairs;
  logic [N-1:0] vld;
  int checks = 0, failures = 0, cyc = 0;
  logic [8*N-1:0] words [KP];
  longint got [N][$];
  int first [N];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  olive_edge #(.N(N)) dut (.clk, .rst_n, .load, .word, .mode8, .ntype, .bias4, .bias8, .pairs, .vld);

  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (vld[i]) begin
      longint v;
      if (got[i].size() == 0) first[i] = cyc;
      if (mode8 && (i % 2 == 1)) v = longint'({1'b0, pairs[i].int_v}) <<< pairs[i].exp_v;
      else v = longint'(pairs[i].int_v) <<< pairs[i].exp_v;
      got[i].push_back(v);
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit m8, input ntype_e t);
    for (int i = 0; i < N; i++) got[i] = {};
    mode8 = m8; ntype = t;
    for (int p = 0; p < KP; p++) begin
      for (int b = 0; b < N; b++) words[p][8*b +: 8] = 8'($urandom);
      for (int b = 0; b < N/2; b++) begin
        if (p % 2 == 0) words[p][16*b +: 8] = 8'h80;   // force some outlier pairs
        else if (b == 0) words[p][16*b + 8 +: 8] = 8'h80;
        // keep 8-bit abfloat exponents inside the 4-bit field after the +4 split
        if (words[p][16*b +: 8] == 8'h80) words[p][16*b + 14] = 1'b0;
        if (words[p][16*b + 8 +: 8] == 8'h80) words[p][16*b + 6] = 1'b0;
      end
    end
    for (int p = 0; p < KP; p++) begin
      @(negedge clk); load = 1; word = words[p];
      @(negedge clk); load = 0;
    end
    repeat (N + 4) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got[i].size() != 2 * KP) begin failures++; $display("FAIL row %0d count %0d", i, got[i].size()); end
      checks++;
      if (first[i] - first[0] != i) begin failures++; $display("FAIL skew row %0d: %0d", i, first[i] - first[0]); end
    end
    for (int p = 0; p < KP; p++)
      for (int ph = 0; ph < 2; ph++) begin
        int k = 2 * p + ph;
        if (!m8) begin
          for (int i = 0; i < N; i++) begin
            longint e = ovp4_val(words[p][8*i +: 8], t == NT_FLINT4, int'(bias4), ph);
            checks++;
            if (got[i][k] != e) begin failures++; $display("FAIL m4 row %0d elem %0d got %0d exp %0d", i, k, got[i][k], e); end
          end
        end else begin
          for (int r = 0; r < N/2; r++) begin
            longint e = ovp8_val(words[p][16*r +: 16], int'(bias8), ph);
            checks++;
            if (got[2*r][k] + got[2*r+1][k] != e) begin
              failures++;
              $display("FAIL m8 rowpair %0d elem %0d got %0d+%0d exp %0d", r, k, got[2*r][k], got[2*r+1][k], e);
            end
          end
        end
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1'b0, NT_INT4);
    run(1'b0, NT_FLINT4);
    run(1'b1, NT_INT4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
