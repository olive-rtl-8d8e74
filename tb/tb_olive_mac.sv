// tb_olive_mac -- checks the OliVe MAC unit.
// Part 1: one PE in 4-bit mode accumulates random exponent-integer pairs;
// the accumulator is compared each cycle with a reference sum of
// (ia << ea) * (iw << ew), including clr and cycles with a_vld low, and the
// forwarded a/w outputs are checked to lag by one cycle.
// Part 2: a 2x2 group (four PEs with the LOW_ROW/LOW_COL settings of their
// array positions) in 8-bit mode computes x*y for random int8 x, y from the
// split <4,h> + <0,l>; the sum of the four accumulators must equal sum x*y.
module tb_olive_mac;
  import olive_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, mode8 = 0;
  exp_int4_t a_in, w_in, a_out, w_out;
  logic a_vld_in, a_vld_out;
  logic [31:0] acc;
  int checks = 0, failures = 0;
  longint ref_acc;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  olive_mac dut (.clk, .rst_n, .clr, .mode8, .a_in, .a_vld_in, .w_in,
                 .a_out, .a_vld_out, .w_out, .acc);

  // 2x2 group for 8-bit mode
  exp_int4_t ga [2], gw [2];
  logic gvld = 0, gclr = 0;
  logic [31:0] gacc [2][2];
  for (genvar i = 0; i < 2; i++) begin : g_r
    for (genvar j = 0; j < 2; j++) begin : g_c
      exp_int4_t ao, wo; logic vo;
      olive_mac #(.LOW_ROW(i == 1), .LOW_COL(j == 1)) u (
        .clk, .rst_n, .clr(gclr), .mode8(1'b1), .a_in(ga[i]), .a_vld_in(gvld), .w_in(gw[j]),
        .a_out(ao), .a_vld_out(vo), .w_out(wo), .acc(gacc[i][j]));
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_int4_t pa, pw;
    longint gref;
    a_in = '0; w_in = '0; a_vld_in = 0;
    ga[0] = '0; ga[1] = '0; gw[0] = '0; gw[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_acc = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      pa = exp_int4_t'($urandom); pw = exp_int4_t'($urandom);
      pa.exp_v = 4'($urandom_range(0, 6)); pw.exp_v = 4'($urandom_range(0, 6));
      a_in = pa; w_in = pw;
      a_vld_in = ($urandom_range(0, 3) != 0);
      clr = (n % 97 == 50);
      @(posedge clk); #1;
      if (clr) ref_acc = 0;
      else if (a_vld_in) ref_acc += (longint'(pa.int_v) <<< pa.exp_v) * (longint'(pw.int_v) <<< pw.exp_v);
      checks++;
      if (acc != 32'(ref_acc)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d acc=%0d ref=%0d", n, $signed(acc), ref_acc);
      end
      checks++;
      if (a_out != pa || w_out != pw || a_vld_out != a_vld_in) begin
        failures++;
        $display("FAIL forwarding n=%0d", n);
      end
    end
    clr = 0; a_vld_in = 0;
    // Part 2: 8-bit products on a 2x2 group.
    @(negedge clk); gclr = 1; @(negedge clk); gclr = 0;
    gref = 0;
    for (int n = 0; n < 200; n++) begin
      logic signed [7:0] x, y;
      x = 8'($urandom); y = 8'($urandom);
      if (x == -128) x = -127;
      if (y == -128) y = 127;
      ga[0].exp_v = 4'd4; ga[0].int_v = x[7:4];
      ga[1].exp_v = 4'd0; ga[1].int_v = x[3:0];
      gw[0].exp_v = 4'd4; gw[0].int_v = y[7:4];
      gw[1].exp_v = 4'd0; gw[1].int_v = y[3:0];
      gvld = 1;
      gref += longint'(x) * longint'(y);
      @(posedge clk); #1;
      checks++;
      if (32'(gacc[0][0] + gacc[0][1] + gacc[1][0] + gacc[1][1]) != 32'(gref)) begin
        failures++;
        if (failures < 10) $display("FAIL 8-bit n=%0d x=%0d y=%0d", n, x, y);
      end
      @(negedge clk);
    end
    gvld = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
