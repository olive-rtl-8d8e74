// tb_olive_buffer -- random writes and reads of a small buffer against a
// reference array; checks the one-cycle read latency and that rdata holds
// while re is low.
module tb_olive_buffer;
  localparam int W = 40, DEPTH = 16;
  logic clk = 0, we = 0, re = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata, model [DEPTH], held;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  olive_buffer #(.W(W), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 4'(a); wdata = {8'(a), 32'($urandom)}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      logic [3:0] ra;
      @(negedge clk);
      ra = 4'($urandom); raddr = ra; re = 1;
      we = $urandom_range(0, 1); waddr = 4'($urandom); wdata = {8'hAA, 32'($urandom)};
      held = model[ra];               // a same-cycle write returns the old word
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL read %0d", ra); end
      @(negedge clk); re = 0; we = 0;
      @(posedge clk); #1;
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
