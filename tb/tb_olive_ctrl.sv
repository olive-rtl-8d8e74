// tb_olive_ctrl -- checks the tile sequencer (N = 8) for several kp values
// in 4-bit and 8-bit mode: one clr pulse before the first buffer read (none
// with accumulate set); kp
// buffer reads, one every second cycle, at addresses 0..kp-1; edge_load one
// cycle after every read; R = N (or N/2) output writes to rows 0..R-1 with
// rd_row equal to the write address; busy over the whole tile; done in
// cycle 2*kp + 2N + R + 6 after the start cycle; start ignored while busy.
module tb_olive_ctrl;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, start = 0, mode8 = 0, accumulate = 0;
  logic [8:0] kp = 0;
  logic clr, buf_re, edge_load, ob_we, busy, done;
  logic [7:0] buf_raddr;
  logic [2:0] rd_row, ob_waddr;
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;

  olive_ctrl #(.N(N), .KPW(9), .AW(8)) dut (.clk, .rst_n, .start, .kp, .mode8, .accumulate, .clr, .buf_re,
    .buf_raddr, .edge_load, .rd_row, .ob_we, .ob_waddr, .busy, .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tile(input int k, input bit m8, input bit keep);
    int n_clr = 0, n_re = 0, n_ld = 0, n_we = 0, last_re = -10, t = 0, t_done = -1;
    bit prev_re = 0, order_ok = 1, busy_ok = 1;
    int R = m8 ? N/2 : N;
    @(negedge clk); start = 1; kp = 9'(k); mode8 = m8; accumulate = keep;
    @(negedge clk); start = 1; kp = 9'(k + 3);   // must be ignored
    t = 1;
    while (t_done < 0 && t < 1000) begin
      if (clr) begin n_clr++; if (n_re != 0) order_ok = 0; end
      if (buf_re) begin
        if (buf_raddr != 8'(n_re)) order_ok = 0;
        if (n_re > 0 && t - last_re != 2) order_ok = 0;
        last_re = t; n_re++;
      end
      if (edge_load) begin n_ld++; if (!prev_re) order_ok = 0; end
      if (ob_we) begin
        if (ob_waddr != 3'(n_we) || rd_row != ob_waddr) order_ok = 0;
        n_we++;
      end
      if (!busy) busy_ok = 0;
      if (done) t_done = t;
      prev_re = buf_re;
      start = 0;
      @(negedge clk); t++;
    end
    checks++; if (n_clr != (keep ? 0 : 1)) begin failures++; $display("FAIL clr count %0d", n_clr); end
    checks++; if (n_re != k || n_ld != k) begin failures++; $display("FAIL reads %0d loads %0d", n_re, n_ld); end
    checks++; if (n_we != R) begin failures++; $display("FAIL writes %0d", n_we); end
    checks++; if (!order_ok) begin failures++; $display("FAIL order/address/spacing"); end
    checks++; if (!busy_ok) begin failures++; $display("FAIL busy dropped"); end
    checks++; if (t_done != 2 * k + 2 * N + R + 6) begin failures++; $display("FAIL done at %0d, expected %0d", t_done, 2*k + 2*N + R + 6); end
    checks++; if (busy) begin failures++; $display("FAIL still busy after done"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    tile(5, 0, 0);
    tile(1, 1, 0);
    tile(12, 1, 1);
    tile(0, 0, 0);
    tile(3, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
