// Body shared by the end-to-end testbenches of olive_top; the including
// module declares N, IB_DEPTH and KP before the include and instantiates
// olive_top as dut_top after it.
  localparam int AW = $clog2(IB_DEPTH), RW = $clog2(N), OBW = N*32 + N/2*8;
  logic clk = 0, rst_n = 0;
  logic ib_we = 0, wb_we = 0, start = 0, mode8 = 0, accumulate = 0, ob_re = 0;
  logic [AW-1:0] ib_waddr = 0, wb_waddr = 0;
  logic [8*N-1:0] ib_wdata = 0, wb_wdata = 0;
  logic [AW:0] kp = 0;
  ntype_e a_ntype = NT_INT4, w_ntype = NT_INT4, q_ntype = NT_INT4;
  logic [3:0] a_bias = 2, w_bias = 2, a_bias8 = 4, w_bias8 = 4, q_bias = 2;
  logic [4:0] q_frac = 0;
  logic [31:0] q_thr = 0;
  logic [RW-1:0] ob_raddr = 0;
  logic [OBW-1:0] ob_rdata;
  logic busy, done;
  int checks = 0, failures = 0, cyc = 0;
  int n_left = 0, n_right = 0, n_flint = 0, n_m8 = 0, n_out8 = 0, n_qout = 0, n_qnorm = 0, n_int4 = 0, n_keep = 0,
      n_q8out = 0, n_q8norm = 0;
  logic [8*N-1:0] aw [KP], ww [KP];
  longint av [N][2*KP], wv [2*KP][N];
  longint c [N][N];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20 * (2 * KP + 3 * N + 40) + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] rnd_byte4(input int p, input int i);
    logic [7:0] b = 8'($urandom);
    case ((p + i) % 5)
      0: b[7:4] = 4'h8;                 // left outlier (value 1 is the outlier)
      1: b[3:0] = 4'h8;                 // right outlier
      default: begin
        if (b[3:0] == 4'h8) b[3:0] = 4'h0;
        if (b[7:4] == 4'h8) b[7:4] = 4'h7;
      end
    endcase
    return b;
  endfunction

  function automatic logic [15:0] rnd_pair8(input int p, input int r);
    logic [15:0] b = 16'($urandom);
    case ((p + r) % 5)
      0: begin b[15:8] = 8'h80; b[6] = 1'b0; end   // E4M3 exponent <= 7
      1: begin b[7:0] = 8'h80; b[14] = 1'b0; end
      default: begin
        if (b[7:0] == 8'h80) b[7:0] = 8'h7f;
        if (b[15:8] == 8'h80) b[15:8] = 8'h81;
      end
    endcase
    return b;
  endfunction

  task automatic run_tile(input bit m8, input ntype_e at, input ntype_e wt, input ntype_e qt, input bit keep);
    int R = m8 ? N/2 : N;
    int t0, t_done;
    longint mean;
    int f;
    // operands
    for (int p = 0; p < KP; p++) begin
      if (!m8) begin
        for (int i = 0; i < N; i++) begin
          aw[p][8*i +: 8] = rnd_byte4(p, i);
          ww[p][8*i +: 8] = rnd_byte4(p + 2, i);
        end
      end else begin
        for (int r = 0; r < N/2; r++) begin
          aw[p][16*r +: 16] = rnd_pair8(p, r);
          ww[p][16*r +: 16] = rnd_pair8(p + 3, r);
        end
      end
    end
    for (int p = 0; p < KP; p++)
      for (int ph = 0; ph < 2; ph++) begin
        for (int i = 0; i < R; i++) begin
          if (!m8) begin
            av[i][2*p+ph] = ovp4_val(aw[p][8*i +: 8], at == NT_FLINT4, int'(a_bias), ph);
            wv[2*p+ph][i] = ovp4_val(ww[p][8*i +: 8], wt == NT_FLINT4, int'(w_bias), ph);
          end else begin
            av[i][2*p+ph] = ovp8_val(aw[p][16*i +: 16], int'(a_bias8), ph);
            wv[2*p+ph][i] = ovp8_val(ww[p][16*i +: 16], int'(w_bias8), ph);
          end
        end
        if (ph == 0) begin
          for (int i = 0; i < (m8 ? N/2 : N); i++) begin
            if (!m8) begin
              if (aw[p][8*i+4 +: 4] == 4'h8 && aw[p][8*i +: 4] != 4'h8) n_left++;
              if (aw[p][8*i +: 4] == 4'h8 && aw[p][8*i+4 +: 4] != 4'h8) n_right++;
            end else if (aw[p][16*i +: 8] == 8'h80 || aw[p][16*i+8 +: 8] == 8'h80) n_out8++;
          end
        end
      end
    for (int i = 0; i < R; i++)
      for (int j = 0; j < R; j++) begin
        longint s;
        s = 0;
        for (int k = 0; k < 2 * KP; k++) s += av[i][k] * wv[k][j];
        if (keep) s += c[i][j];      // accumulate onto the previous tile
        c[i][j] = longint'($signed(32'(s)));
      end
    // output quantization scale: about 3 quantization steps per mean |C|
    mean = 1;
    for (int i = 0; i < R; i++) for (int j = 0; j < R; j++) mean += (c[i][j] < 0) ? -c[i][j] : c[i][j];
    mean = mean / (R * R);
    f = 0;
    // (8-bit results: about 24 steps per mean |C|, so that the large ones
    // pass the int8 threshold and become E4M3 outliers)
    if (m8) while ((64'(1) << (f + 5)) < mean * 4 / 3 && f < 24) f++;
    else    while ((64'(1) << (f + 2)) < mean && f < 24) f++;
    // buffers
    for (int p = 0; p < KP; p++) begin
      @(negedge clk);
      ib_we = 1; ib_waddr = AW'(p); ib_wdata = aw[p];
      wb_we = 1; wb_waddr = AW'(p); wb_wdata = ww[p];
    end
    @(negedge clk); ib_we = 0; wb_we = 0;
    // instruction
    start = 1; kp = (AW+1)'(KP); mode8 = m8; accumulate = keep; a_ntype = at; w_ntype = wt; q_ntype = qt;
    q_frac = 5'(f); q_thr = (qt == NT_INT4) ? ((32'd15 << f) >> 1) : ((32'd17 << f) >> 1);
    q_bias = (qt == NT_INT4) ? 4'd2 : 4'd3;
    if (m8) begin
      q_thr  = (32'd255 << f) >> 1;   // int8 range is [-127, 127]
      q_bias = 4'd4;                  // E4M3 outliers start at 9 << 4 = 144
    end
    t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t_done = cyc - t0;
    checks++;
    if (t_done != 2 * KP + 2 * N + R + 6) begin
      failures++;
      $display("FAIL tile time %0d, expected %0d", t_done, 2 * KP + 2 * N + R + 6);
    end
    if (keep) n_keep++;
    if (m8) n_m8++;
    else if (at == NT_FLINT4 || wt == NT_FLINT4) n_flint++;
    else n_int4++;
    // results
    for (int r = 0; r < R; r++) begin
      @(negedge clk); ob_re = 1; ob_raddr = RW'(r);
      @(negedge clk); ob_re = 0;
      for (int j = 0; j < N; j++) begin
        longint e;
        e = (j < R) ? c[r][j] : 0;
        checks++;
        if (longint'($signed(ob_rdata[32*j +: 32])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL m8=%0d C[%0d][%0d]=%0d exp %0d", m8, r, j, $signed(ob_rdata[32*j +: 32]), e);
        end
      end
      if (!m8)
        for (int m = 0; m < N/2; m++) begin
          logic [7:0] qe, qg;
          longint c1, c2;
          c1 = c[r][2*m];
          c2 = c[r][2*m+1];
          qe = ref_enc4(c1, c2, f, longint'(q_thr), qt == NT_FLINT4, int'(q_bias));
          qg = ob_rdata[32*N + 8*m +: 8];
          checks++;
          if (qg != qe) begin
            failures++;
            if (failures < 10) $display("FAIL q row %0d pair %0d got %h exp %h (%0d, %0d)", r, m, qg, qe, c1, c2);
          end
          if (qg[7:4] == 4'h8 || qg[3:0] == 4'h8) n_qout++;
          else n_qnorm++;
        end
      else
        for (int m = 0; m < N/4; m++) begin
          logic [15:0] pe, pg;
          longint c1, c2;
          c1 = c[r][2*m];
          c2 = c[r][2*m+1];
          pe = ref_enc8(c1, c2, f, longint'(q_thr), int'(q_bias));
          pg = ob_rdata[32*N + 16*m +: 16];
          checks++;
          if (pg != pe) begin
            failures++;
            if (failures < 10) $display("FAIL q8 row %0d pair %0d got %h exp %h (%0d, %0d)", r, m, pg, pe, c1, c2);
          end
          if (pg[15:8] == 8'h80 || pg[7:0] == 8'h80) n_q8out++;
          else n_q8norm++;
        end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_tile(1'b0, NT_INT4, NT_INT4, NT_INT4, 1'b0);
    run_tile(1'b0, NT_FLINT4, NT_INT4, NT_FLINT4, 1'b1);
    run_tile(1'b0, NT_INT4, NT_FLINT4, NT_INT4, 1'b0);
    run_tile(1'b1, NT_INT4, NT_INT4, NT_INT4, 1'b0);
    run_tile(1'b1, NT_INT4, NT_INT4, NT_INT4, 1'b1);
    $display("mechanisms: int4 tiles %0d, flint4 tiles %0d, 8-bit tiles %0d", n_int4, n_flint, n_m8);
    $display("  left-outlier pairs %0d, right-outlier pairs %0d, 8-bit outlier pairs %0d", n_left, n_right, n_out8);
    $display("  re-encoded outlier pairs %0d, re-encoded normal pairs %0d", n_qout, n_qnorm);
    $display("  8-bit re-encoded outlier pairs %0d, normal pairs %0d", n_q8out, n_q8norm);
    $display("  accumulate-onto-previous tiles %0d", n_keep);
    checks++; if (n_keep == 0)  failures++;
    checks++; if (n_int4 == 0)  failures++;
    checks++; if (n_flint == 0) failures++;
    checks++; if (n_m8 == 0)    failures++;
    checks++; if (n_left == 0)  failures++;
    checks++; if (n_right == 0) failures++;
    checks++; if (n_out8 == 0)  failures++;
    checks++; if (n_qout == 0)  failures++;
    checks++; if (n_qnorm == 0) failures++;
    checks++; if (n_q8out == 0) failures++;
    checks++; if (n_q8norm == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
