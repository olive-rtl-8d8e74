// tb_olive_top -- end-to-end test of the accelerator core at N = 8.
//
// Runs five tiles: int4 x int4; flint4 x int4 (re-encoded as flint4) added
// onto the first tile's results (accumulate); int4 x flint4; an 8-bit tile;
// and a second 8-bit tile accumulated onto it. For each, random OVP-encoded A and W are
// generated (with forced left-outlier and right-outlier pairs), written to
// the input and weight buffers, and the tile is started. Every output
// buffer word is compared with a reference: C = A x W computed from the
// number formats' value tables, and the OVP re-encoding of C (4-bit in
// 4-bit tiles, int8/E4M3 in 8-bit tiles) computed in real arithmetic. The start-to-done time is checked against
// 2*kp + 2N + R + 6 cycles. Counts how often each mechanism happened (left
// and right outlier pairs decoded, flint4 operands, 8-bit mode with group
// adders and E4M3 outliers, outlier and normal pairs produced by the
// 4-bit and 8-bit re-encoders, accumulation across tiles) and counts a failure for any that never happened.
module tb_olive_top;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  localparam int N = 8, IB_DEPTH = 16, KP = 6;
`include "olive_top_tb_body.svh"

  olive_top #(.N(N), .IB_DEPTH(IB_DEPTH)) dut_top (
    .clk, .rst_n, .ib_we, .ib_waddr, .ib_wdata, .wb_we, .wb_waddr, .wb_wdata,
    .start, .kp, .mode8, .accumulate, .a_ntype, .w_ntype, .a_bias, .w_bias, .a_bias8, .w_bias8,
    .q_frac, .q_thr, .q_ntype, .q_bias, .ob_re, .ob_raddr, .ob_rdata, .busy, .done);
endmodule
