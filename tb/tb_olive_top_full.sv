// tb_olive_top_full -- the end-to-end test of tb_olive_top run on olive_top
// with every parameter at its default (a 64x64 array, 4096 PEs, 128 4-bit
// and 64 8-bit border decoders), with K = 8 reduction elements per tile to
// keep the simulation short. Same five tiles and checks as tb_olive_top.
module tb_olive_top_full;
  import olive_pkg::*;
  import olive_ref_pkg::*;
  localparam int N = 64, IB_DEPTH = 256, KP = 4;
`include "olive_top_tb_body.svh"

  olive_top dut_top (
    .clk, .rst_n, .ib_we, .ib_waddr, .ib_wdata, .wb_we, .wb_waddr, .wb_wdata,
    .start, .kp, .mode8, .accumulate, .a_ntype, .w_ntype, .a_bias, .w_bias, .a_bias8, .w_bias8,
    .q_frac, .q_thr, .q_ntype, .q_bias, .ob_re, .ob_raddr, .ob_rdata, .busy, .done);
endmodule
