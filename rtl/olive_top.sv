// olive_top -- OliVe accelerator core: an output-stationary systolic array
// of OliVe MAC units fed through outlier-victim pair (OVP) decoders placed
// only on its borders.
//
// Blocks and data path:
//   input buffer  -> olive_edge (left):  N 4-bit + N/2 8-bit OVP decoders,
//                                        2-cycle word issue, row skew
//   weight buffer -> olive_edge (top):   same, for the columns
//   olive_array: N x N OliVe MAC units, 32-bit accumulators, one extra
//                adder per 2x2 group for 8-bit operation
//   drain: each result row goes to the output buffer as N 32-bit values,
//          together with its OVP re-encoding (N/2 ovp_encoder4 in 4-bit
//          mode, N/4 ovp_encoder8 in 8-bit mode), ready to serve as the
//          activations of a next layer
//   olive_ctrl sequences one tile.
// With N = 64 this has the paper's 4096 4-bit PEs, 128 4-bit decoders and
// 64 8-bit decoders. DRAM is outside: the buffers' fill and read ports are
// the top's ports. Buffer sizes and the drain/re-encode path are this
// design's choices.
//
// Operation: fill the input buffer with A (word p, byte i = elements 2p and
// 2p+1 of row i; in 8-bit mode bytes 2r and 2r+1 hold the 8-bit OVP pair of
// row r) and the weight buffer with W the same way per column; then pulse
// start with kp = K/2 and the instruction fields. The fields follow the
// paper's mmaovp instruction (separate normal types for the two operands and
// an abfloat bias) and are captured at start. After done, output buffer
// word r holds {OVP bytes, C row r}: bits 32*j +: 32 hold C[r][j]; bits
// 32*N + 8*m +: 8 hold the OVP byte of C[r][2m], C[r][2m+1]. In 8-bit mode
// the array acts as (N/2) x (N/2), rows 0..N/2-1 are written, C[r][j] sits
// in the same place for j < N/2, and bits 32*N + 16*m +: 16 hold the 8-bit
// OVP pair of C[r][2m], C[r][2m+1] (int8 / E4M3, bias q_bias). N must be a
// multiple of 4 for every 8-bit result to have an encoder. With
// accumulate set, the accumulators are not cleared, so a reduction longer
// than one buffer load runs as several tiles (this design's addition; the
// array is output stationary, so partial sums simply stay in place).
module olive_top
  import olive_pkg::*;
#(
  parameter int N        = 64,
  parameter int IB_DEPTH = 256,
  localparam int AW      = $clog2(IB_DEPTH),
  localparam int KPW     = AW + 1,
  localparam int RW      = $clog2(N),
  localparam int OBW     = N*ACC_W + N/2*8
) (
  input  logic           clk,
  input  logic           rst_n,
  // input (activation) buffer fill
  input  logic           ib_we,
  input  logic [AW-1:0]  ib_waddr,
  input  logic [8*N-1:0] ib_wdata,
  // weight buffer fill
  input  logic           wb_we,
  input  logic [AW-1:0]  wb_waddr,
  input  logic [8*N-1:0] wb_wdata,
  // instruction
  input  logic           start,
  input  logic [KPW-1:0] kp,
  input  logic           mode8,     // 0: 4-bit OVP, 1: 8-bit OVP
  input  logic           accumulate, // 1: add onto the previous tile's results
  input  ntype_e         a_ntype,   // normal type of A (4-bit mode)
  input  ntype_e         w_ntype,   // normal type of W (4-bit mode)
  input  logic [3:0]     a_bias,    // E2M1 abfloat bias of A
  input  logic [3:0]     w_bias,
  input  logic [3:0]     a_bias8,   // E4M3 abfloat bias of A
  input  logic [3:0]     w_bias8,
  // output re-quantization
  input  logic [4:0]     q_frac,    // fraction bits of the results
  input  logic [31:0]    q_thr,     // outlier threshold, same fixed point
  input  ntype_e         q_ntype,   // int4 or flint4 (8-bit mode: int8)
  input  logic [3:0]     q_bias,    // abfloat bias: E2M1, or E4M3 in 8-bit mode
  // output buffer read
  input  logic           ob_re,
  input  logic [RW-1:0]  ob_raddr,
  output logic [OBW-1:0] ob_rdata,
  output logic           busy,
  output logic           done
);
  // Captured instruction fields.
  logic       m8_q;
  ntype_e     a_nt_q, w_nt_q, q_nt_q;
  logic [3:0] a_b_q, w_b_q, a_b8_q, w_b8_q, q_b_q;
  logic [4:0] q_f_q;
  logic [31:0] q_t_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m8_q <= 1'b0; a_nt_q <= NT_INT4; w_nt_q <= NT_INT4; q_nt_q <= NT_INT4;
      a_b_q <= '0; w_b_q <= '0; a_b8_q <= '0; w_b8_q <= '0; q_b_q <= '0;
      q_f_q <= '0; q_t_q <= '0;
    end else if (start && !busy) begin
      m8_q <= mode8; a_nt_q <= a_ntype; w_nt_q <= w_ntype; q_nt_q <= q_ntype;
      a_b_q <= a_bias; w_b_q <= w_bias; a_b8_q <= a_bias8; w_b8_q <= w_bias8;
      q_b_q <= q_bias; q_f_q <= q_frac; q_t_q <= q_thr;
    end
  end

  logic          clr, buf_re, edge_load, ob_we;
  logic [AW-1:0] buf_raddr;
  logic [RW-1:0] rd_row, ob_waddr;

  olive_ctrl #(.N(N), .KPW(KPW), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .kp, .mode8, .accumulate,
    .clr, .buf_re, .buf_raddr, .edge_load, .rd_row, .ob_we, .ob_waddr,
    .busy, .done);

  logic [8*N-1:0] ib_rdata, wb_rdata;

  olive_buffer #(.W(8*N), .DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(buf_re), .raddr(buf_raddr), .rdata(ib_rdata));

  olive_buffer #(.W(8*N), .DEPTH(IB_DEPTH)) u_wbuf (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .re(buf_re), .raddr(buf_raddr), .rdata(wb_rdata));

  exp_int4_t [N-1:0] a_pairs, w_pairs;
  logic [N-1:0]      a_vld, w_vld_unused;

  olive_edge #(.N(N)) u_edge_a (
    .clk, .rst_n, .load(edge_load), .word(ib_rdata), .mode8(m8_q),
    .ntype(a_nt_q), .bias4(a_b_q), .bias8(a_b8_q), .pairs(a_pairs), .vld(a_vld));

  // The weight edge is skewed identically; the activation valid bits alone
  // gate accumulation, so its valid outputs are not needed.
  olive_edge #(.N(N)) u_edge_w (
    .clk, .rst_n, .load(edge_load), .word(wb_rdata), .mode8(m8_q),
    .ntype(w_nt_q), .bias4(w_b_q), .bias8(w_b8_q), .pairs(w_pairs), .vld(w_vld_unused));

  logic [N-1:0][ACC_W-1:0] rd_data;

  olive_array #(.N(N)) u_array (
    .clk, .rst_n, .clr, .mode8(m8_q),
    .a_in(a_pairs), .a_vld, .w_in(w_pairs),
    .rd_row, .rd_data);

  // Output re-quantization. 4-bit mode: one ovp_encoder4 per pair of
  // adjacent columns gives N/2 OVP bytes. 8-bit mode: the N/2 group sums
  // (rd_data[0 .. N/2-1]) go pairwise through N/4 ovp_encoder8, whose 16-bit
  // OVP pairs fill the same N/2 bytes.
  logic [N/2-1:0][7:0]  q4_bytes;
  logic [N/4-1:0][15:0] q8_pairs;
  logic [N/2-1:0][7:0]  q_bytes;
  for (genvar m = 0; m < N/2; m++) begin : g_enc
    ovp_encoder4 u_enc (
      .v1(rd_data[2*m]), .v2(rd_data[2*m+1]), .frac(q_f_q), .thr(q_t_q),
      .ntype(q_nt_q), .bias(q_b_q), .byte_out(q4_bytes[m]));
  end
  for (genvar m = 0; m < N/4; m++) begin : g_enc8
    ovp_encoder8 u_enc8 (
      .v1(rd_data[2*m]), .v2(rd_data[2*m+1]), .frac(q_f_q), .thr(q_t_q),
      .bias(q_b_q), .pair_out(q8_pairs[m]));
  end
  always_comb begin
    q_bytes = q4_bytes;
    if (m8_q) begin
      q_bytes = '0;
      for (int m = 0; m < N/4; m++) q_bytes[2*m +: 2] = q8_pairs[m];
    end
  end

  olive_buffer #(.W(OBW), .DEPTH(N)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata({q_bytes, rd_data}),
    .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata));
endmodule
