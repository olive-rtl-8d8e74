// olive_edge -- the row of OVP decoders along one border of the systolic
// array (the left border for activations, the top border for weights).
//
// The paper places the decoders only on the borders of the array: N 4-bit
// OVP decoders, one per PE row (or column), and N/2 8-bit OVP decoders, one
// per pair of rows, for an N x N array (128 and 64 for N = 64).
//
// A buffer word carries one byte per row: a 4-bit OVP pair, i.e. two
// consecutive elements of the reduction dimension. In 8-bit mode it carries
// one 16-bit 8-bit OVP pair per pair of rows. Because a row consumes one
// element per cycle, a word is held for two cycles: value 1 (the earlier
// element, low half) is issued first, value 2 next. In 8-bit mode each
// decoded value <e, i> with i = (h << 4) + l is split as in the paper,
// <4 + e, h> to the even row and <e, l> to the odd row; the odd-row PEs read
// l as unsigned.
//
// Interface and timing: when load is high, word is taken at the clock edge;
// the two values leave in the next two cycles. Asserting load every second
// cycle gives a gap-free stream. Row i is then delayed by i further cycles,
// the skew an output-stationary array needs, so pairs[i]/vld[i] of the
// element issued in cycle t appear in cycle t + i. The hold register, the
// issue order and the skew registers are this design's choices.
module olive_edge
  import olive_pkg::*;
#(
  parameter int N = 64   // rows (or columns) of the array; even
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [8*N-1:0]   word,
  input  logic             mode8,
  input  ntype_e           ntype,   // normal type, 4-bit mode
  input  logic [3:0]       bias4,   // E2M1 abfloat bias
  input  logic [3:0]       bias8,   // E4M3 abfloat bias
  output exp_int4_t [N-1:0] pairs,
  output logic [N-1:0]     vld
);
  logic [8*N-1:0] hold;
  logic           ph;      // 0: value 1, 1: value 2
  logic           act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= '0;
      ph   <= 1'b0;
      act  <= 1'b0;
    end else if (load) begin
      hold <= word;
      ph   <= 1'b0;
      act  <= 1'b1;
    end else if (act) begin
      if (ph) act <= 1'b0;
      ph <= ~ph;
    end
  end

  exp_int4_t [N-1:0] flat;   // unskewed element of every row

  for (genvar r = 0; r < N/2; r++) begin : g_pair
    exp_int4_t [1:0] d4_lo, d4_hi;
    exp_int8_t [1:0] d8;
    exp_int8_t       v8;

    ovp_decoder4 u_dec4_lo (.byte_in(hold[16*r +: 8]),     .ntype(ntype), .bias(bias4), .pairs(d4_lo));
    ovp_decoder4 u_dec4_hi (.byte_in(hold[16*r + 8 +: 8]), .ntype(ntype), .bias(bias4), .pairs(d4_hi));
    ovp_decoder8 u_dec8    (.pair_in(hold[16*r +: 16]),    .bias(bias8),  .pairs(d8));

    always_comb begin
      v8 = d8[ph];
      if (mode8) begin
        flat[2*r].exp_v   = v8.exp_v + 4'd4;
        flat[2*r].int_v   = v8.int_v[7:4];
        flat[2*r+1].exp_v = v8.exp_v;
        flat[2*r+1].int_v = v8.int_v[3:0];
      end else begin
        flat[2*r]   = d4_lo[ph];
        flat[2*r+1] = d4_hi[ph];
      end
    end
  end

  // Skew: row i passes through i registers.
  for (genvar i = 0; i < N; i++) begin : g_skew
    if (i == 0) begin : g_direct
      assign pairs[0] = flat[0];
      assign vld[0]   = act;
    end else begin : g_delay
      exp_int4_t [i-1:0] sp;
      logic      [i-1:0] sv;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          sp <= '0;
          sv <= '0;
        end else begin
          sp[0] <= flat[i];
          sv[0] <= act;
          for (int s = 1; s < i; s++) begin
            sp[s] <= sp[s-1];
            sv[s] <= sv[s-1];
          end
        end
      end
      assign pairs[i] = sp[i-1];
      assign vld[i]   = sv[i-1];
    end
  end
endmodule
