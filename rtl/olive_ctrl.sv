// olive_ctrl -- sequencer of one output tile of the OliVe systolic array.
//
// The paper specifies an output-stationary systolic array but no controller;
// this is the simplest sequencer that runs one tile C = A x W, with A held
// in the input buffer and W in the weight buffer, kp words each (a word is
// two elements of the reduction dimension per array row/column, so K = 2*kp).
//
// Sequence after start (one cycle each unless noted):
//   CLR   pulse clr to zero the accumulators, unless accumulate is set: then
//         the tile adds onto the results left by the previous tile, which
//         splits a long reduction over several buffer loads;
//   FEED  read buffer word p = 0..kp-1 from both buffers, one every second
//         cycle; edge_load follows each read by one cycle (read latency);
//   WAIT  2N+4 cycles for the last element to cross the skewed array;
//   DRAIN read result rows 0..R-1 (R = N, or N/2 in 8-bit mode) and write
//         row r to output buffer word r, one row per cycle;
//   then done pulses for one cycle and the sequencer is idle again.
// start is ignored while busy. A tile with kp words takes
// 2 + 2*kp + 2N + 4 + R cycles from start to done.
module olive_ctrl #(
  parameter int N    = 64,
  parameter int KPW  = 9,    // width of kp
  parameter int AW   = 8,    // input/weight buffer address width
  localparam int RW  = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [KPW-1:0] kp,
  input  logic           mode8,
  input  logic           accumulate,
  output logic           clr,
  output logic           buf_re,
  output logic [AW-1:0]  buf_raddr,
  output logic           edge_load,
  output logic [RW-1:0]  rd_row,
  output logic           ob_we,
  output logic [RW-1:0]  ob_waddr,
  output logic           busy,
  output logic           done
);
  typedef enum logic [2:0] {S_IDLE, S_CLR, S_FEED, S_WAIT, S_DRAIN, S_DONE} state_e;

  state_e         st;
  logic [KPW-1:0] kp_q, p;
  logic           sub;        // second cycle of a word
  logic [15:0]    wcnt;
  logic [RW:0]    row;
  logic           m8_q, keep_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      kp_q      <= '0;
      p         <= '0;
      sub       <= 1'b0;
      wcnt      <= '0;
      row       <= '0;
      m8_q      <= 1'b0;
      keep_q    <= 1'b0;
      edge_load <= 1'b0;
    end else begin
      edge_load <= buf_re;
      unique case (st)
        S_IDLE: if (start) begin
          kp_q <= kp;
          m8_q <= mode8;
          keep_q <= accumulate;
          st   <= S_CLR;
        end
        S_CLR: begin
          p   <= '0;
          sub <= 1'b0;
          wcnt <= '0;
          st  <= (kp_q == 0) ? S_WAIT : S_FEED;
        end
        S_FEED: begin
          sub <= ~sub;
          if (sub) begin
            p <= p + 1'b1;
            if (p + 1'b1 == kp_q) st <= S_WAIT;
          end
        end
        S_WAIT: begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == 16'(2*N + 3)) begin
            row <= '0;
            st  <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          row <= row + 1'b1;
          if (row == (m8_q ? (RW+1)'(N/2 - 1) : (RW+1)'(N - 1))) st <= S_DONE;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign clr       = (st == S_CLR) && !keep_q;
  assign buf_re    = (st == S_FEED) && !sub;
  assign buf_raddr = AW'(p);
  assign rd_row    = row[RW-1:0];
  assign ob_we     = (st == S_DRAIN);
  assign ob_waddr  = row[RW-1:0];
  assign busy      = (st != S_IDLE);
  assign done      = (st == S_DONE);
endmodule
