// olive_buffer -- on-chip buffer (input, weight or output buffer of the
// accelerator), written as a memory array.
//
// One write port and one read port; the read is synchronous, so rdata shows
// the word at raddr one cycle after re is set, and holds it while re is
// low. A write and a read of the same address in one cycle return the old
// word. Contents are not reset. The paper gives neither the size nor the
// organisation of its buffers; width and depth are parameters, with
// defaults that suit a 64x64 array (one byte per array row per word).
module olive_buffer #(
  parameter int W     = 512,
  parameter int DEPTH = 256,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
