// lbuf_v: stationary-input local buffer on top of one FlexSA core.
//
// Holds two tiles (double buffering, so the next wave's stationary operands
// can be loaded while the current wave runs) of DIM rows, each row one word of
// DIM operands as delivered by the global buffer. The write port takes one row
// per cycle (LdLBUF_V). The read port returns one row per cycle, one cycle
// after the request, and is used by ShiftV to push the tile into the PEs.
// The paper gives the buffer's place, its double buffering and its role; the
// row-per-word organisation and the one-cycle read latency are this design's.
module lbuf_v #(
  parameter int unsigned DIM  = 64,
  parameter int unsigned IN_W = 16
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic                      wbuf,
  input  logic [$clog2(DIM)-1:0]    wrow,
  input  logic [DIM-1:0][IN_W-1:0]  wdata,
  input  logic                      re,
  input  logic                      rbuf,
  input  logic [$clog2(DIM)-1:0]    rrow,
  output logic [DIM-1:0][IN_W-1:0]  rdata
);
  logic [DIM-1:0][IN_W-1:0] mem [2][DIM];

  always_ff @(posedge clk) begin
    if (we) mem[wbuf][wrow] <= wdata;
    if (re) rdata <= mem[rbuf][rrow];
  end
endmodule
