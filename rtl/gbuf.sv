// gbuf: the global buffer (GBUF) shared by the four cores of a FlexSA.
//
// A two-port on-chip memory of DEPTH words of WORD_W bits. One word is one
// row of DIM 16-bit operands, the unit of every GBUF <-> local-buffer vector
// transfer. Port A serves the FlexSA controller (LdLBUF_V, LdLBUF_H, StLBUF);
// port B is the off-chip side where a DRAM controller (not part of this
// design) would fill inputs and drain outputs. Both ports read with one cycle
// of latency; a write and a read of the same word in one cycle return the
// old word. If both ports write one word in the same cycle, port A wins.
// The 10 MB capacity is the paper's; word width, port count and timing are
// this design's choices. In silicon this would be a set of SRAM macros.
module gbuf #(
  parameter int unsigned WORD_W = 1024,
  parameter int unsigned DEPTH  = flexsa_pkg::GBUF_DEPTH_DEF,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              a_en,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  logic [WORD_W-1:0] a_wdata,
  output logic [WORD_W-1:0] a_rdata,
  input  logic              b_en,
  input  logic              b_we,
  input  logic [AW-1:0]     b_addr,
  input  logic [WORD_W-1:0] b_wdata,
  output logic [WORD_W-1:0] b_rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (b_en && b_we) mem[b_addr] <= b_wdata;
    if (a_en && a_we) mem[a_addr] <= a_wdata;
    if (a_en) a_rdata <= mem[a_addr];
    if (b_en) b_rdata <= mem[b_addr];
  end
endmodule
