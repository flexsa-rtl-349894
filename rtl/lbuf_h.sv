// lbuf_h: local buffer for the horizontally shifted inputs of one core row.
//
// Stores up to M_MAX input rows of one wave (blk_M); each stored word holds the
// DIM operands a[i][0..DIM-1] that row i of the A tile sends into the DIM PE
// rows of a core. Physically it is DIM banks, one per PE row, so each PE row
// can read a different word in the same cycle. During a wave the shared wave
// counter t is applied and PE row r receives a[t-base-r][r] one cycle later:
// the buffer itself produces the systolic skew. Rows r >= k_rows and indices
// outside 0..m_size-1 read as zero, so PE rows whose stationary operands are
// stale contribute nothing. base is 0, or DIM when this core row is the lower
// half of a 128-row array (FW, VSW).
// The paper names the buffer, its double buffering (the IN BUF 0/1 pair) and
// its size relation to blk_M; the banked, self-skewing read is this design's.
module lbuf_h #(
  parameter int unsigned DIM   = 64,
  parameter int unsigned M_MAX = 128,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned T_W   = 11
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(M_MAX)-1:0]    waddr,
  input  logic [DIM-1:0][IN_W-1:0]    wdata,
  input  logic                        rd_active,
  input  logic [T_W-1:0]              t,
  input  logic [T_W-1:0]              base,
  input  logic [8:0]                  m_size,
  input  logic [8:0]                  k_rows,
  output logic [DIM-1:0][IN_W-1:0]    a_out
);
  logic [IN_W-1:0] bank [DIM][M_MAX];

  for (genvar r = 0; r < DIM; r++) begin : g_bank
    logic signed [T_W+1:0] idx;
    logic                  hit;
    assign idx = $signed({2'b00, t}) - $signed({2'b00, base}) - (T_W+2)'(r);
    assign hit = rd_active && (idx >= 0) && (idx < $signed({{(T_W-7){1'b0}}, m_size}))
                 && (9'(r) < k_rows);
    always_ff @(posedge clk) begin
      if (we) bank[r][waddr] <= wdata[r];
      a_out[r] <= hit ? bank[r][idx[$clog2(M_MAX)-1:0]] : '0;
    end
  end
endmodule
