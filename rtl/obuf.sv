// obuf: output buffer below one FlexSA core column (one OUT BUF of Fig. 6).
//
// Holds up to M_MAX output rows of DIM ACC_W-bit partial sums, as DIM column
// banks. During a wave the shared counter t is applied and column c takes the
// value on ps_in[c] as output row i = t - delay - c, the same skew the array
// gives its outputs. With acc high the value is added to what the entry holds
// (accumulation over the K dimension, or over interleaved VSW/ISW waves);
// with acc low it overwrites it. Only columns c < n_cols and rows i < m_size
// are written. A separate read port returns a whole row one cycle after the
// request, for StLBUF.
// The accumulate-at-the-bottom structure follows Fig. 2 of the paper; the
// banking, the overwrite flag and the read timing are this design's choices.
module obuf #(
  parameter int unsigned DIM   = 64,
  parameter int unsigned M_MAX = 128,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned T_W   = 11
) (
  input  logic                        clk,
  input  logic                        wr_active,
  input  logic [T_W-1:0]              t,
  input  logic [T_W-1:0]              delay,
  input  logic [8:0]                  m_size,
  input  logic [8:0]                  n_cols,
  input  logic                        acc,
  input  logic [DIM-1:0][ACC_W-1:0]   ps_in,
  input  logic                        re,
  input  logic [$clog2(M_MAX)-1:0]    rrow,
  output logic [DIM-1:0][ACC_W-1:0]   rdata
);
  logic [ACC_W-1:0] bank [DIM][M_MAX];

  for (genvar c = 0; c < DIM; c++) begin : g_col
    logic signed [T_W+1:0]      idx;
    logic                       hit;
    logic [$clog2(M_MAX)-1:0]   a;
    assign idx = $signed({2'b00, t}) - $signed({2'b00, delay}) - (T_W+2)'(c);
    assign hit = wr_active && (idx >= 0) && (idx < $signed({{(T_W-7){1'b0}}, m_size}))
                 && (9'(c) < n_cols);
    assign a   = idx[$clog2(M_MAX)-1:0];
    always_ff @(posedge clk) begin
      if (hit) bank[c][a] <= (acc ? bank[c][a] : '0) + ps_in[c];
      if (re)  rdata[c] <= bank[c][rrow];
    end
  end
endmodule
