// sa_core: one DIM x DIM input-stationary systolic array core of FlexSA.
//
// A grid of flexsa_pe. Row r takes its moving operand at a_left[r] and passes
// it right, one PE per cycle; the value leaving the last column is offered at
// a_right[r] so a neighbouring core can reuse it (path from core 0 to core 1
// in Fig. 6 of the paper). Column c takes an incoming partial sum at ps_top[c]
// and produces ps_bot[c] after DIM PEs, one row per cycle. With w_shift high
// the row vector w_top enters the top row and every column shifts its
// stationary operands down by one row, so a tile of k rows is loaded in k
// cycles, its last row first.
//
// Timing: a[i][r] entering row r at cycle E reaches column c at E+c; the sum
// for column c leaves the bottom one cycle after the bottom-row PE sees its
// operand. If row r is fed at cycle i+r+T, ps_bot[c] carries output row i at
// cycle i+DIM+c+T. Inputs are expected to be skewed by the feeding buffer.
module sa_core #(
  parameter int unsigned DIM   = 64,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                       clk,
  input  logic                       w_shift,
  input  logic [DIM-1:0][IN_W-1:0]   w_top,
  input  logic [DIM-1:0][IN_W-1:0]   a_left,
  output logic [DIM-1:0][IN_W-1:0]   a_right,
  input  logic [DIM-1:0][ACC_W-1:0]  ps_top,
  output logic [DIM-1:0][ACC_W-1:0]  ps_bot
);
  // Inter-PE nets: index [row][col]; a_h[r][c] enters PE(r,c) from the left,
  // ps_v[r][c] and w_v[r][c] enter PE(r,c) from above.
  logic [DIM-1:0][DIM:0][IN_W-1:0]  a_h;
  logic [DIM:0][DIM-1:0][ACC_W-1:0] ps_v;
  logic [DIM:0][DIM-1:0][IN_W-1:0]  w_v;

  for (genvar r = 0; r < DIM; r++) begin : g_row
    assign a_h[r][0] = a_left[r];
    assign a_right[r] = a_h[r][DIM];
    for (genvar c = 0; c < DIM; c++) begin : g_col
      flexsa_pe #(.IN_W(IN_W), .ACC_W(ACC_W)) u_pe (
        .clk    (clk),
        .w_shift(w_shift),
        .w_in   (w_v[r][c]),
        .w_out  (w_v[r+1][c]),
        .a_in   (a_h[r][c]),
        .a_out  (a_h[r][c+1]),
        .ps_in  (ps_v[r][c]),
        .ps_out (ps_v[r+1][c])
      );
    end
  end

  assign w_v[0]  = w_top;
  assign ps_v[0] = ps_top;
  assign ps_bot  = ps_v[DIM];

  // The stationary operand leaving the bottom row is dropped.
  logic [DIM-1:0][IN_W-1:0] w_unused;
  assign w_unused = w_v[DIM];
endmodule
