// tb_sa_core: checks one systolic core (6x6). A random stationary tile is
// shifted in (last row first), a skewed stream of input rows is fed on the
// left with random incoming partial sums on top, and each column's output is
// compared with ps_top + sum_r a[i][r]*W[r][c] at cycle i + DIM + c after the
// stream starts; the right-hand outputs must equal the inputs DIM cycles late.
`timescale 1ns/1ps
module tb_sa_core;
  localparam int D = 6, NI = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                 w_shift;
  logic [D-1:0][15:0]   w_top, a_left, a_right;
  logic [D-1:0][31:0]   ps_top, ps_bot;
  int checks = 0, failures = 0;
  int W[D][D], A[NI][D], P[NI][D];

  sa_core #(.DIM(D)) dut (.*);

  initial begin
    w_shift = 0; w_top = '0; a_left = '0; ps_top = '0;
    for (int rep = 0; rep < 3; rep++) begin
      foreach (W[r, c]) W[r][c] = int'($urandom_range(0, 200)) - 100;
      foreach (A[i, r]) A[i][r] = int'($urandom_range(0, 200)) - 100;
      foreach (P[i, c]) P[i][c] = int'($urandom_range(0, 2000)) - 1000;
      // shift in rows D-1 .. 0
      for (int s = 0; s < D; s++) begin
        @(negedge clk);
        w_shift = 1;
        for (int c = 0; c < D; c++) w_top[c] = 16'(W[D-1-s][c]);
      end
      @(negedge clk);
      w_shift = 0;
      // cycle t: row r gets A[t-r][r]; column c gets P[t-c][c] on top at its row-0 time
      for (int t = 0; t < NI + 3*D + 2; t++) begin
        for (int r = 0; r < D; r++)
          a_left[r] = (t - r >= 0 && t - r < NI) ? 16'(A[t-r][r]) : '0;
        for (int c = 0; c < D; c++)
          ps_top[c] = (t - c >= 0 && t - c < NI) ? 32'(P[t-c][c]) : '0;
        @(posedge clk);
        #1;
        // after this edge, outputs for i = t - D - c + 1 ... check ps_bot
        for (int c = 0; c < D; c++) begin
          automatic int i = t + 1 - D - c;
          if (i >= 0 && i < NI) begin
            automatic int e = P[i][c];
            for (int r = 0; r < D; r++) e += A[i][r] * W[r][c];
            checks++;
            if (int'(signed'(ps_bot[c])) != e) begin
              failures++;
              $display("FAIL i=%0d c=%0d got %0d exp %0d", i, c, int'(signed'(ps_bot[c])), e);
            end
          end
        end
        for (int r = 0; r < D; r++) begin
          automatic int i = t + 1 - D - r;
          if (i >= 0 && i < NI) begin
            checks++;
            if (int'(signed'(a_right[r])) != A[i][r]) failures++;
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
