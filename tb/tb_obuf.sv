// tb_obuf: drives an output buffer (8 columns, 16 rows) with a skewed stream of
// random partial sums for several waves, some overwriting and some
// accumulating, with random m, n and delay, and compares every entry read
// back through the read port with a reference model.
`timescale 1ns/1ps
module tb_obuf;
  localparam int D = 8, MM = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_active, acc, re;
  logic [10:0] t, delay;
  logic [8:0] m_size, n_cols;
  logic [D-1:0][31:0] ps_in, rdata;
  logic [3:0] rrow;
  int model [MM][D];
  int checks = 0, failures = 0;

  obuf #(.DIM(D), .M_MAX(MM)) dut (.*);

  initial begin
    wr_active = 0; acc = 0; re = 0; t = 0; delay = 0; m_size = 0; n_cols = 0; ps_in = '0; rrow = 0;
    foreach (model[i, c]) model[i][c] = 0;
    for (int w = 0; w < 8; w++) begin
      automatic int dl = $urandom_range(1, 20), m = (w == 0) ? MM : $urandom_range(1, MM);
      automatic int n = (w == 0) ? D : $urandom_range(1, D);
      automatic logic a = (w == 0) ? 1'b0 : 1'($urandom);
      delay = 11'(dl); m_size = 9'(m); n_cols = 9'(n); acc = a;
      for (int tt = 0; tt < m + dl + D + 2; tt++) begin
        @(negedge clk);
        wr_active = 1; t = 11'(tt);
        for (int c = 0; c < D; c++) begin
          automatic int i = tt - dl - c, v = int'($urandom_range(0, 1000)) - 500;
          ps_in[c] = 32'(v);
          if (i >= 0 && i < m && c < n) model[i][c] = (a ? model[i][c] : 0) + v;
        end
      end
      @(negedge clk);
      wr_active = 0;
      for (int i = 0; i < MM; i++) begin
        @(negedge clk);
        re = 1; rrow = 4'(i);
        @(negedge clk);
        re = 0;
        for (int c = 0; c < D; c++) begin
          checks++;
          if (int'(rdata[c]) != model[i][c]) begin
            failures++;
            $display("FAIL wave %0d row %0d col %0d got %0d exp %0d", w, i, c, int'(rdata[c]), model[i][c]);
          end
        end
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
