// tb_lbuf_h: fills a horizontal-input buffer (8 rows, 16 words) and sweeps the
// wave counter with different bases, wave sizes m and row masks k, checking
// that PE row r receives word t-base-r of its bank one cycle later and zero
// outside the wave or the valid rows.
`timescale 1ns/1ps
module tb_lbuf_h;
  localparam int D = 8, MM = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, rd_active;
  logic [3:0] waddr;
  logic [D-1:0][15:0] wdata, a_out;
  logic [10:0] t, base;
  logic [8:0] m_size, k_rows;
  logic [15:0] model [MM][D];
  int checks = 0, failures = 0;

  lbuf_h #(.DIM(D), .M_MAX(MM)) dut (.*);

  initial begin
    we = 0; rd_active = 0; waddr = 0; wdata = '0; t = 0; base = 0; m_size = 0; k_rows = 0;
    for (int i = 0; i < MM; i++) begin
      @(negedge clk);
      we = 1; waddr = 4'(i);
      for (int r = 0; r < D; r++) begin wdata[r] = 16'($urandom); model[i][r] = wdata[r]; end
    end
    @(negedge clk);
    we = 0;
    for (int rep = 0; rep < 6; rep++) begin
      automatic int b = (rep % 2) ? D : 0;
      automatic int m = $urandom_range(1, MM), k = $urandom_range(0, D);
      base = 11'(b); m_size = 9'(m); k_rows = 9'(k);
      for (int tt = 0; tt < m + b + D + 2; tt++) begin
        @(negedge clk);
        rd_active = 1; t = 11'(tt);
        @(negedge clk);
        rd_active = 0;
        for (int r = 0; r < D; r++) begin
          automatic int i = tt - b - r;
          automatic logic [15:0] e = (i >= 0 && i < m && r < k) ? model[i][r] : 16'h0;
          checks++;
          if (a_out[r] != e) begin
            failures++;
            $display("FAIL t=%0d r=%0d got %h exp %h", tt, r, a_out[r], e);
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
