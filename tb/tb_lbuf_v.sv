// tb_lbuf_v: fills both halves of a stationary-input buffer (8 rows) with
// random rows and reads them back, checking the one-cycle read latency and
// that the two halves are independent.
`timescale 1ns/1ps
module tb_lbuf_v;
  localparam int D = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, wbuf, re, rbuf;
  logic [2:0] wrow, rrow;
  logic [D-1:0][15:0] wdata, rdata;
  logic [D-1:0][15:0] model [2][D];
  int checks = 0, failures = 0;

  lbuf_v #(.DIM(D)) dut (.*);

  initial begin
    we = 0; re = 0; wbuf = 0; rbuf = 0; wrow = 0; rrow = 0; wdata = '0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int b = 0; b < 2; b++)
        for (int r = 0; r < D; r++) begin
          @(negedge clk);
          we = 1; wbuf = 1'(b); wrow = 3'(r);
          for (int c = 0; c < D; c++) wdata[c] = 16'($urandom);
          model[b][r] = wdata;
        end
      @(negedge clk);
      we = 0;
      for (int n = 0; n < 3*D; n++) begin
        automatic int b = $urandom_range(0, 1), r = $urandom_range(0, D-1);
        @(negedge clk);
        re = 1; rbuf = 1'(b); rrow = 3'(r);
        @(negedge clk);
        re = 0;
        checks++;
        if (rdata != model[b][r]) begin failures++; $display("FAIL b=%0d r=%0d", b, r); end
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
