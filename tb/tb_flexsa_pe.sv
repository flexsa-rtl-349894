// tb_flexsa_pe: checks one processing element: the registered pass-through of
// the moving operand, the multiply-accumulate of the partial sum with the
// stationary operand, and that the stationary operand changes only on w_shift.
`timescale 1ns/1ps
module tb_flexsa_pe;
  logic clk = 0;
  always #5 clk = ~clk;
  logic               w_shift;
  logic signed [15:0] w_in, w_out, a_in, a_out;
  logic signed [31:0] ps_in, ps_out;
  int checks = 0, failures = 0;

  flexsa_pe dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic signed [15:0] w;
    w_shift = 0; w_in = 0; a_in = 0; ps_in = 0;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      w = 16'($urandom);
      w_in = w; w_shift = 1;
      @(negedge clk);
      chk(w_out == w, "w load");
      w_shift = 0; w_in = 16'($urandom);
      for (int j = 0; j < 4; j++) begin
        logic signed [15:0] a;
        logic signed [31:0] p, e;
        a = 16'($urandom); p = 32'($urandom);
        a_in = a; ps_in = p;
        e = p + 32'(a) * 32'(w);
        @(negedge clk);
        chk(a_out == a, "a pass");
        chk(ps_out == e, $sformatf("mac a=%0d w=%0d p=%0d got %0d exp %0d", a, w, p, ps_out, e));
        chk(w_out == w, "w hold");
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
