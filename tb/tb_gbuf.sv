// tb_gbuf: random reads and writes on both ports of a small global buffer
// (1024 words of 64 bits) against a reference array, checking the one-cycle
// read latency, read-before-write on a port, and port A winning a same-word
// write collision.
`timescale 1ns/1ps
module tb_gbuf;
  localparam int W = 64, DP = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, a_we, b_en, b_we;
  logic [9:0] a_addr, b_addr;
  logic [W-1:0] a_wdata, a_rdata, b_wdata, b_rdata;
  logic [W-1:0] model [DP];
  int checks = 0, failures = 0;

  gbuf #(.WORD_W(W), .DEPTH(DP)) dut (.*);

  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    for (int i = 0; i < DP; i++) begin
      @(negedge clk);
      b_en = 1; b_we = 1; b_addr = 10'(i); b_wdata = {$urandom, $urandom};
      model[i] = b_wdata;
    end
    @(negedge clk);
    b_en = 0; b_we = 0;
    for (int n = 0; n < 4000; n++) begin
      logic [W-1:0] ea, eb;
      logic ra, rb;
      @(negedge clk);
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = 10'($urandom_range(0, 15));
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = 10'($urandom_range(0, 15));
      a_wdata = {$urandom, $urandom}; b_wdata = {$urandom, $urandom};
      ra = a_en; rb = b_en;
      ea = model[a_addr]; eb = model[b_addr];
      if (b_en && b_we) model[b_addr] = b_wdata;
      if (a_en && a_we) model[a_addr] = a_wdata;
      @(negedge clk);
      a_en = 0; b_en = 0;
      if (ra) begin checks++; if (a_rdata != ea) begin failures++; $display("FAIL port A"); end end
      if (rb) begin checks++; if (b_rdata != eb) begin failures++; $display("FAIL port B"); end end
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
