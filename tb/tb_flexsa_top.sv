// tb_flexsa_top: end-to-end test of FlexSA at reduced size (8x8 cores, 16-row
// waves, 64 Ki-word global buffer). Five GEMMs are tiled, compiled into
// instruction streams and run; every stored output is compared with a
// reference product, every wave's cycle count with the controller's formula,
// and each mechanism (the four modes, K accumulation, the path 3 and path 4
// broadcasts, loads overlapping execution, sync, the FW fallback for a short
// wave and VSW->ISW accumulation) must occur at least once.
`timescale 1ns/1ps
module tb_flexsa_top;
  localparam int unsigned DIM        = 8;
  localparam int unsigned M_MAX      = 16;
  localparam int unsigned IN_W       = 16;
  localparam int unsigned ACC_W      = 32;
  localparam int unsigned GBUF_DEPTH = 65536;
  localparam int unsigned GBUF_AW    = 16;
  localparam int unsigned NCASES     = 5;

  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  `include "flexsa_top_tb_body.svh"

  // (M, N, K) chosen so that every mode and the mixed cases occur
  task automatic run_cases();
    run_case(M_MAX,         2*DIM,     4*DIM);          // FW, accumulation over K
    run_case(M_MAX,         2*DIM,     DIM);            // HSW
    if (NCASES > 2) begin
      run_case(M_MAX,       DIM,       2*DIM);          // VSW pair
      run_case(M_MAX - 3,   DIM - 1,   DIM - 1);        // ISW
      run_case(M_MAX + 3,   2*DIM + 3, 2*DIM + 2);      // edge tiles: FW, FW fallback, VSW->ISW
    end
  endtask

  flexsa_top #(.DIM(DIM), .M_MAX(M_MAX), .IN_W(IN_W), .ACC_W(ACC_W), .GBUF_DEPTH(GBUF_DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .instr(instr), .instr_valid(instr_valid), .instr_ready(instr_ready),
    .busy(busy), .ext_en(ext_en), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_rdata(ext_rdata));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
