// tb_flexsa_top_full: end-to-end test of FlexSA at its default size (four
// 64x64 cores, 128-row waves, 10 MB global buffer). Runs an FW GEMM with
// accumulation over K (128x128x256), an HSW GEMM (128x128x64), a VSW GEMM, an
// ISW GEMM and one with edge tiles in every dimension through the
// instruction stream and checks every output against a reference product.
`timescale 1ns/1ps
module tb_flexsa_top_full;
  localparam int unsigned DIM        = flexsa_pkg::CORE_DIM_DEF;
  localparam int unsigned M_MAX      = flexsa_pkg::M_MAX_DEF;
  localparam int unsigned IN_W       = flexsa_pkg::IN_W_DEF;
  localparam int unsigned ACC_W      = flexsa_pkg::ACC_W_DEF;
  localparam int unsigned GBUF_DEPTH = flexsa_pkg::GBUF_DEPTH_DEF;
  localparam int unsigned GBUF_AW    = $clog2(GBUF_DEPTH);
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

  flexsa_top dut (
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
