// tb_flexsa_workload: convolution layers of pruned CNN training run end to
// end on FlexSA with 8x8 cores, 16-row waves and a 64 Ki-word global buffer.
//
// Each layer is one GEMM: K = kernel height x width x input channels,
// N = output channels, and M = a 20-row slice of the mini-batch x output
// pixels, which is all that changes with the batch and the image size. K and
// N are the real layer sizes after channel pruning. The channel counts are
// illustrative values of a pruned network, not measured ones: the first
// convolution of ResNet50 (unpruned), a pruned 3x3 bottleneck convolution and
// its 1x1 expansion, a point-wise convolution of MobileNet v2 with 75 % of
// its channels, and a pruned 1x1 reduction of Inception v4. The irregular
// sizes leave edge tiles in every dimension, so the waves mix the modes as
// they would on pruned layers. The compiler, reference product and checks
// are the shared end-to-end body; the mode counts are printed. With 8x8
// cores a wave is 16 deep and 16 wide, so the mode mix differs from that of
// the full-size 64x64 cores on the same layers.
`timescale 1ns/1ps
module tb_flexsa_workload;
  localparam int unsigned DIM        = 8;
  localparam int unsigned M_MAX      = 16;
  localparam int unsigned IN_W       = 16;
  localparam int unsigned ACC_W      = 32;
  localparam int unsigned GBUF_DEPTH = 65536;
  localparam int unsigned GBUF_AW    = 16;
  localparam int unsigned NCASES     = 0;

  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  `include "flexsa_top_tb_body.svh"

  task automatic run_cases();
    run_case(20, 64,  7*7*3);   // ResNet50 conv1, 7x7, 3 -> 64 channels
    run_case(20, 37,  3*3*41);  // pruned bottleneck 3x3, 41 -> 37 channels
    run_case(20, 211, 37);      // pruned bottleneck 1x1 expansion, 37 -> 211
    run_case(20, 108, 18);      // MobileNet v2 point-wise at 75 %, 18 -> 108
    run_case(20, 71,  288);     // pruned Inception v4 1x1 reduction, 288 -> 71
  endtask

  flexsa_top #(.DIM(DIM), .M_MAX(M_MAX), .IN_W(IN_W), .ACC_W(ACC_W), .GBUF_DEPTH(GBUF_DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .instr(instr), .instr_valid(instr_valid), .instr_ready(instr_ready),
    .busy(busy), .ext_en(ext_en), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_rdata(ext_rdata));

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
