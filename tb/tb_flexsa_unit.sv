// tb_flexsa_unit: drives the four-core array (4x4 cores, 8-row waves) directly
// through its buffer ports, without the controller. For each of the four
// modes it loads random stationary and moving operands the way the mode
// expects them (using the path 3 / path 4 broadcasts), shifts the stationary
// tile in, runs one wave and reads all four output buffers, comparing each
// with a product computed here. A repeated FW wave with accumulation on must
// double the stored results.
`timescale 1ns/1ps
module tb_flexsa_unit;
  import flexsa_pkg::*;
  localparam int D = 4, MM = 8;
  logic clk = 0;
  always #5 clk = ~clk;

  mode_e cfg_mode, lv_mode;
  logic [8:0] cfg_m, cfg_n, cfg_k, sv_step;
  logic lv_we, lv_buf, sv_active, sv_buf, lh_we, lh_row, lh_buf;
  logic [1:0] lv_core;
  logic [1:0] lv_row;
  logic [D-1:0][15:0] lv_wdata, lh_wdata;
  logic [2:0] lh_addr, ob_row;
  logic ex_active, ex_hbuf, ex_obuf, ex_acc, ob_re, ob_col, ob_half;
  logic [10:0] ex_t;
  logic [D-1:0][31:0] ob_rdata;
  int checks = 0, failures = 0;

  flexsa_unit #(.DIM(D), .M_MAX(MM)) dut (.*);

  int Bm [2*D][2*D];      // stationary tile
  int Am [4][MM][2*D];    // up to four input streams
  int Ex [2][2][MM][D];   // expected OBUF contents [col][half][row][c]

  task automatic ldv(input int core, input mode_e md, input logic b, input int r0, input int c0);
    for (int r = 0; r < D; r++) begin
      @(negedge clk);
      lv_we = 1; lv_core = 2'(core); lv_mode = md; lv_buf = b; lv_row = 2'(r);
      for (int c = 0; c < D; c++) lv_wdata[c] = 16'(Bm[r0 + r][c0 + c]);
    end
    @(negedge clk);
    lv_we = 0;
  endtask

  task automatic ldh(input int row, input logic b, input int s, input int k0);
    for (int i = 0; i < MM; i++) begin
      @(negedge clk);
      lh_we = 1; lh_row = 1'(row); lh_buf = b; lh_addr = 3'(i);
      for (int r = 0; r < D; r++) lh_wdata[r] = 16'(Am[s][i][k0 + r]);
    end
    @(negedge clk);
    lh_we = 0;
  endtask

  task automatic run(input mode_e md, input int k, input int n, input logic hb, input logic ob,
                     input logic acc, input logic vb);
    int g, co, len;
    cfg_mode = md; cfg_m = 9'(MM); cfg_n = 9'(n); cfg_k = 9'(k);
    sv_buf = vb;
    for (int s = 0; s < D; s++) begin
      @(negedge clk);
      sv_active = 1; sv_step = 9'(s);
    end
    @(negedge clk);
    sv_active = 0;
    g  = (md == MODE_FW || md == MODE_VSW) ? 2*D : D;
    co = (md == MODE_FW || md == MODE_HSW) ? D : 0;
    len = MM + g + co + D + 1;
    ex_hbuf = hb; ex_obuf = ob; ex_acc = acc;
    for (int t = 0; t < len; t++) begin
      @(negedge clk);
      ex_active = 1; ex_t = 11'(t);
    end
    @(negedge clk);
    ex_active = 0;
  endtask

  task automatic check_ob(input int col, input int half, input string tag);
    for (int i = 0; i < MM; i++) begin
      @(negedge clk);
      ob_re = 1; ob_col = 1'(col); ob_half = 1'(half); ob_row = 3'(i);
      @(negedge clk);
      ob_re = 0;
      for (int c = 0; c < D; c++) begin
        checks++;
        if (int'(ob_rdata[c]) != Ex[col][half][i][c]) begin
          failures++;
          if (failures < 10)
            $display("FAIL %s col %0d half %0d row %0d c %0d got %0d exp %0d", tag, col, half, i, c,
                     int'(ob_rdata[c]), Ex[col][half][i][c]);
        end
      end
    end
  endtask

  // Ex[col][half] = Am[s][:, k0..k0+kk-1] * Bm[br0.., bc0..]
  task automatic expect_prod(input int col, input int half, input int s, input int k0, input int kk,
                             input int br0, input int bc0, input int scale);
    for (int i = 0; i < MM; i++)
      for (int c = 0; c < D; c++) begin
        automatic int acc = 0;
        for (int r = 0; r < kk; r++) acc += Am[s][i][k0 + r] * Bm[br0 + r][bc0 + c];
        Ex[col][half][i][c] = scale * acc;
      end
  endtask

  initial begin
    lv_we = 0; lh_we = 0; sv_active = 0; ex_active = 0; ob_re = 0;
    lv_core = 0; lv_mode = MODE_FW; lv_buf = 0; lv_row = 0; lv_wdata = '0; lh_row = 0; lh_buf = 0;
    lh_addr = 0; lh_wdata = '0; sv_step = 0; sv_buf = 0; ex_t = 0; ex_hbuf = 0; ex_obuf = 0;
    ex_acc = 0; ob_col = 0; ob_half = 0; ob_row = 0;
    cfg_mode = MODE_FW; cfg_m = 0; cfg_n = 0; cfg_k = 0;
    foreach (Bm[r, c]) Bm[r][c] = int'($urandom_range(0, 20)) - 10;
    foreach (Am[s, i, r]) Am[s][i][r] = int'($urandom_range(0, 20)) - 10;

    // ---- FW: one 8x8 array, stream 0, IN BUF 1, OBUF half 1
    ldv(0, MODE_FW, 0, 0, 0); ldv(1, MODE_FW, 0, 0, D); ldv(2, MODE_FW, 0, D, 0); ldv(3, MODE_FW, 0, D, D);
    ldh(0, 1, 0, 0); ldh(1, 1, 0, D);
    run(MODE_FW, 2*D, 2*D, 1, 1, 0, 0);
    expect_prod(0, 1, 0, 0, 2*D, 0, 0, 1);
    expect_prod(1, 1, 0, 0, 2*D, 0, D, 1);
    check_ob(0, 1, "FW"); check_ob(1, 1, "FW");
    // ---- FW again with accumulation: results double
    run(MODE_FW, 2*D, 2*D, 1, 1, 1, 0);
    expect_prod(0, 1, 0, 0, 2*D, 0, 0, 2);
    expect_prod(1, 1, 0, 0, 2*D, 0, D, 2);
    check_ob(0, 1, "FW acc"); check_ob(1, 1, "FW acc");

    // ---- VSW: B rows 0..2D-1, cols 0..D-1 shared by both columns (path 3)
    ldv(0, MODE_VSW, 1, 0, 0); ldv(2, MODE_VSW, 1, D, 0);
    ldh(0, 0, 0, 0); ldh(1, 0, 0, D);   // left sub-array: stream 0
    ldh(0, 1, 1, 0); ldh(1, 1, 1, D);   // right sub-array: stream 1 (path 1)
    run(MODE_VSW, 2*D, D, 0, 0, 0, 1);
    expect_prod(0, 0, 0, 0, 2*D, 0, 0, 1);
    expect_prod(1, 0, 1, 0, 2*D, 0, 0, 1);
    check_ob(0, 0, "VSW"); check_ob(1, 0, "VSW");

    // ---- HSW: B rows 0..D-1, cols 0..2D-1 shared by both rows (path 4)
    ldv(0, MODE_HSW, 0, 0, 0); ldv(1, MODE_HSW, 0, 0, D);
    ldh(0, 0, 2, 0);   // top sub-array: stream 2 -> half b (path 2)
    ldh(1, 0, 3, 0);   // bottom sub-array: stream 3 -> half a
    run(MODE_HSW, D, 2*D, 0, 0, 0, 0);
    expect_prod(0, 1, 2, 0, D, 0, 0, 1);
    expect_prod(1, 1, 2, 0, D, 0, D, 1);
    expect_prod(0, 0, 3, 0, D, 0, 0, 1);
    expect_prod(1, 0, 3, 0, D, 0, D, 1);
    check_ob(0, 0, "HSW"); check_ob(1, 0, "HSW"); check_ob(0, 1, "HSW"); check_ob(1, 1, "HSW");

    // ---- ISW: cores 0/1 share B rows 0..D-1, cores 2/3 share rows D..2D-1
    ldv(0, MODE_ISW, 1, 0, D); ldv(2, MODE_ISW, 1, D, D);
    ldh(0, 0, 0, D); ldh(0, 1, 1, D); ldh(1, 0, 2, D); ldh(1, 1, 3, D);
    run(MODE_ISW, D, D, 0, 0, 0, 1);
    expect_prod(0, 1, 0, D, D, 0, D, 1);   // core 0 -> col 0 half b
    expect_prod(1, 1, 1, D, D, 0, D, 1);   // core 1 -> col 1 half b
    expect_prod(0, 0, 2, D, D, D, D, 1);   // core 2 -> col 0 half a
    expect_prod(1, 0, 3, D, D, D, D, 1);   // core 3 -> col 1 half a
    check_ob(0, 0, "ISW"); check_ob(1, 0, "ISW"); check_ob(0, 1, "ISW"); check_ob(1, 1, "ISW");

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
