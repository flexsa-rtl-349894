// tb_flexsa_mode_ctrl: checks the mode decoder against the path table read
// from the paper's Figs. 6 and 7 (which paths each mode uses) and the split
// of the wave depth k and width n over the core rows and columns, for all
// four modes and a sweep of k and n.
`timescale 1ns/1ps
module tb_flexsa_mode_ctrl;
  import flexsa_pkg::*;
  localparam int D = 64;
  mode_e      mode;
  logic [8:0] k_size, n_size, k_top, k_bot, n_left, n_right;
  sw_t        sw;
  int checks = 0, failures = 0;

  flexsa_mode_ctrl #(.DIM(D)) dut (.*);

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    //                    path1 path2 path3 path4 vchain
    bit exp_tab [4][5] = '{'{0, 0, 0, 0, 1},   // FW
                           '{1, 0, 1, 0, 1},   // VSW
                           '{0, 1, 0, 1, 0},   // HSW
                           '{1, 1, 1, 0, 0}};  // ISW
    for (int md = 0; md < 4; md++)
      for (int k = 0; k <= 2*D; k += 7)
        for (int n = 1; n <= 2*D; n += 13) begin
          mode = mode_e'(md); k_size = 9'(k); n_size = 9'(n);
          #1;
          chk(sw.path1 == exp_tab[md][0], $sformatf("path1 mode %0d", md));
          chk(sw.path2 == exp_tab[md][1], $sformatf("path2 mode %0d", md));
          chk(sw.path3 == exp_tab[md][2], $sformatf("path3 mode %0d", md));
          chk(sw.path4 == exp_tab[md][3], $sformatf("path4 mode %0d", md));
          chk(sw.vchain == exp_tab[md][4], $sformatf("vchain mode %0d", md));
          chk(sw.bot_skew == exp_tab[md][4], "bot_skew");
          chk(sw.col_skew == !exp_tab[md][0], "col_skew");
          if (md == 0 || md == 1) begin
            chk(k_top == 9'(k > D ? D : k), "k_top chained");
            chk(k_bot == 9'(k > D ? k - D : 0), "k_bot chained");
          end else begin
            chk(k_top == 9'(k > D ? D : k) && k_bot == k_top, "k independent rows");
          end
          if (md == 0 || md == 2) begin
            chk(n_left == 9'(n > D ? D : n), "n_left wide");
            chk(n_right == 9'(n > D ? n - D : 0), "n_right wide");
          end else begin
            chk(n_left == 9'(n > D ? D : n) && n_right == n_left, "n independent columns");
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
