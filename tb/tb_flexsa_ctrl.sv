// tb_flexsa_ctrl: checks the instruction sequencer (4x4 cores) against a
// global-buffer model whose word at address a holds a in every lane and an
// output-buffer model whose row i of (col, half) holds 1000*col + 100*half
// + 10*i + c in lane c. It checks, per instruction, which buffer rows are
// written with which GBUF words (LdLBUF_V for all four modes, with only the
// non-broadcast quadrants read), the LdLBUF_H writes, the words StLBUF
// writes, the ShiftV step sequence and the ExecGEMM cycle count per mode,
// that a load is accepted while a wave runs and that sync waits for both
// engines.
`timescale 1ns/1ps
module tb_flexsa_ctrl;
  import flexsa_pkg::*;
  localparam int D = 4, MM = 8, AW = 12;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  instr_t instr;
  logic instr_valid, instr_ready, busy;
  logic ga_en, ga_we;
  logic [AW-1:0] ga_addr;
  logic [D*16-1:0] ga_wdata, ga_rdata;
  mode_e cfg_mode, lv_mode;
  logic [8:0] cfg_m, cfg_n, cfg_k, sv_step;
  logic lv_we, lv_buf, sv_active, sv_buf, lh_we, lh_row, lh_buf;
  logic [1:0] lv_core, lv_row;
  logic [D-1:0][15:0] lv_wdata, lh_wdata;
  logic [2:0] lh_addr, ob_row;
  logic ex_active, ex_hbuf, ex_obuf, ex_acc, ob_re, ob_col, ob_half;
  logic [10:0] ex_t;
  logic [D-1:0][31:0] ob_rdata;
  int checks = 0, failures = 0;

  flexsa_ctrl #(.DIM(D), .M_MAX(MM), .GBUF_AW(AW)) dut (.*);

  // GBUF model: read returns the address in every lane
  always_ff @(posedge clk) if (ga_en && !ga_we) ga_rdata <= {D{16'(ga_addr)}};
  // OBUF model
  always_ff @(posedge clk)
    if (ob_re) for (int c = 0; c < D; c++)
      ob_rdata[c] <= 32'(1000*ob_col + 100*ob_half + 10*ob_row + c);

  // event logs
  int lv_log[$], lh_log[$], st_log[$], sv_log[$];
  logic [D*16-1:0] st_data[$];
  int ex_cycles, sv_cycles;
  always @(posedge clk) begin
    if (lv_we) lv_log.push_back(lv_core * 1000 + lv_row * 10 + lv_buf + 100000 * int'(lv_wdata[0]));
    if (lh_we) lh_log.push_back(lh_row * 1000 + lh_buf * 100 + lh_addr + 100000 * int'(lh_wdata[0]));
    if (ga_en && ga_we) begin st_log.push_back(int'(ga_addr)); st_data.push_back(ga_wdata); end
    if (sv_active) begin sv_log.push_back(int'(sv_step)); sv_cycles++; end
    if (ex_active) begin
      ex_cycles++;
      if (int'(ex_t) != ex_cycles - 1) begin failures++; $display("FAIL ex_t sequence"); end
    end
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(input instr_t x);
    logic acc_now;
    @(negedge clk);
    instr = x; instr_valid = 1;
    do begin
      #1 acc_now = instr_ready;   // sampled mid-cycle, before the edge that accepts
      @(negedge clk);
    end while (!acc_now);
    instr_valid = 0;
  endtask

  task automatic drain();
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  function automatic instr_t mk(opcode_e op, mode_e md, int m, int n, int k, int a);
    instr_t x = '0;
    x.op = op; x.mode = md; x.m_size = 8'(m); x.n_size = 8'(n); x.k_size = 8'(k);
    x.gbuf_addr = 32'(a);
    return x;
  endfunction

  initial begin
    instr = '0; instr_valid = 0; rst_n = 0;
    ex_cycles = 0; sv_cycles = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- LdLBUF_V, all modes
    for (int md = 0; md < 4; md++) begin
      automatic int k = (md == 0 || md == 1) ? 2*D - 1 : D - 1;
      automatic int base = 100 * (md + 1);
      automatic int exp_q[$];
      automatic instr_t x = mk(OP_LD_V, mode_e'(md), 0, 0, k, base);
      x.buf_sel = 1'(md);
      lv_log.delete();
      issue(x); drain();
      for (int q = 0; q < 4; q++) begin
        automatic logic uq = (md == 0) || ((md == 1 || md == 3) && q % 2 == 0) || (md == 2 && q < 2);
        automatic int rows = (q < 2) ? ((k > D) ? D : k) : ((md <= 1) ? k - D : k);
        if (uq)
          for (int r = 0; r < rows; r++)
            exp_q.push_back(q * 1000 + r * 10 + (md % 2)
                            + 100000 * (base + 2 * (r + (q >= 2 ? D : 0)) + (q % 2)));
      end
      chk(lv_log.size() == exp_q.size(), $sformatf("LD_V mode %0d count %0d exp %0d", md, lv_log.size(), exp_q.size()));
      foreach (exp_q[i]) chk(i < lv_log.size() && lv_log[i] == exp_q[i], $sformatf("LD_V mode %0d write %0d", md, i));
    end

    // ---------------- LdLBUF_H
    begin
      automatic instr_t x = mk(OP_LD_H, MODE_FW, 6, 0, 0, 500);
      x.row_sel = 1; x.hbuf_sel = 1;
      lh_log.delete();
      issue(x); drain();
      chk(lh_log.size() == 6, "LD_H count");
      foreach (lh_log[i]) chk(lh_log[i] == 1000 + 100 + i + 100000 * (500 + i), "LD_H write");
    end

    // ---------------- StLBUF
    begin
      automatic instr_t x = mk(OP_ST, MODE_FW, 3, 0, 0, 700);
      x.row_sel = 1; x.buf_sel = 0;
      st_log.delete(); st_data.delete();
      issue(x); drain();
      chk(st_log.size() == 6, "ST count");
      foreach (st_log[i]) begin
        automatic int row = i / 2, h = i % 2;
        chk(st_log[i] == 700 + i, "ST address");
        for (int c = 0; c < D/2; c++)
          chk(st_data[i][c*32 +: 32] == 32'(1000 + 10*row + h*(D/2) + c), "ST data");
      end
    end

    // ---------------- ShiftV and ExecGEMM durations per mode
    for (int md = 0; md < 4; md++) begin
      automatic int k = (md == 0 || md == 1) ? 2*D - 1 : D - 2;
      automatic int kt = (k > D) ? D : k;
      automatic int kb = (md <= 1) ? ((k > D) ? k - D : 0) : kt;
      automatic int g = (md <= 1) ? 2*D : D;
      automatic int co = (md == 0 || md == 2) ? D : 0;
      sv_log.delete(); sv_cycles = 0; ex_cycles = 0;
      issue(mk(OP_SHIFT_V, mode_e'(md), 0, 0, k, 0)); drain();
      chk(sv_cycles == ((kt > kb) ? kt : kb) + 1, $sformatf("ShiftV cycles mode %0d: %0d", md, sv_cycles));
      foreach (sv_log[i]) chk(sv_log[i] == i, "ShiftV step");
      issue(mk(OP_EXEC, mode_e'(md), 5, 3, k, 0)); drain();
      chk(ex_cycles == 5 + g + co + D + 1, $sformatf("Exec cycles mode %0d: %0d", md, ex_cycles));
    end

    // ---------------- overlap and sync
    begin
      automatic int accepted_during_exec = 0;
      ex_cycles = 0;
      issue(mk(OP_EXEC, MODE_FW, 8, 8, 8, 0));
      issue(mk(OP_LD_H, MODE_FW, 4, 0, 0, 0));
      if (ex_active) accepted_during_exec = 1;
      chk(accepted_during_exec == 1, "load accepted while a wave runs");
      issue(mk(OP_SYNC, MODE_FW, 0, 0, 0, 0));
      chk(!busy, "sync accepted only when idle");
      chk(ex_cycles == 8 + 2*D + D + D + 1, "wave completed before sync");
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
