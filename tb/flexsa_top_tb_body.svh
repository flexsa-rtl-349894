// Body shared by the end-to-end FlexSA testbenches. The including module
// declares DIM, M_MAX, IN_W, ACC_W, GBUF_DEPTH, GBUF_AW, NCASES, the clock
// clk, rst_n, the flexsa_top instance `dut` wired to the signals below, and
// a task run_cases() that calls run_case(M, N, K) for each GEMM to run.
// NCASES selects which mechanisms must occur: accumulation, overlap and sync
// always; FW, HSW and path 4 from 2; all of them above 2.
//
// The test plays the role of the paper's compiler (Algorithm 1): it tiles a
// GEMM C[M][N] = A[M][K] * B[K][N] into waves of at most blk_M = M_MAX rows,
// blk_N = 2*DIM columns and blk_K = 2*DIM depth, picks a mode per wave with
// the FW > HSW = VSW > ISW rule, lays the operands out in the global buffer,
// issues the instruction stream, and compares the stored outputs with a
// product computed here. Output layouts in the output buffers:
//   FW       columns 0..DIM-1 in OBUF column 0, DIM..2*DIM-1 in column 1.
//   HSW      rows split in two groups: group 0 (cores 2/3) in half a,
//            group 1 (cores 0/1, path 2) in half b.
//   VSW/ISW  rows split in four groups stored in (col0.a, col1.a, col0.b,
//            col1.b): VSW1 fills half a, VSW2 half b, and ISW's cores
//            2, 3, 0, 1 add onto the same entries.
// A wide tile whose last wave is short would change from the FW to the HSW
// layout half way through its accumulation; such a wave is run in FW mode.

import flexsa_pkg::*;

instr_t                 instr;
logic                   instr_valid, instr_ready, busy;
logic                   ext_en, ext_we;
logic [GBUF_AW-1:0]     ext_addr;
logic [DIM*IN_W-1:0]    ext_wdata, ext_rdata;

int checks = 0, failures = 0;

// -------------------------------------------------------------- mechanisms
int n_mode[4];
int n_acc, n_path3, n_path4, n_overlap, n_fallback, n_vsw_isw, n_sync;

// -------------------------------------------------------------- data
int A[], B[], C[];
int M, N, K;
int unsigned gp;              // next free GBUF word
instr_t iq[$];

typedef struct { int unsigned addr; int rows; int r0; int c0; int ncols; } store_t;
store_t sq[$];

task automatic gbuf_write(input int unsigned addr, input logic [DIM*IN_W-1:0] w);
  @(negedge clk);
  ext_en = 1; ext_we = 1; ext_addr = GBUF_AW'(addr); ext_wdata = w;
  @(negedge clk);
  ext_en = 0; ext_we = 0;
endtask

task automatic gbuf_read(input int unsigned addr, output logic [DIM*IN_W-1:0] w);
  @(negedge clk);
  ext_en = 1; ext_we = 0; ext_addr = GBUF_AW'(addr);
  @(negedge clk);
  ext_en = 0;
  w = ext_rdata;
endtask

function automatic int geta(int i, int k);
  if (i < M && k < K) return A[i*K + k];
  return 0;
endfunction
function automatic int getb(int k, int n);
  if (k < K && n < N) return B[k*N + n];
  return 0;
endfunction

function automatic instr_t mk(opcode_e op);
  instr_t x = '0;
  x.op = op;
  return x;
endfunction

// LdLBUF_V image of a stationary block (see flexsa_ctrl for the layout)
task automatic put_b(input mode_e md, input int k0, input int ksz, input int n0, input int nsz,
                     output int unsigned addr);
  logic [DIM*IN_W-1:0] w;
  addr = gp;
  for (int gr = 0; gr < 2*DIM; gr++)
    for (int h = 0; h < 2; h++) begin
      int kr;
      kr = (md == MODE_ISW && gr >= DIM) ? gr - DIM : gr;
      w = '0;
      for (int c = 0; c < DIM; c++)
        if (kr < ksz && h*DIM + c < nsz) w[c*IN_W +: IN_W] = IN_W'(getb(k0 + kr, n0 + h*DIM + c));
      gbuf_write(gp, w);
      gp++;
    end
endtask

// LdLBUF_H image: rows m0..m0+cnt-1 of A, depth k0..k0+DIM-1 (masked to kend)
task automatic put_a(input int m0, input int cnt, input int mend, input int k0, input int kend,
                     output int unsigned addr);
  logic [DIM*IN_W-1:0] w;
  addr = gp;
  for (int i = 0; i < cnt; i++) begin
    w = '0;
    for (int r = 0; r < DIM; r++)
      if (m0 + i < mend && k0 + r < kend) w[r*IN_W +: IN_W] = IN_W'(geta(m0 + i, k0 + r));
    gbuf_write(gp, w);
    gp++;
  end
endtask

task automatic ld_h(input logic row, input logic hb, input int m0, input int cnt, input int mend,
                    input int k0, input int kend);
  instr_t x;
  int unsigned a;
  put_a(m0, cnt, mend, k0, kend, a);
  x = mk(OP_LD_H);
  x.m_size = SZ_W'(cnt); x.gbuf_addr = a; x.row_sel = row; x.hbuf_sel = hb;
  iq.push_back(x);
endtask

task automatic st(input logic col, input logic half, input int rows, input int r0, input int c0,
                  input int ncols);
  instr_t x;
  if (rows <= 0 || ncols <= 0) return;
  x = mk(OP_ST);
  x.m_size = SZ_W'(rows); x.gbuf_addr = gp; x.row_sel = col; x.buf_sel = half;
  sq.push_back('{addr: gp, rows: rows, r0: r0, c0: c0, ncols: ncols});
  gp += rows * (ACC_W / IN_W);
  iq.push_back(x);
endtask

function automatic int imin(int a, int b); return a < b ? a : b; endfunction
function automatic int imax(int a, int b); return a > b ? a : b; endfunction

// Algorithm 1 of the paper, with the layout rule described above.
task automatic compile_gemm();
  int blk_n = 2*DIM, blk_k = 2*DIM, blk_m = M_MAX;
  int tile = 0, wave = 0;
  mode_e prev_md = MODE_FW;
  for (int n0 = 0; n0 < N; n0 += blk_n) begin
    int nsz = imin(blk_n, N - n0);
    for (int m0 = 0; m0 < M; m0 += blk_m) begin
      int msz = imin(blk_m, M - m0);
      int g2 = (msz + 1) / 2, g4 = (msz + 3) / 4;
      logic fw_layout = 0;
      mode_e md;
      logic fw_half = 1'(tile);
      for (int k0 = 0; k0 < K; k0 += blk_k) begin
        int ksz = imin(blk_k, K - k0);
        int unsigned ba;
        instr_t x;
        md = select_mode(nsz, ksz, DIM);
        if (k0 == 0) fw_layout = (md == MODE_FW);
        if (md == MODE_HSW && fw_layout) begin md = MODE_FW; n_fallback++; end
        if (md == MODE_ISW && k0 > 0) n_vsw_isw++;
        // stationary inputs (double buffered by wave parity)
        put_b(md, k0, ksz, n0, nsz, ba);
        x = mk(OP_LD_V); x.mode = md; x.k_size = SZ_W'(ksz); x.gbuf_addr = ba; x.buf_sel = 1'(wave);
        iq.push_back(x);
        // both IN BUFs of a row are used in VSW/ISW: wait for the previous wave
        if (md inside {MODE_VSW, MODE_ISW} || prev_md inside {MODE_VSW, MODE_ISW}) begin
          iq.push_back(mk(OP_SYNC)); n_sync++;
        end
        x = mk(OP_SHIFT_V); x.mode = md; x.k_size = SZ_W'(ksz); x.buf_sel = 1'(wave);
        unique case (md)
          MODE_FW: begin
            ld_h(0, 1'(wave), m0, msz, M, k0, k0 + ksz);
            ld_h(1, 1'(wave), m0, msz, M, k0 + DIM, k0 + ksz);
            iq.push_back(x);
            x = mk(OP_EXEC); x.mode = md; x.m_size = SZ_W'(msz); x.n_size = SZ_W'(nsz);
            x.k_size = SZ_W'(ksz); x.hbuf_sel = 1'(wave); x.buf_sel = fw_half; x.acc = (k0 > 0);
            iq.push_back(x);
          end
          MODE_HSW: begin
            ld_h(1, 1'(wave), m0, g2, M, k0, k0 + ksz);            // group 0 -> cores 2/3
            ld_h(0, 1'(wave), m0 + g2, g2, m0 + msz, k0, k0 + ksz); // group 1 -> cores 0/1
            iq.push_back(x);
            x = mk(OP_EXEC); x.mode = md; x.m_size = SZ_W'(g2); x.n_size = SZ_W'(nsz);
            x.k_size = SZ_W'(ksz); x.hbuf_sel = 1'(wave); x.acc = (k0 > 0);
            iq.push_back(x);
          end
          MODE_VSW: begin
            iq.push_back(x);
            for (int p = 0; p < 2; p++) begin
              if (p == 1) begin iq.push_back(mk(OP_SYNC)); n_sync++; end
              // left sub-array: group 2p, right sub-array: group 2p+1
              for (int rw = 0; rw < 2; rw++) begin
                ld_h(1'(rw), 0, m0 + (2*p)*g4, g4, m0 + msz, k0 + rw*DIM, k0 + ksz);
                ld_h(1'(rw), 1, m0 + (2*p+1)*g4, g4, m0 + msz, k0 + rw*DIM, k0 + ksz);
              end
              x = mk(OP_EXEC); x.mode = md; x.m_size = SZ_W'(g4); x.n_size = SZ_W'(nsz);
              x.k_size = SZ_W'(ksz); x.buf_sel = 1'(p); x.acc = (k0 > 0);
              iq.push_back(x);
            end
          end
          default: begin // ISW: cores 2,3,0,1 take groups 0,1,2,3
            ld_h(1, 0, m0 + 0*g4, g4, m0 + msz, k0, k0 + ksz);
            ld_h(1, 1, m0 + 1*g4, g4, m0 + msz, k0, k0 + ksz);
            ld_h(0, 0, m0 + 2*g4, g4, m0 + msz, k0, k0 + ksz);
            ld_h(0, 1, m0 + 3*g4, g4, m0 + msz, k0, k0 + ksz);
            iq.push_back(x);
            x = mk(OP_EXEC); x.mode = md; x.m_size = SZ_W'(g4); x.n_size = SZ_W'(nsz);
            x.k_size = SZ_W'(ksz); x.acc = (k0 > 0);
            iq.push_back(x);
          end
        endcase
        prev_md = md;
        wave++;
      end
      // store the tile
      iq.push_back(mk(OP_SYNC)); n_sync++;
      if (md == MODE_FW) begin
        st(0, fw_half, msz, m0, n0, imin(DIM, nsz));
        st(1, fw_half, msz, m0, n0 + DIM, nsz - DIM);
      end else if (md == MODE_HSW) begin
        st(0, 0, g2, m0, n0, imin(DIM, nsz));
        st(1, 0, g2, m0, n0 + DIM, nsz - DIM);
        st(0, 1, msz - g2, m0 + g2, n0, imin(DIM, nsz));
        st(1, 1, msz - g2, m0 + g2, n0 + DIM, nsz - DIM);
      end else begin
        for (int j = 0; j < 4; j++)
          st(1'(j % 2), 1'(j / 2), imin(g4, msz - j*g4), m0 + j*g4, n0, nsz);
      end
      tile++;
    end
  end
  iq.push_back(mk(OP_SYNC)); n_sync++;
endtask

task automatic run_case(input int mm, input int nn, input int kk);
  M = mm; N = nn; K = kk;
  A = new[M*K]; B = new[K*N]; C = new[M*N];
  foreach (A[i]) A[i] = int'($urandom_range(0, 30)) - 15;
  foreach (B[i]) B[i] = int'($urandom_range(0, 30)) - 15;
  for (int i = 0; i < M; i++)
    for (int j = 0; j < N; j++) begin
      int s = 0;
      for (int k = 0; k < K; k++) s += A[i*K + k] * B[k*N + j];
      C[i*N + j] = s;
    end
  gp = 0;
  iq.delete(); sq.delete();
  compile_gemm();
  // issue
  while (iq.size() > 0) begin
    logic acc_now;
    @(negedge clk);
    instr = iq[0]; instr_valid = 1;
    #1 acc_now = instr_ready;     // sampled mid-cycle, before the edge that accepts
    @(posedge clk);
    if (acc_now) void'(iq.pop_front());
  end
  @(negedge clk);
  instr_valid = 0;
  while (busy) @(negedge clk);
  // check
  foreach (sq[s]) begin
    for (int i = 0; i < sq[s].rows; i++) begin
      logic [DIM*IN_W-1:0] w;
      for (int h = 0; h < ACC_W / IN_W; h++) begin
        gbuf_read(sq[s].addr + i*(ACC_W/IN_W) + h, w);
        for (int c = 0; c < DIM*IN_W/ACC_W; c++) begin
          int col = h*(DIM*IN_W/ACC_W) + c;
          if (col < sq[s].ncols) begin
            int got = int'(signed'(w[c*ACC_W +: ACC_W]));
            int exp = C[(sq[s].r0 + i)*N + sq[s].c0 + col];
            checks++;
            if (got !== exp) begin
              failures++;
              if (failures < 10)
                $display("MISMATCH M=%0d N=%0d K=%0d C[%0d][%0d] got %0d exp %0d",
                         M, N, K, sq[s].r0 + i, sq[s].c0 + col, got, exp);
            end
          end
        end
      end
    end
  end
  $display("case M=%0d N=%0d K=%0d done, checks so far %0d failures %0d", M, N, K, checks, failures);
endtask

// -------------------------------------------------------------- monitors
int ex_len;
int unsigned exp_len;
always @(posedge clk) begin
  if (dut.u_ctrl.ex_active && dut.u_ctrl.ex_t == 0) n_mode[dut.u_ctrl.cfg_mode]++;
  if (dut.u_ctrl.ex_active && dut.u_ctrl.ex_t == 0 && dut.u_ctrl.ex_acc) n_acc++;
  if (dut.u_unit.lv_we && dut.u_unit.sw_ld.path3) n_path3++;
  if (dut.u_unit.lv_we && dut.u_unit.sw_ld.path4) n_path4++;
  if (dut.u_ctrl.ex_active && (dut.u_ctrl.me_state != 0)) n_overlap++;
  // wave length: m + G + column offset + DIM + 1
  if (dut.u_ctrl.ex_active) begin
    if (dut.u_ctrl.ex_t == 0) begin
      ex_len = 0;
      exp_len = dut.u_ctrl.cfg_m + (dut.u_ctrl.c_sw.vchain ? 2*DIM : DIM)
              + (dut.u_ctrl.c_sw.col_skew ? DIM : 0) + DIM + 1;
    end
    ex_len++;
  end else if (ex_len > 0) begin
    checks++;
    if (ex_len != int'(exp_len)) begin
      failures++;
      $display("wave length %0d, expected %0d", ex_len, exp_len);
    end
    ex_len = 0;
  end
end

initial begin
  instr = '0; instr_valid = 0;
  ext_en = 0; ext_we = 0; ext_addr = '0; ext_wdata = '0;
  ex_len = 0;
  rst_n = 0;
  repeat (3) @(posedge clk);
  rst_n = 1;
  run_cases();
  $display("modes FW=%0d VSW=%0d HSW=%0d ISW=%0d acc=%0d path3=%0d path4=%0d overlap=%0d fallback=%0d vsw_isw=%0d sync=%0d",
           n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_acc, n_path3, n_path4, n_overlap,
           n_fallback, n_vsw_isw, n_sync);
  checks++; if (n_acc == 0) failures++;
  checks++; if (n_overlap == 0) failures++;
  checks++; if (n_sync == 0) failures++;
  if (NCASES >= 2) begin
    checks++; if (n_mode[0] == 0) failures++;
    checks++; if (n_mode[2] == 0) failures++;
    checks++; if (n_path4 == 0) failures++;
  end
  if (NCASES > 2) begin
    checks++; if (n_mode[1] == 0) failures++;
    checks++; if (n_mode[3] == 0) failures++;
    checks++; if (n_path3 == 0) failures++;
    checks++; if (n_fallback == 0) failures++;
    checks++; if (n_vsw_isw == 0) failures++;
  end
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
