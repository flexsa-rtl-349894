// flexsa_top: one group with one FlexSA (the paper's 1G1F configuration).
//
// A 10 MB global buffer (gbuf), the instruction sequencer (flexsa_ctrl) and
// the four-core flexible systolic array with its local buffers
// (flexsa_unit). A host issues LdLBUF_V / LdLBUF_H / ShiftV / ExecGEMM /
// StLBUF / sync instructions on the instr handshake; inputs are placed in and
// results taken from the global buffer through its external port (ext_*),
// where the off-chip memory system would connect. busy is high while any
// instruction is still running. See flexsa_ctrl for the data layouts and
// cycle counts.
module flexsa_top
  import flexsa_pkg::*;
#(
  parameter int unsigned DIM        = CORE_DIM_DEF,
  parameter int unsigned M_MAX      = M_MAX_DEF,
  parameter int unsigned IN_W       = IN_W_DEF,
  parameter int unsigned ACC_W      = ACC_W_DEF,
  parameter int unsigned GBUF_DEPTH = GBUF_DEPTH_DEF,
  parameter int unsigned GBUF_AW    = $clog2(GBUF_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  instr_t                  instr,
  input  logic                    instr_valid,
  output logic                    instr_ready,
  output logic                    busy,
  input  logic                    ext_en,
  input  logic                    ext_we,
  input  logic [GBUF_AW-1:0]      ext_addr,
  input  logic [DIM*IN_W-1:0]     ext_wdata,
  output logic [DIM*IN_W-1:0]     ext_rdata
);
  localparam int unsigned T_W = 11;

  logic                       ga_en, ga_we;
  logic [GBUF_AW-1:0]         ga_addr;
  logic [DIM*IN_W-1:0]        ga_wdata, ga_rdata;
  mode_e                      cfg_mode, lv_mode;
  logic [8:0]                 cfg_m, cfg_n, cfg_k, sv_step;
  logic                       lv_we, lv_buf, sv_active, sv_buf;
  logic [1:0]                 lv_core;
  logic [$clog2(DIM)-1:0]     lv_row;
  logic [DIM-1:0][IN_W-1:0]   lv_wdata, lh_wdata;
  logic                       lh_we, lh_row, lh_buf;
  logic [$clog2(M_MAX)-1:0]   lh_addr, ob_row;
  logic                       ex_active, ex_hbuf, ex_obuf, ex_acc;
  logic [T_W-1:0]             ex_t;
  logic                       ob_re, ob_col, ob_half;
  logic [DIM-1:0][ACC_W-1:0]  ob_rdata;

  gbuf #(.WORD_W(DIM*IN_W), .DEPTH(GBUF_DEPTH), .AW(GBUF_AW)) u_gbuf (
    .clk(clk),
    .a_en(ga_en), .a_we(ga_we), .a_addr(ga_addr), .a_wdata(ga_wdata), .a_rdata(ga_rdata),
    .b_en(ext_en), .b_we(ext_we), .b_addr(ext_addr), .b_wdata(ext_wdata), .b_rdata(ext_rdata));

  flexsa_ctrl #(.DIM(DIM), .M_MAX(M_MAX), .IN_W(IN_W), .ACC_W(ACC_W),
                .GBUF_AW(GBUF_AW), .T_W(T_W)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .instr(instr), .instr_valid(instr_valid), .instr_ready(instr_ready), .busy(busy),
    .ga_en(ga_en), .ga_we(ga_we), .ga_addr(ga_addr), .ga_wdata(ga_wdata), .ga_rdata(ga_rdata),
    .cfg_mode(cfg_mode), .cfg_m(cfg_m), .cfg_n(cfg_n), .cfg_k(cfg_k),
    .lv_we(lv_we), .lv_core(lv_core), .lv_mode(lv_mode), .lv_buf(lv_buf), .lv_row(lv_row),
    .lv_wdata(lv_wdata),
    .sv_active(sv_active), .sv_step(sv_step), .sv_buf(sv_buf),
    .lh_we(lh_we), .lh_row(lh_row), .lh_buf(lh_buf), .lh_addr(lh_addr), .lh_wdata(lh_wdata),
    .ex_active(ex_active), .ex_t(ex_t), .ex_hbuf(ex_hbuf), .ex_obuf(ex_obuf), .ex_acc(ex_acc),
    .ob_re(ob_re), .ob_col(ob_col), .ob_half(ob_half), .ob_row(ob_row), .ob_rdata(ob_rdata));

  flexsa_unit #(.DIM(DIM), .M_MAX(M_MAX), .IN_W(IN_W), .ACC_W(ACC_W), .T_W(T_W)) u_unit (
    .clk(clk),
    .cfg_mode(cfg_mode), .cfg_m(cfg_m), .cfg_n(cfg_n), .cfg_k(cfg_k),
    .lv_we(lv_we), .lv_core(lv_core), .lv_mode(lv_mode), .lv_buf(lv_buf), .lv_row(lv_row),
    .lv_wdata(lv_wdata),
    .sv_active(sv_active), .sv_step(sv_step), .sv_buf(sv_buf),
    .lh_we(lh_we), .lh_row(lh_row), .lh_buf(lh_buf), .lh_addr(lh_addr), .lh_wdata(lh_wdata),
    .ex_active(ex_active), .ex_t(ex_t), .ex_hbuf(ex_hbuf), .ex_obuf(ex_obuf), .ex_acc(ex_acc),
    .ob_re(ob_re), .ob_col(ob_col), .ob_half(ob_half), .ob_row(ob_row), .ob_rdata(ob_rdata));
endmodule
