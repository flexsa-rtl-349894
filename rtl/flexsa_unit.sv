// flexsa_unit: the FlexSA array - four cores, their local buffers, the added
// inter-core data paths and the path switches (Fig. 6 of the paper).
//
// Core layout: core 0 top-left, core 1 top-right, core 2 bottom-left, core 3
// bottom-right, each DIM x DIM. Every core has a stationary-input buffer
// (lbuf_v) on top. Each row of cores has a pair of horizontal-input buffers
// (lbuf_h, "IN BUF 0/1") on its left. Each column of cores has a pair of
// output buffers (obuf, halves a and b) at the bottom. flexsa_mode_ctrl turns
// the mode into switch settings:
//   * path 1: cores 1/3 read IN BUF 1 of their row directly instead of the
//     inputs passed through cores 0/2 (VSW, ISW);
//   * path 2: outputs of cores 0/1 go past cores 2/3 to OBUF half b (HSW, ISW);
//   * path 3: a stationary row written to core 0 (2) is also written to
//     core 1 (3) (VSW, ISW);
//   * path 4: a stationary row written to core 0 (1) is also written to
//     core 2 (3) (HSW);
//   * vertical chaining: partial sums of cores 0/1 enter cores 2/3 (FW, VSW);
//     otherwise cores 2/3 start from zero.
//
// Operation, driven by flexsa_ctrl:
//   LdLBUF_V  lv_we writes one stationary row into core lv_core (and its
//             broadcast partner for lv_mode).
//   LdLBUF_H  lh_we writes one input row (word) into IN BUF lh_buf of core
//             row lh_row.
//   ShiftV    sv_active for steps s = 0,1,...: every core whose valid depth
//             kc (k_top or k_bot) exceeds s reads its row kc-1-s and shifts it
//             in one cycle later; after the steps row 0 sits in PE row 0.
//   ExecGEMM  ex_active with the wave counter ex_t = 0,1,...; the buffers
//             produce the skewed input wavefront and capture the skewed
//             outputs themselves. Output row i of a column c of a sub-array
//             of height G lands at t = i + G + c + 1 (+DIM when the column is
//             behind another core).
//   StLBUF    ob_re reads one output row of OBUF (ob_col, ob_half), one cycle
//             later on ob_rdata.
// The structure, paths and mode behaviour follow the paper; buffer timing,
// the skew generation in the buffers and the zero-masking of unused rows are
// this design's choices.
module flexsa_unit
  import flexsa_pkg::*;
#(
  parameter int unsigned DIM   = CORE_DIM_DEF,
  parameter int unsigned M_MAX = M_MAX_DEF,
  parameter int unsigned IN_W  = IN_W_DEF,
  parameter int unsigned ACC_W = ACC_W_DEF,
  parameter int unsigned T_W   = 11
) (
  input  logic                       clk,
  // configuration of the current ShiftV / ExecGEMM
  input  mode_e                      cfg_mode,
  input  logic [8:0]                 cfg_m,
  input  logic [8:0]                 cfg_n,
  input  logic [8:0]                 cfg_k,
  // LdLBUF_V write
  input  logic                       lv_we,
  input  logic [1:0]                 lv_core,
  input  mode_e                      lv_mode,
  input  logic                       lv_buf,
  input  logic [$clog2(DIM)-1:0]     lv_row,
  input  logic [DIM-1:0][IN_W-1:0]   lv_wdata,
  // ShiftV
  input  logic                       sv_active,
  input  logic [8:0]                 sv_step,
  input  logic                       sv_buf,
  // LdLBUF_H write
  input  logic                       lh_we,
  input  logic                       lh_row,
  input  logic                       lh_buf,
  input  logic [$clog2(M_MAX)-1:0]   lh_addr,
  input  logic [DIM-1:0][IN_W-1:0]   lh_wdata,
  // ExecGEMM
  input  logic                       ex_active,
  input  logic [T_W-1:0]             ex_t,
  input  logic                       ex_hbuf,
  input  logic                       ex_obuf,
  input  logic                       ex_acc,
  // StLBUF read
  input  logic                       ob_re,
  input  logic                       ob_col,
  input  logic                       ob_half,
  input  logic [$clog2(M_MAX)-1:0]   ob_row,
  output logic [DIM-1:0][ACC_W-1:0]  ob_rdata
);
  localparam logic [T_W-1:0] D_T = T_W'(DIM);

  // ---------------- mode decoding ----------------
  sw_t        sw, sw_ld;
  logic [8:0] k_top, k_bot, n_left, n_right;
  logic [8:0] unused_k0, unused_k1, unused_n0, unused_n1;

  flexsa_mode_ctrl #(.DIM(DIM)) u_mode (
    .mode(cfg_mode), .k_size(cfg_k), .n_size(cfg_n), .sw(sw),
    .k_top(k_top), .k_bot(k_bot), .n_left(n_left), .n_right(n_right));
  flexsa_mode_ctrl #(.DIM(DIM)) u_mode_ld (
    .mode(lv_mode), .k_size(9'd0), .n_size(9'd0), .sw(sw_ld),
    .k_top(unused_k0), .k_bot(unused_k1), .n_left(unused_n0), .n_right(unused_n1));

  // ---------------- stationary buffers and ShiftV ----------------
  logic [3:0]                      lv_we_core;
  logic [3:0][DIM-1:0][IN_W-1:0]   lv_rdata;
  logic [3:0]                      shift_q;
  logic [3:0]                      sv_rd;
  logic [3:0][$clog2(DIM)-1:0]     sv_row;

  always_comb begin
    for (int c = 0; c < 4; c++) lv_we_core[c] = lv_we && (lv_core == 2'(c));
    // path 3: 0 -> 1, 2 -> 3
    if (lv_we && sw_ld.path3) begin
      if (lv_core == 2'd0) lv_we_core[1] = 1'b1;
      if (lv_core == 2'd2) lv_we_core[3] = 1'b1;
    end
    // path 4: 0 -> 2, 1 -> 3
    if (lv_we && sw_ld.path4) begin
      if (lv_core == 2'd0) lv_we_core[2] = 1'b1;
      if (lv_core == 2'd1) lv_we_core[3] = 1'b1;
    end
    for (int c = 0; c < 4; c++) begin
      logic [8:0] kc;
      kc        = (c < 2) ? k_top : k_bot;
      sv_rd[c]  = sv_active && (sv_step < kc);
      sv_row[c] = $clog2(DIM)'(kc - 9'd1 - sv_step);
    end
  end

  always_ff @(posedge clk) shift_q <= sv_rd;

  for (genvar c = 0; c < 4; c++) begin : g_lv
    lbuf_v #(.DIM(DIM), .IN_W(IN_W)) u_lbuf_v (
      .clk(clk), .we(lv_we_core[c]), .wbuf(lv_buf), .wrow(lv_row), .wdata(lv_wdata),
      .re(sv_rd[c]), .rbuf(sv_buf), .rrow(sv_row[c]), .rdata(lv_rdata[c]));
  end

  // ---------------- horizontal-input buffers ----------------
  // lh_out[row][buf]
  logic [1:0][1:0][DIM-1:0][IN_W-1:0] lh_out;

  for (genvar rw = 0; rw < 2; rw++) begin : g_lh_row
    for (genvar b = 0; b < 2; b++) begin : g_lh_buf
      logic act;
      assign act = ex_active && (sw.path1 || (ex_hbuf == 1'(b)));
      lbuf_h #(.DIM(DIM), .M_MAX(M_MAX), .IN_W(IN_W), .T_W(T_W)) u_lbuf_h (
        .clk(clk),
        .we(lh_we && (lh_row == 1'(rw)) && (lh_buf == 1'(b))),
        .waddr(lh_addr), .wdata(lh_wdata),
        .rd_active(act), .t(ex_t),
        .base((rw == 1 && sw.bot_skew) ? D_T : '0),
        .m_size(cfg_m),
        .k_rows(rw == 0 ? k_top : k_bot),
        .a_out(lh_out[rw][b]));
    end
  end

  // ---------------- the four cores and paths 1 / vertical chain ----------------
  logic [3:0][DIM-1:0][IN_W-1:0]  a_left, a_right;
  logic [3:0][DIM-1:0][ACC_W-1:0] ps_top, ps_bot;

  always_comb begin
    // core 0 / core 2: one of the row's IN BUF pair (IN BUF 0 when path 1 is used)
    a_left[0] = (!sw.path1 && ex_hbuf) ? lh_out[0][1] : lh_out[0][0];
    a_left[2] = (!sw.path1 && ex_hbuf) ? lh_out[1][1] : lh_out[1][0];
    // core 1 / core 3: path 1 from IN BUF 1, or the inputs passed through core 0 / 2
    a_left[1] = sw.path1 ? lh_out[0][1] : a_right[0];
    a_left[3] = sw.path1 ? lh_out[1][1] : a_right[2];
    // partial sums
    ps_top[0] = '0;
    ps_top[1] = '0;
    ps_top[2] = sw.vchain ? ps_bot[0] : '0;
    ps_top[3] = sw.vchain ? ps_bot[1] : '0;
  end

  for (genvar c = 0; c < 4; c++) begin : g_core
    sa_core #(.DIM(DIM), .IN_W(IN_W), .ACC_W(ACC_W)) u_core (
      .clk(clk), .w_shift(shift_q[c]), .w_top(lv_rdata[c]),
      .a_left(a_left[c]), .a_right(a_right[c]),
      .ps_top(ps_top[c]), .ps_bot(ps_bot[c]));
  end

  // The inputs leaving cores 1 and 3 on the right are not used.
  logic [1:0][DIM-1:0][IN_W-1:0] a_unused;
  assign a_unused = {a_right[3], a_right[1]};

  // ---------------- output buffers: column x half ----------------
  logic [1:0][1:0][DIM-1:0][ACC_W-1:0] ob_out;

  for (genvar col = 0; col < 2; col++) begin : g_ob_col
    for (genvar h = 0; h < 2; h++) begin : g_ob_half
      logic                      from_top, act;
      logic [T_W-1:0]            dly;
      logic [DIM-1:0][ACC_W-1:0] src;
      always_comb begin
        from_top = (h == 1) && sw.path2;
        src      = from_top ? ps_bot[col] : ps_bot[col + 2];
        // sub-array height + column offset + 1
        dly      = ((from_top || !sw.vchain) ? D_T : 2 * D_T)
                 + ((col == 1 && sw.col_skew) ? D_T : '0) + T_W'(1);
        act      = ex_active && (sw.path2 || (ex_obuf == 1'(h)));
      end
      obuf #(.DIM(DIM), .M_MAX(M_MAX), .ACC_W(ACC_W), .T_W(T_W)) u_obuf (
        .clk(clk), .wr_active(act), .t(ex_t), .delay(dly), .m_size(cfg_m),
        .n_cols(col == 0 ? n_left : n_right), .acc(ex_acc), .ps_in(src),
        .re(ob_re && ob_col == 1'(col) && ob_half == 1'(h)), .rrow(ob_row),
        .rdata(ob_out[col][h]));
    end
  end

  logic ob_col_q, ob_half_q;
  always_ff @(posedge clk) begin
    ob_col_q  <= ob_col;
    ob_half_q <= ob_half;
  end
  assign ob_rdata = ob_out[ob_col_q][ob_half_q];
endmodule
