// flexsa_ctrl: instruction sequencer of a FlexSA unit.
//
// Accepts one instruction per cycle on a valid/ready handshake and runs it on
// one of two engines, so loads overlap wave execution as the paper's double
// buffering intends:
//   memory engine   LdLBUF_V, LdLBUF_H, StLBUF (GBUF port A <-> local buffers)
//   compute engine  ShiftV, ExecGEMM
// An instruction is accepted when its engine is idle; sync is accepted when
// both are idle. Ordering between the engines is left to the instruction
// stream (the paper's compiler schedules transfers statically), so the
// stream must not load a buffer half that a running wave still reads.
//
// Transfers (one GBUF word = one row of DIM operands, one word per cycle):
//   LdLBUF_V  stationary tile of k rows, GBUF layout two words per tile row
//             (columns 0..DIM-1, then DIM..2*DIM-1), tile rows 0..2*DIM-1.
//             Only the quadrants that the mode does not broadcast are read:
//             FW all four, VSW/ISW cores 0 and 2, HSW cores 0 and 1.
//   LdLBUF_H  m words into IN BUF hbuf_sel of core row row_sel.
//   StLBUF    m output rows of OBUF (row_sel = column, buf_sel = half); each
//             row of DIM ACC_W-bit sums is written as ACC_W/IN_W words.
//   ShiftV    max(k_top, k_bot) steps, plus one cycle for the last shift.
//   ExecGEMM  m + G + (DIM if the right column is fed through the left one)
//             + DIM + 1 cycles, G = 2*DIM for FW/VSW and DIM for HSW/ISW: the
//             last output of the last column has then been captured.
// Instruction names and operands follow the paper; the encodings, the two
// engine split and all cycle counts are this design's.
// Lint notes: the held instructions (mi, ci) and decoded settings (c_sw,
// column sizes) are whole structs of which each engine uses only its own
// fields, and GBUF addresses are 32-bit instruction fields of which the low
// GBUF_AW bits address the buffer; the unused bits are left unconnected.
module flexsa_ctrl
  import flexsa_pkg::*;
#(
  parameter int unsigned DIM    = CORE_DIM_DEF,
  parameter int unsigned M_MAX  = M_MAX_DEF,
  parameter int unsigned IN_W   = IN_W_DEF,
  parameter int unsigned ACC_W  = ACC_W_DEF,
  parameter int unsigned GBUF_AW = $clog2(GBUF_DEPTH_DEF),
  parameter int unsigned T_W    = 11
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // instruction stream
  input  instr_t                     instr,
  input  logic                       instr_valid,
  output logic                       instr_ready,
  output logic                       busy,
  // GBUF port A
  output logic                       ga_en,
  output logic                       ga_we,
  output logic [GBUF_AW-1:0]         ga_addr,
  output logic [DIM*IN_W-1:0]        ga_wdata,
  input  logic [DIM*IN_W-1:0]        ga_rdata,
  // FlexSA unit
  output mode_e                      cfg_mode,
  output logic [8:0]                 cfg_m,
  output logic [8:0]                 cfg_n,
  output logic [8:0]                 cfg_k,
  output logic                       lv_we,
  output logic [1:0]                 lv_core,
  output mode_e                      lv_mode,
  output logic                       lv_buf,
  output logic [$clog2(DIM)-1:0]     lv_row,
  output logic [DIM-1:0][IN_W-1:0]   lv_wdata,
  output logic                       sv_active,
  output logic [8:0]                 sv_step,
  output logic                       sv_buf,
  output logic                       lh_we,
  output logic                       lh_row,
  output logic                       lh_buf,
  output logic [$clog2(M_MAX)-1:0]   lh_addr,
  output logic [DIM-1:0][IN_W-1:0]   lh_wdata,
  output logic                       ex_active,
  output logic [T_W-1:0]             ex_t,
  output logic                       ex_hbuf,
  output logic                       ex_obuf,
  output logic                       ex_acc,
  output logic                       ob_re,
  output logic                       ob_col,
  output logic                       ob_half,
  output logic [$clog2(M_MAX)-1:0]   ob_row,
  input  logic [DIM-1:0][ACC_W-1:0]  ob_rdata
);
  localparam int unsigned WPR = ACC_W / IN_W;   // GBUF words per output row
  localparam int unsigned HW  = DIM / WPR;      // sums per GBUF word

  typedef enum logic [1:0] {ME_IDLE, ME_LDV, ME_LDH, ME_ST} me_state_e;
  typedef enum logic [1:0] {CE_IDLE, CE_SHIFT, CE_EXEC} ce_state_e;

  me_state_e me_state;
  ce_state_e ce_state;

  wire is_mem = (instr.op == OP_LD_V) || (instr.op == OP_LD_H) || (instr.op == OP_ST);
  wire is_cmp = (instr.op == OP_SHIFT_V) || (instr.op == OP_EXEC);

  always_comb begin
    unique case (1'b1)
      is_mem:                instr_ready = (me_state == ME_IDLE);
      is_cmp:                instr_ready = (ce_state == CE_IDLE);
      instr.op == OP_SYNC:   instr_ready = (me_state == ME_IDLE) && (ce_state == CE_IDLE);
      default:               instr_ready = 1'b1;
    endcase
  end
  wire accept = instr_valid && instr_ready;
  assign busy = (me_state != ME_IDLE) || (ce_state != CE_IDLE);

  // ======================= memory engine =======================
  instr_t                 mi;          // instruction held by the memory engine
  logic [1:0]             q;           // LdLBUF_V quadrant = target core
  logic [8:0]             cnt;         // row / word counter
  logic [1:0]             ph;          // StLBUF phase
  logic [8:0]             ld_k_top, ld_k_bot;
  sw_t                    ld_sw;
  logic [8:0]             ld_unused_nl, ld_unused_nr;
  logic                   rd_v;        // a GBUF read issued last cycle
  logic [1:0]             rd_core;
  logic [$clog2(M_MAX)-1:0] rd_idx;
  logic                   rd_is_v;
  logic [WPR-1:0][HW-1:0][ACC_W-1:0] st_hold;

  flexsa_mode_ctrl #(.DIM(DIM)) u_mode_ld (
    .mode(mi.mode), .k_size({1'b0, mi.k_size}), .n_size(9'd0), .sw(ld_sw),
    .k_top(ld_k_top), .k_bot(ld_k_bot), .n_left(ld_unused_nl), .n_right(ld_unused_nr));

  // Quadrants read from the GBUF: the others are filled by broadcast.
  function automatic logic unique_q(input logic [1:0] qq, input sw_t s);
    if (s.path3 && qq[0]) return 1'b0;          // cores 1/3 get 0/2's rows
    if (s.path4 && qq[1]) return 1'b0;          // cores 2/3 get 0/1's rows
    return 1'b1;
  endfunction

  logic [8:0] q_rows;
  logic       q_go;
  always_comb begin
    q_rows = q[1] ? ld_k_bot : ld_k_top;
    q_go   = unique_q(q, ld_sw) && (cnt < q_rows);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      me_state <= ME_IDLE;
      mi       <= '0;
      q        <= '0;
      cnt      <= '0;
      ph       <= '0;
      rd_v     <= 1'b0;
      rd_is_v  <= 1'b0;
      rd_core  <= '0;
      rd_idx   <= '0;
    end else begin
      rd_v <= 1'b0;
      unique case (me_state)
        ME_IDLE: if (accept && is_mem) begin
          mi  <= instr;
          q   <= '0;
          cnt <= '0;
          ph  <= '0;
          unique case (instr.op)
            OP_LD_V: me_state <= ME_LDV;
            OP_LD_H: me_state <= ME_LDH;
            default: me_state <= ME_ST;
          endcase
        end
        ME_LDV: begin
          if (q_go) begin
            rd_v    <= 1'b1;
            rd_is_v <= 1'b1;
            rd_core <= q;
            rd_idx  <= $clog2(M_MAX)'(cnt);
            cnt     <= cnt + 9'd1;
          end else if (q == 2'd3) begin
            me_state <= ME_IDLE;
          end else begin
            q   <= q + 2'd1;
            cnt <= '0;
          end
        end
        ME_LDH: begin
          if (cnt < {1'b0, mi.m_size}) begin
            rd_v    <= 1'b1;
            rd_is_v <= 1'b0;
            rd_idx  <= $clog2(M_MAX)'(cnt);
            cnt     <= cnt + 9'd1;
          end else begin
            me_state <= ME_IDLE;
          end
        end
        ME_ST: begin
          if (ph == 2'd0) begin
            if (cnt < {1'b0, mi.m_size}) ph <= 2'd1;
            else me_state <= ME_IDLE;
          end else if (ph == 2'(WPR)) begin
            ph  <= 2'd0;
            cnt <= cnt + 9'd1;
          end else begin
            ph <= ph + 2'd1;
          end
        end
        default: me_state <= ME_IDLE;
      endcase
    end
  end

  // StLBUF: hold the row read from the OBUF while its words are written.
  always_ff @(posedge clk) begin
    if (me_state == ME_ST && ph == 2'd1) st_hold <= ob_rdata;
  end

  // GBUF port A
  logic [ADDR_W-1:0] ldv_addr;
  assign ldv_addr = mi.gbuf_addr
                  + ADDR_W'(2 * (32'(cnt) + (q[1] ? DIM : 0)) + 32'(q[0]));
  always_comb begin
    ga_en    = 1'b0;
    ga_we    = 1'b0;
    ga_addr  = '0;
    ga_wdata = '0;
    unique case (me_state)
      ME_LDV: begin
        ga_en   = q_go;
        ga_addr = GBUF_AW'(ldv_addr);
      end
      ME_LDH: begin
        ga_en   = (cnt < {1'b0, mi.m_size});
        ga_addr = GBUF_AW'(mi.gbuf_addr + ADDR_W'(cnt));
      end
      ME_ST: begin
        if (ph != 2'd0) begin
          ga_en   = 1'b1;
          ga_we   = 1'b1;
          ga_addr = GBUF_AW'(mi.gbuf_addr + ADDR_W'(WPR * 32'(cnt)) + ADDR_W'(ph - 2'd1));
          // word 0 comes straight from the OBUF, later words from st_hold
          ga_wdata = (ph == 2'd1) ? (DIM*IN_W)'(ob_rdata[HW-1:0])
                                  : (DIM*IN_W)'(st_hold[ph - 2'd1]);
        end
      end
      default: ;
    endcase
  end

  // local-buffer writes, one cycle after the GBUF read
  assign lv_we    = rd_v && rd_is_v;
  assign lv_core  = rd_core;
  assign lv_mode  = mi.mode;
  assign lv_buf   = mi.buf_sel;
  assign lv_row   = $clog2(DIM)'(rd_idx);
  assign lv_wdata = ga_rdata;
  assign lh_we    = rd_v && !rd_is_v;
  assign lh_row   = mi.row_sel;
  assign lh_buf   = mi.hbuf_sel;
  assign lh_addr  = rd_idx;
  assign lh_wdata = ga_rdata;

  assign ob_re   = (me_state == ME_ST) && (ph == 2'd0) && (cnt < {1'b0, mi.m_size});
  assign ob_col  = mi.row_sel;
  assign ob_half = mi.buf_sel;
  assign ob_row  = $clog2(M_MAX)'(cnt);

  // ======================= compute engine =======================
  instr_t     ci;
  logic [T_W-1:0] ccnt, c_end;
  sw_t        c_sw;
  logic [8:0] c_k_top, c_k_bot, c_nl, c_nr;

  flexsa_mode_ctrl #(.DIM(DIM)) u_mode_c (
    .mode(ci.mode), .k_size({1'b0, ci.k_size}), .n_size({1'b0, ci.n_size}), .sw(c_sw),
    .k_top(c_k_top), .k_bot(c_k_bot), .n_left(c_nl), .n_right(c_nr));

  always_comb begin
    if (ce_state == CE_SHIFT)
      c_end = T_W'((c_k_top > c_k_bot) ? c_k_top : c_k_bot) + T_W'(1);
    else
      c_end = T_W'(ci.m_size) + (c_sw.vchain ? T_W'(2 * DIM) : T_W'(DIM))
            + (c_sw.col_skew ? T_W'(DIM) : '0) + T_W'(DIM + 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ce_state <= CE_IDLE;
      ci       <= '0;
      ccnt     <= '0;
    end else begin
      unique case (ce_state)
        CE_IDLE: if (accept && is_cmp) begin
          ci       <= instr;
          ccnt     <= '0;
          ce_state <= (instr.op == OP_SHIFT_V) ? CE_SHIFT : CE_EXEC;
        end
        CE_SHIFT, CE_EXEC: begin
          if (ccnt + T_W'(1) >= c_end) ce_state <= CE_IDLE;
          ccnt <= ccnt + T_W'(1);
        end
        default: ce_state <= CE_IDLE;
      endcase
    end
  end

  assign cfg_mode  = ci.mode;
  assign cfg_m     = {1'b0, ci.m_size};
  assign cfg_n     = {1'b0, ci.n_size};
  assign cfg_k     = {1'b0, ci.k_size};
  assign sv_active = (ce_state == CE_SHIFT);
  assign sv_step   = 9'(ccnt);
  assign sv_buf    = ci.buf_sel;
  assign ex_active = (ce_state == CE_EXEC);
  assign ex_t      = ccnt;
  assign ex_hbuf   = ci.hbuf_sel;
  assign ex_obuf   = ci.buf_sel;
  assign ex_acc    = ci.acc;

  // An output row must fit GBUF words exactly.
  initial assert (ACC_W % IN_W == 0 && DIM % (ACC_W / IN_W) == 0)
    else $error("flexsa_ctrl: ACC_W must be a multiple of IN_W");
endmodule
