// flexsa_pkg: types and constants shared by the FlexSA blocks.
//
// FlexSA is a 128x128 input-stationary systolic array built from four 64x64
// cores (core 0 top-left, 1 top-right, 2 bottom-left, 3 bottom-right) that can
// be re-wired at run time into one full array (FW), two vertical sub-arrays
// (VSW), two horizontal sub-arrays (HSW) or four independent cores (ISW).
// This package holds the mode and opcode encodings, the instruction word and
// the bundle of data-path switch settings that a mode selects. The names of
// the modes and instructions follow the paper; all encodings and field widths
// are this design's own choice.
// The *_DEF constants document the main configuration in one place; the
// modules repeat them as their parameter defaults, so not every module that
// imports the package reads them.
package flexsa_pkg;

  // Sizes of the main configuration (one 128x128 FlexSA of four 64x64 cores).
  localparam int unsigned CORE_DIM_DEF = 64;   // height = width of one core
  localparam int unsigned M_MAX_DEF    = 128;  // rows of A held per left LBUF (blk_M)
  localparam int unsigned IN_W_DEF     = 16;   // operand width
  localparam int unsigned ACC_W_DEF    = 32;   // partial-sum / accumulator width
  // 10 MB global buffer of 1024-bit words (one word = one 64-element row).
  localparam int unsigned GBUF_DEPTH_DEF = (10 * 1024 * 1024) / (CORE_DIM_DEF * IN_W_DEF / 8);

  localparam int unsigned SZ_W   = 8;   // width of m/n/k size fields (values up to 128)
  localparam int unsigned ADDR_W = 32;  // GBUF word address field

  // Operating modes (Fig. 7 of the paper).
  typedef enum logic [1:0] {
    MODE_FW  = 2'd0,  // full wave: four cores as one 128x128 array
    MODE_VSW = 2'd1,  // vertical sub-waves: cores {0,2} and {1,3}
    MODE_HSW = 2'd2,  // horizontal sub-waves: cores {0,1} and {2,3}
    MODE_ISW = 2'd3   // independent sub-waves: four 64x64 cores
  } mode_e;

  // Instructions (Section VI-B and Algorithm 1 of the paper).
  typedef enum logic [2:0] {
    OP_NOP     = 3'd0,
    OP_LD_V    = 3'd1,  // LdLBUF_V: GBUF -> stationary-input LBUFs
    OP_LD_H    = 3'd2,  // LdLBUF_H: GBUF -> horizontal-input LBUF
    OP_SHIFT_V = 3'd3,  // ShiftV: stationary LBUF -> PE registers
    OP_EXEC    = 3'd4,  // ExecGEMM: run one wave in the given mode
    OP_ST      = 3'd5,  // StLBUF: output buffer -> GBUF
    OP_SYNC    = 3'd6   // sync: wait until all engines are idle
  } opcode_e;

  typedef struct packed {
    opcode_e           op;
    mode_e             mode;      // LD_V, SHIFT_V, EXEC
    logic [SZ_W-1:0]   m_size;    // LD_H, EXEC, ST
    logic [SZ_W-1:0]   n_size;    // EXEC
    logic [SZ_W-1:0]   k_size;    // LD_V, SHIFT_V, EXEC
    logic [ADDR_W-1:0] gbuf_addr; // LD_V, LD_H, ST
    logic              buf_sel;   // LD_V/SHIFT_V: stationary LBUF half; EXEC/ST: OBUF half (0=a,1=b)
    logic              row_sel;   // LD_H: core row (0 = cores 0/1, 1 = cores 2/3); ST: OBUF column
    logic              hbuf_sel;  // LD_H: left IN BUF 0/1; EXEC (FW/HSW): which one feeds the row
    logic              acc;       // EXEC: add to the OBUF contents (1) or overwrite them (0)
  } instr_t;

  // Data-path switch settings for one mode. Paths 1-4 are numbered as in Fig. 6.
  typedef struct packed {
    logic path1;    // cores 1/3 take left inputs from IN BUF 1 over path 1, not from cores 0/2
    logic path2;    // outputs of cores 0/1 go over path 2 to OBUF half b
    logic path3;    // stationary loads of cores 0/2 are broadcast to cores 1/3
    logic path4;    // stationary loads of cores 0/1 are broadcast to cores 2/3
    logic vchain;   // partial sums of cores 0/1 feed the top of cores 2/3
    logic bot_skew; // bottom core row is rows 64..127 of one array: extra CORE_DIM skew
    logic col_skew; // cores 1/3 see inputs through cores 0/2: extra CORE_DIM column skew
  } sw_t;

  // Mode selection of the compile-time tiling heuristic (Sec. VI-A):
  // FW > HSW = VSW > ISW. Used to generate instruction streams.
  function automatic mode_e select_mode(input int unsigned n_size, input int unsigned k_size,
                                        input int unsigned core_dim);
    logic wide, tall;
    wide = (n_size > core_dim);
    tall = (k_size > core_dim);
    if (wide && tall)  return MODE_FW;
    if (wide && !tall) return MODE_HSW;
    if (!wide && tall) return MODE_VSW;
    return MODE_ISW;
  endfunction

endpackage
