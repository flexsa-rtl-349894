// flexsa_mode_ctrl: turns a FlexSA operating mode into data-path settings.
//
// Combinational. For the mode of the current wave it sets the 1:2 path
// switches of Fig. 6 of the paper and derives how the wave's accumulation
// depth k is split over the two rows of cores:
//   FW  : one 128x128 array. Cores 1/3 reuse the inputs passed through cores
//         0/2, cores 0/1 pass partial sums into cores 2/3. Rows 0..63 of the
//         stationary tile live in cores 0/1, rows 64..127 in cores 2/3.
//   VSW : two 128x64 arrays {0,2} and {1,3} sharing stationary inputs
//         (path 3 broadcast), each with its own horizontal inputs (path 1).
//   HSW : two 64x128 arrays {0,1} and {2,3} sharing stationary inputs
//         (path 4 broadcast); outputs of cores 0/1 go down path 2.
//   ISW : four 64x64 arrays; stationary inputs broadcast 0->1 and 2->3
//         (path 3), horizontal inputs to cores 1/3 over path 1, outputs of
//         cores 0/1 over path 2.
// k_top / k_bot are the numbers of valid stationary rows in the top and
// bottom core rows; they set ShiftV shift counts and the input row masks.
// The mode-to-path table is read from Figs. 6 and 7 and Section V-A of the
// paper; the k split is implied by it.
module flexsa_mode_ctrl
  import flexsa_pkg::*;
#(
  parameter int unsigned DIM = 64
) (
  input  mode_e      mode,
  input  logic [8:0] k_size,
  input  logic [8:0] n_size,
  output sw_t        sw,
  output logic [8:0] k_top,
  output logic [8:0] k_bot,
  output logic [8:0] n_left,   // valid columns of cores 0/2
  output logic [8:0] n_right   // valid columns of cores 1/3
);
  localparam logic [8:0] D = 9'(DIM);

  always_comb begin
    sw.path1    = (mode == MODE_VSW) || (mode == MODE_ISW);
    sw.path2    = (mode == MODE_HSW) || (mode == MODE_ISW);
    sw.path3    = (mode == MODE_VSW) || (mode == MODE_ISW);
    sw.path4    = (mode == MODE_HSW);
    sw.vchain   = (mode == MODE_FW)  || (mode == MODE_VSW);
    sw.bot_skew = sw.vchain;
    sw.col_skew = !sw.path1;

    if (sw.vchain) begin
      // One array of up to 2*DIM rows split across the two core rows.
      k_top = (k_size > D) ? D : k_size;
      k_bot = (k_size > D) ? k_size - D : 9'd0;
    end else begin
      // Independent core rows, each running a wave of depth k_size.
      k_top = (k_size > D) ? D : k_size;
      k_bot = k_top;
    end

    if (sw.col_skew) begin
      // One array of up to 2*DIM columns split across the two core columns.
      n_left  = (n_size > D) ? D : n_size;
      n_right = (n_size > D) ? n_size - D : 9'd0;
    end else begin
      n_left  = (n_size > D) ? D : n_size;
      n_right = n_left;
    end
  end
endmodule
