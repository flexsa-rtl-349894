// flexsa_pe: one processing element of an input-stationary systolic array.
//
// The PE holds one stationary operand W. While w_shift is high it takes W from
// the PE above (w_in) and offers its old W to the PE below (w_out): a column of
// PEs is a shift register that the stationary tile is pushed into (ShiftV).
// Every cycle it registers the horizontally moving operand (a_in -> a_out, one
// cycle per PE to the right) and the partial sum ps_out = ps_in + a_in * W
// (one cycle per PE downward). Operands are IN_W-bit signed integers and the
// sum is ACC_W bits wide; the paper uses a 16-bit floating-point multiply with
// 32-bit floating-point accumulation, which this design replaces with integer
// arithmetic of the same widths. The datapath registers are not reset: only
// values whose timing is known are ever captured downstream.
module flexsa_pe #(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    w_shift,
  input  logic signed [IN_W-1:0]  w_in,
  output logic signed [IN_W-1:0]  w_out,
  input  logic signed [IN_W-1:0]  a_in,
  output logic signed [IN_W-1:0]  a_out,
  input  logic signed [ACC_W-1:0] ps_in,
  output logic signed [ACC_W-1:0] ps_out
);
  logic signed [IN_W-1:0]  w_q;
  logic signed [ACC_W-1:0] prod;

  assign prod  = ACC_W'(signed'(a_in)) * ACC_W'(signed'(w_q));
  assign w_out = w_q;

  always_ff @(posedge clk) begin
    if (w_shift) w_q <= w_in;
    a_out  <= a_in;
    ps_out <= ps_in + prod;
  end
endmodule
