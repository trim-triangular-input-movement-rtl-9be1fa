// trim_pe: processing element of a TrIM slice.
//
// Follows the PE detail of the paper: a weight register, a register on the
// external input I_ext, two cascaded multiplexers that choose the operand
// (first I_ext against the diagonal input I_D, then that result against the
// input I_R coming from the right-hand neighbour), a multiplier, an adder
// that adds the psum of the PE above, a psum output register, and a register
// that hands the operand used in this cycle to the left-hand neighbour (I_L).
//
// Timing: i_ext is captured at the clock edge and used in the next cycle.
// i_d and i_r are used in the cycle they are presented.  psum_out and i_l
// carry the result / operand of cycle t during cycle t+1.  With w_load high
// the weight register takes w_in (shift from the PE above, or the external
// weight for Row_0) and w_out shows the old weight; otherwise it holds.
//
// Data: B-bit unsigned inputs, B-bit signed weights, signed psums of PSUM_W
// bits (2B+K in the paper).  The PE has no reset: every register it has is
// rewritten before it is used (a design choice; the paper says nothing about
// reset).
module trim_pe #(
  parameter int unsigned B      = 8,
  parameter int unsigned PSUM_W = 19
) (
  input  logic                     clk,
  input  logic                     w_load,   // shift weights down this cycle
  input  logic signed [B-1:0]      w_in,     // W_ext (Row_0) or W from above
  output logic signed [B-1:0]      w_out,    // weight register, to PE below
  input  logic        [B-1:0]      i_ext,    // external input (registered)
  input  logic        [B-1:0]      i_d,      // diagonal input from an RSRB
  input  logic        [B-1:0]      i_r,      // input from the right neighbour
  input  logic                     sel_new,  // 1: I_ext/I_D, 0: I_R
  input  logic                     sel_ext,  // 1: I_ext, 0: I_D
  output logic        [B-1:0]      i_l,      // operand of last cycle, to left
  input  logic signed [PSUM_W-1:0] psum_in,  // psum from the PE above
  output logic signed [PSUM_W-1:0] psum_out
);

  logic        [B-1:0] iext_q;
  logic        [B-1:0] new_in;
  logic        [B-1:0] operand;
  logic signed [2*B:0] product;

  always_ff @(posedge clk) begin
    iext_q <= i_ext;
    if (w_load) w_out <= w_in;
  end

  always_comb begin
    new_in  = sel_ext ? iext_q : i_d;
    operand = sel_new ? new_in : i_r;
    product = $signed({1'b0, operand}) * w_out;
  end

  always_ff @(posedge clk) begin
    i_l      <= operand;
    psum_out <= psum_in + PSUM_W'(product);
  end

endmodule
