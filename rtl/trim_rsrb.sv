// trim_rsrb: reconfigurable shift register buffer (RSRB) of a TrIM slice.
//
// The RSRB gives the triangular input movement its diagonal leg.  It takes
// the input that leaves the leftmost PE of Row_i (I_L) every cycle, delays
// it, and hands K delayed inputs (I_D) to the K PEs of Row_{i-1}, which need
// the same ifmap row one ofmap row later.  The delay that lines the data up
// depends on the ifmap width W_I, so the buffer is a chain of NUM_SB
// sub-buffers and a selector picks the leftmost K registers of one of them.
//
// Sub-buffer lengths follow from the slice timing (see trim_slice): for an
// ifmap of width w, Row_{i-1}'s PE j must see the value that entered the RSRB
// w-K-2-j cycles earlier, so the chain up to the end of the selected
// sub-buffer must be w-K-1 registers long.  With SB_WIDTHS the supported
// ifmap widths in ascending order, SB 0 has SB_WIDTHS[0]-K-1 registers and
// SB s has SB_WIDTHS[s]-SB_WIDTHS[s-1].  The paper leaves the lengths L_sb
// free ("generic or customized"); deriving them from the widths is this
// design's choice.  Total registers: SB_WIDTHS[NUM_SB-1]-K-1 (222 for the
// default 226, within the paper's W_IM = 224 registers).
//
// Interface: il_in is sampled every clock; sel (0..NUM_SB-1) is static while
// a layer runs; i_d[j] goes to PE j of Row_{i-1}, combinationally from the
// registers.
module trim_rsrb #(
  parameter int unsigned B      = 8,
  parameter int unsigned K      = 3,
  parameter int unsigned NUM_SB = 5,
  parameter int unsigned SB_WIDTHS [NUM_SB] = '{16, 30, 58, 114, 226},
  localparam int unsigned SEL_W = (NUM_SB > 1) ? $clog2(NUM_SB) : 1
) (
  input  logic             clk,
  input  logic [B-1:0]     il_in,
  input  logic [SEL_W-1:0] sel,
  output logic [B-1:0]     i_d [K]
);

  function automatic int unsigned sb_len(int unsigned s);
    return (s == 0) ? SB_WIDTHS[0] - K - 1 : SB_WIDTHS[s] - SB_WIDTHS[s-1];
  endfunction

  logic [B-1:0] chain [NUM_SB+1];
  logic [B-1:0] taps  [NUM_SB][K];

  assign chain[0] = il_in;

  for (genvar s = 0; s < NUM_SB; s++) begin : g_sb
    trim_sub_buffer #(.B(B), .K(K), .LEN(sb_len(s))) u_sb (
      .clk (clk),
      .d   (chain[s]),
      .q   (chain[s+1]),
      .tap (taps[s])
    );
  end

  always_comb begin
    for (int unsigned j = 0; j < K; j++) i_d[j] = taps[0][j];
    for (int unsigned s = 1; s < NUM_SB; s++)
      if (sel == SEL_W'(s))
        for (int unsigned j = 0; j < K; j++) i_d[j] = taps[s][j];
  end

endmodule
