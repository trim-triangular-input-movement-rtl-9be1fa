// trim_slice: TrIM slice, one 2-D KxK convolution (stride 1) of one ifmap
// with one stationary kernel.
//
// Structure (as in the paper): K rows of K PEs, K-1 reconfigurable shift
// register buffers and an adder tree.  PE(i,j) holds weight w[i][j].  The
// ofmap pixel (r,c) is computed by Row_0 in some cycle t, by Row_i in cycle
// t+i, and its psum runs down each column; the adder tree adds the K column
// psums of Row_{K-1} and registers the result.
//
// Triangular input movement: PE(i,j) needs ifmap pixel (r+i, c+j).
//  * horizontal: for c > 0, PEs 0..K-2 take the value their right-hand
//    neighbour used one cycle before (I_R);
//  * vertical: new values come from outside (I_ext);
//  * diagonal: Row_{i-1}, one ofmap row later, needs the ifmap row that
//    Row_i is streaming now.  What leaves PE(i,0) is kept in RSRB i and given
//    back to Row_{i-1} as I_D.
// Only the first W_O pixels of an ifmap row pass PE(i,0); the last K-1 are
// fetched again from outside.  Which source each PE uses in each cycle
// (sel_new, sel_ext) is decided by the shared control logic (trim_control).
//
// Weights: with w_load high the K weights on w_ext enter Row_0 and every row
// passes its weights one row down, so K cycles load a kernel (last kernel row
// first).  i_ext is registered inside the PEs: a value presented in cycle t
// is used in cycle t+1.  Latency from the Row_0 compute cycle of a pixel to
// `out`: K+1 cycles (K rows of psum registers plus the tree register).
// Widths: psums PSUM_W = 2B+K bits, output OUT_W = 2B+K+ceil(log2 K) bits as
// in the paper.
module trim_slice
  import trim_pkg::*;
#(
  parameter int unsigned B      = 8,
  parameter int unsigned K      = 3,
  parameter int unsigned NUM_SB = 5,
  parameter int unsigned SB_WIDTHS [NUM_SB] = '{16, 30, 58, 114, 226},
  localparam int unsigned PSUM_W = 2 * B + K,
  localparam int unsigned OUT_W  = PSUM_W + clog2(K),
  localparam int unsigned SEL_W  = (NUM_SB > 1) ? $clog2(NUM_SB) : 1
) (
  input  logic                    clk,
  input  logic                    w_load,
  input  logic signed [B-1:0]     w_ext    [K],
  input  logic        [B-1:0]     i_ext    [K][K],  // [row][col]
  input  logic                    sel_new  [K][K],
  input  logic                    sel_ext  [K][K],
  input  logic        [SEL_W-1:0] rsrb_sel,
  output logic signed [OUT_W-1:0] out
);

  logic signed [B-1:0]      w  [K][K];
  logic        [B-1:0]      il [K][K];
  logic        [B-1:0]      id [K][K];   // id[i] feeds Row_i (from RSRB i+1)
  logic signed [PSUM_W-1:0] ps [K][K];

  for (genvar i = 0; i < K; i++) begin : g_row
    for (genvar j = 0; j < K; j++) begin : g_col
      logic signed [B-1:0]      w_in;
      logic        [B-1:0]      i_r;
      logic signed [PSUM_W-1:0] p_in;

      if (i == 0) begin : g_top
        assign w_in = w_ext[j];
        assign p_in = '0;
      end else begin : g_mid
        assign w_in = w[i-1][j];
        assign p_in = ps[i-1][j];
      end

      if (j == K - 1) begin : g_right
        assign i_r = '0;          // rightmost PE always takes a new input
      end else begin : g_inner
        assign i_r = il[i][j+1];
      end

      trim_pe #(.B(B), .PSUM_W(PSUM_W)) u_pe (
        .clk      (clk),
        .w_load   (w_load),
        .w_in     (w_in),
        .w_out    (w[i][j]),
        .i_ext    (i_ext[i][j]),
        .i_d      (id[i][j]),
        .i_r      (i_r),
        .sel_new  (sel_new[i][j]),
        .sel_ext  (sel_ext[i][j]),
        .i_l      (il[i][j]),
        .psum_in  (p_in),
        .psum_out (ps[i][j])
      );
    end

    if (i > 0) begin : g_rsrb
      trim_rsrb #(.B(B), .K(K), .NUM_SB(NUM_SB), .SB_WIDTHS(SB_WIDTHS)) u_rsrb (
        .clk   (clk),
        .il_in (il[i][0]),
        .sel   (rsrb_sel),
        .i_d   (id[i-1])
      );
    end
  end

  // Row_{K-1} has no RSRB above it feeding it: its inputs are always new.
  for (genvar j = 0; j < K; j++) begin : g_no_diag
    assign id[K-1][j] = '0;
  end

  trim_adder_tree #(.N(K), .IN_W(PSUM_W), .OUT_W(OUT_W), .STAGES(1)) u_tree (
    .clk (clk),
    .in  (ps[K-1]),
    .sum (out)
  );

endmodule
