// trim_core: TrIM core, one 3-D convolution step of one filter.
//
// P_M slices work in parallel, each on its own ifmap and its own kernel of
// the same filter; a binary adder tree adds their P_M outputs into core_out,
// which is registered (paper's TrIM Core).  The tree has ceil(log2 P_M)
// levels spread over TREE_STAGES register stages (3 in the paper's FPGA
// implementation, which lists "3 stages for the adder tree at the core
// level").  All slices share the mux selects and the RSRB selector.
//
// Interface: i_ext[m] / w_ext[m] go to slice m.  The weights of slice m
// enter with w_load, K weights (one kernel row) per cycle.  Latency from the
// Row_0 compute cycle of a pixel to core_out: K+1+LATENCY cycles, LATENCY
// being the tree's register count.  Width: 2B+K+ceil(log2 K)+ceil(log2 P_M).
module trim_core
  import trim_pkg::*;
#(
  parameter int unsigned B           = 8,
  parameter int unsigned K           = 3,
  parameter int unsigned PM          = 24,
  parameter int unsigned TREE_STAGES = 3,
  parameter int unsigned NUM_SB      = 5,
  parameter int unsigned SB_WIDTHS [NUM_SB] = '{16, 30, 58, 114, 226},
  localparam int unsigned SLICE_W = 2 * B + K + clog2(K),
  localparam int unsigned OUT_W   = SLICE_W + clog2(PM),
  localparam int unsigned SEL_W   = (NUM_SB > 1) ? $clog2(NUM_SB) : 1,
  localparam int unsigned LATENCY = tree_regs(clog2(PM), TREE_STAGES)
) (
  input  logic                    clk,
  input  logic                    w_load,
  input  logic signed [B-1:0]     w_ext    [PM][K],
  input  logic        [B-1:0]     i_ext    [PM][K][K],
  input  logic                    sel_new  [K][K],
  input  logic                    sel_ext  [K][K],
  input  logic        [SEL_W-1:0] rsrb_sel,
  output logic signed [OUT_W-1:0] core_out
);

  logic signed [SLICE_W-1:0] slice_out [PM];

  for (genvar m = 0; m < PM; m++) begin : g_slice
    trim_slice #(.B(B), .K(K), .NUM_SB(NUM_SB), .SB_WIDTHS(SB_WIDTHS)) u_slice (
      .clk      (clk),
      .w_load   (w_load),
      .w_ext    (w_ext[m]),
      .i_ext    (i_ext[m]),
      .sel_new  (sel_new),
      .sel_ext  (sel_ext),
      .rsrb_sel (rsrb_sel),
      .out      (slice_out[m])
    );
  end

  trim_adder_tree #(.N(PM), .IN_W(SLICE_W), .OUT_W(OUT_W),
                    .STAGES(TREE_STAGES)) u_tree (
    .clk (clk),
    .in  (slice_out),
    .sum (core_out)
  );

endmodule
