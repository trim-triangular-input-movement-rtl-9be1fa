// trim_adder_tree: pipelined binary adder tree.
//
// Adds N signed IN_W-bit operands into one signed OUT_W-bit sum through
// ceil(log2 N) levels of two-input adders (missing operands of the last
// power of two are zero).  The paper uses such a tree twice: in the slice
// (K column psums, only an output register) and in the core (P_M slice
// outputs; the implementation reports 3 pipeline stages).  STAGES register
// stages are spread evenly over the levels, the last level always being
// registered; with more stages than levels every level is registered.
// LATENCY (trim_pkg::tree_regs) is the number of cycles from `in` to `sum`.
// Sums are sign-extended to OUT_W at the leaves; the default widths hold any
// sum without overflow.
module trim_adder_tree
  import trim_pkg::*;
#(
  parameter int unsigned N      = 3,
  parameter int unsigned IN_W   = 19,
  parameter int unsigned OUT_W  = 21,
  parameter int unsigned STAGES = 1,
  localparam int unsigned LEVELS  = clog2(N),
  localparam int unsigned LATENCY = tree_regs(LEVELS, STAGES)
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  in  [N],
  output logic signed [OUT_W-1:0] sum
);

  localparam int unsigned LEAVES = 1 << LEVELS;
  // g_lvl[l].v holds the LEAVES>>l operands entering adder level l;
  // g_lvl[LEVELS].v[0] is the root.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    logic signed [OUT_W-1:0] v [LEAVES >> l];
    if (l == 0) begin : g_leaves
      for (genvar k = 0; k < LEAVES; k++) begin : g_leaf
        if (k < N) begin : g_in
          assign v[k] = OUT_W'(in[k]);
        end else begin : g_zero
          assign v[k] = '0;
        end
      end
    end else begin : g_adders
      for (genvar k = 0; k < (LEAVES >> l); k++) begin : g_add
        if (tree_reg_after(l - 1, LEVELS, STAGES)) begin : g_ff
          always_ff @(posedge clk) v[k] <= g_lvl[l-1].v[2*k] + g_lvl[l-1].v[2*k+1];
        end else begin : g_comb
          assign v[k] = g_lvl[l-1].v[2*k] + g_lvl[l-1].v[2*k+1];
        end
      end
    end
  end

  if (LEVELS == 0) begin : g_single
    always_ff @(posedge clk) sum <= g_lvl[0].v[0];
  end else begin : g_root
    assign sum = g_lvl[LEVELS].v[0];
  end

endmodule
