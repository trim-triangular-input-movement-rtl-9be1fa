// trim_sub_buffer: one sub-buffer (SB) of a reconfigurable shift register
// buffer.
//
// A chain of LEN registers that shifts one position per clock: register 0
// takes d, register n takes register n-1.  The leftmost K registers
// (LEN-1 down to LEN-K) are brought out as taps for the RSRB selector, as in
// the paper's sub-buffer drawing; tap[j] is register LEN-1-j, so tap[0] holds
// the oldest value.  q is register LEN-1 and feeds the next sub-buffer.
// No reset: the content is only read after it has been filled.
module trim_sub_buffer #(
  parameter int unsigned B   = 8,
  parameter int unsigned K   = 3,
  parameter int unsigned LEN = 12
) (
  input  logic         clk,
  input  logic [B-1:0] d,
  output logic [B-1:0] q,
  output logic [B-1:0] tap [K]
);

  logic [B-1:0] sr [LEN];

  always_ff @(posedge clk) begin
    sr[0] <= d;
    for (int unsigned n = 1; n < LEN; n++) sr[n] <= sr[n-1];
  end

  assign q = sr[LEN-1];
  for (genvar j = 0; j < K; j++) begin : g_tap
    assign tap[j] = sr[LEN-1-j];
  end

  initial assert (LEN >= K) else $error("sub-buffer shorter than K");

endmodule
