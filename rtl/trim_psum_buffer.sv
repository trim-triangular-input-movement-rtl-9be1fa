// trim_psum_buffer: psums buffer of one core (paper's "Psums Buffer").
//
// Holds DEPTH partial ofmap activations of WIDTH bits so that a core's
// outputs can be accumulated over the ceil(M/P_M) steps that share one
// filter group.  The paper sizes it to the largest ofmap, H_OM x W_OM =
// 224 x 224 words, and assumes 32-bit activations.  It is written here as a
// simple dual-port memory (one write port, one read port, read data
// registered one cycle after the address, as a block RAM behaves); the port
// arrangement and read latency are this design's choices.  The content is not
// reset: the first step of every filter group writes each word before it is
// read.
module trim_psum_buffer #(
  parameter int unsigned DEPTH  = 224 * 224,
  parameter int unsigned WIDTH  = 32,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic signed [WIDTH-1:0] wr_data,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic signed [WIDTH-1:0] rd_data
);

  logic signed [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
