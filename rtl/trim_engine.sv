// trim_engine: TrIM engine, top level of the convolution accelerator.
//
// Main idea: weights stay in the PEs for a whole computational step, ifmap
// pixels are read from memory about once and reused inside each slice by the
// triangular (vertical, horizontal, diagonal) movement, and the same ifmaps
// are broadcast to every core.  P_N cores (7 in the paper) each compute one
// filter over P_M ifmaps (24 in the paper, 24*7*9 = 1512 PEs).  Each core
// has a temporal accumulation adder and a psums buffer that add its outputs
// over the ceil(M/P_M) steps of a filter group; the shared control logic
// sequences the layer.
//
// Interfaces (plain arrays, all synchronous to clk):
//  * layer start/configuration/status: start, cfg_*, busy, cfg_err, done;
//  * ifmap fetch: if_req_* out, i_ext[m][i][j] in one cycle later, the same
//    data for every core (broadcast);
//  * weight fetch: w_req_* out, w_ext[m][j] in one cycle later, delivered to
//    core w_req_core;
//  * ofmap: when of_valid is high, of_data[p] is the finished activation
//    (of_y, of_x) of filter of_n_base+p; of_core_valid[p] is low for cores
//    beyond N.  The paper sends B-bit quantised ofmaps to memory but does
//    not describe the quantiser; here the full ACC_W-bit sums are output.
//
// Pipeline from the cycle a Row_0 request is issued: 1 memory cycle, 5 slice
// stages for K = 3 (input register, K psum rows, slice tree register), the
// core tree stages (3), 1 accumulation stage that registers of_*:
// OUT_LAT = K+4+CORE_LAT = 10 cycles in all for the defaults.  Layer cycles
// S*(P_N*K + H_O*W_O) + (S-1)*(K-1) + OUT_LAT, S = ceil(N/P_N)*ceil(M/P_M).
// Layers are stride 1; padding, if any, must be part of the streamed ifmap.
module trim_engine
  import trim_pkg::*;
#(
  parameter int unsigned B           = 8,
  parameter int unsigned K           = 3,
  parameter int unsigned PM          = 24,
  parameter int unsigned PN          = 7,
  parameter int unsigned TREE_STAGES = 3,
  parameter int unsigned PSUM_DEPTH  = 224 * 224,
  parameter int unsigned ACC_W       = 32,
  parameter int unsigned NUM_SB      = 5,
  parameter int unsigned SB_WIDTHS [NUM_SB] = '{16, 30, 58, 114, 226},
  localparam int unsigned CORE_W   = 2 * B + K + clog2(K) + clog2(PM),
  localparam int unsigned CORE_LAT = tree_regs(clog2(PM), TREE_STAGES),
  localparam int unsigned PN_W     = (PN > 1) ? $clog2(PN) : 1,
  localparam int unsigned KR_W     = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned SEL_W    = (NUM_SB > 1) ? $clog2(NUM_SB) : 1,
  localparam int unsigned AW       = (PSUM_DEPTH > 1) ? $clog2(PSUM_DEPTH) : 1,
  localparam int unsigned OUT_LAT  = K + 4 + CORE_LAT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  coord_t                  cfg_h_i,
  input  coord_t                  cfg_w_i,
  input  chan_t                   cfg_m,
  input  chan_t                   cfg_n,
  output logic                    busy,
  output logic                    cfg_err,
  output logic                    done,
  output logic                    if_req_valid  [K][K],
  output coord_t                  if_req_y      [K],
  output coord_t                  if_req_x      [K],
  output chan_t                   if_req_m_base [K],
  input  logic        [B-1:0]     i_ext         [PM][K][K],
  output logic                    w_req_valid,
  output logic [PN_W-1:0]         w_req_core,
  output logic [KR_W-1:0]         w_req_krow,
  output chan_t                   w_req_n_base,
  output chan_t                   w_req_m_base,
  input  logic signed [B-1:0]     w_ext         [PM][K],
  output logic                    of_valid,
  output logic                    of_core_valid [PN],
  output coord_t                  of_y,
  output coord_t                  of_x,
  output chan_t                   of_n_base,
  output logic signed [ACC_W-1:0] of_data       [PN]
);

  logic             w_load  [PN];
  logic             sel_new [K][K];
  logic             sel_ext [K][K];
  logic [SEL_W-1:0] rsrb_sel;
  ctl_t             rd_ctl, acc_ctl;
  chan_t            n_total;

  trim_control #(
    .K(K), .PM(PM), .PN(PN), .CORE_LAT(CORE_LAT), .PSUM_DEPTH(PSUM_DEPTH),
    .NUM_SB(NUM_SB), .SB_WIDTHS(SB_WIDTHS)
  ) u_ctrl (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .cfg_h_i       (cfg_h_i),
    .cfg_w_i       (cfg_w_i),
    .cfg_m         (cfg_m),
    .cfg_n         (cfg_n),
    .busy          (busy),
    .cfg_err       (cfg_err),
    .n_total       (n_total),
    .if_req_valid  (if_req_valid),
    .if_req_y      (if_req_y),
    .if_req_x      (if_req_x),
    .if_req_m_base (if_req_m_base),
    .w_req_valid   (w_req_valid),
    .w_req_core    (w_req_core),
    .w_req_krow    (w_req_krow),
    .w_req_n_base  (w_req_n_base),
    .w_req_m_base  (w_req_m_base),
    .w_load        (w_load),
    .sel_new       (sel_new),
    .sel_ext       (sel_ext),
    .rsrb_sel      (rsrb_sel),
    .rd_ctl        (rd_ctl),
    .acc_ctl       (acc_ctl)
  );

  for (genvar p = 0; p < PN; p++) begin : g_core
    logic signed [CORE_W-1:0] core_out;
    logic signed [ACC_W-1:0]  rd_data;
    logic signed [ACC_W-1:0]  sum;

    trim_core #(
      .B(B), .K(K), .PM(PM), .TREE_STAGES(TREE_STAGES),
      .NUM_SB(NUM_SB), .SB_WIDTHS(SB_WIDTHS)
    ) u_core (
      .clk      (clk),
      .w_load   (w_load[p]),
      .w_ext    (w_ext),
      .i_ext    (i_ext),
      .sel_new  (sel_new),
      .sel_ext  (sel_ext),
      .rsrb_sel (rsrb_sel),
      .core_out (core_out)
    );

    // temporal accumulation: the first ifmap group starts from zero, later
    // groups add what the psums buffer holds for this pixel
    assign sum = ACC_W'(core_out) + (acc_ctl.first ? '0 : rd_data);

    trim_psum_buffer #(.DEPTH(PSUM_DEPTH), .WIDTH(ACC_W)) u_pbuf (
      .clk     (clk),
      .wr_en   (acc_ctl.valid && !acc_ctl.last),
      .wr_addr (AW'(acc_ctl.addr)),
      .wr_data (sum),
      .rd_en   (rd_ctl.valid && !rd_ctl.first),
      .rd_addr (AW'(rd_ctl.addr)),
      .rd_data (rd_data)
    );

    always_ff @(posedge clk) of_data[p] <= sum;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) of_core_valid[p] <= 1'b0;
      else        of_core_valid[p] <= 32'(acc_ctl.n_base) + p < 32'(n_total);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      of_valid  <= 1'b0;
      done      <= 1'b0;
      of_y      <= '0;
      of_x      <= '0;
      of_n_base <= '0;
    end else begin
      of_valid  <= acc_ctl.valid && acc_ctl.last;
      done      <= acc_ctl.valid && acc_ctl.final_px;
      of_y      <= acc_ctl.r;
      of_x      <= acc_ctl.c;
      of_n_base <= acc_ctl.n_base;
    end
  end

endmodule
