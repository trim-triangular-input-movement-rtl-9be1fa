// tb_trim_core: self-checking testbench of trim_core.
//
// The core (P_M = 5 slices) is driven by the shared control logic (trim_control, configured
// for a single core) and by a behavioural memory that answers ifmap and
// weight requests one cycle later with random data for lanes that were not
// requested.  Each output is compared with a direct 3-D 5x3x3 convolution
// computed here, in the cycle the control word for that pixel reaches
// pipeline stage K+3+CORE_LAT.  Two layers are run, one per RSRB sub-buffer.
module tb_trim_core;
  import trim_pkg::*;
  localparam int unsigned B = 8, K = 3, PM = 5, TREE_STAGES = 3;
  localparam int unsigned NUM_SB = 2;
  localparam int unsigned SB_WIDTHS [NUM_SB] = '{8, 12};
  localparam int unsigned CORE_LAT = tree_regs(clog2(PM), TREE_STAGES);
  localparam int unsigned OUT_DLY = K + 3 + CORE_LAT;
  localparam int unsigned OW = 2 * B + K + 2 + 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, cfg_err;
  coord_t cfg_h_i, cfg_w_i;
  chan_t  cfg_m, cfg_n, n_total;
  logic   if_req_valid [K][K];
  coord_t if_req_y [K], if_req_x [K];
  chan_t  if_req_m_base [K];
  logic   w_req_valid;
  logic [0:0] w_req_core;
  logic [1:0] w_req_krow;
  chan_t  w_req_n_base, w_req_m_base;
  logic   w_load [1];
  logic   sel_new [K][K], sel_ext [K][K];
  logic   rsrb_sel;
  ctl_t   rd_ctl, acc_ctl;

  trim_control #(.K(K), .PM(PM), .PN(1), .CORE_LAT(CORE_LAT), .PSUM_DEPTH(100),
                 .NUM_SB(NUM_SB), .SB_WIDTHS(SB_WIDTHS)) u_ctrl (.*);

  logic        [B-1:0] i_ext [PM][K][K];
  logic signed [B-1:0] w_ext [PM][K];
  logic signed [OW-1:0] dout;

  trim_core #(.B(B), .K(K), .PM(PM), .TREE_STAGES(TREE_STAGES), .NUM_SB(NUM_SB),
              .SB_WIDTHS(SB_WIDTHS)) dut (
    .clk(clk), .w_load(w_load[0]), .w_ext(w_ext), .i_ext(i_ext),
    .sel_new(sel_new), .sel_ext(sel_ext), .rsrb_sel(rsrb_sel), .core_out(dout));

  logic        [7:0] X  [PM][16][16];
  logic signed [7:0] Wt [PM][K][K];
  int checks = 0, failures = 0, pixels = 0;

  always @(posedge clk) begin
    for (int unsigned m = 0; m < PM; m++) begin
      for (int unsigned i = 0; i < K; i++)
        for (int unsigned j = 0; j < K; j++)
          i_ext[m][i][j] <= (if_req_valid[i][j] && rst_n)
                            ? X[m][if_req_y[i] % 16][(if_req_x[i] + j) % 16] : 8'($urandom);
      for (int unsigned j = 0; j < K; j++)
        w_ext[m][j] <= w_req_valid ? Wt[m][w_req_krow][j] : 8'($urandom);
    end
  end

  function automatic int ref_out(int unsigned y, int unsigned x);
    int s;
    s = 0;
    for (int unsigned m = 0; m < PM; m++)
      for (int unsigned ki = 0; ki < K; ki++)
        for (int unsigned kj = 0; kj < K; kj++)
          s += int'(X[m][y+ki][x+kj]) * int'(Wt[m][ki][kj]);
    return s;
  endfunction

  always @(posedge clk) if (rst_n && u_ctrl.ctl[OUT_DLY].valid) begin
    checks++;
    pixels++;
    if (int'(dout) != ref_out(u_ctrl.ctl[OUT_DLY].r, u_ctrl.ctl[OUT_DLY].c)) begin
      failures++;
      if (failures < 10)
        $display("FAIL pixel (%0d,%0d) got %0d expected %0d", u_ctrl.ctl[OUT_DLY].r,
                 u_ctrl.ctl[OUT_DLY].c, dout, ref_out(u_ctrl.ctl[OUT_DLY].r, u_ctrl.ctl[OUT_DLY].c));
    end
  end

  task automatic run(int unsigned h, int unsigned w);
    for (int unsigned m = 0; m < PM; m++) begin
      foreach (X[m][y, x]) X[m][y][x] = 8'($urandom);
      foreach (Wt[m][a, b]) Wt[m][a][b] = 8'($urandom);
    end
    pixels = 0;
    @(negedge clk);
    cfg_h_i = coord_t'(h); cfg_w_i = coord_t'(w); cfg_m = chan_t'(PM); cfg_n = 1;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
    repeat (4) @(negedge clk);
    checks++;
    if (pixels != (h - K + 1) * (w - K + 1)) begin
      failures++;
      $display("FAIL: %0d pixels checked, expected %0d", pixels, (h - K + 1) * (w - K + 1));
    end
  endtask

  initial begin
    start = 1'b0; cfg_h_i = '0; cfg_w_i = '0; cfg_m = '0; cfg_n = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(9, 8);
    run(7, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
