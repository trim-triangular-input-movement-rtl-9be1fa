// tb_trim_control: self-checking testbench of trim_control.
//
// Runs layers on a controller for P_M = 2, P_N = 2, K = 3 and checks the
// schedule from the outside:
//  * per step, P_N*K weight requests, cores in order, kernel rows K-1..0, and
//    a w_load pulse for the requested core one cycle after each request;
//  * H_O*W_O consecutive pixel cycles per step, K-1 idle cycles between a
//    computation phase and the next weight loading, and the total number of
//    steps ceil(M/P_M)*ceil(N/P_N);
//  * the number of ifmap pixels fetched per slice and step,
//    K*W_I + (H_O-1)*(W_I + (K-1)^2): every pixel once, plus the K-1 row
//    tails of the K-1 upper rows (the paper's 1.8% overhead for 224x224);
//  * that a PE selects I_ext exactly two cycles after its pixel was asked for;
//  * first/last flags of the accumulation stage and the RSRB selector;
//  * refusal of an unsupported width and of an ofmap larger than the buffer.
module tb_trim_control;
  import trim_pkg::*;
  localparam int unsigned K = 3, PM = 2, PN = 2, CORE_LAT = 2, DEPTH = 60;
  localparam int unsigned NUM_SB = 2;
  localparam int unsigned SB_WIDTHS [NUM_SB] = '{8, 12};

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
  logic   w_load [PN];
  logic   sel_new [K][K], sel_ext [K][K];
  logic   rsrb_sel;
  ctl_t   rd_ctl, acc_ctl;

  trim_control #(.K(K), .PM(PM), .PN(PN), .CORE_LAT(CORE_LAT), .PSUM_DEPTH(DEPTH),
                 .NUM_SB(NUM_SB), .SB_WIDTHS(SB_WIDTHS)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", msg);
    end
  endtask

  // ---- cycle monitor -----------------------------------------------------------
  int fetches, wreqs, px_run, steps, idle_run, last_px, first_px;
  int exp_krow, exp_core;
  bit prev_wreq, prev_px;
  int prev_core;
  bit req_hist [2][K][K];

  always @(posedge clk) if (rst_n) begin
    // w_load follows the request of the previous cycle
    for (int p = 0; p < PN; p++)
      check(w_load[p] == (prev_wreq && prev_core == p), "w_load timing");
    // select vs request two cycles earlier
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++)
        if (dut.ctl[i+2].valid)
          check((sel_new[i][j] && sel_ext[i][j]) == req_hist[1][i][j], "select/request mismatch");
    req_hist[1] = req_hist[0];
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        req_hist[0][i][j] = if_req_valid[i][j];
        if (if_req_valid[i][j]) fetches++;
      end
    if (w_req_valid) begin
      check(int'(w_req_krow) == exp_krow && int'(w_req_core) == exp_core, "weight request order");
      if (exp_krow == 0) begin exp_krow = K - 1; exp_core = (exp_core + 1) % PN; end
      else exp_krow--;
      wreqs++;
      check(!prev_px || K == 1, "weights requested right after pixels");
      if (!prev_wreq) check(idle_run == K - 1 || steps == 0, "gap before weight loading");
    end
    if (dut.ctl[0].valid) px_run++;
    else if (prev_px) begin
      steps++;
    end
    if (!w_req_valid && !dut.ctl[0].valid) idle_run++; else idle_run = 0;
    if (acc_ctl.valid && acc_ctl.last) last_px++;
    if (acc_ctl.valid && acc_ctl.first) first_px++;
    prev_wreq = w_req_valid;
    prev_core = w_req_core;
    prev_px   = dut.ctl[0].valid;
  end

  task automatic run(int unsigned h, int unsigned w, int unsigned m, int unsigned n);
    int unsigned ho, wo, s_m, s_n;
    ho = h - K + 1; wo = w - K + 1;
    s_m = (m + PM - 1) / PM; s_n = (n + PN - 1) / PN;
    fetches = 0; wreqs = 0; px_run = 0; steps = 0; idle_run = 0;
    last_px = 0; first_px = 0; exp_krow = K - 1; exp_core = 0;
    @(negedge clk);
    cfg_h_i = coord_t'(h); cfg_w_i = coord_t'(w); cfg_m = chan_t'(m); cfg_n = chan_t'(n);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(busy && !cfg_err, "layer not accepted");
    check(int'(rsrb_sel) == ((w == SB_WIDTHS[1]) ? 1 : 0), "RSRB selector");
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    check(steps == s_m * s_n, $sformatf("steps %0d expected %0d", steps, s_m * s_n));
    check(px_run == steps * ho * wo, "pixel cycles");
    check(wreqs == steps * PN * K, "weight requests");
    check(fetches == steps * (K * w + (ho - 1) * (w + (K - 1) * (K - 1))),
          $sformatf("fetches %0d expected %0d", fetches,
                    steps * (K * w + (ho - 1) * (w + (K - 1) * (K - 1)))));
    check(last_px == s_n * ho * wo, "last flags");
    check(first_px == s_n * ho * wo, "first flags");
  endtask

  initial begin
    start = 1'b0; cfg_h_i = '0; cfg_w_i = '0; cfg_m = '0; cfg_n = '0;
    prev_wreq = 0; prev_px = 0; prev_core = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(7, 8, 5, 3);
    run(6, 12, 2, 2);
    // unsupported width
    @(negedge clk);
    cfg_h_i = 7; cfg_w_i = 9; cfg_m = 1; cfg_n = 1; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(cfg_err && !busy, "width 9 accepted");
    // ofmap of 9x10 = 90 > 60 words
    @(negedge clk);
    cfg_h_i = 11; cfg_w_i = 12; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(cfg_err && !busy, "oversized ofmap accepted");
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
