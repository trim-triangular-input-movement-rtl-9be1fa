// tb_trim_engine_full: end-to-end self-checking testbench of trim_engine with every parameter at its default
// (P_M = 24, P_N = 7, 1512 PEs).
//
// A behavioural memory answers the engine's ifmap and weight requests one
// cycle later (pixels outside a layer's M ifmaps or N filters read as zero;
// lanes that were not requested get random data, so a wrong multiplexer
// select corrupts the result).  Every finished ofmap activation is compared
// with a direct convolution computed here, every pixel must arrive exactly
// once, and the layer's cycle count is checked against
// S*(P_N*K + H_O*W_O) + (S-1)*(K-1) + OUT_LAT.  The run also counts how often
// each mechanism of the design was exercised (diagonal reuse through the
// RSRBs, horizontal reuse, external fetches of the row tails, temporal
// accumulation through the psums buffers, idle slices and idle cores, every
// RSRB sub-buffer width used, rejection of a bad configuration) and fails if
// one never happened.
module tb_trim_engine_full;
  import trim_pkg::*;

  localparam int unsigned B = 8;
  // the engine's own defaults
  localparam int unsigned K = 3, PM = 24, PN = 7, TREE_STAGES = 3;
  localparam int unsigned PSUM_DEPTH = 224 * 224, NUM_SB = 5;
  localparam int unsigned SB_WIDTHS [NUM_SB] = '{16, 30, 58, 114, 226};
  localparam int unsigned CORE_LAT = tree_regs(clog2(PM), TREE_STAGES);
  localparam int unsigned OUT_LAT  = K + 4 + CORE_LAT;
  localparam int unsigned PN_W     = (PN > 1) ? $clog2(PN) : 1;
  localparam int unsigned KR_W     = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned MMAX = 48, NMAX = 16, HMAX = 226, WMAX = 226;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    start;
  coord_t                  cfg_h_i, cfg_w_i;
  chan_t                   cfg_m, cfg_n;
  logic                    busy, cfg_err, done;
  logic                    if_req_valid  [K][K];
  coord_t                  if_req_y      [K];
  coord_t                  if_req_x      [K];
  chan_t                   if_req_m_base [K];
  logic        [B-1:0]     i_ext         [PM][K][K];
  logic                    w_req_valid;
  logic [PN_W-1:0]         w_req_core;
  logic [KR_W-1:0]         w_req_krow;
  chan_t                   w_req_n_base, w_req_m_base;
  logic signed [B-1:0]     w_ext         [PM][K];
  logic                    of_valid;
  logic                    of_core_valid [PN];
  coord_t                  of_y, of_x;
  chan_t                   of_n_base;
  logic signed [31:0]      of_data       [PN];

  trim_engine dut (.*);

  // ---- layer data ------------------------------------------------------------
  logic        [7:0] X  [MMAX][HMAX][WMAX];
  logic signed [7:0] Wt [NMAX][MMAX][K][K];
  int unsigned L_H, L_W, L_M, L_N;

  function automatic logic [7:0] x_at(int unsigned m, int unsigned y, int unsigned x);
    return (m < L_M) ? X[m][y][x] : 8'd0;
  endfunction
  function automatic logic signed [7:0] w_at(int unsigned n, int unsigned m,
                                             int unsigned ki, int unsigned kj);
    return (n < L_N && m < L_M) ? Wt[n][m][ki][kj] : 8'sd0;
  endfunction
  function automatic int ref_out(int unsigned n, int unsigned y, int unsigned x);
    int s = 0;
    for (int unsigned m = 0; m < L_M; m++)
      for (int unsigned ki = 0; ki < K; ki++)
        for (int unsigned kj = 0; kj < K; kj++)
          s += int'(X[m][y+ki][x+kj]) * int'(Wt[n][m][ki][kj]);
    return s;
  endfunction

  int checks = 0, failures = 0;
  int n_diag = 0, n_horiz = 0, n_tail = 0, n_accum = 0, n_idle_slice = 0;
  int n_idle_core = 0, n_wload = 0, n_cfg_err = 0;
  int n_sel [8];
  bit seen [NMAX][HMAX][WMAX];

  // ---- behavioural memory ----------------------------------------------------
  always @(posedge clk) begin
    for (int unsigned m = 0; m < PM; m++)
      for (int unsigned i = 0; i < K; i++)
        for (int unsigned j = 0; j < K; j++)
          if (if_req_valid[i][j] && rst_n) begin
            if (32'(if_req_y[i]) >= L_H || 32'(if_req_x[i]) + j >= L_W) begin
              failures++;
              $display("FAIL: ifmap request out of range y=%0d x=%0d", if_req_y[i], if_req_x[i] + j);
            end
            i_ext[m][i][j] <= x_at(if_req_m_base[i] + m, if_req_y[i] % HMAX, (if_req_x[i] + j) % WMAX);
            if (32'(if_req_m_base[i]) + m >= L_M) n_idle_slice++;
          end else begin
            i_ext[m][i][j] <= 8'($urandom);
          end
    for (int unsigned m = 0; m < PM; m++)
      for (int unsigned j = 0; j < K; j++)
        if (w_req_valid)
          w_ext[m][j] <= w_at(w_req_n_base + w_req_core, w_req_m_base + m, w_req_krow, j);
        else
          w_ext[m][j] <= 8'($urandom);
    if (w_req_valid) n_wload++;
  end

  // ---- mechanism counters (selects are the same for every slice) -----------
  always @(posedge clk) if (busy) begin
    for (int unsigned i = 0; i < K; i++)
      for (int unsigned j = 0; j < K; j++)
        if (dut.u_ctrl.ctl[i+2].valid) begin
          if (dut.sel_new[i][j] && !dut.sel_ext[i][j]) n_diag++;
          if (!dut.sel_new[i][j]) n_horiz++;
          if (dut.sel_new[i][j] && dut.sel_ext[i][j] && i < K - 1 &&
              dut.u_ctrl.ctl[i+2].r != '0 && dut.u_ctrl.ctl[i+2].c != '0) n_tail++;
        end
    if (dut.rd_ctl.valid && !dut.rd_ctl.first) n_accum++;
  end

  // ---- output checker ----------------------------------------------------------
  always @(posedge clk) if (of_valid && rst_n) begin
    for (int unsigned p = 0; p < PN; p++) begin
      int unsigned n;
      n = of_n_base + p;
      checks++;
      if (of_core_valid[p] != (n < L_N)) begin
        failures++;
        $display("FAIL: core %0d valid flag %0b for filter %0d", p, of_core_valid[p], n);
      end
      if (n < L_N) begin
        checks++;
        if (of_data[p] !== ref_out(n, of_y, of_x)) begin
          failures++;
          if (failures < 10)
            $display("FAIL: filter %0d pixel (%0d,%0d) got %0d expected %0d",
                     n, of_y, of_x, of_data[p], ref_out(n, of_y, of_x));
        end
        if (seen[n][of_y][of_x]) begin
          failures++;
          $display("FAIL: pixel delivered twice");
        end
        seen[n][of_y][of_x] = 1'b1;
      end else begin
        n_idle_core++;
      end
    end
  end

  // ---- one layer -------------------------------------------------------------
  task automatic run_layer(int unsigned h, int unsigned w, int unsigned m, int unsigned n);
    int unsigned cyc, s_steps, expect_cyc, ho, wo, missing;
    L_H = h; L_W = w; L_M = m; L_N = n;
    ho = h - K + 1; wo = w - K + 1;
    for (int unsigned a = 0; a < m; a++)
      for (int unsigned y = 0; y < h; y++)
        for (int unsigned x = 0; x < w; x++) X[a][y][x] = 8'($urandom);
    for (int unsigned f = 0; f < n; f++)
      for (int unsigned a = 0; a < m; a++)
        for (int unsigned ki = 0; ki < K; ki++)
          for (int unsigned kj = 0; kj < K; kj++) Wt[f][a][ki][kj] = 8'($urandom);
    foreach (seen[f, y, x]) seen[f][y][x] = 1'b0;
    @(negedge clk);
    cfg_h_i = coord_t'(h); cfg_w_i = coord_t'(w);
    cfg_m = chan_t'(m);    cfg_n = chan_t'(n);
    start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    checks++;
    if (cfg_err || !busy) begin
      failures++;
      $display("FAIL: layer %0dx%0d M=%0d N=%0d not accepted", h, w, m, n);
      return;
    end
    n_sel[dut.rsrb_sel]++;
    cyc = 0;
    do begin
      @(posedge clk);
      cyc++;
    end while (!done && cyc < 10000000);
    s_steps = ((n + PN - 1) / PN) * ((m + PM - 1) / PM);
    expect_cyc = s_steps * (PN * K + ho * wo) + (s_steps - 1) * (K - 1) + OUT_LAT;
    checks++;
    if (cyc != expect_cyc) begin
      failures++;
      $display("FAIL: layer took %0d cycles, expected %0d", cyc, expect_cyc);
    end
    @(posedge clk);  // the last pixel is delivered in the cycle done rises
    missing = 0;
    for (int unsigned f = 0; f < n; f++)
      for (int unsigned y = 0; y < ho; y++)
        for (int unsigned x = 0; x < wo; x++) if (!seen[f][y][x]) missing++;
    checks++;
    if (missing != 0) begin
      failures++;
      $display("FAIL: %0d ofmap pixels never delivered", missing);
    end
    $display("layer %0dx%0d M=%0d N=%0d: %0d cycles (%0d steps)", h, w, m, n, cyc, s_steps);
    repeat (3) @(posedge clk);
  endtask

  task automatic expect_seen(string what, int count);
    checks++;
    $display("mechanism %-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never exercised", what);
    end
  endtask

  initial begin
    start = 1'b0;
    cfg_h_i = '0; cfg_w_i = '0; cfg_m = '0; cfg_n = '0;
    foreach (n_sel[s]) n_sel[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    run_layer(16, 16, 48, 10);  // VGG-16 CL11 size (14x14, padded): 2 x 2 steps
    run_layer(30, 30, 24, 7);   // 28x28 ofmap (CL8-10 size), one step
    run_layer(58, 58, 3, 3);    // 56x56 ofmap, idle slices and cores
    run_layer(114, 114, 2, 2);  // 112x112 ofmap
    run_layer(226, 226, 1, 1);  // 224x224 ofmap (CL1-2 size)
    // a width with no sub-buffer is refused
    @(negedge clk);
    cfg_h_i = coord_t'(SB_WIDTHS[0]); cfg_w_i = coord_t'(SB_WIDTHS[0] + 1);
    cfg_m = chan_t'(1); cfg_n = chan_t'(1);
    start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    checks++;
    if (!cfg_err || busy) begin
      failures++;
      $display("FAIL: unsupported width accepted");
    end else n_cfg_err++;
    repeat (2) @(posedge clk);
    checks++;
    if (busy || of_valid) begin
      failures++;
      $display("FAIL: engine active after a refused start");
    end

    expect_seen("diagonal reuse (RSRB)", n_diag);
    expect_seen("horizontal reuse", n_horiz);
    expect_seen("row-tail external fetch", n_tail);
    expect_seen("temporal accumulation", n_accum);
    expect_seen("weight loading", n_wload);
    expect_seen("idle slice (M < P_M)", n_idle_slice);
    expect_seen("idle core (N < P_N)", n_idle_core);
    expect_seen("configuration refused", n_cfg_err);
    for (int unsigned s = 0; s < NUM_SB; s++)
      expect_seen($sformatf("RSRB sub-buffer %0d", s), n_sel[s]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
