// trim_control: control logic shared by all cores and slices of the engine.
//
// The paper gives this block's job, not its insides: one controller
// sequences the layer and, since every slice follows the same schedule, its
// cost is shared by the whole engine.  This implementation runs the
// ceil(N/P_N) x ceil(M/P_M) computational steps of a layer (filter groups
// outer, ifmap groups inner) and splits each step into the paper's two
// phases:
//   * weight loading, P_N*K cycles: core 0, 1, ... receive their kernels one
//     after the other, one kernel row (of all P_M kernels) per cycle;
//   * computation, H_O*W_O cycles: one ofmap pixel per cycle.
// Between a computation phase and the next weight loading it waits K-1
// cycles so that the lower PE rows finish the last pixel before the weights
// shift (the paper's cycle-count formula has no such gap; it costs K-1
// cycles per step).
//
// Per pixel the controller issues a control word (trim_pkg::ctl_t) in the
// cycle Row_0 requests its inputs and delays it through one pipeline; each
// consumer taps the stage that lines up with it:
//   stage i        Row_i's ifmap requests (if_req_*);
//   stage i+2      Row_i's multiplexer selects (sel_new / sel_ext);
//   stage RD_DLY   psums buffer read;  stage ACC_DLY  accumulation.
// Memory timing: a request (ifmap or weight) in cycle t must be answered with
// data on the engine's input port in cycle t+1.  For the ifmap, row i of
// slice m wants pixel (if_req_y[i], if_req_x[i]+j) of ifmap
// if_req_m_base[i]+m at column j where if_req_valid[i][j] is set.  For the
// weights, slice m of core w_req_core wants row w_req_krow of kernel
// (filter w_req_n_base+core, ifmap w_req_m_base+m).  The rows are asked last
// row first because they enter at Row_0 and shift down.
//
// Configuration (sampled with start in idle): ifmap height/width, already
// padded if the layer is padded, M and N.  The width must be one of
// SB_WIDTHS (it chooses the RSRB sub-buffer); the ofmap must fit in the
// psums buffer; otherwise cfg_err is raised and nothing starts.
//
// Two groups of select outputs are constant by construction and kept only so
// that every PE has the same ports: sel_new[i][K-1] is always 1 (the
// rightmost PE of a row always takes a new input) and sel_ext[K-1][j] is
// always 1 (the bottom row has no RSRB below it).
module trim_control
  import trim_pkg::*;
#(
  parameter int unsigned K          = 3,
  parameter int unsigned PM         = 24,
  parameter int unsigned PN         = 7,
  parameter int unsigned CORE_LAT   = 3,
  parameter int unsigned PSUM_DEPTH = 224 * 224,
  parameter int unsigned NUM_SB     = 5,
  parameter int unsigned SB_WIDTHS [NUM_SB] = '{16, 30, 58, 114, 226},
  localparam int unsigned SEL_W   = (NUM_SB > 1) ? $clog2(NUM_SB) : 1,
  localparam int unsigned PN_W    = (PN > 1) ? $clog2(PN) : 1,
  localparam int unsigned KR_W    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned RD_DLY  = K + 2 + CORE_LAT,
  localparam int unsigned ACC_DLY = RD_DLY + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // layer configuration and status
  input  logic             start,
  input  coord_t           cfg_h_i,
  input  coord_t           cfg_w_i,
  input  chan_t            cfg_m,
  input  chan_t            cfg_n,
  output logic             busy,
  output logic             cfg_err,
  output chan_t            n_total,      // N of the running layer
  // ifmap fetch requests, per slice row
  output logic             if_req_valid  [K][K],
  output coord_t           if_req_y      [K],
  output coord_t           if_req_x      [K],
  output chan_t            if_req_m_base [K],
  // weight fetch requests
  output logic             w_req_valid,
  output logic [PN_W-1:0]  w_req_core,
  output logic [KR_W-1:0]  w_req_krow,
  output chan_t            w_req_n_base,
  output chan_t            w_req_m_base,
  // slice controls
  output logic             w_load   [PN],
  output logic             sel_new  [K][K],
  output logic             sel_ext  [K][K],
  output logic [SEL_W-1:0] rsrb_sel,
  // temporal accumulation controls
  output ctl_t             rd_ctl,
  output ctl_t             acc_ctl
);

  typedef enum logic [1:0] {S_IDLE, S_GAP, S_WLOAD, S_COMP} state_t;

  state_t            state;
  coord_t            h_o, w_o;
  chan_t             m_tot, n_tot, m_base, n_base;
  coord_t            r, c;
  paddr_t            addr;
  logic [PN_W-1:0]   pcore;
  logic [KR_W-1:0]   kcnt;
  logic [KR_W-1:0]   gcnt;

  // ---- configuration check -------------------------------------------------
  logic             w_found;
  logic [SEL_W-1:0] w_sel;
  coord_t           cfg_h_o, cfg_w_o;
  logic [2*COORD_W-1:0] cfg_px;
  logic             cfg_ok;

  always_comb begin
    w_found = 1'b0;
    w_sel   = '0;
    for (int unsigned s = 0; s < NUM_SB; s++)
      if (32'(cfg_w_i) == SB_WIDTHS[s]) begin
        w_found = 1'b1;
        w_sel   = SEL_W'(s);
      end
    cfg_h_o = cfg_h_i - coord_t'(K - 1);
    cfg_w_o = cfg_w_i - coord_t'(K - 1);
    cfg_px  = cfg_h_o * cfg_w_o;
    cfg_ok  = w_found && (32'(cfg_h_i) >= K) && (32'(cfg_px) <= PSUM_DEPTH)
              && (cfg_m != '0) && (cfg_n != '0);
  end

  // ---- step sequencer ------------------------------------------------------
  logic px_last, step_last_m, step_last_n;
  assign px_last     = (r == h_o - 1'b1) && (c == w_o - 1'b1);
  assign step_last_m = 32'(m_base) + PM >= 32'(m_tot);
  assign step_last_n = 32'(n_base) + PN >= 32'(n_tot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cfg_err  <= 1'b0;
      h_o      <= '0;
      w_o      <= '0;
      m_tot    <= '0;
      n_tot    <= '0;
      m_base   <= '0;
      n_base   <= '0;
      r        <= '0;
      c        <= '0;
      addr     <= '0;
      pcore    <= '0;
      kcnt     <= '0;
      gcnt     <= '0;
      rsrb_sel <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start && !busy) begin
          cfg_err <= !cfg_ok;
          if (cfg_ok) begin
            h_o      <= cfg_h_o;
            w_o      <= cfg_w_o;
            m_tot    <= cfg_m;
            n_tot    <= cfg_n;
            rsrb_sel <= w_sel;
            m_base   <= '0;
            n_base   <= '0;
            pcore    <= '0;
            kcnt     <= '0;
            state    <= S_WLOAD;
          end
        end
        S_GAP: begin
          gcnt <= gcnt + 1'b1;
          if (32'(gcnt) == K - 2) begin
            pcore <= '0;
            kcnt  <= '0;
            state <= S_WLOAD;
          end
        end
        S_WLOAD: begin
          kcnt <= kcnt + 1'b1;
          if (32'(kcnt) == K - 1) begin
            kcnt  <= '0;
            pcore <= pcore + 1'b1;
            if (32'(pcore) == PN - 1) begin
              r     <= '0;
              c     <= '0;
              addr  <= '0;
              state <= S_COMP;
            end
          end
        end
        S_COMP: begin
          addr <= addr + 1'b1;
          if (c == w_o - 1'b1) begin
            c <= '0;
            r <= r + 1'b1;
          end else begin
            c <= c + 1'b1;
          end
          if (px_last) begin
            gcnt <= '0;
            if (step_last_m) begin
              m_base <= '0;
              n_base <= n_base + chan_t'(PN);
            end else begin
              m_base <= m_base + chan_t'(PM);
            end
            if (step_last_m && step_last_n) state <= S_IDLE;
            else if (K == 1) begin
              pcore <= '0;
              kcnt  <= '0;
              state <= S_WLOAD;
            end else state <= S_GAP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- weight requests and loads ---------------------------------------------
  assign w_req_valid  = (state == S_WLOAD);
  assign w_req_core   = pcore;
  assign w_req_krow   = KR_W'(K - 1) - kcnt;
  assign w_req_n_base = n_base;
  assign w_req_m_base = m_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned p = 0; p < PN; p++) w_load[p] <= 1'b0;
    end else begin
      for (int unsigned p = 0; p < PN; p++)
        w_load[p] <= w_req_valid && (32'(pcore) == p);
    end
  end

  // ---- per-pixel control pipeline ----------------------------------------------
  ctl_t ctl [ACC_DLY+1];

  always_comb begin
    ctl[0]          = '0;
    ctl[0].valid    = (state == S_COMP);
    ctl[0].first    = (m_base == '0);
    ctl[0].last     = step_last_m;
    ctl[0].final_px = step_last_m && step_last_n && px_last;
    ctl[0].r        = r;
    ctl[0].c        = c;
    ctl[0].addr     = addr;
    ctl[0].m_base   = m_base;
    ctl[0].n_base   = n_base;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned d = 1; d <= ACC_DLY; d++) ctl[d] <= '0;
    end else begin
      for (int unsigned d = 1; d <= ACC_DLY; d++) ctl[d] <= ctl[d-1];
    end
  end

  // Which PEs of row i take a new input, and whether it comes from outside.
  // PE(i,j) needs ifmap pixel (r+i, c+j).  At c = 0 every PE of the row takes
  // a new value, later only the rightmost one.  It comes from outside in the
  // first ofmap row of a step, always for Row_{K-1}, and for columns c+j >=
  // W_O, which never passed PE(i+1,0) and so are not in the RSRB.
  function automatic logic take_new(ctl_t x, int unsigned j);
    return x.valid && ((x.c == '0) || (j == K - 1));
  endfunction

  function automatic logic from_ext(ctl_t x, int unsigned i, int unsigned j,
                                    coord_t wo);
    return (x.r == '0) || (i == K - 1) || (32'(x.c) + j >= 32'(wo));
  endfunction

  always_comb begin
    for (int unsigned i = 0; i < K; i++) begin
      if_req_y[i]      = ctl[i].r + coord_t'(i);
      if_req_x[i]      = ctl[i].c;
      if_req_m_base[i] = ctl[i].m_base;
      for (int unsigned j = 0; j < K; j++) begin
        if_req_valid[i][j] = take_new(ctl[i], j) && from_ext(ctl[i], i, j, w_o);
        sel_new[i][j]      = take_new(ctl[i+2], j) || !ctl[i+2].valid;
        sel_ext[i][j]      = from_ext(ctl[i+2], i, j, w_o);
      end
    end
  end

  assign n_total = n_tot;
  assign rd_ctl  = ctl[RD_DLY];
  assign acc_ctl = ctl[ACC_DLY];

  // busy from an accepted start until the last pixel reaches accumulation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= 1'b0;
    else if (state == S_IDLE && start && !busy && cfg_ok) busy <= 1'b1;
    else if (acc_ctl.valid && acc_ctl.final_px) busy <= 1'b0;
  end

  // Weight loading and input streaming never overlap (the paper's bandwidth
  // model relies on it).
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    !(w_req_valid && ctl[0].valid));

endmodule
