// trim_pkg: constants, types and helper functions shared by the TrIM
// convolution engine.
//
// The engine is a three-level hierarchy (slice -> core -> engine).  All
// slices of all cores follow one schedule, so the control logic produces a
// single stream of per-output control words (ctl_t) that is delayed to the
// pipeline stage where each piece of hardware needs it.
//
// Field widths below are fixed design choices, sized for the VGG-16 and
// AlexNet layers: ifmap coordinates up to 511, channel counts up to 1023 and
// ofmap buffers up to 2^20 words.
package trim_pkg;

  localparam int unsigned COORD_W = 9;   // ifmap / ofmap row and column
  localparam int unsigned CH_W    = 10;  // ifmap (M) and filter (N) counts
  localparam int unsigned PADDR_W = 20;  // psums buffer word address

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [CH_W-1:0]    chan_t;
  typedef logic [PADDR_W-1:0] paddr_t;

  // One control word per output pixel of one computational step, issued at
  // the cycle in which Row_0 of every slice requests its inputs.  Row i uses
  // the same word i cycles later (systolic skew); the accumulation stage uses
  // it after the whole slice/core pipeline.
  typedef struct packed {
    logic   valid;    // an output pixel is being produced
    logic   first;    // first ifmap group of the step (psums buffer not read)
    logic   last;     // last ifmap group: the sum is a finished ofmap value
    logic   final_px; // last pixel of the whole layer
    coord_t r;        // ofmap row
    coord_t c;        // ofmap column
    paddr_t addr;     // r * W_O + c, psums buffer address
    chan_t  m_base;   // first ifmap of the group held by slice 0
    chan_t  n_base;   // first filter of the group held by core 0
  } ctl_t;

  // Number of register stages of a binary adder tree with `levels` adder
  // levels spread over `stages` pipeline stages (see trim_adder_tree).
  function automatic int unsigned tree_regs(int unsigned levels,
                                            int unsigned stages);
    int unsigned n;
    if (levels == 0) return 1;
    n = 0;
    for (int unsigned lv = 0; lv < levels; lv++)
      if (((lv + 1) * stages) / levels != (lv * stages) / levels) n++;
    return n;
  endfunction

  // Register after adder level `lv` of a tree of `levels` levels?
  function automatic bit tree_reg_after(int unsigned lv, int unsigned levels,
                                        int unsigned stages);
    return ((lv + 1) * stages) / levels != (lv * stages) / levels;
  endfunction

  // ceil(log2(n)) with clog2(1) = 0.
  function automatic int unsigned clog2(int unsigned n);
    return (n <= 1) ? 0 : $clog2(n);
  endfunction

endpackage
