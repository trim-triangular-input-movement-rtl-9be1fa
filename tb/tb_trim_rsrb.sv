// tb_trim_rsrb: self-checking testbench of trim_rsrb.
//
// Streams random values into the buffer and, for every selector value,
// checks that output j equals the value that entered w-K-1-j cycles before
// the output is read (w the ifmap width of the selected sub-buffer), i.e.
// that the chain up to the selected sub-buffer is w-K-1 registers long and
// that its leftmost K registers are brought out in order.
module tb_trim_rsrb;
  localparam int unsigned B = 8, K = 3, NUM_SB = 3;
  localparam int unsigned SB_WIDTHS [NUM_SB] = '{8, 12, 20};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [B-1:0] il_in;
  logic [1:0]   sel;
  logic [B-1:0] i_d [K];

  trim_rsrb #(.B(B), .K(K), .NUM_SB(NUM_SB), .SB_WIDTHS(SB_WIDTHS)) dut (.*);

  int checks = 0, failures = 0;
  logic [B-1:0] hist [$];   // hist[0] = value presented one cycle ago

  initial begin
    sel = '0;
    for (int t = 0; t < 1200; t++) begin
      il_in = 8'($urandom);
      if (t % 300 == 0) sel = 2'((t / 300) % NUM_SB);
      @(posedge clk);
      hist.push_front(il_in);
      #1;
      if (hist.size() > 40) begin
        int unsigned d;
        d = SB_WIDTHS[sel] - K - 1;
        for (int unsigned j = 0; j < K; j++) begin
          checks++;
          // value that entered d-j cycles ago is hist[d-1-j]
          if (i_d[j] !== hist[d-1-j]) begin
            failures++;
            if (failures < 10)
              $display("FAIL t=%0d sel=%0d j=%0d got %0h expected %0h", t, sel, j, i_d[j], hist[d-1-j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
