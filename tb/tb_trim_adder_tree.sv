// tb_trim_adder_tree: self-checking testbench of trim_adder_tree.
//
// A 5-input tree (3 adder levels) with 2 pipeline stages: random signed
// operands every cycle, the sum must appear exactly 2 cycles later (the
// latency the package function predicts) and equal the plain sum.
module tb_trim_adder_tree;
  import trim_pkg::*;
  localparam int unsigned N = 5, IN_W = 12, OUT_W = 15, STAGES = 2;
  localparam int unsigned LAT = tree_regs(clog2(N), STAGES);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0]  in [N];
  logic signed [OUT_W-1:0] sum;

  trim_adder_tree #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W), .STAGES(STAGES)) dut (.*);

  int checks = 0, failures = 0;
  int hist [500];

  initial begin
    checks++;
    if (LAT != 2) begin
      failures++;
      $display("FAIL: latency %0d expected 2", LAT);
    end
    for (int t = 0; t < 500; t++) begin
      int s;
      s = 0;
      for (int unsigned k = 0; k < N; k++) begin
        in[k] = IN_W'($urandom);
        s += int'(in[k]);
      end
      hist[t] = s;
      @(posedge clk); #1;
      // the operands of cycle t-LAT+1 have just reached the output
      if (t >= int'(LAT) - 1) begin
        checks++;
        if (int'(sum) != hist[t-LAT+1]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d sum %0d expected %0d", t, sum, hist[t-LAT+1]);
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
