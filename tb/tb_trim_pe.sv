// tb_trim_pe: self-checking testbench of trim_pe.
//
// Drives random weights, inputs, selects and psums and compares psum_out,
// i_l and w_out every cycle with a cycle-level model of the PE written from
// its description: I_ext is registered, the first multiplexer picks I_ext or
// I_D, the second picks that or I_R, the product of the unsigned input and
// the signed weight is added to psum_in and registered.
module tb_trim_pe;
  localparam int unsigned B = 8, PSUM_W = 19;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                     w_load, sel_new, sel_ext;
  logic signed [B-1:0]      w_in, w_out;
  logic        [B-1:0]      i_ext, i_d, i_r, i_l;
  logic signed [PSUM_W-1:0] psum_in, psum_out;

  trim_pe #(.B(B), .PSUM_W(PSUM_W)) dut (.*);

  int checks = 0, failures = 0;
  logic        [B-1:0]      m_iext;
  logic signed [B-1:0]      m_w;
  logic        [B-1:0]      m_il;
  logic signed [PSUM_W-1:0] m_ps;
  int op;

  initial begin
    w_load = 1'b1; w_in = 8'sd3; i_ext = 8'd0; i_d = '0; i_r = '0;
    sel_new = 1'b1; sel_ext = 1'b1; psum_in = '0;
    @(posedge clk); #1;
    m_w = 8'sd3; m_iext = 8'd0;
    for (int t = 0; t < 2000; t++) begin
      w_load  = ($urandom % 4) == 0;
      w_in    = 8'($urandom);
      i_ext   = 8'($urandom);
      i_d     = 8'($urandom);
      i_r     = 8'($urandom);
      sel_new = 1'($urandom);
      sel_ext = 1'($urandom);
      psum_in = PSUM_W'($signed(18'($urandom)));
      // operand as the model sees it during this cycle
      op = sel_new ? (sel_ext ? int'(m_iext) : int'(i_d)) : int'(i_r);
      @(posedge clk); #1;
      m_ps   = PSUM_W'(psum_in + op * int'(m_w));
      m_il   = 8'(op);
      if (w_load) m_w = w_in;
      m_iext = i_ext;
      checks += 3;
      if (psum_out !== m_ps) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d psum %0d expected %0d", t, psum_out, m_ps);
      end
      if (i_l !== m_il) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d i_l %0d expected %0d", t, i_l, m_il);
      end
      if (w_out !== m_w) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d w %0d expected %0d", t, w_out, m_w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
