// tb_trim_psum_buffer: self-checking testbench of trim_psum_buffer.
//
// Random writes and reads against an associative-array model; read data must
// appear one cycle after the address, and hold while rd_en is low.
module tb_trim_psum_buffer;
  localparam int unsigned DEPTH = 50, WIDTH = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                    wr_en, rd_en;
  logic [5:0]              wr_addr, rd_addr;
  logic signed [WIDTH-1:0] wr_data, rd_data;

  trim_psum_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  logic signed [WIDTH-1:0] model [DEPTH];
  logic signed [WIDTH-1:0] expect_q;

  initial begin
    wr_en = 1'b1; rd_en = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      wr_addr = 6'(a); wr_data = WIDTH'($urandom); model[a] = wr_data;
      @(posedge clk); #1;
    end
    rd_en = 1'b1; rd_addr = '0; wr_en = 1'b0;
    @(posedge clk); #1;
    expect_q = model[0];
    for (int t = 0; t < 1000; t++) begin
      wr_en   = 1'($urandom);
      rd_en   = ($urandom % 4) != 0;
      wr_addr = 6'($urandom % DEPTH);
      rd_addr = 6'($urandom % DEPTH);
      if (wr_en && rd_en && wr_addr == rd_addr) wr_addr = 6'((wr_addr + 1) % DEPTH);
      wr_data = WIDTH'($urandom);
      checks++;
      if (rd_data !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d got %0h expected %0h", t, rd_data, expect_q);
      end
      @(posedge clk); #1;
      if (rd_en) expect_q = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
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
