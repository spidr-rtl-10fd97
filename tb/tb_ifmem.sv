// tb_ifmem -- self-checking test of the ifmem memory: fills all 640 rows
// with random data through the write port, reads every row back, checks the
// one-cycle read latency (data appears the cycle after rd_en, and a read in
// the same cycle as a write to that row returns the old word).
module tb_ifmem;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int ROWS = 640, W = 56, AW = $clog2(ROWS);
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic [W-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  ifmem dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i);
      wr_data = W'({$urandom, $urandom});
      ref_mem[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = ROWS - 1; i >= 0; i--) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(i);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== ref_mem[i]) begin failures++; $display("FAIL row %0d", i); end
    end
    // read-during-write returns the old word
    @(negedge clk);
    rd_en = 1; rd_addr = 3; wr_en = 1; wr_addr = 3; wr_data = ~ref_mem[3];
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    checks++;
    if (rd_data !== ref_mem[3]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk); rd_en = 1; rd_addr = 3;
    @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data !== ~ref_mem[3]) begin failures++; $display("FAIL write after rdw"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
