// tb_spike_detector -- self-checking test of the trailing-zero spike
// detector. A behavioural IFspad (one-cycle read latency) is filled with
// random rows of varying density (including empty rows); rows become
// available gradually, as if written by the input loader, and the consumer
// accepts tuples at random. Every emitted (Y, X) tuple is compared, in order,
// with the expected list (rows in order, spikes from the lowest column up).
// A scan of 128 empty rows must finish within 2 cycles per row (zero
// skipping), and one spike per cycle is emitted when the consumer is ready.
module tb_spike_detector;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, spad_rd_en, tup_valid, tup_ready = 1, busy, done;
  logic [7:0] n_rows = 0, rows_avail = 0;
  logic [6:0] spad_rd_addr;
  logic [15:0] spad_rd_data;
  addr_tuple_t tup;
  int checks = 0, failures = 0;

  spike_detector dut (.*);

  logic [15:0] spad [128];
  always_ff @(posedge clk) if (spad_rd_en) spad_rd_data <= spad[spad_rd_addr];

  int exp_y [$], exp_x [$];
  int ready_pct = 100;
  always @(negedge clk) tup_ready = ($urandom_range(1, 100) <= ready_pct);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer: compare tuples in order
  always @(posedge clk) if (rst_n && tup_valid && tup_ready) begin
    checks++;
    if (exp_y.size() == 0) begin failures++; $display("FAIL: extra tuple"); end
    else begin
      int ey, ex;
      ey = exp_y.pop_front(); ex = exp_x.pop_front();
      if (tup.y != 7'(ey) || tup.x != 4'(ex)) begin
        failures++; $display("FAIL: got (%0d,%0d) exp (%0d,%0d)", tup.y, tup.x, ey, ex);
      end
    end
  end

  task automatic run_scan(int nr, int density, bit gradual);
    int cyc = 0;
    for (int y = 0; y < nr; y++) begin
      logic [15:0] r = '0;
      for (int x = 0; x < 16; x++) if ($urandom_range(0, 99) < density) r[x] = 1'b1;
      if (y % 7 == 3) r = '0;
      spad[y] = r;
      for (int x = 0; x < 16; x++) if (r[x]) begin exp_y.push_back(y); exp_x.push_back(x); end
    end
    @(negedge clk); n_rows = 8'(nr); rows_avail = gradual ? 8'd0 : 8'(nr); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk); cyc++;
      if (gradual && rows_avail < 8'(nr) && $urandom_range(0, 3) == 0) rows_avail++;
    end
    checks++;
    if (exp_y.size() != 0) begin failures++; $display("FAIL: %0d tuples missing", exp_y.size()); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    ready_pct = 60; run_scan(128, 20, 1);
    ready_pct = 100; run_scan(40, 50, 0);
    // all-empty rows: zero skipping, 2 cycles per row
    begin
      int cyc = 0;
      for (int y = 0; y < 128; y++) spad[y] = '0;
      @(negedge clk); n_rows = 128; rows_avail = 128; start = 1;
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > 2*128 + 2) begin failures++; $display("FAIL: empty scan took %0d cycles", cyc); end
    end
    // dense row at full ready: 16 spikes in 16 consecutive cycles
    begin
      int cyc = 0, first = -1, last = -1;
      spad[0] = 16'hFFFF;
      for (int x = 0; x < 16; x++) begin exp_y.push_back(0); exp_x.push_back(x); end
      @(negedge clk); n_rows = 1; rows_avail = 1; start = 1;
      @(negedge clk); start = 0;
      while (!done) begin
        @(posedge clk); cyc++;
        if (tup_valid && first < 0) first = cyc;
        if (tup_valid) last = cyc;
      end
      checks++;
      if (last - first != 15) begin failures++; $display("FAIL: dense row not 1 spike/cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
