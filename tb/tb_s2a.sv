// tb_s2a -- self-checking test of the spike-to-address converter (spike
// detector + ping-pong address queue + SRAM controller). A behavioural
// IFspad is filled with random spike rows at several densities; the test
// collects the accumulation commands and checks that every spike (Y, X)
// produced exactly one even accumulation into Vmem row 2X and one odd
// accumulation into row 2X+1, both with weight row Y, and nothing else;
// that "finished" rises only after the last one; that issue_en holds
// everything back; and that the number of cycles is at least two per spike
// (one even and one odd operation each).
module tb_s2a;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, issue_en = 0;
  logic [7:0] n_rows = 0, rows_avail = 0;
  logic spad_rd_en, acc_valid, acc_odd, finished, ev_switch, ev_stall, ev_tuple;
  logic [6:0] spad_rd_addr, acc_wrow;
  logic [15:0] spad_rd_data;
  logic [4:0] acc_vrow;
  int checks = 0, failures = 0;

  s2a dut (.*);

  logic [15:0] spad [128];
  always_ff @(posedge clk) if (spad_rd_en) spad_rd_data <= spad[spad_rd_addr];

  int cnt [int];
  int nops = 0, nswitch = 0;
  always @(negedge clk) if (rst_n) begin
    if (acc_valid) begin
      int key;
      key = {acc_wrow, acc_vrow};
      cnt[key] = cnt.exists(key) ? cnt[key] - 1 : -1;
      nops++;
    end
    if (ev_switch) nswitch++;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (spad[i]) spad[i] = '0;
    for (int d = 0; d < 4; d++) begin
      automatic int density = (d == 0) ? 5 : (d == 1) ? 25 : (d == 2) ? 60 : 0;
      automatic int nsp = 0, cyc = 0;
      cnt.delete(); nops = 0;
      for (int y = 0; y < 128; y++) begin
        spad[y] = '0;
        for (int x = 0; x < 16; x++) if ($urandom_range(0, 99) < density) begin
          int ke, ko;
          spad[y][x] = 1'b1; nsp++;
          ke = {7'(y), 4'(x), 1'b0}; ko = {7'(y), 4'(x), 1'b1};
          cnt[ke] = cnt.exists(ke) ? cnt[ke] + 1 : 1;
          cnt[ko] = cnt.exists(ko) ? cnt[ko] + 1 : 1;
        end
      end
      @(negedge clk); n_rows = 128; rows_avail = 128; start = 1; issue_en = (d != 1);
      @(negedge clk); start = 0;
      if (d == 1) begin
        repeat (50) @(negedge clk);
        chk(nops == 0 && !finished, "nothing issued while issue_en is low");
        issue_en = 1;
      end
      while (!finished) begin @(negedge clk); cyc++; end
      chk(nops == 2 * nsp, $sformatf("density %0d: %0d ops for %0d spikes", density, nops, nsp));
      foreach (cnt[k]) chk(cnt[k] == 0, $sformatf("op count for row/col key %0h", k));
      chk(cyc >= 2 * nsp, "at least two cycles per spike");
    end
    chk(nswitch > 0, "even/odd switches happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
