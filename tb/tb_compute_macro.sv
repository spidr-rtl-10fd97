// tb_compute_macro -- self-checking test of the CIM compute macro.
//
// For each precision (4/7, 6/11, 8/15) it loads random signed weights,
// clears the Vmem rows (leaving the unused column after every Vmem word set
// to 1), issues a few hundred random even and odd accumulations back to back
// (an idle cycle is inserted only where a Vmem row is still in flight) and
// compares every Vmem word with a reference model that uses its own copy of
// the column layout. It also checks the three-cycle Read/Compute/Store
// latency and that the unused columns are never written.
module tb_compute_macro;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_e prec;
  logic acc_valid = 0, acc_odd = 0, wr_en = 0, rd_en = 0;
  logic [6:0] acc_wrow = 0;
  logic [4:0] acc_vrow = 0;
  logic [7:0] wr_row = 0, rd_row = 0;
  row_t wr_data = 0, rd_data;
  logic busy;
  int checks = 0, failures = 0;

  compute_macro dut (.*);

  // reference layout, written independently of the package
  function automatic int col_of(int wb, int odd, int k, int b);
    int c = (odd ? 2*k*wb : (2*k+1)*wb) + b;
    return c % 48;
  endfunction

  int W [128][12];
  int V [32][6];

  function automatic int wrapv(int v, int vb);
    int m = 1 << vb;
    v = v % m; if (v < 0) v += m;
    if (v >= m/2) v -= m;
    return v;
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic read_row(input int r, output row_t d);
    @(negedge clk); rd_en = 1; rd_row = 8'(r);
    @(negedge clk); rd_en = 0; d = rd_data;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pi = 0; pi < 3; pi++) begin
      int wb, vb, nw;
      int l1, l2;
      prec = prec_e'(pi);
      wb = (pi == 0) ? 4 : (pi == 1) ? 6 : 8;
      vb = 2*wb - 1; nw = 24 / wb;
      // weights
      for (int y = 0; y < 128; y++) begin
        automatic row_t r = '0;
        for (int j = 0; j < 48/wb; j++) begin
          automatic int w = $urandom_range(0, (1 << wb) - 1);
          for (int b = 0; b < wb; b++) r[j*wb + b] = w[b];
          W[y][j] = (w >= (1 << (wb-1))) ? w - (1 << wb) : w;
        end
        @(negedge clk); wr_en = 1; wr_row = 8'(y); wr_data = r;
      end
      // Vmem rows: words 0, other columns 1
      for (int v = 0; v < 32; v++) begin
        automatic row_t r = '1;
        for (int k = 0; k < nw; k++) begin
          V[v][k] = 0;
          for (int b = 0; b < vb; b++) r[col_of(wb, v % 2, k, b)] = 1'b0;
        end
        @(negedge clk); wr_en = 1; wr_row = 8'(128 + v); wr_data = r;
      end
      @(negedge clk); wr_en = 0;
      // latency check: one accumulation into row 1 (odd) with weight row 0
      begin
        row_t d;
        @(negedge clk); acc_valid = 1; acc_odd = 1; acc_wrow = 0; acc_vrow = 1;
        @(negedge clk); acc_valid = 0;
        @(negedge clk);
        rd_en = 1; rd_row = 8'(129);       // read issued in Store cycle: old data
        @(negedge clk); rd_en = 0; d = rd_data;
        check(d[col_of(wb,1,0,0)+:1] == 1'b0 || W[0][0] % 2 == 0, "latency: write visible too early");
        for (int k = 0; k < nw; k++) V[1][k] = wrapv(V[1][k] + W[0][2*k], vb);
        read_row(129, d);
        for (int k = 0; k < nw; k++) begin
          automatic int got = 0;
          for (int b = 0; b < vb; b++) got |= int'(d[col_of(wb,1,k,b)]) << b;
          if (got >= (1 << (vb-1))) got -= (1 << vb);
          check(got == V[1][k], $sformatf("latency: word %0d got %0d exp %0d", k, got, V[1][k]));
        end
      end
      // random accumulations
      l1 = -1; l2 = -1;
      for (int n = 0; n < 400; n++) begin
        automatic int y = $urandom_range(0, 127);
        automatic int x = $urandom_range(0, 15);
        automatic int odd = $urandom_range(0, 1);
        automatic int v = 2*x + odd;
        @(negedge clk);
        if (v == l1 || v == l2) begin
          acc_valid = 0; l2 = l1; l1 = -1;
          @(negedge clk);
          if (v == l1 || v == l2) begin acc_valid = 0; l2 = -1; @(negedge clk); end
        end
        acc_valid = 1; acc_odd = odd[0]; acc_wrow = 7'(y); acc_vrow = 5'(v);
        l2 = l1; l1 = v;
        for (int k = 0; k < nw; k++)
          V[v][k] = wrapv(V[v][k] + W[y][odd ? 2*k : 2*k+1], vb);
      end
      @(negedge clk); acc_valid = 0;
      repeat (3) @(negedge clk);
      check(!busy, "pipeline drained");
      for (int v = 0; v < 32; v++) begin
        row_t d;
        automatic row_t wm = '0;
        read_row(128 + v, d);
        for (int k = 0; k < nw; k++) begin
          automatic int got = 0;
          for (int b = 0; b < vb; b++) begin
            got |= int'(d[col_of(wb, v%2, k, b)]) << b;
            wm[col_of(wb, v%2, k, b)] = 1'b1;
          end
          if (got >= (1 << (vb-1))) got -= (1 << vb);
          check(got == V[v][k], $sformatf("prec %0d row %0d word %0d got %0d exp %0d", wb, v, k, got, V[v][k]));
        end
        check((d | wm) == '1, $sformatf("prec %0d row %0d: unused column overwritten", wb, v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
