// tb_neuron_macro -- self-checking test of the CIM neuron macro. For each
// precision and for IF/hard reset, IF/soft reset and LIF/hard reset it loads
// random partial and full Vmems, thresholds and leaks, issues the 32
// accumulations and the 32 threshold comparisons back to back, and compares
// the full Vmems and the spikes of every row with a reference model that has
// its own copy of the column layout. It also checks the two-cycle delay from
// issue to spike output.
module tb_neuron_macro;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_e prec; nmodel_e nmodel; nreset_e nreset;
  logic op_valid = 0, op_cmp = 0, wr_en = 0, rd_en = 0;
  logic [4:0] op_row = 0;
  logic [6:0] wr_row = 0, rd_row = 0;
  row_t wr_data = '0, rd_data;
  logic spk_valid, busy;
  logic [4:0] spk_row;
  logic [5:0] spk_vec;
  int checks = 0, failures = 0;

  neuron_macro dut (.*);

  function automatic int col_of(int wb, int odd, int k, int b);
    return ((odd ? 2*k*wb : (2*k+1)*wb) + b) % 48;
  endfunction
  function automatic int wrapv(int v, int vb);
    int m = 1 << vb;
    v = v % m; if (v < 0) v += m;
    if (v >= m/2) v -= m;
    return v;
  endfunction

  int P [32][6], F [32][6], TH [2][6], LK [2][6];
  logic [5:0] ES [32];
  logic [5:0] GS [32];
  int nspk = 0;

  always @(negedge clk) if (spk_valid) begin GS[spk_row] = spk_vec; nspk++; end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic wr(int r, row_t d);
    @(negedge clk); wr_en = 1; wr_row = 7'(r); wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  function automatic row_t pack(int wb, int odd, int vals[6]);
    row_t r = '0;
    for (int k = 0; k < 24 / wb; k++)
      for (int b = 0; b < 2*wb - 1; b++) r[col_of(wb, odd, k, b)] = vals[k][b];
    return r;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int pi = 0; pi < 3; pi++) for (int mi = 0; mi < 3; mi++) begin
      automatic int wb = 4 + 2 * pi, vb = 2 * (4 + 2 * pi) - 1, nw = 24 / (4 + 2 * pi);
      automatic int lim = 1 << (vb - 2);
      prec = prec_e'(pi);
      nmodel = (mi == 2) ? NEURON_LIF : NEURON_IF;
      nreset = (mi == 1) ? RESET_SOFT : RESET_HARD;
      for (int o = 0; o < 2; o++) begin
        automatic int tv[6], lv[6];
        for (int k = 0; k < 6; k++) begin
          TH[o][k] = $urandom_range(1, lim / 2); LK[o][k] = $urandom_range(0, 3);
          tv[k] = TH[o][k]; lv[k] = LK[o][k];
        end
        wr(o ? 64 : 65, pack(wb, o, tv));
        wr(o ? 66 : 67, pack(wb, o, lv));
      end
      for (int r = 0; r < 32; r++) begin
        automatic int pv[6], fv[6];
        for (int k = 0; k < 6; k++) begin
          P[r][k] = $urandom_range(0, lim) - lim / 2;
          F[r][k] = $urandom_range(0, lim) - lim / 2;
          pv[k] = P[r][k]; fv[k] = F[r][k];
        end
        wr(r, pack(wb, r % 2, pv));
        wr(32 + r, pack(wb, r % 2, fv));
      end
      // reference
      for (int r = 0; r < 32; r++) begin
        ES[r] = '0;
        for (int k = 0; k < nw; k++) begin
          automatic int v = wrapv(F[r][k] + P[r][k], vb);
          if (v >= TH[r % 2][k]) begin
            ES[r][k] = 1'b1;
            v = (nreset == RESET_SOFT) ? wrapv(v - TH[r % 2][k], vb) : 0;
          end else if (nmodel == NEURON_LIF) v = wrapv(v - LK[r % 2][k], vb);
          F[r][k] = v;
        end
      end
      nspk = 0;
      for (int n = 0; n < 64; n++) begin
        @(negedge clk); op_valid = 1; op_cmp = (n >= 32); op_row = 5'(n % 32);
        if (n == 32) chk(!spk_valid, "no spike output before a comparison");
      end
      @(negedge clk); op_valid = 0;
      @(negedge clk);
      chk(nspk == 31, "spike of the last row not before its Store stage");
      @(negedge clk);
      chk(nspk == 32, "32 spike rows, two cycles after issue");
      for (int r = 0; r < 32; r++) begin
        automatic row_t d;
        @(negedge clk); rd_en = 1; rd_row = 7'(32 + r);
        @(negedge clk); rd_en = 0; d = rd_data;
        chk(GS[r] == ES[r], $sformatf("p%0d m%0d row %0d spikes %b exp %b", wb, mi, r, GS[r], ES[r]));
        for (int k = 0; k < nw; k++) begin
          automatic int got = 0;
          for (int b = 0; b < vb; b++) got |= int'(d[col_of(wb, r % 2, k, b)]) << b;
          got = wrapv(got, vb);
          chk(got == F[r][k], $sformatf("p%0d m%0d row %0d word %0d got %0d exp %0d", wb, mi, r, k, got, F[r][k]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
