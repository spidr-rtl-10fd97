// tb_spidr_pkg -- self-checking test of the shared package: precision
// helpers (weight/Vmem widths, words per Vmem row) and the column mapping of
// Vmem words. For every precision and row parity it checks, against values
// computed here from the layout rules (weight slot j in columns j*W..,
// odd-row word k under weight slot 2k, even-row word k under slot 2k+1,
// 2W-1 columns, wrapping at column 48): the column of every bit, that words
// do not overlap, that the word mask covers exactly the word columns, and
// that put_word/get_word round-trip random values with sign extension
// without touching any other column.
module tb_spidr_pkg;
  import spidr_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wexp [3] = '{4, 6, 8};
    for (int pi = 0; pi < 3; pi++) begin
      automatic prec_e p = prec_e'(pi);
      automatic int W = wexp[pi];
      chk(wbits(p) == W, "weight bits");
      chk(vbits(p) == 2 * W - 1, "Vmem bits = 2W-1");
      chk(nwords(p) == 48 / (2 * W), "words per Vmem row");
      for (int o = 0; o < 2; o++) begin
        automatic row_t used = '0;
        automatic row_t m = word_mask(p, o[0]);
        for (int k = 0; k < 48 / (2 * W); k++)
          for (int b = 0; b < 2 * W - 1; b++) begin
            automatic int slot = o ? 2 * k : 2 * k + 1;
            automatic int c = (slot * W + b) % 48;
            chk(vcol(p, o[0], k, b) == c, $sformatf("prec %0d odd %0d word %0d bit %0d column", W, o, k, b));
            chk(!used[c], "words do not overlap");
            used[c] = 1'b1;
          end
        chk(m == used, $sformatf("mask of prec %0d odd %0d", W, o));
        // round trips
        for (int n = 0; n < 200; n++) begin
          automatic row_t r, r2;
          automatic int k = $urandom_range(0, 48 / (2 * W) - 1);
          automatic int v = $urandom_range(0, (1 << (2 * W - 1)) - 1);
          automatic int sv = (v >= (1 << (2 * W - 2))) ? v - (1 << (2 * W - 1)) : v;
          for (int b = 0; b < 48; b++) r[b] = 1'($urandom);
          r2 = put_word(r, p, o[0], k, 16'(v));
          chk(int'(get_word(r2, p, o[0], k)) == sv, "put/get round trip with sign extension");
          for (int kk = 0; kk < 48 / (2 * W); kk++)
            if (kk != k) chk(get_word(r2, p, o[0], kk) == get_word(r, p, o[0], kk), "other words kept");
          for (int c = 0; c < 48; c++)
            if (!m[c]) chk(r2[c] == r[c], "gap columns kept");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
