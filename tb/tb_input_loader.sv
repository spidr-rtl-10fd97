// tb_input_loader -- self-checking test of the hardware im2col input loader.
// A behavioural IFmem (one-cycle read latency) holds random spikes for
// several timesteps. For three layer configurations (3x3 conv with zero
// padding at stride 1, conv at stride 2 without padding on a 56-wide input,
// and a fully connected layer) the IFspad rows written by the loader are
// compared with an im2col reference computed here, the rows_loaded progress
// count is checked, and the loader must write one row per cycle.
module tb_input_loader;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  layer_cfg_t cfg;
  logic [4:0] tstep = 0;
  logic ifm_rd_en, spad_wr_en, busy, done;
  logic [9:0] ifm_rd_addr;
  logic [55:0] ifm_rd_data;
  logic [6:0] spad_wr_addr;
  logic [15:0] spad_wr_data;
  logic [7:0] n_rows, rows_loaded;
  int checks = 0, failures = 0;

  input_loader dut (.*);

  logic [55:0] ifm [640];
  always_ff @(posedge clk) if (ifm_rd_en) ifm_rd_data <= ifm[ifm_rd_addr];
  logic [15:0] spad [128];
  int nwr = 0;
  always_ff @(posedge clk) if (spad_wr_en) begin spad[spad_wr_addr] <= spad_wr_data; nwr++; end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic bit in_spike(int t, int c, int h, int w);
    if (h < 0 || h >= int'(cfg.in_h) || w < 0 || w >= int'(cfg.in_w)) return 0;
    return ifm[t * int'(cfg.ts_rows) + c * int'(cfg.in_h) + h][w];
  endfunction

  task automatic run_and_check(string name);
    automatic int cyc = 0, nr;
    nwr = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    nr = (cfg.ltype == LAYER_FC) ? int'(cfg.fc_n) : int'(cfg.n_ch) * int'(cfg.kr) * int'(cfg.ks);
    chk(int'(n_rows) == nr && int'(rows_loaded) == nr && nwr == nr, {name, ": row count"});
    chk(cyc <= nr + 2, $sformatf("%s: %0d cycles for %0d rows", name, cyc, nr));
    for (int y = 0; y < nr; y++) begin
      automatic logic [15:0] e = '0;
      if (cfg.ltype == LAYER_FC) e[0] = ifm[int'(tstep) * int'(cfg.ts_rows) + y / 56][y % 56];
      else begin
        automatic int c = y / (int'(cfg.kr) * int'(cfg.ks));
        automatic int r = (y / int'(cfg.ks)) % int'(cfg.kr);
        automatic int s = y % int'(cfg.ks);
        for (int x = 0; x < int'(cfg.n_out); x++)
          e[x] = in_spike(int'(tstep), c,
                          int'(cfg.out_row) * int'(cfg.stride) + r - int'(cfg.pad),
                          (int'(cfg.out_col0) + x) * int'(cfg.stride) + s - int'(cfg.pad));
      end
      chk(spad[y] == e, $sformatf("%s: row %0d got %h exp %h", name, y, spad[y], e));
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ifm[i]) ifm[i] = {$urandom, $urandom};
    cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // 3x3 conv, stride 1, pad 1, top edge of a 8x10 input, 2 channels
    cfg.ltype = LAYER_CONV; cfg.n_ch = 2; cfg.kr = 3; cfg.ks = 3; cfg.stride = 1; cfg.pad = 1;
    cfg.in_h = 8; cfg.in_w = 10; cfg.out_row = 0; cfg.out_col0 = 0; cfg.n_out = 10; cfg.ts_rows = 16;
    tstep = 1;
    run_and_check("conv pad");
    // 3x3 conv, stride 2, 14 channels, 56-wide input (128-row limit: 14*9 = 126)
    cfg.n_ch = 14; cfg.stride = 2; cfg.pad = 0; cfg.in_h = 20; cfg.in_w = 56;
    cfg.out_row = 4; cfg.out_col0 = 11; cfg.n_out = 16; cfg.ts_rows = 280; tstep = 1;
    run_and_check("conv stride2");
    // fully connected, 128 inputs
    cfg.ltype = LAYER_FC; cfg.fc_n = 128; cfg.ts_rows = 3; tstep = 2;
    run_and_check("fc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
