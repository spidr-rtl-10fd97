// tb_compute_unit -- self-checking test of one compute unit end to end:
// IFmem -> input loader (im2col) -> IFspad -> S2A -> compute macro, and the
// per-timestep Reset/Receive, Compute and Transfer stages.
// The host loads random input spikes for two timesteps and random 4-bit
// weights; the unit runs a 3x3 convolution tile (3 channels, stride 1, zero
// padding 1) first as the head of a chain (partial Vmems reset) and then as
// a middle unit (partial Vmems received from a random upstream source). The
// 32 rows it transmits per timestep are compared with a reference computed
// here from the inputs, the weights and the received rows. The downstream
// side withholds ready at random, so the unit must wait; the number of
// accumulations must be twice the number of input spikes.
module tb_compute_unit;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic start = 0, is_head = 1;
  logic host_ifm_wr = 0, host_cm_wr = 0, host_cm_rd = 0;
  logic [9:0] host_row = 0;
  logic [55:0] host_wdata = '0;
  row_t host_cm_rdata, rx_data = '0, tx_data;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 0;
  logic busy, done, ev_wait, ev_stall, ev_switch, ev_tuple, ev_acc;
  int checks = 0, failures = 0;

  compute_unit dut (.*);

  localparam int WB = 4, VB = 7, NW = 6, T = 2;
  function automatic int col_of(int odd, int k, int b);
    return ((odd != 0 ? 2*k*WB : (2*k+1)*WB) + b) % 48;
  endfunction
  function automatic int wrapv(int v);
    int m = 1 << VB;
    v = v % m; if (v < 0) v += m;
    if (v >= m/2) v -= m;
    return v;
  endfunction
  function automatic int word_of(row_t r, int odd, int k);
    int v = 0;
    for (int b = 0; b < VB; b++) v |= int'(r[col_of(odd, k, b)]) << b;
    return wrapv(v);
  endfunction

  logic [55:0] ifm [640];
  int W [128][12];
  int RX [T][32][6];
  int nacc = 0, nwait = 0, nspikes_total = 0;

  always @(negedge clk) begin
    if (ev_acc) nacc++;
    if (ev_wait) nwait++;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic bit in_spike(int t, int c, int h, int w);
    if (h < 0 || h >= int'(cfg.in_h) || w < 0 || w >= int'(cfg.in_w)) return 0;
    return ifm[t * int'(cfg.ts_rows) + c * int'(cfg.in_h) + h][w];
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // downstream: random ready, compare rows
  int exp_v [T][32][6];
  int tx_t = 0, tx_r = 0;
  always @(negedge clk) tx_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (tx_valid && tx_ready) begin
    for (int k = 0; k < NW; k++)
      chk(word_of(tx_data, tx_r % 2, k) == exp_v[tx_t][tx_r][k],
          $sformatf("t%0d row %0d word %0d got %0d exp %0d", tx_t, tx_r, k,
                    word_of(tx_data, tx_r % 2, k), exp_v[tx_t][tx_r][k]));
    tx_r++;
    if (tx_r == 32) begin tx_r = 0; tx_t++; end
  end

  task automatic run(bit head);
    is_head = head;
    nacc = 0; nspikes_total = 0; tx_t = 0; tx_r = 0;
    // reference
    for (int t = 0; t < T; t++) begin
      for (int r = 0; r < 32; r++) for (int k = 0; k < NW; k++) begin
        RX[t][r][k] = head ? 0 : $urandom_range(0, 40) - 20;
        exp_v[t][r][k] = RX[t][r][k];
      end
      for (int c = 0; c < int'(cfg.n_ch); c++) for (int r = 0; r < 3; r++) for (int s = 0; s < 3; s++)
        for (int x = 0; x < int'(cfg.n_out); x++)
          if (in_spike(t, c, int'(cfg.out_row) + r - 1, int'(cfg.out_col0) + x + s - 1)) begin
            automatic int y = c * 9 + r * 3 + s;
            nspikes_total++;
            for (int k = 0; k < NW; k++) begin
              exp_v[t][2*x+1][k] = wrapv(exp_v[t][2*x+1][k] + W[y][2*k]);
              exp_v[t][2*x][k]   = wrapv(exp_v[t][2*x][k] + W[y][2*k+1]);
            end
          end
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    if (!head) fork
      for (int t = 0; t < T; t++) for (int r = 0; r < 32; r++) begin
        automatic row_t d = '0;
        for (int k = 0; k < NW; k++) for (int b = 0; b < VB; b++) d[col_of(r % 2, k, b)] = RX[t][r][k][b];
        while ($urandom_range(0, 1) == 0) @(negedge clk);
        rx_valid = 1; rx_data = d;
        while (!rx_ready) @(negedge clk);
        @(negedge clk); rx_valid = 0;
      end
    join_none
    while (!done) @(negedge clk);
    chk(tx_t == T && tx_r == 0, "all rows transmitted");
    chk(nacc == 2 * nspikes_total, $sformatf("%0d accumulations for %0d spikes", nacc, nspikes_total));
  endtask

  initial begin
    cfg = '0;
    cfg.ltype = LAYER_CONV; cfg.prec = PREC_4; cfg.timesteps = 5'(T);
    cfg.n_ch = 3; cfg.kr = 3; cfg.ks = 3; cfg.stride = 1; cfg.pad = 1;
    cfg.in_h = 6; cfg.in_w = 16; cfg.out_row = 2; cfg.out_col0 = 0; cfg.n_out = 16; cfg.ts_rows = 18;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 640; i++) begin
      automatic logic [55:0] v = '0;
      for (int b = 0; b < 56; b++) v[b] = ($urandom_range(0, 99) < 25);
      ifm[i] = v;
      @(negedge clk); host_ifm_wr = 1; host_row = 10'(i); host_wdata = v;
    end
    @(negedge clk); host_ifm_wr = 0;
    for (int y = 0; y < 128; y++) begin
      automatic row_t r = '0;
      for (int j = 0; j < 12; j++) begin
        automatic int w = $urandom_range(0, 15);
        for (int b = 0; b < 4; b++) r[j*4 + b] = w[b];
        W[y][j] = (w >= 8) ? w - 16 : w;
      end
      @(negedge clk); host_cm_wr = 1; host_row = 10'(y); host_wdata = 56'(r);
    end
    @(negedge clk); host_cm_wr = 0;
    // weights read back through the host port
    @(negedge clk); host_cm_rd = 1; host_row = 10'd5;
    @(negedge clk); host_cm_rd = 0;
    chk(word_of(host_cm_rdata, 1, 0) == wrapv(W[5][0] & 15 | ((W[5][1] & 7) << 4)), "host read of a weight row");
    run(1);
    run(0);
    chk(nwait > 0, "unit waited for its neighbours");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
