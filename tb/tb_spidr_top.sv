// tb_spidr_top -- end-to-end, self-checking test of the SpiDR core at its
// default (published) sizes: 9 compute units, 3 neuron units, 160x48 compute
// macros, 72x48 neuron macros, 640x56 IFmems. It is also the full-size
// testbench: the core is instantiated without parameter overrides.
//
// Everything goes through the host bus, as a system would use the core:
// for each layer the host writes the layer configuration, the weights of
// every compute unit (compute-macro rows 0..127), the input spikes of every
// timestep (IFmem), and the threshold and leak rows of the neuron macros,
// starts the layer, polls the status register until the layer is done, and
// reads back the output spike memories and the full membrane potentials.
// A reference model in this file (im2col, chain accumulation with
// two's-complement wrap at the Vmem width, IF/LIF neurons with hard or soft
// reset) predicts every output spike and every final Vmem word.
//
// The layers cover both operating modes, all three precisions, convolution
// (with and without zero padding, stride 1 and 2) and fully connected
// layers, IF and LIF neurons and hard and soft reset, at low and high input
// spike rates. Each mechanism of the core is counted while it happens, and a
// mechanism that never happened is a failure.
module tb_spidr_top;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        host_wr = 0, host_rd = 0;
  logic [15:0] host_addr = '0;
  logic [63:0] host_wdata = '0, host_rdata;
  logic        host_rvalid, layer_busy, layer_done;
  logic [N_CU-1:0] ev_wait, ev_stall, ev_switch, ev_tuple, ev_acc, cu_busy, cu_done;
  logic [N_NU-1:0] ev_neuron_op, ev_spike_row, nu_busy;
  logic [MAX_WORDS-1:0] ev_spike_vec [N_NU];

  spidr_top dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", m);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_wait = 0, n_stall = 0, n_switch = 0, n_tuple = 0, n_acc = 0;
  int n_nop_cycles = 0, n_spike_rows = 0, n_full_switch = 0, n_zero_skip = 0;
  int n_mode1 = 0, n_mode2 = 0, n_prec[3] = '{0, 0, 0}, n_conv = 0, n_fc = 0;
  int n_if = 0, n_lif = 0, n_hard = 0, n_soft = 0, n_pad = 0, n_stride2 = 0;
  int n_fire = 0, n_soft_fire = 0, n_leak = 0, n_layer_done = 0, n_cm_read = 0;

  always @(negedge clk) if (rst_n) begin
    n_wait   += $countones(ev_wait);
    n_stall  += $countones(ev_stall);
    n_switch += $countones(ev_switch);
    n_tuple  += $countones(ev_tuple);
    n_acc    += $countones(ev_acc);
    n_nop_cycles += $countones(ev_neuron_op);
    n_spike_rows += $countones(ev_spike_row);
  end
  for (genvar i = 0; i < N_CU; i++) begin : g_mon
    always @(negedge clk) if (rst_n) begin
      if (dut.g_cu[i].u_cu.u_s2a.u_ctl.go_odd && dut.g_cu[i].u_cu.u_s2a.u_ctl.odd_full)
        n_full_switch++;
      if (dut.g_cu[i].u_cu.u_s2a.u_det.state == 2'd2 &&
          dut.g_cu[i].u_cu.u_s2a.u_det.spad_rd_data == '0)
        n_zero_skip++;
    end
  end

  // ---------------- host bus ----------------
  function automatic logic [15:0] haddr(int unit, int space, int row);
    return {4'(unit), 2'(space), 10'(row)};
  endfunction

  task automatic hwr(logic [15:0] a, logic [63:0] d);
    @(negedge clk); host_wr = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_wr = 0;
  endtask

  task automatic hrd(logic [15:0] a, output logic [63:0] d);
    @(negedge clk); host_rd = 1; host_addr = a;
    @(negedge clk); host_rd = 0;
    chk(host_rvalid, "read data valid one cycle after the request");
    d = host_rdata;
  endtask

  // ---------------- layer description and reference ----------------
  layer_cfg_t cfg;
  int WB, VB, NW, T;
  logic [55:0] ifm [N_CU][640];
  row_t wrow [N_CU][128];
  int thr [N_NU][2][6], lk [N_NU][2][6];
  int part [N_NU][32][32][6];      // [nu][t][row][word]
  int full_exp [N_NU][32][6];
  bit spk_exp [N_NU][32][32][6];   // [nu][t][row][word]

  function automatic int wrapv(int v);
    int m = 1 << VB;
    v = v % m;
    if (v < 0) v += m;
    if (v >= m / 2) v -= m;
    return v;
  endfunction

  function automatic int wslot(int cu, int y, int j);
    int v = 0;
    for (int b = 0; b < WB; b++) v |= int'(wrow[cu][y][j * WB + b]) << b;
    if (v >= (1 << (WB - 1))) v -= (1 << WB);
    return v;
  endfunction

  function automatic bit in_spike(int cu, int t, int c, int h, int w);
    if (h < 0 || h >= int'(cfg.in_h) || w < 0 || w >= int'(cfg.in_w)) return 0;
    return ifm[cu][t * int'(cfg.ts_rows) + c * int'(cfg.in_h) + h][w];
  endfunction

  // nu index a compute unit's chain ends in
  function automatic int chain_nu(int cu);
    return (cfg.mode == MODE2) ? N_NU - 1 : cu / 3;
  endfunction

  function automatic bit nu_on(int j);
    return (cfg.mode == MODE1) || (j == N_NU - 1);
  endfunction

  task automatic reference();
    for (int j = 0; j < N_NU; j++)
      for (int t = 0; t < T; t++) for (int r = 0; r < 32; r++) for (int k = 0; k < 6; k++)
        part[j][t][r][k] = 0;
    for (int cu = 0; cu < N_CU; cu++) begin
      automatic int j = chain_nu(cu);
      for (int t = 0; t < T; t++) begin
        if (cfg.ltype == LAYER_CONV) begin
          for (int c = 0; c < int'(cfg.n_ch); c++)
            for (int r = 0; r < int'(cfg.kr); r++)
              for (int s = 0; s < int'(cfg.ks); s++)
                for (int x = 0; x < int'(cfg.n_out); x++) begin
                  automatic int y = (c * int'(cfg.kr) + r) * int'(cfg.ks) + s;
                  automatic int h = int'(cfg.out_row) * int'(cfg.stride) + r - int'(cfg.pad);
                  automatic int w = (int'(cfg.out_col0) + x) * int'(cfg.stride) + s - int'(cfg.pad);
                  if (h < 0 || w < 0 || h >= int'(cfg.in_h) || w >= int'(cfg.in_w)) n_pad++;
                  if (in_spike(cu, t, c, h, w))
                    for (int k = 0; k < NW; k++) begin
                      part[j][t][2*x+1][k] += wslot(cu, y, 2*k);
                      part[j][t][2*x][k]   += wslot(cu, y, 2*k+1);
                    end
                end
        end else begin
          for (int y = 0; y < int'(cfg.fc_n); y++)
            if (ifm[cu][t * int'(cfg.ts_rows) + y / 56][y % 56])
              for (int k = 0; k < NW; k++) begin
                part[j][t][1][k] += wslot(cu, y, 2*k);
                part[j][t][0][k] += wslot(cu, y, 2*k+1);
              end
        end
      end
    end
    for (int j = 0; j < N_NU; j++) begin
      for (int r = 0; r < 32; r++) for (int k = 0; k < 6; k++) full_exp[j][r][k] = 0;
      for (int t = 0; t < T; t++) begin
        for (int r = 0; r < 32; r++) for (int k = 0; k < NW; k++)
          full_exp[j][r][k] = wrapv(full_exp[j][r][k] + wrapv(part[j][t][r][k]));
        for (int r = 0; r < 32; r++) for (int k = 0; k < 6; k++) begin
          spk_exp[j][t][r][k] = 0;
          if (k < NW) begin
            automatic int v = full_exp[j][r][k];
            automatic int d = v - thr[j][r % 2][k];
            if (d >= 0) begin
              spk_exp[j][t][r][k] = 1;
              full_exp[j][r][k] = (cfg.nreset == RESET_SOFT) ? wrapv(d) : 0;
              if (nu_on(j)) begin
                n_fire++;
                if (cfg.nreset == RESET_SOFT) n_soft_fire++;
              end
            end else if (cfg.nmodel == NEURON_LIF) begin
              full_exp[j][r][k] = wrapv(v - lk[j][r % 2][k]);
              if (nu_on(j)) n_leak++;
            end
          end
        end
      end
    end
  endtask

  // ---------------- one layer ----------------
  task automatic run_layer(layer_cfg_t c, int rate_pct);
    logic [63:0] d;
    logic [127:0] raw;
    int guard;
    cfg = c;
    WB = wbits(cfg.prec); VB = vbits(cfg.prec); NW = nwords(cfg.prec); T = int'(cfg.timesteps);
    if (cfg.mode == MODE1) n_mode1++; else n_mode2++;
    n_prec[int'(cfg.prec)]++;
    if (cfg.ltype == LAYER_CONV) n_conv++; else n_fc++;
    if (cfg.nmodel == NEURON_IF) n_if++; else n_lif++;
    if (cfg.nreset == RESET_HARD) n_hard++; else n_soft++;
    if (cfg.stride == 2'd2) n_stride2++;

    // configuration registers
    raw = 128'(cfg);
    hwr(haddr(15, 0, 0), raw[63:0]);
    hwr(haddr(15, 0, 1), raw[127:64]);
    hrd(haddr(15, 0, 0), d);
    chk(d == raw[63:0], "configuration register read back");

    // weights and input spikes of every compute unit
    for (int cu = 0; cu < N_CU; cu++) begin
      for (int y = 0; y < 128; y++) begin
        automatic row_t r;
        for (int b = 0; b < CM_COLS; b++) r[b] = 1'($urandom);
        wrow[cu][y] = r;
        hwr(haddr(cu, 1, y), 64'(r));
      end
      for (int a = 0; a < T * int'(cfg.ts_rows); a++) begin
        automatic logic [55:0] v;
        for (int b = 0; b < 56; b++) v[b] = ($urandom_range(0, 99) < rate_pct);
        ifm[cu][a] = v;
        hwr(haddr(cu, 0, a), 64'(v));
      end
    end
    // a weight row read back through the host port
    begin
      automatic int cu = $urandom_range(0, N_CU - 1);
      automatic int y = $urandom_range(0, 127);
      hrd(haddr(cu, 1, y), d);
      chk(d[CM_COLS-1:0] == wrow[cu][y], "compute-macro row read back");
      n_cm_read++;
    end
    // thresholds and leaks of the active neuron units
    for (int j = 0; j < N_NU; j++) if (nu_on(j)) begin
      for (int o = 0; o < 2; o++) begin
        automatic row_t tr = '0, lr = '0;
        for (int k = 0; k < 6; k++) begin
          thr[j][o][k] = $urandom_range(1, 1 << (VB - 3));
          lk[j][o][k]  = $urandom_range(0, 3);
          if (k < NW) begin
            tr = put_word(tr, cfg.prec, o[0], k, 16'(thr[j][o][k]));
            lr = put_word(lr, cfg.prec, o[0], k, 16'(lk[j][o][k]));
          end
        end
        hwr(haddr(9 + j, 0, o ? NM_THR_ODD : NM_THR_EVEN), 64'(tr));
        hwr(haddr(9 + j, 0, o ? NM_LK_ODD : NM_LK_EVEN), 64'(lr));
      end
    end
    reference();

    // run
    hwr(haddr(15, 0, 2), 64'd0);
    guard = 0;
    do begin
      repeat (50) @(negedge clk);
      hrd(haddr(15, 0, 3), d);
      guard++;
    end while (d[0] != 1'b1 && guard < 5000);
    chk(d[1:0] == 2'b01, "layer done and not busy");
    if (d[0]) n_layer_done++;

    // outputs
    for (int j = 0; j < N_NU; j++) if (nu_on(j)) begin
      for (int t = 0; t < T && t < 8; t++)
        for (int r = 0; r < 32; r++) begin
          automatic logic [7:0] e = '0;
          for (int k = 0; k < 6; k++) e[k] = spk_exp[j][t][r][k];
          hrd(haddr(9 + j, 1, t * 32 + r), d);
          chk(d[7:0] == e, $sformatf("nu%0d t%0d row %0d spikes %b exp %b", j, t, r, d[7:0], e));
        end
      for (int r = 0; r < 32; r++) begin
        hrd(haddr(9 + j, 0, NM_FULL0 + r), d);
        for (int k = 0; k < NW; k++)
          chk(int'(get_word(d[CM_COLS-1:0], cfg.prec, r[0], k)) == full_exp[j][r][k],
              $sformatf("nu%0d full Vmem row %0d word %0d got %0d exp %0d", j, r, k,
                        get_word(d[CM_COLS-1:0], cfg.prec, r[0], k), full_exp[j][r][k]));
      end
    end
  endtask

  function automatic layer_cfg_t conv(prec_e p, mode_e m, nmodel_e nm, nreset_e nr, int t,
                                      int nch, int k, int stride, int pad, int in_h, int in_w,
                                      int out_row, int out_col0, int n_out);
    layer_cfg_t c = '0;
    c.ltype = LAYER_CONV; c.prec = p; c.mode = m; c.nmodel = nm; c.nreset = nr;
    c.timesteps = 5'(t); c.n_ch = 4'(nch); c.kr = 3'(k); c.ks = 3'(k);
    c.stride = 2'(stride); c.pad = 2'(pad); c.in_h = 7'(in_h); c.in_w = 6'(in_w);
    c.out_row = 6'(out_row); c.out_col0 = 6'(out_col0); c.n_out = 5'(n_out);
    c.ts_rows = 10'(nch * in_h);
    return c;
  endfunction

  function automatic layer_cfg_t fc(prec_e p, mode_e m, nmodel_e nm, nreset_e nr, int t, int n);
    layer_cfg_t c = '0;
    c.ltype = LAYER_FC; c.prec = p; c.mode = m; c.nmodel = nm; c.nreset = nr;
    c.timesteps = 5'(t); c.fc_n = 8'(n); c.n_out = 5'd1;
    c.ts_rows = 10'((n + 55) / 56);
    return c;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // mode 1, 4 bit, 3x3 conv with zero padding, IF, hard reset
    run_layer(conv(PREC_4, MODE1, NEURON_IF, RESET_HARD, 3, 3, 3, 1, 1, 6, 16, 0, 0, 16), 30);
    // mode 1, 6 bit, 14 channels (126 rows), dense input, LIF, soft reset
    run_layer(conv(PREC_6, MODE1, NEURON_LIF, RESET_SOFT, 2, 14, 3, 1, 0, 3, 18, 0, 0, 16), 90);
    // mode 2, 8 bit, 2x2 kernel with stride 2 and padding, LIF, hard reset
    run_layer(conv(PREC_8, MODE2, NEURON_LIF, RESET_HARD, 2, 4, 2, 2, 1, 8, 30, 2, 0, 16), 25);
    // mode 2, 4 bit, fully connected (9 x 100 inputs), IF, soft reset
    run_layer(fc(PREC_4, MODE2, NEURON_IF, RESET_SOFT, 3, 100), 40);
    // mode 1, 8 bit, fully connected, sparse input, LIF, soft reset
    run_layer(fc(PREC_8, MODE1, NEURON_LIF, RESET_SOFT, 2, 128), 5);

    $display("mechanisms: mode1=%0d mode2=%0d prec4=%0d prec6=%0d prec8=%0d conv=%0d fc=%0d",
             n_mode1, n_mode2, n_prec[0], n_prec[1], n_prec[2], n_conv, n_fc);
    $display("  IF=%0d LIF=%0d hard=%0d soft=%0d padding=%0d stride2=%0d layers_done=%0d cm_reads=%0d",
             n_if, n_lif, n_hard, n_soft, n_pad, n_stride2, n_layer_done, n_cm_read);
    $display("  waits=%0d hazard_stalls=%0d even_odd_switches=%0d fifo_full_switches=%0d zero_row_skips=%0d",
             n_wait, n_stall, n_switch, n_full_switch, n_zero_skip);
    $display("  tuples=%0d accumulations=%0d neuron_op_cycles=%0d spike_rows=%0d fires=%0d soft_fires=%0d leaks=%0d",
             n_tuple, n_acc, n_nop_cycles, n_spike_rows, n_fire, n_soft_fire, n_leak);
    chk(n_mode1 > 0 && n_mode2 > 0, "both operating modes used");
    chk(n_prec[0] > 0 && n_prec[1] > 0 && n_prec[2] > 0, "all precisions used");
    chk(n_conv > 0 && n_fc > 0, "conv and FC layers");
    chk(n_if > 0 && n_lif > 0 && n_hard > 0 && n_soft > 0, "neuron models and resets");
    chk(n_pad > 0, "zero padding happened");
    chk(n_stride2 > 0, "stride 2 happened");
    chk(n_layer_done == 5, "all layers finished");
    chk(n_cm_read > 0, "compute-macro host reads");
    chk(n_wait > 0, "handshake waits happened");
    chk(n_stall > 0, "hazard stalls happened");
    chk(n_switch > 0, "even/odd switches happened");
    chk(n_full_switch > 0, "switches on a full odd FIFO happened");
    chk(n_zero_skip > 0, "zero rows skipped");
    chk(n_tuple > 0 && n_acc == 2 * n_tuple, "two accumulations per spike");
    chk(n_nop_cycles > 0 && n_nop_cycles % 66 == 0, "neuron operations of 66 cycles");
    chk(n_spike_rows > 0, "output spike rows written");
    chk(n_fire > 0 && n_soft_fire > 0 && n_leak > 0, "fires, soft resets and leaks happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
