// tb_neuron_unit -- self-checking test of a neuron unit (controller, neuron
// macro, output spike memory). The host loads thresholds and leaks, starts a
// layer of T = 4 timesteps (6/11-bit precision, LIF neurons with soft
// reset), and a source streams random partial Vmems for each timestep. After
// the layer the output spike memory and the full Vmems are read back through
// the host port and compared with a reference neuron model. The time from
// the last received row of a timestep to the end of its neuron operation is
// checked against the 66-cycle figure.
module tb_neuron_unit;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic start = 0, rx_valid = 0, rx_ready;
  row_t rx_data = '0, host_wdata = '0, host_nm_rdata;
  logic host_nm_wr = 0, host_nm_rd = 0, host_osm_rd = 0;
  logic [6:0] host_row = 0;
  logic [7:0] host_osm_addr = 0, host_osm_rdata;
  logic busy, done, in_neuron_op, spk_valid;
  logic [5:0] spk_vec;
  int checks = 0, failures = 0;

  neuron_unit dut (.*);

  localparam int WB = 6, VB = 11, NW = 4, T = 4;
  function automatic int col_of(int odd, int k, int b);
    return ((odd ? 2*k*WB : (2*k+1)*WB) + b) % 48;
  endfunction
  function automatic int wrapv(int v);
    int m = 1 << VB;
    v = v % m; if (v < 0) v += m;
    if (v >= m/2) v -= m;
    return v;
  endfunction
  function automatic row_t pack(int odd, int vals[6]);
    row_t r = '0;
    for (int k = 0; k < NW; k++) for (int b = 0; b < VB; b++) r[col_of(odd, k, b)] = vals[k][b];
    return r;
  endfunction

  int TH [2][6], LK [2][6], F [32][6];
  logic [5:0] ES [T][32];

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nop = 0, nop_len = 0;
  always @(negedge clk) begin
    if (in_neuron_op) nop++;
    else if (nop != 0) begin nop_len = nop; nop = 0; end
  end

  initial begin
    cfg = '0; cfg.prec = PREC_6; cfg.nmodel = NEURON_LIF; cfg.nreset = RESET_SOFT; cfg.timesteps = 5'(T);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int o = 0; o < 2; o++) begin
      automatic int tv[6], lv[6];
      for (int k = 0; k < 6; k++) begin
        TH[o][k] = $urandom_range(20, 200); LK[o][k] = $urandom_range(1, 5);
        tv[k] = TH[o][k]; lv[k] = LK[o][k];
      end
      @(negedge clk); host_nm_wr = 1; host_row = o ? 7'd64 : 7'd65; host_wdata = pack(o, tv);
      @(negedge clk); host_row = o ? 7'd66 : 7'd67; host_wdata = pack(o, lv);
    end
    @(negedge clk); host_nm_wr = 0;
    foreach (F[r, k]) F[r][k] = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int t = 0; t < T; t++) begin
      for (int r = 0; r < 32; r++) begin
        automatic int pv[6];
        for (int k = 0; k < 6; k++) pv[k] = $urandom_range(0, 120) - 40;
        // reference neuron
        ES[t][r] = '0;
        for (int k = 0; k < NW; k++) begin
          automatic int v = wrapv(F[r][k] + pv[k]);
          if (v >= TH[r % 2][k]) begin ES[t][r][k] = 1'b1; v = wrapv(v - TH[r % 2][k]); end
          else v = wrapv(v - LK[r % 2][k]);
          F[r][k] = v;
        end
        rx_valid = 1; rx_data = pack(r % 2, pv);
        while (!rx_ready) @(negedge clk);
        @(negedge clk);
      end
      rx_valid = 0;
    end
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(nop_len == 66, $sformatf("neuron operation %0d cycles", nop_len));
    for (int t = 0; t < T; t++) for (int r = 0; r < 32; r++) begin
      @(negedge clk); host_osm_rd = 1; host_osm_addr = {3'(t), 5'(r)};
      @(negedge clk); host_osm_rd = 0;
      chk(host_osm_rdata == {2'b0, ES[t][r]}, $sformatf("t%0d row %0d spikes %b exp %b", t, r, host_osm_rdata, ES[t][r]));
    end
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); host_nm_rd = 1; host_row = 7'(32 + r);
      @(negedge clk); host_nm_rd = 0;
      for (int k = 0; k < NW; k++) begin
        automatic int got = 0;
        for (int b = 0; b < VB; b++) got |= int'(host_nm_rdata[col_of(r % 2, k, b)]) << b;
        chk(wrapv(got) == F[r][k], $sformatf("full Vmem row %0d word %0d", r, k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
