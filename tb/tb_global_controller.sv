// tb_global_controller -- self-checking test of the global controller:
// configuration registers (write and read back), decoding of host accesses
// to every unit and space, read-data routing with one cycle of latency,
// chain heads and active neuron units in both operating modes, the start
// pulse, and layer completion (busy until every active neuron unit has
// reported done, ignoring inactive ones). Random addresses and data.
module tb_global_controller;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        host_wr = 0, host_rd = 0;
  logic [15:0] host_addr = '0;
  logic [63:0] host_wdata = '0, host_rdata;
  logic        host_rvalid;
  layer_cfg_t  cfg;
  logic        start;
  logic [N_CU-1:0] cu_head, cu_ifm_wr, cu_cm_wr, cu_cm_rd;
  logic [N_NU-1:0] nu_active, nu_nm_wr, nu_nm_rd, nu_osm_rd;
  logic [N_NU-1:0] nu_done = '0;
  logic [9:0]  unit_row;
  row_t        cu_cm_rdata [N_CU];
  row_t        nu_nm_rdata [N_NU];
  logic [7:0]  nu_osm_rdata [N_NU];
  logic        layer_busy, layer_done;

  global_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N_CU; i++) cu_cm_rdata[i] = {16'(i), 32'hC0DE_0000};
    for (int j = 0; j < N_NU; j++) begin
      nu_nm_rdata[j]  = {16'(j), 32'hAAAA_0000};
      nu_osm_rdata[j] = 8'(8'h50 + j);
    end
  end

  task automatic set_cfg(logic [127:0] raw);
    @(negedge clk); host_wr = 1; host_addr = 16'hF000; host_wdata = raw[63:0];
    @(negedge clk); host_addr = 16'hF001; host_wdata = raw[127:64];
    @(negedge clk); host_wr = 0;
  endtask

  task automatic rd(logic [15:0] a, output logic [63:0] d);
    @(negedge clk); host_rd = 1; host_addr = a;
    @(negedge clk); host_rd = 0;
    chk(host_rvalid, "rvalid one cycle after the read");
    d = host_rdata;
  endtask

  initial begin
    logic [63:0] d;
    logic [127:0] raw;
    layer_cfg_t c;
    repeat (2) @(negedge clk); rst_n = 1;

    // configuration registers
    for (int n = 0; n < 20; n++) begin
      raw = {$urandom, $urandom, $urandom, $urandom};
      raw[127:CFG_BITS] = '0;
      set_cfg(raw);
      chk(cfg == layer_cfg_t'(raw[CFG_BITS-1:0]), "cfg output");
      rd(16'hF000, d); chk(d == raw[63:0], "cfg low read back");
      rd(16'hF001, d); chk(d == raw[127:64], "cfg high read back");
    end

    // access decoding (combinational, checked in the request cycle)
    for (int n = 0; n < 2000; n++) begin
      automatic int unit = $urandom_range(0, 11);
      automatic int space = $urandom_range(0, 1);
      automatic int row = $urandom_range(0, 1023);
      automatic bit wr = 1'($urandom);
      @(negedge clk);
      host_wr = wr; host_rd = !wr; host_addr = {4'(unit), 2'(space), 10'(row)};
      #1;
      chk(unit_row == 10'(row), "row field");
      for (int i = 0; i < N_CU; i++) begin
        chk(cu_ifm_wr[i] == (wr && unit == i && space == 0), "IFmem write strobe");
        chk(cu_cm_wr[i]  == (wr && unit == i && space == 1), "CM write strobe");
        chk(cu_cm_rd[i]  == (!wr && unit == i && space == 1), "CM read strobe");
      end
      for (int j = 0; j < N_NU; j++) begin
        chk(nu_nm_wr[j]  == (wr && unit == N_CU + j && space == 0), "NM write strobe");
        chk(nu_nm_rd[j]  == (!wr && unit == N_CU + j && space == 0), "NM read strobe");
        chk(nu_osm_rd[j] == (!wr && unit == N_CU + j && space == 1), "OSM read strobe");
      end
      @(negedge clk);
      host_wr = 0; host_rd = 0;
      if (!wr) begin
        chk(host_rvalid, "rvalid");
        if (unit < N_CU)
          chk(host_rdata == 64'(cu_cm_rdata[unit]), "CM read data routed");
        else if (space == 0)
          chk(host_rdata == 64'(nu_nm_rdata[unit - N_CU]), "NM read data routed");
        else
          chk(host_rdata == 64'(nu_osm_rdata[unit - N_CU]), "OSM read data routed");
      end else chk(!host_rvalid, "no rvalid after a write");
    end

    // modes and layer control
    for (int n = 0; n < 40; n++) begin
      automatic int lat = $urandom_range(1, 30);
      automatic bit started = 0;
      c = '0;
      c.mode = mode_e'($urandom_range(0, 1));
      set_cfg(128'(c));
      #1;
      if (c.mode == MODE1) begin
        chk(cu_head == 9'b001_001_001 && nu_active == 3'b111, "mode 1 heads and neuron units");
      end else begin
        chk(cu_head == 9'b000_000_001 && nu_active == 3'b100, "mode 2 heads and neuron units");
      end
      @(negedge clk); host_wr = 1; host_addr = 16'hF002;
      @(posedge clk); #1 host_wr = 0; started = start;
      chk(started, "start pulse");
      @(posedge clk); #1 chk(!start, "start is one cycle");
      @(negedge clk);
      chk(layer_busy && !layer_done, "busy after start");
      // inactive neuron units reporting done must not end the layer
      if (c.mode == MODE2) begin
        @(negedge clk); nu_done = 3'b011;
        @(negedge clk); nu_done = '0;
        repeat (2) @(negedge clk);
        chk(layer_busy, "inactive units ignored");
      end
      for (int j = 0; j < N_NU; j++) if (nu_active[j]) begin
        repeat ($urandom_range(1, lat)) @(negedge clk);
        chk(layer_busy, "busy until all active units are done");
        nu_done[j] = 1;
        @(negedge clk); nu_done[j] = 0;
      end
      @(negedge clk);
      chk(!layer_busy && layer_done, "layer done");
      rd(16'hF003, d); chk(d[1:0] == 2'b01, "status register");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
