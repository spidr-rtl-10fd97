// spidr_top -- the SpiDR spiking-neural-network core: 9 compute units,
// 3 neuron units and a global controller.
//
// Compute units accumulate weights into partial membrane potentials (Vmems)
// in their compute macros, one accumulation per input spike; the partial
// Vmems of a timestep travel down a chain of compute units, each adding the
// contribution of its share of the input channels, and end in a neuron unit
// that adds them to the full Vmems and fires. The chains depend on the
// operating mode (published mapping):
//   mode 1 (fan-in up to 3 x 128 rows): CU1->CU2->CU3->NU1,
//          CU4->CU5->CU6->NU2, CU7->CU8->CU9->NU3 (three output-channel
//          groups in parallel);
//   mode 2 (fan-in up to 9 x 128 rows): CU1->..->CU3->CU4->..->CU9->NU3,
//          NU1 and NU2 idle.
// Units are indexed from 0 in the code (cu[0] is CU1).
//
// Ports: a simple synchronous host bus (see global_controller for the
// address map) and layer_busy/layer_done. Per-unit event strobes are brought
// out for observation (per-unit done and busy, waits for a neighbour, hazard stalls, even/odd
// switches, spikes found, accumulations, neuron operations, output spikes).
// Lint: rst_n is also read by the `disable iff` of the assertions (a use for
// checking only), which Verilator's -Wall reports as SYNCASYNCNET; the
// circuit itself uses rst_n only as an asynchronous reset.
module spidr_top
  import spidr_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_wr,
  input  logic        host_rd,
  input  logic [15:0] host_addr,
  input  logic [63:0] host_wdata,
  output logic [63:0] host_rdata,
  output logic        host_rvalid,
  output logic        layer_busy,
  output logic        layer_done,
  output logic [N_CU-1:0] ev_wait,
  output logic [N_CU-1:0] ev_stall,
  output logic [N_CU-1:0] ev_switch,
  output logic [N_CU-1:0] ev_tuple,
  output logic [N_CU-1:0] ev_acc,
  output logic [N_NU-1:0] ev_neuron_op,
  output logic [N_NU-1:0] ev_spike_row,
  output logic [MAX_WORDS-1:0] ev_spike_vec [N_NU],
  output logic [N_CU-1:0] cu_busy,
  output logic [N_CU-1:0] cu_done,
  output logic [N_NU-1:0] nu_busy
);
  layer_cfg_t cfg;
  logic start;
  logic [N_CU-1:0] cu_head, cu_ifm_wr, cu_cm_wr, cu_cm_rd;
  logic [N_NU-1:0] nu_active, nu_nm_wr, nu_nm_rd, nu_osm_rd, nu_done;
  logic [9:0] unit_row;
  row_t cu_cm_rdata [N_CU];
  row_t nu_nm_rdata [N_NU];
  logic [7:0] nu_osm_rdata [N_NU];

  logic [N_CU-1:0] cu_rx_valid, cu_rx_ready, cu_tx_valid, cu_tx_ready;
  row_t cu_rx_data [N_CU];
  row_t cu_tx_data [N_CU];
  logic [N_NU-1:0] nu_rx_valid, nu_rx_ready;
  row_t nu_rx_data [N_NU];

  global_controller u_gc (
    .clk, .rst_n, .host_wr, .host_rd, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .cfg, .start, .cu_head, .nu_active, .unit_row,
    .cu_ifm_wr, .cu_cm_wr, .cu_cm_rd, .nu_nm_wr, .nu_nm_rd, .nu_osm_rd,
    .cu_cm_rdata, .nu_nm_rdata, .nu_osm_rdata, .nu_done, .layer_busy, .layer_done
  );

  // ---------------- chaining (operating modes) ----------------
  always_comb begin
    for (int i = 0; i < N_CU; i++) begin
      cu_rx_valid[i] = 1'b0;
      cu_rx_data[i]  = '0;
      cu_tx_ready[i] = 1'b0;
    end
    for (int j = 0; j < N_NU; j++) begin
      nu_rx_valid[j] = 1'b0;
      nu_rx_data[j]  = '0;
    end
    for (int i = 0; i < N_CU; i++) begin
      if (i % 3 != 2 || (cfg.mode == MODE2 && i != N_CU - 1)) begin
        // to the next compute unit
        cu_rx_valid[i+1] = cu_tx_valid[i];
        cu_rx_data[i+1]  = cu_tx_data[i];
        cu_tx_ready[i]   = cu_rx_ready[i+1];
      end else begin
        // last unit of a chain: to its neuron unit
        nu_rx_valid[i/3] = cu_tx_valid[i];
        nu_rx_data[i/3]  = cu_tx_data[i];
        cu_tx_ready[i]   = nu_rx_ready[i/3];
      end
    end
  end

  for (genvar i = 0; i < N_CU; i++) begin : g_cu
    compute_unit u_cu (
      .clk, .rst_n, .cfg, .start, .is_head(cu_head[i]),
      .host_ifm_wr(cu_ifm_wr[i]), .host_cm_wr(cu_cm_wr[i]), .host_cm_rd(cu_cm_rd[i]),
      .host_row(unit_row), .host_wdata(host_wdata[IFMEM_W-1:0]), .host_cm_rdata(cu_cm_rdata[i]),
      .rx_valid(cu_rx_valid[i]), .rx_data(cu_rx_data[i]), .rx_ready(cu_rx_ready[i]),
      .tx_valid(cu_tx_valid[i]), .tx_data(cu_tx_data[i]), .tx_ready(cu_tx_ready[i]),
      .busy(cu_busy[i]), .done(cu_done[i]),
      .ev_wait(ev_wait[i]), .ev_stall(ev_stall[i]), .ev_switch(ev_switch[i]),
      .ev_tuple(ev_tuple[i]), .ev_acc(ev_acc[i])
    );
  end

  for (genvar j = 0; j < N_NU; j++) begin : g_nu
    neuron_unit u_nu (
      .clk, .rst_n, .cfg, .start(start && nu_active[j]),
      .rx_valid(nu_rx_valid[j]), .rx_data(nu_rx_data[j]), .rx_ready(nu_rx_ready[j]),
      .host_nm_wr(nu_nm_wr[j]), .host_row(unit_row[6:0]), .host_wdata(host_wdata[CM_COLS-1:0]),
      .host_nm_rd(nu_nm_rd[j]), .host_nm_rdata(nu_nm_rdata[j]),
      .host_osm_rd(nu_osm_rd[j]), .host_osm_addr(unit_row[7:0]), .host_osm_rdata(nu_osm_rdata[j]),
      .busy(nu_busy[j]), .done(nu_done[j]), .in_neuron_op(ev_neuron_op[j]),
      .spk_vec(ev_spike_vec[j]), .spk_valid(ev_spike_row[j])
    );
  end
endmodule
