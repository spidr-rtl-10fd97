// neuron_unit -- one neuron unit (NU): neuron SRAM controller, neuron macro
// and output spike memory.
//
// It receives the partial Vmems of one timestep from the last compute unit
// of its chain, adds them to the full Vmems, compares with the thresholds,
// resets or leaks, and records the spikes. Outside a layer the host can
// write any neuron-macro row (thresholds and leaks) and read neuron-macro
// rows and output spike entries; both reads have one cycle of latency. Host
// writes while the unit is busy are ignored.
// The three parts and their roles follow the published core; the host port
// and the output spike memory's size are this design's. The unit uses only
// the neuron fields and T of the layer configuration; lint lists the other
// fields as unused bits of cfg, which is expected for a shared struct.
// Lint: rst_n is also read by the `disable iff` of the assertions (a use for
// checking only), which Verilator's -Wall reports as SYNCASYNCNET; the
// circuit itself uses rst_n only as an asynchronous reset.
module neuron_unit
  import spidr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  layer_cfg_t cfg,
  input  logic       start,
  input  logic       rx_valid,
  input  row_t       rx_data,
  output logic       rx_ready,
  input  logic       host_nm_wr,
  input  logic [6:0] host_row,
  input  row_t       host_wdata,
  input  logic       host_nm_rd,
  output row_t       host_nm_rdata,
  input  logic       host_osm_rd,
  input  logic [7:0] host_osm_addr,
  output logic [7:0] host_osm_rdata,
  output logic       busy,
  output logic       done,
  output logic       in_neuron_op,
  output logic [MAX_WORDS-1:0] spk_vec,
  output logic       spk_valid
);
  logic op_valid, op_cmp, nm_wr_en, c_wr_en;
  logic [4:0] op_row, spk_row;
  logic [6:0] nm_wr_row, c_wr_row;
  row_t nm_wr_data, c_wr_data;
  logic osm_wr_en;
  logic [7:0] osm_wr_addr, osm_wr_data;
  logic nm_busy;

  neuron_controller u_ctl (
    .clk, .rst_n, .start, .timesteps(cfg.timesteps),
    .rx_valid, .rx_data, .rx_ready,
    .op_valid, .op_cmp, .op_row,
    .nm_wr_en(c_wr_en), .nm_wr_row(c_wr_row), .nm_wr_data(c_wr_data),
    .spk_valid, .spk_row, .spk_vec,
    .osm_wr_en, .osm_wr_addr, .osm_wr_data,
    .busy, .done, .in_neuron_op
  );

  always_comb begin
    nm_wr_en   = c_wr_en;
    nm_wr_row  = c_wr_row;
    nm_wr_data = c_wr_data;
    if (!busy && host_nm_wr) begin
      nm_wr_en = 1'b1; nm_wr_row = host_row; nm_wr_data = host_wdata;
    end
  end

  neuron_macro u_nm (
    .clk, .rst_n, .prec(cfg.prec), .nmodel(cfg.nmodel), .nreset(cfg.nreset),
    .op_valid, .op_cmp, .op_row,
    .wr_en(nm_wr_en), .wr_row(nm_wr_row), .wr_data(nm_wr_data),
    .rd_en(host_nm_rd), .rd_row(host_row), .rd_data(host_nm_rdata),
    .spk_valid, .spk_row, .spk_vec, .busy(nm_busy)
  );

  output_spike_mem u_osm (
    .clk, .wr_en(osm_wr_en), .wr_addr(osm_wr_addr), .wr_data(osm_wr_data),
    .rd_en(host_osm_rd), .rd_addr(host_osm_addr), .rd_data(host_osm_rdata)
  );

  // a host write reaches the macro only while no operation is in flight
  a_host_write_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (host_nm_wr && !busy) |-> !nm_busy);
endmodule
