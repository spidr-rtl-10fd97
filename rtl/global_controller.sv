// global_controller -- configuration, host access and layer control of the
// core.
//
// The paper shows a global controller next to the unit array without
// describing it; this block is the simplest controller that lets a host use
// the core. It holds the layer configuration (layer_cfg_t), decodes host
// accesses to the memories of the units, starts a layer, marks which compute
// units head a chain and which neuron units are used in the selected
// operating mode (mode 1: three chains CU1-3, CU4-6, CU7-9 ending in NU1,
// NU2, NU3; mode 2: one chain CU1..CU9 ending in NU3), and reports when all
// active neuron units have finished the layer.
//
// Host address map (addr[15:0]):
//   [15:12] unit: 0..8 compute unit 1..9, 9..11 neuron unit 1..3, 15 registers
//   [11:10] space: CU 0 = IFmem, 1 = compute macro; NU 0 = neuron macro,
//           1 = output spike memory
//   [9:0]   row
//   registers: row 0 = cfg[63:0], row 1 = cfg[72:64], row 2 (write) = start,
//              row 3 (read) = {.., busy, done}
// Reads return data on host_rdata with host_rvalid one cycle after host_rd.
module global_controller
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
  // to the units
  output layer_cfg_t  cfg,
  output logic        start,
  output logic [N_CU-1:0] cu_head,
  output logic [N_NU-1:0] nu_active,
  output logic [9:0]  unit_row,
  output logic [N_CU-1:0] cu_ifm_wr,
  output logic [N_CU-1:0] cu_cm_wr,
  output logic [N_CU-1:0] cu_cm_rd,
  output logic [N_NU-1:0] nu_nm_wr,
  output logic [N_NU-1:0] nu_nm_rd,
  output logic [N_NU-1:0] nu_osm_rd,
  input  row_t        cu_cm_rdata [N_CU],
  input  row_t        nu_nm_rdata [N_NU],
  input  logic [7:0]  nu_osm_rdata [N_NU],
  input  logic [N_NU-1:0] nu_done,
  output logic        layer_busy,
  output logic        layer_done
);
  logic [3:0] unit;
  logic [1:0] space;
  assign unit     = host_addr[15:12];
  assign space    = host_addr[11:10];
  assign unit_row = host_addr[9:0];

  // index of the addressed neuron unit (meaningful for units 9..11)
  logic [1:0] nu_idx, r_nu_idx;
  assign nu_idx = 2'(unit - 4'(N_CU));

  logic [127:0] cfg_raw;
  assign cfg = layer_cfg_t'(cfg_raw[CFG_BITS-1:0]);

  always_comb begin
    cu_ifm_wr = '0; cu_cm_wr = '0; cu_cm_rd = '0;
    nu_nm_wr = '0; nu_nm_rd = '0; nu_osm_rd = '0;
    if (unit < 4'(N_CU)) begin
      cu_ifm_wr[unit] = host_wr && space == 2'd0;
      cu_cm_wr[unit]  = host_wr && space == 2'd1;
      cu_cm_rd[unit]  = host_rd && space == 2'd1;
    end else if (unit < 4'(N_CU + N_NU)) begin
      nu_nm_wr[nu_idx]  = host_wr && space == 2'd0;
      nu_nm_rd[nu_idx]  = host_rd && space == 2'd0;
      nu_osm_rd[nu_idx] = host_rd && space == 2'd1;
    end
  end

  always_comb begin
    cu_head = '0;
    if (cfg.mode == MODE1) begin
      for (int i = 0; i < N_CU; i += 3) cu_head[i] = 1'b1;
      nu_active = '1;
    end else begin
      cu_head[0] = 1'b1;
      nu_active = '0;
      nu_active[N_NU-1] = 1'b1;
    end
  end

  logic [N_NU-1:0] fin;
  logic [3:0] r_unit;
  assign r_nu_idx = 2'(r_unit - 4'(N_CU));
  logic [1:0] r_space;
  logic       r_reg;
  logic [9:0] r_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_raw <= '0; start <= 1'b0; fin <= '0; layer_busy <= 1'b0; layer_done <= 1'b0;
      host_rvalid <= 1'b0; r_unit <= '0; r_space <= '0; r_reg <= 1'b0; r_row <= '0;
    end else begin
      start <= 1'b0;
      if (host_wr && unit == 4'hF && !layer_busy) begin
        case (host_addr[9:0])
          10'd0: cfg_raw[63:0]   <= host_wdata;
          10'd1: cfg_raw[127:64] <= host_wdata;
          10'd2: begin start <= 1'b1; layer_busy <= 1'b1; layer_done <= 1'b0; fin <= '0; end
          default: ;
        endcase
      end
      if (layer_busy) begin
        fin <= fin | nu_done;
        if (((fin | nu_done) & nu_active) == nu_active) begin
          layer_busy <= 1'b0; layer_done <= 1'b1;
        end
      end
      host_rvalid <= host_rd;
      r_unit  <= unit;
      r_space <= space;
      r_reg   <= (unit == 4'hF);
      r_row   <= host_addr[9:0];
    end
  end

  always_comb begin
    host_rdata = '0;
    if (r_reg) begin
      case (r_row)
        10'd0: host_rdata = cfg_raw[63:0];
        10'd1: host_rdata = cfg_raw[127:64];
        10'd3: host_rdata = {62'b0, layer_busy, layer_done};
        default: ;
      endcase
    end else if (r_unit < 4'(N_CU)) begin
      host_rdata = 64'(cu_cm_rdata[r_unit]);
    end else if (r_unit < 4'(N_CU + N_NU)) begin
      if (r_space == 2'd0) host_rdata = 64'(nu_nm_rdata[r_nu_idx]);
      else                 host_rdata = 64'(nu_osm_rdata[r_nu_idx]);
    end
  end
endmodule
