// neuron_controller -- neuron SRAM controller of one neuron unit.
//
// Sequences a layer of T timesteps on the neuron macro:
//   INIT  clear the 32 full-Vmem rows (32 cycles, once per layer);
//   RECV  accept the 32 partial-Vmem rows of the timestep from the last
//         compute unit of its chain (valid/ready handshake, one row per
//         cycle) and write them into rows 0..31;
//   NEUR  the fixed-length neuron operation of the paper,
//         2*32 + 2 = 66 cycles: 32 accumulations (partial into full Vmem),
//         then 32 threshold comparisons, then 2 cycles to empty the
//         Read/Compute/Store pipeline; output spikes of each row are written
//         to the output spike memory at {timestep mod 8, row};
//   then the next timestep (RECV) or DONE.
// The order of the 64 operations (all accumulations before all comparisons)
// is this design's choice; it keeps the pipeline free of hazards.
// Timing: rx_ready is high only in RECV, so the upstream compute unit waits
// (the asynchronous handshake) while this unit is busy with a timestep.
module neuron_controller
  import spidr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [4:0] timesteps,
  // partial Vmem stream from the compute units
  input  logic       rx_valid,
  input  row_t       rx_data,
  output logic       rx_ready,
  // neuron macro
  output logic       op_valid,
  output logic       op_cmp,
  output logic [4:0] op_row,
  output logic       nm_wr_en,
  output logic [6:0] nm_wr_row,
  output row_t       nm_wr_data,
  input  logic       spk_valid,
  input  logic [4:0] spk_row,
  input  logic [MAX_WORDS-1:0] spk_vec,
  // output spike memory
  output logic       osm_wr_en,
  output logic [7:0] osm_wr_addr,
  output logic [7:0] osm_wr_data,
  // status
  output logic       busy,
  output logic       done,
  output logic       in_neuron_op
);
  typedef enum logic [2:0] {NC_IDLE, NC_INIT, NC_RECV, NC_NEUR, NC_DONE} nc_state_e;
  nc_state_e state;
  logic [6:0] cnt;
  logic [4:0] t;

  assign rx_ready     = (state == NC_RECV);
  assign in_neuron_op = (state == NC_NEUR);
  assign busy         = (state != NC_IDLE) && (state != NC_DONE);

  always_comb begin
    nm_wr_en   = 1'b0;
    nm_wr_row  = '0;
    nm_wr_data = '0;
    if (state == NC_INIT) begin
      nm_wr_en  = 1'b1;
      nm_wr_row = 7'(NM_FULL0) + cnt;
    end else if (state == NC_RECV && rx_valid) begin
      nm_wr_en   = 1'b1;
      nm_wr_row  = 7'(NM_PART0) + cnt;
      nm_wr_data = rx_data;
    end
    op_valid = (state == NC_NEUR) && (cnt < 7'd64);
    op_cmp   = cnt[5];
    op_row   = cnt[4:0];
  end

  assign osm_wr_en   = spk_valid;
  assign osm_wr_addr = {t[2:0], spk_row};
  assign osm_wr_data = 8'(spk_vec);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= NC_IDLE; cnt <= '0; t <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        state <= NC_INIT; cnt <= '0; t <= '0;
      end else begin
        case (state)
          NC_INIT: begin
            cnt <= cnt + 7'd1;
            if (cnt == 7'd31) begin state <= NC_RECV; cnt <= '0; end
          end
          NC_RECV: if (rx_valid) begin
            cnt <= cnt + 7'd1;
            if (cnt == 7'd31) begin state <= NC_NEUR; cnt <= '0; end
          end
          NC_NEUR: begin
            cnt <= cnt + 7'd1;
            if (cnt == 7'd65) begin
              cnt <= '0;
              t <= t + 5'd1;
              if (t + 5'd1 == timesteps) begin state <= NC_DONE; done <= 1'b1; end
              else state <= NC_RECV;
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
