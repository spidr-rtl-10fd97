// compute_unit -- one compute unit (CU): IFmem, input loader, IFspad,
// spike-to-address converter and compute macro, plus the sequencer that
// walks the unit through the timesteps of a layer.
//
// Per timestep t the unit goes through the stages of the published
// timestep pipeline:
//   Reset    (head of a chain) zero the 32 partial-Vmem rows, or
//   Receive  (other units) take the 32 partial-Vmem rows of timestep t from
//            the previous unit of the chain and write them into its own
//            Vmem rows, so its own accumulation continues on top of them;
//   Compute  the S2A issues one accumulation per spike (even and odd);
//   Transfer send the 32 partial-Vmem rows to the next unit (a compute unit
//            or a neuron unit).
// The input loader and the spike detector of timestep t already start at
// the beginning of Reset/Receive, so im2col loading and spike scanning
// overlap the Vmem hand-over; accumulations wait until it is done.
//
// Handshake: the hand-over between units is a valid/ready stream of 48-bit
// rows, 32 rows per timestep. A unit that wants to send waits until the
// receiver is in its Receive stage, and a unit that wants to receive waits
// for the sender: each unit proceeds as soon as its data is there, whatever
// the execution time of its neighbours (the paper's asynchronous
// handshaking; here it is a clocked handshake within one clock domain).
//
// Host port (outside a layer): write IFmem words, write compute-macro rows
// (weights in rows 0..127) and read compute-macro rows (one cycle latency).
// Timing: Reset and Receive take 32 cycles (when the sender is ready);
// Transfer takes 2 cycles per row (read, then send).
// Lint: rst_n is also read by the `disable iff` of the assertions (a use for
// checking only), which Verilator's -Wall reports as SYNCASYNCNET; the
// circuit itself uses rst_n only as an asynchronous reset.
module compute_unit
  import spidr_pkg::*;
#(
  parameter int IFMEM_ROWS_P = 640
) (
  input  logic       clk,
  input  logic       rst_n,
  input  layer_cfg_t cfg,
  input  logic       start,
  input  logic       is_head,
  // host access
  input  logic       host_ifm_wr,
  input  logic       host_cm_wr,
  input  logic       host_cm_rd,
  input  logic [9:0] host_row,
  input  logic [IFMEM_W-1:0] host_wdata,
  output row_t       host_cm_rdata,
  // partial Vmem stream in
  input  logic       rx_valid,
  input  row_t       rx_data,
  output logic       rx_ready,
  // partial Vmem stream out
  output logic       tx_valid,
  output row_t       tx_data,
  input  logic       tx_ready,
  // status and events
  output logic       busy,
  output logic       done,
  output logic       ev_wait,
  output logic       ev_stall,
  output logic       ev_switch,
  output logic       ev_tuple,
  output logic       ev_acc
);
  typedef enum logic [2:0] {CU_IDLE, CU_RESET, CU_RECV, CU_COMP, CU_TXRD, CU_TXSEND, CU_DONE} cu_state_e;
  cu_state_e state;
  logic [5:0] cnt;
  logic [4:0] t;
  logic       launch;       // start of a timestep: kick input loader and S2A

  // ---------------- IFmem and input loader ----------------
  logic ifm_rd_en;
  logic [9:0] ifm_rd_addr;
  logic [IFMEM_W-1:0] ifm_rd_data;
  localparam int IAW = $clog2(IFMEM_ROWS_P);

  ifmem #(.ROWS(IFMEM_ROWS_P), .WIDTH(IFMEM_W)) u_ifmem (
    .clk, .wr_en(host_ifm_wr && !busy), .wr_addr(host_row[IAW-1:0]), .wr_data(host_wdata),
    .rd_en(ifm_rd_en), .rd_addr(ifm_rd_addr[IAW-1:0]), .rd_data(ifm_rd_data)
  );

  logic spad_wr_en, spad_rd_en;
  logic [6:0] spad_wr_addr, spad_rd_addr;
  logic [SPAD_COLS-1:0] spad_wr_data, spad_rd_data;
  logic [7:0] n_rows, rows_loaded;
  logic il_busy, il_done;

  input_loader u_il (
    .clk, .rst_n, .start(launch), .cfg, .tstep(t),
    .ifm_rd_en, .ifm_rd_addr, .ifm_rd_data,
    .spad_wr_en, .spad_wr_addr, .spad_wr_data,
    .n_rows, .rows_loaded, .busy(il_busy), .done(il_done)
  );

  ifspad u_spad (
    .clk, .wr_en(spad_wr_en), .wr_addr(spad_wr_addr), .wr_data(spad_wr_data),
    .rd_en(spad_rd_en), .rd_addr(spad_rd_addr), .rd_data(spad_rd_data)
  );

  // ---------------- S2A ----------------
  logic acc_valid, acc_odd, s2a_fin;
  logic [6:0] acc_wrow;
  logic [4:0] acc_vrow;

  s2a u_s2a (
    .clk, .rst_n, .start(launch), .issue_en(state == CU_COMP),
    .n_rows, .rows_avail(rows_loaded),
    .spad_rd_en, .spad_rd_addr, .spad_rd_data,
    .acc_valid, .acc_odd, .acc_wrow, .acc_vrow,
    .finished(s2a_fin), .ev_switch, .ev_stall, .ev_tuple
  );

  // ---------------- compute macro ----------------
  logic cm_wr_en, cm_rd_en, cm_busy;
  logic [7:0] cm_wr_row, cm_rd_row;
  row_t cm_wr_data, cm_rd_data;

  always_comb begin
    cm_wr_en = 1'b0; cm_wr_row = '0; cm_wr_data = '0;
    cm_rd_en = 1'b0; cm_rd_row = '0;
    case (state)
      CU_RESET: begin cm_wr_en = 1'b1; cm_wr_row = 8'(CM_WROWS) + 8'(cnt); end
      CU_RECV:  begin
        cm_wr_en = rx_valid; cm_wr_row = 8'(CM_WROWS) + 8'(cnt); cm_wr_data = rx_data;
      end
      CU_TXRD:  begin cm_rd_en = 1'b1; cm_rd_row = 8'(CM_WROWS) + 8'(cnt); end
      CU_IDLE, CU_DONE: begin
        cm_wr_en = host_cm_wr; cm_wr_row = host_row[7:0]; cm_wr_data = host_wdata[CM_COLS-1:0];
        cm_rd_en = host_cm_rd; cm_rd_row = host_row[7:0];
      end
      default: ;
    endcase
  end

  compute_macro u_cm (
    .clk, .rst_n, .prec(cfg.prec),
    .acc_valid, .acc_odd, .acc_wrow, .acc_vrow,
    .wr_en(cm_wr_en), .wr_row(cm_wr_row), .wr_data(cm_wr_data),
    .rd_en(cm_rd_en), .rd_row(cm_rd_row), .rd_data(cm_rd_data),
    .busy(cm_busy)
  );
  assign host_cm_rdata = cm_rd_data;

  // ---------------- sequencer ----------------
  assign rx_ready = (state == CU_RECV);
  assign tx_valid = (state == CU_TXSEND);
  assign tx_data  = cm_rd_data;
  assign busy     = (state != CU_IDLE) && (state != CU_DONE);
  assign ev_wait  = (state == CU_RECV && !rx_valid) || (state == CU_TXSEND && !tx_ready);
  assign ev_acc   = acc_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= CU_IDLE; cnt <= '0; t <= '0; launch <= 1'b0; done <= 1'b0;
    end else begin
      launch <= 1'b0;
      done   <= 1'b0;
      if (start) begin
        state <= is_head ? CU_RESET : CU_RECV;
        cnt <= '0; t <= '0; launch <= 1'b1;
      end else begin
        case (state)
          CU_RESET: begin
            cnt <= cnt + 6'd1;
            if (cnt == 6'd31) begin cnt <= '0; state <= CU_COMP; end
          end
          CU_RECV: if (rx_valid) begin
            cnt <= cnt + 6'd1;
            if (cnt == 6'd31) begin cnt <= '0; state <= CU_COMP; end
          end
          CU_COMP: if (s2a_fin && !il_busy && !launch && !cm_busy) state <= CU_TXRD;
          CU_TXRD: state <= CU_TXSEND;
          CU_TXSEND: if (tx_ready) begin
            cnt <= cnt + 6'd1;
            state <= CU_TXRD;
            if (cnt == 6'd31) begin
              cnt <= '0;
              t <= t + 5'd1;
              if (t + 5'd1 == cfg.timesteps) begin state <= CU_DONE; done <= 1'b1; end
              else begin state <= is_head ? CU_RESET : CU_RECV; launch <= 1'b1; end
            end
          end
          default: ;
        endcase
      end
    end
  end

  // the spike detector reads no row the loader has not written
  // the im2col of a timestep ends before its Vmems are transferred
  a_load_before_transfer: assert property (@(posedge clk) disable iff (!rst_n)
    il_done |-> (state == CU_RESET || state == CU_RECV || state == CU_COMP));
  a_scan_behind_load: assert property (@(posedge clk) disable iff (!rst_n)
    spad_rd_en |-> ({1'b0, spad_rd_addr} < rows_loaded));
endmodule
