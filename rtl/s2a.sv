// s2a -- spike-to-address converter of one compute unit.
//
// Chains the three parts of the published S2A: the trailing-zero spike
// detector reads IFspad rows and turns every spike into a (Y, X) tuple, the
// even/odd ping-pong address queue buffers the tuples, and the SRAM
// controller turns them into even and odd accumulation commands for the
// compute macro, batching commands of one parity to save switching energy.
//
// Interface: start begins a new scan (and clears the queue); rows_avail lets
// the scan trail the input loader; issue_en allows accumulations to be
// issued. finished is high once every row has been scanned and every
// accumulation has left the macro pipeline. Timing: one accumulation per
// cycle at best; see spike_detector and s2a_controller.
// Lint: rst_n is also read by the `disable iff` of the assertions (a use for
// checking only), which Verilator's -Wall reports as SYNCASYNCNET; the
// circuit itself uses rst_n only as an asynchronous reset.
module s2a
  import spidr_pkg::*;
#(
  parameter int AQ_DEPTH_P = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 issue_en,
  input  logic [7:0]           n_rows,
  input  logic [7:0]           rows_avail,
  output logic                 spad_rd_en,
  output logic [6:0]           spad_rd_addr,
  input  logic [SPAD_COLS-1:0] spad_rd_data,
  output logic                 acc_valid,
  output logic                 acc_odd,
  output logic [6:0]           acc_wrow,
  output logic [4:0]           acc_vrow,
  output logic                 finished,
  output logic                 ev_switch,
  output logic                 ev_stall,
  output logic                 ev_tuple
);
  addr_tuple_t tup, even_head, odd_head, odd_din;
  logic tup_valid, tup_ready, det_busy, det_done;
  logic even_full, even_empty, odd_full, odd_empty;
  logic even_pop, odd_pop, odd_push, drained;
  logic scanned;

  spike_detector u_det (
    .clk, .rst_n, .start, .n_rows, .rows_avail,
    .spad_rd_en, .spad_rd_addr, .spad_rd_data,
    .tup_valid, .tup, .tup_ready, .busy(det_busy), .done(det_done)
  );

  assign tup_ready = !even_full;

  address_queue #(.DEPTH(AQ_DEPTH_P)) u_aq (
    .clk, .rst_n, .clear(start),
    .even_push(tup_valid && tup_ready), .even_din(tup), .even_pop, .even_head,
    .even_full, .even_empty,
    .odd_push, .odd_din, .odd_pop, .odd_head, .odd_full, .odd_empty
  );

  s2a_controller u_ctl (
    .clk, .rst_n, .clear(start), .issue_en,
    .even_head, .even_empty, .even_pop,
    .odd_head, .odd_empty, .odd_full, .odd_pop, .odd_push, .odd_din,
    .acc_valid, .acc_odd, .acc_wrow, .acc_vrow,
    .drained, .ev_switch, .ev_stall
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        scanned <= 1'b1;
    else if (start)    scanned <= 1'b0;
    else if (det_done) scanned <= 1'b1;
  end

  assign finished = scanned && !det_busy && drained && !start;
  assign ev_tuple = tup_valid && tup_ready;
endmodule
