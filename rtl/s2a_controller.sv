// s2a_controller -- SRAM controller of the spike-to-address converter.
//
// A two-state machine, "process even" and "process odd", that drains the
// ping-pong address queue into the compute macro:
//   process even: pop (Y,X) from the even FIFO, issue an even accumulation
//                 (weight row Y, Vmem row 2X) and push the tuple into the
//                 odd FIFO;
//   process odd:  pop (Y,X) from the odd FIFO, issue an odd accumulation
//                 (weight row Y, Vmem row 2X+1).
// Transitions are the published ones: even -> odd when
// "odd FIFO full | (even FIFO empty & !odd FIFO full)", odd -> even when
// "odd FIFO empty". The cycle in which the state changes issues nothing: it
// stands for the reconfiguration of the bit-line switches and column
// peripherals (this design's choice of cost).
//
// Read-after-write hazard (not discussed in the paper; this design's
// choice): the macro reads a Vmem row in its Read stage and writes it two
// cycles later, so an accumulation into a Vmem row still in the macro's
// Compute or Store stage is held back (stall) until that write is done.
//
// issue_en gates issuing (the compute unit holds it low until the partial
// Vmems have been reset or received). drained is high when both FIFOs are
// empty and no accumulation is in flight. Timing: at most one accumulation
// per cycle; acc_* is a single-cycle command to the macro.
// Lint: rst_n is also read by the `disable iff` of the assertions (a use for
// checking only), which Verilator's -Wall reports as SYNCASYNCNET; the
// circuit itself uses rst_n only as an asynchronous reset.
module s2a_controller
  import spidr_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        issue_en,
  // address queue
  input  addr_tuple_t even_head,
  input  logic        even_empty,
  output logic        even_pop,
  input  addr_tuple_t odd_head,
  input  logic        odd_empty,
  input  logic        odd_full,
  output logic        odd_pop,
  output logic        odd_push,
  output addr_tuple_t odd_din,
  // compute macro command
  output logic        acc_valid,
  output logic        acc_odd,
  output logic [6:0]  acc_wrow,
  output logic [4:0]  acc_vrow,
  // status
  output logic        drained,
  output logic        ev_switch,
  output logic        ev_stall
);
  typedef enum logic {PROC_EVEN = 1'b0, PROC_ODD = 1'b1} ctl_state_e;
  ctl_state_e state;

  logic       p1_v, p2_v;
  logic [4:0] p1_row, p2_row;

  logic       go_odd, go_even;
  assign go_odd  = (state == PROC_EVEN) && (odd_full || (even_empty && !odd_full));
  assign go_even = (state == PROC_ODD) && odd_empty;

  addr_tuple_t head;
  logic        have;
  logic [4:0]  vrow;
  logic        hazard;
  assign head   = (state == PROC_ODD) ? odd_head : even_head;
  assign have   = (state == PROC_ODD) ? !odd_empty : !even_empty;
  assign vrow   = {head.x, (state == PROC_ODD)};
  assign hazard = (p1_v && p1_row == vrow) || (p2_v && p2_row == vrow);

  logic issue;
  assign issue = issue_en && !go_odd && !go_even && have && !hazard;

  assign acc_valid = issue;
  assign acc_odd   = (state == PROC_ODD);
  assign acc_wrow  = head.y;
  assign acc_vrow  = vrow;
  assign even_pop  = issue && (state == PROC_EVEN);
  assign odd_push  = issue && (state == PROC_EVEN);
  assign odd_din   = head;
  assign odd_pop   = issue && (state == PROC_ODD);
  assign drained   = even_empty && odd_empty && !p1_v && !p2_v;
  assign ev_switch = issue_en && (go_odd || go_even) && !(even_empty && odd_empty);
  assign ev_stall  = issue_en && !go_odd && !go_even && have && hazard;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= PROC_EVEN; p1_v <= 1'b0; p2_v <= 1'b0; p1_row <= '0; p2_row <= '0;
    end else if (clear) begin
      state <= PROC_EVEN; p1_v <= 1'b0; p2_v <= 1'b0;
    end else begin
      p1_v <= issue; p1_row <= vrow;
      p2_v <= p1_v;  p2_row <= p1_row;
      if (issue_en) begin
        if (go_odd)  state <= PROC_ODD;
        if (go_even) state <= PROC_EVEN;
      end
    end
  end

  a_no_odd_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(odd_push && odd_full));
endmodule
