// address_queue -- even/odd ping-pong FIFO pair of the S2A.
//
// Two FIFOs of (Y, X) tuples, DEPTH entries each (16 in the paper, where
// deeper FIFOs no longer cut the even/odd switching energy). The spike
// detector pushes into the even FIFO; the SRAM controller pops the even FIFO,
// performs the even accumulation and pushes the same tuple into the odd FIFO,
// then later pops it again for the odd accumulation. Each FIFO reports full
// and empty. Timing: push and pop take effect at the clock edge; the head of
// each FIFO is visible combinationally (first-word fall-through). Pushing a
// full FIFO or popping an empty one is an error and is flagged by assertions.
// Lint: rst_n is also read by the `disable iff` of the assertions (a use for
// checking only), which Verilator's -Wall reports as SYNCASYNCNET; the
// circuit itself uses rst_n only as an asynchronous reset.
module address_queue
  import spidr_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        even_push,
  input  addr_tuple_t even_din,
  input  logic        even_pop,
  output addr_tuple_t even_head,
  output logic        even_full,
  output logic        even_empty,
  input  logic        odd_push,
  input  addr_tuple_t odd_din,
  input  logic        odd_pop,
  output addr_tuple_t odd_head,
  output logic        odd_full,
  output logic        odd_empty
);
  localparam int PW = $clog2(DEPTH);

  addr_tuple_t emem [DEPTH];
  addr_tuple_t omem [DEPTH];
  logic [PW-1:0] ewp, erp, owp, orp;
  logic [PW:0]   ecnt, ocnt;

  assign even_full  = (ecnt == (PW+1)'(DEPTH));
  assign even_empty = (ecnt == '0);
  assign odd_full   = (ocnt == (PW+1)'(DEPTH));
  assign odd_empty  = (ocnt == '0);
  assign even_head  = emem[erp];
  assign odd_head   = omem[orp];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (even_push && !even_full) emem[ewp] <= even_din;
    if (odd_push && !odd_full)   omem[owp] <= odd_din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ewp <= '0; erp <= '0; ecnt <= '0;
      owp <= '0; orp <= '0; ocnt <= '0;
    end else if (clear) begin
      ewp <= '0; erp <= '0; ecnt <= '0;
      owp <= '0; orp <= '0; ocnt <= '0;
    end else begin
      if (even_push && !even_full) ewp <= inc(ewp);
      if (even_pop && !even_empty) erp <= inc(erp);
      ecnt <= ecnt + (PW+1)'(even_push && !even_full) - (PW+1)'(even_pop && !even_empty);
      if (odd_push && !odd_full) owp <= inc(owp);
      if (odd_pop && !odd_empty) orp <= inc(orp);
      ocnt <= ocnt + (PW+1)'(odd_push && !odd_full) - (PW+1)'(odd_pop && !odd_empty);
    end
  end

  a_even_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(even_push && even_full));
  a_odd_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(odd_push && odd_full));
  a_even_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(even_pop && even_empty));
  a_odd_no_underflow:  assert property (@(posedge clk) disable iff (!rst_n) !(odd_pop && odd_empty));
endmodule
