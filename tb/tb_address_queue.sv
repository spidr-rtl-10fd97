// tb_address_queue -- self-checking test of the even/odd ping-pong FIFOs.
// Random pushes and pops on both FIFOs (never past full or empty) are
// compared against two reference queues; full and empty flags are checked
// every cycle, and both FIFOs must hold exactly 16 entries when full.
module tb_address_queue;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, even_push = 0, even_pop = 0, odd_push = 0, odd_pop = 0;
  addr_tuple_t even_din = '0, odd_din = '0, even_head, odd_head;
  logic even_full, even_empty, odd_full, odd_empty;
  int checks = 0, failures = 0;
  addr_tuple_t qe [$], qo [$];

  address_queue #(.DEPTH(16)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      chk(even_empty == (qe.size() == 0) && even_full == (qe.size() == 16), "even flags");
      chk(odd_empty == (qo.size() == 0) && odd_full == (qo.size() == 16), "odd flags");
      if (qe.size() > 0) chk(even_head == qe[0], "even head");
      if (qo.size() > 0) chk(odd_head == qo[0], "odd head");
      // bias phases so that the FIFOs fill up and drain completely
      even_push = (qe.size() < 16) && ($urandom_range(0, 99) < ((n / 500) % 2 ? 30 : 80));
      even_pop  = (qe.size() > 0)  && ($urandom_range(0, 99) < ((n / 500) % 2 ? 80 : 30));
      odd_push  = (qo.size() < 16) && ($urandom_range(0, 99) < ((n / 300) % 2 ? 30 : 80));
      odd_pop   = (qo.size() > 0)  && ($urandom_range(0, 99) < ((n / 300) % 2 ? 80 : 30));
      even_din  = addr_tuple_t'($urandom);
      odd_din   = addr_tuple_t'($urandom);
      @(posedge clk);
      if (even_pop) void'(qe.pop_front());
      if (odd_pop)  void'(qo.pop_front());
      if (even_push) qe.push_back(even_din);
      if (odd_push)  qo.push_back(odd_din);
    end
    @(negedge clk); even_push = 0; odd_push = 0; even_pop = 0; odd_pop = 0; clear = 1;
    @(negedge clk); clear = 0;
    chk(even_empty && odd_empty, "clear empties both FIFOs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
