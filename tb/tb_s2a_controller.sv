// tb_s2a_controller -- self-checking test of the S2A SRAM controller.
// The address queue is modelled by two reference FIFOs of depth 16 in the
// testbench. Bursts of tuples are pushed into the even FIFO; the test checks
// that each tuple gets exactly one even accumulation (Vmem row 2X) and then
// one odd accumulation (Vmem row 2X+1) with its weight row Y, that the state
// changes only under the published conditions (even->odd on odd full or
// even empty, odd->even on odd empty), that no accumulation hits a Vmem row
// still in the macro pipeline, and that operations come in batches of up to
// 16 of one parity.
module tb_s2a_controller;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, issue_en = 0;
  addr_tuple_t even_head, odd_head, odd_din;
  logic even_empty, even_full, odd_empty, odd_full;
  logic even_pop, odd_pop, odd_push;
  logic acc_valid, acc_odd, drained, ev_switch, ev_stall;
  logic [6:0] acc_wrow;
  logic [4:0] acc_vrow;
  int checks = 0, failures = 0;

  s2a_controller dut (.*);

  addr_tuple_t qe [$], qo [$];
  int pend_even [int];   // tuple key -> outstanding even ops
  int pend_odd  [int];
  int last1 = -1, last2 = -1, run = 0, max_run = 0, nstall = 0;
  logic prev_odd = 0;

  always_comb begin
    even_head  = qe.size() ? qe[0] : '0;
    odd_head   = qo.size() ? qo[0] : '0;
    even_empty = qe.size() == 0;
    even_full  = qe.size() == 16;
    odd_empty  = qo.size() == 0;
    odd_full   = qo.size() == 16;
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int to_push = 0;
  logic p_even_pop, p_odd_pop, p_odd_push, prev_go_odd_ok, prev_go_even_ok;
  addr_tuple_t p_odd_din;
  // checks and sampling at the falling edge, where every input is stable
  always @(negedge clk) if (rst_n) begin
    int key;
    if (acc_odd != prev_odd) begin
      if (acc_odd) chk(prev_go_odd_ok, "even->odd only on odd full or even empty");
      else        chk(prev_go_even_ok, "odd->even only on odd empty");
    end
    prev_go_odd_ok  = odd_full || even_empty;
    prev_go_even_ok = odd_empty;
    if (acc_valid) begin
      key = {acc_wrow, acc_vrow[4:1]};
      chk(acc_vrow != 5'(last1) && acc_vrow != 5'(last2), "hazard: row in flight");
      if (!acc_odd) begin
        chk(acc_vrow[0] == 1'b0 && pend_even.exists(key) && pend_even[key] > 0, "even op for a pushed tuple");
        if (pend_even.exists(key)) pend_even[key]--;
        pend_odd[key] = pend_odd.exists(key) ? pend_odd[key] + 1 : 1;
      end else begin
        chk(acc_vrow[0] == 1'b1 && pend_odd.exists(key) && pend_odd[key] > 0, "odd op after its even op");
        if (pend_odd.exists(key)) pend_odd[key]--;
      end
      if (acc_odd == prev_odd && run > 0) run++; else run = 1;
      if (run > max_run) max_run = run;
    end
    prev_odd = acc_odd;
    last2 = last1; last1 = acc_valid ? int'(acc_vrow) : -1;
    if (ev_stall) nstall++;
    p_even_pop = even_pop; p_odd_pop = odd_pop; p_odd_push = odd_push; p_odd_din = odd_din;
  end
  // queue updates at the rising edge
  always @(posedge clk) if (rst_n) begin
    addr_tuple_t t;
    int key;
    if (p_even_pop) void'(qe.pop_front());
    if (p_odd_pop)  void'(qo.pop_front());
    if (p_odd_push) qo.push_back(p_odd_din);
    p_even_pop = 0; p_odd_pop = 0; p_odd_push = 0;
    if (to_push > 0 && qe.size() < 16) begin
      t.y = 7'($urandom_range(0, 127));
      t.x = 4'($urandom_range(0, 3));   // few rows: provokes hazards
      key = {t.y, t.x};
      qe.push_back(t);
      pend_even[key] = pend_even.exists(key) ? pend_even[key] + 1 : 1;
      to_push--;
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    issue_en = 1;
    to_push = 300;
    repeat (3000) @(negedge clk);
    chk(drained, "drained at the end");
    chk(nstall > 0, "hazard stalls happened");
    chk(max_run >= 16, $sformatf("batches of 16 same-parity ops (max run %0d)", max_run));
    foreach (pend_even[k]) chk(pend_even[k] == 0, "every even op done");
    foreach (pend_odd[k])  chk(pend_odd[k] == 0, "every odd op done");
    // with issue_en low nothing is issued
    issue_en = 0; to_push = 5;
    repeat (20) @(negedge clk);
    chk(qe.size() == 5 && !acc_valid, "issue_en low holds the queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
