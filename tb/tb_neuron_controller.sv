// tb_neuron_controller -- self-checking test of the neuron SRAM controller.
// A source sends 32 partial-Vmem rows per timestep with random gaps; the
// neuron macro is replaced by a two-cycle delay line that turns comparison
// commands into spike outputs. Checked: the 32 full-Vmem rows are cleared
// once at the start of the layer, received rows are written to rows 0..31 in
// order, rx_ready is low outside the receive stage, each neuron operation
// takes exactly 66 cycles and issues accumulations for rows 0..31 followed
// by comparisons for rows 0..31, spikes go to output spike memory address
// {timestep mod 8, row}, and done comes after the last of T timesteps.
module tb_neuron_controller;
  import spidr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, rx_valid = 0;
  logic [4:0] timesteps = 0;
  row_t rx_data = '0, nm_wr_data;
  logic rx_ready, op_valid, op_cmp, nm_wr_en, osm_wr_en, busy, done, in_neuron_op;
  logic [4:0] op_row;
  logic [6:0] nm_wr_row;
  logic spk_valid;
  logic [4:0] spk_row;
  logic [5:0] spk_vec;
  logic [7:0] osm_wr_addr, osm_wr_data;
  int checks = 0, failures = 0;

  neuron_controller dut (.*);

  // two-cycle macro model
  logic d1_v = 0, d2_v = 0; logic [4:0] d1_r = 0, d2_r = 0;
  always_ff @(posedge clk) begin
    d1_v <= op_valid && op_cmp; d1_r <= op_row;
    d2_v <= d1_v; d2_r <= d1_r;
  end
  assign spk_valid = d2_v;
  assign spk_row   = d2_r;
  assign spk_vec   = 6'(d2_r) ^ 6'h2A;

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  int t_cur = 0, rx_n = 0, init_n = 0, nop_cyc = 0, op_n = 0, osm_n = 0;
  always @(negedge clk) if (rst_n) begin
    if (nm_wr_en) begin
      if (nm_wr_row >= 32) begin
        chk(nm_wr_row == 7'(32 + init_n) && nm_wr_data == '0, "init clears full Vmem rows");
        init_n++;
      end else begin
        chk(rx_valid && rx_ready && nm_wr_row == 7'(rx_n % 32) && nm_wr_data == rx_data, "received row written in order");
        rx_n++;
      end
    end
    if (in_neuron_op) nop_cyc++;
    if (op_valid) begin
      chk(op_cmp == (op_n % 64 >= 32) && op_row == 5'(op_n % 32), "operation order");
      op_n++;
    end
    if (osm_wr_en) begin
      chk(osm_wr_addr == {3'(osm_n / 32), 5'(osm_n % 32)} && osm_wr_data == 8'(6'(osm_n % 32) ^ 6'h2A),
          "spike memory address/data");
      osm_n++;
    end
    if (!in_neuron_op && nop_cyc != 0) begin
      chk(nop_cyc == 66, $sformatf("neuron operation took %0d cycles", nop_cyc));
      nop_cyc = 0;
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    timesteps = 5;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int t = 0; t < 5; t++) begin
      for (int r = 0; r < 32; r++) begin
        rx_valid = 0;
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        rx_valid = 1; rx_data = {$urandom, $urandom};
        while (!rx_ready) begin
          chk(rx_n % 32 == 0, "rx_ready low only between timesteps");
          @(negedge clk);
        end
        @(negedge clk);
      end
      rx_valid = 0;
    end
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(init_n == 32 && rx_n == 160 && op_n == 320 && osm_n == 160, "totals");
    chk(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
