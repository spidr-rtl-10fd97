// compute_macro -- CIM compute macro (CM): a 160 x 48 SRAM whose top 128 rows
// hold weights and whose bottom 32 rows hold partial membrane potentials
// (Vmems), with column peripherals that add a weight row into a Vmem row in
// place.
//
// One accumulation runs through the published three-stage pipeline:
//   Read    - weight row Y and Vmem row V are read together. Per column the
//             bit-line switch passes the weight bit (closed) or not (open);
//             the sensed NOR and AND of weight and Vmem bit are latched.
//   Compute - a bit-line full adder per column forms SUM and C_OUT from
//             NOR, AND and the carry of the column to its right (lower bit);
//             the chain is cut at the first column of each Vmem word.
//   Store   - SUM is written back into Vmem row V (only the word columns).
// Precision (4/7, 6/11, 8/15 bit) and parity (even or odd cycle) select
// which switches close and where the carry chain is cut; the column mapping
// is in spidr_pkg. The switches are closed over the W weight columns under
// each Vmem word; over the word's upper W-1 columns the adder receives the
// weight's sign bit (this design's choice: the paper shows a "partial adder
// chain" there without saying how negative weights are handled). The sum
// wraps modulo 2^(2W-1).
//
// Interface: acc_valid/acc_odd/acc_wrow/acc_vrow issue one accumulation per
// cycle (vrow 0..31 is physical row 128+vrow). wr_* writes a whole row
// (weight loading, Vmem reset and Vmem transfer in); rd_* reads a row with
// one cycle of latency (Vmem transfer out). The issuer must not issue an
// accumulation into a Vmem row still in flight, nor use wr_* while busy.
// Lint: rst_n is also read by the `disable iff` of the assertions (a use for
// checking only), which Verilator's -Wall reports as SYNCASYNCNET; the
// circuit itself uses rst_n only as an asynchronous reset.
module compute_macro
  import spidr_pkg::*;
#(
  parameter int COLS  = 48,
  parameter int WROWS = 128,
  parameter int VROWS = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  prec_e      prec,
  input  logic       acc_valid,
  input  logic       acc_odd,
  input  logic [6:0] acc_wrow,
  input  logic [4:0] acc_vrow,
  input  logic       wr_en,
  input  logic [7:0] wr_row,
  input  row_t       wr_data,
  input  logic       rd_en,
  input  logic [7:0] rd_row,
  output row_t       rd_data,
  output logic       busy
);
  localparam int ROWS = WROWS + VROWS;

  row_t mem [ROWS];

  // ---------------- Read stage ----------------
  row_t w_rd, v_rd, w_eff;
  assign w_rd = mem[{1'b0, acc_wrow}];
  assign v_rd = mem[WROWS + 32'(acc_vrow)];

  logic r_v, c_v;
  logic r_odd;
  logic [4:0] r_row, c_row;
  row_t nor_l, and_l, sum_l, mask_l;

  // One column-peripheral configuration per precision and parity. Every
  // column index below is a constant; the run-time precision and parity only
  // select among the six configurations, as the reconfiguration signals do.
  //   weff: what each read bit line carries into the adder (switch closed:
  //         the weight bit; upper word columns: the weight's sign; columns
  //         outside every word: 0)
  //   sum:  bit-line full adders, carry chain cut at each word's first column
  row_t weff_a [3][2];
  row_t sum_a  [3][2];
  row_t mask_a [3][2];
  for (genvar pi = 0; pi < 3; pi++) begin : g_prec
    localparam prec_e P  = prec_e'(pi);
    localparam int    WB = wbits(P);
    localparam int    VB = vbits(P);
    localparam int    NW = nwords(P);
    for (genvar o = 0; o < 2; o++) begin : g_par
      localparam row_t MASK = word_mask(P, o[0]);
      row_t weff, sum;
      for (genvar c = 0; c < COLS; c++) begin : g_gap
        if (!MASK[c]) begin : g_off
          assign weff[c] = 1'b0;
          assign sum[c]  = 1'b0;
        end
      end
      for (genvar k = 0; k < NW; k++) begin : g_word
        logic [VB-1:0] cy;
        assign cy[0] = 1'b0;
        for (genvar b = 0; b < VB; b++) begin : g_bit
          localparam int C  = vcol(P, o[0], k, b);
          localparam int CW = vcol(P, o[0], k, (b < WB) ? b : WB - 1);
          logic x;
          assign weff[C]   = w_rd[CW];
          assign x         = ~(nor_l[C] | and_l[C]);     // weight XOR Vmem
          assign sum[C]    = x ^ cy[b];
          if (b < VB - 1) begin : g_cy
            assign cy[b+1] = and_l[C] | (x & cy[b]);   // carry out of the word is dropped
          end
        end
      end
      assign weff_a[pi][o] = weff;
      assign sum_a[pi][o]  = sum;
      assign mask_a[pi][o] = MASK;
    end
  end

  logic [1:0] psel;
  assign psel  = (prec == PREC_8) ? 2'd2 : (prec == PREC_6) ? 2'd1 : 2'd0;
  assign w_eff = weff_a[psel][acc_odd];

  // ---------------- Compute stage: bit-line full adders ----------------
  row_t sum_c;
  assign sum_c = sum_a[psel][r_odd];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v <= 1'b0; c_v <= 1'b0; r_odd <= 1'b0; r_row <= '0; c_row <= '0;
      nor_l <= '0; and_l <= '0; sum_l <= '0; mask_l <= '0;
    end else begin
      // Read -> latch
      r_v   <= acc_valid;
      r_odd <= acc_odd;
      r_row <= acc_vrow;
      nor_l <= ~(w_eff | v_rd);
      and_l <= w_eff & v_rd;
      // Compute -> latch
      c_v    <= r_v;
      c_row  <= r_row;
      sum_l  <= sum_c;
      mask_l <= mask_a[psel][r_odd];
    end
  end

  // ---------------- Store stage and row port ----------------
  always_ff @(posedge clk) begin
    if (c_v) begin
      for (int i = 0; i < COLS; i++)
        if (mask_l[i]) mem[WROWS + 32'(c_row)][i] <= sum_l[i];
    end else if (wr_en) begin
      mem[wr_row] <= wr_data;
    end
    if (rd_en) rd_data <= mem[rd_row];
  end

  assign busy = r_v || c_v;

  a_no_write_collision: assert property (@(posedge clk) disable iff (!rst_n) !(c_v && wr_en));
endmodule
