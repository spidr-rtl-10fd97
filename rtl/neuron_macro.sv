// neuron_macro -- CIM neuron macro (NM): a 72 x 48 SRAM with column
// peripherals that perform the neuron operations in place.
//
// Row use (rows as in the paper, placement of the parameters is this
// design's choice): 0..31 partial Vmems received from the compute units,
// 32..63 full Vmems that persist across timesteps, 64/65 thresholds and
// 66/67 leaks (one row for the odd-row word layout, one for the even-row
// layout, since the Vmem words of odd and even rows sit in different
// columns), 68..71 unused.
//
// Two operations, each a Read/Compute/Store pipeline like the compute
// macro's (one issued per cycle, the result stored two cycles later):
//   OP_ACC row r: full[r] <- full[r] + partial[r]        (every word of row r)
//   OP_CMP row r: per word, spike = (full >= threshold), and the Store stage
//                 writes conditionally: on a spike 0 (hard reset) or
//                 full - threshold (soft reset); without a spike
//                 full - leak for LIF, nothing for IF.
// Where the leak is applied is not stated in the paper; applying it to
// non-firing neurons in the comparison pass keeps the published 66-cycle
// neuron operation. Arithmetic is two's complement and wraps at the Vmem
// width. The spikes of a row (one bit per word, word k at bit k) come out
// with the Store stage on spk_valid/spk_row/spk_vec.
//
// Interface: op_* issues operations; wr_* writes a whole row; rd_* reads a
// row (one cycle latency). wr_* must not be used while an operation is in
// the Compute stage.
// Lint: rst_n is also read by the `disable iff` of the assertions (a use for
// checking only), which Verilator's -Wall reports as SYNCASYNCNET; the
// circuit itself uses rst_n only as an asynchronous reset.
module neuron_macro
  import spidr_pkg::*;
#(
  parameter int ROWS = 72
) (
  input  logic       clk,
  input  logic       rst_n,
  input  prec_e      prec,
  input  nmodel_e    nmodel,
  input  nreset_e    nreset,
  input  logic       op_valid,
  input  logic       op_cmp,      // 0: accumulate, 1: threshold compare
  input  logic [4:0] op_row,
  input  logic       wr_en,
  input  logic [6:0] wr_row,
  input  row_t       wr_data,
  input  logic       rd_en,
  input  logic [6:0] rd_row,
  output row_t       rd_data,
  output logic       spk_valid,
  output logic [4:0] spk_row,
  output logic [MAX_WORDS-1:0] spk_vec,
  output logic       busy
);
  row_t mem [ROWS];

  // Read stage
  logic r_v, r_cmp;
  logic [4:0] r_row;
  row_t r_part, r_full, r_thr, r_leak;
  // Compute stage
  logic c_v, c_cmp;
  logic [4:0] c_row;
  row_t c_new, c_mask;
  logic [MAX_WORDS-1:0] c_spk;

  logic odd_r;
  assign odd_r = r_row[0];

  // One set of column peripherals per precision and parity, with constant
  // column indices; the run-time precision and the row parity select one.
  row_t new_a  [3][2];
  row_t mask_a [3][2];
  logic [MAX_WORDS-1:0] spk_a [3][2];
  for (genvar pi = 0; pi < 3; pi++) begin : g_prec
    localparam prec_e P  = prec_e'(pi);
    localparam int    VB = vbits(P);
    localparam int    NW = nwords(P);
    for (genvar o = 0; o < 2; o++) begin : g_par
      localparam row_t MASK = word_mask(P, o[0]);
      row_t nrow;
      logic [MAX_WORDS-1:0] spk;
      for (genvar c = 0; c < CM_COLS; c++) begin : g_gap
        if (!MASK[c]) begin : g_keep
          assign nrow[c] = r_full[c];
        end
      end
      for (genvar k = 0; k < MAX_WORDS; k++) begin : g_word
        if (k < NW) begin : g_on
          logic [VB-1:0] vw, pw, tw, lw, res;
          logic signed [15:0] v, th, d;
          logic fire;
          for (genvar b = 0; b < VB; b++) begin : g_bit
            localparam int C = vcol(P, o[0], k, b);
            assign vw[b] = r_full[C];
            assign pw[b] = r_part[C];
            assign tw[b] = r_thr[C];
            assign lw[b] = r_leak[C];
            assign nrow[C] = res[b];
          end
          always_comb begin
            v    = 16'(signed'(vw));
            th   = 16'(signed'(tw));
            d    = v - th;                          // compared without wrap
            fire = r_cmp && (d >= 0);
            if (!r_cmp)                    res = vw + pw;                 // accumulate
            else if (fire)                 res = (nreset == RESET_SOFT) ? d[VB-1:0] : '0;
            else if (nmodel == NEURON_LIF) res = vw - lw;                 // leak
            else                           res = vw;
          end
          assign spk[k] = fire;
        end else begin : g_off
          assign spk[k] = 1'b0;
        end
      end
      assign new_a[pi][o]  = nrow;
      assign mask_a[pi][o] = MASK;
      assign spk_a[pi][o]  = spk;
    end
  end

  logic [1:0] psel;
  assign psel = (prec == PREC_8) ? 2'd2 : (prec == PREC_6) ? 2'd1 : 2'd0;

  row_t new_c;
  logic [MAX_WORDS-1:0] spk_c;
  assign new_c = new_a[psel][odd_r];
  assign spk_c = spk_a[psel][odd_r];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v <= 1'b0; r_cmp <= 1'b0; r_row <= '0;
      r_part <= '0; r_full <= '0; r_thr <= '0; r_leak <= '0;
      c_v <= 1'b0; c_cmp <= 1'b0; c_row <= '0; c_new <= '0; c_mask <= '0; c_spk <= '0;
    end else begin
      r_v    <= op_valid;
      r_cmp  <= op_cmp;
      r_row  <= op_row;
      r_part <= mem[7'(NM_PART0) + 7'(op_row)];
      r_full <= mem[7'(NM_FULL0) + 7'(op_row)];
      r_thr  <= mem[op_row[0] ? 7'(NM_THR_ODD) : 7'(NM_THR_EVEN)];
      r_leak <= mem[op_row[0] ? 7'(NM_LK_ODD)  : 7'(NM_LK_EVEN)];
      c_v    <= r_v;
      c_cmp  <= r_cmp;
      c_row  <= r_row;
      c_new  <= new_c;
      c_mask <= mask_a[psel][odd_r];
      c_spk  <= spk_c;
    end
  end

  // Store stage (conditional write) and row port
  always_ff @(posedge clk) begin
    if (c_v) begin
      for (int i = 0; i < CM_COLS; i++)
        if (c_mask[i]) mem[7'(NM_FULL0) + 7'(c_row)][i] <= c_new[i];
    end else if (wr_en) begin
      mem[wr_row] <= wr_data;
    end
    if (rd_en) rd_data <= mem[rd_row];
  end

  assign spk_valid = c_v && c_cmp;
  assign spk_row   = c_row;
  assign spk_vec   = c_spk;
  assign busy      = r_v || c_v;

  a_no_write_collision: assert property (@(posedge clk) disable iff (!rst_n) !(c_v && wr_en));
endmodule
