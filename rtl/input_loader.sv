// input_loader -- hardware im2col from IFmem to IFspad (the "IL").
//
// For a convolution layer, IFspad row Y enumerates the receptive field
// (channel c, kernel row r, kernel column s; s fastest) and column X one of
// up to 16 output positions of the tile (output row out_row, output columns
// out_col0 .. out_col0+n_out-1). Bit (Y,X) is the input spike at
// (c, out_row*stride + r - pad, (out_col0+X)*stride + s - pad), or 0 where
// that position lies in the zero padding. For a fully connected layer row Y
// is input neuron Y and only column 0 is used.
//
// IFmem organisation (this design's choice): timestep t starts at row
// t*ts_rows; a conv channel c occupies in_h consecutive rows, one input row
// per IFmem word, spike w at bit w; FC input neuron i sits at word i/56, bit
// i%56 of the timestep's block.
//
// Timing: one IFspad row per cycle. A row's IFmem read is issued in one cycle
// and the IFspad row is written in the next; padding rows skip the read.
// rows_loaded counts rows already written, so the spike detector can follow
// directly behind the loader (the paper hides the im2col latency this way).
// n_rows is the number of IFspad rows of the layer. done pulses once.
// The neuron-model fields of cfg are not used here (lint lists them as
// unused bits of the shared configuration struct).
module input_loader
  import spidr_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  input  logic [4:0]       tstep,
  // IFmem read port
  output logic             ifm_rd_en,
  output logic [9:0]       ifm_rd_addr,
  input  logic [IFMEM_W-1:0] ifm_rd_data,
  // IFspad write port
  output logic             spad_wr_en,
  output logic [6:0]       spad_wr_addr,
  output logic [SPAD_COLS-1:0] spad_wr_data,
  // progress
  output logic [7:0]       n_rows,
  output logic [7:0]       rows_loaded,
  output logic             busy,
  output logic             done
);
  // stage 0: row counters
  logic       run;
  logic [7:0] y;
  logic [3:0] c;
  logic [2:0] r, s;
  logic [9:0] fc_row;
  logic [5:0] fc_bit;
  // stage 1: what the row needs
  logic       s1_valid, s1_padrow;
  logic [6:0] s1_y;
  logic [2:0] s1_s;
  logic [5:0] s1_fcbit;

  always_comb begin
    if (cfg.ltype == LAYER_FC) n_rows = cfg.fc_n;
    else                       n_rows = 8'(cfg.n_ch * cfg.kr * cfg.ks);
  end

  // input row of kernel row r for the tile's output row (signed)
  logic signed [9:0] in_row;
  assign in_row = signed'(10'(cfg.out_row) * 10'(cfg.stride)) + signed'({7'b0, r})
                  - signed'({8'b0, cfg.pad});
  logic padrow;
  assign padrow = (cfg.ltype == LAYER_CONV) &&
                  (in_row < 0 || in_row >= signed'({3'b0, cfg.in_h}));

  logic [9:0] tbase;
  assign tbase = 10'(tstep * cfg.ts_rows);

  always_comb begin
    ifm_rd_en   = run && !padrow;
    if (cfg.ltype == LAYER_FC) ifm_rd_addr = tbase + fc_row;
    else ifm_rd_addr = 10'(tbase + c * cfg.in_h + in_row[6:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; y <= '0; c <= '0; r <= '0; s <= '0;
      fc_row <= '0; fc_bit <= '0;
      s1_valid <= 1'b0; s1_padrow <= 1'b0; s1_y <= '0; s1_s <= '0; s1_fcbit <= '0;
      rows_loaded <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      // stage 0
      s1_valid <= run;
      s1_padrow <= padrow;
      s1_y <= y[6:0];
      s1_s <= s;
      s1_fcbit <= fc_bit;
      if (start) begin
        run <= (n_rows != 0);
        y <= '0; c <= '0; r <= '0; s <= '0; fc_row <= '0; fc_bit <= '0;
        rows_loaded <= '0;
        s1_valid <= 1'b0;
      end else if (run) begin
        y <= y + 8'd1;
        if (y + 8'd1 == n_rows) run <= 1'b0;
        if (fc_bit == 6'(IFMEM_W - 1)) begin fc_bit <= '0; fc_row <= fc_row + 10'd1; end
        else fc_bit <= fc_bit + 6'd1;
        if (s + 3'd1 == cfg.ks) begin
          s <= '0;
          if (r + 3'd1 == cfg.kr) begin r <= '0; c <= c + 4'd1; end
          else r <= r + 3'd1;
        end else s <= s + 3'd1;
      end
      // stage 1
      if (s1_valid && !start) begin
        rows_loaded <= rows_loaded + 8'd1;
        if (rows_loaded + 8'd1 == n_rows) done <= 1'b1;
      end
    end
  end

  // stage 1: build the IFspad row from the IFmem word
  always_comb begin
    logic signed [9:0] col;
    col          = '0;
    spad_wr_en   = s1_valid && !start;
    spad_wr_addr = s1_y;
    spad_wr_data = '0;
    if (cfg.ltype == LAYER_FC) begin
      spad_wr_data[0] = ifm_rd_data[s1_fcbit];
    end else if (!s1_padrow) begin
      for (int x = 0; x < SPAD_COLS; x++) begin
        col = signed'((10'(cfg.out_col0) + 10'(x)) * 10'(cfg.stride)) + signed'({7'b0, s1_s})
              - signed'({8'b0, cfg.pad});
        if (x < int'(cfg.n_out) && col >= 0 && col < signed'({4'b0, cfg.in_w}))
          spad_wr_data[x] = ifm_rd_data[col[5:0]];
      end
    end
  end

  assign busy = run || s1_valid;
endmodule
