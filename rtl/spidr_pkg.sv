// spidr_pkg -- shared constants, types and column-mapping functions of the
// SpiDR spiking-neural-network core.
//
// Array sizes follow the published design: a compute macro (CM) is a 160x48
// SRAM (128 weight rows + 32 partial-Vmem rows), a neuron macro (NM) is 72x48,
// the input scratchpad (IFspad) is 128x16, the input spike memory (IFmem) is
// 640x56, and the core has 9 compute units (CU) and 3 neuron units (NU).
// Weight/Vmem precisions are 4/7, 6/11 and 8/15 bits (Vmem = 2*W-1).
//
// Column mapping (this design's reading of the staggered layout): a weight
// row holds 48/W weight slots of W columns; slots 0,2,4.. are the "odd"
// weights (odd cycle switches close on lines 0-3, 8-11, .., 40-43 at 4 bit),
// slots 1,3,5.. the "even" weights. A Vmem word occupies 2*W-1 columns whose
// LSB sits under its weight's LSB column: odd Vmem rows (2X+1) start their
// words at column 2kW, even Vmem rows (2X) at column (2k+1)W. The last even
// word wraps from column 47 to column 0; the column after each word is where
// the adder chain is cut ("new Vmem word"). Weights and Vmems are two's
// complement; the Vmem columns above the weight receive the weight's sign.
package spidr_pkg;

  localparam int CM_COLS     = 48;
  localparam int CM_WROWS    = 128;
  localparam int CM_VROWS    = 32;
  localparam int CM_ROWS     = CM_WROWS + CM_VROWS;   // 160
  localparam int NM_ROWS     = 72;
  localparam int NM_PART0    = 0;    // rows 0..31  partial Vmems
  localparam int NM_FULL0    = 32;   // rows 32..63 full Vmems
  localparam int NM_THR_ODD  = 64;   // threshold row, odd-row word layout
  localparam int NM_THR_EVEN = 65;   // threshold row, even-row word layout
  localparam int NM_LK_ODD   = 66;   // leak row, odd-row word layout
  localparam int NM_LK_EVEN  = 67;   // leak row, even-row word layout
  localparam int SPAD_ROWS   = 128;
  localparam int SPAD_COLS   = 16;
  localparam int IFMEM_ROWS  = 640;
  localparam int IFMEM_W     = 56;
  localparam int N_CU        = 9;
  localparam int N_NU        = 3;
  localparam int AQ_DEPTH    = 16;
  localparam int MAX_WORDS   = 6;    // Vmem words per row at 4 bit
  localparam int OSM_DEPTH   = 256;  // output spike memory entries (8 bit)

  typedef logic [CM_COLS-1:0] row_t;

  typedef enum logic [1:0] {PREC_4 = 2'd0, PREC_6 = 2'd1, PREC_8 = 2'd2} prec_e;
  typedef enum logic {MODE1 = 1'b0, MODE2 = 1'b1} mode_e;
  typedef enum logic {NEURON_IF = 1'b0, NEURON_LIF = 1'b1} nmodel_e;
  typedef enum logic {RESET_HARD = 1'b0, RESET_SOFT = 1'b1} nreset_e;
  typedef enum logic {LAYER_CONV = 1'b0, LAYER_FC = 1'b1} ltype_e;

  // (Y, X) address tuple: weight row Y, Vmem pair X
  typedef struct packed {
    logic [6:0] y;
    logic [3:0] x;
  } addr_tuple_t;

  // Layer configuration, written once before a layer starts.
  typedef struct packed {
    ltype_e     ltype;
    prec_e      prec;
    mode_e      mode;
    nmodel_e    nmodel;
    nreset_e    nreset;
    logic [4:0] timesteps;  // T, 1..31
    logic [3:0] n_ch;       // input channels held by each CU (conv)
    logic [2:0] kr;         // kernel rows R
    logic [2:0] ks;         // kernel columns S
    logic [1:0] stride;     // 1..3
    logic [1:0] pad;        // zero padding 0..3
    logic [6:0] in_h;       // input rows per channel in IFmem
    logic [5:0] in_w;       // input columns (<= 56)
    logic [5:0] out_row;    // output row p of the 16-output tile
    logic [5:0] out_col0;   // first output column q0 of the tile
    logic [4:0] n_out;      // outputs in the tile, 1..16
    logic [7:0] fc_n;       // FC: input neurons held by each CU, 1..128
    logic [9:0] ts_rows;    // IFmem rows per timestep
  } layer_cfg_t;

  localparam int CFG_BITS = $bits(layer_cfg_t);

  function automatic int wbits(prec_e p);
    case (p)
      PREC_6:  return 6;
      PREC_8:  return 8;
      default: return 4;
    endcase
  endfunction

  function automatic int vbits(prec_e p);
    return 2 * wbits(p) - 1;
  endfunction

  // Vmem words in one Vmem row (= weights of one parity in a weight row)
  function automatic int nwords(prec_e p);
    return CM_COLS / (2 * wbits(p));
  endfunction

  // Column holding bit b of Vmem word k in a row of the given parity.
  function automatic int vcol(prec_e p, logic odd, int k, int b);
    int c;
    c = (odd ? 2 * k * wbits(p) : (2 * k + 1) * wbits(p)) + b;
    if (c >= CM_COLS) c = c - CM_COLS;
    return c;
  endfunction

  // Mask of the columns that belong to Vmem words in a row of this parity.
  function automatic row_t word_mask(prec_e p, logic odd);
    row_t m;
    m = '0;
    for (int k = 0; k < MAX_WORDS; k++)
      for (int b = 0; b < 15; b++)
        if (k < nwords(p) && b < vbits(p)) m[vcol(p, odd, k, b)] = 1'b1;
    return m;
  endfunction

  // Word k of a row, sign-extended to 16 bits.
  function automatic logic signed [15:0] get_word(row_t r, prec_e p, logic odd, int k);
    logic [15:0] v;
    v = '0;
    for (int b = 0; b < 15; b++)
      if (b < vbits(p)) v[b] = r[vcol(p, odd, k, b)];
    for (int b = 1; b < 16; b++)
      if (b >= vbits(p)) v[b] = v[vbits(p) - 1];
    return signed'(v);
  endfunction

  // Row r with word k replaced by the low Vmem bits of val.
  function automatic row_t put_word(row_t r, prec_e p, logic odd, int k, logic [15:0] val);
    row_t o;
    o = r;
    for (int b = 0; b < 15; b++)
      if (b < vbits(p)) o[vcol(p, odd, k, b)] = val[b];
    return o;
  endfunction

endpackage
