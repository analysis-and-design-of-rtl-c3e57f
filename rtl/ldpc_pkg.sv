// ldpc_pkg: constants, code description and framing-function helpers shared by
// the layered QC-LDPC decoder.
//
// The code is the (3,6)-regular QC-LDPC code with a 12 x 24 base matrix and
// expansion factor z = 54 (N = 1296 bits). Each base-matrix row is one decoding
// layer (one row per layer, 12 layers), which is the arrangement used by the
// pipelined architecture. Every row has d_c = 6 non-negative entries; they are
// stored here as (column, shift) pairs in ascending column order, and that order
// defines which processing lane handles which column.
//
// Messages use q = 4 bits (Q = 7) and a-posteriori LLRs use q~ = 6 bits. A
// framing function F is given by its look-up table [|F(0)|, F(1), ..., F(7)].
// The identity table gives the min-sum kernel; any other non-decreasing table
// gives a non-surjective FAID kernel whose messages need only
// w = ceil(log2(W)) + 1 bits, W being the number of distinct table entries.
// Messages are then carried as (sign, index into the sorted image of F).
// F(0) = +/-lambda is always mapped to +lambda, as is usual in practice.
package ldpc_pkg;

  // Quantisation
  localparam int Q_BITS  = 4;                      // q
  localparam int QT_BITS = 6;                      // q~
  localparam int QMAX    = (1 << (Q_BITS-1)) - 1;  // Q  = 7
  localparam int QTMAX   = (1 << (QT_BITS-1)) - 1; // Q~ = 31

  // Code geometry
  localparam int R_ROWS   = 12;  // rows of the base matrix
  localparam int C_COLS   = 24;  // columns of the base matrix
  localparam int DC       = 6;   // check-node degree
  localparam int Z_DEF    = 54;  // expansion factor
  localparam int N_LAYERS = 12;  // one base-matrix row per layer
  localparam int IDX_BITS = $clog2(DC);
  localparam int RPL_FULL = 4;   // rows per full layer (full-layer decoder: 3 layers)

  // Framing-function tables, entry m is F(m) (entry 0 is |F(0)|)
  typedef logic [0:QMAX][Q_BITS-2:0] fra_lut_t;
  localparam fra_lut_t LUT_MS      = {3'd0, 3'd1, 3'd2, 3'd3, 3'd4, 3'd5, 3'd6, 3'd7};
  localparam fra_lut_t LUT_NSFAID3 = {3'd0, 3'd1, 3'd1, 3'd3, 3'd3, 3'd3, 3'd7, 3'd7};
  localparam fra_lut_t LUT_NSFAID2 = {3'd1, 3'd1, 3'd1, 3'd1, 3'd1, 3'd6, 3'd6, 3'd6};

  // Non-negative entries of the base matrix, row by row (columns ascending).
  localparam int LAYER_COL [N_LAYERS][DC] = '{
    '{ 0,  5, 10, 15, 17, 23},
    '{ 3,  4,  9, 12, 18, 20},
    '{ 2,  7, 11, 13, 16, 22},
    '{ 1,  6,  8, 14, 19, 21},
    '{ 0,  4, 10, 15, 17, 23},
    '{ 2,  5, 11, 13, 16, 20},
    '{ 1,  7,  8, 14, 19, 21},
    '{ 3,  6,  9, 12, 18, 22},
    '{ 2,  4, 10, 15, 17, 23},
    '{ 0,  6, 11, 13, 16, 20},
    '{ 3,  5,  8, 12, 18, 22},
    '{ 1,  7,  9, 14, 19, 21}};

  localparam int LAYER_SHIFT [N_LAYERS][DC] = '{
    '{49, 43, 50,  2, 27, 49},
    '{10, 41, 52, 32, 50, 50},
    '{20, 20, 51, 10, 47, 33},
    '{24, 22, 53, 31, 18, 47},
    '{10, 15,  2, 50, 13, 53},
    '{44,  6, 29, 40, 16, 13},
    '{ 2, 13, 41, 42, 48, 49},
    '{36, 24, 50, 12, 10, 48},
    '{47, 50,  0,  9,  7, 28},
    '{ 6,  5, 13,  3, 29, 16},
    '{35, 16, 37,  4, 24, 29},
    '{24, 51, 38,  6, 23, 16}};

  // Shift of column col in layer l, or -1 if the entry is negative.
  function automatic int entry(input int l, input int col);
    entry = -1;
    for (int k = 0; k < DC; k++)
      if (LAYER_COL[l][k] == col) entry = LAYER_SHIFT[l][k];
  endfunction

  // Shift of the previous (cyclically) non-negative entry of column col before layer l.
  function automatic int prev_shift(input int l, input int col);
    int ll;
    prev_shift = -1;
    for (int d = 1; d <= N_LAYERS; d++) begin
      ll = (l - d + N_LAYERS) % N_LAYERS;
      if (prev_shift < 0 && entry(ll, col) >= 0) prev_shift = entry(ll, col);
    end
  endfunction

  // Shift of the last non-negative entry of column col (used by BS_INIT).
  function automatic int last_shift(input int col, input int z);
    last_shift = prev_shift(0, col) % z;
  endfunction

  // BS_R rotation for lane k of layer l: b(l,j) - b(l',j) mod z.
  function automatic int bsr_shift(input int l, input int k, input int z);
    int b, bp;
    b  = LAYER_SHIFT[l][k] % z;
    bp = prev_shift(l, LAYER_COL[l][k]) % z;
    bsr_shift = (b - bp + z) % z;
  endfunction

  // Number of distinct entries of a framing table (its weight W).
  function automatic int lut_weight(input fra_lut_t lut);
    lut_weight = 1;
    for (int m = 1; m <= QMAX; m++)
      if (lut[m] != lut[m-1]) lut_weight++;
  endfunction

  // Framing bit-length w = ceil(log2 W) + 1.
  function automatic int lut_bits(input fra_lut_t lut);
    lut_bits = $clog2(lut_weight(lut)) + 1;
  endfunction

  // Index of F(m) in the sorted image of F.
  function automatic int fra_index(input fra_lut_t lut, input int m);
    fra_index = 0;
    for (int k = 1; k <= m; k++)
      if (lut[k] != lut[k-1]) fra_index++;
  endfunction

  // Magnitude of the idx-th element of the sorted image of F.
  function automatic int defra_value(input fra_lut_t lut, input int idx);
    defra_value = int'(lut[QMAX]);
    for (int m = QMAX; m >= 0; m--)
      if (fra_index(lut, m) == idx) defra_value = int'(lut[m]);
  endfunction

  // ---- full layers (RPL_FULL consecutive rows). Slot s = DC*r + k of full
  // layer f is entry k of row RPL_FULL*f + r.

  // Column carried by slot s of full layer f.
  function automatic int fl_col(input int f, input int s);
    fl_col = LAYER_COL[RPL_FULL*f + s/DC][s%DC];
  endfunction

  // Shift (mod z) of slot s of full layer f.
  function automatic int fl_shift(input int f, input int s, input int z);
    fl_shift = LAYER_SHIFT[RPL_FULL*f + s/DC][s%DC] % z;
  endfunction

  // Slot of full layer f that carries column col.
  function automatic int fl_slot(input int f, input int col);
    fl_slot = 0;
    for (int s = 0; s < C_COLS; s++)
      if (fl_col(f, s) == col) fl_slot = s;
  endfunction

  // BS_WR rotation into slot s of full layer f+1 (mod the layer count) from
  // the slot of layer f that carries the same column.
  function automatic int fl_wr_shift(input int f, input int s, input int z);
    int fn;
    fn = (f + 1) % (N_LAYERS / RPL_FULL);
    fl_wr_shift = (fl_shift(fn, s, z) - fl_shift(f, fl_slot(f, fl_col(fn, s)), z) + z) % z;
  endfunction

endpackage
