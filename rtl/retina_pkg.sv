// retina_pkg: types, sizes and geometry shared by every block of the
// artificial-retina track processor.
//
// The hit word is 41 bits wide (x, y, layer identifier, timestamp), as in the
// paper; the split 12+12+3+14 is this design's choice.  A one-bit EndEvent flag
// travels beside the hit and marks the end of an event's readout.  Inside the
// switching network every word also carries the box of engine addresses that
// need it (row range x column range), which is how this design encodes the
// "group the hit belongs to".
//
// Geometry: engine (row, col) of the (u,v) grid has, on layer k, a central
// intersection at x0 = col*P(k) + P(k)/2, y0 = row*P(k) + P(k)/2, so the cell
// pitch grows with the layer distance like a projective (straight-track)
// geometry.  The six lateral cells (+/-dd, +/-dz, +/-dk) move the
// intersections by fixed per-layer offsets.  The paper derives its tables from
// the LHCb VELO geometry and a non-linear (u,v) transform; those numbers are
// not printed, so the pitch and offset tables here are illustrative and are
// the one place to edit for a real detector.
//
// The weighting function is a Gaussian of the rounded squared distance:
// w(a) = round(255 * exp(-a/32)) for a = 0..255, computed here in fixed
// point by repeated multiplication with round(65536*exp(-1/32)) = 63520.
package retina_pkg;

  // ---- sizes -----------------------------------------------------------
  localparam int NLAYERS = 6;   // tracking layers (paper: six VELO pixel layers)
  localparam int NCELLS  = 7;   // central cell + six lateral cells per engine
  localparam int NNB     = 8;   // neighbours of an engine in the (u,v) grid
  localparam int XW      = 12;  // hit x coordinate
  localparam int YW      = 12;  // hit y coordinate
  localparam int LW      = 3;   // layer identifier
  localparam int TSW     = 14;  // timestamp
  localparam int HIT_W   = XW + YW + LW + TSW;  // = 41, paper's hit word
  localparam int AW      = 8;   // engine row / column address field
  localparam int WW      = 8;   // weight from the 8 x 256 lookup table
  localparam int ACCW    = 16;  // accumulator
  localparam int FRAC    = 8;   // fraction bits of fitted parameters
  localparam int PW      = 18;  // signed width of u, v (cell units, FRAC fraction bits)
  localparam int LPW     = 10;  // signed width of d, z, k (units of the lateral step)
  localparam int CW      = 13;  // signed width of an intersection coordinate
  localparam int R_SHIFT = 6;   // squared distance >> R_SHIFT, saturated, addresses the LUT

  // ---- words -------------------------------------------------------------
  typedef struct packed {
    logic [XW-1:0]  x;
    logic [YW-1:0]  y;
    logic [LW-1:0]  layer;
    logic [TSW-1:0] ts;
  } hit_t;

  // word on an input link: a hit, or an EndEvent marker (ee=1, hit.ts = event)
  typedef struct packed {
    logic ee;
    hit_t hit;
  } link_word_t;

  // inclusive box of engine addresses a hit must reach
  typedef struct packed {
    logic [AW-1:0] row_lo;
    logic [AW-1:0] row_hi;
    logic [AW-1:0] col_lo;
    logic [AW-1:0] col_hi;
  } box_t;

  // word inside the switching network
  typedef struct packed {
    logic ee;
    hit_t hit;
    box_t box;
  } sw_word_t;

  // lateral cell index inside an engine
  typedef enum logic [2:0] {
    CELL_C = 3'd0, CELL_DP = 3'd1, CELL_DM = 3'd2, CELL_ZP = 3'd3,
    CELL_ZM = 3'd4, CELL_KP = 3'd5, CELL_KM = 3'd6
  } cell_e;

  // everything read out of an engine for one local maximum.
  // nb order (drow,dcol): 0:(-1,-1) 1:(-1,0) 2:(-1,+1) 3:(0,-1)
  //                       4:(0,+1)  5:(+1,-1) 6:(+1,0) 7:(+1,+1)
  typedef struct packed {
    logic [AW-1:0]                  row;
    logic [AW-1:0]                  col;
    logic [TSW-1:0]                 ts;
    logic [NCELLS-1:0][ACCW-1:0]    acc;
    logic [NNB-1:0][ACCW-1:0]       nb;
  } cluster_t;

  // reconstructed track: (u,v) in cell units, lateral parameters in units of
  // the lateral step, all with FRAC fraction bits
  typedef struct packed {
    logic [TSW-1:0]        ts;
    logic signed [PW-1:0]  u;
    logic signed [PW-1:0]  v;
    logic signed [LPW-1:0] d;
    logic signed [LPW-1:0] z;
    logic signed [LPW-1:0] k;
    logic [ACCW-1:0]       peak;
  } track_t;

  // ---- geometry ----------------------------------------------------------
  function automatic int pitch(input int layer);
    case (layer)
      0: return 64;   1: return 72;   2: return 80;
      3: return 96;   4: return 112;  default: return 120;
    endcase
  endfunction

  // ceil(2^20 / pitch): reciprocal used to find the cell under a hit; with
  // 12-bit coordinates (x * recip) >> 20 equals floor(x / pitch) exactly
  function automatic int recip(input int layer);
    return ((1 << 20) + pitch(layer) - 1) / pitch(layer);
  endfunction

  function automatic int nb_drow(input int n);
    case (n)
      0, 1, 2: return -1;
      3, 4:    return 0;
      default: return 1;
    endcase
  endfunction

  function automatic int nb_dcol(input int n);
    case (n)
      0, 3, 5: return -1;
      1, 6:    return 0;
      default: return 1;
    endcase
  endfunction

  // which of the eight neighbours of engine (row,col) lie inside the grid
  function automatic logic [NNB-1:0] nb_exists(input int row, input int col,
                                               input int rows, input int cols);
    logic [NNB-1:0] m;
    for (int n = 0; n < NNB; n++)
      m[n] = (row + nb_drow(n) >= 0) && (row + nb_drow(n) < rows) &&
             (col + nb_dcol(n) >= 0) && (col + nb_dcol(n) < cols);
    return m;
  endfunction

  // intersection of cell j of engine (row,col) with layer k: x depends on
  // the column only, y on the row only
  function automatic int isect_x(input int col, input int j, input int k);
    int x;
    x = col * pitch(k) + pitch(k) / 2;
    case (j)
      1: x = x + 16;
      2: x = x - 16;
      5: x = x + k * (k + 1);
      6: x = x - k * (k + 1);
      default: ;
    endcase
    return x;
  endfunction

  function automatic int isect_y(input int row, input int j, input int k);
    int y;
    y = row * pitch(k) + pitch(k) / 2;
    case (j)
      3: y = y + 4 + 4 * k;
      4: y = y - 4 - 4 * k;
      default: ;
    endcase
    return y;
  endfunction

  // global (u,v) translation of an engine, in cell units with FRAC fraction
  // bits; a linear grid here, a non-linear map for a real detector
  function automatic int uv_offset(input int idx);
    return idx << FRAC;
  endfunction

  // weighting function, 256 entries of 8 bits
  localparam longint WDECAY_Q16 = 63520;  // round(65536*exp(-1/32))

  function automatic logic [255:0][WW-1:0] weight_table();
    logic [255:0][WW-1:0] t;
    longint v;
    v = 64'd255 << 16;
    for (int a = 0; a < 256; a++) begin
      t[a] = WW'((v + 32768) >> 16);
      v = (v * WDECAY_Q16) >> 16;
    end
    return t;
  endfunction

endpackage
