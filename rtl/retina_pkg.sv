// retina_pkg: types and constants shared by the clustering front end, the
// distribution network and the retina cell array.
//
// A VELO module delivers SuperPixels (SPs): blocks of 4 pixel rows by 2 pixel
// columns with one bit per pixel. The clustering turns them into hits, and a
// hit is what travels through the distribution network to the retina cells.
// Every stream is a valid/ready stream of `word_t`: either a hit or an
// end-of-event marker. The end-of-event marker is how this implementation
// separates events; the field widths, the coordinate units (quarter pixels)
// and the marker itself are choices of this design, not numbers from the
// source description.
package retina_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned SP_ROW_W  = 6;   // 64 SP rows    -> 256 pixel rows
  localparam int unsigned SP_COL_W  = 7;   // 128 SP columns -> 256 pixel columns
  localparam int unsigned PIX_W     = 8;   // pixel row / column index
  localparam int unsigned FRAC_W    = 2;   // hit coordinates in quarter pixels
  localparam int unsigned COORD_W   = PIX_W + FRAC_W;
  localparam int unsigned LAYER_W   = 6;   // up to 64 detector layers (52 VELO modules)

  // SuperPixel: pixel (r, c) of the 4x2 block is bit c*4 + r.
  typedef struct packed {
    logic [SP_ROW_W-1:0] row;
    logic [SP_COL_W-1:0] col;
    logic [7:0]          pix;
  } sp_t;

  // SP stream word: an SP or the end of an event.
  typedef struct packed {
    logic eoe;
    sp_t  sp;
  } sp_word_t;

  typedef struct packed {
    logic [LAYER_W-1:0] layer;
    logic [COORD_W-1:0] x;     // column coordinate, quarter pixels
    logic [COORD_W-1:0] y;     // row coordinate, quarter pixels
  } hit_t;

  // Hit stream word: a hit or the end of an event.
  typedef struct packed {
    logic eoe;
    hit_t hit;
  } word_t;

  // ------------------------------------------------------ routing-LUT key
  // The routing LUTs of the distribution network are addressed by the coarse
  // position of a hit: the top KEY_HALF bits of x and of y.
  localparam int unsigned KEY_HALF = 5;
  localparam int unsigned KEY_W    = 2 * KEY_HALF;

  function automatic logic [KEY_W-1:0] route_key(hit_t h);
    return {h.x[COORD_W-1 -: KEY_HALF], h.y[COORD_W-1 -: KEY_HALF]};
  endfunction

  // ---------------------------------------------------------- retina cells
  localparam int unsigned WEIGHT_W = 8;    // weight 255 = a hit on the receptor
  localparam int unsigned D_MAX    = 16;   // hits at |dx| or |dy| >= D_MAX weigh 0
  localparam int unsigned D2_W     = 9;    // dx*dx + dy*dy < 2*D_MAX*D_MAX = 512
  localparam int unsigned ACC_W    = 16;   // sum of weights over one event

  // exp(-a) for a >= 0, by halving the argument until it is small, a Taylor
  // series, and squaring back. Used only at elaboration.
  function automatic real exp_neg(real a);
    real t, s, term;
    int  k;
    t = a;
    k = 0;
    while (t > 0.125) begin
      t = t / 2.0;
      k = k + 1;
    end
    s = 1.0;
    term = 1.0;
    for (int n = 1; n < 12; n++) begin
      term = -term * t / n;
      s = s + term;
    end
    for (int i = 0; i < k; i++) s = s * s;
    return s;
  endfunction

  // Weight of a hit at squared distance d2 (quarter pixels squared) from the
  // receptor: round(255 * exp(-d2 / (2 sigma^2))).
  function automatic logic [WEIGHT_W-1:0] gauss_weight(int unsigned d2, int unsigned sigma2);
    real w;
    w = 255.0 * exp_neg(real'(d2) / (2.0 * real'(sigma2)));
    return WEIGHT_W'($rtoi(w + 0.5));
  endfunction

  typedef struct packed {
    logic [7:0]        cell_u;   // column of the local-maximum cell
    logic [7:0]        cell_v;   // row of the local-maximum cell
    logic signed [7:0] du;       // centroid offset in 1/64 of a cell
    logic signed [7:0] dv;
    logic [ACC_W-1:0]  peak;     // response of the local-maximum cell
  } track_t;

  localparam int unsigned CENT_FRAC = 6;   // fractional bits of du, dv

  // --------------------------------------------------------- configuration
  typedef enum logic [1:0] {
    CFG_SW_GROUP = 2'd0,   // LUTs of the 1 to 4 switch
    CFG_SW_FPGA  = 2'd1,   // LUTs of the 4 to 10 switch
    CFG_SW_CELL  = 2'd2,   // LUTs of the 10 to n switch
    CFG_RECEPTOR = 2'd3    // receptor of one cell on one layer
  } cfg_sel_e;

  typedef struct packed {
    cfg_sel_e    sel;
    logic [7:0]  port_idx;   // switch input, or cell index
    logic [15:0] addr;       // LUT key, or layer
    logic [31:0] data;       // output mask, or {rx, ry}
  } cfg_t;

endpackage
