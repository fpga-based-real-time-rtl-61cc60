// retina_cell: one cell of the retina's track-parameter matrix. The cell
// stands for a reference track, which crosses every detector layer at a point
// called its receptor. For every hit it receives, the cell adds a weight that
// falls with the hit's distance from the receptor on the hit's layer:
//     R = sum over hits of exp(-(dx^2 + dy^2) / (2 sigma^2)),
// scaled to 255 for a hit on the receptor. R comes close to 255 times the
// number of layers only when a set of hits lies near the reference track.
//
// The Gaussian weight follows the source; the 2-D distance, the fixed-point
// scale, the cut at |dx| or |dy| >= D_MAX and sigma are this design's. The
// weight is read from a 512-entry table indexed by dx^2 + dy^2 and computed
// at elaboration from SIGMA2 (sigma^2 in quarter pixels squared).
//
// Interface: receptors are written through cfg_* (one layer per cycle; not
// reset, write every layer used). Hits arrive on a valid/ready stream and are
// accumulated one per cycle, one cycle after acceptance. An end-of-event word
// stops the input, and `done` rises one cycle later, when `acc` holds the
// final R; both hold until `clear` is pulsed, which zeroes R for the next
// event.
module retina_cell
  import retina_pkg::*;
#(
  parameter int unsigned N_LAYERS = 38,
  parameter int unsigned SIGMA2   = 16
) (
  input  logic                clk,
  input  logic                rst_n,

  input  logic                cfg_we,
  input  logic [LAYER_W-1:0]  cfg_layer,
  input  logic [COORD_W-1:0]  cfg_rx,
  input  logic [COORD_W-1:0]  cfg_ry,

  input  logic                in_valid,
  output logic                in_ready,
  input  word_t               in_word,

  input  logic                clear,
  output logic                done,
  output logic [ACC_W-1:0]    acc
);

  typedef logic [WEIGHT_W-1:0] wtab_t [2**D2_W];

  function automatic wtab_t build_wtab();
    wtab_t t;
    for (int unsigned d2 = 0; d2 < 2**D2_W; d2++) t[d2] = gauss_weight(d2, SIGMA2);
    return t;
  endfunction

  localparam wtab_t WTAB = build_wtab();

  logic [COORD_W-1:0] rx [N_LAYERS];
  logic [COORD_W-1:0] ry [N_LAYERS];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_layer < LAYER_W'(N_LAYERS)) begin
      rx[cfg_layer] <= cfg_rx;
      ry[cfg_layer] <= cfg_ry;
    end
  end

  // distance to the receptor of the hit's layer
  logic signed [COORD_W:0]  dx, dy;
  logic [COORD_W-1:0]       adx, ady;
  logic                     near;
  logic [D2_W-1:0]          d2;
  logic [WEIGHT_W-1:0]      weight;
  logic                     take;

  logic seen;                     // end of event taken; acc final next cycle

  assign in_ready = !seen;
  assign take     = in_valid && in_ready && !in_word.eoe;

  always_comb begin
    if (in_word.hit.layer < LAYER_W'(N_LAYERS)) begin
      dx = $signed({1'b0, in_word.hit.x}) - $signed({1'b0, rx[in_word.hit.layer]});
      dy = $signed({1'b0, in_word.hit.y}) - $signed({1'b0, ry[in_word.hit.layer]});
    end else begin
      dx = '0;
      dy = '0;
    end
    adx    = dx[COORD_W] ? COORD_W'(-dx) : dx[COORD_W-1:0];
    ady    = dy[COORD_W] ? COORD_W'(-dy) : dy[COORD_W-1:0];
    near   = (in_word.hit.layer < LAYER_W'(N_LAYERS)) &&
             (adx < COORD_W'(D_MAX)) && (ady < COORD_W'(D_MAX));
    d2     = D2_W'(adx * adx + ady * ady);
    weight = near ? WTAB[d2] : '0;
  end

  logic [WEIGHT_W-1:0] w_q;
  logic                w_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen <= 1'b0;
      done <= 1'b0;
      acc  <= '0;
      w_q  <= '0;
      w_v  <= 1'b0;
    end else begin
      w_v <= take;
      w_q <= weight;
      if (clear) begin
        seen <= 1'b0;
        done <= 1'b0;
        acc  <= '0;
      end else begin
        if (w_v) acc <= acc + ACC_W'(w_q);
        if (in_valid && in_ready && in_word.eoe) seen <= 1'b1;
        done <= seen;
      end
    end
  end

endmodule
