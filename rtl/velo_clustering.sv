// velo_clustering: cluster finding for one VELO module, turning the event's
// SuperPixels into cluster positions (hits) for the tracking.
//
// SPs enter a chain of N_MATRICES sp_matrix stages, one stage per cycle; each
// SP settles in the first matrix that is free or already holds a neighbouring
// SP. An SP that leaves the last matrix found no room: it is dropped and
// counted in `overflow`. At the end-of-event word the input stops, the chain
// is left to empty, and the fired cells of all matrices are read out, one
// cluster per cycle, lowest matrix and cell first. For each fired cell the
// cluster centre is the centroid of the active pixels among its 3x3
// candidate pixels, from a 512-entry table (computed at elaboration) giving
// the offsets in quarter pixels. The hit carries `layer` (the module number)
// and x = column, y = row, both in quarter pixels. After the last cluster an
// end-of-event word is sent, the matrices are cleared, and the next event may
// enter.
//
// Timing: one SP per cycle in; per event, about (chain depth reached by the
// last SP) + (clusters) + 3 cycles of readout during which sp_ready is low.
// The chain of 3x3-SP matrices, matrix initialisation and the pattern cells
// follow the source; the chain length, the readout order, the dropped-SP
// rule and the centroid table are this design's. The source reaches 38.9 MHz
// event rate by reading out in parallel with the next event's filling; this
// version does not overlap the two.
module velo_clustering
  import retina_pkg::*;
#(
  parameter int unsigned N_MATRICES = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [LAYER_W-1:0] layer,

  input  logic               sp_valid,
  output logic               sp_ready,
  input  sp_word_t           sp_word,

  output logic               hit_valid,
  input  logic               hit_ready,
  output word_t              hit_word,

  output logic [15:0]        overflow
);

  localparam int unsigned NCELL = 72;
  localparam int unsigned MW    = (N_MATRICES > 1) ? $clog2(N_MATRICES) : 1;

  // centroid of a 3x3 candidate, in quarter pixels from the checking pixel
  typedef logic [7:0] ctab_t [512];   // {row offset, column offset}, 4 bits each
  function automatic ctab_t build_ctab();
    ctab_t t;
    for (int m = 0; m < 512; m++) begin
      int n, sr, sc;
      n = 0; sr = 0; sc = 0;
      for (int a = 0; a < 3; a++)
        for (int b = 0; b < 3; b++)
          if (m[a*3 + b]) begin
            n  = n + 1;
            sr = sr + a;
            sc = sc + b;
          end
      if (n == 0) t[m] = '0;
      else        t[m] = {4'((4*sr + n/2) / n), 4'((4*sc + n/2) / n)};
    end
    return t;
  endfunction
  localparam ctab_t CTAB = build_ctab();

  typedef enum logic [1:0] {S_FILL, S_DRAIN, S_READ, S_EOE} state_e;
  state_e state;

  logic                   clear;
  logic [N_MATRICES:0]    c_valid;
  sp_t                    c_sp [N_MATRICES+1];
  logic [N_MATRICES-1:0]  m_init;     // status only, unused
  logic signed [PIX_W+1:0] m_brow [N_MATRICES];
  logic signed [PIX_W+1:0] m_bcol [N_MATRICES];
  logic [NCELL-1:0]       m_fire [N_MATRICES];
  logic [8:0]             m_cand [N_MATRICES][NCELL];
  logic [NCELL-1:0]       emitted [N_MATRICES];

  assign sp_ready   = (state == S_FILL);
  assign c_valid[0] = sp_valid && sp_ready && !sp_word.eoe;
  assign c_sp[0]    = sp_word.sp;

  for (genvar k = 0; k < N_MATRICES; k++) begin : g_mat
    sp_matrix u_mat (
      .clk, .rst_n, .clear,
      .in_valid  (c_valid[k]),
      .in_sp     (c_sp[k]),
      .pass_valid(c_valid[k+1]),
      .pass_sp   (c_sp[k+1]),
      .init      (m_init[k]),
      .base_row  (m_brow[k]),
      .base_col  (m_bcol[k]),
      .fire      (m_fire[k]),
      .cand      (m_cand[k])
    );
  end

  // first remaining fired cell over all matrices
  logic                    found;
  logic [MW-1:0]           sel_m;
  logic [$clog2(NCELL)-1:0] sel_c;
  always_comb begin
    found = 1'b0;
    sel_m = '0;
    sel_c = '0;
    for (int k = N_MATRICES - 1; k >= 0; k--) begin
      logic [NCELL-1:0] rem;
      rem = m_fire[k] & ~emitted[k];
      if (rem != '0) begin
        found = 1'b1;
        sel_m = MW'(k);
        for (int c = NCELL - 1; c >= 0; c--) if (rem[c]) sel_c = ($clog2(NCELL))'(c);
      end
    end
  end

  // position of the selected cluster
  logic [7:0]              cent;
  logic signed [PIX_W+5:0] gy, gx;
  hit_t                    hit_n;
  always_comb begin
    cent = CTAB[m_cand[sel_m][sel_c]];
    gy = (((PIX_W+6)'(m_brow[sel_m]) + (PIX_W+6)'(sel_c / 6)) <<< FRAC_W) + (PIX_W+6)'(cent[7:4]);
    gx = (((PIX_W+6)'(m_bcol[sel_m]) + (PIX_W+6)'(sel_c % 6)) <<< FRAC_W) + (PIX_W+6)'(cent[3:0]);
    hit_n.layer = layer;
    hit_n.y = (gy < 0) ? '0 : (gy > (2**COORD_W - 1)) ? '1 : COORD_W'(gy);
    hit_n.x = (gx < 0) ? '0 : (gx > (2**COORD_W - 1)) ? '1 : COORD_W'(gx);
  end

  logic can_load;
  assign can_load = !hit_valid || hit_ready;
  assign clear    = (state == S_EOE) && can_load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_FILL;
      hit_valid <= 1'b0;
      hit_word  <= '0;
      overflow  <= '0;
      for (int k = 0; k < N_MATRICES; k++) emitted[k] <= '0;
    end else begin
      if (c_valid[N_MATRICES]) overflow <= overflow + 1'b1;
      if (hit_valid && hit_ready) hit_valid <= 1'b0;
      case (state)
        S_FILL:  if (sp_valid && sp_word.eoe) state <= S_DRAIN;
        S_DRAIN: if (c_valid[N_MATRICES-1:0] == '0) state <= S_READ;
        S_READ: if (can_load) begin
          if (found) begin
            hit_valid <= 1'b1;
            hit_word  <= '{eoe: 1'b0, hit: hit_n};
            emitted[sel_m][sel_c] <= 1'b1;
          end else begin
            state <= S_EOE;
          end
        end
        S_EOE: if (can_load) begin
          hit_valid <= 1'b1;
          hit_word  <= '{eoe: 1'b1, hit: '0};
          for (int k = 0; k < N_MATRICES; k++) emitted[k] <= '0;
          state <= S_FILL;
        end
        default: state <= S_FILL;
      endcase
    end
  end

endmodule
