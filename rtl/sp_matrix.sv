// sp_matrix: one cluster-finding matrix of 3x3 SuperPixels (12 x 6 pixels).
// Matrices form a chain. An uninitialised matrix takes the first SP that
// reaches it, places it in its centre and so fixes the coordinates of the
// eight neighbouring SP positions. A later SP whose coordinates match one of
// the nine positions is stored there (bits ORed in); any other SP is passed
// on, one cycle later, to the next matrix of the chain.
//
// Every pixel of the matrix is a cell that checks its neighbourhood for the
// two seed patterns below, drawn with the checking pixel C at local row p,
// column q, rows growing upwards (1 = active, 0 = inactive, . = don't care,
// G = cluster candidate, the 3x3 pixels at rows p..p+2, columns q..q+2):
//     pattern A          pattern B
//     . G G G            . G G G
//     0 G G G            0 1 G G
//     0 C G G   C = 1    0 C 1 G   C not tested
//     0 0 0 .            0 0 0 .
// A cell that matches either pattern fires and offers its 9 candidate pixel
// states. Pixels outside the matrix read as 0. The patterns follow the source;
// the row direction, the bit order and the outside-is-0 rule are this
// design's.
//
// Pixel (r, c) of an SP is bit c*4 + r; local pixel (p, q) of the matrix lies
// at global row (R0-1)*4 + p, column (C0-1)*2 + q, for centre SP (R0, C0).
// `clear` returns the matrix to the uninitialised state.
module sp_matrix
  import retina_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,

  input  logic                  in_valid,
  input  sp_t                   in_sp,
  output logic                  pass_valid,
  output sp_t                   pass_sp,

  output logic                  init,
  output logic signed [PIX_W+1:0] base_row,   // global row of local row 0
  output logic signed [PIX_W+1:0] base_col,   // global column of local column 0
  output logic [71:0]           fire,         // cell p*6 + q matches a pattern
  output logic [8:0]            cand [72]     // candidate bits, (row off)*3 + col off
);

  localparam int ROWS = 12;
  localparam int COLS = 6;

  logic [SP_ROW_W-1:0] r0;
  logic [SP_COL_W-1:0] c0;
  logic [ROWS*COLS-1:0] pix;                 // bit p*COLS + q

  // position of the incoming SP relative to the centre
  logic signed [SP_ROW_W:0] drow;
  logic signed [SP_COL_W:0] dcol;
  logic                     match;
  logic [ROWS*COLS-1:0]     sp_bits;

  always_comb begin
    drow  = $signed({1'b0, in_sp.row}) - $signed({1'b0, r0});
    dcol  = $signed({1'b0, in_sp.col}) - $signed({1'b0, c0});
    match = init && drow >= -1 && drow <= 1 && dcol >= -1 && dcol <= 1;
    sp_bits = '0;
    for (int r = 0; r < 4; r++) begin
      for (int c = 0; c < 2; c++) begin
        int p, q;
        p = (int'(drow) + 1) * 4 + r;
        q = (int'(dcol) + 1) * 2 + c;
        if (p >= 0 && p < ROWS && q >= 0 && q < COLS) sp_bits[p*COLS + q] = in_sp.pix[c*4 + r];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init       <= 1'b0;
      r0         <= '0;
      c0         <= '0;
      pix        <= '0;
      pass_valid <= 1'b0;
      pass_sp    <= '0;
    end else begin
      pass_valid <= 1'b0;
      if (clear) begin
        init <= 1'b0;
        pix  <= '0;
      end else if (in_valid) begin
        if (!init) begin
          // first SP: becomes the centre (local rows 4..7, columns 2..3)
          init <= 1'b1;
          r0   <= in_sp.row;
          c0   <= in_sp.col;
          for (int r = 0; r < 4; r++)
            for (int c = 0; c < 2; c++)
              pix[(4 + r)*COLS + 2 + c] <= in_sp.pix[c*4 + r];
        end else if (match) begin
          pix <= pix | sp_bits;
        end else begin
          pass_valid <= 1'b1;
          pass_sp    <= in_sp;
        end
      end
    end
  end

  assign base_row = $signed({2'b0, r0, 2'b0}) - 4;
  assign base_col = $signed({2'b0, c0, 1'b0}) - 2;

  function automatic logic px(logic [ROWS*COLS-1:0] m, int p, int q);
    if (p < 0 || p >= ROWS || q < 0 || q >= COLS) return 1'b0;
    return m[p*COLS + q];
  endfunction

  always_comb begin
    for (int p = 0; p < ROWS; p++) begin
      for (int q = 0; q < COLS; q++) begin
        logic zeros, pa, pb;
        zeros = !px(pix, p, q-1) && !px(pix, p+1, q-1) && !px(pix, p-1, q-1) &&
                !px(pix, p-1, q) && !px(pix, p-1, q+1);
        pa = zeros && px(pix, p, q);
        pb = zeros && px(pix, p+1, q) && px(pix, p, q+1);
        fire[p*COLS + q] = init && (pa || pb);
        for (int a = 0; a < 3; a++)
          for (int b = 0; b < 3; b++)
            cand[p*COLS + q][a*3 + b] = px(pix, p + a, q + b);
      end
    end
  end

endmodule
