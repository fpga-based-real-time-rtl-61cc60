// tb_sp_matrix: one clustering matrix. Directed part: the two seed patterns
// of the cluster-finding figure (a lone pixel; a diagonal pair with the
// checking pixel empty) must fire exactly one cell, at the expected place,
// with the expected 3x3 candidate. Random part: a first SP initialises the
// matrix, then random SPs near and far arrive; far ones must come out on the
// pass output one cycle later, unchanged. The expected pixel map is kept
// here in global coordinates, and the fire and candidate outputs of every
// cell are compared with the patterns evaluated on that map.
module tb_sp_matrix;
  import retina_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic        clear, in_valid, pass_valid, init;
  sp_t         in_sp, pass_sp;
  logic signed [PIX_W+1:0] base_row, base_col;
  logic [71:0] fire;
  logic [8:0]  cand [72];

  sp_matrix dut (.*);

  int checks = 0, failures = 0;
  bit gmap [int][int];      // active global pixels [row][col]
  int R0, C0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  // pixel state as the matrix should see it: only its 12 x 6 region
  function automatic bit g(int row, int col);
    int p, q;
    p = row - (R0 - 1) * 4;
    q = col - (C0 - 1) * 2;
    if (p < 0 || p >= 12 || q < 0 || q >= 6) return 0;
    if (!gmap.exists(row)) return 0;
    if (!gmap[row].exists(col)) return 0;
    return gmap[row][col];
  endfunction

  task automatic send(sp_t sp);
    in_sp = sp;
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic check_all(string tag);
    for (int p = 0; p < 12; p++) for (int q = 0; q < 6; q++) begin
      int row, col;
      bit z, f;
      logic [8:0] cd;
      row = (R0 - 1) * 4 + p;
      col = (C0 - 1) * 2 + q;
      z = !g(row, col-1) && !g(row+1, col-1) && !g(row-1, col-1) && !g(row-1, col) && !g(row-1, col+1);
      f = z && (g(row, col) || (g(row+1, col) && g(row, col+1)));
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) cd[a*3+b] = g(row+a, col+b);
      checks++;
      if (fire[p*6+q] != f) fail($sformatf("%s: fire at (%0d,%0d) is %0b", tag, p, q, fire[p*6+q]));
      checks++;
      if (cand[p*6+q] != cd) fail($sformatf("%s: candidate at (%0d,%0d)", tag, p, q));
    end
    checks++;
    if (base_row != (R0 - 1) * 4 || base_col != (C0 - 1) * 2) fail("base coordinates");
  endtask

  task automatic new_matrix(sp_t sp);
    clear = 1;
    @(negedge clk);
    clear = 0;
    gmap.delete();
    R0 = int'(sp.row);
    C0 = int'(sp.col);
    for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++)
      if (sp.pix[c*4+r]) gmap[R0*4 + r][C0*2 + c] = 1;
    send(sp);
    checks++;
    if (!init || pass_valid) fail("first SP must initialise the matrix");
  endtask

  initial begin
    sp_t sp;
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    clear = 0; in_valid = 0; in_sp = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if (init) fail("matrix initialised after reset");

    // pattern A: one active pixel (row 1, column 0 of SP (10, 20))
    sp = '{row: 6'd10, col: 7'd20, pix: 8'b0000_0010};
    new_matrix(sp);
    check_all("pattern A");
    checks++;
    if ($countones(fire) != 1 || !fire[(4+1)*6 + 2]) fail("pattern A must fire once at the pixel");
    // pattern B: pixels (1,1) and (2,0) of the SP: checking pixel (1,0) empty
    sp = '{row: 6'd10, col: 7'd20, pix: 8'b0010_0100};
    new_matrix(sp);
    check_all("pattern B");
    checks++;
    if ($countones(fire) != 1 || !fire[(4+1)*6 + 2]) fail("pattern B must fire once at the empty checking pixel");

    // random
    for (int t = 0; t < 300; t++) begin
      sp.row = 6'(1 + $urandom_range(61));
      sp.col = 7'(1 + $urandom_range(125));
      sp.pix = 8'($urandom) & 8'($urandom);
      if (sp.pix == 0) sp.pix = 8'h01;
      new_matrix(sp);
      repeat (1 + $urandom_range(8)) begin
        int dr, dc;
        bit near;
        dr = $urandom_range(4) - 2;
        dc = $urandom_range(4) - 2;
        near = dr >= -1 && dr <= 1 && dc >= -1 && dc <= 1;
        sp.row = 6'(R0 + dr);
        sp.col = 7'(C0 + dc);
        sp.pix = 8'($urandom) & 8'($urandom) & 8'($urandom);
        if (near) for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++)
          if (sp.pix[c*4+r]) gmap[(R0+dr)*4 + r][(C0+dc)*2 + c] = 1;
        send(sp);
        checks++;
        if (pass_valid != !near || (!near && pass_sp != sp)) fail("pass output wrong");
      end
      check_all("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
