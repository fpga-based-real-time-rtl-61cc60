// tb_velo_clustering: events of small isolated clusters (1 to 3 pixels made
// by a random walk between touching pixels), placed at least 4 SPs apart and
// sent as SuperPixels in random order. The expected hits are computed here
// from the global pixel map: every pixel position matching one of the two
// seed patterns yields a hit at the centroid of the active pixels of its
// 3x3 candidate region, in quarter pixels. Hits are compared as a set per
// event (the readout order is not part of the check). One event with more
// isolated SPs than matrices checks that the extra SPs are counted as
// overflow and their clusters are lost. The readout time per event is
// bounded by N_MATRICES + clusters + 4 cycles.
module tb_velo_clustering;
  import retina_pkg::*;

  localparam int NM = 16;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [LAYER_W-1:0] layer;
  logic     sp_valid, sp_ready, hit_valid, hit_ready;
  sp_word_t sp_word;
  word_t    hit_word;
  logic [15:0] overflow;

  velo_clustering #(.N_MATRICES(NM)) dut (.*);

  int checks = 0, failures = 0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  bit gmap [int][int];
  int exp_hits [int];        // {y, x} -> count
  int n_exp;

  function automatic bit g(int row, int col);
    if (!gmap.exists(row)) return 0;
    if (!gmap[row].exists(col)) return 0;
    return gmap[row][col];
  endfunction

  // expected hits of the pixels in rows r0..r1, columns c0..c1
  task automatic expect_region(int r0, int r1, int c0, int c1);
    for (int row = r0; row <= r1; row++) for (int col = c0; col <= c1; col++) begin
      bit z;
      z = !g(row, col-1) && !g(row+1, col-1) && !g(row-1, col-1) && !g(row-1, col) && !g(row-1, col+1);
      if (z && (g(row, col) || (g(row+1, col) && g(row, col+1)))) begin
        int n, sr, sc, y, x;
        n = 0; sr = 0; sc = 0;
        for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
          if (g(row+a, col+b)) begin n++; sr += a; sc += b; end
        y = row * 4 + (4*sr + n/2) / n;
        x = col * 4 + (4*sc + n/2) / n;
        exp_hits[(y << 16) | x]++;
        n_exp++;
      end
    end
  endtask

  sp_t sps [$];
  int  n_tr;

  task automatic run_event(int n_sp_expected_lost, string tag);
    int got, cyc, ov0;
    bit eoe_seen;
    ov0 = int'(overflow);
    // send SPs
    foreach (sps[i]) begin
      sp_valid = 1;
      sp_word = '{eoe: 1'b0, sp: sps[i]};
      do @(posedge clk); while (!sp_ready);
      @(negedge clk);
    end
    sp_valid = 1;
    sp_word = '0;
    sp_word.eoe = 1'b1;
    do @(posedge clk); while (!sp_ready);
    @(negedge clk);
    sp_valid = 0;
    got = 0; cyc = 0; eoe_seen = 0;
    while (!eoe_seen && cyc < 2000) begin
      hit_ready = ($urandom_range(4) != 0);
      @(posedge clk);
      cyc++;
      if (hit_valid && hit_ready) begin
        if (hit_word.eoe) eoe_seen = 1;
        else begin
          int key;
          key = (int'(hit_word.hit.y) << 16) | int'(hit_word.hit.x);
          checks++;
          if (hit_word.hit.layer != layer) fail("layer");
          if (!exp_hits.exists(key) || exp_hits[key] == 0)
            fail($sformatf("%s: unexpected hit y=%0d x=%0d", tag, hit_word.hit.y, hit_word.hit.x));
          else exp_hits[key]--;
          got++;
        end
      end
      @(negedge clk);
    end
    checks++;
    if (!eoe_seen) fail("no end of event");
    checks++;
    if (got != n_exp) fail($sformatf("%s: %0d hits, expected %0d", tag, got, n_exp));
    checks++;
    if (int'(overflow) - ov0 != n_sp_expected_lost)
      fail($sformatf("%s: overflow grew by %0d, expected %0d", tag, int'(overflow) - ov0, n_sp_expected_lost));
    checks++;
    if (cyc > 2 * (NM + got + 4)) fail($sformatf("%s: readout %0d cycles", tag, cyc));
  endtask

  // add a cluster seeded at SP (sr, sc), collect its SPs
  task automatic add_cluster(int sr, int sc, ref logic [7:0] spmap [int]);
    int row, col, np;
    row = sr * 4 + 1 + $urandom_range(1);
    col = sc * 2 + $urandom_range(1);
    np = 1 + $urandom_range(2);
    for (int i = 0; i < np; i++) begin
      int key;
      gmap[row][col] = 1;
      key = ((row / 4) << 8) | (col / 2);
      if (!spmap.exists(key)) spmap[key] = '0;
      spmap[key][(col % 2) * 4 + (row % 4)] = 1'b1;
      row += $urandom_range(2) - 1;
      col += $urandom_range(2) - 1;
    end
  endtask

  initial begin
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    layer = 6'd17;
    sp_valid = 0; sp_word = '0; hit_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 60; e++) begin
      logic [7:0] spmap [int];
      int nc;
      gmap.delete(); exp_hits.delete(); n_exp = 0; sps.delete();
      spmap.delete();
      nc = $urandom_range(12);
      for (int k = 0; k < nc; k++) add_cluster(4 + 5 * (k / 4), 4 + 6 * (k % 4) + $urandom_range(1), spmap);
      foreach (spmap[key]) sps.push_back('{row: 6'(key >> 8), col: 7'(key & 8'hff), pix: spmap[key]});
      sps.shuffle();
      expect_region(0, 255, 0, 255);
      run_event(0, $sformatf("event %0d", e));
    end
    // overflow: NM + 4 isolated single-pixel SPs, far apart
    begin
      gmap.delete(); exp_hits.delete(); n_exp = 0; sps.delete();
      for (int k = 0; k < NM + 4; k++) begin
        int sr, sc;
        sr = 2 + 4 * (k / 8);
        sc = 2 + 4 * (k % 8);
        sps.push_back('{row: 6'(sr), col: 7'(sc), pix: 8'h01});
        if (k < NM) begin
          gmap[sr*4][sc*2] = 1;
        end
      end
      expect_region(0, 255, 0, 255);
      run_event(4, "overflow");
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
