// tb_retina_node: end-to-end test of the tracker on a reduced system of
// 2 groups x 3 FPGAs (6 nodes, each reading one detector layer), wired as
// the full mesh of full meshes, with a link model that randomly withholds
// transfers to exercise the flow control.
//
// Geometry used by the test: node n owns a 4x4 block of cells whose centres
// are 8 quarter pixels apart; blocks tile the plane. A cell's receptor is at
// its centre on every layer (tracks parallel to the beam). The routing LUTs
// are filled from that geometry: a LUT entry (a 32 x 32 quarter-pixel bin)
// names every group / FPGA / cell whose receptors lie within the weight
// cut of the bin.
//
// Events: straight tracks, each leaving one pixel in every layer at the
// same place near a cell, plus single noise pixels and diagonal pixel pairs
// (some across a SuperPixel border), all kept far enough apart that each
// cluster lies in one matrix. One event overfills the clustering matrices
// of node 0. The reference model computes the hits, routes them with the
// LUT contents, accumulates each cell's response with the real exp() and
// finds the tracks; every node's track stream is compared with it, event by
// event, and the latency from an event's last end-of-event word entering a
// node to its end of tracks leaving each node is held under 350 cycles
// (1 us at 350 MHz). Each mechanism (link, SP and track-output stalls, broadcast to
// several groups, LUT drop, matrix overflow, seed pattern B, SP joining a
// matrix, tracks with a centroid offset) is counted, and one that never
// happened counts as a failure.
module tb_retina_node;
  import retina_pkg::*;
  import retina_tb_pkg::*;

  localparam int NG = 2, GS = 3, NN = NG * GS;
  localparam int GU = 4, GV = 4, NC = GU * GV;
  localparam int NL = NN;
  localparam int NM = 16;
  localparam int S2 = 16;
  localparam int TH = 512;
  localparam int SPC = 8;          // cell spacing, quarter pixels
  localparam int BX = 8;           // blocks per row of the tiling
  localparam int N_EVENTS = 16;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  // ------------------------------------------------------------ the system
  logic [NN-1:0]   cfg_we;
  cfg_t            cfg [NN];
  logic [NN-1:0]   sp_valid, sp_ready;
  sp_word_t        sp_word [NN];
  logic [NN-1:0]   trk_valid, trk_ready, trk_eoe;
  track_t          trk [NN];
  logic [15:0]     ovf [NN];

  logic [NG-2:0]   ig_tx_valid [NN], ig_tx_ready [NN], ig_rx_valid [NN], ig_rx_ready [NN];
  word_t           ig_tx_word [NN][NG-1], ig_rx_word [NN][NG-1];
  logic [GS-2:0]   fg_tx_valid [NN], fg_tx_ready [NN], fg_rx_valid [NN], fg_rx_ready [NN];
  word_t           fg_tx_word [NN][GS-1], fg_rx_word [NN][GS-1];
  logic [NG-2:0]   ig_go [NN];
  logic [GS-2:0]   fg_go [NN];

  for (genvar n = 0; n < NN; n++) begin : g_node
    localparam int G = n / GS, I = n % GS;
    retina_node #(
      .N_GROUPS(NG), .GROUP_SIZE(GS), .MY_GROUP(G), .MY_INDEX(I),
      .GU(GU), .GV(GV), .N_LAYERS(NL), .N_MATRICES(NM), .SIGMA2(S2), .THRESH(TH)
    ) u_node (
      .clk, .rst_n, .layer(6'(n)),
      .cfg_we(cfg_we[n]), .cfg(cfg[n]),
      .sp_valid(sp_valid[n]), .sp_ready(sp_ready[n]), .sp_word(sp_word[n]),
      .ig_tx_valid(ig_tx_valid[n]), .ig_tx_ready(ig_tx_ready[n]), .ig_tx_word(ig_tx_word[n]),
      .ig_rx_valid(ig_rx_valid[n]), .ig_rx_ready(ig_rx_ready[n]), .ig_rx_word(ig_rx_word[n]),
      .fg_tx_valid(fg_tx_valid[n]), .fg_tx_ready(fg_tx_ready[n]), .fg_tx_word(fg_tx_word[n]),
      .fg_rx_valid(fg_rx_valid[n]), .fg_rx_ready(fg_rx_ready[n]), .fg_rx_word(fg_rx_word[n]),
      .trk_valid(trk_valid[n]), .trk_ready(trk_ready[n]), .trk_eoe(trk_eoe[n]), .trk(trk[n]),
      .cluster_overflow(ovf[n])
    );

    // inter-group links: to FPGA I of every other group
    for (genvar k = 0; k < NG - 1; k++) begin : g_ig
      localparam int GD = (k < G) ? k : k + 1;
      localparam int ND = GD * GS + I;
      localparam int KD = (G < GD) ? G : G - 1;
      assign ig_rx_valid[ND][KD] = ig_tx_valid[n][k] && ig_go[n][k];
      assign ig_tx_ready[n][k]   = ig_rx_ready[ND][KD] && ig_go[n][k];
      assign ig_rx_word[ND][KD]  = ig_tx_word[n][k];
    end
    // intra-group links: to every other FPGA of group G
    for (genvar k = 0; k < GS - 1; k++) begin : g_fg
      localparam int JD = (k < I) ? k : k + 1;
      localparam int ND = G * GS + JD;
      localparam int KD = (I < JD) ? I : I - 1;
      assign fg_rx_valid[ND][KD] = fg_tx_valid[n][k] && fg_go[n][k];
      assign fg_tx_ready[n][k]   = fg_rx_ready[ND][KD] && fg_go[n][k];
      assign fg_rx_word[ND][KD]  = fg_tx_word[n][k];
    end
  end

  // -------------------------------------------------------------- geometry
  function automatic int cell_x(int n, int c);
    return 64 + (n % BX) * GU * SPC + (c % GU) * SPC;
  endfunction
  function automatic int cell_y(int n, int c);
    return 64 + (n / BX) * GV * SPC + (c / GU) * SPC;
  endfunction
  function automatic bit relevant(int n, int c, int key);
    int xlo, ylo;
    xlo = (key >> KEY_HALF) * 32;
    ylo = (key % 32) * 32;
    return (xlo + 31 > cell_x(n, c) - 16) && (xlo < cell_x(n, c) + 16) &&
           (ylo + 31 > cell_y(n, c) - 16) && (ylo < cell_y(n, c) + 16);
  endfunction

  logic [NG-1:0] lut1 [2**KEY_W];
  logic [GS-1:0] lut4 [NG][2**KEY_W];
  logic [NC-1:0] lut10 [NN][2**KEY_W];

  task automatic build_luts();
    for (int k = 0; k < 2**KEY_W; k++) begin
      lut1[k] = '0;
      for (int g = 0; g < NG; g++) lut4[g][k] = '0;
      for (int n = 0; n < NN; n++) begin
        lut10[n][k] = '0;
        for (int c = 0; c < NC; c++) if (relevant(n, c, k)) lut10[n][k][c] = 1'b1;
        if (lut10[n][k] != 0) begin
          lut1[k][n / GS] = 1'b1;
          lut4[n / GS][k][n % GS] = 1'b1;
        end
      end
    end
  endtask

  // ------------------------------------------------------------ counters
  int checks = 0, failures = 0;
  int n_link_stall, n_sp_stall, n_trk_stall, n_bcast, n_drop, n_pair, n_straddle, n_offset, n_tracks;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  // ------------------------------------------------------------ events
  typedef struct { int row; int col; bit pair; } obj_t;
  typedef struct { int x; int y; } hxy_t;

  sp_t      sp_q   [NN][$];      // SPs to send, all events, EOE as row = -1 marker below
  bit       sp_eoe [NN][$];
  track_t   exp_trk [NN][$];     // expected tracks, all events
  bit       exp_eoe [NN][$];

  obj_t objs [NN][$];

  function automatic bit free_at(int m, int row, int col);
    foreach (objs[m][i])
      if ((objs[m][i].row - row < 14 && row - objs[m][i].row < 14) &&
          (objs[m][i].col - col < 8 && col - objs[m][i].col < 8)) return 0;
    return 1;
  endfunction

  task automatic make_event(bit overflow_event);
    hxy_t hits [NN][$];
    int   r [];
    for (int m = 0; m < NN; m++) objs[m].delete();
    if (overflow_event) begin
      // NM + 4 isolated pixels on node 0; only the first NM SPs find a matrix
      for (int k = 0; k < NM + 4; k++) objs[0].push_back('{row: 8 + 16 * (k / 8), col: 8 + 24 * (k % 8), pair: 0});
    end else begin
      int ntr;
      ntr = 1 + $urandom_range(2);
      for (int t = 0; t < ntr; t++) begin
        int d, c, x, y;
        bit ok;
        d = $urandom_range(NN - 1);
        c = (1 + $urandom_range(1)) * GU + 1 + $urandom_range(1);
        x = cell_x(d, c) + 4 * $urandom_range(1);
        y = cell_y(d, c) + 4 * $urandom_range(1);
        ok = 1;
        for (int m = 0; m < NN; m++) if (!free_at(m, y / 4, x / 4)) ok = 0;
        if (ok) for (int m = 0; m < NN; m++) objs[m].push_back('{row: y / 4, col: x / 4, pair: 0});
      end
      for (int m = 0; m < NN; m++) begin
        repeat ($urandom_range(2)) begin
          int row, col;
          bit pair;
          pair = ($urandom_range(2) == 0);
          row = 4 + $urandom_range(60);
          col = 4 + $urandom_range(120);
          if (pair && $urandom_range(1)) row = (row & ~3) + 3;      // across an SP border
          if (free_at(m, row, col)) objs[m].push_back('{row: row, col: col, pair: pair});
        end
      end
    end
    // SPs and hits
    for (int m = 0; m < NN; m++) begin
      logic [7:0] spmap [int];
      int order [$];
      int kept;
      foreach (objs[m][i]) begin
        int px [$], key;
        if (objs[m][i].pair) begin
          // (row+1, col) and (row, col+1): seed pattern B at (row, col)
          px = '{objs[m][i].row + 1, objs[m][i].col, objs[m][i].row, objs[m][i].col + 1};
          n_pair++;
          if ((objs[m][i].row + 1) / 4 != objs[m][i].row / 4 || (objs[m][i].col + 1) / 2 != objs[m][i].col / 2)
            n_straddle++;
        end else px = '{objs[m][i].row, objs[m][i].col};
        for (int p = 0; p < px.size(); p += 2) begin
          key = ((px[p] / 4) << 8) | (px[p+1] / 2);
          if (!spmap.exists(key)) begin
            spmap[key] = '0;
            order.push_back(key);
          end
          spmap[key][(px[p+1] % 2) * 4 + (px[p] % 4)] = 1'b1;
        end
      end
      if (!overflow_event) order.shuffle();
      foreach (order[i]) begin
        sp_q[m].push_back('{row: 6'(order[i] >> 8), col: 7'(order[i] & 8'hff), pix: spmap[order[i]]});
        sp_eoe[m].push_back(1'b0);
      end
      sp_q[m].push_back('0);
      sp_eoe[m].push_back(1'b1);
      // hits: single pixels keep their position, a pair gives its centroid
      kept = 0;
      foreach (objs[m][i]) begin
        if (overflow_event && kept >= NM) break;
        kept++;
        if (objs[m][i].pair) hits[m].push_back('{x: objs[m][i].col * 4 + 2, y: objs[m][i].row * 4 + 2});
        else                 hits[m].push_back('{x: objs[m][i].col * 4,     y: objs[m][i].row * 4});
      end
    end
    // route and accumulate
    r = new[NC];
    for (int n = 0; n < NN; n++) begin
      track_q_t tq;
      for (int c = 0; c < NC; c++) r[c] = 0;
      for (int m = 0; m < NN; m++) foreach (hits[m][h]) begin
        int key, gd, id;
        key = ((hits[m][h].x >> 5) << KEY_HALF) | (hits[m][h].y >> 5);
        gd = n / GS; id = n % GS;
        if (n == 0) begin
          if (lut1[key] == 0) n_drop++;
          if ($countones(lut1[key]) > 1) n_bcast++;
        end
        if (lut1[key][gd] && lut4[gd][key][id])
          for (int c = 0; c < NC; c++)
            if (lut10[n][key][c])
              r[c] += ref_weight(hits[m][h].x - cell_x(n, c), hits[m][h].y - cell_y(n, c), S2);
      end
      tq = ref_tracks(r, GU, GV, TH);
      foreach (tq[i]) begin
        exp_trk[n].push_back(tq[i]);
        exp_eoe[n].push_back(1'b0);
        if (tq[i].du != 0 || tq[i].dv != 0) n_offset++;
      end
      exp_eoe[n].push_back(1'b1);
      exp_trk[n].push_back('0);
    end
  endtask

  // ------------------------------------------------------ drivers, monitor
  bit running = 0;
  logic [NN-1:0] sp_acc;
  int n_eoe [NN];
  int cyc = 0;
  int ev_in [NN];
  int t_in [N_EVENTS];
  int lat_min = 1 << 30, lat_max = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    for (int n = 0; n < NN; n++) begin
      ig_go[n] <= (NG-1)'($urandom);
      fg_go[n] <= (GS-1)'($urandom) | (GS-1)'($urandom);
      trk_ready[n] <= ($urandom_range(3) != 0);
      if (running && (!sp_valid[n] || sp_acc[n])) begin
        if (sp_q[n].size() != 0 && $urandom_range(9) != 0) begin
          sp_valid[n] <= 1'b1;
          sp_word[n]  <= '{eoe: sp_eoe[n][0], sp: sp_q[n][0]};
          void'(sp_q[n].pop_front());
          void'(sp_eoe[n].pop_front());
        end else sp_valid[n] <= 1'b0;
      end
    end
    #4;
    sp_acc = sp_valid & sp_ready;
    for (int n = 0; n < NN; n++)
      if (sp_acc[n] && sp_word[n].eoe) begin
        if (ev_in[n] < N_EVENTS && cyc > t_in[ev_in[n]]) t_in[ev_in[n]] = cyc;
        ev_in[n]++;
      end
    for (int n = 0; n < NN; n++) begin
      for (int k = 0; k < NG - 1; k++) if (ig_tx_valid[n][k] && !ig_tx_ready[n][k]) n_link_stall++;
      for (int k = 0; k < GS - 1; k++) if (fg_tx_valid[n][k] && !fg_tx_ready[n][k]) n_link_stall++;
      if (sp_valid[n] && !sp_ready[n]) n_sp_stall++;
      if (trk_valid[n] && !trk_ready[n]) n_trk_stall++;
      if (trk_valid[n] && trk_ready[n]) begin
        checks++;
        if (exp_eoe[n].size() == 0) fail($sformatf("node %0d: output after the last event", n));
        else begin
          if (trk_eoe[n] != exp_eoe[n][0])
            fail($sformatf("node %0d event %0d: %s", n, n_eoe[n], trk_eoe[n] ? "track missing" : "unexpected track"));
          else if (!trk_eoe[n] && trk[n] != exp_trk[n][0])
            fail($sformatf("node %0d: track %p expected %p", n, trk[n], exp_trk[n][0]));
          if (trk_eoe[n] == exp_eoe[n][0]) begin
            void'(exp_trk[n].pop_front());
            void'(exp_eoe[n].pop_front());
          end else if (trk_eoe[n]) begin
            // resynchronise on the end of event
            while (exp_eoe[n].size() != 0 && !exp_eoe[n][0]) begin
              void'(exp_trk[n].pop_front());
              void'(exp_eoe[n].pop_front());
            end
            void'(exp_trk[n].pop_front());
            void'(exp_eoe[n].pop_front());
          end
          if (trk_eoe[n] && n_eoe[n] < N_EVENTS) begin
            // latency: last end of event into any node -> this node's end of tracks
            int lat;
            lat = cyc - t_in[n_eoe[n]];
            if (lat < lat_min) lat_min = lat;
            if (lat > lat_max) lat_max = lat;
          end
          if (trk_eoe[n]) n_eoe[n]++;
          if (!trk_eoe[n]) n_tracks++;
        end
      end
    end
  end

  initial begin
    int t0;
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    cfg_we = '0;
    cfg = '{default: '0};
    sp_valid = '0;
    sp_word = '{default: '0};
    sp_acc = '0;
    n_eoe = '{default: 0};
    ev_in = '{default: 0};
    t_in = '{default: 0};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    build_luts();
    // configuration, all nodes in parallel
    for (int k = 0; k < 2**KEY_W; k++) begin
      for (int n = 0; n < NN; n++) begin
        cfg_we[n] <= 1'b1;
        cfg[n] <= '{sel: CFG_SW_GROUP, port_idx: 8'd0, addr: 16'(k), data: 32'(lut1[k])};
      end
      @(negedge clk);
      for (int p = 0; p < NG; p++) begin
        for (int n = 0; n < NN; n++) cfg[n] <= '{sel: CFG_SW_FPGA, port_idx: 8'(p), addr: 16'(k), data: 32'(lut4[n / GS][k])};
        @(negedge clk);
      end
      for (int p = 0; p < GS; p++) begin
        for (int n = 0; n < NN; n++) cfg[n] <= '{sel: CFG_SW_CELL, port_idx: 8'(p), addr: 16'(k), data: 32'(lut10[n][k])};
        @(negedge clk);
      end
    end
    for (int c = 0; c < NC; c++) for (int l = 0; l < NL; l++) begin
      for (int n = 0; n < NN; n++)
        cfg[n] <= '{sel: CFG_RECEPTOR, port_idx: 8'(c), addr: 16'(l),
                    data: (32'(cell_x(n, c)) << 16) | 32'(cell_y(n, c))};
      @(negedge clk);
    end
    cfg_we <= '0;
    @(negedge clk);
    for (int e = 0; e < N_EVENTS; e++) make_event(e == N_EVENTS / 2);
    t0 = $time;
    running = 1;
    wait (n_eoe.sum() == NN * N_EVENTS);
    repeat (10) @(negedge clk);
    for (int n = 0; n < NN; n++) begin
      checks++;
      if (exp_eoe[n].size() != 0) fail($sformatf("node %0d: %0d expected outputs left", n, exp_eoe[n].size()));
    end
    $display("events %0d, tracks %0d (%0d with centroid offset), cycles %0d", N_EVENTS, n_tracks, n_offset, ($time - t0) / 10);
    $display("link stalls %0d, SP stalls %0d, track stalls %0d, broadcast hits %0d, LUT drops %0d",
             n_link_stall, n_sp_stall, n_trk_stall, n_bcast, n_drop);
    $display("event latency, last end of event in -> end of tracks out: %0d to %0d cycles", lat_min, lat_max);
    $display("pattern-B pairs %0d (%0d across SPs), matrix overflow %0d", n_pair, n_straddle, ovf[0]);
    checks += 11;
    // under 1 us at 350 MHz (the clustering clock; the tracking clock is open)
    if (lat_max >= 350) fail($sformatf("event latency %0d cycles", lat_max));
    if (n_link_stall == 0) fail("no link stall");
    if (n_sp_stall == 0) fail("no SP stall");
    if (n_trk_stall == 0) fail("no track-output stall");
    if (n_bcast == 0) fail("no hit broadcast to several groups");
    if (n_drop == 0) fail("no hit dropped by the LUT");
    if (ovf[0] != 16'd4) fail($sformatf("matrix overflow %0d, expected 4", ovf[0]));
    if (n_pair == 0) fail("no pattern-B cluster");
    if (n_straddle == 0) fail("no cluster across two SPs");
    if (n_tracks == 0) fail("no track found");
    if (n_offset == 0) fail("no track with a centroid offset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
