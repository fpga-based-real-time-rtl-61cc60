// tb_retina_node_full: one tracking node at its full default size (4 groups
// of 10 FPGAs, 38 layers, 4x4 cells), with its 3 inter-group and 9
// intra-group links looped back onto the node itself: what it sends to group
// g' (FPGA j) comes back on the input from group g' (FPGA j). Every switch
// input therefore uses its own LUT, and a hit can reach a cell through up
// to 4 x 10 paths, which exercises all 1 + 4 + 10 LUTs and every dispatcher
// of the three switches.
//
// LUTs: for keys whose 32 x 32 quarter-pixel bin lies near a cell, random
// group, FPGA and cell masks (cell masks limited to the cells near the
// bin); other keys route to nowhere. Events hold single pixels near the
// cells, diagonal pixel pairs and far-away noise; the model counts the
// paths of each hit to each cell, weighs them with the real exp() and finds
// the tracks, which are compared with the node's output event by event.
module tb_retina_node_full;
  import retina_pkg::*;
  import retina_tb_pkg::*;

  localparam int NG = 4, GS = 10, GU = 4, GV = 4, NC = GU * GV;
  localparam int NL = 38, S2 = 16, TH = 512, LAYER = 5, SPC = 8;
  localparam int N_EVENTS = 6;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic          cfg_we;
  cfg_t          cfg;
  logic          sp_valid, sp_ready;
  sp_word_t      sp_word;
  logic [NG-2:0] ig_valid, ig_ready;
  word_t         ig_word [NG-1];
  logic [GS-2:0] fg_valid, fg_ready;
  word_t         fg_word [GS-1];
  logic          trk_valid, trk_ready, trk_eoe;
  track_t        trk;
  logic [15:0]   ovf;

  retina_node dut (
    .clk, .rst_n, .layer(6'(LAYER)), .cfg_we, .cfg,
    .sp_valid, .sp_ready, .sp_word,
    .ig_tx_valid(ig_valid), .ig_tx_ready(ig_ready), .ig_tx_word(ig_word),
    .ig_rx_valid(ig_valid), .ig_rx_ready(ig_ready), .ig_rx_word(ig_word),
    .fg_tx_valid(fg_valid), .fg_tx_ready(fg_ready), .fg_tx_word(fg_word),
    .fg_rx_valid(fg_valid), .fg_rx_ready(fg_ready), .fg_rx_word(fg_word),
    .trk_valid, .trk_ready, .trk_eoe, .trk, .cluster_overflow(ovf)
  );

  function automatic int cell_x(int c); return 64 + (c % GU) * SPC; endfunction
  function automatic int cell_y(int c); return 64 + (c / GU) * SPC; endfunction
  function automatic bit relevant(int c, int key);
    int xlo, ylo;
    xlo = (key >> KEY_HALF) * 32;
    ylo = (key % 32) * 32;
    return (xlo + 31 > cell_x(c) - 16) && (xlo < cell_x(c) + 16) &&
           (ylo + 31 > cell_y(c) - 16) && (ylo < cell_y(c) + 16);
  endfunction

  logic [NG-1:0] lut1 [2**KEY_W];
  logic [GS-1:0] lut4 [NG][2**KEY_W];     // per 4 to 10 input (= source group)
  logic [NC-1:0] lut10 [GS][2**KEY_W];    // per 10 to n input (= source FPGA)

  int checks = 0, failures = 0;
  int n_tracks = 0, n_eoe = 0, n_multi = 0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  sp_word_t sp_q [$];
  track_t   exp_trk [$];
  bit       exp_eoe [$];

  typedef struct { int row; int col; bit pair; } obj_t;

  task automatic make_event();
    obj_t objs [$];
    logic [7:0] spmap [int];
    int order [$];
    int r [];
    track_q_t tq;
    // pixels near the cells, at least 3 pixels apart, then noise far away
    for (int k = 0; k < 6; k++) begin
      int row, col;
      bit ok;
      row = 14 + $urandom_range(10);
      col = 14 + $urandom_range(10);
      ok = 1;
      foreach (objs[i]) if (objs[i].row - row < 4 && row - objs[i].row < 4 &&
                            objs[i].col - col < 4 && col - objs[i].col < 4) ok = 0;
      if (ok) objs.push_back('{row: row, col: col, pair: (k == 0)});
    end
    objs.push_back('{row: 40 + $urandom_range(200), col: 60 + $urandom_range(180), pair: 0});
    foreach (objs[i]) begin
      int px [$], key;
      if (objs[i].pair) px = '{objs[i].row + 1, objs[i].col, objs[i].row, objs[i].col + 1};
      else              px = '{objs[i].row, objs[i].col};
      for (int p = 0; p < px.size(); p += 2) begin
        key = ((px[p] / 4) << 8) | (px[p+1] / 2);
        if (!spmap.exists(key)) begin
          spmap[key] = '0;
          order.push_back(key);
        end
        spmap[key][(px[p+1] % 2) * 4 + (px[p] % 4)] = 1'b1;
      end
    end
    order.shuffle();
    foreach (order[i]) sp_q.push_back('{eoe: 1'b0, sp: '{row: 6'(order[i] >> 8), col: 7'(order[i] & 8'hff), pix: spmap[order[i]]}});
    sp_q.push_back('{eoe: 1'b1, sp: '0});
    // model
    r = new[NC];
    foreach (r[c]) r[c] = 0;
    foreach (objs[i]) begin
      int x, y, key;
      x = objs[i].col * 4 + (objs[i].pair ? 2 : 0);
      y = objs[i].row * 4 + (objs[i].pair ? 2 : 0);
      key = ((x >> 5) << KEY_HALF) | (y >> 5);
      for (int c = 0; c < NC; c++) begin
        int paths;
        paths = 0;
        for (int g = 0; g < NG; g++) for (int j = 0; j < GS; j++)
          if (lut1[key][g] && lut4[g][key][j] && lut10[j][key][c]) paths++;
        if (paths > 1) n_multi++;
        r[c] += paths * ref_weight(x - cell_x(c), y - cell_y(c), S2);
      end
    end
    tq = ref_tracks(r, GU, GV, TH);
    foreach (tq[i]) begin
      exp_trk.push_back(tq[i]);
      exp_eoe.push_back(1'b0);
    end
    exp_trk.push_back('0);
    exp_eoe.push_back(1'b1);
  endtask

  bit running = 0;
  bit sp_acc = 0;

  always @(negedge clk) begin
    trk_ready <= ($urandom_range(3) != 0);
    if (running && (!sp_valid || sp_acc)) begin
      if (sp_q.size() != 0) begin
        sp_valid <= 1'b1;
        sp_word  <= sp_q.pop_front();
      end else sp_valid <= 1'b0;
    end
    #4;
    sp_acc = sp_valid && sp_ready;
    if (trk_valid && trk_ready) begin
      checks++;
      if (exp_eoe.size() == 0) fail("output after the last event");
      else if (trk_eoe != exp_eoe[0]) begin
        fail($sformatf("event %0d: %s", n_eoe, trk_eoe ? "track missing" : "unexpected track"));
        if (trk_eoe) begin
          while (exp_eoe.size() != 0 && !exp_eoe[0]) begin
            void'(exp_trk.pop_front());
            void'(exp_eoe.pop_front());
          end
          void'(exp_trk.pop_front());
          void'(exp_eoe.pop_front());
        end
      end else begin
        if (!trk_eoe && trk != exp_trk[0]) fail($sformatf("track %p expected %p", trk, exp_trk[0]));
        void'(exp_trk.pop_front());
        void'(exp_eoe.pop_front());
      end
      if (trk_eoe) n_eoe++;
      else n_tracks++;
    end
  end

  initial begin
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    cfg_we = 1'b0;
    cfg = '0;
    sp_valid = 1'b0;
    sp_word = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 2**KEY_W; k++) begin
      logic [NC-1:0] near;
      near = '0;
      for (int c = 0; c < NC; c++) if (relevant(c, k)) near[c] = 1'b1;
      lut1[k] = (near != 0) ? NG'($urandom) | NG'(1 << $urandom_range(NG - 1)) : '0;
      for (int g = 0; g < NG; g++) lut4[g][k] = (near != 0) ? GS'($urandom) & GS'($urandom) : '0;
      for (int j = 0; j < GS; j++) lut10[j][k] = near & NC'($urandom);
    end
    for (int k = 0; k < 2**KEY_W; k++) begin
      cfg_we <= 1'b1;
      cfg <= '{sel: CFG_SW_GROUP, port_idx: 8'd0, addr: 16'(k), data: 32'(lut1[k])};
      @(negedge clk);
      for (int p = 0; p < NG; p++) begin
        cfg <= '{sel: CFG_SW_FPGA, port_idx: 8'(p), addr: 16'(k), data: 32'(lut4[p][k])};
        @(negedge clk);
      end
      for (int p = 0; p < GS; p++) begin
        cfg <= '{sel: CFG_SW_CELL, port_idx: 8'(p), addr: 16'(k), data: 32'(lut10[p][k])};
        @(negedge clk);
      end
    end
    for (int c = 0; c < NC; c++) for (int l = 0; l < NL; l++) begin
      cfg <= '{sel: CFG_RECEPTOR, port_idx: 8'(c), addr: 16'(l),
               data: (l == LAYER) ? (32'(cell_x(c)) << 16) | 32'(cell_y(c)) : 32'h0000_0000};
      @(negedge clk);
    end
    cfg_we <= 1'b0;
    @(negedge clk);
    for (int e = 0; e < N_EVENTS; e++) make_event();
    running = 1;
    wait (n_eoe == N_EVENTS);
    repeat (5) @(negedge clk);
    checks += 3;
    if (exp_eoe.size() != 0) fail($sformatf("%0d expected outputs left", exp_eoe.size()));
    if (n_tracks == 0) fail("no track found");
    if (n_multi == 0) fail("no hit reached a cell through several paths");
    $display("events %0d, tracks %0d, cell-hit pairs with several paths %0d", N_EVENTS, n_tracks, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
