// tb_intra_group_prototype: the network prototype of 5 boards in a full
// mesh, as used to validate the intra-group stage. Each board has two
// 4-input 4-output switches (dist_switch #(4, 4)):
//   switch A: 4 hit sources (standing for the memories of simulated hits)
//             -> its 4 outputs drive the links to the 4 other boards;
//   switch B: the 4 links from the other boards -> 4 collector outputs.
// Link l of board b goes to board l (l < b) or l+1 (l >= b), and arrives at
// that board's switch-B input numbered the same way. Links and collectors
// stall at random. All LUTs are random. Every hit carries its source in its
// fields, and each collector's hits of each event are compared as a
// multiset with what the LUTs predict; events are closed by end-of-event
// words, which must arrive once per event at every collector.
module tb_intra_group_prototype;
  import retina_pkg::*;

  localparam int NB = 5;           // boards
  localparam int NP = 4;           // switch ports
  localparam int N_EVENTS = 40;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic             cfg_we_a [NB], cfg_we_b [NB];
  logic [7:0]       cfg_port;
  logic [KEY_W-1:0] cfg_addr;
  logic [NP-1:0]    cfg_mask;

  logic [NP-1:0] src_valid [NB], src_ready [NB];
  word_t         src_word  [NB][NP];
  logic [NP-1:0] tx_valid [NB], tx_ready [NB], rx_valid [NB], rx_ready [NB];
  word_t         tx_word  [NB][NP], rx_word [NB][NP];
  logic [NP-1:0] col_valid [NB], col_ready [NB];
  word_t         col_word  [NB][NP];
  logic [NP-1:0] go [NB];

  for (genvar b = 0; b < NB; b++) begin : g_board
    dist_switch #(.N_IN(NP), .N_OUT(NP)) u_a (
      .clk, .rst_n, .cfg_we(cfg_we_a[b]), .cfg_port, .cfg_addr, .cfg_mask,
      .in_valid(src_valid[b]), .in_ready(src_ready[b]), .in_word(src_word[b]),
      .out_valid(tx_valid[b]), .out_ready(tx_ready[b]), .out_word(tx_word[b])
    );
    dist_switch #(.N_IN(NP), .N_OUT(NP)) u_b (
      .clk, .rst_n, .cfg_we(cfg_we_b[b]), .cfg_port, .cfg_addr, .cfg_mask,
      .in_valid(rx_valid[b]), .in_ready(rx_ready[b]), .in_word(rx_word[b]),
      .out_valid(col_valid[b]), .out_ready(col_ready[b]), .out_word(col_word[b])
    );
    for (genvar l = 0; l < NP; l++) begin : g_link
      localparam int D  = (l < b) ? l : l + 1;
      localparam int LD = (b < D) ? b : b - 1;
      assign rx_valid[D][LD] = tx_valid[b][l] && go[b][l];
      assign tx_ready[b][l]  = rx_ready[D][LD] && go[b][l];
      assign rx_word[D][LD]  = tx_word[b][l];
    end
  end

  logic [NP-1:0] lut_a [NB][NP][2**KEY_W];
  logic [NP-1:0] lut_b [NB][NP][2**KEY_W];

  int checks = 0, failures = 0;
  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %0t: %s", $time, msg);
  endtask

  // stimulus and expected multisets
  word_t src_q [NB][NP][$];
  int    exp_cnt [NB][NP][N_EVENTS][int];
  int    got_cnt [NB][NP][int];
  int    n_ev [NB][NP];
  int    n_hits = 0, n_delivered = 0, n_bcast = 0, n_drop = 0, n_stall = 0;

  task automatic make_events();
    for (int e = 0; e < N_EVENTS; e++)
      for (int b = 0; b < NB; b++)
        for (int i = 0; i < NP; i++) begin
          repeat ($urandom_range(6)) begin
            word_t w;
            int key;
            w = '0;
            w.hit.layer = LAYER_W'(b * NP + i);
            w.hit.x = COORD_W'($urandom);
            w.hit.y = COORD_W'($urandom);
            key = int'(route_key(w.hit));
            src_q[b][i].push_back(w);
            n_hits++;
            if ($countones(lut_a[b][i][key]) > 1) n_bcast++;
            if (lut_a[b][i][key] == 0) n_drop++;
            for (int l = 0; l < NP; l++) if (lut_a[b][i][key][l]) begin
              int d, ld;
              d  = (l < b) ? l : l + 1;
              ld = (b < d) ? b : b - 1;
              for (int c = 0; c < NP; c++) if (lut_b[d][ld][key][c]) begin
                int h;
                h = int'(w);
                if (exp_cnt[d][c][e].exists(h)) exp_cnt[d][c][e][h]++;
                else exp_cnt[d][c][e][h] = 1;
              end
            end
          end
          src_q[b][i].push_back('{eoe: 1'b1, hit: '0});
        end
  endtask

  bit running = 0;
  logic [NP-1:0] src_acc [NB];

  always @(negedge clk) begin
    for (int b = 0; b < NB; b++) begin
      go[b] <= NP'($urandom) | NP'($urandom);
      col_ready[b] <= NP'($urandom) | NP'($urandom);
      for (int i = 0; i < NP; i++)
        if (running && (!src_valid[b][i] || src_acc[b][i])) begin
          if (src_q[b][i].size() != 0 && $urandom_range(3) != 0) begin
            src_valid[b][i] <= 1'b1;
            src_word[b][i]  <= src_q[b][i].pop_front();
          end else src_valid[b][i] <= 1'b0;
        end
    end
    #4;
    for (int b = 0; b < NB; b++) begin
      src_acc[b] = src_valid[b] & src_ready[b];
      for (int l = 0; l < NP; l++) if (tx_valid[b][l] && !tx_ready[b][l]) n_stall++;
      for (int c = 0; c < NP; c++) if (col_valid[b][c] && col_ready[b][c]) begin
        if (col_word[b][c].eoe) begin
          int e;
          e = n_ev[b][c];
          checks++;
          if (e >= N_EVENTS) fail($sformatf("board %0d out %0d: extra end of event", b, c));
          else begin
            int bad;
            bad = 0;
            foreach (exp_cnt[b][c][e][h])
              if (!got_cnt[b][c].exists(h) || got_cnt[b][c][h] != exp_cnt[b][c][e][h]) bad++;
            foreach (got_cnt[b][c][h])
              if (!exp_cnt[b][c][e].exists(h)) bad++;
            if (bad != 0) fail($sformatf("board %0d out %0d event %0d: %0d hits differ", b, c, e, bad));
          end
          got_cnt[b][c].delete();
          n_ev[b][c]++;
        end else begin
          int h;
          h = int'(col_word[b][c]);
          n_delivered++;
          if (got_cnt[b][c].exists(h)) got_cnt[b][c][h]++;
          else got_cnt[b][c][h] = 1;
        end
      end
    end
  end

  initial begin
    int done;
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    for (int b = 0; b < NB; b++) begin
      cfg_we_a[b] = 1'b0;
      cfg_we_b[b] = 1'b0;
      src_valid[b] = '0;
      src_acc[b] = '0;
      for (int i = 0; i < NP; i++) begin
        src_word[b][i] = '0;
        n_ev[b][i] = 0;
      end
    end
    cfg_port = '0; cfg_addr = '0; cfg_mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // random tables: a hit goes to one board most of the time, sometimes to
    // two or none; at the far side to one or more collector outputs
    for (int b = 0; b < NB; b++) for (int i = 0; i < NP; i++) for (int k = 0; k < 2**KEY_W; k++) begin
      case ($urandom_range(7))
        0:       lut_a[b][i][k] = '0;
        1:       lut_a[b][i][k] = NP'($urandom);
        default: lut_a[b][i][k] = NP'(1 << $urandom_range(NP - 1));
      endcase
      lut_b[b][i][k] = NP'($urandom) | NP'(1 << $urandom_range(NP - 1));
    end
    for (int b = 0; b < NB; b++) for (int i = 0; i < NP; i++) for (int k = 0; k < 2**KEY_W; k++) begin
      cfg_port <= 8'(i);
      cfg_addr <= KEY_W'(k);
      cfg_mask <= lut_a[b][i][k];
      cfg_we_a[b] <= 1'b1;
      @(negedge clk);
      cfg_we_a[b] <= 1'b0;
      cfg_mask <= lut_b[b][i][k];
      cfg_we_b[b] <= 1'b1;
      @(negedge clk);
      cfg_we_b[b] <= 1'b0;
    end
    make_events();
    running = 1;
    do begin
      @(negedge clk);
      done = 1;
      for (int b = 0; b < NB; b++) for (int c = 0; c < NP; c++) if (n_ev[b][c] < N_EVENTS) done = 0;
    end while (!done);
    repeat (20) @(negedge clk);
    checks += 4;
    for (int b = 0; b < NB; b++) for (int c = 0; c < NP; c++)
      if (n_ev[b][c] != N_EVENTS) fail($sformatf("board %0d out %0d: %0d events", b, c, n_ev[b][c]));
    if (n_bcast == 0) fail("no broadcast");
    if (n_drop == 0) fail("no dropped hit");
    if (n_stall == 0) fail("no link stall");
    if (n_delivered == 0) fail("nothing delivered");
    $display("hits sent %0d, delivered %0d, broadcast %0d, dropped %0d, link stall cycles %0d",
             n_hits, n_delivered, n_bcast, n_drop, n_stall);
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
