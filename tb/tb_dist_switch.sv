// tb_dist_switch: the 4 to 10 switch of a tracking node with random routing
// LUTs, random hits from all inputs and random output backpressure. The
// reference model looks each hit up in its own copy of the LUTs and queues
// it, per output and per source input, in the order offered; end-of-event
// markers are queued on every output. Each output word must be the front of
// its source's queue; each output end-of-event must find one on every source
// queue. Finally the latency of an idle switch from input 0 to output 0 is
// checked against the tree depths: floor(log2 10) + floor(log2 4) = 5 cycles.
module tb_dist_switch;
  import retina_pkg::*;

  localparam int NI = 4;
  localparam int NO = 10;
  localparam int N_EVENTS = 40;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic              cfg_we;
  logic [7:0]        cfg_port;
  logic [KEY_W-1:0]  cfg_addr;
  logic [NO-1:0]     cfg_mask;
  logic [NI-1:0]     in_valid, in_ready;
  word_t             in_word [NI];
  logic [NO-1:0]     out_valid, out_ready;
  word_t             out_word [NO];

  dist_switch #(.N_IN(NI), .N_OUT(NO)) dut (.*);

  int checks = 0, failures = 0;
  logic [NO-1:0] lut [NI][2**KEY_W];
  word_t exp_q [NO][NI][$];
  int    sent_ev [NI];
  int    out_eoe [NO];
  int    left_in_event [NI];
  logic [NI-1:0] acc;
  bit    drivers_on = 1'b0;
  int    bp_pct = 30;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  for (genvar s = 0; s < NI; s++) begin : g_src
    always @(negedge clk) begin
      if (drivers_on && (!in_valid[s] || acc[s])) begin
        if (sent_ev[s] >= N_EVENTS || $urandom_range(99) < 25) begin
          in_valid[s] <= 1'b0;
        end else if (left_in_event[s] == 0) begin
          word_t w;
          w = '0;
          w.eoe = 1'b1;
          in_valid[s] <= 1'b1;
          in_word[s]  <= w;
          left_in_event[s] = $urandom_range(10);
          sent_ev[s]++;
          for (int o = 0; o < NO; o++) exp_q[o][s].push_back(w);
        end else begin
          word_t w;
          w = '0;
          w.hit.layer = 6'(s);
          w.hit.x = 10'($urandom);
          w.hit.y = 10'($urandom);
          in_valid[s] <= 1'b1;
          in_word[s]  <= w;
          for (int o = 0; o < NO; o++) if (lut[s][route_key(w.hit)][o]) exp_q[o][s].push_back(w);
          left_in_event[s]--;
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int o = 0; o < NO; o++) out_ready[o] <= ($urandom_range(99) >= bp_pct);
    #4;
    acc = in_valid & in_ready;
    for (int o = 0; o < NO; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        checks++;
        if (out_word[o].eoe) begin
          bit ok;
          ok = 1'b1;
          for (int s = 0; s < NI; s++)
            if (exp_q[o][s].size() == 0 || !exp_q[o][s][0].eoe) ok = 1'b0;
          if (!ok) fail($sformatf("out%0d: end of event before all hits", o));
          else for (int s = 0; s < NI; s++) void'(exp_q[o][s].pop_front());
          out_eoe[o]++;
        end else begin
          int s;
          s = int'(out_word[o].hit.layer);
          if (s >= NI || exp_q[o][s].size() == 0 || exp_q[o][s][0] != out_word[o])
            fail($sformatf("out%0d: unexpected hit %h", o, out_word[o]));
          else void'(exp_q[o][s].pop_front());
        end
      end
    end
  end

  initial begin
    int t0;
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    cfg_we = 1'b0;
    cfg_port = '0;
    cfg_addr = '0;
    cfg_mask = '0;
    in_valid = '0;
    in_word = '{default: '0};
    acc = '0;
    sent_ev = '{default: 0};
    out_eoe = '{default: 0};
    left_in_event = '{default: 3};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // random LUTs: each hit goes to 0..3 random outputs
    for (int i = 0; i < NI; i++) begin
      for (int k = 0; k < 2**KEY_W; k++) begin
        logic [NO-1:0] m;
        m = '0;
        for (int b = 0; b < 3; b++) if ($urandom_range(3) != 0) m[$urandom_range(NO-1)] = 1'b1;
        lut[i][k] = m;
        cfg_we <= 1'b1; cfg_port <= 8'(i); cfg_addr <= KEY_W'(k); cfg_mask <= m;
        @(negedge clk);
      end
    end
    cfg_we <= 1'b0;
    @(negedge clk);
    drivers_on = 1'b1;
    wait (out_eoe.sum() == NO * N_EVENTS);
    repeat (5) @(negedge clk);
    for (int o = 0; o < NO; o++) for (int s = 0; s < NI; s++) begin
      checks++;
      if (exp_q[o][s].size() != 0) fail($sformatf("out%0d src%0d: %0d words missing", o, s, exp_q[o][s].size()));
    end
    // latency of an idle switch, input 0 to output 0
    drivers_on = 1'b0;
    bp_pct = 0;
    @(negedge clk);
    begin
      word_t w;
      w = '0;
      w.hit.x = 10'h3ff;
      w.hit.y = 10'h3ff;
      lut[0][route_key(w.hit)] = 10'b1;
      cfg_we <= 1'b1; cfg_port <= 8'd0; cfg_addr <= route_key(w.hit); cfg_mask <= 10'b1;
      @(negedge clk);
      cfg_we <= 1'b0;
      exp_q[0][0].push_back(w);
      in_valid[0] <= 1'b1;
      in_word[0]  <= w;
      t0 = 0;
      @(negedge clk);
      in_valid[0] <= 1'b0;
      while (!out_valid[0] && t0 < 20) begin
        t0++;
        @(negedge clk);
      end
      checks++;
      if (t0 + 1 != 5) fail($sformatf("idle latency %0d cycles, expected 5", t0 + 1));
    end
    repeat (2) @(negedge clk);
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
