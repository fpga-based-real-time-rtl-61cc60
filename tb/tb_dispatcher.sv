// tb_dispatcher: random two-input traffic through one dispatcher with random
// output backpressure. Each hit carries its source (layer) and a sequence
// number (x); the destination mask is random over 4 bits, bits 0-1 lying
// behind output 0 and bits 2-3 behind output 1. A reference model keeps, per
// output and per source, the queue of words that output must show: hits
// whose mask reaches it, and end-of-event markers. Every output word is
// checked against the front of its source's queue, and every output
// end-of-event must find one waiting on both sources (events merged, nothing
// overtaking). Also checks the one-cycle latency of an idle dispatcher.
module tb_dispatcher;
  import retina_pkg::*;

  localparam int N_EVENTS = 60;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [1:0] in_valid, in_ready, out_valid, out_ready;
  word_t      in_word [2];
  logic [3:0] in_mask [2];
  word_t      out_word [2];
  logic [3:0] out_mask [2];

  dispatcher #(.MASK_W(4), .OUT0_MASK(4'b0011), .OUT1_MASK(4'b1100), .IN_USED(2'b11)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_word, .in_mask,
    .out_valid, .out_ready, .out_word, .out_mask
  );

  int checks = 0, failures = 0;
  int exp_q [2][2][$];        // [output][source]: seq number, -1 = end of event
  int sent_ev [2];
  int out_eoe [2];
  int bp_pct = 30;
  bit drivers_on = 1'b1;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  // sources
  int seq [2];
  int left_in_event [2];
  for (genvar s = 0; s < 2; s++) begin : g_src
    always @(negedge clk) begin
      if (rst_n && drivers_on && (!in_valid[s] || in_ready_q[s])) begin
        if (sent_ev[s] >= N_EVENTS || $urandom_range(99) < 20) begin
          in_valid[s] <= 1'b0;
        end else if (left_in_event[s] == 0) begin
          // the model's queues are filled when a word is offered: a copy may
          // leave on one output before the input is consumed
          in_valid[s]   <= 1'b1;
          in_word[s]    <= '0;
          in_word[s].eoe <= 1'b1;
          in_mask[s]    <= 4'($urandom);
          left_in_event[s] = 1 + $urandom_range(8);
          sent_ev[s]++;
          exp_q[0][s].push_back(-1);
          exp_q[1][s].push_back(-1);
        end else begin
          logic [3:0] m;
          m = 4'($urandom);
          in_valid[s] <= 1'b1;
          in_word[s]  <= '{eoe: 1'b0, hit: '{layer: 6'(s), x: 10'(seq[s]), y: '0}};
          in_mask[s]  <= m;
          if (m[1:0] != 0) exp_q[0][s].push_back(seq[s]);
          if (m[3:2] != 0) exp_q[1][s].push_back(seq[s]);
          seq[s]++;
          left_in_event[s]--;
        end
      end
    end
  end

  // handshakes are sampled 1 time unit before the rising edge, when all
  // inputs and the combinational ready signals have settled
  logic [1:0] in_ready_q;
  always @(negedge clk) begin
    #4;
    in_ready_q = in_valid & in_ready;
    for (int o = 0; o < 2; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        checks++;
        if (out_word[o].eoe) begin
          out_eoe[o]++;
          if (exp_q[o][0].size() == 0 || exp_q[o][1].size() == 0 ||
              exp_q[o][0][0] != -1 || exp_q[o][1][0] != -1)
            fail($sformatf("out%0d: end of event before all hits of the event", o));
          else begin
            void'(exp_q[o][0].pop_front());
            void'(exp_q[o][1].pop_front());
          end
        end else begin
          int s;
          s = int'(out_word[o].hit.layer);
          if (s > 1 || exp_q[o][s].size() == 0 || exp_q[o][s][0] != int'(out_word[o].hit.x))
            fail($sformatf("out%0d: unexpected hit src %0d seq %0d", o, s, out_word[o].hit.x));
          else void'(exp_q[o][s].pop_front());
        end
      end
    end
  end

  always @(negedge clk) for (int o = 0; o < 2; o++) out_ready[o] <= ($urandom_range(99) >= bp_pct);

  initial begin
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    in_valid = '0;
    in_ready_q = '0;
    out_ready = '1;
    seq = '{0, 0};
    sent_ev = '{0, 0};
    out_eoe = '{0, 0};
    left_in_event = '{3, 5};
    in_word = '{default: '0};
    in_mask = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (out_eoe[0] == N_EVENTS && out_eoe[1] == N_EVENTS);
    repeat (5) @(posedge clk);
    for (int o = 0; o < 2; o++) for (int s = 0; s < 2; s++) begin
      checks++;
      if (exp_q[o][s].size() != 0) fail($sformatf("out%0d src%0d: %0d words never arrived", o, s, exp_q[o][s].size()));
    end
    // latency: idle dispatcher, one hit to output 1 appears one cycle later
    bp_pct = 0;
    drivers_on = 1'b0;
    @(negedge clk);
    in_valid[0] <= 1'b1;
    in_word[0]  <= '{eoe: 1'b0, hit: '{layer: 6'd0, x: 10'd999, y: '0}};
    in_mask[0]  <= 4'b0100;
    exp_q[1][0].push_back(999);
    @(posedge clk);
    in_valid[0] <= 1'b0;
    #1;
    checks++;
    if (!(out_valid[1] && out_word[1].hit.x == 10'd999)) fail("latency is not one cycle");
    repeat (3) @(posedge clk);
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
