// tb_retina_cell: writes random receptors for all 38 layers, then runs
// events of random hits, some near the receptor of their layer, some far,
// some on layers beyond the last. The expected response is computed here with
// the real-valued exp(): sum of round(255 * exp(-(dx^2+dy^2) / (2 sigma^2)))
// over hits with |dx|, |dy| < 16 quarter pixels. Also checks that the input
// stops after the end-of-event word, that `done` rises exactly one cycle
// after that word is taken, and that `clear` restarts the cell.
module tb_retina_cell;
  import retina_pkg::*;

  localparam int NL = 38;
  localparam int S2 = 16;
  localparam int N_EVENTS = 30;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic               cfg_we;
  logic [LAYER_W-1:0] cfg_layer;
  logic [COORD_W-1:0] cfg_rx, cfg_ry;
  logic               in_valid, in_ready, clear, done;
  word_t              in_word;
  logic [ACC_W-1:0]   acc;

  retina_cell #(.N_LAYERS(NL), .SIGMA2(S2)) dut (.*);

  int checks = 0, failures = 0;
  int rx [NL], ry [NL];

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  function automatic int ref_weight(int dx, int dy);
    if (dx <= -16 || dx >= 16 || dy <= -16 || dy >= 16) return 0;
    return int'($floor(255.0 * $exp(-real'(dx*dx + dy*dy) / (2.0 * S2)) + 0.5));
  endfunction

  initial begin
    int expected, n, lat;
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    cfg_we = 0; cfg_layer = 0; cfg_rx = 0; cfg_ry = 0;
    in_valid = 0; in_word = '0; clear = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < NL; l++) begin
      rx[l] = 20 + $urandom_range(980);
      ry[l] = 20 + $urandom_range(980);
      cfg_we = 1; cfg_layer = 6'(l); cfg_rx = 10'(rx[l]); cfg_ry = 10'(ry[l]);
      @(negedge clk);
    end
    cfg_we = 0;
    for (int e = 0; e < N_EVENTS; e++) begin
      expected = 0;
      n = $urandom_range(60);
      for (int h = 0; h < n; h++) begin
        int l, dx, dy;
        l  = $urandom_range(NL + 3);       // a few layers beyond the last
        dx = $urandom_range(40) - 20;
        dy = $urandom_range(40) - 20;
        if (l < NL) expected += ref_weight(dx, dy);
        in_word = '0;
        in_word.hit.layer = 6'(l);
        in_word.hit.x = 10'((l < NL ? rx[l] : 500) + dx);
        in_word.hit.y = 10'((l < NL ? ry[l] : 500) + dy);
        in_valid = 1;
        @(negedge clk);
        checks++;
        if (!in_ready) fail("cell not ready during an event");
      end
      in_word = '0;
      in_word.eoe = 1;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (done) fail("done before the final weight is added");
      @(negedge clk);
      checks++;
      if (!done) fail("done not one cycle after the end of event");
      checks++;
      if (in_ready) fail("cell accepts hits after the end of event");
      checks++;
      if (int'(acc) != expected) fail($sformatf("event %0d: R=%0d expected %0d", e, acc, expected));
      clear = 1;
      @(negedge clk);
      clear = 0;
      checks++;
      if (done || acc != 0 || !in_ready) fail("clear did not restart the cell");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
