// tb_prbs_link_test: the generator drives the checker through a model link
// that randomly stalls the sender and, at chosen words, flips one random
// bit. Checked: the transmitted words against a serial PRBS-31 reference
// (bit n = bit(n-31) xor bit(n-28); the first word is the seed, 1), the
// word count, and the error count, which must be 0 on a clean link and 1 or
// 2 words per flipped bit otherwise (errors kept far apart); also that the
// checker locks onto a sequence joined mid-way, and that `clear` resets it.
module tb_prbs_link_test;
  localparam int W = 32;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic         enable, clear, tx_valid, tx_ready, rx_valid, locked;
  logic [W-1:0] tx_data, rx_data;
  logic [31:0]  rx_words, err_words;

  prbs_link_test #(.W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %0t: %s", $time, msg);
    end
  endtask

  // serial reference
  bit ref_bits [$];
  function automatic logic [W-1:0] ref_word(int n);
    logic [W-1:0] w;
    while (ref_bits.size() < (n + 1) * W) begin
      int m;
      m = ref_bits.size();
      ref_bits.push_back(ref_bits[m - 31] ^ ref_bits[m - 28]);
    end
    for (int k = 0; k < W; k++) w[W-1-k] = ref_bits[n * W + k];
    return w;
  endfunction

  int n_tx = 0, n_rx = 0, flips = 0;
  bit inject = 0;

  always @(negedge clk) begin
    tx_ready <= ($urandom_range(3) != 0);
    #4;
    rx_valid = 1'b0;
    if (tx_valid && tx_ready) begin
      check(tx_data == ref_word(n_tx), $sformatf("word %0d: %h expected %h", n_tx, tx_data, ref_word(n_tx)));
      n_tx++;
      rx_valid = 1'b1;
      rx_data = tx_data;
      if (inject) begin
        rx_data[$urandom_range(W - 1)] ^= 1'b1;
        inject = 0;
        flips++;
      end
      n_rx++;
    end
  end

  initial begin
    // the first word is the seed, 1
    for (int k = 0; k < W; k++) ref_bits.push_back(k == W - 1);
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    enable = 1'b0;
    clear = 1'b0;
    tx_ready = 1'b0;
    rx_valid = 1'b0;
    rx_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(!locked && rx_words == 0 && err_words == 0, "reset state");
    enable = 1'b1;
    repeat (400) @(negedge clk);
    check(locked, "locked");
    check(err_words == 0, $sformatf("%0d errors on a clean link", err_words));
    check(rx_words == n_rx - 1, $sformatf("rx_words %0d expected %0d", rx_words, n_rx - 1));
    // one flipped bit at a time, far apart
    for (int e = 0; e < 20; e++) begin
      int err0;
      err0 = err_words;
      inject = 1;
      repeat (20) @(negedge clk);
      check(!inject && (err_words - err0 == 1 || err_words - err0 == 2),
            $sformatf("flip %0d: %0d error words", e, err_words - err0));
    end
    // clear, then the checker joins the running sequence again
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    check(!locked && rx_words == 0 && err_words == 0, "clear");
    repeat (200) @(negedge clk);
    check(locked && err_words == 0 && rx_words > 100, $sformatf("relock: words %0d errors %0d", rx_words, err_words));
    enable = 1'b0;
    repeat (5) @(negedge clk);
    check(!tx_valid, "generator stops when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
