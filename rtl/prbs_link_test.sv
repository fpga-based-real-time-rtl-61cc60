// prbs_link_test: pseudo-random link exerciser, one generator and one checker,
// for validating the optical links between the boards of the distribution
// network before data is sent over them: one board sends the sequence, the
// board at the other end of the fibre checks it.
//
// Sequence: PRBS-31, x^31 + x^28 + 1; bit n = bit(n-31) xor bit(n-28).
// The generator emits W bits per accepted word, oldest bit in the MSB. With
// W >= 31 a received word holds the whole state of the sequence, so the
// checker is self-synchronising: it predicts each word from the previous
// one. After the first word (locked = 1) every word that differs from the
// prediction counts one error word; a single flipped bit on the link shows
// up in that word and in the prediction of the next, so it costs 1 or 2
// error words.
//
// Interface: tx_valid/tx_ready/tx_data is a valid/ready source, enabled by
// `enable`; rx_valid/rx_data is a sink that never stalls (a word per
// cycle). Counters saturate at 2^32 - 1 and are cleared by `clear`.
//
// The source states only that a pseudo-random sequence generated on one
// board was checked on another; the polynomial, word width, self-
// synchronisation and counters are this design's choices.
module prbs_link_test #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  logic         clear,

  output logic         tx_valid,
  input  logic         tx_ready,
  output logic [W-1:0] tx_data,

  input  logic         rx_valid,
  input  logic [W-1:0] rx_data,
  output logic         locked,
  output logic [31:0]  rx_words,
  output logic [31:0]  err_words
);

  if (W < 31) begin : g_bad_width
    $error("prbs_link_test: W must be at least 31");
  end

  // the W bits following state s (s[30] oldest), oldest first in the MSB
  function automatic logic [W-1:0] prbs_next(logic [30:0] s);
    logic [W-1:0] w;
    logic         b;
    for (int k = 0; k < W; k++) begin
      b = s[30] ^ s[27];
      s = {s[29:0], b};
      w[W-1-k] = b;
    end
    return w;
  endfunction

  // ------------------------------------------------------------ generator
  logic [W-1:0] tx_next;
  assign tx_next = prbs_next(tx_data[30:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_valid <= 1'b0;
      tx_data  <= W'(32'h0000_0001);
    end else begin
      if (tx_valid && tx_ready) tx_data <= tx_next;
      if (!tx_valid || tx_ready) tx_valid <= enable;
    end
  end

  // -------------------------------------------------------------- checker
  logic [W-1:0] rx_expect;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked    <= 1'b0;
      rx_expect <= '0;
      rx_words  <= '0;
      err_words <= '0;
    end else if (clear) begin
      locked    <= 1'b0;
      rx_words  <= '0;
      err_words <= '0;
    end else if (rx_valid) begin
      locked    <= 1'b1;
      rx_expect <= prbs_next(rx_data[30:0]);
      if (locked) begin
        if (rx_words != '1) rx_words <= rx_words + 1'b1;
        if (rx_data != rx_expect && err_words != '1) err_words <= err_words + 1'b1;
      end
    end
  end

  property p_tx_hold;
    @(posedge clk) disable iff (!rst_n)
      tx_valid && !tx_ready |=> tx_valid && $stable(tx_data);
  endproperty
  a_tx_hold: assert property (p_tx_hold);

endmodule
