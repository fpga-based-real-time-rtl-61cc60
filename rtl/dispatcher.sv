// dispatcher: the basic routing element of the distribution network. Two
// input streams, two output streams; every input word can go to output 0,
// output 1, both, or neither.
//
// Routing: each word carries the destination mask that the routing LUT at the
// entrance of its switch produced (one bit per switch output). The dispatcher
// sends a hit to output 0 when the mask has a bit in OUT0_MASK and to output 1
// when it has a bit in OUT1_MASK; a switch gives each dispatcher the masks of
// the switch outputs that lie behind each of its outputs. A hit with no such
// bit is dropped.
//
// Arbitration: when both inputs want the same output in one cycle, a
// round-robin pointer per output picks one. A hit meant for both outputs may
// leave on them in different cycles; a per-input "sent" mask remembers which
// copies are already out, and the input is consumed once all copies are out.
//
// Events: an end-of-event word is held at its input until every used input
// (IN_USED) shows one, then a single end-of-event word goes out on both
// outputs in the same cycle and all of them are consumed. So the outputs see
// the merged events in order, and nothing of the next event overtakes.
//
// Timing: one register stage per output, full throughput (an output register
// is refilled in the cycle its word is taken). in_ready is combinational
// from out_ready. Flow control is valid/ready throughout, with no FIFO: the
// source's routing element, the LUT routing scheme, the 2x2 shape and the use
// of link flow control instead of buffering follow the source description;
// the mask encoding, round-robin and end-of-event handling are this design's.
module dispatcher
  import retina_pkg::*;
#(
  parameter int unsigned          MASK_W    = 4,
  parameter logic [MASK_W-1:0]    OUT0_MASK = '1,
  parameter logic [MASK_W-1:0]    OUT1_MASK = '0,
  parameter logic [1:0]           IN_USED   = 2'b11
) (
  input  logic              clk,
  input  logic              rst_n,

  input  logic [1:0]        in_valid,
  output logic [1:0]        in_ready,
  input  word_t             in_word [2],
  input  logic [MASK_W-1:0] in_mask [2],

  output logic [1:0]        out_valid,
  input  logic [1:0]        out_ready,
  output word_t             out_word [2],
  output logic [MASK_W-1:0] out_mask [2]
);

  logic [1:0] sent [2];        // copies of the word at input i already sent
  logic [1:0] rr;              // per output: input that has priority next
  logic [1:0] can_load;        // output register free or being emptied
  logic [1:0] want [2];        // want[i][o]: input i still needs output o
  logic [1:0] grant [2];       // grant[i][o]
  logic [1:0] is_eoe;
  logic       eoe_all;
  logic       eoe_fire;

  always_comb begin
    for (int o = 0; o < 2; o++) can_load[o] = !out_valid[o] || out_ready[o];

    for (int i = 0; i < 2; i++) begin
      is_eoe[i]  = in_valid[i] && in_word[i].eoe;
      want[i][0] = in_valid[i] && !in_word[i].eoe && ((in_mask[i] & OUT0_MASK) != '0) && !sent[i][0];
      want[i][1] = in_valid[i] && !in_word[i].eoe && ((in_mask[i] & OUT1_MASK) != '0) && !sent[i][1];
    end

    // end of event: every used input shows one, and both outputs can take it
    eoe_all  = (!IN_USED[0] || is_eoe[0]) && (!IN_USED[1] || is_eoe[1]) && (is_eoe != 2'b00);
    eoe_fire = eoe_all && (can_load == 2'b11);

    for (int o = 0; o < 2; o++) begin
      grant[0][o] = 1'b0;
      grant[1][o] = 1'b0;
      if (can_load[o] && !eoe_fire) begin
        if (want[0][o] && want[1][o]) begin
          grant[rr[o]][o] = 1'b1;
        end else if (want[0][o]) begin
          grant[0][o] = 1'b1;
        end else if (want[1][o]) begin
          grant[1][o] = 1'b1;
        end
      end
    end

    for (int i = 0; i < 2; i++) begin
      if (is_eoe[i]) in_ready[i] = eoe_fire;
      else           in_ready[i] = in_valid[i] && ((want[i] & ~grant[i]) == 2'b00);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      sent[0]   <= '0;
      sent[1]   <= '0;
      rr        <= '0;
      for (int o = 0; o < 2; o++) begin
        out_word[o] <= '0;
        out_mask[o] <= '0;
      end
    end else begin
      for (int o = 0; o < 2; o++) begin
        if (eoe_fire) begin
          out_valid[o]    <= 1'b1;
          out_word[o]     <= '0;
          out_word[o].eoe <= 1'b1;
          out_mask[o]     <= '0;
        end else if (grant[0][o] || grant[1][o]) begin
          out_valid[o] <= 1'b1;
          out_word[o]  <= grant[1][o] ? in_word[1] : in_word[0];
          out_mask[o]  <= grant[1][o] ? in_mask[1] : in_mask[0];
          if (want[0][o] && want[1][o]) rr[o] <= !grant[1][o];
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
      for (int i = 0; i < 2; i++) begin
        if (in_ready[i]) sent[i] <= '0;
        else             sent[i] <= sent[i] | grant[i];
      end
    end
  end

  // An output word must stay put while it waits for out_ready.
  for (genvar o = 0; o < 2; o++) begin : g_hold
    property p_hold;
      @(posedge clk) disable iff (!rst_n)
        out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_word[o]);
    endproperty
    a_hold: assert property (p_hold);
  end

endmodule
