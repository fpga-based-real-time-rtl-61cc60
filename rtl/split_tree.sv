// split_tree: fans one stream out to N outputs with a binary tree of N-1
// dispatchers (second input unused). Output k corresponds to bit BASE+k of
// the destination mask carried with each word; each dispatcher sends the word
// towards each subtree whose outputs appear in the mask, so a hit reaches
// exactly the outputs its mask names. End-of-event words reach all outputs.
//
// The tree is laid out as a heap: node 1 is the root, node j feeds nodes 2j
// and 2j+1, and nodes N..2N-1 are the outputs (this works for any N, not only
// powers of two). Latency is one cycle per dispatcher passed, at most
// ceil(log2 N); throughput is one word per cycle.
module split_tree
  import retina_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter int unsigned MASK_W = 4,
  parameter int unsigned BASE   = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  word_t             in_word,
  input  logic [MASK_W-1:0] in_mask,
  output logic [N-1:0]      out_valid,
  input  logic [N-1:0]      out_ready,
  output word_t             out_word [N],
  output logic [MASK_W-1:0] out_mask [N]
);

  // mask bits of the outputs that lie below heap node j
  function automatic logic [MASK_W-1:0] leaves_below(int unsigned j);
    logic [MASK_W-1:0] m;
    int unsigned       n;
    m = '0;
    for (int unsigned l = 0; l < N; l++) begin
      n = N + l;
      while (n > j) n = n / 2;
      if (n == j) m[BASE + l] = 1'b1;
    end
    return m;
  endfunction

  logic [2*N-1:0]    s_valid, s_ready;
  word_t             s_word [2*N];
  logic [MASK_W-1:0] s_mask [2*N];

  assign s_valid[1] = in_valid;
  assign s_word[1]  = in_word;
  assign s_mask[1]  = in_mask;
  assign in_ready   = s_ready[1];
  assign s_valid[0] = 1'b0;
  assign s_ready[0] = 1'b0;
  assign s_word[0]  = '0;
  assign s_mask[0]  = '0;

  for (genvar l = 0; l < N; l++) begin : g_out
    assign out_valid[l]  = s_valid[N+l];
    assign s_ready[N+l]  = out_ready[l];
    assign out_word[l]   = s_word[N+l];
    assign out_mask[l]   = s_mask[N+l];
  end

  for (genvar j = 1; j < N; j++) begin : g_node
    logic [1:0] d_ready, d_out_valid;
    word_t             d_out_word [2];
    logic [MASK_W-1:0] d_out_mask [2];

    dispatcher #(
      .MASK_W   (MASK_W),
      .OUT0_MASK(leaves_below(2*j)),
      .OUT1_MASK(leaves_below(2*j+1)),
      .IN_USED  (2'b01)
    ) u_disp (
      .clk, .rst_n,
      .in_valid ({1'b0, s_valid[j]}),
      .in_ready (d_ready),
      .in_word  ('{s_word[j], '0}),
      .in_mask  ('{s_mask[j], '0}),
      .out_valid(d_out_valid),
      .out_ready({s_ready[2*j+1], s_ready[2*j]}),
      .out_word (d_out_word),
      .out_mask (d_out_mask)
    );

    assign s_ready[j]       = d_ready[0];
    assign s_valid[2*j]     = d_out_valid[0];
    assign s_valid[2*j+1]   = d_out_valid[1];
    assign s_word[2*j]      = d_out_word[0];
    assign s_word[2*j+1]    = d_out_word[1];
    assign s_mask[2*j]      = d_out_mask[0];
    assign s_mask[2*j+1]    = d_out_mask[1];
  end

endmodule
