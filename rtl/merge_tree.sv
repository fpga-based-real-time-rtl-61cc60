// merge_tree: gathers N streams into one with a binary tree of N-1
// dispatchers, each using both inputs and only its first output (the second
// output only ever carries end-of-event copies and is discarded). The
// dispatchers arbitrate round-robin and merge end-of-event words, so the
// output carries each event's end once, after all hits of that event from
// every input. Heap layout as in split_tree: node 1 is the output, nodes
// N..2N-1 the inputs. Latency is at most ceil(log2 N) cycles.
module merge_tree
  import retina_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter int unsigned MASK_W = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      in_valid,
  output logic [N-1:0]      in_ready,
  input  word_t             in_word [N],
  input  logic [MASK_W-1:0] in_mask [N],
  output logic              out_valid,
  input  logic              out_ready,
  output word_t             out_word,
  output logic [MASK_W-1:0] out_mask
);

  logic [2*N-1:0]    s_valid, s_ready;
  word_t             s_word [2*N];
  logic [MASK_W-1:0] s_mask [2*N];

  assign out_valid  = s_valid[1];
  assign out_word   = s_word[1];
  assign out_mask   = s_mask[1];
  assign s_ready[1] = out_ready;
  assign s_valid[0] = 1'b0;
  assign s_ready[0] = 1'b0;
  assign s_word[0]  = '0;
  assign s_mask[0]  = '0;

  for (genvar l = 0; l < N; l++) begin : g_in
    assign s_valid[N+l] = in_valid[l];
    assign in_ready[l]  = s_ready[N+l];
    assign s_word[N+l]  = in_word[l];
    assign s_mask[N+l]  = in_mask[l];
  end

  for (genvar j = 1; j < N; j++) begin : g_node
    logic [1:0]        d_ready, d_out_valid;
    word_t             d_out_word [2];
    logic [MASK_W-1:0] d_out_mask [2];

    dispatcher #(
      .MASK_W   (MASK_W),
      .OUT0_MASK('1),
      .OUT1_MASK('0),
      .IN_USED  (2'b11)
    ) u_disp (
      .clk, .rst_n,
      .in_valid ({s_valid[2*j+1], s_valid[2*j]}),
      .in_ready (d_ready),
      .in_word  ('{s_word[2*j], s_word[2*j+1]}),
      .in_mask  ('{s_mask[2*j], s_mask[2*j+1]}),
      .out_valid(d_out_valid),
      .out_ready({1'b1, s_ready[j]}),
      .out_word (d_out_word),
      .out_mask (d_out_mask)
    );

    assign s_ready[2*j]   = d_ready[0];
    assign s_ready[2*j+1] = d_ready[1];
    assign s_valid[j]     = d_out_valid[0];
    assign s_word[j]      = d_out_word[0];
    assign s_mask[j]      = d_out_mask[0];
  end

endmodule
