// dist_switch: an N_IN to N_OUT switch of the distribution network, built
// only from 2x2 dispatchers. Each input has its own routing LUT, addressed by
// the coarse position of the hit (retina_pkg::route_key), that gives the set
// of outputs the hit must reach (one bit per output; several bits broadcast).
// After the LUT, each input fans out through a split_tree of dispatchers to
// N_OUT crossing points, and each output gathers its N_IN crossing points
// through a merge_tree. A hit therefore reaches every output its LUT entry
// names and no other; end-of-event words reach every output once, after all
// hits of the event from all inputs.
//
// The LUTs are written through the configuration port, one entry per cycle
// (cfg_we, cfg_port = input, cfg_addr = key, cfg_mask = outputs); they are
// not reset and must be written before use. The LUT read is asynchronous,
// so it adds no cycle. Latency through an idle switch is at most
// ceil(log2 N_OUT) + ceil(log2 N_IN) cycles; each input and output moves one
// word per cycle; backpressure is valid/ready end to end, with no FIFOs.
// Used as the 1 to 4, 4 to 10 and 10 to n switches of a tracking node. The
// composition from dispatchers into trees is this design's own.
module dist_switch
  import retina_pkg::*;
#(
  parameter int unsigned N_IN  = 4,
  parameter int unsigned N_OUT = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,

  input  logic                      cfg_we,
  input  logic [7:0]                cfg_port,
  input  logic [KEY_W-1:0]          cfg_addr,
  input  logic [N_OUT-1:0]          cfg_mask,

  input  logic [N_IN-1:0]           in_valid,
  output logic [N_IN-1:0]           in_ready,
  input  word_t                     in_word [N_IN],

  output logic [N_OUT-1:0]          out_valid,
  input  logic [N_OUT-1:0]          out_ready,
  output word_t                     out_word [N_OUT]
);

  // crossing points: x_*[i][o] carries traffic from input i to output o
  logic [N_OUT-1:0] x_valid [N_IN];
  logic [N_OUT-1:0] x_ready [N_IN];
  word_t            x_word  [N_IN][N_OUT];
  logic [N_OUT-1:0] x_mask  [N_IN][N_OUT];

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    logic [N_OUT-1:0] lut [2**KEY_W];
    logic [N_OUT-1:0] route;

    always_ff @(posedge clk) begin
      if (cfg_we && cfg_port == 8'(i)) lut[cfg_addr] <= cfg_mask;
    end

    assign route = in_word[i].eoe ? '0 : lut[route_key(in_word[i].hit)];

    split_tree #(.N(N_OUT), .MASK_W(N_OUT), .BASE(0)) u_split (
      .clk, .rst_n,
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_word  (in_word[i]),
      .in_mask  (route),
      .out_valid(x_valid[i]),
      .out_ready(x_ready[i]),
      .out_word (x_word[i]),
      .out_mask (x_mask[i])
    );
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    logic [N_IN-1:0]  m_valid, m_ready;
    word_t            m_word [N_IN];
    logic [N_OUT-1:0] m_mask [N_IN];
    logic [N_OUT-1:0] unused_mask;

    for (genvar i = 0; i < N_IN; i++) begin : g_x
      assign m_valid[i]    = x_valid[i][o];
      assign x_ready[i][o] = m_ready[i];
      assign m_word[i]     = x_word[i][o];
      assign m_mask[i]     = x_mask[i][o];
    end

    merge_tree #(.N(N_IN), .MASK_W(N_OUT)) u_merge (
      .clk, .rst_n,
      .in_valid (m_valid),
      .in_ready (m_ready),
      .in_word  (m_word),
      .in_mask  (m_mask),
      .out_valid(out_valid[o]),
      .out_ready(out_ready[o]),
      .out_word (out_word[o]),
      .out_mask (unused_mask)
    );
  end

endmodule
