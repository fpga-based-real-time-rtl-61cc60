// retina_node: one Event Builder node of the VELO retina tracker. It joins
// the cluster finding of one VELO module (firmware of the module's DAQ
// board) to the tracking board paired with it, which holds one slice of the
// distribution network and one block of retina cells.
//
// The node is FPGA number MY_INDEX of group MY_GROUP. The track-parameter
// space is split into N_GROUPS groups (quadrants) of GROUP_SIZE FPGAs; each
// group is a full mesh, and FPGA i of a group is linked to FPGA i of every
// other group, so a node has (N_GROUPS-1) + (GROUP_SIZE-1) links: 3 + 9 = 12
// at the default sizes. Data path, as in the three switch stages of the
// network:
//   SPs -> velo_clustering -> hits
//       -> 1 to N_GROUPS switch: the hit goes to the groups whose cells need
//          it; the own group stays on chip, the others leave on the
//          inter-group links (ig_tx, to FPGA MY_INDEX of each other group)
//       -> N_GROUPS to GROUP_SIZE switch, fed by the own group and ig_rx:
//          routes to the FPGAs of this group; the own one stays on chip, the
//          others leave on the intra-group links (fg_tx)
//       -> GROUP_SIZE to GU*GV switch, fed by the own FPGA and fg_rx:
//          delivers to each retina cell only the hits near its receptors
//       -> GU x GV retina_cell grid -> track_finder -> tracks.
// Link k of ig_* connects to group k (k < MY_GROUP) or k+1 (k >= MY_GROUP);
// link k of fg_* likewise to FPGA k or k+1 of the group. The transceivers
// and their protocol are outside this module: the links are valid/ready
// streams of words, and the transceiver's flow control drives tx_ready.
//
// Every routing LUT and every receptor is written through `cfg` (see
// retina_pkg::cfg_t); none is reset. Events are separated by end-of-event
// words, which every switch merges, so each cell sees the end of the event
// after all of its hits from all 40 sources; the cells then hand their
// responses to the track finder, which emits the event's tracks followed by
// a word with trk_eoe = 1. Cells and switches stall (valid/ready) while the
// track finder is still busy with the previous event.
//
// The topology, the three switch stages and their sizes 1 to 4, 4 to 10 and
// 10 to n follow the source; n = GU*GV = 16 cells per FPGA, the word formats,
// end-of-event merging and the configuration port are this design's.
module retina_node
  import retina_pkg::*;
#(
  parameter int unsigned N_GROUPS   = 4,
  parameter int unsigned GROUP_SIZE = 10,
  parameter int unsigned MY_GROUP   = 0,
  parameter int unsigned MY_INDEX   = 0,
  parameter int unsigned GU         = 4,
  parameter int unsigned GV         = 4,
  parameter int unsigned N_LAYERS   = 38,
  parameter int unsigned N_MATRICES = 16,
  parameter int unsigned SIGMA2     = 16,
  parameter int unsigned THRESH     = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [LAYER_W-1:0] layer,            // VELO module read by this node

  input  logic               cfg_we,
  input  cfg_t               cfg,

  input  logic               sp_valid,
  output logic               sp_ready,
  input  sp_word_t           sp_word,

  output logic [N_GROUPS-2:0]   ig_tx_valid,
  input  logic [N_GROUPS-2:0]   ig_tx_ready,
  output word_t                 ig_tx_word [N_GROUPS-1],
  input  logic [N_GROUPS-2:0]   ig_rx_valid,
  output logic [N_GROUPS-2:0]   ig_rx_ready,
  input  word_t                 ig_rx_word [N_GROUPS-1],

  output logic [GROUP_SIZE-2:0] fg_tx_valid,
  input  logic [GROUP_SIZE-2:0] fg_tx_ready,
  output word_t                 fg_tx_word [GROUP_SIZE-1],
  input  logic [GROUP_SIZE-2:0] fg_rx_valid,
  output logic [GROUP_SIZE-2:0] fg_rx_ready,
  input  word_t                 fg_rx_word [GROUP_SIZE-1],

  output logic               trk_valid,
  input  logic               trk_ready,
  output logic               trk_eoe,
  output track_t             trk,

  output logic [15:0]        cluster_overflow
);

  localparam int unsigned NC = GU * GV;

  // ------------------------------------------------------------ clustering
  logic  hit_valid, hit_ready;
  word_t hit_word;

  velo_clustering #(.N_MATRICES(N_MATRICES)) u_clu (
    .clk, .rst_n, .layer,
    .sp_valid, .sp_ready, .sp_word,
    .hit_valid, .hit_ready, .hit_word,
    .overflow(cluster_overflow)
  );

  // --------------------------------------------------------- configuration
  logic cfg_we_grp, cfg_we_fpga, cfg_we_cell, cfg_we_rec;
  assign cfg_we_grp  = cfg_we && cfg.sel == CFG_SW_GROUP;
  assign cfg_we_fpga = cfg_we && cfg.sel == CFG_SW_FPGA;
  assign cfg_we_cell = cfg_we && cfg.sel == CFG_SW_CELL;
  assign cfg_we_rec  = cfg_we && cfg.sel == CFG_RECEPTOR;

  // ------------------------------------------------ stage 1: 1 to N_GROUPS
  logic [N_GROUPS-1:0] s1_valid, s1_ready;
  word_t               s1_word [N_GROUPS];
  logic [0:0]          s1_in_ready;

  dist_switch #(.N_IN(1), .N_OUT(N_GROUPS)) u_sw_group (
    .clk, .rst_n,
    .cfg_we  (cfg_we_grp), .cfg_port(cfg.port_idx),
    .cfg_addr(cfg.addr[KEY_W-1:0]), .cfg_mask(cfg.data[N_GROUPS-1:0]),
    .in_valid(hit_valid), .in_ready(s1_in_ready), .in_word('{hit_word}),
    .out_valid(s1_valid), .out_ready(s1_ready), .out_word(s1_word)
  );
  assign hit_ready = s1_in_ready[0];

  // ----------------------------------------- stage 2: N_GROUPS to GROUP_SIZE
  logic [N_GROUPS-1:0]   s2_in_valid, s2_in_ready;
  word_t                 s2_in_word [N_GROUPS];
  logic [GROUP_SIZE-1:0] s2_valid, s2_ready;
  word_t                 s2_word [GROUP_SIZE];

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
    if (g == MY_GROUP) begin : g_local
      assign s2_in_valid[g] = s1_valid[g];
      assign s1_ready[g]    = s2_in_ready[g];
      assign s2_in_word[g]  = s1_word[g];
    end else begin : g_link
      localparam int unsigned K = (g < MY_GROUP) ? g : g - 1;
      assign ig_tx_valid[K] = s1_valid[g];
      assign s1_ready[g]    = ig_tx_ready[K];
      assign ig_tx_word[K]  = s1_word[g];
      assign s2_in_valid[g] = ig_rx_valid[K];
      assign ig_rx_ready[K] = s2_in_ready[g];
      assign s2_in_word[g]  = ig_rx_word[K];
    end
  end

  dist_switch #(.N_IN(N_GROUPS), .N_OUT(GROUP_SIZE)) u_sw_fpga (
    .clk, .rst_n,
    .cfg_we  (cfg_we_fpga), .cfg_port(cfg.port_idx),
    .cfg_addr(cfg.addr[KEY_W-1:0]), .cfg_mask(cfg.data[GROUP_SIZE-1:0]),
    .in_valid(s2_in_valid), .in_ready(s2_in_ready), .in_word(s2_in_word),
    .out_valid(s2_valid), .out_ready(s2_ready), .out_word(s2_word)
  );

  // ----------------------------------------------- stage 3: GROUP_SIZE to n
  logic [GROUP_SIZE-1:0] s3_in_valid, s3_in_ready;
  word_t                 s3_in_word [GROUP_SIZE];
  logic [NC-1:0]         c_valid, c_ready;
  word_t                 c_word [NC];

  for (genvar j = 0; j < GROUP_SIZE; j++) begin : g_fpga
    if (j == MY_INDEX) begin : g_local
      assign s3_in_valid[j] = s2_valid[j];
      assign s2_ready[j]    = s3_in_ready[j];
      assign s3_in_word[j]  = s2_word[j];
    end else begin : g_link
      localparam int unsigned K = (j < MY_INDEX) ? j : j - 1;
      assign fg_tx_valid[K] = s2_valid[j];
      assign s2_ready[j]    = fg_tx_ready[K];
      assign fg_tx_word[K]  = s2_word[j];
      assign s3_in_valid[j] = fg_rx_valid[K];
      assign fg_rx_ready[K] = s3_in_ready[j];
      assign s3_in_word[j]  = fg_rx_word[K];
    end
  end

  dist_switch #(.N_IN(GROUP_SIZE), .N_OUT(NC)) u_sw_cell (
    .clk, .rst_n,
    .cfg_we  (cfg_we_cell), .cfg_port(cfg.port_idx),
    .cfg_addr(cfg.addr[KEY_W-1:0]), .cfg_mask(cfg.data[NC-1:0]),
    .in_valid(s3_in_valid), .in_ready(s3_in_ready), .in_word(s3_in_word),
    .out_valid(c_valid), .out_ready(c_ready), .out_word(c_word)
  );

  // ------------------------------------------------------------ retina cells
  logic [NC-1:0]    c_done;
  logic [ACC_W-1:0] c_acc [NC];
  logic             tf_busy, tf_start;

  assign tf_start = (c_done == '1) && !tf_busy;

  for (genvar c = 0; c < NC; c++) begin : g_cell
    retina_cell #(.N_LAYERS(N_LAYERS), .SIGMA2(SIGMA2)) u_cell (
      .clk, .rst_n,
      .cfg_we   (cfg_we_rec && cfg.port_idx == 8'(c)),
      .cfg_layer(cfg.addr[LAYER_W-1:0]),
      .cfg_rx   (cfg.data[16 +: COORD_W]),
      .cfg_ry   (cfg.data[0 +: COORD_W]),
      .in_valid (c_valid[c]),
      .in_ready (c_ready[c]),
      .in_word  (c_word[c]),
      .clear    (tf_start),
      .done     (c_done[c]),
      .acc      (c_acc[c])
    );
  end

  track_finder #(.GU(GU), .GV(GV), .THRESH(THRESH)) u_tf (
    .clk, .rst_n,
    .start(tf_start),
    .resp (c_acc),
    .busy (tf_busy),
    .trk_valid, .trk_ready, .trk_eoe, .trk
  );

endmodule
