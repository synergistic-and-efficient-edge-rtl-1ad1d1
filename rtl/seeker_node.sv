// seeker_node: the digital part of a Seeker energy-harvesting sensor node. The node
// decides, window by window, how to turn sensor data into the least costly message to a
// host device (a phone) that can still be classified well.
//
// Each window of 60 samples x 3 channels (30-sample hop) is first tested against one
// stored trace per activity. A match (correlation >= 0.95) is reported as a label
// without any further work (D0). Otherwise a moving-average power predictor estimates the
// energy the node can spend. The node then runs a 16-bit (D1) or 12-bit (D2) DNN
// inference, if that fits, and sends the label. Failing that, it sends a clustering coreset whose
// size the activity-aware selector picks (D3), or a 20-point importance-sampling
// coreset (D4), so the host can finish the inference. If nothing fits, the window is dropped.
//
// Blocks inside: window_buffer, ground_truth_store, correlation_engine, power_predictor,
// aac_selector, kmeans_coreset, impsamp_coreset, payload_packer and decision_controller.
// Outside (ports): the sensor front end (s_*), the harvester and storage monitor (h_*,
// stored_energy), the two ReRAM DNN crossbars (dnn_*; they read the window through
// dnn_rd_*), and the IEEE 802.15.6 radio (tx_* byte stream). The configuration ports load
// the activity traces (gt_*) and the AAC lookup table (aac_cfg_*).
//
// The window buffer's single read port is shared. The correlation engine, k-means
// engine or importance-sampling engine has it while running, and the DNN read port has
// it otherwise. The controller runs one engine at a time, so they never collide.
// Timing: a window takes about 2.2k cycles for a full correlation search, plus 372 cycles
// per channel for clustering or up to 600 for importance sampling, plus one cycle per
// packet byte. At 50 Hz sampling, this fits easily in one sample period at a clock of 1 MHz.
module seeker_node
  import seeker_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // sensor samples (all channels at once)
  input  logic                        s_valid,
  input  logic [N_CH-1:0][DATA_W-1:0] s_data,
  // energy harvesting
  input  logic                        h_valid,
  input  logic [15:0]                 h_energy,
  input  logic [E_W-1:0]              stored_energy,
  // ground-truth trace loading
  input  logic                        gt_we,
  input  logic [ACT_W-1:0]            gt_act,
  input  logic [IDX_W-1:0]            gt_idx,
  input  logic [CH_W-1:0]             gt_ch,
  input  logic [DATA_W-1:0]           gt_data,
  // AAC lookup table loading
  input  logic                        aac_cfg_we,
  input  logic [1:0]                  aac_cfg_sel,
  input  logic [ACT_W-1:0]            aac_cfg_act,
  input  logic [KOPT_W-1:0]           aac_cfg_kopt,
  input  logic [E_W-1:0]              aac_cfg_data,
  // DNN crossbars
  output logic                        dnn_req,
  output logic                        dnn_sel,
  input  logic                        dnn_done,
  input  logic [ACT_W-1:0]            dnn_class,
  input  logic [IDX_W-1:0]            dnn_rd_idx,
  input  logic [CH_W-1:0]             dnn_rd_ch,
  output logic [DATA_W-1:0]           dnn_rd_data,
  // radio byte stream
  output logic                        tx_valid,
  output logic [7:0]                  tx_data,
  output logic                        tx_last,
  input  logic                        tx_ready,
  // status
  output logic                        decision_valid,
  output decision_e                   decision,
  output logic                        win_missed,
  output logic [E_W-1:0]              pred_energy,
  output logic [K_W-1:0]              cluster_k
);

  // ---- window buffer and its shared read port ----------------------------------------------
  logic              win_ready;
  logic [IDX_W-1:0]  buf_idx;
  logic [CH_W-1:0]   buf_ch;
  logic [DATA_W-1:0] buf_data;

  window_buffer u_buf (
    .clk, .rst_n,
    .in_valid (s_valid), .in_data (s_data),
    .win_ready,
    .rd_idx (buf_idx), .rd_ch (buf_ch), .rd_data (buf_data)
  );

  // ---- memoisation ----------------------------------------------------------------------------
  logic              corr_start, corr_busy, corr_done, corr_match;
  logic [ACT_W-1:0]  corr_act, corr_rd_act;
  logic [IDX_W-1:0]  corr_rd_idx;
  logic [CH_W-1:0]   corr_rd_ch;
  logic [DATA_W-1:0] gt_rd_data;

  ground_truth_store u_gt (
    .clk,
    .wr_en (gt_we), .wr_act (gt_act), .wr_idx (gt_idx), .wr_ch (gt_ch), .wr_data (gt_data),
    .rd_act (corr_rd_act), .rd_idx (corr_rd_idx), .rd_ch (corr_rd_ch), .rd_data (gt_rd_data)
  );

  correlation_engine u_corr (
    .clk, .rst_n,
    .start (corr_start), .busy (corr_busy),
    .rd_act (corr_rd_act), .rd_idx (corr_rd_idx), .rd_ch (corr_rd_ch),
    .win_data (buf_data), .gt_data (gt_rd_data),
    .done (corr_done), .match (corr_match), .match_act (corr_act)
  );

  // ---- energy ---------------------------------------------------------------------------------
  power_predictor u_pp (
    .clk, .rst_n,
    .h_valid, .h_energy, .stored_energy,
    .pred_energy, .avg_income ()
  );

  logic             inf_valid;
  logic [ACT_W-1:0] inf_act;
  logic [K_W-1:0]   aac_k;

  aac_selector u_aac (
    .clk, .rst_n,
    .inf_valid, .inf_act,
    .cfg_we (aac_cfg_we), .cfg_sel (aac_cfg_sel), .cfg_act (aac_cfg_act),
    .cfg_kopt (aac_cfg_kopt), .cfg_data (aac_cfg_data),
    .pred_energy,
    .k (aac_k), .k_cost (), .act_known (), .act_pred ()
  );
  assign cluster_k = aac_k;

  // ---- coreset engines ------------------------------------------------------------------------
  logic             km_start, km_busy, km_done;
  logic [K_W-1:0]   km_k;
  logic [IDX_W-1:0] km_rd_idx;
  cluster_t         clusters [K_MAX];

  kmeans_coreset u_km (
    .clk, .rst_n,
    .start (km_start), .k (km_k), .busy (km_busy),
    .rd_idx (km_rd_idx), .rd_data (buf_data),
    .done (km_done), .clusters, .passes ()
  );

  logic                          is_start, is_busy, is_done;
  logic [IDX_W-1:0]              is_rd_idx;
  point_t                        points [IS_POINTS];
  logic [$clog2(IS_POINTS+1)-1:0] n_pts;

  impsamp_coreset u_is (
    .clk, .rst_n,
    .start (is_start), .busy (is_busy),
    .rd_idx (is_rd_idx), .rd_data (buf_data),
    .done (is_done), .points, .n_sel (n_pts), .passes ()
  );

  // ---- controller -----------------------------------------------------------------------------
  logic [CH_W-1:0] ctl_ch;
  logic            pk_start, pk_done;
  pkt_e            pk_kind;
  decision_e       pk_decision;
  logic [7:0]      pk_label;

  decision_controller u_ctl (
    .clk, .rst_n,
    .win_ready, .pred_energy,
    .corr_start, .corr_done, .corr_match, .corr_act,
    .dnn_req, .dnn_sel, .dnn_done, .dnn_class,
    .aac_k, .inf_valid, .inf_act,
    .ch (ctl_ch), .km_start, .km_k, .km_done, .is_start, .is_done,
    .pk_start, .pk_kind, .pk_decision, .pk_label, .pk_done,
    .busy (), .decision_valid, .decision, .win_missed
  );

  // ---- shared read port -------------------------------------------------------------------------
  always_comb begin
    if (corr_busy) begin
      buf_idx = corr_rd_idx;
      buf_ch  = corr_rd_ch;
    end else if (km_busy) begin
      buf_idx = km_rd_idx;
      buf_ch  = ctl_ch;
    end else if (is_busy) begin
      buf_idx = is_rd_idx;
      buf_ch  = ctl_ch;
    end else begin
      buf_idx = dnn_rd_idx;
      buf_ch  = dnn_rd_ch;
    end
  end
  assign dnn_rd_data = buf_data;

  // ---- radio payload ------------------------------------------------------------------------------
  payload_packer u_pk (
    .clk, .rst_n,
    .start (pk_start), .kind (pk_kind), .decision (pk_decision),
    .channel (2'(ctl_ch)), .label (pk_label),
    .k (km_k), .clusters, .n_pts, .points,
    .busy (), .tx_valid, .tx_data, .tx_last, .tx_ready, .done (pk_done)
  );

endmodule
