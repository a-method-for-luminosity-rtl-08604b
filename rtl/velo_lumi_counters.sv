// velo_lumi_counters: VELO-hit luminosity accumulators of one readout path.
//
// Clusters reconstructed in real time from the VELO pixel hits enter with
// the event's TFC word. The decoder splits the 256-bit beats into cluster
// words and extracts the bunch-crossing type and BXID; the cluster selector
// counts, per event, the clusters inside each accumulation region; the event
// summary then feeds two sets of counters in parallel:
//   average_counters  per region and bunch-crossing type, cluster sums and
//                     empty-event sums over 1024 orbits, folded into running
//                     means with lambda = 0.875;
//   perbx_counters    per BXID and outer region, empty-event counts in a
//                     20-bit block RAM over about 40 s.
// The slow-control interface lets the control system read both through a
// 32-bit output register with an output-valid strobe and restart the
// per-BXID window.
//
// Default size: one VELO layer, i.e. eight accumulation regions (one per
// sensor), four inner and four outer; the log0 and per-BXID counters exist
// for the outer four only. 26 such instances give the 208 counters of the
// full detector. Which slice of the detector one instance serves is this
// design's choice.
//
// Timing: one beat of eight clusters per clock, no back-pressure. An event
// summary is produced two clocks after its End-of-Event beat; the averages
// change two clocks after the event that closes a window.
module velo_lumi_counters
  import lumi_pkg::*;
#(
  parameter int unsigned NUM_REGIONS         = lumi_pkg::LAYER_REGIONS,
  parameter int unsigned NUM_OUTER           = lumi_pkg::LAYER_OUTER,
  parameter region_t     REGIONS [NUM_REGIONS] = lumi_pkg::DEFAULT_REGIONS,
  parameter int unsigned CNT_W               = 16,
  parameter int unsigned AVG_WINDOW_ORBITS   = 1024,
  parameter int unsigned LAMBDA_SHIFT        = 3,
  parameter int unsigned SUM_W               = 32,
  parameter int unsigned FRAC_W              = 8,
  parameter int unsigned NUM_BXIDS           = lumi_pkg::NUM_BX,
  parameter int unsigned PERBX_WINDOW_ORBITS = 449000
) (
  input  logic              clk,
  input  logic              rst_n,
  // cluster stream and TFC word
  input  logic [DATA_W-1:0] in_data,
  input  logic              in_valid,
  input  logic              in_soe,
  input  logic              in_eoe,
  input  logic [TFC_W-1:0]  in_tfc,
  // control-system bus
  input  logic              sc_rd,
  input  logic              sc_wr,
  input  logic [15:0]       sc_addr,
  input  logic [31:0]       sc_wdata,
  output logic [31:0]       sc_rdata,
  output logic              sc_rvalid,
  output logic              sc_busy,
  // status
  output logic              framing_error,
  output logic              avg_update
);

  localparam int unsigned MEAN_W   = SUM_W + FRAC_W;
  localparam int unsigned PB_ORB_W = $clog2(PERBX_WINDOW_ORBITS + 1);
  localparam int unsigned RAM_W    = (NUM_OUTER + 1) * PERBX_W;

  // decoder -> selector
  logic        beat_valid, beat_sop, beat_eop;
  cluster_t [CLUSTERS_PER_BEAT-1:0] beat_clusters;
  event_info_t beat_info;

  // selector -> counters
  logic        ev_valid;
  event_info_t ev_info;
  logic [NUM_REGIONS-1:0][CNT_W-1:0] ev_counts;

  // average counters -> slow control
  logic [NUM_BX_TYPES-1:0][NUM_REGIONS-1:0][MEAN_W-1:0] mean_c;
  logic [NUM_BX_TYPES-1:0][NUM_OUTER-1:0][MEAN_W-1:0]   mean_z;
  logic [NUM_BX_TYPES-1:0][MEAN_W-1:0]                  mean_n;
  logic [31:0] n_updates;

  // per-BXID counters <-> slow control
  logic                pb_start, pb_rd_req, pb_rd_ack;
  logic [BXID_W-1:0]   pb_rd_bxid;
  logic [RAM_W-1:0]    pb_rd_data;
  logic [1:0]          pb_state;
  logic [PB_ORB_W-1:0] pb_orbits;

  input_decoder u_decoder (
    .clk, .rst_n,
    .in_data, .in_valid, .in_soe, .in_eoe, .in_tfc,
    .out_valid    (beat_valid),
    .out_sop      (beat_sop),
    .out_eop      (beat_eop),
    .out_clusters (beat_clusters),
    .out_info     (beat_info),
    .framing_error
  );

  cluster_accumulator #(
    .NUM_REGIONS (NUM_REGIONS),
    .CNT_W       (CNT_W),
    .REGIONS     (REGIONS)
  ) u_selector (
    .clk, .rst_n,
    .in_valid    (beat_valid),
    .in_sop      (beat_sop),
    .in_eop      (beat_eop),
    .in_clusters (beat_clusters),
    .in_info     (beat_info),
    .ev_valid, .ev_info, .ev_counts
  );

  average_counters #(
    .NUM_REGIONS   (NUM_REGIONS),
    .NUM_OUTER     (NUM_OUTER),
    .CNT_W         (CNT_W),
    .WINDOW_ORBITS (AVG_WINDOW_ORBITS),
    .LAMBDA_SHIFT  (LAMBDA_SHIFT),
    .SUM_W         (SUM_W),
    .FRAC_W        (FRAC_W)
  ) u_average (
    .clk, .rst_n,
    .ev_valid, .ev_info, .ev_counts,
    .mean_c, .mean_z, .mean_n,
    .update    (avg_update),
    .n_updates
  );

  perbx_counters #(
    .NUM_REGIONS   (NUM_REGIONS),
    .NUM_OUTER     (NUM_OUTER),
    .CNT_W         (CNT_W),
    .NUM_BXIDS     (NUM_BXIDS),
    .WORD_W        (PERBX_W),
    .WINDOW_ORBITS (PERBX_WINDOW_ORBITS)
  ) u_perbx (
    .clk, .rst_n,
    .ev_valid, .ev_info, .ev_counts,
    .start    (pb_start),
    .rd_req   (pb_rd_req),
    .rd_bxid  (pb_rd_bxid),
    .rd_ack   (pb_rd_ack),
    .rd_data  (pb_rd_data),
    .state_o  (pb_state),
    .orbits_o (pb_orbits)
  );

  slow_control_if #(
    .NUM_REGIONS (NUM_REGIONS),
    .NUM_OUTER   (NUM_OUTER),
    .MEAN_W      (MEAN_W),
    .FRAC_W      (FRAC_W),
    .WORD_W      (PERBX_W),
    .ORB_W       (PB_ORB_W)
  ) u_slow_control (
    .clk, .rst_n,
    .sc_rd, .sc_wr, .sc_addr, .sc_wdata, .sc_rdata, .sc_rvalid, .sc_busy,
    .mean_c, .mean_z, .mean_n, .n_updates,
    .pb_state, .pb_orbits, .pb_start,
    .pb_rd_req, .pb_rd_bxid, .pb_rd_ack, .pb_rd_data
  );

endmodule
