// cluster_accumulator: the cluster selector and per-event accumulator.
//
// For every accumulation region it counts the clusters of one event whose
// centroid lies inside the region. A region is a rectangle on one sensor,
// given in integer pixel units (see lumi_pkg::region_t); on each beat all
// eight cluster words are tested against all regions in parallel and the
// per-region hit counts of the beat are added to the event's running count.
// When the End-of-Event beat arrives, the event's counts are presented to
// the counters downstream (average counters and per-BXID counters) together
// with the event's bunch-crossing type and BXID.
//
// Interface: beats come from input_decoder (valid/sop/eop, eight clusters,
// event info). The event summary is ev_valid (one-clock pulse), ev_info and
// ev_counts[r]. Counts saturate at 2**CNT_W-1. A Start-of-Event beat clears
// the running count, so an event left unfinished by a framing error is
// dropped.
//
// Timing: ev_valid rises one clock after the End-of-Event beat is presented;
// one beat is taken every clock, and back-to-back one-beat events give one
// summary per clock.
//
// The selection of clusters inside fixed regions and the per-event counting
// follow the design described for the VELO counters; the rectangular region
// shape, the coordinate units and the 16-bit per-event count are choices of
// this design. Regions are fixed at build time through the REGIONS parameter.
module cluster_accumulator
  import lumi_pkg::*;
#(
  parameter int unsigned NUM_REGIONS = lumi_pkg::LAYER_REGIONS,
  parameter int unsigned CNT_W       = 16,
  parameter region_t     REGIONS [NUM_REGIONS] = lumi_pkg::DEFAULT_REGIONS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_sop,
  input  logic                 in_eop,
  input  cluster_t [CLUSTERS_PER_BEAT-1:0] in_clusters,
  input  event_info_t          in_info,
  output logic                 ev_valid,
  output event_info_t          ev_info,
  output logic [NUM_REGIONS-1:0][CNT_W-1:0] ev_counts
);

  localparam int unsigned BEAT_W = $clog2(CLUSTERS_PER_BEAT + 1);
  localparam logic [CNT_W:0] CNT_MAX = {1'b0, {CNT_W{1'b1}}};

  logic [NUM_REGIONS-1:0][CNT_W-1:0]  acc;
  logic [NUM_REGIONS-1:0][BEAT_W-1:0] beat_cnt;
  logic [NUM_REGIONS-1:0][CNT_W-1:0]  total;

  // Hits of this beat per region, and the saturated running total.
  always_comb begin
    for (int r = 0; r < NUM_REGIONS; r++) begin
      logic [CNT_W:0] sum;
      beat_cnt[r] = '0;
      for (int k = 0; k < CLUSTERS_PER_BEAT; k++)
        beat_cnt[r] += BEAT_W'(in_region(in_clusters[k], REGIONS[r]));
      sum = (in_sop ? '0 : {1'b0, acc[r]}) + (CNT_W+1)'(beat_cnt[r]);
      total[r] = (sum > CNT_MAX) ? CNT_MAX[CNT_W-1:0] : sum[CNT_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      ev_valid  <= 1'b0;
      ev_info   <= '0;
      ev_counts <= '0;
    end else begin
      ev_valid <= in_valid && in_eop;
      if (in_valid) begin
        if (in_eop) begin
          ev_counts <= total;
          ev_info   <= in_info;
          acc       <= '0;
        end else begin
          acc <= total;
        end
      end
    end
  end

endmodule
