// input_decoder: front end of the luminosity accumulators (the "decoder").
//
// It receives the output of the VELO real-time clustering as a stream of
// 256-bit beats framed by Data Valid, Start-of-Event and End-of-Event, plus
// the 64-bit TFC word that accompanies each event. It splits every beat into
// eight 32-bit cluster words and attaches to each beat the event's
// bunch-crossing type and bunch-crossing identifier (BXID), both decoded from
// the TFC word. It also marks the first event of every LHC orbit (its BXID is
// not larger than the previous event's), which downstream blocks use to
// measure integration windows in orbits.
//
// Framing: a beat is taken when in_valid is high. in_soe marks the first beat
// of an event, in_eoe the last (both may be set on a one-beat event). The TFC
// word is sampled on the Start-of-Event beat. A beat arriving outside an event
// is dropped; a Start-of-Event inside an event starts the new event (the
// downstream accumulator discards the unfinished one). Both set the sticky
// framing_error flag, cleared only by reset.
//
// Timing: one register stage, so every output follows its input beat by one
// clock. There is no back-pressure: the accumulators take one beat per clock.
//
// The block's name and its inputs and outputs follow the design's block
// diagram; the framing rules, the TFC field positions and the orbit-start
// detection are this design's choices.
module input_decoder
  import lumi_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // from the clustering
  input  logic [DATA_W-1:0]    in_data,
  input  logic                 in_valid,
  input  logic                 in_soe,
  input  logic                 in_eoe,
  input  logic [TFC_W-1:0]     in_tfc,
  // to the cluster selector
  output logic                 out_valid,
  output logic                 out_sop,
  output logic                 out_eop,
  output cluster_t [CLUSTERS_PER_BEAT-1:0] out_clusters,
  output event_info_t          out_info,
  output logic                 framing_error
);

  logic              in_event;     // between an accepted SoE and its EoE
  logic              seen_event;   // at least one event since reset
  logic [BXID_W-1:0] prev_bxid;
  event_info_t       cur_info;     // info of the event in progress
  event_info_t       soe_info;     // info decoded from this beat's TFC word
  logic              accept;

  always_comb begin
    soe_info.bx_type   = tfc_bx_type(in_tfc);
    soe_info.bxid      = tfc_bxid(in_tfc);
    soe_info.new_orbit = seen_event && (tfc_bxid(in_tfc) <= prev_bxid);
    accept             = in_valid && (in_soe || in_event);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_event      <= 1'b0;
      seen_event    <= 1'b0;
      prev_bxid     <= '0;
      cur_info      <= '0;
      out_valid     <= 1'b0;
      out_sop       <= 1'b0;
      out_eop       <= 1'b0;
      out_clusters  <= '0;
      out_info      <= '0;
      framing_error <= 1'b0;
    end else begin
      out_valid <= accept;
      out_sop   <= accept && in_soe;
      out_eop   <= accept && in_eoe;
      if (accept) out_clusters <= in_data;  // cluster k = bits [32k+31:32k]
      if (in_valid && in_soe) begin
        cur_info   <= soe_info;
        out_info   <= soe_info;
        prev_bxid  <= soe_info.bxid;
        seen_event <= 1'b1;
        in_event   <= !in_eoe;
        if (in_event) framing_error <= 1'b1;
      end else if (accept) begin
        out_info <= cur_info;
        if (in_eoe) in_event <= 1'b0;
      end else if (in_valid) begin
        framing_error <= 1'b1;
      end
    end
  end

endmodule
