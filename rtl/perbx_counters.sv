// perbx_counters: per-BXID log0 accumulators in block RAM.
//
// For each of the 3564 bunch-crossing identifiers j and each outer
// accumulation region o the block counts z[o][j], the number of events with
// no cluster in region o, and M[j], the number of events with BXID j. Both
// are what the per-BXID zero-counting estimate mu = -ln(z/M) needs. The
// counters of one BXID share one RAM word: lane o (bits [20o+19:20o]) holds
// z[o][j], lane NUM_OUTER holds M[j].
//
// Counting is a read-modify-write on sdp_ram: the event's BXID addresses the
// read on the clock its summary arrives, and the incremented word is written
// on the next clock. When two consecutive summaries carry the same BXID the
// second takes the word just computed instead of the stale RAM output, so one
// summary per clock is sustained.
//
// Integration window: WINDOW_ORBITS LHC orbits, 449000 by default (40.0 s at
// 89.1 us per orbit). Because a BXID occurs at most once per orbit, no
// counter can exceed WINDOW_ORBITS < 2**20, so the 20-bit words never
// overflow. Sequence of states:
//   CLEAR  write zero to every word, one word per clock (NUM_BX clocks);
//   WAIT   wait for the first event of a new orbit;
//   RUN    count events until WINDOW_ORBITS orbit boundaries have passed;
//   DONE   frozen: the window is complete and is read out.
// Reset and a `start` pulse (from slow control) enter CLEAR. Events arriving
// in CLEAR, WAIT (before the orbit boundary) and DONE are not counted.
//
// Read port: rd_req with rd_bxid is held pending until the RAM read port is
// free (it is used by counting on clocks with an event); rd_ack pulses with
// rd_data one clock after the read is issued. Reads are allowed in any state.
//
// The 20-bit words, the log0 choice and the 40 s window follow the readout
// design; the word packing, the event count M[j], the explicit clear and the
// freeze after one window are this design's choices.
module perbx_counters
  import lumi_pkg::*;
#(
  parameter int unsigned NUM_REGIONS   = lumi_pkg::LAYER_REGIONS,
  parameter int unsigned NUM_OUTER     = lumi_pkg::LAYER_OUTER,
  parameter int unsigned CNT_W         = 16,
  parameter int unsigned NUM_BXIDS     = lumi_pkg::NUM_BX,
  parameter int unsigned WORD_W        = lumi_pkg::PERBX_W,
  parameter int unsigned WINDOW_ORBITS = 449000,
  localparam int unsigned LANES        = NUM_OUTER + 1,
  localparam int unsigned RAM_W        = LANES * WORD_W,
  localparam int unsigned ADDR_W       = $clog2(NUM_BXIDS),
  localparam int unsigned ORB_W        = $clog2(WINDOW_ORBITS + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ev_valid,
  input  event_info_t         ev_info,
  input  logic [NUM_REGIONS-1:0][CNT_W-1:0] ev_counts,
  input  logic                start,
  input  logic                rd_req,
  input  logic [BXID_W-1:0]   rd_bxid,
  output logic                rd_ack,
  output logic [RAM_W-1:0]    rd_data,
  output logic [1:0]          state_o,
  output logic [ORB_W-1:0]    orbits_o
);

  localparam int unsigned OUTER_BASE = NUM_REGIONS - NUM_OUTER;

  typedef enum logic [1:0] {PB_CLEAR, PB_WAIT, PB_RUN, PB_DONE} pb_state_e;
  pb_state_e state;

  logic [ADDR_W-1:0] clr_addr;
  logic [ORB_W-1:0]  orbit_cnt;

  // RAM ports
  logic              we, re;
  logic [ADDR_W-1:0] waddr, raddr;
  logic [RAM_W-1:0]  wdata, rdata;

  // Pipeline: s0 = event accepted (RAM read issued), s1 = write back.
  logic              s0_go;
  logic              s1_valid, s1_fwd;
  logic [ADDR_W-1:0] s1_addr;
  logic [LANES-1:0]  s1_inc;
  logic [RAM_W-1:0]  s1_old, s1_new, fwd_data;

  // Pending slow-control read.
  logic              rd_pend, rd_issue, rd_inflight;
  logic [ADDR_W-1:0] rd_addr_q;

  logic closing;
  assign closing = (state == PB_RUN) && ev_valid && ev_info.new_orbit
                   && (orbit_cnt == ORB_W'(WINDOW_ORBITS - 1));

  always_comb begin
    s0_go = ev_valid && (32'(ev_info.bxid) < NUM_BXIDS) && !closing
            && ((state == PB_RUN) || (state == PB_WAIT && ev_info.new_orbit));
    rd_issue = rd_pend && !s0_go;

    s1_old = s1_fwd ? fwd_data : rdata;
    for (int l = 0; l < LANES; l++)
      s1_new[l*WORD_W +: WORD_W] = s1_old[l*WORD_W +: WORD_W] + WORD_W'(s1_inc[l]);

    re    = s0_go || rd_issue;
    raddr = s0_go ? ADDR_W'(ev_info.bxid) : rd_addr_q;
    if (state == PB_CLEAR) begin
      we    = 1'b1;
      waddr = clr_addr;
      wdata = '0;
    end else begin
      we    = s1_valid;
      waddr = s1_addr;
      wdata = s1_new;
    end
  end

  sdp_ram #(.DEPTH(NUM_BXIDS), .WIDTH(RAM_W)) u_ram (
    .clk, .we, .waddr, .wdata, .re, .raddr, .rdata
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= PB_CLEAR;
      clr_addr    <= '0;
      orbit_cnt   <= '0;
      s1_valid    <= 1'b0;
      s1_fwd      <= 1'b0;
      s1_addr     <= '0;
      s1_inc      <= '0;
      fwd_data    <= '0;
      rd_pend     <= 1'b0;
      rd_addr_q   <= '0;
      rd_inflight <= 1'b0;
    end else begin
      // read-modify-write pipeline
      s1_valid <= s0_go;
      s1_fwd   <= s0_go && s1_valid && (s1_addr == ADDR_W'(ev_info.bxid));
      fwd_data <= s1_new;
      if (s0_go) begin
        s1_addr <= ADDR_W'(ev_info.bxid);
        for (int o = 0; o < NUM_OUTER; o++)
          s1_inc[o] <= (ev_counts[OUTER_BASE+o] == '0);
        s1_inc[NUM_OUTER] <= 1'b1;
      end

      // slow-control reads
      rd_inflight <= rd_issue;
      if (rd_issue)
        rd_pend <= 1'b0;
      if (rd_req && !rd_pend) begin
        rd_pend   <= 1'b1;
        rd_addr_q <= ADDR_W'(rd_bxid);
      end

      // window control
      unique case (state)
        PB_CLEAR: begin
          clr_addr <= clr_addr + ADDR_W'(1);
          if (32'(clr_addr) == NUM_BXIDS - 1) begin
            clr_addr <= '0;
            state    <= PB_WAIT;
          end
        end
        PB_WAIT: begin
          orbit_cnt <= '0;
          if (ev_valid && ev_info.new_orbit) state <= PB_RUN;
        end
        PB_RUN: begin
          if (closing)
            state <= PB_DONE;
          else if (ev_valid && ev_info.new_orbit)
            orbit_cnt <= orbit_cnt + ORB_W'(1);
        end
        PB_DONE: ;
      endcase
      if (start) begin
        state    <= PB_CLEAR;
        clr_addr <= '0;
        s1_valid <= 1'b0;
      end
    end
  end

  assign rd_ack   = rd_inflight;
  assign rd_data  = rdata;
  assign state_o  = state;
  assign orbits_o = orbit_cnt;

  // The window bound keeps every 20-bit counter from wrapping.
  initial assert (64'(WINDOW_ORBITS) < (64'd1 << WORD_W))
    else $error("perbx_counters: window longer than the counter range");

  // The event count of a BXID never wraps to zero within a window.
  assert property (@(posedge clk) disable iff (!rst_n)
                   s1_valid && state != PB_CLEAR |->
                   s1_old[NUM_OUTER*WORD_W +: WORD_W] != '1)
    else $error("perbx_counters: per-BXID event count overflow");

endmodule
