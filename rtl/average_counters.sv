// average_counters: running-mean accumulators for the average and log0
// luminosity methods.
//
// For every accumulation region i and bunch-crossing type k (bb, be, eb, ee)
// the block sums over an integration window
//   c[k][i]  the number of clusters found in region i   (average method),
//   z[k][o]  the number of events with no cluster in outer region o (log0),
//   n[k]     the number of events of type k,
// and at the end of the window folds every sum x_t into a running mean
//   m_t = lambda * m_(t-1) + (1 - lambda) * x_t,   lambda = 1 - 2**-LAMBDA_SHIFT.
// With LAMBDA_SHIFT = 3 this is lambda = 0.875, computed exactly as
// m + (x - m) / 8 with an arithmetic shift, so no multiplier is needed.
// Means keep FRAC_W fractional bits (MEAN_W = SUM_W + FRAC_W bits in all).
//
// The window is WINDOW_ORBITS = 1024 LHC orbits: it closes on the first event
// of orbit number 1024 after it opened, so it holds 1024 x N_bb colliding
// events whatever the filling scheme (about 91 ms, 2.18e6 bb events at
// N_bb = 2133). Counting starts at the first orbit boundary after reset so
// that no window is partial. The first complete window loads the means
// directly; later windows are averaged in.
//
// The event counts n[k] are this design's addition: the background
// subtraction divides each c and z by the number of events of its type.
// Log0 sums are kept only for the NUM_OUTER outer regions, which are the
// highest-numbered regions. Sums saturate at 2**SUM_W-1.
//
// Interface: event summaries from cluster_accumulator (ev_valid pulse,
// ev_info, ev_counts). All means are registers, updated together on the
// clock after the closing event; `update` pulses then and n_updates counts
// the windows.
module average_counters
  import lumi_pkg::*;
#(
  parameter int unsigned NUM_REGIONS   = lumi_pkg::LAYER_REGIONS,
  parameter int unsigned NUM_OUTER     = lumi_pkg::LAYER_OUTER,
  parameter int unsigned CNT_W         = 16,
  parameter int unsigned WINDOW_ORBITS = 1024,
  parameter int unsigned LAMBDA_SHIFT  = 3,
  parameter int unsigned SUM_W         = 32,
  parameter int unsigned FRAC_W        = 8,
  localparam int unsigned MEAN_W       = SUM_W + FRAC_W
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ev_valid,
  input  event_info_t ev_info,
  input  logic [NUM_REGIONS-1:0][CNT_W-1:0] ev_counts,
  output logic [NUM_BX_TYPES-1:0][NUM_REGIONS-1:0][MEAN_W-1:0] mean_c,
  output logic [NUM_BX_TYPES-1:0][NUM_OUTER-1:0][MEAN_W-1:0]   mean_z,
  output logic [NUM_BX_TYPES-1:0][MEAN_W-1:0]                  mean_n,
  output logic        update,
  output logic [31:0] n_updates
);

  localparam int unsigned OUTER_BASE = NUM_REGIONS - NUM_OUTER;
  localparam int unsigned ORB_W      = $clog2(WINDOW_ORBITS + 1);

  logic [NUM_BX_TYPES-1:0][NUM_REGIONS-1:0][SUM_W-1:0] sum_c;
  logic [NUM_BX_TYPES-1:0][NUM_OUTER-1:0][SUM_W-1:0]   sum_z;
  logic [NUM_BX_TYPES-1:0][SUM_W-1:0]                  sum_n;
  logic             running;   // past the first orbit boundary
  logic             primed;    // means hold at least one window
  logic [ORB_W-1:0] orbit_cnt; // orbit boundaries seen in this window
  logic             close_win;

  function automatic logic [SUM_W-1:0] sat_add(input logic [SUM_W-1:0] a,
                                               input logic [SUM_W-1:0] b);
    logic [SUM_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[SUM_W] ? '1 : s[SUM_W-1:0];
  endfunction

  // One running-mean step: m + (x - m) >>> LAMBDA_SHIFT, or x when unprimed.
  function automatic logic [MEAN_W-1:0] rm_step(input logic [MEAN_W-1:0] m,
                                                input logic [SUM_W-1:0]  x,
                                                input logic              first);
    logic signed [MEAN_W+1:0] xs, d;
    xs = signed'({2'b00, x, {FRAC_W{1'b0}}});
    if (first) return xs[MEAN_W-1:0];
    d = (xs - signed'({2'b00, m})) >>> LAMBDA_SHIFT;
    return MEAN_W'(signed'({2'b00, m}) + d);
  endfunction

  assign close_win = running && ev_info.new_orbit
                     && (orbit_cnt == ORB_W'(WINDOW_ORBITS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_c     <= '0;
      sum_z     <= '0;
      sum_n     <= '0;
      mean_c    <= '0;
      mean_z    <= '0;
      mean_n    <= '0;
      running   <= 1'b0;
      primed    <= 1'b0;
      orbit_cnt <= '0;
      update    <= 1'b0;
      n_updates <= '0;
    end else begin
      update <= 1'b0;
      if (ev_valid && (running || ev_info.new_orbit)) begin
        running <= 1'b1;
        if (close_win) begin
          // Fold the finished window into the means, then restart the sums
          // with the current event, which opens the next window.
          for (int k = 0; k < NUM_BX_TYPES; k++) begin
            for (int r = 0; r < NUM_REGIONS; r++)
              mean_c[k][r] <= rm_step(mean_c[k][r], sum_c[k][r], !primed);
            for (int o = 0; o < NUM_OUTER; o++)
              mean_z[k][o] <= rm_step(mean_z[k][o], sum_z[k][o], !primed);
            mean_n[k] <= rm_step(mean_n[k], sum_n[k], !primed);
          end
          primed    <= 1'b1;
          update    <= 1'b1;
          n_updates <= n_updates + 32'd1;
          orbit_cnt <= '0;
        end else if (running && ev_info.new_orbit) begin
          orbit_cnt <= orbit_cnt + ORB_W'(1);
        end
        for (int k = 0; k < NUM_BX_TYPES; k++) begin
          logic hit;
          hit = (ev_info.bx_type == bx_type_e'(k));
          for (int r = 0; r < NUM_REGIONS; r++)
            sum_c[k][r] <= sat_add(close_win || !running ? '0 : sum_c[k][r],
                                   hit ? SUM_W'(ev_counts[r]) : '0);
          for (int o = 0; o < NUM_OUTER; o++)
            sum_z[k][o] <= sat_add(close_win || !running ? '0 : sum_z[k][o],
                                   SUM_W'(hit && ev_counts[OUTER_BASE+o] == '0));
          sum_n[k] <= sat_add(close_win || !running ? '0 : sum_n[k], SUM_W'(hit));
        end
      end
    end
  end

  initial begin
    assert (LAMBDA_SHIFT > 0 && LAMBDA_SHIFT < FRAC_W + SUM_W)
      else $error("average_counters: LAMBDA_SHIFT out of range");
    assert (NUM_OUTER <= NUM_REGIONS && WINDOW_ORBITS > 0)
      else $error("average_counters: bad region or window parameters");
  end

endmodule
