// lumi_e2e_tester: stimulus, reference model and checks for end-to-end runs
// of velo_lumi_counters. Used by tb_velo_lumi_counters (short windows) and
// tb_velo_lumi_full (the design's own window lengths).
//
// It plays a fixed filling scheme of NE_PER_ORBIT crossings per LHC orbit
// (BXIDs spread over the orbit; bb, be, eb and ee types), each event one to
// MAX_BEATS beats of eight random clusters, a good share of them inside the
// accumulation regions. The reference model decodes the cluster words and
// the region table on its own, derives the orbit boundaries from the BXIDs,
// and keeps the window sums, running means (lambda = 7/8, 8 fractional bits)
// and per-BXID counts. All results are read back over the slow-control bus:
//   - after the first N_AVG_CHECKS running-mean updates, every mean and the
//     update count; an update must arrive exactly every AVG_W orbits;
//   - the per-BXID state one orbit before and at the end of its PB_W-orbit
//     window (exact window length), then every lane of every BXID of the
//     filling scheme and of two BXIDs that never occur;
//   - a stray beat must raise the framing error; a restart command must clear
//     the per-BXID RAM.
// Each mechanism (mean update, per-BXID window end, restart, framing error,
// empty-region events, each bunch-crossing type) is counted, and one that
// never happened counts as a failure.
module lumi_e2e_tester
  import lumi_pkg::*;
#(
  parameter int AVG_W           = 4,
  parameter int PB_W            = 12,
  parameter int N_AVG_CHECKS    = 3,
  parameter int NE_PER_ORBIT    = 12,
  parameter int MAX_BEATS       = 3,
  parameter longint WATCHDOG    = 64'd2_000_000
) (
  input  logic              clk,
  output logic              rst_n,
  output logic [DATA_W-1:0] in_data,
  output logic              in_valid,
  output logic              in_soe,
  output logic              in_eoe,
  output logic [TFC_W-1:0]  in_tfc,
  output logic              sc_rd,
  output logic              sc_wr,
  output logic [15:0]       sc_addr,
  output logic [31:0]       sc_wdata,
  input  logic [31:0]       sc_rdata,
  input  logic              sc_rvalid,
  input  logic              sc_busy,
  input  logic              framing_error,
  input  logic              avg_update
);

  localparam int NR = 8, NO = 4;

  int checks = 0, failures = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- regions
  int r_sensor [NR] = '{0, 1, 2, 3, 4, 5, 6, 7};
  int r_clo    [NR] = '{64, 64, 64, 64, 560, 560, 560, 560};
  int r_chi    [NR] = '{207, 207, 207, 207, 703, 703, 703, 703};

  function automatic int hits(input logic [31:0] w, input int r);
    int col, row;
    col = int'(w[23:11]) / 8;
    row = int'(w[10:0]) / 8;
    return (w[31] && int'(w[26:24]) == r_sensor[r] && col >= r_clo[r] && col <= r_chi[r]
            && row >= 192 && row <= 239) ? 1 : 0;
  endfunction

  function automatic logic [31:0] rand_cluster();
    logic [31:0] w;
    int col, row;
    if ($urandom_range(0, 2) == 0) begin
      col = $urandom_range(0, 767); row = $urandom_range(0, 255);
    end else begin
      col = $urandom_range(50, 220) + $urandom_range(0, 1) * 496;
      row = $urandom_range(185, 245);
    end
    w = $urandom();
    w[31]    = ($urandom_range(0, 3) != 0);
    w[26:24] = 3'($urandom_range(0, 7));
    w[23:11] = 13'(col * 8 + $urandom_range(0, 7));
    w[10:0]  = 11'(row * 8 + $urandom_range(0, 7));
    return w;
  endfunction

  // ---------------------------------------------------------- filling scheme
  int fs_bx [NE_PER_ORBIT];
  int fs_ty [NE_PER_ORBIT];
  int ty_cycle [4] = '{3, 1, 0, 2};  // bb, be, ee, eb

  // ---------------------------------------------------------- reference model
  bit     seen = 0;
  int     prev_bx = 0;
  bit     avg_running = 0, avg_primed = 0;
  int     avg_orbits = 0, n_closed = 0;
  longint s_c [4][NR], s_z [4][NO], s_n [4];
  longint m_c [4][NR], m_z [4][NO], m_n [4];
  bit     pb_counting = 0, pb_armed = 0;
  int     pb_orbits = 0;
  int     pb_z [NUM_BX][NO];
  int     pb_m [NUM_BX];
  int     n_type [4] = '{0, 0, 0, 0};
  int     n_empty = 0;

  function automatic longint step(longint m, longint x, bit first);
    return first ? (x << 8) : (7 * m + (x << 8)) / 8;
  endfunction

  task automatic pb_clear();
    foreach (pb_z[j, o]) pb_z[j][o] = 0;
    foreach (pb_m[j]) pb_m[j] = 0;
    pb_counting = 0;
    pb_orbits = 0;
  endtask

  task automatic model_event(input int bx, input int ty, input int cnt [NR]);
    bit orbit, close;
    orbit = seen && (bx <= prev_bx);
    seen = 1;
    prev_bx = bx;
    n_type[ty]++;
    // average counters
    close = 0;
    if (avg_running && orbit) begin
      avg_orbits++;
      if (avg_orbits == AVG_W) begin close = 1; avg_orbits = 0; end
    end
    if (close) begin
      for (int k = 0; k < 4; k++) begin
        for (int r = 0; r < NR; r++) m_c[k][r] = step(m_c[k][r], s_c[k][r], !avg_primed);
        for (int o = 0; o < NO; o++) m_z[k][o] = step(m_z[k][o], s_z[k][o], !avg_primed);
        m_n[k] = step(m_n[k], s_n[k], !avg_primed);
      end
      avg_primed = 1;
      n_closed++;
    end
    if (avg_running || orbit) begin
      if (close || !avg_running)
        for (int k = 0; k < 4; k++) begin
          for (int r = 0; r < NR; r++) s_c[k][r] = 0;
          for (int o = 0; o < NO; o++) s_z[k][o] = 0;
          s_n[k] = 0;
        end
      avg_running = 1;
      for (int r = 0; r < NR; r++) s_c[ty][r] += longint'(cnt[r]);
      for (int o = 0; o < NO; o++) if (cnt[NR-NO+o] == 0) s_z[ty][o]++;
      s_n[ty]++;
    end
    // per-BXID counters (armed once the block has finished clearing)
    if (pb_armed && orbit) begin
      if (pb_counting) begin
        pb_orbits++;
        if (pb_orbits == PB_W) begin pb_counting = 0; pb_armed = 0; end
      end else begin
        pb_counting = 1;
      end
    end
    if (pb_counting) begin
      pb_m[bx]++;
      for (int o = 0; o < NO; o++)
        if (cnt[NR-NO+o] == 0) begin pb_z[bx][o]++; n_empty++; end
    end
  endtask

  // ---------------------------------------------------------------- driving
  task automatic send_event(input int bx, input int ty);
    int nb;
    int cnt [NR];
    logic [TFC_W-1:0] tfc;
    foreach (cnt[r]) cnt[r] = 0;
    nb = $urandom_range(1, MAX_BEATS);
    tfc = {$urandom(), $urandom()};
    tfc[11:0]  = 12'(bx);
    tfc[13:12] = 2'(ty);
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      in_valid = 1; in_soe = (b == 0); in_eoe = (b == nb - 1); in_tfc = tfc;
      for (int k = 0; k < 8; k++) begin
        logic [31:0] w;
        w = ($urandom_range(0, 3) == 0) ? 32'h0 : rand_cluster();
        in_data[k*32 +: 32] = w;
        for (int r = 0; r < NR; r++) cnt[r] += hits(w, r);
      end
    end
    model_event(bx, ty, cnt);
    if ($urandom_range(0, 3) == 0) idle(1);
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(negedge clk);
      in_valid = 0; in_soe = 0; in_eoe = 0;
    end
  endtask

  task automatic send_orbit();
    for (int e = 0; e < NE_PER_ORBIT; e++) send_event(fs_bx[e], fs_ty[e]);
  endtask

  task automatic sc_read(input logic [15:0] a, output logic [31:0] d);
    int n;
    @(negedge clk);
    sc_rd = 1; sc_addr = a;
    @(negedge clk);
    sc_rd = 0;
    n = 0;
    while (!sc_rvalid && n < 50) begin @(negedge clk); n++; end
    check(sc_rvalid, "slow-control read answered");
    d = sc_rdata;
  endtask

  task automatic sc_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    sc_wr = 1; sc_addr = a; sc_wdata = d;
    @(negedge clk);
    sc_wr = 0;
  endtask

  task automatic check_means();
    logic [31:0] d;
    idle(4);
    for (int k = 0; k < 4; k++) begin
      for (int r = 0; r < NR; r++) begin
        sc_read(16'(k * NR + r), d);
        check(d == 32'(m_c[k][r] >> 8), $sformatf("mean c type %0d region %0d", k, r));
      end
      for (int o = 0; o < NO; o++) begin
        sc_read(16'h0100 + 16'(k * NO + o), d);
        check(d == 32'(m_z[k][o] >> 8), $sformatf("mean z type %0d outer %0d", k, o));
      end
      sc_read(16'h0200 + 16'(k), d);
      check(d == 32'(m_n[k] >> 8), $sformatf("mean n type %0d", k));
    end
    sc_read(16'h0300, d);
    check(d == 32'(n_closed), "update count");
  endtask

  task automatic wait_pb_state(input int s);
    logic [31:0] d;
    int n;
    n = 0;
    do begin
      sc_read(16'h0301, d);
      n++;
    end while (d != 32'(s) && n < 4000);
    check(d == 32'(s), $sformatf("per-BXID state %0d reached", s));
  endtask

  task automatic check_perbx(input string tag);
    logic [31:0] d;
    int bxs [NE_PER_ORBIT + 2];
    for (int e = 0; e < NE_PER_ORBIT; e++) bxs[e] = fs_bx[e];
    bxs[NE_PER_ORBIT] = 1;        // never used by the filling scheme
    bxs[NE_PER_ORBIT + 1] = 3563;
    idle(4);
    foreach (bxs[i]) begin
      for (int l = 0; l <= NO; l++) begin
        sc_read(16'h8000 | 16'(bxs[i] * 8 + l), d);
        check(d == 32'((l < NO) ? pb_z[bxs[i]][l] : pb_m[bxs[i]]),
              $sformatf("%s per-BXID bx %0d lane %0d: got %0d", tag, bxs[i], l, d));
      end
    end
  endtask

  // ------------------------------------------------------------------ main
  int updates_seen = 0, orbits_between = 0, orbits_sent = 0;
  int last_update_orbit = -1;
  int n_pb_done = 0, n_restart = 0, n_framing = 0;

  always @(posedge clk) if (rst_n && avg_update) updates_seen++;

  initial begin
    logic [31:0] d;
    int avg_checked;
    rst_n = 0;
    in_valid = 0; in_soe = 0; in_eoe = 0; in_data = '0; in_tfc = '0;
    sc_rd = 0; sc_wr = 0; sc_addr = '0; sc_wdata = '0;
    foreach (m_c[k, r]) m_c[k][r] = 0;
    foreach (m_z[k, o]) m_z[k][o] = 0;
    foreach (m_n[k]) m_n[k] = 0;
    foreach (s_c[k, r]) s_c[k][r] = 0;
    foreach (s_z[k, o]) s_z[k][o] = 0;
    foreach (s_n[k]) s_n[k] = 0;
    pb_clear();
    // filling scheme: NE crossings spread over the orbit, BXID 1 left empty
    for (int e = 0; e < NE_PER_ORBIT; e++) begin
      fs_bx[e] = 2 + e * (3500 / NE_PER_ORBIT) + $urandom_range(0, 3500 / NE_PER_ORBIT - 1);
      fs_ty[e] = ty_cycle[e % 4];
    end
    repeat (4) @(negedge clk);
    rst_n = 1;

    // per-BXID RAM is cleared after reset; start once it waits for an orbit
    wait_pb_state(1);
    pb_armed = 1;

    avg_checked = 0;
    while (pb_armed) begin
      int closed_before;
      closed_before = n_closed;
      if (pb_counting && pb_orbits == PB_W - 1) begin
        idle(4);
        sc_read(16'h0301, d);
        check(d == 32'd2, "per-BXID window still running one orbit before its end");
      end
      send_orbit();
      orbits_sent++;
      if (n_closed != closed_before) begin
        if (last_update_orbit >= 0)
          check(orbits_sent - last_update_orbit == AVG_W, "running mean updated every AVG_W orbits");
        last_update_orbit = orbits_sent;
        if (avg_checked < N_AVG_CHECKS) begin
          check_means();
          avg_checked++;
        end
      end
    end
    // the event that closed the window has been sent
    idle(4);
    sc_read(16'h0301, d);
    check(d == 32'd3, "per-BXID window done after exactly PB_W orbits");
    if (d == 32'd3) n_pb_done++;
    check(updates_seen == n_closed, $sformatf("every running-mean update pulse seen (%0d of %0d)", updates_seen, n_closed));
    check_perbx("window");
    check_means();

    // framing error: a beat outside any event
    check(!framing_error, "no framing error on a clean stream");
    @(negedge clk);
    in_valid = 1; in_soe = 0; in_eoe = 0;
    idle(3);
    check(framing_error, "stray beat raises framing error");
    if (framing_error) n_framing++;

    // restart of the per-BXID window clears the RAM
    sc_write(16'h0310, 32'd1);
    sc_read(16'h0301, d);
    check(d == 32'd0 || d == 32'd1, "restart enters clear");
    wait_pb_state(1);
    n_restart++;
    pb_clear();
    check_perbx("after restart");

    check(n_closed >= 2, "running mean updated");
    check(n_pb_done > 0, "per-BXID window completed");
    check(n_restart > 0, "per-BXID restart");
    check(n_framing > 0, "framing error");
    check(n_empty > 0, "empty outer regions counted");
    foreach (n_type[k]) check(n_type[k] > 0, $sformatf("bunch-crossing type %0d seen", k));
    $display("mechanisms: mean updates=%0d per-BXID windows=%0d restarts=%0d framing errors=%0d empty-region events=%0d types=%p orbits=%0d",
             n_closed, n_pb_done, n_restart, n_framing, n_empty, n_type, orbits_sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (longint i = 0; i < WATCHDOG; i++) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
