// tb_average_counters: self-checking test of average_counters.
//
// Event summaries are driven directly: orbits of a few events with rising
// BXIDs, random bunch-crossing types and random per-region counts, many of
// them zero. The window is shortened to 4 orbits. A reference model forms
// the window sums of clusters, empty events and events per type, and the
// running means as floor((7*m + x*256) / 8) (lambda = 0.875 with 8
// fractional bits), loading the first window directly. On every update
// pulse all 52 means are compared, and the pulse itself must come exactly
// one clock after the event that closes a window. A second instance with
// 7-bit sums checks that sums saturate.
module tb_average_counters;
  import lumi_pkg::*;

  localparam int NR = 8, NO = 4, W = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic ev_valid;
  event_info_t ev_info;
  logic [NR-1:0][15:0] ev_counts;
  logic [3:0][NR-1:0][39:0] mean_c;
  logic [3:0][NO-1:0][39:0] mean_z;
  logic [3:0][39:0] mean_n;
  logic update;
  logic [31:0] n_updates;
  logic [3:0][NR-1:0][14:0] mean_c_s;
  logic [3:0][NO-1:0][14:0] mean_z_s;
  logic [3:0][14:0] mean_n_s;
  logic update_s;
  logic [31:0] n_updates_s;

  int checks = 0, failures = 0;

  average_counters #(.WINDOW_ORBITS(W)) dut (.*);
  average_counters #(.WINDOW_ORBITS(W), .SUM_W(7)) dut_s (
    .clk, .rst_n, .ev_valid, .ev_info, .ev_counts,
    .mean_c (mean_c_s), .mean_z (mean_z_s), .mean_n (mean_n_s),
    .update (update_s), .n_updates (n_updates_s)
  );

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // reference model: index 0 = full-width sums, 1 = 7-bit saturating sums
  longint s_c [2][4][NR], s_z [2][4][NO], s_n [2][4];
  longint m_c [2][4][NR], m_z [2][4][NO], m_n [2][4];
  bit     running = 0, primed = 0;
  int     orbits = 0, n_closed = 0, n_sat = 0;
  longint smax [2] = '{64'hFFFF_FFFF, 64'd127};

  function automatic longint step(longint m, longint x, bit first);
    return first ? (x << 8) : (7 * m + (x << 8)) / 8;
  endfunction

  task automatic model_event(input int t, input logic [NR-1:0][15:0] cnt, input bit orbit);
    bit close;
    close = 0;
    if (!running && !orbit) return;
    if (running && orbit) begin
      orbits++;
      if (orbits == W) begin close = 1; orbits = 0; end
    end
    if (close) begin
      for (int v = 0; v < 2; v++)
        for (int k = 0; k < 4; k++) begin
          for (int r = 0; r < NR; r++) m_c[v][k][r] = step(m_c[v][k][r], s_c[v][k][r], !primed);
          for (int o = 0; o < NO; o++) m_z[v][k][o] = step(m_z[v][k][o], s_z[v][k][o], !primed);
          m_n[v][k] = step(m_n[v][k], s_n[v][k], !primed);
        end
      primed = 1;
      n_closed++;
    end
    if (close || !running)
      for (int v = 0; v < 2; v++)
        for (int k = 0; k < 4; k++) begin
          foreach (s_c[v][k][r]) s_c[v][k][r] = 0;
          foreach (s_z[v][k][o]) s_z[v][k][o] = 0;
          s_n[v][k] = 0;
        end
    running = 1;
    for (int v = 0; v < 2; v++) begin
      for (int r = 0; r < NR; r++) begin
        s_c[v][t][r] += longint'(cnt[r]);
        if (s_c[v][t][r] > smax[v]) begin s_c[v][t][r] = smax[v]; if (v == 1) n_sat++; end
      end
      for (int o = 0; o < NO; o++)
        if (cnt[NR-NO+o] == 0) s_z[v][t][o] += 1;
      s_n[v][t] += 1;
    end
  endtask

  task automatic compare_means();
    for (int k = 0; k < 4; k++) begin
      for (int r = 0; r < NR; r++) begin
        check(longint'(mean_c[k][r]) == m_c[0][k][r], $sformatf("mean c[%0d][%0d]", k, r));
        check(longint'(mean_c_s[k][r]) == m_c[1][k][r], "saturating mean c");
      end
      for (int o = 0; o < NO; o++) begin
        check(longint'(mean_z[k][o]) == m_z[0][k][o], $sformatf("mean z[%0d][%0d]", k, o));
        check(longint'(mean_z_s[k][o]) == m_z[1][k][o], "saturating mean z");
      end
      check(longint'(mean_n[k]) == m_n[0][k], $sformatf("mean n[%0d]", k));
      check(longint'(mean_n_s[k]) == m_n[1][k], "saturating mean n");
    end
  endtask

  int closed_seen = 0;
  bit expect_update = 0;

  task automatic drive(input bit valid, input int t, input int bx, input bit orbit,
                       input logic [NR-1:0][15:0] cnt);
    int n_before;
    @(negedge clk);
    check(update == expect_update && update_s == expect_update, "update timing");
    if (update) begin
      compare_means();
      check(n_updates == 32'(n_closed), "update count");
      closed_seen++;
    end
    ev_valid = valid;
    ev_info  = '{bx_type: bx_type_e'(t), bxid: 12'(bx), new_orbit: orbit};
    ev_counts = cnt;
    n_before = n_closed;
    if (valid) model_event(t, cnt, orbit);
    expect_update = (n_closed != n_before);
  endtask

  initial begin
    ev_valid = 0; ev_info = '0; ev_counts = '0;
    foreach (m_c[v, k, r]) m_c[v][k][r] = 0;
    foreach (m_z[v, k, o]) m_z[v][k][o] = 0;
    foreach (m_n[v, k]) m_n[v][k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int orb = 0; orb < 150; orb++) begin
      int bx, ne;
      bx = 0;
      ne = $urandom_range(2, 8);
      for (int e = 0; e < ne; e++) begin
        logic [NR-1:0][15:0] cnt;
        bx += $urandom_range(1, 300);
        for (int r = 0; r < NR; r++)
          cnt[r] = ($urandom_range(0, 2) == 0) ? 16'd0 : 16'($urandom_range(0, 60));
        drive(1, $urandom_range(0, 3), bx, orb > 0 && e == 0, cnt);
        repeat ($urandom_range(0, 1)) drive(0, 0, 0, 0, '0);
      end
    end
    repeat (3) drive(0, 0, 0, 0, '0);
    check(closed_seen == n_closed, "all updates seen");
    check(n_closed > 30, "many windows closed");
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
