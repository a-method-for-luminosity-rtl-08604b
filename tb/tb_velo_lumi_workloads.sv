// tb_velo_lumi_workloads: the running-mean accumulators at their default
// size under the two filling schemes they were tuned for.
//
//   pp 2024:  2133 colliding (bb) bunches per orbit, so a 1024-orbit window
//             holds N = 1024 x 2133 = 2184192 bb events (about 2.18e6);
//   PbPb:     508 colliding bunches, N = 1024 x 508 = 520192 (about 5.2e5).
// Each scheme also triggers 40 be, 40 eb and 40 ee crossings per orbit. Every
// triggered crossing is a one-beat event of eight cluster words, sent back to
// back. Cluster word w of an event lies inside region w with a fixed
// probability that depends on the crossing type and on whether the region is
// inner or outer, and elsewhere on its sensor otherwise (or is an empty
// slot), so the true visible rate of every region is known.
//
// For each scheme the design is reset, run for two complete windows, and
// after each running-mean update all 52 means are read over the slow-control
// port and compared with a reference model (window sums, lambda = 7/8 with
// 8 fractional bits, first window loaded directly). The event-count means
// must equal N exactly, the update period must be 1024 orbits, and the
// background-subtracted average and log0 estimates formed from the read-back
// means, as the control software would form them, must match the generated
// rates within their statistical spread.
module tb_velo_lumi_workloads;
  import lumi_pkg::*;

  localparam int W = 1024;          // orbits per running-mean window (default)
  localparam int N_OTHER = 40;      // be, eb and ee crossings per orbit

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [DATA_W-1:0] in_data;
  logic in_valid, in_soe, in_eoe;
  logic [TFC_W-1:0] in_tfc;
  logic sc_rd, sc_wr, sc_rvalid, sc_busy, framing_error, avg_update;
  logic [15:0] sc_addr;
  logic [31:0] sc_wdata, sc_rdata;

  velo_lumi_counters dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- scheme
  bx_type_e bx_ty [NUM_BX];
  bit       bx_on [NUM_BX];
  int       p_in [4], p_out [4];       // per-mille hit probability per type

  // Spread n crossings evenly over the orbit, skipping those already taken.
  task automatic place(input int n, input bx_type_e t);
    int free_n, k, placed;
    free_n = 0;
    foreach (bx_on[j]) if (!bx_on[j]) free_n++;
    k = 0; placed = 0;
    foreach (bx_on[j]) if (!bx_on[j]) begin
      if ((k + 1) * n / free_n != k * n / free_n) begin
        bx_on[j] = 1; bx_ty[j] = t; placed++;
      end
      k++;
    end
    check(placed == n, "filling scheme placed");
  endtask

  task automatic make_scheme(input int n_bb, input int pin_bb, input int pout_bb);
    foreach (bx_on[j]) begin bx_on[j] = 0; bx_ty[j] = BX_EE; end
    place(n_bb, BX_BB);
    place(N_OTHER, BX_BE);
    place(N_OTHER, BX_EB);
    place(N_OTHER, BX_EE);
    p_in[BX_BB] = pin_bb; p_out[BX_BB] = pout_bb;
    p_in[BX_BE] = 20;     p_out[BX_BE] = 20;
    p_in[BX_EB] = 20;     p_out[BX_EB] = 20;
    p_in[BX_EE] = 5;      p_out[BX_EE] = 5;
  endtask

  // ---------------------------------------------------------------- model
  longint s_c [4][LAYER_REGIONS], s_z [4][LAYER_OUTER], s_n [4];
  longint m_c [4][LAYER_REGIONS], m_z [4][LAYER_OUTER], m_n [4];
  bit     running, primed;
  int     orbits;
  int     n_closed;

  // snapshot of the integer parts of all means at each window close
  typedef struct packed {
    logic [3:0][LAYER_REGIONS-1:0][63:0] c;
    logic [3:0][LAYER_OUTER-1:0][63:0]   z;
    logic [3:0][63:0]                    n;
  } snap_t;
  snap_t  snaps [$];

  function automatic longint rm(longint m, longint x, bit first);
    return first ? (x <<< 8) : m + (((x <<< 8) - m) >>> 3);
  endfunction

  task automatic model_reset();
    running = 0; primed = 0; orbits = 0;
    foreach (m_c[k, r]) m_c[k][r] = 0;
    foreach (m_z[k, o]) m_z[k][o] = 0;
    foreach (m_n[k]) m_n[k] = 0;
  endtask

  task automatic model_event(input int t, input bit orbit, input logic [LAYER_REGIONS-1:0] hit);
    bit close;
    snap_t sn;
    close = 0;
    if (!running && !orbit) return;
    if (running && orbit) begin
      orbits++;
      if (orbits == W) begin close = 1; orbits = 0; end
    end
    if (close) begin
      for (int k = 0; k < 4; k++) begin
        for (int r = 0; r < LAYER_REGIONS; r++) m_c[k][r] = rm(m_c[k][r], s_c[k][r], !primed);
        for (int o = 0; o < LAYER_OUTER; o++) m_z[k][o] = rm(m_z[k][o], s_z[k][o], !primed);
        m_n[k] = rm(m_n[k], s_n[k], !primed);
        for (int r = 0; r < LAYER_REGIONS; r++) sn.c[k][r] = m_c[k][r] >>> 8;
        for (int o = 0; o < LAYER_OUTER; o++) sn.z[k][o] = m_z[k][o] >>> 8;
        sn.n[k] = m_n[k] >>> 8;
      end
      snaps.push_back(sn);
      primed = 1;
      n_closed++;
    end
    if (close || !running) begin
      foreach (s_c[k, r]) s_c[k][r] = 0;
      foreach (s_z[k, o]) s_z[k][o] = 0;
      foreach (s_n[k]) s_n[k] = 0;
    end
    running = 1;
    for (int r = 0; r < LAYER_REGIONS; r++) s_c[t][r] += longint'(hit[r]);
    for (int o = 0; o < LAYER_OUTER; o++)
      if (!hit[LAYER_REGIONS - LAYER_OUTER + o]) s_z[t][o]++;
    s_n[t]++;
  endtask

  // ---------------------------------------------------------------- stimulus
  function automatic cluster_t make_cluster(input int w, input bit in_box);
    cluster_t c;
    region_t  rg;
    int col, row;
    rg = DEFAULT_REGIONS[w];
    c = '0;
    c.valid  = 1'b1;
    c.sensor = SENSOR_W'(w);
    if (in_box) begin
      col = $urandom_range(int'(rg.col_lo), int'(rg.col_hi));
      row = $urandom_range(int'(rg.row_lo), int'(rg.row_hi));
    end else begin
      col = $urandom_range(300, 500);   // between the inner and outer boxes
      row = $urandom_range(0, 255);
    end
    c.col = {10'(col), 3'($urandom_range(0, 7))};
    c.row = {8'(row), 3'($urandom_range(0, 7))};
    return c;
  endfunction

  // Streams n_orbits orbits of the current scheme, one event per clock.
  task automatic stream(input int n_orbits);
    for (int orb = 0; orb < n_orbits; orb++) begin
      bit first;
      first = 1;
      for (int j = 0; j < NUM_BX; j++) begin
        if (bx_on[j]) begin
          logic [LAYER_REGIONS-1:0] hit;
          cluster_t [CLUSTERS_PER_BEAT-1:0] cl;
          int t;
          t = int'(bx_ty[j]);
          for (int w = 0; w < CLUSTERS_PER_BEAT; w++) begin
            int p;
            p = (w < LAYER_REGIONS - LAYER_OUTER) ? p_in[t] : p_out[t];
            hit[w] = ($urandom_range(0, 999) < p);
            if (hit[w])                          cl[w] = make_cluster(w, 1);
            else if ($urandom_range(0, 3) == 0)  cl[w] = make_cluster(w, 0);
            else                                 cl[w] = '0;
          end
          @(negedge clk);
          in_valid = 1; in_soe = 1; in_eoe = 1;
          in_data  = cl;
          in_tfc   = {50'd0, 2'(t), 12'(j)};
          model_event(t, orb > 0 && first, hit);
          first = 0;
        end
      end
    end
    @(negedge clk);
    in_valid = 0; in_soe = 0; in_eoe = 0;
  endtask

  // ---------------------------------------------------------------- readout
  task automatic sc_read(input logic [15:0] a, output longint d);
    @(negedge clk);
    sc_rd = 1; sc_addr = a;
    @(negedge clk);
    sc_rd = 0;
    check(sc_rvalid, "register read answers in one clock");
    d = longint'(sc_rdata);
  endtask

  longint rb_c [4][LAYER_REGIONS], rb_z [4][LAYER_OUTER], rb_n [4];
  int     n_compared;
  longint last_update_clk, clk_count;
  int     n_period_checked;
  longint expect_period;

  always @(posedge clk) clk_count <= clk_count + 1;

  initial begin
    sc_rd = 0; sc_wr = 0; sc_addr = '0; sc_wdata = '0;
    clk_count = 0; n_compared = 0; n_period_checked = 0; last_update_clk = -1;
    forever begin
      @(posedge clk iff (rst_n && avg_update));
      if (last_update_clk >= 0) begin
        check(clk_count - last_update_clk == expect_period, "update every 1024 orbits");
        n_period_checked++;
      end
      last_update_clk = clk_count;
      for (int k = 0; k < 4; k++) begin
        for (int r = 0; r < LAYER_REGIONS; r++) sc_read(16'(k * LAYER_REGIONS + r), rb_c[k][r]);
        for (int o = 0; o < LAYER_OUTER; o++) sc_read(16'h0100 + 16'(k * LAYER_OUTER + o), rb_z[k][o]);
        sc_read(16'h0200 + 16'(k), rb_n[k]);
      end
      check(snaps.size() > 0, "model closed a window");
      if (snaps.size() > 0) begin
        snap_t sn;
        sn = snaps.pop_front();
        for (int k = 0; k < 4; k++) begin
          for (int r = 0; r < LAYER_REGIONS; r++)
            check(rb_c[k][r] == longint'(sn.c[k][r]), $sformatf("mean c[%0d][%0d]", k, r));
          for (int o = 0; o < LAYER_OUTER; o++)
            check(rb_z[k][o] == longint'(sn.z[k][o]), $sformatf("mean z[%0d][%0d]", k, o));
          check(rb_n[k] == longint'(sn.n[k]), $sformatf("mean n[%0d]", k));
        end
      end
      n_compared++;
    end
  end

  // Background-subtracted estimates from the read-back means, compared with
  // the generated rates. Tolerances are several standard deviations.
  task automatic check_estimates(input string tag);
    for (int r = 0; r < LAYER_REGIONS; r++) begin
      real mu, mu_true;
      bit  outer;
      outer = (r >= LAYER_REGIONS - LAYER_OUTER);
      mu = real'(rb_c[BX_BB][r]) / real'(rb_n[BX_BB]) - real'(rb_c[BX_BE][r]) / real'(rb_n[BX_BE])
         - real'(rb_c[BX_EB][r]) / real'(rb_n[BX_EB]) + real'(rb_c[BX_EE][r]) / real'(rb_n[BX_EE]);
      mu_true = outer ? (p_out[BX_BB] - p_out[BX_BE] - p_out[BX_EB] + p_out[BX_EE]) / 1000.0
                      : (p_in[BX_BB] - p_in[BX_BE] - p_in[BX_EB] + p_in[BX_EE]) / 1000.0;
      check(mu > mu_true - 0.006 && mu < mu_true + 0.006,
            $sformatf("%s average estimate region %0d: %f vs %f", tag, r, mu, mu_true));
    end
    for (int o = 0; o < LAYER_OUTER; o++) begin
      real mu, mu_true;
      mu = -($ln(real'(rb_z[BX_BB][o]) / real'(rb_n[BX_BB])) - $ln(real'(rb_z[BX_BE][o]) / real'(rb_n[BX_BE]))
           - $ln(real'(rb_z[BX_EB][o]) / real'(rb_n[BX_EB])) + $ln(real'(rb_z[BX_EE][o]) / real'(rb_n[BX_EE])));
      mu_true = -($ln(1.0 - p_out[BX_BB] / 1000.0) - $ln(1.0 - p_out[BX_BE] / 1000.0)
                - $ln(1.0 - p_out[BX_EB] / 1000.0) + $ln(1.0 - p_out[BX_EE] / 1000.0));
      check(mu > mu_true - 0.006 && mu < mu_true + 0.006,
            $sformatf("%s log0 estimate outer %0d: %f vs %f", tag, o, mu, mu_true));
    end
  endtask

  task automatic run_workload(input string tag, input int n_bb, input int pin, input int pout);
    int n_before;
    make_scheme(n_bb, pin, pout);
    model_reset();
    n_before = n_compared;
    n_closed = 0;
    expect_period = longint'(W) * (longint'(n_bb) + longint'(3 * N_OTHER));
    last_update_clk = -1;
    @(negedge clk);
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    stream(2 * W + 2);
    repeat (300) @(negedge clk);
    check(n_closed == 2, $sformatf("%s two windows closed", tag));
    check(n_compared - n_before == 2, $sformatf("%s two updates read back", tag));
    check(rb_n[BX_BB] == longint'(W) * longint'(n_bb), $sformatf("%s N = 1024 x N_bb", tag));
    for (int k = 0; k < 3; k++)
      check(rb_n[k] == longint'(W) * N_OTHER, $sformatf("%s N of type %0d", tag, k));
    check_estimates(tag);
    $display("%s: N_bb=%0d  N per window=%0d  updates=%0d", tag, n_bb, rb_n[BX_BB], n_compared - n_before);
  endtask

  initial begin
    in_valid = 0; in_soe = 0; in_eoe = 0; in_data = '0; in_tfc = '0;
    run_workload("pp 2024", 2133, 300, 100);
    run_workload("PbPb",    508,  500, 200);
    check(n_period_checked == 2, "update period measured in both workloads");
    check(!framing_error, "no framing error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (9_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
