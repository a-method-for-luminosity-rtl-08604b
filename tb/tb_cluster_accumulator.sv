// tb_cluster_accumulator: self-checking test of cluster_accumulator.
//
// Random events of one to four beats are driven, with cluster centroids
// drawn so that a good share falls inside, on the edges of and just outside
// the accumulation regions. The testbench counts the hits per region from the
// raw cluster bits with its own decoding of the cluster word and region
// table, and checks each event summary, that it appears exactly one clock
// after the End-of-Event beat, and that a Start-of-Event beat drops an
// unfinished event. A second instance with 3-bit counts checks saturation.
module tb_cluster_accumulator;
  import lumi_pkg::*;

  localparam int NR = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid, in_sop, in_eop;
  cluster_t [CLUSTERS_PER_BEAT-1:0] in_clusters;
  event_info_t in_info;
  logic ev_valid, ev_valid_s;
  event_info_t ev_info, ev_info_s;
  logic [NR-1:0][15:0] ev_counts;
  logic [NR-1:0][2:0]  ev_counts_s;

  int checks = 0, failures = 0;

  cluster_accumulator dut (.*);

  cluster_accumulator #(.CNT_W(3)) dut_sat (
    .clk, .rst_n, .in_valid, .in_sop, .in_eop, .in_clusters, .in_info,
    .ev_valid (ev_valid_s), .ev_info (ev_info_s), .ev_counts (ev_counts_s)
  );

  always #5 clk = ~clk;

  // Region table written out independently: sensor, column and row bounds.
  int r_sensor [NR] = '{0, 1, 2, 3, 4, 5, 6, 7};
  int r_clo    [NR] = '{64, 64, 64, 64, 560, 560, 560, 560};
  int r_chi    [NR] = '{207, 207, 207, 207, 703, 703, 703, 703};
  int r_rlo    [NR] = '{192, 192, 192, 192, 192, 192, 192, 192};
  int r_rhi    [NR] = '{239, 239, 239, 239, 239, 239, 239, 239};

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int hits(input logic [31:0] w, input int r);
    int sensor, col, row;
    sensor = int'(w[26:24]);
    col    = int'(w[23:11]) / 8;
    row    = int'(w[10:0]) / 8;
    return (w[31] && sensor == r_sensor[r] && col >= r_clo[r] && col <= r_chi[r]
            && row >= r_rlo[r] && row <= r_rhi[r]) ? 1 : 0;
  endfunction

  function automatic logic [31:0] rand_cluster();
    logic [31:0] w;
    int col, row;
    case ($urandom_range(0, 3))
      0: begin col = $urandom_range(0, 767); row = $urandom_range(0, 255); end
      1: begin col = $urandom_range(60, 212); row = $urandom_range(188, 243); end
      2: begin col = $urandom_range(555, 708); row = $urandom_range(188, 243); end
      default: begin
        col = (($urandom_range(0, 1) != 0) ? 64 : 207) + $urandom_range(0, 1) * 496;
        row = ($urandom_range(0, 1) != 0) ? 192 : 239;
      end
    endcase
    w = $urandom();
    w[31]    = ($urandom_range(0, 9) != 0);
    w[26:24] = 3'($urandom_range(0, 7));
    w[23:11] = 13'(col * 8 + $urandom_range(0, 7));
    w[10:0]  = 11'(row * 8 + $urandom_range(0, 7));
    return w;
  endfunction

  logic [NR-1:0][31:0] exp_cnt;
  logic [NR-1:0][31:0] q_cnt [$];
  int q_bxid [$];
  int events_checked = 0, saturated = 0, nonzero = 0;

  // An event summary must follow its End-of-Event beat by exactly one clock:
  // the expectation is queued on the End-of-Event beat and consumed on the
  // next falling edge.
  logic exp_pending = 0;

  task automatic drive_beat(input logic sop, input logic eop, input int bxid);
    @(negedge clk);
    check_outputs();
    in_valid = 1; in_sop = sop; in_eop = eop;
    in_info = '{bx_type: bx_type_e'($urandom_range(0, 3)), bxid: 12'(bxid), new_orbit: 1'b0};
    if (sop) exp_cnt = '0;
    for (int k = 0; k < 8; k++) begin
      logic [31:0] w;
      w = rand_cluster();
      in_clusters[k] = w;
      for (int r = 0; r < NR; r++) exp_cnt[r] += 32'(hits(w, r));
    end
    if (eop) begin
      q_cnt.push_back(exp_cnt);
      q_bxid.push_back(bxid);
    end
    exp_pending = eop;
  endtask

  task automatic drive_idle();
    @(negedge clk);
    check_outputs();
    in_valid = 0; in_sop = 0; in_eop = 0;
    exp_pending = 0;
  endtask

  task automatic check_outputs();
    check(ev_valid == exp_pending, "summary one clock after end of event");
    check(ev_valid_s == exp_pending, "saturating instance strobe");
    if (ev_valid && q_cnt.size() > 0) begin
      logic [NR-1:0][31:0] e;
      int bx;
      e  = q_cnt.pop_front();
      bx = q_bxid.pop_front();
      check(int'(ev_info.bxid) == bx, "event bxid");
      for (int r = 0; r < NR; r++) begin
        check(32'(ev_counts[r]) == e[r], $sformatf("count region %0d dut %0d exp %0d", r, ev_counts[r], e[r]));
        check(32'(ev_counts_s[r]) == (e[r] > 7 ? 32'd7 : e[r]), "saturated count");
        if (e[r] > 7) saturated++;
        if (e[r] > 0) nonzero++;
      end
      events_checked++;
    end
  endtask

  initial begin
    in_valid = 0; in_sop = 0; in_eop = 0; in_clusters = '0; in_info = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 500; ev++) begin
      int nb;
      nb = (ev % 50 == 7) ? 12 : $urandom_range(1, 4);
      for (int b = 0; b < nb; b++) drive_beat(b == 0, b == nb - 1, ev);
      repeat ($urandom_range(0, 1)) drive_idle();
    end
    // unfinished event followed by a new Start-of-Event: only the second counts
    drive_beat(1, 0, 900);
    drive_beat(1, 1, 901);
    drive_idle();
    drive_idle();
    check(events_checked == 501, "every event summarised");
    check(q_cnt.size() == 0, "no summary missing");
    check(saturated > 0, "saturation exercised");
    check(nonzero > 500, "regions hit");
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
