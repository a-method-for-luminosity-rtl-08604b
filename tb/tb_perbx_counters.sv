// tb_perbx_counters: self-checking test of perbx_counters.
//
// Runs with 64 BXIDs and a 20-orbit window. After the clear, orbits of
// random events (random BXIDs in rising order, random per-region counts, many
// zero) are streamed, some back to back and some orbits holding a single
// event with the same BXID as the previous one, so that the read-modify-write
// forwarding path is used. A reference model counts per BXID the events and
// the events with an empty outer region, starting at the first orbit
// boundary and stopping at the boundary that ends the window. When the block
// reports DONE, every word is read back through the read port and compared.
// A restart must clear the RAM; a second window is run with reads issued
// while events stream every clock, to exercise the read-port arbitration.
module tb_perbx_counters;
  import lumi_pkg::*;

  localparam int NR = 8, NO = 4, NBX = 64, W = 20, WW = 20;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic ev_valid;
  event_info_t ev_info;
  logic [NR-1:0][15:0] ev_counts;
  logic start, rd_req, rd_ack;
  logic [11:0] rd_bxid;
  logic [(NO+1)*WW-1:0] rd_data;
  logic [1:0] state_o;
  logic [4:0] orbits_o;

  int checks = 0, failures = 0;

  perbx_counters #(.NUM_BXIDS(NBX), .WINDOW_ORBITS(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int m_z [NBX][NO];
  int m_m [NBX];
  bit counting;
  int orbits_done;
  int n_forward = 0, n_delayed_reads = 0, n_counted = 0;
  int last_bx = -1;

  task automatic model_reset();
    foreach (m_z[j, o]) m_z[j][o] = 0;
    foreach (m_m[j]) m_m[j] = 0;
    counting = 0;
    orbits_done = 0;
  endtask

  task automatic send(input int bx, input bit orbit, input bit gap);
    logic [NR-1:0][15:0] cnt;
    for (int r = 0; r < NR; r++)
      cnt[r] = ($urandom_range(0, 1) == 0) ? 16'd0 : 16'($urandom_range(1, 9));
    @(negedge clk);
    ev_valid  = 1;
    ev_info   = '{bx_type: BX_BB, bxid: 12'(bx), new_orbit: orbit};
    ev_counts = cnt;
    if (last_bx == bx) n_forward++;
    last_bx = bx;
    // model
    if (orbit && counting) begin
      orbits_done++;
      if (orbits_done == W) counting = 0;
    end else if (orbit && orbits_done == 0) begin
      counting = 1;
    end
    if (counting) begin
      m_m[bx]++;
      n_counted++;
      for (int o = 0; o < NO; o++) if (cnt[NR-NO+o] == 0) m_z[bx][o]++;
    end
    if (gap) begin
      @(negedge clk);
      ev_valid = 0;
      last_bx = -1;
    end
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(negedge clk);
      ev_valid = 0;
      last_bx = -1;
    end
  endtask

  // Stream one orbit; orbit 0 is not flagged as new, so that the window
  // starts at orbit 1.
  task automatic send_orbit(input int orb, input bit dense, input bit with_reads);
    if (orb % 5 == 3) begin
      send(17, orb > 0, 0);
      if (with_reads) rd_req = 0;
      send(17, 1, 0);   // a second one-event orbit with the same BXID, back to back
    end else begin
      int bx;
      bit first;
      first = 1;
      bx = $urandom_range(0, 5);
      while (bx < NBX) begin
        send(bx, orb > 0 && first, dense ? 0 : bit'($urandom_range(0, 1)));
        first = 0;
        if (with_reads && $urandom_range(0, 3) == 0) begin
          rd_req = 1; rd_bxid = 12'($urandom_range(0, NBX - 1)); n_delayed_reads++;
        end else rd_req = 0;
        bx += $urandom_range(1, 12);
      end
    end
    rd_req = 0;
  endtask

  task automatic read_word(input int bx, output logic [(NO+1)*WW-1:0] data);
    int waitc;
    @(negedge clk);
    ev_valid = 0;
    rd_req = 1; rd_bxid = 12'(bx);
    @(negedge clk);
    rd_req = 0;
    waitc = 0;
    while (!rd_ack && waitc < 20) begin @(negedge clk); waitc++; end
    check(rd_ack, "read acknowledged");
    check(waitc == 1, "read answered two clocks after the request when idle");
    data = rd_data;
  endtask

  task automatic compare_all(input string tag);
    for (int j = 0; j < NBX; j++) begin
      logic [(NO+1)*WW-1:0] d;
      read_word(j, d);
      for (int o = 0; o < NO; o++)
        check(int'(d[o*WW +: WW]) == m_z[j][o], $sformatf("%s z[%0d][%0d]", tag, j, o));
      check(int'(d[NO*WW +: WW]) == m_m[j], $sformatf("%s M[%0d]", tag, j));
    end
  endtask

  task automatic wait_state(input logic [1:0] s, input int limit);
    int n;
    n = 0;
    while (state_o != s && n < limit) begin @(negedge clk); n++; end
    check(state_o == s, $sformatf("reached state %0d", s));
  endtask

  initial begin
    ev_valid = 0; ev_info = '0; ev_counts = '0; start = 0; rd_req = 0; rd_bxid = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    model_reset();
    wait_state(2'd1, NBX + 5);
    for (int orb = 0; orb < W + 4; orb++) send_orbit(orb, orb % 2 == 0, 0);
    idle(3);
    check(state_o == 2'd3, "window complete");
    check(n_forward > 3, "same-BXID back-to-back events exercised");
    compare_all("first window");

    // restart: RAM cleared, second window with reads while streaming
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    check(state_o == 2'd0, "restart enters clear");
    model_reset();
    wait_state(2'd1, NBX + 5);
    compare_all("after clear");
    for (int orb = 0; orb < W + 2; orb++) send_orbit(orb, 1, 1);
    idle(3);
    check(state_o == 2'd3, "second window complete");
    check(n_delayed_reads > 10, "reads during streaming exercised");
    compare_all("second window");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
