// tb_input_decoder: self-checking test of input_decoder.
//
// Drives random events of one to three beats with random gaps, random BXIDs
// (ascending within an orbit, wrapping to start new orbits) and random
// bunch-crossing types, then a few framing violations. A reference model in
// the testbench predicts every output one clock after its input beat,
// including the orbit-start flag and the sticky framing-error flag, and the
// outputs are compared on every clock. Inputs change and outputs are checked
// on the falling edge.
module tb_input_decoder;
  import lumi_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [DATA_W-1:0] in_data;
  logic in_valid, in_soe, in_eoe;
  logic [TFC_W-1:0] in_tfc;
  logic out_valid, out_sop, out_eop, framing_error;
  cluster_t [CLUSTERS_PER_BEAT-1:0] out_clusters;
  event_info_t out_info;

  int checks = 0, failures = 0;

  input_decoder dut (.*);

  always #5 clk = ~clk;

  // reference model state
  logic              m_valid, m_sop, m_eop, m_err, m_in_event, m_seen;
  logic [DATA_W-1:0] m_data;
  logic [1:0]        m_type, c_type;
  logic [11:0]       m_bxid, c_bxid, m_prev;
  logic              m_orbit, c_orbit;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // model: computes at each rising edge what the outputs must be
  always @(posedge clk) begin
    if (!rst_n) begin
      m_valid <= 0; m_sop <= 0; m_eop <= 0; m_err <= 0; m_in_event <= 0; m_seen <= 0;
      m_prev <= 0;
    end else begin
      logic acc;
      acc = in_valid && (in_soe || m_in_event);
      m_valid <= acc;
      m_sop   <= acc && in_soe;
      m_eop   <= acc && in_eoe;
      if (acc) m_data <= in_data;
      if (in_valid && in_soe) begin
        if (m_in_event) m_err <= 1;
        c_type  = in_tfc[13:12];
        c_bxid  = in_tfc[11:0];
        c_orbit = m_seen && (in_tfc[11:0] <= m_prev);
        m_type <= c_type; m_bxid <= c_bxid; m_orbit <= c_orbit;
        m_prev <= in_tfc[11:0];
        m_seen <= 1;
        m_in_event <= !in_eoe;
      end else if (acc) begin
        if (in_eoe) m_in_event <= 0;
      end else if (in_valid) begin
        m_err <= 1;
      end
    end
  end

  int n_orbits = 0, n_beats = 0;
  logic [11:0] bx = 0;

  task automatic idle();
    @(negedge clk);
    compare();
    in_valid = 0; in_soe = 0; in_eoe = 0;
    in_data = {8{$urandom()}}; in_tfc = {$urandom(), $urandom()};
  endtask

  task automatic beat(input logic soe, input logic eoe, input logic [TFC_W-1:0] tfc);
    @(negedge clk);
    compare();
    in_valid = 1; in_soe = soe; in_eoe = eoe; in_tfc = tfc;
    for (int w = 0; w < 8; w++) in_data[w*32 +: 32] = $urandom();
  endtask

  task automatic compare();
    if (!rst_n) return;
    check(out_valid == m_valid, "valid");
    check(framing_error == m_err, "framing_error");
    if (m_valid) begin
      check(out_sop == m_sop && out_eop == m_eop, "sop/eop");
      check(out_clusters == m_data, "cluster data");
      check(out_info.bx_type == bx_type_e'(m_type), "bx type");
      check(out_info.bxid == m_bxid, "bxid");
      check(out_info.new_orbit == m_orbit, "new orbit");
      if (m_orbit && m_sop) n_orbits++;
      n_beats++;
    end
  endtask

  initial begin
    in_valid = 0; in_soe = 0; in_eoe = 0; in_data = '0; in_tfc = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 400; e++) begin
      int nb;
      logic [TFC_W-1:0] tfc;
      bx = bx + 12'($urandom_range(1, 400));
      if (bx >= 3564) bx = 12'($urandom_range(0, 20));
      tfc = {$urandom(), $urandom()};
      tfc[11:0] = bx;
      nb = $urandom_range(1, 3);
      for (int b = 0; b < nb; b++) beat(b == 0, b == nb - 1, tfc);
      repeat ($urandom_range(0, 2)) idle();
    end
    check(!framing_error, "no framing error on clean stream");
    // beat outside an event is dropped and flagged
    beat(0, 0, '0);
    idle();
    idle();
    check(framing_error, "framing error after stray beat");
    // a start-of-event inside an event
    beat(1, 0, 64'h5);
    beat(1, 1, 64'h3006);
    repeat (3) idle();
    check(n_orbits > 5, "several orbit starts seen");
    check(n_beats > 400, "beats seen");
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
