// tb_velo_lumi_counters: end-to-end test of velo_lumi_counters with short
// integration windows (running mean every 4 orbits, per-BXID window of 12
// orbits) and the full 3564-entry per-BXID RAM. Stimulus, reference model
// and checks are in lumi_e2e_tester.
module tb_velo_lumi_counters;
  import lumi_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  logic [DATA_W-1:0] in_data;
  logic in_valid, in_soe, in_eoe;
  logic [TFC_W-1:0] in_tfc;
  logic sc_rd, sc_wr, sc_rvalid, sc_busy, framing_error, avg_update;
  logic [15:0] sc_addr;
  logic [31:0] sc_wdata, sc_rdata;

  always #5 clk = ~clk;

  velo_lumi_counters #(
    .AVG_WINDOW_ORBITS   (4),
    .PERBX_WINDOW_ORBITS (12)
  ) dut (.*);

  lumi_e2e_tester #(
    .AVG_W        (4),
    .PB_W         (12),
    .N_AVG_CHECKS (3),
    .NE_PER_ORBIT (12),
    .MAX_BEATS    (3),
    .WATCHDOG     (64'd200_000)
  ) tester (.*);

endmodule
