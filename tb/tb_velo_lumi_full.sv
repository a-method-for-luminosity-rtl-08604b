// tb_velo_lumi_full: end-to-end run of velo_lumi_counters at its default
// size: eight regions, 3564 BXIDs, running means over 1024 orbits and one
// complete per-BXID window of 449000 orbits (40 s of beam time). Four
// crossings per orbit of one beat each keep the run to a few million clocks.
// Stimulus, reference model and checks are in lumi_e2e_tester.
module tb_velo_lumi_full;
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

  velo_lumi_counters dut (.*);

  lumi_e2e_tester #(
    .AVG_W        (1024),
    .PB_W         (449000),
    .N_AVG_CHECKS (3),
    .NE_PER_ORBIT (4),
    .MAX_BEATS    (1),
    .WATCHDOG     (64'd6_000_000)
  ) tester (.*);

endmodule
