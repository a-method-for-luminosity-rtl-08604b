// slow_control_if: register access to the luminosity accumulators.
//
// The experiment control system reads the running means (every few seconds)
// and the per-BXID RAM (after each per-BXID window) through this port, one
// 32-bit word per read, and restarts the per-BXID window with a write.
//
// Bus: sc_rd or sc_wr for one clock with sc_addr (and sc_wdata). A read
// returns its word in the 32-bit output register sc_rdata with the
// sc_rvalid strobe: one clock after sc_rd for a register, a few clocks later
// for a per-BXID word, which has to wait for the RAM read port. sc_busy is
// high while a read is outstanding; no new read may be issued then.
//
// Word address map (k = bunch-crossing type 0 ee, 1 be, 2 eb, 3 bb):
//   0x0000 + k*NUM_REGIONS + i  running mean of the cluster count, region i
//   0x0100 + k*NUM_OUTER + o    running mean of the empty-event count, outer o
//   0x0200 + k                  running mean of the event count
//   0x0300                      number of running-mean updates so far
//   0x0301                      per-BXID state (0 clear, 1 wait, 2 run, 3 done)
//   0x0302                      orbits counted in the current per-BXID window
//   0x0310 (write, bit 0)       clear and restart the per-BXID window
//   0x8000 + j*8 + l            per-BXID word of BXID j, lane l
//                               (l < NUM_OUTER: empty events in outer region l,
//                                l = NUM_OUTER: events with that BXID)
// Means are returned as their integer part (the mean shifted right by
// FRAC_W); unmapped addresses read as zero.
//
// The 32-bit output register and its valid strobe are the readout design's;
// the address map and the bus handshake are this design's choices.
module slow_control_if
  import lumi_pkg::*;
#(
  parameter int unsigned NUM_REGIONS = lumi_pkg::LAYER_REGIONS,
  parameter int unsigned NUM_OUTER   = lumi_pkg::LAYER_OUTER,
  parameter int unsigned MEAN_W      = 40,
  parameter int unsigned FRAC_W      = 8,
  parameter int unsigned WORD_W      = lumi_pkg::PERBX_W,
  parameter int unsigned ORB_W       = 19,
  localparam int unsigned RAM_W      = (NUM_OUTER + 1) * WORD_W
) (
  input  logic        clk,
  input  logic        rst_n,
  // control-system bus
  input  logic        sc_rd,
  input  logic        sc_wr,
  input  logic [15:0] sc_addr,
  input  logic [31:0] sc_wdata,
  output logic [31:0] sc_rdata,
  output logic        sc_rvalid,
  output logic        sc_busy,
  // average counters
  input  logic [NUM_BX_TYPES-1:0][NUM_REGIONS-1:0][MEAN_W-1:0] mean_c,
  input  logic [NUM_BX_TYPES-1:0][NUM_OUTER-1:0][MEAN_W-1:0]   mean_z,
  input  logic [NUM_BX_TYPES-1:0][MEAN_W-1:0]                  mean_n,
  input  logic [31:0] n_updates,
  // per-BXID counters
  input  logic [1:0]        pb_state,
  input  logic [ORB_W-1:0]  pb_orbits,
  output logic              pb_start,
  output logic              pb_rd_req,
  output logic [BXID_W-1:0] pb_rd_bxid,
  input  logic              pb_rd_ack,
  input  logic [RAM_W-1:0]  pb_rd_data
);

  logic        pb_pend;
  logic [2:0]  lane_q;
  logic [31:0] reg_word;

  function automatic logic [31:0] int_part(input logic [MEAN_W-1:0] m);
    return 32'(m >> FRAC_W);
  endfunction

  // Register read multiplexer.
  always_comb begin
    logic [7:0] idx;
    idx      = sc_addr[7:0];
    reg_word = '0;
    unique case (sc_addr[15:8])
      8'h00: for (int k = 0; k < NUM_BX_TYPES; k++)
               for (int i = 0; i < NUM_REGIONS; i++)
                 if (32'(idx) == k * NUM_REGIONS + i) reg_word = int_part(mean_c[k][i]);
      8'h01: for (int k = 0; k < NUM_BX_TYPES; k++)
               for (int o = 0; o < NUM_OUTER; o++)
                 if (32'(idx) == k * NUM_OUTER + o) reg_word = int_part(mean_z[k][o]);
      8'h02: for (int k = 0; k < NUM_BX_TYPES; k++)
               if (32'(idx) == k) reg_word = int_part(mean_n[k]);
      8'h03: case (idx)
               8'h00:   reg_word = n_updates;
               8'h01:   reg_word = 32'(pb_state);
               8'h02:   reg_word = 32'(pb_orbits);
               default: reg_word = '0;
             endcase
      default: reg_word = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc_rdata   <= '0;
      sc_rvalid  <= 1'b0;
      pb_pend    <= 1'b0;
      lane_q     <= '0;
      pb_start   <= 1'b0;
      pb_rd_req  <= 1'b0;
      pb_rd_bxid <= '0;
    end else begin
      sc_rvalid <= 1'b0;
      pb_rd_req <= 1'b0;
      pb_start  <= sc_wr && (sc_addr == 16'h0310) && sc_wdata[0];
      if (sc_rd && !sc_busy) begin
        if (sc_addr[15]) begin
          pb_pend    <= 1'b1;
          pb_rd_req  <= 1'b1;
          pb_rd_bxid <= sc_addr[BXID_W+2:3];
          lane_q     <= sc_addr[2:0];
        end else begin
          sc_rdata  <= reg_word;
          sc_rvalid <= 1'b1;
        end
      end
      if (pb_pend && pb_rd_ack) begin
        pb_pend   <= 1'b0;
        sc_rvalid <= 1'b1;
        sc_rdata  <= '0;
        for (int l = 0; l <= NUM_OUTER; l++)
          if (32'(lane_q) == l) sc_rdata <= 32'(pb_rd_data[l*WORD_W +: WORD_W]);
      end
    end
  end

  assign sc_busy = pb_pend;

  // Bus rule: one outstanding read at a time.
  assert property (@(posedge clk) disable iff (!rst_n) sc_busy |-> !sc_rd)
    else $error("slow_control_if: read issued while busy");

endmodule
