// tb_slow_control_if: self-checking test of slow_control_if.
//
// Random values are placed on all running-mean inputs and status inputs.
// Every register address is read and the returned word is compared with the
// integer part of the corresponding mean, computed here from the address map;
// register reads must answer one clock after the request. Per-BXID reads are
// answered by a small responder standing in for perbx_counters, after a
// random delay, with a word derived from the BXID; the lane selection, the
// busy flag and the output-valid strobe are checked. Writes to the command
// address must produce exactly one restart pulse; other writes none.
module tb_slow_control_if;
  import lumi_pkg::*;

  localparam int NR = 8, NO = 4, MW = 40, FW = 8, WW = 20, OW = 19;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic sc_rd, sc_wr, sc_rvalid, sc_busy;
  logic [15:0] sc_addr;
  logic [31:0] sc_wdata, sc_rdata;
  logic [3:0][NR-1:0][MW-1:0] mean_c;
  logic [3:0][NO-1:0][MW-1:0] mean_z;
  logic [3:0][MW-1:0] mean_n;
  logic [31:0] n_updates;
  logic [1:0] pb_state;
  logic [OW-1:0] pb_orbits;
  logic pb_start, pb_rd_req, pb_rd_ack;
  logic [11:0] pb_rd_bxid;
  logic [(NO+1)*WW-1:0] pb_rd_data;

  int checks = 0, failures = 0;

  slow_control_if dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [(NO+1)*WW-1:0] pb_word(input logic [11:0] bx);
    logic [(NO+1)*WW-1:0] w;
    for (int l = 0; l <= NO; l++) w[l*WW +: WW] = WW'(bx * 16 + l * 3 + 1);
    return w;
  endfunction

  // responder for per-BXID reads
  int n_starts = 0;
  initial begin
    pb_rd_ack = 0; pb_rd_data = '0;
    forever begin
      @(posedge clk);
      pb_rd_ack <= 0;
      if (pb_start) n_starts++;
      if (pb_rd_req) begin
        logic [11:0] bx;
        bx = pb_rd_bxid;
        repeat ($urandom_range(1, 6)) @(posedge clk);
        pb_rd_ack  <= 1;
        pb_rd_data <= pb_word(bx);
      end
    end
  end

  task automatic read(input logic [15:0] a, output logic [31:0] d, output int lat);
    @(negedge clk);
    sc_rd = 1; sc_addr = a;
    @(negedge clk);
    sc_rd = 0;
    lat = 1;
    while (!sc_rvalid && lat < 30) begin
      check(sc_busy, "busy while a per-BXID read is pending");
      @(negedge clk);
      lat++;
    end
    check(sc_rvalid, "read answered");
    d = sc_rdata;
  endtask

  initial begin
    logic [31:0] d;
    int lat;
    sc_rd = 0; sc_wr = 0; sc_addr = '0; sc_wdata = '0;
    foreach (mean_c[k, r]) mean_c[k][r] = MW'({$urandom(), $urandom()});
    foreach (mean_z[k, o]) mean_z[k][o] = MW'({$urandom(), $urandom()});
    foreach (mean_n[k]) mean_n[k] = MW'({$urandom(), $urandom()});
    n_updates = $urandom(); pb_state = 2'd2; pb_orbits = OW'($urandom());
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      for (int r = 0; r < NR; r++) begin
        read(16'(k * NR + r), d, lat);
        check(d == 32'(mean_c[k][r] >> FW), $sformatf("mean c %0d %0d", k, r));
        check(lat == 1, "register read latency");
      end
      for (int o = 0; o < NO; o++) begin
        read(16'h0100 + 16'(k * NO + o), d, lat);
        check(d == 32'(mean_z[k][o] >> FW), $sformatf("mean z %0d %0d", k, o));
      end
      read(16'h0200 + 16'(k), d, lat);
      check(d == 32'(mean_n[k] >> FW), "mean n");
    end
    read(16'h0300, d, lat); check(d == n_updates, "update count");
    read(16'h0301, d, lat); check(d == 32'd2, "per-BXID state");
    read(16'h0302, d, lat); check(d == 32'(pb_orbits), "per-BXID orbits");
    read(16'h0123, d, lat); check(d == 32'd0, "unmapped reads zero");
    for (int i = 0; i < 200; i++) begin
      logic [11:0] bx;
      int l;
      logic [(NO+1)*WW-1:0] w;
      bx = 12'($urandom_range(0, 3563));
      l  = $urandom_range(0, 7);
      w  = pb_word(bx);
      read(16'h8000 | {1'b0, bx, 3'(l)}, d, lat);
      check(d == ((l <= NO) ? 32'(w[l*WW +: WW]) : 32'd0), $sformatf("per-BXID bx %0d lane %0d", bx, l));
      check(lat >= 2, "per-BXID read waits for the RAM");
    end
    // commands
    @(negedge clk); sc_wr = 1; sc_addr = 16'h0310; sc_wdata = 32'd1;
    @(negedge clk); sc_wr = 1; sc_addr = 16'h0311; sc_wdata = 32'd1;
    @(negedge clk); sc_wr = 1; sc_addr = 16'h0310; sc_wdata = 32'd0;
    @(negedge clk); sc_wr = 0;
    repeat (4) @(negedge clk);
    check(n_starts == 1, "exactly one restart pulse");
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
