// tb_sdp_ram: self-checking test of sdp_ram at its default size
// (3564 x 100 bits).
//
// Writes every word once, then issues random reads and writes, many to the
// same address in the same clock, against a testbench copy of the memory.
// Checks that read data arrives one clock after the read, that a read and a
// write to one address in one clock return the old word, and that a read
// with re low leaves the output unchanged.
module tb_sdp_ram;

  localparam int DEPTH = 3564, WIDTH = 100, AW = 12;

  logic clk = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;

  int checks = 0, failures = 0;

  sdp_ram dut (.*);

  always #5 clk = ~clk;

  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] expect_q;
  bit               expect_v = 0;
  int               same_addr = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [WIDTH-1:0] rand_word();
    return {$urandom(), $urandom(), $urandom(), 4'($urandom())};
  endfunction

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = rand_word();
      model[a] = wdata;
    end
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (expect_v) check(rdata == expect_q, "read data");
      else if (i > 0) check(rdata == expect_q, "output held without read");
      we = ($urandom_range(0, 1) == 1);
      re = ($urandom_range(0, 3) != 0);
      raddr = AW'($urandom_range(0, DEPTH - 1));
      waddr = ($urandom_range(0, 3) == 0) ? raddr : AW'($urandom_range(0, DEPTH - 1));
      wdata = rand_word();
      if (re) expect_q = model[raddr];   // old contents on a same-address write
      expect_v = re;
      if (re && we && waddr == raddr) same_addr++;
      if (we) model[waddr] = wdata;
    end
    @(negedge clk);
    if (expect_v) check(rdata == expect_q, "last read");
    check(same_addr > 500, "same-address read and write exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
