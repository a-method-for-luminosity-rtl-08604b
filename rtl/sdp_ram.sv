// sdp_ram: simple dual-port block RAM for the per-BXID counters.
//
// One write port and one read port on the same clock. The read is
// registered: rdata holds mem[raddr] one clock after re. A read and a write
// to the same address in the same clock return the old contents
// (read-first), which the per-BXID read-modify-write pipeline relies on and
// forwards around. The array is written so that FPGA tools map it to block
// RAM (M20K on the readout board's FPGA); it has no reset, so its user clears
// it before use.
//
// Default size: 3564 words, one per BXID, of 5 x 20 bits (four outer
// regions and the event count). The 20-bit counter width is the readout's;
// packing the five counters of a BXID into one word is this design's choice.
module sdp_ram #(
  parameter int unsigned DEPTH  = 3564,
  parameter int unsigned WIDTH  = 100,
  localparam int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WIDTH-1:0]  wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [WIDTH-1:0]  rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
