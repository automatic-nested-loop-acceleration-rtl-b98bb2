// dc_ram: simple dual-port RAM with separate write and read clocks.
//
// One write port (wclk) and one read port (rclk); the read is synchronous:
// rdata shows mem[raddr] one rclk cycle after re was high, and holds while re
// is low. A read of a word written in the same period returns either value
// (different clocks), so the controller never does that. The accelerator uses
// it for its input and output buffers (IBuf, OBuf), its input and output
// address buffers (IAddrBuf, OAddrBuf) and each PE's instruction memory. The
// two clocks follow the paper's split into a low-frequency host side and a
// high-frequency array; everything else about the RAM is an ordinary block
// RAM template.
module dc_ram #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          rclk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
