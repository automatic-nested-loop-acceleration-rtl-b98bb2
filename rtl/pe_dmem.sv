// pe_dmem: multi-port data memory of a processing element.
//
// DEPTH words of DATA_W bits with one synchronous write port and NRD
// asynchronous read ports (register-file style). Ports 0..2 feed the ALU
// operands, port 3 feeds the output registers. A read of the address being
// written in the same cycle returns the old word; the new word is visible from
// the next cycle. Contents are not reset: a schedule writes before it reads.
// The paper calls for a multi-port data memory for intermediate values; the
// number of ports, the depth and the read timing are this design's choice.
module pe_dmem
  import scgra_pkg::*;
#(
  parameter int unsigned DEPTH = DMEM_DEPTH,
  parameter int unsigned NRD   = 4,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [DATA_W-1:0]         wdata,
  input  logic [NRD-1:0][AW-1:0]    raddr,
  output logic [NRD-1:0][DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int i = 0; i < NRD; i++) rdata[i] = mem[raddr[i]];
  end

endmodule
