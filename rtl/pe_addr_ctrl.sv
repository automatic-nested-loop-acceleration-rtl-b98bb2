// pe_addr_ctrl: instruction address generator (AddrCtrl) of a PE.
//
// A one-cycle start pulse sets pc to 0 and raises running; while running, pc
// advances by one per clock and running drops after the word at len-1. A start
// in the cycle pc = len-1 (or at any time) restarts at 0 without a gap, which
// is how the controller runs the DFG of a group back to back. len = 0 is
// treated as 1. pc drives the synchronous read of the instruction memory, so
// word k leaves the memory two cycles after the start pulse plus k.
// That a global start from the controller drives AddrCtrl is the paper's; the
// counting behaviour is this design's choice.
module pe_addr_ctrl #(
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned AW         = $clog2(IMEM_DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [AW:0] len,
  output logic [AW-1:0] pc,
  output logic        running
);

  logic last;
  assign last = ({1'b0, pc} + 1'b1) >= len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc      <= '0;
      running <= 1'b0;
    end else if (start) begin
      pc      <= '0;
      running <= 1'b1;
    end else if (running) begin
      if (last) begin
        running <= 1'b0;
      end else begin
        pc <= pc + 1'b1;
      end
    end
  end

endmodule
