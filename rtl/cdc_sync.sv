// cdc_sync: two-flop synchroniser for a level signal entering clk's domain.
// The output follows the input two to three clk cycles later. Used for the
// start toggle and the status flags that cross between the host clock and the
// array clock; this crossing scheme is this design's own.
module cdc_sync #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
