// tb_dc_ram: self-checking test of the dual-clock simple dual-port RAM.
// Writes on one clock and reads on an unrelated slower clock, checking the
// one-cycle read latency, that rdata holds while re is low, and the contents
// against a reference array. Parameters are reduced to a 64-word RAM.
module tb_dc_ram;
  logic wclk = 0, rclk = 0;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [15:0] wdata, rdata, held;
  logic [15:0] model [64];
  int checks = 0, failures = 0;
  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;

  dc_ram #(.DW(16), .DEPTH(64)) dut (.wclk, .we, .waddr, .wdata, .rclk, .re, .raddr, .rdata);

  task automatic check(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge wclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge wclk);
      we = 1; waddr = 6'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge wclk); we = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge rclk);
      re = 1; raddr = 6'($urandom);
      @(posedge rclk); #1;
      check(rdata, model[raddr], "read");
      // hold with re low
      @(negedge rclk);
      held = rdata; re = 0; raddr = raddr + 1'b1;
      @(posedge rclk); #1;
      check(rdata, held, "hold");
      // overwrite a word from the write side, read it back later
      @(negedge wclk);
      we = 1; waddr = 6'($urandom); wdata = 16'($urandom); model[waddr] = wdata;
      @(negedge wclk); we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
