// tb_pe_addr_ctrl: self-checking test of the PE instruction address generator.
// Checks that a start pulse gives pc = 0,1,..,len-1 on consecutive cycles with
// running high, that it stops after len words, that a start at the last word
// restarts without a gap, and len = 1.
module tb_pe_addr_ctrl;
  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] len;
  logic [3:0] pc;
  logic running;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pe_addr_ctrl #(.IMEM_DEPTH(16)) dut (.clk, .rst_n, .start, .len, .pc, .running);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s pc=%0d running=%0d", what, pc, running);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    len = 5'd6;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!running, "idle after reset");
    for (int l = 1; l <= 16; l++) begin
      len = 5'(l);
      start = 1;
      @(negedge clk);
      start = 0;
      for (int k = 0; k < l; k++) begin
        check(running && pc == 4'(k), $sformatf("len %0d word %0d", l, k));
        if (k < l - 1) @(negedge clk);
      end
      // back-to-back restart on the last word for even lengths
      if (l % 2 == 0) begin
        start = 1;
        @(negedge clk);
        start = 0;
        for (int k = 0; k < l; k++) begin
          check(running && pc == 4'(k), $sformatf("restart len %0d word %0d", l, k));
          if (k < l - 1) @(negedge clk);
        end
      end
      @(negedge clk);
      check(!running, $sformatf("stopped after len %0d", l));
      repeat (3) @(negedge clk);
      check(!running, "stays stopped");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
