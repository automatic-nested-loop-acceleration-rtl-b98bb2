// tb_pe_dmem: self-checking test of the PE data memory.
// Random writes and four random reads per cycle against a reference array;
// checks that reads are asynchronous and that a same-cycle write becomes
// visible only after the clock edge.
module tb_pe_dmem;
  import scgra_pkg::*;
  logic clk = 0;
  logic we;
  logic [7:0] waddr;
  logic [31:0] wdata;
  logic [3:0][7:0] raddr;
  logic [3:0][31:0] rdata;
  logic [31:0] model [256];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pe_dmem dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = '0;
    // fill
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      we = ($urandom % 2) == 1;
      waddr = ($urandom % 4 == 0) ? raddr[0] : 8'($urandom);
      wdata = $urandom;
      for (int p = 0; p < 4; p++) raddr[p] = 8'($urandom);
      if (n % 5 == 0) raddr[2] = waddr;   // read the word being written
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rdata[p] !== model[raddr[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d addr %0d got %h exp %h", p, raddr[p], rdata[p], model[raddr[p]]);
        end
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
