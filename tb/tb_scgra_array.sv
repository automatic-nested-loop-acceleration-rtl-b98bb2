// tb_scgra_array: self-checking test of the torus array (reduced to 3 x 3 PEs,
// 16-word instruction memories).
// A token loaded by PE(1,1) from the Load bus is sent out of all four sides;
// each neighbour adds its own constant (its PE index, loaded once before) and
// stores, one neighbour per cycle. PE(0,0) also sends the token west and north
// over the wrap-around links to PE(0,2) and PE(2,0), which store it. The merged
// store stream is checked in order and in time, the load pop is checked, and a
// deliberate two-PE store is checked to raise st_conflict.
module tb_scgra_array;
  import scgra_pkg::*;
  localparam int R = 3, C = 3;
  logic clk = 0, cfg_clk = 0, rst_n = 0;
  logic imem_we = 0;
  logic [3:0] imem_pe = 0, imem_waddr = 0;
  logic [INST_W-1:0] imem_wdata = '0;
  logic start = 0;
  logic [4:0] len = 0;
  logic [31:0] ld_data = 0, st_data;
  logic ld_pop, st_vld, st_conflict;
  int checks = 0, failures = 0;
  logic [31:0] got[$];
  int got_t[$];
  int cyc = 0;
  int conflicts = 0;
  always @(posedge clk) if (rst_n && st_conflict) begin conflicts++; $display("INFO conflict at %0d", cyc); end
  always #5 clk = ~clk;
  always #7 cfg_clk = ~cfg_clk;

  scgra_array #(.ROWS(R), .COLS(C), .IMEM_DEPTH(16)) dut (.*);

  always @(posedge clk) begin
    cyc++;
    if (st_vld && !st_conflict) begin got.push_back(st_data); got_t.push_back(cyc); end
  end

  task automatic check(logic [31:0] g, logic [31:0] e, string what);
    checks++;
    if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", what, g, e); end
  endtask

  task automatic wr(int p, int a, pe_inst_t w);
    @(negedge cfg_clk);
    imem_we = 1; imem_pe = 4'(p); imem_waddr = 4'(a); imem_wdata = w;
    @(negedge cfg_clk);
    imem_we = 0;
  endtask

  function automatic pe_inst_t ld(int dst);
    pe_inst_t w = INST_NOP;
    w.wen = 1; w.wsel = WS_IN; w.in_sel = IN_LOAD; w.dst = 8'(dst);
    return w;
  endfunction
  function automatic pe_inst_t take(in_src_e s, int dst);
    pe_inst_t w = INST_NOP;
    w.wen = 1; w.wsel = WS_IN; w.in_sel = s; w.dst = 8'(dst);
    return w;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pe_inst_t w;
    logic [31:0] tok;
    int t0;
    // program 1 (len 1): every PE loads its constant into d1 in the same cycle
    // (the Load bus is broadcast); program 2 (len 12) starts at word 1.
    for (int p = 0; p < R * C; p++) for (int k = 0; k < 16; k++) wr(p, k, INST_NOP);
    // word 0 of program A: all PEs take the broadcast Load word into d1
    for (int p = 0; p < R * C; p++) wr(p, 0, ld(1));
    repeat (2) @(negedge clk);
    rst_n = 1;
    ld_data = 32'd1000;
    len = 5'd1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    check({31'd0, ld_pop}, 1, "broadcast load pops once");
    @(negedge clk);
    check({31'd0, ld_pop}, 0, "one-word schedule stops");
    // reprogram: word 0 = PE(1,1) loads the token into d0, others idle
    for (int p = 0; p < R * C; p++) wr(p, 0, INST_NOP);
    wr(4, 0, ld(0));
    w = INST_NOP; w.src3 = 0; w.out_n = OUT_DMEM; w.out_e = OUT_DMEM; w.out_s = OUT_DMEM; w.out_w = OUT_DMEM;
    wr(4, 1, w);
    // neighbours take the token at word 2 and add d1 (=1000) at word 3, store at word 4+k
    wr(1, 2, take(IN_S, 0)); wr(5, 2, take(IN_W, 0)); wr(7, 2, take(IN_N, 0)); wr(3, 2, take(IN_E, 0));
    for (int i = 0; i < 4; i++) begin
      int p;
      p = (i == 0) ? 1 : (i == 1) ? 5 : (i == 2) ? 7 : 3;
      w = INST_NOP; w.op = OP_ADD; w.src0 = 0; w.src1 = 1; wr(p, 3, w);
      w = INST_NOP; w.st_en = 1; w.out_st = OUT_ALU; wr(p, 4 + i, w);
    end
    // PE(0,1) (index 1) got the token at word 2; it sends it W to PE(0,0) at word 3
    w = INST_NOP; w.op = OP_ADD; w.src0 = 0; w.src1 = 1; w.src3 = 0; w.out_w = OUT_DMEM; wr(1, 3, w);
    // PE(0,0) takes it from E at word 4, sends W (wrap to PE(0,2)) and N (wrap to PE(2,0)) at word 5
    wr(0, 4, take(IN_E, 0));
    w = INST_NOP; w.src3 = 0; w.out_w = OUT_DMEM; w.out_n = OUT_DMEM; wr(0, 5, w);
    wr(2, 6, take(IN_E, 0)); wr(6, 6, take(IN_S, 0));
    w = INST_NOP; w.src3 = 0; w.st_en = 1; w.out_st = OUT_DMEM; wr(2, 8, w); wr(6, 9, w);
    // word 10: two PEs store at once (conflict)
    wr(4, 10, w); wr(8, 10, w);
    tok = $urandom;
    ld_data = tok;
    len = 5'd12;
    got.delete(); got_t.delete();
    @(negedge clk); start = 1; t0 = cyc; @(negedge clk); start = 0;
    repeat (16) @(negedge clk);
    check(32'(got.size()), 6, "six single stores");
    if (got.size() == 6) begin
      for (int i = 0; i < 4; i++) begin
        check(got[i], tok + 1000, $sformatf("neighbour %0d sum", i));
        check(32'(got_t[i] - t0), 32'(4 + i + 4), $sformatf("neighbour %0d store cycle", i));
      end
      check(got[4], tok, "wrap west PE(0,0)->PE(0,2)");
      check(got[5], tok, "wrap north PE(0,0)->PE(2,0)");
      check(32'(got_t[5] - t0), 32'(9 + 4), "wrap store cycle");
    end
    check(32'(conflicts), 1, "two PEs storing together flag a conflict");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
