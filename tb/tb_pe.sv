// tb_pe: self-checking test of one processing element.
// Loads a seven-word schedule into the instruction memory through the host
// clock port, then runs it twice with different data. The schedule loads two
// words (A, B) from the Load bus, multiplies them, takes a value from the north
// input, forwards the east input through the bypass, drives all four outputs
// and stores twice. Every output is checked at the exact cycle the timing rule
// gives (word k executes two cycles after start plus k, outputs one cycle
// later), against values computed here.
module tb_pe;
  import scgra_pkg::*;
  logic clk = 0, cfg_clk = 0, rst_n = 0;
  logic imem_we = 0;
  logic [3:0] imem_waddr = 0;
  logic [INST_W-1:0] imem_wdata = '0;
  logic start = 0;
  logic [4:0] len = 5'd7;
  logic [31:0] ld_data, st_data, n_in, e_in, s_in, w_in, n_out, e_out, s_out, w_out;
  logic ld_en, st_vld;
  logic [31:0] ldq[$];
  int checks = 0, failures = 0, loads = 0, stores = 0;
  always #5 clk = ~clk;
  always #8 cfg_clk = ~cfg_clk;

  pe #(.IMEM_DEPTH(16)) dut (.clk, .rst_n, .cfg_clk, .imem_we, .imem_waddr, .imem_wdata,
    .start, .len, .ld_data, .ld_en, .st_data, .st_vld,
    .n_in, .e_in, .s_in, .w_in, .n_out, .e_out, .s_out, .w_out);

  assign ld_data = (ldq.size() > 0) ? ldq[0] : 32'hdead_beef;
  always @(posedge clk) begin
    if (ld_en && ldq.size() > 0) begin
      void'(ldq.pop_front());
      loads++;
    end
    if (st_vld) stores++;
  end

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic wr(int a, pe_inst_t w);
    @(negedge cfg_clk);
    imem_we = 1; imem_waddr = 4'(a); imem_wdata = w;
    @(negedge cfg_clk);
    imem_we = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pe_inst_t w;
    logic [31:0] A, B, N, E;
    n_in = 0; e_in = 0; s_in = 0; w_in = 0;
    // w0: d0 <= Load
    w = INST_NOP; w.wen = 1; w.wsel = WS_IN; w.in_sel = IN_LOAD; w.dst = 8'd0; wr(0, w);
    // w1: d1 <= Load
    w = INST_NOP; w.wen = 1; w.wsel = WS_IN; w.in_sel = IN_LOAD; w.dst = 8'd1; wr(1, w);
    // w2: y <= d0*d1 ; d2 <= N ; byp <= E
    w = INST_NOP; w.op = OP_MUL; w.src0 = 0; w.src1 = 1;
    w.wen = 1; w.wsel = WS_IN; w.in_sel = IN_N; w.dst = 8'd2; w.byp_sel = DIR_E; wr(2, w);
    // w3: d3 <= y ; N_out <= y ; E_out <= byp ; y <= d0*d1 + d2 ; byp <= W
    w = INST_NOP; w.op = OP_MADD; w.src0 = 0; w.src1 = 1; w.src2 = 2;
    w.wen = 1; w.wsel = WS_ALU; w.dst = 8'd3; w.out_n = OUT_ALU; w.out_e = OUT_BYP;
    w.byp_sel = DIR_W; wr(3, w);
    // w4: S_out <= d3 ; store y ; y <= d2 - d0
    w = INST_NOP; w.op = OP_SUB; w.src0 = 2; w.src1 = 0; w.src3 = 3; w.out_s = OUT_DMEM;
    w.st_en = 1; w.out_st = OUT_ALU; w.byp_sel = DIR_S; wr(4, w);
    // w5: W_out <= y ; N_out <= byp (S input)
    w = INST_NOP; w.out_w = OUT_ALU; w.out_n = OUT_BYP; wr(5, w);
    // w6: store d2
    w = INST_NOP; w.src3 = 2; w.st_en = 1; w.out_st = OUT_DMEM; wr(6, w);

    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      A = $urandom; B = $urandom; N = $urandom; E = $urandom;
      ldq.push_back(A); ldq.push_back(B);
      n_in = N; e_in = E; w_in = 32'h1234_0000 + run; s_in = 32'h5555_0000 + run;
      loads = 0; stores = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);            // start sampled at this posedge (P0)
      start = 0;
      repeat (5) @(negedge clk); // after P5: outputs of word 3
      check(n_out, A * B, "N_out = A*B (word 3)");
      check(e_out, E, "E_out = bypass of E (word 3)");
      check(32'(loads), 2, "two loads consumed");
      @(negedge clk);            // after P6: word 4
      check(s_out, A * B, "S_out = dmem[3] (word 4)");
      check({31'd0, st_vld}, 1, "store valid (word 4)");
      check(st_data, A * B + N, "store = A*B+N (word 4)");
      @(negedge clk);            // after P7: word 5
      check(w_out, N - A, "W_out = N-A (word 5)");
      check(n_out, s_in, "N_out = bypass of S (word 5)");
      check({31'd0, st_vld}, 0, "no store (word 5)");
      check(e_out, E, "E_out held");
      @(negedge clk);            // after P8: word 6
      check({31'd0, st_vld}, 1, "store valid (word 6)");
      check(st_data, N, "store = d2 (word 6)");
      repeat (4) @(negedge clk);
      check(32'(stores), 2, "exactly two stores per run");
      check({31'd0, ld_en}, 0, "idle after the schedule");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
