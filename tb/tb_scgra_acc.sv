// tb_scgra_acc: end-to-end test of the accelerator at its default size
// (4 x 4 PEs, 1k-word instruction memories, 4k-word buffers).
// Offloads the loop c[i] = a[i] * b[i], L = 40, as 4 groups of G = 10 with the
// DFG unrolled U = 2 times, so each group runs the DFG 5 times. The host
// model writes the control words once, then per group writes a and b into
// IBuf, the load order into IAddrBuf and the result order into OAddrBuf,
// starts the group across the clock crossing, waits for done and reads OBuf.
// The schedule: PE(0,0) loads a0, b0, a1, b1, computes both products, stores
// a1*b1 and sends a0*b0 west over the torus wrap to PE(0,3), which passes it
// through its bypass register north over the row wrap to PE(3,3), which writes
// it into its data memory and stores it. Checks: every c[i] against a[i]*b[i],
// no error flags, RUN cycles = (G/U) * len per group, and that each mechanism
// (group start handshake, prefetch wait, DFG restart, load, store, bypass and
// wrap path, back-to-back DFG executions) happened.
module tb_scgra_acc;
  import scgra_pkg::*;
  localparam int L = 40, G = 10, U = 2, NDFG = G / U, LEN = 8;
  localparam int A_BASE = 0, B_BASE = 100, C_BASE = 0;

  logic clk = 0, rst_n = 0, sys_clk = 0, sys_rst_n = 0;
  logic ibuf_we = 0, obuf_re = 0, iaddr_we = 0, oaddr_we = 0, imem_we = 0, host_start = 0;
  logic [11:0] ibuf_waddr = 0, obuf_raddr = 0, iaddr_waddr = 0, iaddr_wdata = 0, oaddr_waddr = 0, oaddr_wdata = 0;
  logic [31:0] ibuf_wdata = 0, obuf_rdata;
  logic [3:0] imem_pe = 0;
  logic [9:0] imem_waddr = 0;
  logic [INST_W-1:0] imem_wdata = '0;
  logic [15:0] cfg_n_dfg = 0;
  logic [10:0] cfg_len = 0;
  logic [12:0] cfg_n_ld = 0, cfg_n_st = 0;
  logic host_busy, host_done;
  logic [2:0] host_err;
  logic [31:0] host_run_cycles;

  int checks = 0, failures = 0;
  int n_pe_start = 0, n_load = 0, n_store = 0, n_prefetch = 0, n_wrap_store = 0, n_group = 0, n_restart = 0;
  logic [31:0] a [L], b [L];

  always #2 clk = ~clk;        // array clock, 250 MHz
  always #5 sys_clk = ~sys_clk; // host clock, 100 MHz

  scgra_acc dut (.*);

  // event counters, sampled in the array clock domain
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.pe_start) n_pe_start++;
    if (dut.u_ctrl.pe_start && dut.u_array.g_row[0].g_col[0].u_pe.running) n_restart++;
    if (dut.ld_pop) n_load++;
    if (dut.st_vld) n_store++;
    if (dut.u_ctrl.state == 2'd1) n_prefetch++;
    if (dut.u_array.st_v[15]) n_wrap_store++;
  end

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d (%h) exp %0d (%h)", what, got, got, exp, exp);
    end
  endtask

  task automatic host_wr_imem(int p, int addr, pe_inst_t w);
    @(negedge sys_clk);
    imem_we = 1; imem_pe = 4'(p); imem_waddr = 10'(addr); imem_wdata = w;
    @(negedge sys_clk);
    imem_we = 0;
  endtask

  task automatic host_wr(int which, int addr, logic [31:0] data);
    @(negedge sys_clk);
    case (which)
      0: begin ibuf_we = 1; ibuf_waddr = 12'(addr); ibuf_wdata = data; end
      1: begin iaddr_we = 1; iaddr_waddr = 12'(addr); iaddr_wdata = 12'(data); end
      default: begin oaddr_we = 1; oaddr_waddr = 12'(addr); oaddr_wdata = 12'(data); end
    endcase
    @(negedge sys_clk);
    ibuf_we = 0; iaddr_we = 0; oaddr_we = 0;
  endtask

  task automatic host_rd_obuf(int addr, output logic [31:0] data);
    @(negedge sys_clk);
    obuf_re = 1; obuf_raddr = 12'(addr);
    @(negedge sys_clk);
    obuf_re = 0;
    data = obuf_rdata;
  endtask

  task automatic load_program();
    pe_inst_t w;
    for (int p = 0; p < 16; p++)
      for (int k = 0; k < LEN; k++) host_wr_imem(p, k, INST_NOP);
    // PE(0,0)
    for (int k = 0; k < 4; k++) begin
      w = INST_NOP; w.wen = 1; w.wsel = WS_IN; w.in_sel = IN_LOAD; w.dst = 8'(k);
      if (k == 2) begin w.op = OP_MUL; w.src0 = 0; w.src1 = 1; end
      if (k == 3) w.out_w = OUT_ALU;
      host_wr_imem(0, k, w);
    end
    w = INST_NOP; w.op = OP_MUL; w.src0 = 2; w.src1 = 3; host_wr_imem(0, 4, w);
    w = INST_NOP; w.st_en = 1; w.out_st = OUT_ALU; host_wr_imem(0, 5, w);
    // PE(0,3): bypass from E (west output of PE(0,0) over the wrap), send north
    w = INST_NOP; w.byp_sel = DIR_E; host_wr_imem(3, 4, w);
    w = INST_NOP; w.out_n = OUT_BYP; host_wr_imem(3, 5, w);
    // PE(3,3): take S (north output of PE(0,3) over the wrap), store it
    w = INST_NOP; w.wen = 1; w.wsel = WS_IN; w.in_sel = IN_S; w.dst = 8'd0; host_wr_imem(15, 6, w);
    w = INST_NOP; w.src3 = 8'd0; w.st_en = 1; w.out_st = OUT_DMEM; host_wr_imem(15, 7, w);
  endtask

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    for (int i = 0; i < L; i++) begin
      a[i] = $urandom; b[i] = $urandom;
    end
    repeat (3) @(negedge sys_clk);
    rst_n = 1; sys_rst_n = 1;
    load_program();
    cfg_n_dfg = 16'(NDFG); cfg_len = 11'(LEN); cfg_n_ld = 13'(2 * G); cfg_n_st = 13'(G);
    // address buffers are the same for every group
    for (int e = 0; e < NDFG; e++) begin
      host_wr(1, 4 * e + 0, A_BASE + 2 * e);
      host_wr(1, 4 * e + 1, B_BASE + 2 * e);
      host_wr(1, 4 * e + 2, A_BASE + 2 * e + 1);
      host_wr(1, 4 * e + 3, B_BASE + 2 * e + 1);
      host_wr(2, 2 * e + 0, C_BASE + 2 * e + 1);
      host_wr(2, 2 * e + 1, C_BASE + 2 * e);
    end
    for (int grp = 0; grp < L / G; grp++) begin
      int st0;
      for (int i = 0; i < G; i++) begin
        host_wr(0, A_BASE + i, a[grp * G + i]);
        host_wr(0, B_BASE + i, b[grp * G + i]);
      end
      st0 = n_pe_start;
      @(negedge sys_clk);
      host_start = 1;
      @(negedge sys_clk);
      host_start = 0;
      check({31'd0, host_busy}, 1, "busy right after start");
      while (!host_done) @(negedge sys_clk);
      n_group++;
      check({29'd0, host_err}, 0, "no error flags");
      check(host_run_cycles, NDFG * LEN, "RUN cycles = (G/U) * DFG length");
      check(32'(n_pe_start - st0), NDFG, "one PE start per DFG execution");
      for (int i = 0; i < G; i++) begin
        host_rd_obuf(C_BASE + i, r);
        check(r, a[grp * G + i] * b[grp * G + i], $sformatf("c[%0d]", grp * G + i));
      end
    end
    // mechanisms
    check(32'(n_group), L / G, "groups run");
    check(32'(n_load), 2 * L, "loads");
    check(32'(n_store), L, "stores");
    check(32'(n_wrap_store), L / 2, "stores over the bypass/wrap path");
    check(32'(n_restart), (NDFG - 1) * (L / G), "back-to-back DFG restarts");
    checks++; if (n_prefetch == 0) failures++;
    $display("INFO groups=%0d pe_starts=%0d restarts=%0d loads=%0d stores=%0d wrap_stores=%0d prefetch_cycles=%0d",
             n_group, n_pe_start, n_restart, n_load, n_store, n_wrap_store, n_prefetch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
