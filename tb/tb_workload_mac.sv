// tb_workload_mac: runs two of the evaluated kernel types, FIR and matrix
// multiplication, on the accelerator at its default size (4 x 4 PEs, 1k-word
// instruction memories, 4k-word buffers), with reduced loop sizes.
// Both are sums of products, so one schedule builder serves both: a DFG
// loads NL words over the broadcast Load bus (every PE keeps every word, word
// l at data-memory address l), then each of the 16 PEs computes one output as
// a T-term dot product of pairs of loaded words (MUL, then MADD into an
// accumulator, two control words per term), and the PEs store their outputs
// one per cycle. The host model fills IBuf, IAddrBuf and OAddrBuf per group
// and checks every output against a direct computation, and the RUN cycle
// count against (G/U) * len per group.
//   FIR: y[n] = sum_k h[k] * x[n+k], 8 taps, 256 outputs, U = 16 outputs per
//        DFG, G = 64 outputs per group (4 groups of 4 DFG executions).
//   MM:  C = A * B, 8 x 8, U = 2 rows (16 outputs) per DFG, one group of 4.
module tb_workload_mac;
  import scgra_pkg::*;
  localparam int NPE = 16, T = 8;

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

  always #2 clk = ~clk;
  always #5 sys_clk = ~sys_clk;

  scgra_acc dut (.*);

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic wr_imem(int p, int addr, pe_inst_t w);
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

  task automatic rd_obuf(int addr, output logic [31:0] data);
    @(negedge sys_clk);
    obuf_re = 1; obuf_raddr = 12'(addr);
    @(negedge sys_clk);
    obuf_re = 0;
    data = obuf_rdata;
  endtask

  // Dot-product schedule: pa[o][k], pb[o][k] index the loaded words.
  // Returns the schedule length.
  task automatic build(int nl, int pa [NPE][T], int pb [NPE][T], output int len);
    pe_inst_t w;
    localparam int ACC = 255;
    len = nl + 2 * T + NPE;
    for (int p = 0; p < NPE; p++) begin
      for (int l = 0; l < nl; l++) begin
        w = INST_NOP; w.wen = 1; w.wsel = WS_IN; w.in_sel = IN_LOAD; w.dst = 8'(l);
        wr_imem(p, l, w);
      end
      for (int k = 0; k < T; k++) begin
        w = INST_NOP; w.op = (k == 0) ? OP_MUL : OP_MADD;
        w.src0 = 8'(pa[p][k]); w.src1 = 8'(pb[p][k]); w.src2 = 8'(ACC);
        wr_imem(p, nl + 2 * k, w);
        w = INST_NOP; w.wen = 1; w.wsel = WS_ALU; w.dst = 8'(ACC);
        wr_imem(p, nl + 2 * k + 1, w);
      end
      for (int o = 0; o < NPE; o++) begin
        w = INST_NOP;
        if (o == p) begin w.st_en = 1; w.out_st = OUT_DMEM; w.src3 = 8'(ACC); end
        wr_imem(p, nl + 2 * T + o, w);
      end
    end
  endtask

  task automatic run_group(int ndfg, int len, int nl);
    cfg_n_dfg = 16'(ndfg); cfg_len = 11'(len); cfg_n_ld = 13'(ndfg * nl); cfg_n_st = 13'(ndfg * NPE);
    @(negedge sys_clk); host_start = 1; @(negedge sys_clk); host_start = 0;
    while (!host_done) @(negedge sys_clk);
    check({29'd0, host_err}, 0, "no error flags");
    check(host_run_cycles, 32'(ndfg * len), "RUN cycles = (G/U) * len");
  endtask

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pa [NPE][T], pb [NPE][T];
    int len, nl;
    logic [31:0] r, acc;
    repeat (3) @(negedge sys_clk);
    rst_n = 1; sys_rst_n = 1;

    // ------------------------------------------------------------ FIR
    begin
      localparam int NOUT = 256, G = 64, U = NPE, NDFG = G / U, XB = 0, HB = 2048;
      logic [31:0] x [NOUT + T - 1];
      logic [31:0] h [T];
      nl = U + T - 1 + T;                     // window of x, then the taps
      for (int o = 0; o < NPE; o++)
        for (int k = 0; k < T; k++) begin pa[o][k] = o + k; pb[o][k] = U + T - 1 + k; end
      build(nl, pa, pb, len);
      for (int i = 0; i < NOUT + T - 1; i++) x[i] = $urandom % 65536;
      for (int k = 0; k < T; k++) h[k] = $urandom % 256;
      for (int k = 0; k < T; k++) host_wr(0, HB + k, h[k]);
      for (int e = 0; e < NDFG; e++) begin
        for (int l = 0; l < U + T - 1; l++) host_wr(1, e * nl + l, XB + e * U + l);
        for (int k = 0; k < T; k++) host_wr(1, e * nl + U + T - 1 + k, HB + k);
        for (int o = 0; o < NPE; o++) host_wr(2, e * NPE + o, e * U + o);
      end
      for (int grp = 0; grp < NOUT / G; grp++) begin
        for (int i = 0; i < G + T - 1; i++) host_wr(0, XB + i, x[grp * G + i]);
        run_group(NDFG, len, nl);
        for (int n = 0; n < G; n++) begin
          acc = 0;
          for (int k = 0; k < T; k++) acc += h[k] * x[grp * G + n + k];
          rd_obuf(n, r);
          check(r, acc, $sformatf("FIR y[%0d]", grp * G + n));
        end
      end
      $display("INFO FIR: %0d outputs, DFG length %0d cycles, %0d loads per DFG", NOUT, len, nl);
    end

    // ------------------------------------------------------------- MM
    begin
      localparam int N = 8, NDFG = N / 2, AB = 0, BB = 64;
      logic [31:0] A [N][N], B [N][N];
      nl = 2 * N + N * N;                     // two rows of A, all of B
      for (int o = 0; o < NPE; o++)
        for (int k = 0; k < T; k++) begin
          pa[o][k] = (o / N) * N + k;           // A[row o/N][k]
          pb[o][k] = 2 * N + k * N + (o % N);   // B[k][o%N]
        end
      build(nl, pa, pb, len);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        A[i][j] = $urandom % 4096; B[i][j] = $urandom % 4096;
        host_wr(0, AB + i * N + j, A[i][j]);
        host_wr(0, BB + i * N + j, B[i][j]);
      end
      for (int e = 0; e < NDFG; e++) begin
        for (int l = 0; l < 2 * N; l++) host_wr(1, e * nl + l, AB + 2 * e * N + l);
        for (int l = 0; l < N * N; l++) host_wr(1, e * nl + 2 * N + l, BB + l);
        for (int o = 0; o < NPE; o++) host_wr(2, e * NPE + o, 2 * e * N + o);
      end
      run_group(NDFG, len, nl);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        acc = 0;
        for (int k = 0; k < N; k++) acc += A[i][k] * B[k][j];
        rd_obuf(i * N + j, r);
        check(r, acc, $sformatf("MM C[%0d][%0d]", i, j));
      end
      $display("INFO MM: %0dx%0d, DFG length %0d cycles, %0d loads per DFG", N, N, len, nl);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
