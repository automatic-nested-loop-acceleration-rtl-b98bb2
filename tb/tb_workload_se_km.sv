// tb_workload_se_km: runs the other two evaluated kernel types, the Sobel
// edge detector (SE) and K-means assignment (KM), on the accelerator at its
// default size (4 x 4 PEs, 1k-word instruction memories, 4k-word buffers),
// with reduced image and node counts.
// A DFG loads NL words over the broadcast Load bus (every PE keeps word l at
// data-memory address l); then each PE runs its own straight-line list of ALU
// operations, each taking two control words (operate, then write the result
// to a temporary at address 128 and up); finally the 16 PEs store one result
// each, one PE per cycle. The host model fills IBuf, IAddrBuf and OAddrBuf,
// and checks every result against a direct computation and the RUN cycle
// count against (G/U) * len.
//   SE: 18 x 18 image, 16 x 16 outputs |gx| + |gy|; one DFG = one output row
//       of 16 pixels (54 loads); one group of 16 DFG executions.
//   KM: 64 nodes in 2-D, 4 centroids; one DFG = 16 nodes, each PE computes
//       four squared distances and the index of the nearest centroid with
//       LT / SEL / MIN; one group of 4 DFG executions.
module tb_workload_se_km;
  import scgra_pkg::*;
  localparam int NPE = 16, MAXOPS = 32;

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

  typedef struct { alu_op_e op; int a, b, c, d; } op_t;
  op_t prog [NPE][MAXOPS];
  int  nops [NPE];
  int  res  [NPE];

  function automatic void add_op(int p, alu_op_e op, int a, int b, int c, int d);
    prog[p][nops[p]] = '{op, a, b, c, d};
    nops[p]++;
  endfunction

  task automatic build(int nl, output int len);
    pe_inst_t w;
    int mx;
    mx = 0;
    for (int p = 0; p < NPE; p++) if (nops[p] > mx) mx = nops[p];
    len = nl + 2 * mx + NPE;
    for (int p = 0; p < NPE; p++) begin
      for (int l = 0; l < nl; l++) begin
        w = INST_NOP; w.wen = 1; w.wsel = WS_IN; w.in_sel = IN_LOAD; w.dst = 8'(l);
        wr_imem(p, l, w);
      end
      for (int i = 0; i < mx; i++) begin
        w = INST_NOP;
        if (i < nops[p]) begin
          w.op = prog[p][i].op; w.src0 = 8'(prog[p][i].a); w.src1 = 8'(prog[p][i].b); w.src2 = 8'(prog[p][i].c);
        end
        wr_imem(p, nl + 2 * i, w);
        w = INST_NOP;
        if (i < nops[p]) begin w.wen = 1; w.wsel = WS_ALU; w.dst = 8'(prog[p][i].d); end
        wr_imem(p, nl + 2 * i + 1, w);
      end
      for (int o = 0; o < NPE; o++) begin
        w = INST_NOP;
        if (o == p) begin w.st_en = 1; w.out_st = OUT_DMEM; w.src3 = 8'(res[p]); end
        wr_imem(p, nl + 2 * mx + o, w);
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
    int len, nl;
    logic [31:0] r;
    repeat (3) @(negedge sys_clk);
    rst_n = 1; sys_rst_n = 1;

    // ------------------------------------------------------------- SE
    begin
      localparam int IW = 18, OW = 16, NDFG = OW;
      logic signed [31:0] img [IW][IW];
      logic signed [31:0] gx, gy, e;
      nl = 3 * IW;
      for (int p = 0; p < NPE; p++) begin
        // loaded word of window pixel (r, c) for output column p: r*IW + p + c
        int q [3][3];
        for (int rr = 0; rr < 3; rr++) for (int cc = 0; cc < 3; cc++) q[rr][cc] = rr * IW + p + cc;
        nops[p] = 0;
        add_op(p, OP_SUB,  q[0][2], q[0][0], 0, 128);
        add_op(p, OP_SUB,  q[1][2], q[1][0], 0, 129);
        add_op(p, OP_SUB,  q[2][2], q[2][0], 0, 130);
        add_op(p, OP_ADD3, 128, 129, 130, 131);
        add_op(p, OP_ADD,  131, 129, 0, 131);      // gx
        add_op(p, OP_SUB,  q[2][0], q[0][0], 0, 132);
        add_op(p, OP_SUB,  q[2][1], q[0][1], 0, 133);
        add_op(p, OP_SUB,  q[2][2], q[0][2], 0, 134);
        add_op(p, OP_ADD3, 132, 133, 134, 135);
        add_op(p, OP_ADD,  135, 133, 0, 135);      // gy
        add_op(p, OP_ABS,  131, 0, 0, 136);
        add_op(p, OP_ABS,  135, 0, 0, 137);
        add_op(p, OP_ADD,  136, 137, 0, 138);
        res[p] = 138;
      end
      build(nl, len);
      for (int i = 0; i < IW; i++) for (int j = 0; j < IW; j++) begin
        img[i][j] = $urandom % 256;
        host_wr(0, i * IW + j, img[i][j]);
      end
      for (int e2 = 0; e2 < NDFG; e2++) begin
        for (int l = 0; l < nl; l++) host_wr(1, e2 * nl + l, e2 * IW + l);
        for (int o = 0; o < NPE; o++) host_wr(2, e2 * NPE + o, e2 * OW + o);
      end
      run_group(NDFG, len, nl);
      for (int i = 0; i < OW; i++) for (int j = 0; j < OW; j++) begin
        gx = (img[i][j+2] + 2 * img[i+1][j+2] + img[i+2][j+2]) - (img[i][j] + 2 * img[i+1][j] + img[i+2][j]);
        gy = (img[i+2][j] + 2 * img[i+2][j+1] + img[i+2][j+2]) - (img[i][j] + 2 * img[i][j+1] + img[i][j+2]);
        e = (gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy);
        rd_obuf(i * OW + j, r);
        check(r, e, $sformatf("SE out[%0d][%0d]", i, j));
      end
      $display("INFO SE: %0dx%0d outputs, DFG length %0d cycles, %0d loads per DFG", OW, OW, len, nl);
    end

    // ------------------------------------------------------------- KM
    begin
      localparam int NN = 64, K = 4, NDFG = NN / NPE, CB = 1024, KB = 1100;
      logic signed [31:0] nx [NN], ny [NN], cx [K], cy [K], d, best;
      int idx;
      nl = 2 * NPE + 2 * K + K;      // 16 nodes, centroids, constants 0..3
      for (int p = 0; p < NPE; p++) begin
        int x, y;
        x = 2 * p; y = 2 * p + 1;
        nops[p] = 0;
        for (int j = 0; j < K; j++) begin
          add_op(p, OP_SUB,  x, 2 * NPE + 2 * j, 0, 128);
          add_op(p, OP_SUB,  y, 2 * NPE + 2 * j + 1, 0, 129);
          add_op(p, OP_MUL,  128, 128, 0, 130);
          add_op(p, OP_MADD, 129, 129, 130, 140 + j);   // d_j
        end
        add_op(p, OP_ADD, 2 * NPE + 2 * K, 2 * NPE + 2 * K, 0, 150);  // idx = 0 + 0
        add_op(p, OP_ADD, 140, 2 * NPE + 2 * K, 0, 151);              // best = d_0
        for (int j = 1; j < K; j++) begin
          add_op(p, OP_LT,  140 + j, 151, 0, 152);
          add_op(p, OP_SEL, 152, 2 * NPE + 2 * K + j, 150, 150);
          add_op(p, OP_MIN, 140 + j, 151, 0, 151);
        end
        res[p] = 150;
      end
      build(nl, len);
      for (int i = 0; i < NN; i++) begin
        nx[i] = $urandom % 1000; ny[i] = $urandom % 1000;
        host_wr(0, 2 * i, nx[i]); host_wr(0, 2 * i + 1, ny[i]);
      end
      for (int j = 0; j < K; j++) begin
        cx[j] = $urandom % 1000; cy[j] = $urandom % 1000;
        host_wr(0, CB + 2 * j, cx[j]); host_wr(0, CB + 2 * j + 1, cy[j]);
        host_wr(0, KB + j, j);
      end
      for (int e2 = 0; e2 < NDFG; e2++) begin
        for (int l = 0; l < 2 * NPE; l++) host_wr(1, e2 * nl + l, 2 * NPE * e2 + l);
        for (int l = 0; l < 2 * K; l++) host_wr(1, e2 * nl + 2 * NPE + l, CB + l);
        for (int l = 0; l < K; l++) host_wr(1, e2 * nl + 2 * NPE + 2 * K + l, KB + l);
        for (int o = 0; o < NPE; o++) host_wr(2, e2 * NPE + o, 2048 + e2 * NPE + o);
      end
      run_group(NDFG, len, nl);
      for (int i = 0; i < NN; i++) begin
        idx = 0; best = (nx[i]-cx[0])*(nx[i]-cx[0]) + (ny[i]-cy[0])*(ny[i]-cy[0]);
        for (int j = 1; j < K; j++) begin
          d = (nx[i]-cx[j])*(nx[i]-cx[j]) + (ny[i]-cy[j])*(ny[i]-cy[j]);
          if (d < best) begin best = d; idx = j; end
        end
        rd_obuf(2048 + i, r);
        check(r, idx, $sformatf("KM node %0d", i));
      end
      $display("INFO KM: %0d nodes, %0d centroids, DFG length %0d cycles, %0d loads per DFG", NN, K, len, nl);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
