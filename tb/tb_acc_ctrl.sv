// tb_acc_ctrl: self-checking test of the accelerator controller.
// The controller is connected to four RAMs (IAddrBuf, IBuf, OAddrBuf, OBuf,
// 64 words, one clock) and to a behavioural stand-in for the PE array that
// follows the array timing: after a pe_start sampled at an edge, word k of
// the schedule executes in the (k+2)-th cycle; it takes one Load word in each
// of words 0, 1 and 2 (three consecutive pops) and stores x0+x1+x2 at word 3
// and x0^x2 at word 4. Input and output addresses are random permutations.
// Checks: OBuf contents, done, no errors, RUN = n_dfg*len cycles, that the
// first pe_start waits for a full prefetch FIFO, that restarts are len cycles
// apart, and the three error flags (too few loads queued, wrong store count,
// store conflict).
module tb_acc_ctrl;
  import scgra_pkg::*;
  localparam int LEN = 6, NDFG = 7, NLD = 3 * NDFG, NST = 2 * NDFG;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] n_dfg;
  logic [10:0] len;
  logic [6:0] n_ld, n_st;
  logic iaddr_re, ibuf_re, obuf_we, pe_start, ld_pop, st_vld, st_conflict, busy, done;
  logic [5:0] iaddr_raddr, iaddr_rdata, ibuf_raddr, oaddr_raddr, oaddr_rdata, obuf_waddr;
  logic [31:0] ibuf_rdata, obuf_wdata, ld_data, st_data, run_cycles, obuf_rdata;
  logic [10:0] pe_len;
  logic [2:0] err;
  // host-side write ports of the RAMs
  logic hw_ia = 0, hw_ib = 0, hw_oa = 0, ob_re = 0;
  logic [5:0] hw_addr = 0, ob_raddr = 0;
  logic [31:0] hw_data = 0;
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  acc_ctrl #(.BUF_AW(6), .IMEM_AW(10)) dut (.*);

  dc_ram #(.DW(6),  .DEPTH(64)) u_ia (.wclk(clk), .we(hw_ia), .waddr(hw_addr), .wdata(hw_data[5:0]),
                                     .rclk(clk), .re(iaddr_re), .raddr(iaddr_raddr), .rdata(iaddr_rdata));
  dc_ram #(.DW(32), .DEPTH(64)) u_ib (.wclk(clk), .we(hw_ib), .waddr(hw_addr), .wdata(hw_data),
                                     .rclk(clk), .re(ibuf_re), .raddr(ibuf_raddr), .rdata(ibuf_rdata));
  dc_ram #(.DW(6),  .DEPTH(64)) u_oa (.wclk(clk), .we(hw_oa), .waddr(hw_addr), .wdata(hw_data[5:0]),
                                     .rclk(clk), .re(1'b1), .raddr(oaddr_raddr), .rdata(oaddr_rdata));
  dc_ram #(.DW(32), .DEPTH(64)) u_ob (.wclk(clk), .we(obuf_we), .waddr(obuf_waddr), .wdata(obuf_wdata),
                                     .rclk(clk), .re(ob_re), .raddr(ob_raddr), .rdata(obuf_rdata));

  // behavioural PE array
  int ph = -10;
  logic [31:0] x [3];
  logic force_conflict = 0;
  assign ld_pop = (ph >= 1 && ph <= 3);
  always @(posedge clk) begin
    if (!rst_n) begin
      ph <= -10; st_vld <= 0; st_data <= 0; st_conflict <= 0;
    end else begin
      ph <= pe_start ? 0 : (ph >= 0 ? ph + 1 : ph);
      if (ld_pop) x[ph - 1] <= ld_data;
      st_vld <= (ph == 4 || ph == 5);
      st_data <= (ph == 4) ? x[0] + x[1] + x[2] : x[0] ^ x[2];
      st_conflict <= force_conflict && (ph == 4);
    end
  end

  int starts[$];
  always @(posedge clk) if (pe_start) starts.push_back(cyc);

  task automatic check(logic [31:0] g, logic [31:0] e, string what);
    checks++;
    if (g !== e) begin failures++; if (failures < 20) $display("FAIL %s got %0d exp %0d", what, g, e); end
  endtask

  task automatic hw(int which, int a, logic [31:0] d);
    @(negedge clk);
    hw_ia = (which == 0); hw_ib = (which == 1); hw_oa = (which == 2);
    hw_addr = 6'(a); hw_data = d;
    @(negedge clk);
    hw_ia = 0; hw_ib = 0; hw_oa = 0;
  endtask

  task automatic run_group();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check({31'd0, busy}, 1, "busy after start");
    while (!done) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm_i [64], perm_o [64];
    logic [31:0] data [64];
    logic [31:0] exp_v;
    n_dfg = 16'(NDFG); len = 11'(LEN); n_ld = 7'(NLD); n_st = 7'(NST);
    for (int i = 0; i < 64; i++) begin perm_i[i] = i; perm_o[i] = i; end
    perm_i.shuffle(); perm_o.shuffle();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      data[i] = $urandom;
      hw(1, i, data[i]);
      hw(0, i, perm_i[i]);
      hw(2, i, perm_o[i]);
    end
    // ---- normal group
    starts.delete();
    run_group();
    check({29'd0, err}, 0, "no errors");
    check(run_cycles, NDFG * LEN, "RUN cycles = n_dfg * len");
    check(32'(starts.size()), NDFG, "pe_start pulses");
    for (int e = 1; e < starts.size(); e++) check(32'(starts[e] - starts[e-1]), LEN, "restart spacing");
    for (int e = 0; e < NDFG; e++) begin
      logic [31:0] x0, x1, x2;
      x0 = data[perm_i[3*e]]; x1 = data[perm_i[3*e+1]]; x2 = data[perm_i[3*e+2]];
      for (int s = 0; s < 2; s++) begin
        exp_v = (s == 0) ? x0 + x1 + x2 : x0 ^ x2;
        @(negedge clk); ob_re = 1; ob_raddr = 6'(perm_o[2*e+s]);
        @(negedge clk); ob_re = 0;
        check(obuf_rdata, exp_v, $sformatf("OBuf dfg %0d store %0d", e, s));
      end
    end
    // ---- prefetch: first start only after the FIFO filled
    check({31'd0, starts[0] > 0}, 1, "start seen");
    // ---- too few loads queued -> underflow flag
    n_ld = 7'(NLD - 2);
    run_group();
    check({29'd0, err}, 3'b001, "load underflow flag");
    // ---- store count mismatch
    n_ld = 7'(NLD); n_st = 7'(NST - 1);
    run_group();
    check({29'd0, err}, 3'b010, "store count flag");
    // ---- store conflict
    n_st = 7'(NST); force_conflict = 1;
    run_group();
    force_conflict = 0;
    check({29'd0, err}, 3'b100, "store conflict flag");
    // ---- flags clear on the next good group
    run_group();
    check({29'd0, err}, 0, "flags cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the first start of each group must follow a full FIFO
  logic first = 0;
  always @(posedge clk) begin
    if (start) first <= 1;
    if (pe_start) first <= 0;
  end
  always @(posedge clk) if (rst_n && pe_start && first) begin
    checks++;
    if (dut.fifo_cnt != 4'd8) begin failures++; $display("FAIL first start before prefetch completed"); end
  end
endmodule
