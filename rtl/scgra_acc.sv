// scgra_acc: SCGRA-overlay loop accelerator (top level).
//
// A host processor offloads a nested loop to the accelerator one group at a
// time. It writes the group's input words into IBuf, the order in which the
// computation reads them into IAddrBuf, the order of the result addresses into
// OAddrBuf and, once per application, one schedule of control words into each
// PE's instruction memory. It then sets the group configuration (n_dfg DFG
// executions of len cycles, n_ld loads, n_st stores) and pulses host_start.
// AccCtrl streams the inputs into the ROWS x COLS torus of PEs, restarts the
// PEs every len cycles and writes the PE stores into OBuf; when host_done is
// seen the host reads the results from OBuf.
// Two clocks: sys_clk for everything the host touches (buffer write/read
// ports, control words, start and status) and clk for the array, the
// controller and the array side of the buffers. host_start crosses as a
// toggle through a two-flop synchroniser and is acknowledged back; busy, done,
// err and run_cycles come back through synchronisers. The cfg_* inputs are
// quasi-static: they must not change while host_busy is high. host_busy rises
// in the cycle after host_start; host_done means the last group is finished.
// The buffers, address buffers, controller and PE array and their roles follow
// the paper; the host interface and the clock crossing are this design's own.
module scgra_acc
  import scgra_pkg::*;
#(
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned BUF_DEPTH  = 4096,
  parameter int unsigned IMEM_AW    = $clog2(IMEM_DEPTH),
  parameter int unsigned BUF_AW     = $clog2(BUF_DEPTH),
  parameter int unsigned PE_AW      = (ROWS * COLS > 1) ? $clog2(ROWS * COLS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sys_clk,
  input  logic               sys_rst_n,
  // host: buffers
  input  logic               ibuf_we,
  input  logic [BUF_AW-1:0]  ibuf_waddr,
  input  logic [DATA_W-1:0]  ibuf_wdata,
  input  logic               obuf_re,
  input  logic [BUF_AW-1:0]  obuf_raddr,
  output logic [DATA_W-1:0]  obuf_rdata,
  input  logic               iaddr_we,
  input  logic [BUF_AW-1:0]  iaddr_waddr,
  input  logic [BUF_AW-1:0]  iaddr_wdata,
  input  logic               oaddr_we,
  input  logic [BUF_AW-1:0]  oaddr_waddr,
  input  logic [BUF_AW-1:0]  oaddr_wdata,
  // host: control words
  input  logic               imem_we,
  input  logic [PE_AW-1:0]   imem_pe,
  input  logic [IMEM_AW-1:0] imem_waddr,
  input  logic [INST_W-1:0]  imem_wdata,
  // host: group configuration and status
  input  logic [15:0]        cfg_n_dfg,
  input  logic [IMEM_AW:0]   cfg_len,
  input  logic [BUF_AW:0]    cfg_n_ld,
  input  logic [BUF_AW:0]    cfg_n_st,
  input  logic               host_start,
  output logic               host_busy,
  output logic               host_done,
  output logic [2:0]         host_err,
  output logic [31:0]        host_run_cycles
);

  // ------------------------------------------------------- clock crossing
  logic start_tog, start_tog_s, start_tog_d, seen_tog, seen_tog_s;
  logic acc_start, acc_busy, acc_done;
  logic [2:0]  acc_err;
  logic [31:0] acc_run_cycles;
  logic        busy_s, done_s;

  always_ff @(posedge sys_clk or negedge sys_rst_n) begin
    if (!sys_rst_n) start_tog <= 1'b0;
    else if (host_start) start_tog <= ~start_tog;
  end

  cdc_sync #(.W(1)) u_sync_start (.clk, .rst_n, .d (start_tog), .q (start_tog_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) start_tog_d <= 1'b0;
    else        start_tog_d <= start_tog_s;
  end
  assign acc_start = start_tog_s ^ start_tog_d;
  assign seen_tog  = start_tog_d;

  cdc_sync #(.W(1)) u_sync_seen (.clk (sys_clk), .rst_n (sys_rst_n), .d (seen_tog), .q (seen_tog_s));
  cdc_sync #(.W(2)) u_sync_stat (.clk (sys_clk), .rst_n (sys_rst_n),
                                 .d ({acc_busy, acc_done}), .q ({busy_s, done_s}));
  cdc_sync #(.W(3)) u_sync_err  (.clk (sys_clk), .rst_n (sys_rst_n), .d (acc_err), .q (host_err));
  cdc_sync #(.W(32)) u_sync_cyc (.clk (sys_clk), .rst_n (sys_rst_n),
                                 .d (acc_run_cycles), .q (host_run_cycles));

  logic pending;
  assign pending   = start_tog != seen_tog_s;
  assign host_busy = pending || busy_s;
  assign host_done = done_s && !host_busy;

  // --------------------------------------------------------------- buffers
  logic              iaddr_re, ibuf_re, obuf_we;
  logic [BUF_AW-1:0] iaddr_raddr, iaddr_rdata, ibuf_raddr, oaddr_raddr, oaddr_rdata, obuf_waddr;
  logic [DATA_W-1:0] ibuf_rdata, obuf_wdata;

  dc_ram #(.DW(DATA_W), .DEPTH(BUF_DEPTH)) u_ibuf (
    .wclk (sys_clk), .we (ibuf_we), .waddr (ibuf_waddr), .wdata (ibuf_wdata),
    .rclk (clk), .re (ibuf_re), .raddr (ibuf_raddr), .rdata (ibuf_rdata)
  );
  dc_ram #(.DW(DATA_W), .DEPTH(BUF_DEPTH)) u_obuf (
    .wclk (clk), .we (obuf_we), .waddr (obuf_waddr), .wdata (obuf_wdata),
    .rclk (sys_clk), .re (obuf_re), .raddr (obuf_raddr), .rdata (obuf_rdata)
  );
  dc_ram #(.DW(BUF_AW), .DEPTH(BUF_DEPTH)) u_iaddr_buf (
    .wclk (sys_clk), .we (iaddr_we), .waddr (iaddr_waddr), .wdata (iaddr_wdata),
    .rclk (clk), .re (iaddr_re), .raddr (iaddr_raddr), .rdata (iaddr_rdata)
  );
  dc_ram #(.DW(BUF_AW), .DEPTH(BUF_DEPTH)) u_oaddr_buf (
    .wclk (sys_clk), .we (oaddr_we), .waddr (oaddr_waddr), .wdata (oaddr_wdata),
    .rclk (clk), .re (1'b1), .raddr (oaddr_raddr), .rdata (oaddr_rdata)
  );

  // ------------------------------------------------- controller and array
  logic              pe_start, ld_pop, st_vld, st_conflict;
  logic [IMEM_AW:0]  pe_len;
  logic [DATA_W-1:0] ld_data, st_data;

  acc_ctrl #(.BUF_AW(BUF_AW), .IMEM_AW(IMEM_AW)) u_ctrl (
    .clk, .rst_n, .start (acc_start),
    .n_dfg (cfg_n_dfg), .len (cfg_len), .n_ld (cfg_n_ld), .n_st (cfg_n_st),
    .iaddr_re, .iaddr_raddr, .iaddr_rdata, .ibuf_re, .ibuf_raddr, .ibuf_rdata,
    .oaddr_raddr, .oaddr_rdata, .obuf_we, .obuf_waddr, .obuf_wdata,
    .pe_start, .pe_len, .ld_data, .ld_pop, .st_vld, .st_data, .st_conflict,
    .busy (acc_busy), .done (acc_done), .err (acc_err), .run_cycles (acc_run_cycles)
  );

  scgra_array #(.ROWS(ROWS), .COLS(COLS), .IMEM_DEPTH(IMEM_DEPTH)) u_array (
    .clk, .rst_n, .cfg_clk (sys_clk),
    .imem_we, .imem_pe, .imem_waddr, .imem_wdata,
    .start (pe_start), .len (pe_len),
    .ld_data, .ld_pop, .st_data, .st_vld, .st_conflict
  );

endmodule
