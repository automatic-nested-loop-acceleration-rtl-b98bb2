// pe: processing element of the SCGRA overlay.
//
// Each PE holds its own instruction memory (control words), an instruction
// address generator (AddrCtrl), a multi-port data memory and a three-operand
// ALU. In every cycle of a schedule the PE executes one control word
// (scgra_pkg::pe_inst_t):
//   * ALU: y <= op(dmem[src0], dmem[src1], dmem[src2]); OP_NOP keeps y.
//   * write: if wen, dmem[dst] <= (wsel == WS_ALU) ? y : input selected by
//     in_sel (Load bus, or the N/E/S/W neighbour input).
//   * bypass: byp <= neighbour input selected by byp_sel, so a value can cross
//     the PE without touching the data memory (two cycles per hop).
//   * outputs: each of N/E/S/W takes dmem[src3], y or byp, or holds; if st_en
//     the store register takes the value chosen by out_st and st_vld is raised
//     for one cycle.
// Timing: the global start is sampled in cycle T; word k executes in cycle
// T+2+k; every output is a register, so its new value is seen by the neighbour
// or the controller in the next cycle. The Load bus is used combinationally:
// ld_en tells the controller that ld_data is consumed in this cycle.
// Following the paper: the parts (AddrCtrl, instruction memory, data memory,
// ALU, Load/Store, four neighbour ports, bypass, input and output muxes). This
// design's own: the control-word format, the mux inputs and the pipeline timing.
module pe
  import scgra_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned IMEM_AW    = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // control-word loading (host clock)
  input  logic               cfg_clk,
  input  logic               imem_we,
  input  logic [IMEM_AW-1:0] imem_waddr,
  input  logic [INST_W-1:0]  imem_wdata,
  // global control
  input  logic               start,
  input  logic [IMEM_AW:0]   len,
  // IO buffer side
  input  logic [DATA_W-1:0]  ld_data,
  output logic               ld_en,
  output logic [DATA_W-1:0]  st_data,
  output logic               st_vld,
  // torus links
  input  logic [DATA_W-1:0]  n_in,
  input  logic [DATA_W-1:0]  e_in,
  input  logic [DATA_W-1:0]  s_in,
  input  logic [DATA_W-1:0]  w_in,
  output logic [DATA_W-1:0]  n_out,
  output logic [DATA_W-1:0]  e_out,
  output logic [DATA_W-1:0]  s_out,
  output logic [DATA_W-1:0]  w_out
);

  logic [IMEM_AW-1:0] pc;
  logic               running;
  logic               ir_vld;
  logic [INST_W-1:0]  ir_raw;
  pe_inst_t           ir;

  pe_addr_ctrl #(.IMEM_DEPTH(IMEM_DEPTH)) u_addr_ctrl (
    .clk, .rst_n, .start, .len, .pc, .running
  );

  dc_ram #(.DW(INST_W), .DEPTH(IMEM_DEPTH)) u_imem (
    .wclk (cfg_clk), .we (imem_we), .waddr (imem_waddr), .wdata (imem_wdata),
    .rclk (clk), .re (1'b1), .raddr (pc), .rdata (ir_raw)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ir_vld <= 1'b0;
    else        ir_vld <= running;
  end

  assign ir = ir_vld ? pe_inst_t'(ir_raw) : INST_NOP;

  // data memory and ALU
  logic [3:0][DMEM_AW-1:0] raddr;
  logic [3:0][DATA_W-1:0]  rdata;
  logic [DATA_W-1:0]       alu_y, in_val, wdata, byp_q;

  assign raddr = {ir.src3, ir.src2, ir.src1, ir.src0};

  always_comb begin
    unique case (ir.in_sel)
      IN_LOAD: in_val = ld_data;
      IN_N:    in_val = n_in;
      IN_E:    in_val = e_in;
      IN_S:    in_val = s_in;
      IN_W:    in_val = w_in;
      default: in_val = ld_data;
    endcase
  end

  assign wdata = (ir.wsel == WS_ALU) ? alu_y : in_val;
  assign ld_en = ir.wen && ir.wsel == WS_IN && ir.in_sel == IN_LOAD;

  pe_dmem u_dmem (
    .clk, .we (ir.wen), .waddr (ir.dst), .wdata, .raddr, .rdata
  );

  pe_alu u_alu (
    .clk, .rst_n, .op (ir.op), .a (rdata[0]), .b (rdata[1]), .c (rdata[2]), .y (alu_y)
  );

  // bypass and output registers
  function automatic logic [DATA_W-1:0] pick(out_sel_e s, logic [DATA_W-1:0] cur,
                                             logic [DATA_W-1:0] dm, logic [DATA_W-1:0] y,
                                             logic [DATA_W-1:0] byp);
    unique case (s)
      OUT_DMEM: return dm;
      OUT_ALU:  return y;
      OUT_BYP:  return byp;
      default:  return cur;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      byp_q   <= '0;
      n_out   <= '0;
      e_out   <= '0;
      s_out   <= '0;
      w_out   <= '0;
      st_data <= '0;
      st_vld  <= 1'b0;
    end else begin
      if (ir_vld) begin
        unique case (ir.byp_sel)
          DIR_N: byp_q <= n_in;
          DIR_E: byp_q <= e_in;
          DIR_S: byp_q <= s_in;
          DIR_W: byp_q <= w_in;
          default: byp_q <= n_in;
        endcase
      end
      n_out  <= pick(ir.out_n, n_out, rdata[3], alu_y, byp_q);
      e_out  <= pick(ir.out_e, e_out, rdata[3], alu_y, byp_q);
      s_out  <= pick(ir.out_s, s_out, rdata[3], alu_y, byp_q);
      w_out  <= pick(ir.out_w, w_out, rdata[3], alu_y, byp_q);
      if (ir.st_en) st_data <= pick(ir.out_st, st_data, rdata[3], alu_y, byp_q);
      st_vld <= ir.st_en;
    end
  end

endmodule
