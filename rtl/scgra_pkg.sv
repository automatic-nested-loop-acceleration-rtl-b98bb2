// scgra_pkg: types and constants shared by the SCGRA overlay.
//
// The overlay is a statically scheduled array of processing elements (PEs).
// Every PE executes one control word per clock cycle from its own instruction
// memory; a word says what the ALU computes, what is written into the data
// memory and what each of the four neighbour outputs and the store output
// carries. The format of that word (pe_inst_t below), the operation set and
// the data width are this design's own choices: the published overlay names
// the parts of a PE but not their encodings.
package scgra_pkg;

  // Data width W0 and data-memory depth D0 (not given numerically; chosen).
  localparam int unsigned DATA_W     = 32;
  localparam int unsigned DMEM_DEPTH = 256;
  localparam int unsigned DMEM_AW    = $clog2(DMEM_DEPTH);

  // Three-operand ALU operations a, b, c -> y.
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,   // y keeps its value
    OP_ADD     = 4'd1,   // a + b
    OP_SUB     = 4'd2,   // a - b
    OP_MUL     = 4'd3,   // a * b (low DATA_W bits)
    OP_MADD    = 4'd4,   // a * b + c
    OP_MSUB    = 4'd5,   // c - a * b
    OP_ADD3    = 4'd6,   // a + b + c
    OP_ABS     = 4'd7,   // |a|
    OP_ABSDIFF = 4'd8,   // |a - b|
    OP_SHL     = 4'd9,   // a << b[4:0]
    OP_SHR     = 4'd10,  // a >>> b[4:0] (arithmetic)
    OP_AND     = 4'd11,  // a & b
    OP_MIN     = 4'd12,  // signed min(a, b)
    OP_MAX     = 4'd13,  // signed max(a, b)
    OP_LT      = 4'd14,  // (a < b) ? 1 : 0, signed
    OP_SEL     = 4'd15   // (a != 0) ? b : c
  } alu_op_e;

  // Source of the value written into the data memory by the input path.
  typedef enum logic [2:0] {
    IN_LOAD = 3'd0,      // Load bus from the input buffer
    IN_N    = 3'd1,
    IN_E    = 3'd2,
    IN_S    = 3'd3,
    IN_W    = 3'd4
  } in_src_e;

  // Neighbour direction, used by the bypass mux.
  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_E = 2'd1,
    DIR_S = 2'd2,
    DIR_W = 2'd3
  } dir_e;

  // What an output register (N/E/S/W/Store) takes.
  typedef enum logic [1:0] {
    OUT_HOLD = 2'd0,     // keep the previous value
    OUT_DMEM = 2'd1,     // data memory read port 3 (address src3)
    OUT_ALU  = 2'd2,     // ALU result register
    OUT_BYP  = 2'd3      // bypass register
  } out_sel_e;

  // Data-memory write source.
  typedef enum logic {
    WS_IN  = 1'b0,       // input path (Load or a neighbour)
    WS_ALU = 1'b1        // ALU result register
  } wsel_e;

  // One control word, executed in one cycle.
  typedef struct packed {
    alu_op_e              op;
    logic [DMEM_AW-1:0]   src0;     // ALU operand a
    logic [DMEM_AW-1:0]   src1;     // ALU operand b
    logic [DMEM_AW-1:0]   src2;     // ALU operand c
    logic                 wen;      // data memory write
    wsel_e                wsel;
    in_src_e              in_sel;
    logic [DMEM_AW-1:0]   dst;
    dir_e                 byp_sel;  // bypass register source
    logic [DMEM_AW-1:0]   src3;     // read port for the outputs
    out_sel_e             out_n;
    out_sel_e             out_e;
    out_sel_e             out_s;
    out_sel_e             out_w;
    out_sel_e             out_st;   // value stored when st_en
    logic                 st_en;    // store towards the output buffer
  } pe_inst_t;

  localparam int unsigned INST_W = $bits(pe_inst_t);   // 62

  localparam pe_inst_t INST_NOP = '{op: OP_NOP, wsel: WS_IN, in_sel: IN_LOAD,
                                    byp_sel: DIR_N, out_n: OUT_HOLD, out_e: OUT_HOLD,
                                    out_s: OUT_HOLD, out_w: OUT_HOLD, out_st: OUT_HOLD,
                                    default: '0};

endpackage
