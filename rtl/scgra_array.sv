// scgra_array: ROWS x COLS processing elements connected as a 2-D torus.
//
// PE(i,j) takes N from PE(i-1,j).s_out, S from PE(i+1,j).n_out, W from
// PE(i,j-1).e_out and E from PE(i,j+1).w_out, with row and column indices
// taken modulo ROWS and COLS (the wrap-around links of the torus). All PEs
// share the global start pulse and the schedule length. The overlay has a
// single input and a single output towards its buffers: the Load bus is
// broadcast to every PE, and ld_pop is high when any PE takes the word this
// cycle; the PEs' store registers are merged into one stream, with at most one
// PE storing per cycle (st_conflict flags a schedule that breaks this, an
// assertion warns, and the controller turns it into a sticky error flag).
// PE index p = i*COLS + j addresses the control-word loading port. Latency
// is that of the PE: outputs are registered.
// The torus, the shared start and the single IO follow the paper; the index
// order and the merging of stores are this design's choice.
module scgra_array
  import scgra_pkg::*;
#(
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned IMEM_AW    = $clog2(IMEM_DEPTH),
  parameter int unsigned NPE        = ROWS * COLS,
  parameter int unsigned PE_AW      = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_clk,
  input  logic               imem_we,
  input  logic [PE_AW-1:0]   imem_pe,
  input  logic [IMEM_AW-1:0] imem_waddr,
  input  logic [INST_W-1:0]  imem_wdata,
  input  logic               start,
  input  logic [IMEM_AW:0]   len,
  input  logic [DATA_W-1:0]  ld_data,
  output logic               ld_pop,
  output logic [DATA_W-1:0]  st_data,
  output logic               st_vld,
  output logic               st_conflict
);

  logic [DATA_W-1:0] n_o [ROWS][COLS];
  logic [DATA_W-1:0] e_o [ROWS][COLS];
  logic [DATA_W-1:0] s_o [ROWS][COLS];
  logic [DATA_W-1:0] w_o [ROWS][COLS];
  logic [NPE-1:0]    ld_en, st_v;
  logic [DATA_W-1:0] st_d [NPE];

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      localparam int unsigned UP = (i + ROWS - 1) % ROWS;
      localparam int unsigned DN = (i + 1) % ROWS;
      localparam int unsigned LF = (j + COLS - 1) % COLS;
      localparam int unsigned RT = (j + 1) % COLS;
      localparam int unsigned P  = i * COLS + j;
      pe #(.IMEM_DEPTH(IMEM_DEPTH)) u_pe (
        .clk, .rst_n, .cfg_clk,
        .imem_we    (imem_we && imem_pe == PE_AW'(P)),
        .imem_waddr, .imem_wdata,
        .start, .len,
        .ld_data, .ld_en (ld_en[P]),
        .st_data (st_d[P]), .st_vld (st_v[P]),
        .n_in (s_o[UP][j]), .e_in (w_o[i][RT]), .s_in (n_o[DN][j]), .w_in (e_o[i][LF]),
        .n_out (n_o[i][j]), .e_out (e_o[i][j]), .s_out (s_o[i][j]), .w_out (w_o[i][j])
      );
    end
  end

  always_comb begin
    st_data = '0;
    for (int p = 0; p < NPE; p++) begin
      if (st_v[p]) st_data = st_data | st_d[p];
    end
  end

  assign ld_pop      = |ld_en;
  assign st_vld      = |st_v;
  assign st_conflict = (st_v & (st_v - 1'b1)) != '0;

  a_single_store: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(st_v))
    else $warning("scgra_array: more than one PE stored in one cycle");

endmodule
