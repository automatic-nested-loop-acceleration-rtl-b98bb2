// acc_ctrl: accelerator controller (AccCtrl), array-clock domain.
//
// Runs one group: the DFG schedule of len control words is executed n_dfg
// times back to back, consuming n_ld input words and producing n_st output
// words. On start it clears its counters and enters PREFETCH, where it reads
// input addresses from IAddrBuf in order, reads the addressed words from IBuf
// and queues them in a FIFO_DEPTH-entry FIFO whose head is the Load bus.
// Both RAMs read synchronously, so a word reaches the FIFO two cycles after
// its IAddrBuf read; reads are issued while the FIFO plus the words in flight
// leave room, which sustains one load per cycle. When the FIFO is full (or all
// loads are queued) it enters RUN and pulses pe_start every len cycles, n_dfg
// times, so RUN lasts exactly n_dfg*len cycles (counted in run_cycles). Each
// store of the array is written to OBuf at the next address of OAddrBuf,
// which is read ahead so that a store per cycle is possible. DRAIN waits
// DRAIN_CYC cycles for the last word of the schedule to leave the PEs, then
// raises done.
// err[0]: a PE loaded while the FIFO was empty (schedule ran ahead of the
// data); err[1]: the number of stores differed from n_st; err[2]: two PEs
// stored in one cycle. Errors and done are sticky until the next start.
// The paper gives the controller's role (start/stop of all PEs, memory
// transfers) and the address buffers; the FSM, the prefetch FIFO and the
// timing are this design's own.
module acc_ctrl
  import scgra_pkg::*;
#(
  parameter int unsigned BUF_AW     = 12,
  parameter int unsigned IMEM_AW    = 10,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned DRAIN_CYC  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       n_dfg,
  input  logic [IMEM_AW:0]  len,
  input  logic [BUF_AW:0]   n_ld,
  input  logic [BUF_AW:0]   n_st,
  // IAddrBuf / IBuf read ports
  output logic              iaddr_re,
  output logic [BUF_AW-1:0] iaddr_raddr,
  input  logic [BUF_AW-1:0] iaddr_rdata,
  output logic              ibuf_re,
  output logic [BUF_AW-1:0] ibuf_raddr,
  input  logic [DATA_W-1:0] ibuf_rdata,
  // OAddrBuf read port, OBuf write port
  output logic [BUF_AW-1:0] oaddr_raddr,
  input  logic [BUF_AW-1:0] oaddr_rdata,
  output logic              obuf_we,
  output logic [BUF_AW-1:0] obuf_waddr,
  output logic [DATA_W-1:0] obuf_wdata,
  // SCGRA array
  output logic              pe_start,
  output logic [IMEM_AW:0]  pe_len,
  output logic [DATA_W-1:0] ld_data,
  input  logic              ld_pop,
  input  logic              st_vld,
  input  logic [DATA_W-1:0] st_data,
  input  logic              st_conflict,
  // status
  output logic              busy,
  output logic              done,
  output logic [2:0]        err,
  output logic [31:0]       run_cycles
);

  typedef enum logic [1:0] {S_IDLE, S_PREFETCH, S_RUN, S_DRAIN} state_e;

  localparam int unsigned FAW = $clog2(FIFO_DEPTH);

  state_e            state;
  logic [IMEM_AW:0]  step;
  logic [15:0]       dfg_cnt;
  logic [3:0]        dcnt;
  logic [BUF_AW:0]   ld_issued, st_cnt;
  logic              v1, v2;
  logic [FAW:0]      fifo_cnt;
  logic [FAW-1:0]    rd_ptr, wr_ptr;
  logic [DATA_W-1:0] fifo [FIFO_DEPTH];
  logic              issue, push, pop, loads_queued, last_step;

  // ---------------------------------------------------------------- loads
  assign issue = (state != S_IDLE) && (ld_issued < n_ld) &&
                 ((fifo_cnt + (FAW+1)'(v1) + (FAW+1)'(v2)) < (FAW+1)'(FIFO_DEPTH));
  assign iaddr_re    = issue;
  assign iaddr_raddr = ld_issued[BUF_AW-1:0];
  assign ibuf_re     = v1;
  assign ibuf_raddr  = iaddr_rdata;
  assign push        = v2;
  assign pop         = ld_pop && (fifo_cnt != '0);
  assign ld_data     = fifo[rd_ptr];
  assign loads_queued = (ld_issued == n_ld) && !v1 && !v2;

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= ibuf_rdata;
  end

  // --------------------------------------------------------------- stores
  assign oaddr_raddr = st_vld ? st_cnt[BUF_AW-1:0] + 1'b1 : st_cnt[BUF_AW-1:0];
  assign obuf_we     = st_vld;
  assign obuf_waddr  = oaddr_rdata;
  assign obuf_wdata  = st_data;

  assign pe_len    = len;
  assign last_step = ({1'b0, step} + 1'b1) >= {1'b0, len};
  assign busy      = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      step       <= '0;
      dfg_cnt    <= '0;
      dcnt       <= '0;
      ld_issued  <= '0;
      st_cnt     <= '0;
      v1         <= 1'b0;
      v2         <= 1'b0;
      fifo_cnt   <= '0;
      rd_ptr     <= '0;
      wr_ptr     <= '0;
      pe_start   <= 1'b0;
      done       <= 1'b0;
      err        <= '0;
      run_cycles <= '0;
    end else begin
      pe_start <= 1'b0;
      v1       <= issue;
      v2       <= v1;
      if (issue) ld_issued <= ld_issued + 1'b1;
      if (push) wr_ptr <= (wr_ptr == FAW'(FIFO_DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == FAW'(FIFO_DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      fifo_cnt <= fifo_cnt + (FAW+1)'(push) - (FAW+1)'(pop);
      if (ld_pop && fifo_cnt == '0) err[0] <= 1'b1;
      if (st_vld) begin
        st_cnt <= st_cnt + 1'b1;
        if (st_cnt >= n_st) err[1] <= 1'b1;
      end
      if (st_conflict) err[2] <= 1'b1;

      unique case (state)
        S_IDLE: begin
          if (start) begin
            state     <= S_PREFETCH;
            ld_issued <= '0;
            st_cnt    <= '0;
            fifo_cnt  <= '0;
            rd_ptr    <= '0;
            wr_ptr    <= '0;
            v1        <= 1'b0;
            v2        <= 1'b0;
            done      <= 1'b0;
            err       <= '0;
            run_cycles <= '0;
          end
        end
        S_PREFETCH: begin
          if (n_dfg == '0) begin
            state <= S_DRAIN;
            dcnt  <= '0;
          end else if (fifo_cnt == (FAW+1)'(FIFO_DEPTH) || loads_queued) begin
            state    <= S_RUN;
            pe_start <= 1'b1;
            step     <= '0;
            dfg_cnt  <= '0;
          end
        end
        S_RUN: begin
          run_cycles <= run_cycles + 1'b1;
          if (last_step) begin
            step <= '0;
            if (dfg_cnt + 1'b1 >= n_dfg) begin
              state <= S_DRAIN;
              dcnt  <= '0;
            end else begin
              pe_start <= 1'b1;
              dfg_cnt  <= dfg_cnt + 1'b1;
            end
          end else begin
            step <= step + 1'b1;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 4'(DRAIN_CYC - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
            if ((st_vld ? st_cnt + 1'b1 : st_cnt) != n_st) err[1] <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   ld_pop |-> fifo_cnt != '0)
    else $warning("acc_ctrl: load with an empty input FIFO (err[0] set)");
  a_fifo_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                 fifo_cnt <= (FAW+1)'(FIFO_DEPTH));

endmodule
