// dadg_lch: data address generator (DADG) with loop control hardware (LCH).
//
// In the paper's WCLA this unit performs every memory access of the hardware
// loop, through the second port of the processor's data BRAM, and controls how
// often the loop runs. It handles regular access patterns: each array the loop
// uses is tied to one of the registers Reg0-Reg2 and walked with a fixed
// stride. The paper gives that function, not the circuit; this is a simple
// sequential implementation of it.
//
// Per channel c (one per register) the configuration gives a base byte
// address, a signed byte stride and a mode: M_RD (load Reg c from memory at the
// start of each iteration), M_FAB (load Reg c from the fabric's result bus),
// M_WR (store Reg c at the end of each iteration). One iteration is:
//   RD   one cycle per read channel, lowest first, issuing the BRAM read; the
//        data is loaded into the register one cycle later, so the phase lasts
//        (reads + 1) cycles, and 1 cycle when there are no reads;
//   EXEC one cycle: the MAC stage steps (step = 1) and registers in M_FAB mode
//        capture the fabric's outputs; the fabric's exit line is sampled;
//   WR   one cycle per write channel, lowest first.
// So an iteration takes reads + writes + 2 cycles. After the last access every
// channel's address advances by its stride and the iteration counter counts
// down. The loop ends after `iters` iterations, or, when exit_on_fab is set,
// after the iteration in which the fabric raised fab_exit (a data-dependent
// loop exit, the fabric-to-LCH line of the paper's figure). iters = 0 ends at
// once. done pulses for one cycle as busy falls; iter_count and cycles then
// hold the number of iterations run and of busy cycles.
module dadg_lch
  import warp_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,           // words in the data BRAM
  localparam int unsigned BAW  = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration and control
  input  logic            start,
  input  logic [DW-1:0]   iters,
  input  logic            exit_on_fab,
  input  logic [AW-1:0]   base   [NCH],
  input  logic [AW-1:0]   stride [NCH],
  input  logic [2:0]      mode   [NCH],
  output logic            busy,
  output logic            done,
  output logic [DW-1:0]   iter_count,
  output logic [DW-1:0]   cycles,
  // data BRAM port
  output logic            mem_en,
  output logic [3:0]      mem_we,
  output logic [BAW-1:0]  mem_addr,
  output logic [DW-1:0]   mem_wdata,
  // register control
  output logic            mem_ld [NCH],
  output logic            fab_ld [NCH],
  input  logic [DW-1:0]   reg_q  [NCH],
  output logic            step,
  // fabric
  input  logic            fab_exit
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_EXEC, S_WR} state_t;

  state_t          state, state_n;
  logic [AW-1:0]   addr [NCH];
  logic [DW-1:0]   remain;
  logic [NCH-1:0]  rd_mask, wr_mask, rd_all, wr_all;
  logic            pend;
  logic [1:0]      pend_ch;
  logic            stop_q;

  // combinational decisions
  logic            issue_rd, issue_wr, advance, finish, stop_now;
  logic [1:0]      rd_ch, wr_ch;
  logic [NCH-1:0]  rd_left, wr_left;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      rd_all[c] = mode[c][M_RD];
      wr_all[c] = mode[c][M_WR];
    end
    rd_ch = 2'd0;
    for (int c = NCH - 1; c >= 0; c--) if (rd_mask[c]) rd_ch = 2'(c);
    wr_ch = 2'd0;
    for (int c = NCH - 1; c >= 0; c--) if (wr_mask[c]) wr_ch = 2'(c);
    rd_left = rd_mask & ~(NCH'(1) << rd_ch);
    wr_left = wr_mask & ~(NCH'(1) << wr_ch);

    issue_rd = (state == S_RD) && (rd_mask != '0);
    issue_wr = (state == S_WR);
    stop_now = (state == S_EXEC) ? (exit_on_fab && fab_exit) : stop_q;
    advance  = ((state == S_EXEC) && (wr_mask == '0)) ||
               ((state == S_WR) && (wr_left == '0));
    finish   = advance && (stop_now || remain == DW'(1));

    state_n = state;
    case (state)
      S_IDLE: if (start && iters != '0) state_n = S_RD;
      S_RD:   if (rd_mask == '0) state_n = S_EXEC;
      S_EXEC: state_n = (wr_mask == '0) ? (finish ? S_IDLE : S_RD) : S_WR;
      S_WR:   if (wr_left == '0) state_n = finish ? S_IDLE : S_RD;
      default: state_n = S_IDLE;
    endcase

    mem_en    = issue_rd || issue_wr;
    mem_we    = issue_wr ? 4'hF : 4'h0;
    mem_addr  = issue_wr ? addr[wr_ch][BAW+1:2] : addr[rd_ch][BAW+1:2];
    mem_wdata = reg_q[wr_ch];
    for (int c = 0; c < NCH; c++) begin
      mem_ld[c] = pend && (int'(pend_ch) == c);
      fab_ld[c] = (state == S_EXEC) && mode[c][M_FAB];
    end
    step = (state == S_EXEC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      for (int c = 0; c < NCH; c++) addr[c] <= '0;
      remain     <= '0;
      rd_mask    <= '0;
      wr_mask    <= '0;
      pend       <= 1'b0;
      pend_ch    <= '0;
      stop_q     <= 1'b0;
      done       <= 1'b0;
      iter_count <= '0;
      cycles     <= '0;
    end else begin
      state <= state_n;
      done  <= 1'b0;
      pend  <= issue_rd;
      if (issue_rd) pend_ch <= rd_ch;
      if (state != S_IDLE) cycles <= cycles + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          for (int c = 0; c < NCH; c++) addr[c] <= base[c];
          remain     <= iters;
          rd_mask    <= rd_all;
          wr_mask    <= wr_all;
          stop_q     <= 1'b0;
          iter_count <= '0;
          cycles     <= '0;
          if (iters == '0) done <= 1'b1;
        end
        S_RD:   if (issue_rd) rd_mask <= rd_left;
        S_EXEC: stop_q <= stop_now;
        S_WR:   wr_mask <= wr_left;
        default: ;
      endcase
      if (advance) begin
        for (int c = 0; c < NCH; c++) addr[c] <= addr[c] + stride[c];
        remain     <= remain - 1'b1;
        iter_count <= iter_count + 1'b1;
        rd_mask    <= rd_all;
        wr_mask    <= wr_all;
        if (finish) done <= 1'b1;
      end
    end
  end

  assign busy = (state != S_IDLE);

  // the configuration must not name a register for both memory and fabric loads
  // in a way that needs both in one cycle: memory loads happen only in RD,
  // fabric loads only in EXEC
  a_ld_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(mem_ld[0] && fab_ld[0]) && !(mem_ld[1] && fab_ld[1]) && !(mem_ld[2] && fab_ld[2]));

endmodule
