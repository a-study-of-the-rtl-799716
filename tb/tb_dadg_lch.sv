// tb_dadg_lch: self-checking test of the data address generator with loop
// control. The unit runs loops against a data BRAM, Reg0-Reg2 and a small
// behavioural stand-in for a configured fabric (a fixed arithmetic function
// of the registers, with a data-dependent exit condition). Random channel
// modes, bases, strides and iteration counts; after each run the memory,
// the registers, the iteration count and the cycle count
// (iterations * (reads + writes + 2)) are compared with a reference model.
module tb_dadg_lch;
  import warp_pkg::*;
  localparam int unsigned DEPTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, exit_on_fab, busy, done, step, fab_exit;
  logic [31:0] iters, iter_count, cycles;
  logic [31:0] base [NCH], stride [NCH];
  logic [2:0]  mode [NCH];
  logic        mem_en; logic [3:0] mem_we; logic [7:0] mem_addr; logic [31:0] mem_wdata, mem_rdata;
  logic        mem_ld [NCH], fab_ld [NCH];
  logic [31:0] reg_q [NCH], fab_out [NCH];
  logic        no_cfg [NCH];
  int checks = 0, failures = 0;
  int n_exit = 0, n_count_end = 0, n_zero = 0;

  dadg_lch #(.DEPTH(DEPTH)) dut (.*);
  dp_bram #(.DEPTH(DEPTH)) mem (.clk,
    .a_en(mem_en), .a_we(mem_we), .a_addr(mem_addr), .a_wdata(mem_wdata), .a_rdata(mem_rdata),
    .b_en(1'b0), .b_we(4'h0), .b_addr('0), .b_wdata('0), .b_rdata());
  wcla_regs regs (.clk, .rst_n, .cfg_we(no_cfg), .cfg_data('0), .mem_ld, .mem_data(mem_rdata),
    .fab_ld, .fab_data(fab_out), .q(reg_q));

  // behavioural fabric
  function automatic logic [31:0] fab_f(int i, logic [31:0] r0, logic [31:0] r1, logic [31:0] r2);
    return (r0 * 3 + r1) ^ (r2 + 32'(i));
  endfunction
  always_comb begin
    for (int i = 0; i < NCH; i++) fab_out[i] = fab_f(i, reg_q[0], reg_q[1], reg_q[2]);
    fab_exit = (reg_q[0][3:0] == 4'd0);
  end

  logic [31:0] m_mem [DEPTH];
  logic [31:0] m_reg [NCH];

  task automatic check(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; exit_on_fab = 0; iters = 0;
    for (int c = 0; c < NCH; c++) begin base[c] = 0; stride[c] = 0; mode[c] = 0; no_cfg[c] = 0; m_reg[c] = 0; end
    repeat (2) @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin mem.mem[i] = $urandom; m_mem[i] = mem.mem[i]; end
    rst_n = 1;
    for (int run = 0; run < 150; run++) begin
      int nr, nw, it, t0, exp_iters;
      logic [31:0] a [NCH];
      logic stop;
      nr = 0; nw = 0;
      for (int c = 0; c < NCH; c++) begin
        mode[c]   = 3'($urandom);
        base[c]   = 4 * (96 + $urandom % 64);
        stride[c] = 4 * ($urandom % 5) - 8;
        nr += int'(mode[c][M_RD]); nw += int'(mode[c][M_WR]);
      end
      iters = (run % 25 == 7) ? 0 : 1 + $urandom % 20;
      exit_on_fab = 1'($urandom);
      // reference
      for (int c = 0; c < NCH; c++) a[c] = base[c];
      exp_iters = 0; stop = 0;
      for (int k = 0; k < int'(iters) && !stop; k++) begin
        logic [31:0] f [NCH];
        for (int c = 0; c < NCH; c++) if (mode[c][M_RD]) m_reg[c] = m_mem[a[c][9:2]];
        for (int c = 0; c < NCH; c++) f[c] = fab_f(c, m_reg[0], m_reg[1], m_reg[2]);
        stop = exit_on_fab && (m_reg[0][3:0] == 0);
        for (int c = 0; c < NCH; c++) if (mode[c][M_FAB]) m_reg[c] = f[c];
        for (int c = 0; c < NCH; c++) if (mode[c][M_WR]) m_mem[a[c][9:2]] = m_reg[c];
        for (int c = 0; c < NCH; c++) a[c] += stride[c];
        exp_iters++;
      end
      if (iters == 0) n_zero++; else if (exp_iters < int'(iters)) n_exit++; else n_count_end++;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      t0 = 0;
      while (!done) begin @(negedge clk); t0++; if (t0 > 2000) break; end
      check("busy ends", !busy || iters == 0);
      check($sformatf("run %0d iterations %0d exp %0d", run, iter_count, exp_iters), iter_count == 32'(exp_iters));
      check($sformatf("run %0d cycles %0d exp %0d", run, cycles, exp_iters * (nr + nw + 2)),
            cycles == 32'(exp_iters * (nr + nw + 2)));
      for (int c = 0; c < NCH; c++) check($sformatf("run %0d reg%0d", run, c), reg_q[c] == m_reg[c]);
      for (int i = 0; i < DEPTH; i++)
        if (mem.mem[i] != m_mem[i]) begin check($sformatf("run %0d mem[%0d]", run, i), 0); break; end
      checks++;
    end
    check("loops ended by the fabric", n_exit > 0);
    check("loops ended by the count", n_count_end > 0);
    check("zero-iteration loops", n_zero > 0);
    $display("exit=%0d count=%0d zero=%0d", n_exit, n_count_end, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
