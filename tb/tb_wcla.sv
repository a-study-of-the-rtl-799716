// tb_wcla: self-checking test of one WCLA slice with its data BRAM.
// The testbench plays both the DPM (configuration port) and the processor
// (OPB master), and stands in for the configurable fabric with three
// behavioural "configured circuits". Kernels run:
//   dot product  - Reg0 <- a[i], Reg1 <- b[i*N] (column stride), MAC acc += a*b
//   bit reversal - Reg0 <- in[i], fabric reverses the bits, Reg1 <- fabric,
//                  Reg1 -> out[i] (the paper's brev kernel: wires only)
//   search       - Reg0 <- s[i], the fabric raises its exit line at a zero word
// Checks results, STATUS, iteration and cycle counts, and an OPB access that
// collides with a DPM configuration access.
module tb_wcla;
  import warp_pkg::*;
  localparam int unsigned DEPTH = 512;
  localparam logic [31:0] WB = 32'h8000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  opb_req_t opb_req; opb_rsp_t opb_rsp;
  logic cfg_en, cfg_we; logic [4:0] cfg_addr; logic [31:0] cfg_wdata, cfg_rdata;
  logic mem_en; logic [3:0] mem_we; logic [8:0] mem_addr; logic [31:0] mem_wdata, mem_rdata;
  logic [31:0] fab_in [NCH], fab_out [NCH];
  logic fab_exit, busy, done_o;
  int fab_kernel;
  int checks = 0, failures = 0, n_collide = 0;

  wcla #(.OPB_BASE(WB), .DEPTH(DEPTH)) dut (.*);
  dp_bram #(.DEPTH(DEPTH)) dmem (.clk,
    .a_en(1'b0), .a_we(4'h0), .a_addr('0), .a_wdata('0), .a_rdata(),
    .b_en(mem_en), .b_we(mem_we), .b_addr(mem_addr), .b_wdata(mem_wdata), .b_rdata(mem_rdata));

  function automatic logic [31:0] bitrev(logic [31:0] x);
    for (int i = 0; i < 32; i++) bitrev[i] = x[31 - i];
  endfunction

  // behavioural fabric: the configured circuit of the current kernel
  always_comb begin
    for (int i = 0; i < NCH; i++) fab_out[i] = fab_in[i];
    fab_exit = 1'b0;
    case (fab_kernel)
      1: fab_out[1] = bitrev(fab_in[0]);
      2: fab_exit = (fab_in[0] == 0);
      default: ;
    endcase
  end

  task automatic check(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic dpm_wr(logic [4:0] a, logic [31:0] d);
    @(negedge clk); cfg_en = 1; cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_en = 0; cfg_we = 0;
  endtask

  task automatic opb(input logic [4:0] r, input logic rnw, input logic [31:0] d, output logic [31:0] q);
    int n;
    @(negedge clk); opb_req = '{select: 1'b1, rnw: rnw, abus: WB + 32'(r) * 4, dbus: d};
    n = 0;
    do begin @(negedge clk); n++; end while (!opb_rsp.xfer_ack && n < 50);
    check("opb ack", opb_rsp.xfer_ack);
    q = opb_rsp.dbus; opb_req = '0;
  endtask

  task automatic run_and_wait(int iters, output int polls);
    logic [31:0] q;
    opb(R_ITERS, 0, iters, q);
    opb(R_CTRL, 0, 1, q);
    polls = 0;
    do begin opb(R_STATUS, 1, 0, q); polls++; end while (q[0] && polls < 5000);
    check("done flag", q == 32'h2);
  endtask

  function automatic logic [4:0] ch(int c, int k); return R_CH0 + 5'(4 * c + k); endfunction

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] q, exp;
    int polls, N;
    opb_req = '0; cfg_en = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; fab_kernel = 0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < DEPTH; i++) dmem.mem[i] = $urandom % 1000;
    rst_n = 1;

    // ---- dot product of row 0 of A (words 0..N-1) and column 3 of B (row length N, at 64)
    N = 12;
    exp = 0;
    for (int i = 0; i < N; i++) exp += dmem.mem[i] * dmem.mem[64 + i * N + 3];
    dpm_wr(ch(0, 0), 0);          dpm_wr(ch(0, 1), 4);     dpm_wr(ch(0, 2), 3'b001);
    dpm_wr(ch(1, 0), 4 * (64 + 3)); dpm_wr(ch(1, 1), 4 * N); dpm_wr(ch(1, 2), 3'b001);
    dpm_wr(ch(2, 2), 0);
    dpm_wr(R_MACCFG, {25'd0, 2'd2, 2'd1, 2'd0, 1'b1});
    dpm_wr(R_LOOPCFG, 0);
    @(negedge clk); cfg_addr = R_MACCFG; #1;
    check("DPM reads back MAC config", cfg_rdata == 32'h49);
    opb(R_ACC, 0, 0, q);
    run_and_wait(N, polls);
    opb(R_ACC, 1, 0, q);
    check($sformatf("dot product %0d exp %0d", q, exp), q == exp);
    opb(R_CYCLES, 1, 0, q);
    check($sformatf("dot product cycles %0d exp %0d", q, 4 * N), q == 32'(4 * N));
    opb(R_ITDONE, 1, 0, q);
    check("dot product iterations", q == 32'(N));

    // ---- bit reversal of in[0..N) at word 128 into out at word 256
    N = 40;
    for (int i = 0; i < N; i++) dmem.mem[128 + i] = $urandom;
    fab_kernel = 1;
    dpm_wr(R_MACCFG, 0);
    dpm_wr(ch(0, 0), 4 * 128); dpm_wr(ch(0, 1), 4); dpm_wr(ch(0, 2), 3'b001);
    dpm_wr(ch(1, 0), 4 * 256); dpm_wr(ch(1, 1), 4); dpm_wr(ch(1, 2), 3'b110);
    run_and_wait(N, polls);
    for (int i = 0; i < N; i++)
      check($sformatf("brev word %0d", i), dmem.mem[256 + i] == bitrev(dmem.mem[128 + i]));
    opb(R_CYCLES, 1, 0, q);
    check($sformatf("brev cycles %0d", q), q == 32'(4 * N));

    // ---- search for a zero word (loop ended by the fabric)
    for (int i = 0; i < 30; i++) dmem.mem[320 + i] = 1 + i;
    dmem.mem[320 + 17] = 0;
    fab_kernel = 2;
    dpm_wr(ch(1, 2), 0);
    dpm_wr(ch(0, 0), 4 * 320);
    dpm_wr(R_LOOPCFG, 1);
    run_and_wait(1000, polls);
    opb(R_ITDONE, 1, 0, q);
    check($sformatf("search stops after the zero word: %0d", q), q == 18);
    opb(ch(0, 3), 1, 0, q);
    check("Reg0 holds the zero word", q == 0);

    // ---- an OPB access colliding with DPM configuration accesses
    @(negedge clk);
    opb_req = '{select: 1'b1, rnw: 1'b1, abus: WB + 4 * 32'(R_ITDONE), dbus: 0};
    cfg_en = 1; cfg_we = 0; cfg_addr = R_ITERS;
    @(negedge clk);
    check("OPB waits while the DPM uses the registers", !opb_rsp.xfer_ack);
    n_collide++;
    cfg_en = 0;
    @(negedge clk);
    check("OPB served after the DPM", opb_rsp.xfer_ack && opb_rsp.dbus == 18);
    opb_req = '0;

    // ---- start while busy is ignored; zero iterations finish at once
    fab_kernel = 0;
    dpm_wr(R_LOOPCFG, 0);
    opb(R_ITERS, 0, 0, q);
    opb(R_CTRL, 0, 1, q);
    opb(R_STATUS, 1, 0, q);
    check("zero iterations: done at once", q == 32'h2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
