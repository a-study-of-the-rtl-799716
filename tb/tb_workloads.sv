// tb_workloads: the two evaluated kernels whose loops are known, run whole on
// the default single-processor system.
//   matmul - C = A x B for 16x16 word matrices. Each element of C is one WCLA
//            run: Reg0 walks a row of A (stride 4), Reg1 a column of B
//            (stride 64), the MAC accumulates, and the fabric (here plain
//            wires) returns the running sum to Reg2, which is stored to C[i][j]
//            every iteration (stride 0), so C[i][j] ends as the dot product.
//            5 cycles per iteration: 2 reads + 1 write + 2.
//   brev   - in-place bit reversal of a 1024-word array: Reg0 reads a word,
//            the fabric (wires only) reverses it, Reg0 is written back.
//            4 cycles per word: 1 read + 1 write + 2.
// The processor side is a bus model: it fills the arrays over d_lmb, sets
// the run-time bases and starts each run over the OPB, and reads the results
// back over d_lmb. The DPM side writes the static configuration. Matrix
// sizes are this test's choice (the evaluated programs' sizes are not known);
// together they use 768 + 1024 of the 2048 data words.
module tb_workloads;
  import warp_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned A0 = 0, B0 = 256, C0 = 512, V0 = 1024, NV = 1024;
  localparam logic [31:0] WB = 32'h8000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lmb_req_t i_lmb_req [1]; lmb_rsp_t i_lmb_rsp [1];
  lmb_req_t d_lmb_req [1]; lmb_rsp_t d_lmb_rsp [1];
  opb_req_t opb_req [1];   opb_rsp_t opb_rsp [1];
  logic prof_enable, prof_clear;
  logic [0:0] prof_core; logic [3:0] prof_idx; prof_entry_t prof_entry;
  logic bi_sel_we; logic [0:0] bi_sel_in, bi_sel; logic bi_en; logic [3:0] bi_we;
  logic [10:0] bi_addr; logic [31:0] bi_wdata, bi_rdata;
  logic [0:0] wc_core; logic wc_en, wc_we; logic [4:0] wc_addr; logic [31:0] wc_wdata, wc_rdata;
  logic [31:0] fab_in [1][NCH]; logic [31:0] fab_out [1][NCH]; logic fab_exit [1];
  logic wcla_busy [1], wcla_done [1];
  logic prof_bb_event [1], prof_bb_hit [1], prof_bb_halved [1];

  warp_processor dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // fabric: 0 = wires straight through, 1 = bit reversal of operand 0
  int kernel;
  function automatic logic [31:0] bitrev(logic [31:0] x);
    for (int i = 0; i < 32; i++) bitrev[i] = x[31 - i];
  endfunction
  always_comb begin
    for (int i = 0; i < NCH; i++) fab_out[0][i] = fab_in[0][i];
    fab_out[0][0] = (kernel == 1) ? bitrev(fab_in[0][0]) : fab_in[0][0];
    fab_exit[0] = 1'b0;
  end

  task automatic dwrite(logic [31:0] w, logic [31:0] d);
    @(negedge clk);
    d_lmb_req[0] = '{abus: 4 * w, wdbus: d, be: 4'hF, addr_strobe: 1'b1, read_strobe: 1'b0, write_strobe: 1'b1};
    @(negedge clk); d_lmb_req[0] = '0;
  endtask
  task automatic dread(logic [31:0] w, output logic [31:0] q);
    @(negedge clk);
    d_lmb_req[0] = '{abus: 4 * w, wdbus: 0, be: 4'hF, addr_strobe: 1'b1, read_strobe: 1'b1, write_strobe: 1'b0};
    @(negedge clk); d_lmb_req[0] = '0;
    q = d_lmb_rsp[0].dbus;
  endtask
  task automatic opb(input logic [4:0] r, input logic rnw, input logic [31:0] d, output logic [31:0] q);
    int n;
    @(negedge clk); opb_req[0] = '{select: 1'b1, rnw: rnw, abus: WB + 32'(r) * 4, dbus: d};
    n = 0;
    do begin @(negedge clk); n++; end while (!opb_rsp[0].xfer_ack && n < 50);
    q = opb_rsp[0].dbus; opb_req[0] = '0;
  endtask
  task automatic run(int iters, output int cyc);
    logic [31:0] q;
    opb(R_ITERS, 0, iters, q);
    opb(R_CTRL, 0, 1, q);
    do opb(R_STATUS, 1, 0, q); while (q[0]);
    opb(R_CYCLES, 1, 0, q);
    cyc = int'(q);
  endtask
  task automatic wc_write(logic [4:0] a, logic [31:0] d);
    @(negedge clk); wc_en = 1; wc_we = 1; wc_addr = a; wc_wdata = d;
    @(negedge clk); wc_en = 0; wc_we = 0;
  endtask
  function automatic logic [4:0] ch(int c, int k); return R_CH0 + 5'(4 * c + k); endfunction

  initial begin
    #100ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] a [N][N], b [N][N], v [NV], q, e;
    int cyc, total;
    i_lmb_req[0] = '0; d_lmb_req[0] = '0; opb_req[0] = '0; kernel = 0;
    prof_enable = 0; prof_clear = 0; prof_core = 0; prof_idx = 0;
    bi_sel_we = 0; bi_sel_in = 0; bi_en = 0; bi_we = 0; bi_addr = 0; bi_wdata = 0;
    wc_core = 0; wc_en = 0; wc_we = 0; wc_addr = 0; wc_wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---------------- matmul ----------------
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        a[i][j] = $urandom % 50000; b[i][j] = $urandom;
        dwrite(A0 + i * N + j, a[i][j]); dwrite(B0 + i * N + j, b[i][j]);
      end
    wc_write(ch(0, 1), 4);      wc_write(ch(0, 2), 3'b001);
    wc_write(ch(1, 1), 4 * N);  wc_write(ch(1, 2), 3'b001);
    wc_write(ch(2, 1), 0);      wc_write(ch(2, 2), 3'b110);
    wc_write(R_MACCFG, {25'd0, 2'd2, 2'd1, 2'd0, 1'b1});
    wc_write(R_LOOPCFG, 0);
    total = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        opb(R_ACC, 0, 0, q);
        opb(ch(0, 0), 0, 4 * (A0 + i * N), q);
        opb(ch(1, 0), 0, 4 * (B0 + j), q);
        opb(ch(2, 0), 0, 4 * (C0 + i * N + j), q);
        run(N, cyc);
        total += cyc;
        check("matmul element cycles = N * 5", cyc == 5 * N);
      end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        e = 0;
        for (int k = 0; k < N; k++) e += a[i][k] * b[k][j];
        dread(C0 + i * N + j, q);
        check($sformatf("C[%0d][%0d] = %h, expected %h", i, j, q, e), q == e);
      end
    $display("matmul %0dx%0d: %0d WCLA cycles", N, N, total);

    // ---------------- brev ----------------
    for (int i = 0; i < NV; i++) begin v[i] = $urandom; dwrite(V0 + i, v[i]); end
    kernel = 1;
    wc_write(R_MACCFG, 0);
    wc_write(ch(0, 1), 4);  wc_write(ch(0, 2), 3'b111);
    wc_write(ch(1, 2), 0);  wc_write(ch(2, 2), 0);
    opb(ch(0, 0), 0, 4 * V0, q);
    run(NV, cyc);
    check("brev cycles = 1024 * 4", cyc == 4 * NV);
    for (int i = 0; i < NV; i++) begin
      dread(V0 + i, q);
      check($sformatf("brev word %0d", i), q == bitrev(v[i]));
    end
    $display("brev %0d words: %0d WCLA cycles", NV, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
