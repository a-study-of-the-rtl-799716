// tb_warp_processor_mp: end-to-end test of the two-processor warp system.
// Same sequence as tb_warp_processor, run on both cores at once: they share
// one DPM (and so the BRAM Interface, which switches between their
// instruction memories, and the WCLA configuration port).
//
// The testbench stands in for the three parts outside the RTL: the MicroBlaze
// (replaying instruction-fetch traces on i_lmb, data accesses on d_lmb and
// OPB transfers, as the patched software would issue them), the dynamic
// partitioning module (reading the profiler, reading and patching the binary
// through the BRAM Interface, configuring the WCLA) and the configurable
// fabric (behavioural circuits for the kernels it would hold).
// The warp sequence for every core:
//   1. the binary is loaded through the BRAM Interface, input arrays through d_lmb;
//   2. software phase: a trace with a hot inner loop (run more than 65535
//      times, so the profiler's counters saturate and are halved), a second
//      loop and more distinct loops than the profiler has entries;
//   3. the DPM picks the most frequent backward branch, checks it is the hot
//      loop, reads the loop's code and patches its first instruction; the
//      processor's next fetch of it must see the patch;
//   4. hardware phase: dot product (DADG reads with two strides, MAC),
//      bit reversal (fabric result bus, DADG writes) and a zero-word search
//      (loop ended by the fabric), each started and polled over the OPB;
//      results are read back over d_lmb / OPB and compared with a model;
//      cycle counts are checked against iterations * (reads + writes + 2);
//   5. an OPB access colliding with a DPM configuration access.
// Every mechanism is counted; one that never happened counts as a failure.
module tb_warp_processor_mp;
  import warp_pkg::*;
  localparam int unsigned NC = 2;
  localparam int unsigned IMEM = 2048, DMEM = 2048;
  localparam logic [31:0] WB = 32'h8000_0000;
  localparam int unsigned HOT_ITERS = 66000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lmb_req_t i_lmb_req [NC]; lmb_rsp_t i_lmb_rsp [NC];
  lmb_req_t d_lmb_req [NC]; lmb_rsp_t d_lmb_rsp [NC];
  opb_req_t opb_req [NC];   opb_rsp_t opb_rsp [NC];
  logic prof_enable, prof_clear;
  logic [0:0] prof_core; logic [3:0] prof_idx; prof_entry_t prof_entry;
  logic bi_sel_we; logic [0:0] bi_sel_in, bi_sel; logic bi_en; logic [3:0] bi_we;
  logic [10:0] bi_addr; logic [31:0] bi_wdata, bi_rdata;
  logic [0:0] wc_core; logic wc_en, wc_we; logic [4:0] wc_addr; logic [31:0] wc_wdata, wc_rdata;
  logic [31:0] fab_in [NC][NCH]; logic [31:0] fab_out [NC][NCH]; logic fab_exit [NC];
  logic wcla_busy [NC], wcla_done [NC];
  logic prof_bb_event [NC], prof_bb_hit [NC], prof_bb_halved [NC];

  warp_processor #(.NUM_CORES(NC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- behavioural fabric, one configured circuit per core -----
  int fab_kernel [NC];
  function automatic logic [31:0] bitrev(logic [31:0] x);
    for (int i = 0; i < 32; i++) bitrev[i] = x[31 - i];
  endfunction
  always_comb
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < NCH; i++) fab_out[c][i] = fab_in[c][i];
      fab_exit[c] = 1'b0;
      if (fab_kernel[c] == 1) fab_out[c][1] = bitrev(fab_in[c][0]);
      if (fab_kernel[c] == 2) fab_exit[c] = (fab_in[c][0] == 0);
    end

  // ---------------- mechanism counters ---------------------------------------
  int n_bb = 0, n_bb_hit = 0, n_halved = 0, n_replace = 0, n_fetch = 0;
  int n_dadg_rd = 0, n_dadg_wr = 0, n_mac = 0, n_fab_ld = 0, n_lch_count = 0, n_lch_exit = 0;
  int n_bi_rd = 0, n_bi_wr = 0, n_bi_switch = 0, n_opb_stall = 0, n_patch_seen = 0;
  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      n_bb     += int'(prof_bb_event[c]);
      n_bb_hit += int'(prof_bb_hit[c]);
      n_halved += int'(prof_bb_halved[c]);
      if (prof_bb_event[c] && !prof_bb_hit[c] && dut.g_core[c].u_prof.ents[dut.g_core[c].u_prof.vic_idx].valid)
        n_replace++;
      if (dut.g_core[c].db_en) begin
        if (dut.g_core[c].db_we != 0) n_dadg_wr++; else n_dadg_rd++;
      end
      if (dut.g_core[c].u_wcla.step && dut.g_core[c].u_wcla.mac_cfg.en) n_mac++;
      for (int i = 0; i < NCH; i++) n_fab_ld += int'(dut.g_core[c].u_wcla.fab_ld[i]);
      if (wcla_done[c]) begin
        if (dut.g_core[c].u_wcla.u_dadg.stop_now) n_lch_exit++; else n_lch_count++;
      end
      if (opb_req[c].select && dut.g_core[c].u_wcla.rb_req && !dut.g_core[c].u_wcla.rb_gnt) n_opb_stall++;
    end
  end

  // ---------------- binary image and instruction-fetch checking ----------------
  logic [31:0] bin [NC][IMEM];
  logic [31:0] exp_q [NC][$];
  for (genvar c = 0; c < NC; c++) begin : g_ichk
    always @(posedge clk) if (rst_n && i_lmb_rsp[c].ready) begin
      logic [31:0] e;
      e = exp_q[c].pop_front();
      checks++;
      if (i_lmb_rsp[c].dbus !== e) begin
        failures++; $display("FAIL: core %0d fetched %h expected %h", c, i_lmb_rsp[c].dbus, e);
      end
      if (e[31:24] == 8'hB0) n_patch_seen++;
    end
  end

  // one fetch per call, back to back when called in consecutive cycles
  task automatic ifetch(int c, logic [31:0] a);
    @(negedge clk);
    i_lmb_req[c] = '{abus: a, wdbus: 0, be: 4'hF, addr_strobe: 1'b1, read_strobe: 1'b1, write_strobe: 1'b0};
    exp_q[c].push_back(bin[c][a[12:2]]);
    n_fetch++;
  endtask
  task automatic iidle(int c);
    @(negedge clk); i_lmb_req[c] = '0;
  endtask
  task automatic loop(int c, logic [31:0] head, int len, int n);
    for (int k = 0; k < n; k++) for (int i = 0; i < len; i++) ifetch(c, head + 4 * i);
  endtask

  // ---------------- data LMB ---------------------------------------------------
  task automatic dwrite(int c, logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    d_lmb_req[c] = '{abus: a, wdbus: d, be: 4'hF, addr_strobe: 1'b1, read_strobe: 1'b0, write_strobe: 1'b1};
    @(negedge clk); d_lmb_req[c] = '0;
    check("d_lmb write ready", d_lmb_rsp[c].ready);
  endtask
  task automatic dread(int c, logic [31:0] a, output logic [31:0] q);
    @(negedge clk);
    d_lmb_req[c] = '{abus: a, wdbus: 0, be: 4'hF, addr_strobe: 1'b1, read_strobe: 1'b1, write_strobe: 1'b0};
    @(negedge clk); d_lmb_req[c] = '0;
    check("d_lmb read ready", d_lmb_rsp[c].ready);
    q = d_lmb_rsp[c].dbus;
  endtask

  // ---------------- OPB (processor to WCLA) -------------------------------------
  task automatic opb(input int c, input logic [4:0] r, input logic rnw, input logic [31:0] d,
                     output logic [31:0] q);
    int n;
    @(negedge clk); opb_req[c] = '{select: 1'b1, rnw: rnw, abus: WB + 32'(r) * 4, dbus: d};
    n = 0;
    do begin @(negedge clk); n++; end while (!opb_rsp[c].xfer_ack && n < 50);
    check("opb ack", opb_rsp[c].xfer_ack);
    q = opb_rsp[c].dbus; opb_req[c] = '0;
  endtask
  task automatic hw_run(int c, int iters);
    logic [31:0] q; int polls;
    opb(c, R_ITERS, 0, iters, q);
    opb(c, R_CTRL, 0, 1, q);
    polls = 0;
    do begin opb(c, R_STATUS, 1, 0, q); polls++; end while (q[0] && polls < 100000);
    check($sformatf("WCLA done (status %h, iters %0d)", q, iters), q == 32'h2);
  endtask

  // ---------------- DPM ports (shared; one user at a time) ----------------------
  semaphore dpm_lock = new(1);
  task automatic bi_select(int c);
    @(negedge clk); bi_sel_we = 1; bi_sel_in = 1'(c);
    @(negedge clk); bi_sel_we = 0;
    if (bi_sel != 1'(c)) failures++;
    checks++; n_bi_switch++;
  endtask
  task automatic bi_write(int w, logic [31:0] d);
    @(negedge clk); bi_en = 1; bi_we = 4'hF; bi_addr = 11'(w); bi_wdata = d;
    @(negedge clk); bi_en = 0; bi_we = 0;
    n_bi_wr++;
  endtask
  task automatic bi_read(int w, output logic [31:0] q);
    @(negedge clk); bi_en = 1; bi_we = 0; bi_addr = 11'(w);
    @(negedge clk); bi_en = 0; q = bi_rdata;
    n_bi_rd++;
  endtask
  task automatic wc_write(int c, logic [4:0] a, logic [31:0] d);
    @(negedge clk); wc_core = 1'(c); wc_en = 1; wc_we = 1; wc_addr = a; wc_wdata = d;
    @(negedge clk); wc_en = 0; wc_we = 0;
  endtask
  function automatic logic [4:0] ch(int c, int k); return R_CH0 + 5'(4 * c + k); endfunction

  // ---------------- one core's whole warp sequence -------------------------------
  task automatic core_flow(int c);
    logic [31:0] q, exp, best_src, best_tgt;
    int best_cnt, nvalid, N;
    // 1. binary and data
    dpm_lock.get();
    bi_select(c);
    for (int w = 0; w < IMEM; w++) begin
      bin[c][w] = 32'(c) * 32'h0100_0000 + 32'h0040_0000 + 32'(w * 37);
      bi_write(w, bin[c][w]);
    end
    dpm_lock.put();
    for (int i = 0; i < 64; i++) dwrite(c, 4 * i, 32'(i * 3 + c + 1));             // A row, word 0
    for (int i = 0; i < 16 * 16; i++) dwrite(c, 4 * (256 + i), 32'((i * 7 + c) % 101)); // B 16x16
    // 2. software phase
    loop(c, 32'h100, 4, 20);                              // init loop
    for (int k = 0; k < 20; k++) loop(c, 32'h800 + 32'h20 * k, 3, 2 + k % 3); // many small loops
    loop(c, 32'h300, 8, 300);                             // second loop
    loop(c, 32'h200, 2, HOT_ITERS);                       // hot loop 0x200..0x204
    ifetch(c, 32'h208);
    iidle(c); iidle(c); iidle(c);
    // 3. DPM: profile, read the loop, patch it
    dpm_lock.get();
    @(negedge clk); prof_core = 1'(c);
    best_cnt = -1; nvalid = 0; best_src = 0; best_tgt = 0;
    for (int e = 0; e < 16; e++) begin
      @(negedge clk); prof_idx = 4'(e); #1;
      if (prof_entry.valid) begin
        nvalid++;
        if (int'(prof_entry.count) > best_cnt) begin
          best_cnt = int'(prof_entry.count); best_src = prof_entry.src; best_tgt = prof_entry.tgt;
        end
      end
    end
    check($sformatf("core %0d: profiler full (%0d entries)", c, nvalid), nvalid == 16);
    check($sformatf("core %0d: hot loop found %h->%h", c, best_src, best_tgt),
          best_src == 32'h204 && best_tgt == 32'h200);
    bi_select(c);
    for (int w = best_tgt[12:2]; w <= best_src[12:2]; w++) begin
      bi_read(w, q);
      check("DPM reads the loop code", q == bin[c][w]);
    end
    bi_write(best_tgt[12:2], 32'hB000_0000 + 32'(c));    // patch: branch to the hardware stub
    bin[c][best_tgt[12:2]] = 32'hB000_0000 + 32'(c);
    // configure the WCLA for the dot product: Reg0 <- A[i], Reg1 <- B[i][5], acc += Reg0*Reg1
    wc_write(c, ch(0, 0), 0);               wc_write(c, ch(0, 1), 4);      wc_write(c, ch(0, 2), 3'b001);
    wc_write(c, ch(1, 0), 4 * (256 + 5));   wc_write(c, ch(1, 1), 4 * 16); wc_write(c, ch(1, 2), 3'b001);
    wc_write(c, ch(2, 2), 0);
    wc_write(c, R_MACCFG, {25'd0, 2'd2, 2'd1, 2'd0, 1'b1});
    wc_write(c, R_LOOPCFG, 0);
    dpm_lock.put();
    // 4. hardware phase: the processor reaches the patched loop
    ifetch(c, 32'h1FC); ifetch(c, 32'h200); iidle(c);
    N = 16;
    exp = 0;
    for (int i = 0; i < N; i++) exp += 32'(i * 3 + c + 1) * 32'(((i * 16 + 5) * 7 + c) % 101);
    opb(c, R_ACC, 0, 0, q);
    hw_run(c, N);
    opb(c, R_ACC, 1, 0, q);
    check($sformatf("core %0d dot product %0d exp %0d", c, q, exp), q == exp);
    opb(c, R_CYCLES, 1, 0, q);
    check("dot product cycles = N*(2 reads + 0 writes + 2)", q == 32'(4 * N));
    dwrite(c, 4 * 1000, q);
    // bit reversal of A[0..63] into words 1024..
    fab_kernel[c] = 1;
    dpm_lock.get();
    wc_write(c, R_MACCFG, 0);
    wc_write(c, ch(1, 0), 4 * 1024); wc_write(c, ch(1, 1), 4); wc_write(c, ch(1, 2), 3'b110);
    dpm_lock.put();
    opb(c, ch(0, 0), 0, 0, q);             // run-time array base from the software
    hw_run(c, 64);
    opb(c, R_CYCLES, 1, 0, q);
    check("brev cycles = N*(1 + 1 + 2)", q == 32'(4 * 64));
    for (int i = 0; i < 64; i++) begin
      dread(c, 4 * (1024 + i), q);
      check($sformatf("core %0d brev %0d", c, i), q == bitrev(32'(i * 3 + c + 1)));
    end
    // zero-word search, ended by the fabric
    dwrite(c, 4 * (256 + 40), 0);
    fab_kernel[c] = 2;
    dpm_lock.get();
    wc_write(c, ch(1, 2), 0);
    wc_write(c, ch(0, 0), 4 * 256);
    wc_write(c, R_LOOPCFG, 1);
    dpm_lock.put();
    hw_run(c, 1000);
    opb(c, R_ITDONE, 1, 0, q);
    exp = 0;
    for (int i = 0; i < 40 && exp == 0; i++) if (((i * 7 + c) % 101) == 0) exp = 32'(i + 1);
    if (exp == 0) exp = 41;
    check($sformatf("core %0d search iterations %0d exp %0d", c, q, exp), q == exp);
    // 5. OPB access colliding with a DPM configuration read
    dpm_lock.get();
    @(negedge clk);
    opb_req[c] = '{select: 1'b1, rnw: 1'b1, abus: WB + 4 * 32'(R_ITDONE), dbus: 0};
    wc_core = 1'(c); wc_en = 1; wc_we = 0; wc_addr = R_ITERS;
    @(negedge clk);
    check("OPB waits for the DPM", !opb_rsp[c].xfer_ack);
    check("DPM reads ITERS", wc_rdata == 1000);
    wc_en = 0;
    @(negedge clk);
    check("OPB served after the DPM", opb_rsp[c].xfer_ack && opb_rsp[c].dbus == exp);
    opb_req[c] = '0;
    dpm_lock.put();
  endtask

  initial begin
    #200ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < NC; c++) begin
      i_lmb_req[c] = '0; d_lmb_req[c] = '0; opb_req[c] = '0; fab_kernel[c] = 0;
    end
    prof_enable = 1; prof_clear = 0; prof_core = 0; prof_idx = 0;
    bi_sel_we = 0; bi_sel_in = 0; bi_en = 0; bi_we = 0; bi_addr = 0; bi_wdata = 0;
    wc_core = 0; wc_en = 0; wc_we = 0; wc_addr = 0; wc_wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork core_flow(cc); join_none
    end
    wait fork;
    repeat (3) @(negedge clk);
    for (int c = 0; c < NC; c++) check("all fetches answered", exp_q[c].size() == 0);
    $display("fetches=%0d backward-branches=%0d hits=%0d replacements=%0d halvings=%0d",
             n_fetch, n_bb, n_bb_hit, n_replace, n_halved);
    $display("BRAM-if reads=%0d writes=%0d selects=%0d patched-fetches=%0d",
             n_bi_rd, n_bi_wr, n_bi_switch, n_patch_seen);
    $display("DADG reads=%0d writes=%0d MAC steps=%0d fabric loads=%0d LCH count-end=%0d fabric-exit=%0d OPB stalls=%0d",
             n_dadg_rd, n_dadg_wr, n_mac, n_fab_ld, n_lch_count, n_lch_exit, n_opb_stall);
    check("mechanism: backward branch recorded", n_bb > 0);
    check("mechanism: profiler hit", n_bb_hit > 0);
    check("mechanism: profiler replacement", n_replace > 0);
    check("mechanism: profiler counter halving", n_halved > 0);
    check("mechanism: BRAM Interface read", n_bi_rd > 0);
    check("mechanism: BRAM Interface write (patch)", n_bi_wr > 0);
    check("mechanism: patched code fetched", n_patch_seen == NC);
    check("mechanism: DADG read", n_dadg_rd > 0);
    check("mechanism: DADG write", n_dadg_wr > 0);
    check("mechanism: MAC step", n_mac > 0);
    check("mechanism: fabric result bus load", n_fab_ld > 0);
    check("mechanism: LCH end by count", n_lch_count > 0);
    check("mechanism: LCH end by fabric", n_lch_exit > 0);
    check("mechanism: OPB stalled by DPM access", n_opb_stall > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
