// tb_profiler: self-checking test of the backward-branch profiler.
// Replays instruction-fetch traces of several nested and sequential loops on
// the LMB, mixed with forward jumps and idle cycles, and compares the cache
// with a reference model after every trace segment. A small cache (4 entries,
// 4-bit counters) forces replacements and counter halving.
module tb_profiler;
  import warp_pkg::*;
  localparam int unsigned ENTRIES = 4;
  localparam int unsigned CNT_W   = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable, clear;
  lmb_req_t i_lmb;
  logic [1:0] rd_idx;
  prof_entry_t rd_entry;
  logic bb_event, bb_hit, bb_halved;
  int checks = 0, failures = 0;
  int n_events = 0, n_hits = 0, n_halved = 0;

  profiler #(.ENTRIES(ENTRIES), .CNT_W(CNT_W)) dut (.*);

  // reference model
  logic        m_valid [ENTRIES];
  logic [31:0] m_src   [ENTRIES];
  logic [31:0] m_tgt   [ENTRIES];
  int          m_cnt   [ENTRIES];
  logic [31:0] m_prev;
  logic        m_prev_valid;
  int          m_events, m_hits, m_halved;

  function automatic void model_fetch(logic [31:0] a);
    if (m_prev_valid && a < m_prev) begin
      int h, v;
      h = -1;
      for (int i = 0; i < ENTRIES; i++) if (h < 0 && m_valid[i] && m_src[i] == m_prev) h = i;
      m_events++;
      if (h >= 0) begin
        m_hits++;
        if (m_cnt[h] == (1 << CNT_W) - 1) begin
          m_halved++;
          for (int i = 0; i < ENTRIES; i++) m_cnt[i] = m_cnt[i] / 2 + ((i == h) ? 1 : 0);
        end else m_cnt[h]++;
      end else begin
        v = -1;
        for (int i = 0; i < ENTRIES; i++) if (v < 0 && !m_valid[i]) v = i;
        if (v < 0) begin
          v = 0;
          for (int i = 1; i < ENTRIES; i++) if (m_cnt[i] < m_cnt[v]) v = i;
        end
        m_valid[v] = 1; m_src[v] = m_prev; m_tgt[v] = a; m_cnt[v] = 1;
      end
    end
    m_prev = a; m_prev_valid = 1;
  endfunction

  task automatic fetch(logic [31:0] a);
    @(negedge clk);
    i_lmb = '{abus: a, wdbus: 0, be: 4'hF, addr_strobe: 1'b1, read_strobe: 1'b1, write_strobe: 1'b0};
    if (enable) model_fetch(a);
  endtask

  task automatic idle(int n);
    repeat (n) begin @(negedge clk); i_lmb = '0; end
  endtask

  task automatic compare;
    idle(3);
    for (int i = 0; i < ENTRIES; i++) begin
      rd_idx = 2'(i);
      #1;
      checks++;
      if (rd_entry.valid !== m_valid[i] ||
          (m_valid[i] && (rd_entry.src !== m_src[i] || rd_entry.tgt !== m_tgt[i] ||
                          int'(rd_entry.count) != m_cnt[i]))) begin
        failures++;
        $display("FAIL entry %0d: dut v%0d %h->%h n%0d  model v%0d %h->%h n%0d", i,
                 rd_entry.valid, rd_entry.src, rd_entry.tgt, rd_entry.count,
                 m_valid[i], m_src[i], m_tgt[i], m_cnt[i]);
      end
    end
    checks++;
    if (n_events != m_events || n_hits != m_hits || n_halved != m_halved) begin
      failures++;
      $display("FAIL event counts dut %0d/%0d/%0d model %0d/%0d/%0d",
               n_events, n_hits, n_halved, m_events, m_hits, m_halved);
    end
  endtask

  // a loop body of len instructions starting at head, iterated n times
  task automatic loop(logic [31:0] head, int len, int n);
    for (int k = 0; k < n; k++)
      for (int i = 0; i < len; i++) fetch(head + 4*i);
  endtask

  always @(posedge clk) if (rst_n) begin
    n_events += int'(bb_event); n_hits += int'(bb_hit); n_halved += int'(bb_halved);
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable = 1; clear = 0; i_lmb = '0; rd_idx = 0;
    for (int i = 0; i < ENTRIES; i++) begin m_valid[i] = 0; m_cnt[i] = 0; m_src[i] = 0; m_tgt[i] = 0; end
    m_prev = 0; m_prev_valid = 0; m_events = 0; m_hits = 0; m_halved = 0;
    idle(2); rst_n = 1; idle(1);
    // a single tight loop: 1 entry, counter saturates and halves
    loop(32'h100, 3, 40);
    compare();
    // one-instruction loop: a backward branch on every fetch
    loop(32'h200, 1, 1); for (int i = 0; i < 20; i++) fetch(32'h1FC + 4 * (i % 2));
    compare();
    // more loops than entries: replacement of the least frequent
    for (int r = 0; r < 6; r++) begin
      loop(32'h400 + 32'h40 * r, 2 + r % 3, 2 + r);
      fetch(32'h800 + 8 * r);      // forward jump, not recorded
      idle(r % 2);
      compare();
    end
    // random traces
    for (int r = 0; r < 40; r++) begin
      logic [31:0] h;
      h = 32'h1000 + 32'h20 * ($urandom % 8);
      loop(h, 1 + $urandom % 4, 1 + $urandom % 12);
      if ($urandom % 3 == 0) idle($urandom % 3);
      if (r % 5 == 4) compare();
    end
    // disabled: nothing recorded
    enable = 0;
    loop(32'h3000, 2, 5);
    enable = 1;
    compare();
    // clear
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < ENTRIES; i++) m_valid[i] = 0;
    compare();
    checks++;
    if (n_halved == 0 || n_hits == 0 || n_events == n_hits) begin
      failures++; $display("FAIL: mechanisms not exercised");
    end
    $display("events=%0d hits=%0d halvings=%0d", n_events, n_hits, n_halved);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
