// profiler: non-intrusive on-chip profiler of backward branches.
//
// The paper's profiler watches the instruction addresses on the processor's
// instruction LMB and, whenever a backward branch occurs, updates a small cache
// of branch frequencies; the dynamic partitioning module (DPM) later reads that
// cache to pick the critical loop. The profiler only observes the bus; it never
// stalls the processor.
//
// How it works (the details are this design's own):
//   * Every LMB instruction fetch (addr_strobe with read_strobe) is compared
//     with the previous fetch. A fetch to an address lower than the previous
//     one is taken as a backward branch from the previous address (src) to the
//     new one (tgt, the loop head).
//   * The cache holds ENTRIES fully associative entries tagged by src. On a
//     hit the entry's saturating counter is incremented. On a miss the entry
//     with the smallest count (a free entry first) is replaced, count 1.
//   * When a counter would pass its maximum, every counter in the cache is
//     halved instead, so the counts keep their relative order.
//   * One event is taken per cycle; the lookup and update happen in the cycle
//     after the fetch is seen (one register stage).
//
// DPM side: rd_idx selects an entry, rd_entry shows it (combinational).
// clear empties the cache. enable = 0 freezes it.
module profiler
  import warp_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned CNT_W   = 16,     // at most 16 (width of prof_entry_t.count)
  localparam int unsigned IW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  input  logic          clear,
  // observed instruction LMB
  input  lmb_req_t      i_lmb,
  // DPM read port
  input  logic [IW-1:0] rd_idx,
  output prof_entry_t   rd_entry,
  // event pulses, for statistics
  output logic          bb_event,     // a backward branch was recorded
  output logic          bb_hit,       // ... into an existing entry
  output logic          bb_halved     // ... and all counters were halved
);

  typedef struct packed {
    logic             valid;
    logic [AW-1:0]    src;
    logic [AW-1:0]    tgt;
    logic [CNT_W-1:0] count;
  } ent_t;

  ent_t ents [ENTRIES];

  // ---- stage 1: detect a backward branch on the bus ------------------------
  logic [AW-1:0] prev_addr;
  logic          prev_valid;
  logic          ev_q;
  logic [AW-1:0] ev_src, ev_tgt;
  logic          fetch;

  assign fetch = enable && i_lmb.addr_strobe && i_lmb.read_strobe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_valid <= 1'b0;
      prev_addr  <= '0;
      ev_q       <= 1'b0;
      ev_src     <= '0;
      ev_tgt     <= '0;
    end else begin
      ev_q <= fetch && prev_valid && (i_lmb.abus < prev_addr);
      if (fetch) begin
        prev_valid <= 1'b1;
        prev_addr  <= i_lmb.abus;
        ev_src     <= prev_addr;
        ev_tgt     <= i_lmb.abus;
      end
    end
  end

  // ---- stage 2: cache lookup and update ------------------------------------
  logic          hit;
  logic [IW-1:0] hit_idx, vic_idx;
  logic          saturate;
  logic          vic_free;
  logic [CNT_W-1:0] vic_cnt;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (ents[i].valid && ents[i].src == ev_src && !hit) begin
        hit     = 1'b1;
        hit_idx = IW'(i);
      end
    // victim: first free entry, else the one with the smallest count
    vic_idx  = '0;
    vic_free = !ents[0].valid;
    vic_cnt  = ents[0].count;
    for (int i = 1; i < ENTRIES; i++) begin
      if (!vic_free && (!ents[i].valid || ents[i].count < vic_cnt)) begin
        vic_idx  = IW'(i);
        vic_free = !ents[i].valid;
        vic_cnt  = ents[i].count;
      end
    end
    saturate = hit && (ents[hit_idx].count == {CNT_W{1'b1}});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ents[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < ENTRIES; i++) ents[i] <= '0;
    end else if (ev_q) begin
      if (saturate) begin
        for (int i = 0; i < ENTRIES; i++)
          ents[i].count <= (ents[i].count >> 1) + CNT_W'(i == int'(hit_idx));
      end else if (hit) begin
        ents[hit_idx].count <= ents[hit_idx].count + 1'b1;
      end else begin
        ents[vic_idx] <= '{valid: 1'b1, src: ev_src, tgt: ev_tgt, count: CNT_W'(1)};
      end
    end
  end

  assign bb_event  = ev_q && !clear;
  assign bb_hit    = ev_q && !clear && hit;
  assign bb_halved = ev_q && !clear && saturate;

  always_comb begin
    rd_entry       = '0;
    rd_entry.valid = ents[rd_idx].valid;
    rd_entry.src   = ents[rd_idx].src;
    rd_entry.tgt   = ents[rd_idx].tgt;
    rd_entry.count = 16'(ents[rd_idx].count);
  end

  initial assert (CNT_W <= 16) else $error("profiler: CNT_W must be at most 16");

endmodule
