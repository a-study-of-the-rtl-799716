// warp_processor: MicroBlaze-based warp processing system (memory, profiling
// and partitioning-support hardware around one or more soft processors).
//
// Warp processing moves a program's hottest loop from software into custom
// hardware while the program runs. Per processor this system contains:
//   * an LMB controller and dual-ported BRAM for instructions and for data;
//   * a profiler watching the instruction LMB for backward branches;
//   * a WCLA slice (address generator with loop control, Reg0-Reg2, MAC)
//     reached by the processor over the OPB and by the loop's data through the
//     second port of the data BRAM.
// Shared by all processors: the BRAM Interface through which the dynamic
// partitioning module (DPM) reads and patches a chosen processor's binary.
// NUM_CORES = 1 is the paper's single-processor warp processor (its main
// system, the one it evaluates); NUM_CORES > 1 is its multi-processor variant.
//
// Not inside this module (signals brought out as ports):
//   * the MicroBlaze processors: their i_lmb, d_lmb and OPB buses;
//   * the DPM, itself a processor running the partitioning tools: its read
//     port into the profilers, its BRAM Interface port and its WCLA
//     configuration port, each with a core index;
//   * the configurable logic fabric: per core the three operands it receives
//     (fab_in), its three results (fab_out) and its loop-exit line (fab_exit);
//   * other OPB slaves: opb_rsp carries only the WCLA's response, to be ORed
//     with theirs.
// Timing: one clock for everything (the paper runs the MicroBlaze at 85 MHz
// and the other circuits at up to 250 MHz; a single clock is this design's
// simplification). Asynchronous active-low reset.
module warp_processor
  import warp_pkg::*;
#(
  parameter int unsigned   NUM_CORES    = 1,
  parameter int unsigned   IMEM_DEPTH   = 2048,          // 8 KB instruction BRAM
  parameter int unsigned   DMEM_DEPTH   = 2048,          // 8 KB data BRAM
  parameter logic [AW-1:0] IMEM_BASE    = 32'h0000_0000, // on i_lmb
  parameter logic [AW-1:0] DMEM_BASE    = 32'h0000_0000, // on d_lmb
  parameter logic [AW-1:0] WCLA_BASE    = 32'h8000_0000, // on the OPB
  parameter int unsigned   PROF_ENTRIES = 16,
  parameter int unsigned   PROF_CNT_W   = 16,
  localparam int unsigned  CW   = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  localparam int unsigned  IBAW = $clog2(IMEM_DEPTH),
  localparam int unsigned  PIW  = $clog2(PROF_ENTRIES)
) (
  input  logic            clk,
  input  logic            rst_n,
  // processors
  input  lmb_req_t        i_lmb_req [NUM_CORES],
  output lmb_rsp_t        i_lmb_rsp [NUM_CORES],
  input  lmb_req_t        d_lmb_req [NUM_CORES],
  output lmb_rsp_t        d_lmb_rsp [NUM_CORES],
  input  opb_req_t        opb_req   [NUM_CORES],
  output opb_rsp_t        opb_rsp   [NUM_CORES],
  // DPM: profiler read port
  input  logic            prof_enable,
  input  logic            prof_clear,
  input  logic [CW-1:0]   prof_core,
  input  logic [PIW-1:0]  prof_idx,
  output prof_entry_t     prof_entry,
  // DPM: BRAM Interface
  input  logic            bi_sel_we,
  input  logic [CW-1:0]   bi_sel_in,
  output logic [CW-1:0]   bi_sel,
  input  logic            bi_en,
  input  logic [3:0]      bi_we,
  input  logic [IBAW-1:0] bi_addr,
  input  logic [DW-1:0]   bi_wdata,
  output logic [DW-1:0]   bi_rdata,
  // DPM: WCLA configuration
  input  logic [CW-1:0]   wc_core,
  input  logic            wc_en,
  input  logic            wc_we,
  input  logic [4:0]      wc_addr,
  input  logic [DW-1:0]   wc_wdata,
  output logic [DW-1:0]   wc_rdata,
  // configurable logic fabric
  output logic [DW-1:0]   fab_in   [NUM_CORES][NCH],
  input  logic [DW-1:0]   fab_out  [NUM_CORES][NCH],
  input  logic            fab_exit [NUM_CORES],
  // status
  output logic            wcla_busy [NUM_CORES],
  output logic            wcla_done [NUM_CORES],
  output logic            prof_bb_event [NUM_CORES],
  output logic            prof_bb_hit   [NUM_CORES],
  output logic            prof_bb_halved[NUM_CORES]
);

  localparam int unsigned DBAW = $clog2(DMEM_DEPTH);

  // instruction BRAM port B, driven by the BRAM Interface
  logic            ib_en    [NUM_CORES];
  logic [3:0]      ib_we    [NUM_CORES];
  logic [IBAW-1:0] ib_addr  [NUM_CORES];
  logic [DW-1:0]   ib_wdata [NUM_CORES];
  logic [DW-1:0]   ib_rdata [NUM_CORES];

  prof_entry_t     prof_rd  [NUM_CORES];
  logic [DW-1:0]   wc_rd    [NUM_CORES];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    // ---- instruction side ----
    logic            ia_en;
    logic [3:0]      ia_we;
    logic [IBAW-1:0] ia_addr;
    logic [DW-1:0]   ia_wdata, ia_rdata;

    lmb_cntrl #(.BASE(IMEM_BASE), .DEPTH(IMEM_DEPTH)) u_ilmb (
      .clk, .rst_n, .lmb_req (i_lmb_req[c]), .lmb_rsp (i_lmb_rsp[c]),
      .bram_en (ia_en), .bram_we (ia_we), .bram_addr (ia_addr),
      .bram_wdata (ia_wdata), .bram_rdata (ia_rdata)
    );

    dp_bram #(.DEPTH(IMEM_DEPTH)) u_imem (
      .clk,
      .a_en (ia_en), .a_we (ia_we), .a_addr (ia_addr), .a_wdata (ia_wdata), .a_rdata (ia_rdata),
      .b_en (ib_en[c]), .b_we (ib_we[c]), .b_addr (ib_addr[c]), .b_wdata (ib_wdata[c]),
      .b_rdata (ib_rdata[c])
    );

    profiler #(.ENTRIES(PROF_ENTRIES), .CNT_W(PROF_CNT_W)) u_prof (
      .clk, .rst_n, .enable (prof_enable),
      .clear (prof_clear && int'(prof_core) == c),
      .i_lmb (i_lmb_req[c]),
      .rd_idx (prof_idx), .rd_entry (prof_rd[c]),
      .bb_event (prof_bb_event[c]), .bb_hit (prof_bb_hit[c]), .bb_halved (prof_bb_halved[c])
    );

    // ---- data side ----
    logic            da_en;
    logic [3:0]      da_we;
    logic [DBAW-1:0] da_addr;
    logic [DW-1:0]   da_wdata, da_rdata;
    logic            db_en;
    logic [3:0]      db_we;
    logic [DBAW-1:0] db_addr;
    logic [DW-1:0]   db_wdata, db_rdata;

    lmb_cntrl #(.BASE(DMEM_BASE), .DEPTH(DMEM_DEPTH)) u_dlmb (
      .clk, .rst_n, .lmb_req (d_lmb_req[c]), .lmb_rsp (d_lmb_rsp[c]),
      .bram_en (da_en), .bram_we (da_we), .bram_addr (da_addr),
      .bram_wdata (da_wdata), .bram_rdata (da_rdata)
    );

    dp_bram #(.DEPTH(DMEM_DEPTH)) u_dmem (
      .clk,
      .a_en (da_en), .a_we (da_we), .a_addr (da_addr), .a_wdata (da_wdata), .a_rdata (da_rdata),
      .b_en (db_en), .b_we (db_we), .b_addr (db_addr), .b_wdata (db_wdata), .b_rdata (db_rdata)
    );

    // ---- WCLA slice ----
    wcla #(.OPB_BASE(WCLA_BASE), .DEPTH(DMEM_DEPTH)) u_wcla (
      .clk, .rst_n,
      .opb_req (opb_req[c]), .opb_rsp (opb_rsp[c]),
      .cfg_en (wc_en && int'(wc_core) == c), .cfg_we (wc_we), .cfg_addr (wc_addr),
      .cfg_wdata (wc_wdata), .cfg_rdata (wc_rd[c]),
      .mem_en (db_en), .mem_we (db_we), .mem_addr (db_addr),
      .mem_wdata (db_wdata), .mem_rdata (db_rdata),
      .fab_in (fab_in[c]), .fab_out (fab_out[c]), .fab_exit (fab_exit[c]),
      .busy (wcla_busy[c]), .done_o (wcla_done[c])
    );
  end

  bram_interface #(.NUM_CORES(NUM_CORES), .DEPTH(IMEM_DEPTH)) u_bi (
    .clk, .rst_n,
    .sel_we (bi_sel_we), .sel_in (bi_sel_in), .sel (bi_sel),
    .dpm_en (bi_en), .dpm_we (bi_we), .dpm_addr (bi_addr),
    .dpm_wdata (bi_wdata), .dpm_rdata (bi_rdata),
    .ib_en, .ib_we, .ib_addr, .ib_wdata, .ib_rdata
  );

  // DPM read muxes
  always_comb begin
    prof_entry = '0;
    wc_rdata   = '0;
    for (int c = 0; c < NUM_CORES; c++) begin
      if (int'(prof_core) == c) prof_entry = prof_rd[c];
      if (int'(wc_core) == c)   wc_rdata   = wc_rd[c];
    end
  end

endmodule
