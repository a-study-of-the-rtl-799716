// wcla: one processor's slice of the warp configurable logic architecture.
//
// The paper's WCLA runs a critical loop, taken out of the software, in
// hardware. Around the configurable logic fabric it has a data address
// generator with loop control hardware (dadg_lch), three registers Reg0-Reg2
// (wcla_regs) and a 32-bit multiplier-accumulator (wcla_mac). The DADG walks
// the loop's arrays through the second port of the processor's data BRAM and
// fills the registers; the registers, through the MAC layer, feed the fabric;
// the fabric returns results to the registers on a dedicated bus and may end
// the loop through the LCH. In the multi-processor system each processor gets
// its own slice, while the fabric is shared, so the fabric is outside this
// module: fab_in (to the fabric), fab_out and fab_exit (from it).
//
// Control: a 32-word register file (map in warp_pkg) is reachable from two
// sides. The dynamic partitioning module (DPM) writes the loop's configuration
// through the cfg_* port (combinational read data, priority on conflicts). The
// processor reaches the same registers over the OPB (wcla_opb_slave): the
// patched binary writes run-time values (iteration count, array bases),
// writes CTRL.start, polls STATUS and reads results (ACC, register values).
// STATUS.done is set when a run ends and cleared by the next start; done_o
// also pulses then. The register map and the two-port arrangement are this
// design's choices: the paper names the OPB link and the DPM link but not what
// travels over them.
module wcla
  import warp_pkg::*;
#(
  parameter logic [AW-1:0] OPB_BASE = 32'h8000_0000,
  parameter int unsigned   DEPTH    = 2048,          // words of the data BRAM
  localparam int unsigned  BAW      = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // processor side (OPB)
  input  opb_req_t        opb_req,
  output opb_rsp_t        opb_rsp,
  // DPM configuration port
  input  logic            cfg_en,
  input  logic            cfg_we,
  input  logic [4:0]      cfg_addr,
  input  logic [DW-1:0]   cfg_wdata,
  output logic [DW-1:0]   cfg_rdata,
  // data BRAM port B
  output logic            mem_en,
  output logic [3:0]      mem_we,
  output logic [BAW-1:0]  mem_addr,
  output logic [DW-1:0]   mem_wdata,
  input  logic [DW-1:0]   mem_rdata,
  // configurable logic fabric
  output logic [DW-1:0]   fab_in  [NCH],
  input  logic [DW-1:0]   fab_out [NCH],
  input  logic            fab_exit,
  // status
  output logic            busy,
  output logic            done_o
);

  // ---- register file --------------------------------------------------------
  logic [DW-1:0] iters;
  logic          exit_on_fab;
  mac_cfg_t      mac_cfg;
  logic [AW-1:0] base   [NCH];
  logic [AW-1:0] stride [NCH];
  logic [2:0]    mode   [NCH];
  logic          done_flag;

  // OPB side
  logic          rb_req, rb_we, rb_gnt;
  logic [4:0]    rb_addr;
  logic [DW-1:0] rb_wdata, rb_rdata;

  // one access per cycle, the DPM port first
  logic          wr_en;
  logic [4:0]    wr_addr;
  logic [DW-1:0] wr_data;

  assign rb_gnt  = !cfg_en;
  assign wr_en   = cfg_en ? cfg_we : (rb_req && rb_we);
  assign wr_addr = cfg_en ? cfg_addr : rb_addr;
  assign wr_data = cfg_en ? cfg_wdata : rb_wdata;

  // datapath signals
  logic          start, done;
  logic [DW-1:0] cycles, iter_count, acc;
  logic          mem_ld [NCH];
  logic          fab_ld [NCH];
  logic          reg_we [NCH];
  logic [DW-1:0] reg_q  [NCH];
  logic          step;
  logic          acc_we;

  assign start  = wr_en && wr_addr == R_CTRL && wr_data[0] && !busy;
  assign acc_we = wr_en && wr_addr == R_ACC;
  always_comb
    for (int c = 0; c < NCH; c++)
      reg_we[c] = wr_en && wr_addr == R_CH0 + 5'(4*c + 3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iters       <= '0;
      exit_on_fab <= 1'b0;
      mac_cfg     <= '0;
      done_flag   <= 1'b0;
      for (int c = 0; c < NCH; c++) begin
        base[c]   <= '0;
        stride[c] <= '0;
        mode[c]   <= '0;
      end
    end else begin
      if (start) done_flag <= 1'b0;
      else if (done) done_flag <= 1'b1;
      if (wr_en) begin
        case (wr_addr)
          R_ITERS:   iters       <= wr_data;
          R_LOOPCFG: exit_on_fab <= wr_data[0];
          R_MACCFG:  mac_cfg     <= mac_cfg_t'(wr_data[6:0]);
          default: ;
        endcase
        for (int c = 0; c < NCH; c++) begin
          if (wr_addr == R_CH0 + 5'(4*c))     base[c]   <= wr_data;
          if (wr_addr == R_CH0 + 5'(4*c + 1)) stride[c] <= wr_data;
          if (wr_addr == R_CH0 + 5'(4*c + 2)) mode[c]   <= wr_data[2:0];
        end
      end
    end
  end

  function automatic logic [DW-1:0] read_reg(logic [4:0] a);
    logic [DW-1:0] v;
    v = '0;
    case (a)
      R_STATUS:  v = {30'd0, done_flag || done, busy};
      R_ITERS:   v = iters;
      R_LOOPCFG: v = {31'd0, exit_on_fab};
      R_ACC:     v = acc;
      R_MACCFG:  v = {25'd0, mac_cfg};
      R_CYCLES:  v = cycles;
      R_ITDONE:  v = iter_count;
      default: ;
    endcase
    for (int c = 0; c < NCH; c++) begin
      if (a == R_CH0 + 5'(4*c))     v = base[c];
      if (a == R_CH0 + 5'(4*c + 1)) v = stride[c];
      if (a == R_CH0 + 5'(4*c + 2)) v = {29'd0, mode[c]};
      if (a == R_CH0 + 5'(4*c + 3)) v = reg_q[c];
    end
    return v;
  endfunction

  assign cfg_rdata = read_reg(cfg_addr);
  assign rb_rdata  = read_reg(rb_addr);

  // ---- blocks ------------------------------------------------------------------
  wcla_opb_slave #(.BASE(OPB_BASE)) u_opb (
    .clk, .rst_n, .opb_req, .opb_rsp,
    .rb_req, .rb_we, .rb_addr, .rb_wdata, .rb_gnt, .rb_rdata
  );

  dadg_lch #(.DEPTH(DEPTH)) u_dadg (
    .clk, .rst_n,
    .start, .iters, .exit_on_fab, .base, .stride, .mode,
    .busy, .done, .iter_count, .cycles,
    .mem_en, .mem_we, .mem_addr, .mem_wdata,
    .mem_ld, .fab_ld, .reg_q, .step, .fab_exit
  );

  wcla_regs u_regs (
    .clk, .rst_n,
    .cfg_we (reg_we), .cfg_data (wr_data),
    .mem_ld, .mem_data (mem_rdata),
    .fab_ld, .fab_data (fab_out),
    .q (reg_q)
  );

  wcla_mac u_mac (
    .clk, .rst_n, .cfg (mac_cfg), .reg_in (reg_q), .step,
    .acc_we, .acc_wdata (wr_data), .out (fab_in), .acc
  );

  assign done_o = done;

endmodule
