// bram_interface: gives the dynamic partitioning module (DPM) access to the
// instruction BRAM of one selected processor.
//
// In the paper the DPM reads the application binary out of the processor's
// dual-ported instruction BRAM (to decompile the critical loop) and finally
// patches the binary so that it uses the new hardware. In the multi-processor
// system one DPM serves every processor, and this interface lets it choose
// whose memory it accesses. The paper gives that function only; the circuit
// below is the simplest that provides it:
//   * a select register, written by the DPM (sel_we, sel_in), names the core;
//   * the DPM's BRAM port (en, we, addr, wdata) is steered to port B of that
//     core's instruction BRAM, the other cores' ports stay disabled;
//   * read data returns one cycle later, taken from the core that was
//     accessed (the core index is registered along with the access), so the
//     select may change between an access and its data.
// With NUM_CORES = 1 (the single-processor system) the select is always 0.
module bram_interface
  import warp_pkg::*;
#(
  parameter int unsigned NUM_CORES = 1,
  parameter int unsigned DEPTH     = 2048,
  localparam int unsigned BAW      = $clog2(DEPTH),
  localparam int unsigned CW       = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // DPM side
  input  logic            sel_we,
  input  logic [CW-1:0]   sel_in,
  output logic [CW-1:0]   sel,
  input  logic            dpm_en,
  input  logic [3:0]      dpm_we,
  input  logic [BAW-1:0]  dpm_addr,
  input  logic [DW-1:0]   dpm_wdata,
  output logic [DW-1:0]   dpm_rdata,
  // port B of each core's instruction BRAM
  output logic            ib_en    [NUM_CORES],
  output logic [3:0]      ib_we    [NUM_CORES],
  output logic [BAW-1:0]  ib_addr  [NUM_CORES],
  output logic [DW-1:0]   ib_wdata [NUM_CORES],
  input  logic [DW-1:0]   ib_rdata [NUM_CORES]
);

  logic [CW-1:0] rd_core;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel     <= '0;
      rd_core <= '0;
    end else begin
      if (sel_we && int'(sel_in) < NUM_CORES) sel <= sel_in;
      if (dpm_en) rd_core <= sel;
    end
  end

  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      ib_en[c]    = dpm_en && (int'(sel) == c);
      ib_we[c]    = (dpm_en && int'(sel) == c) ? dpm_we : 4'b0000;
      ib_addr[c]  = dpm_addr;
      ib_wdata[c] = dpm_wdata;
    end
    dpm_rdata = '0;
    for (int c = 0; c < NUM_CORES; c++)
      if (int'(rd_core) == c) dpm_rdata = ib_rdata[c];
  end

endmodule
