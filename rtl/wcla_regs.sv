// wcla_regs: the WCLA's three input/output registers Reg0, Reg1 and Reg2.
//
// In the paper each array the hardware loop touches is held in one of these
// registers: data the data address generator (DADG) reads from memory is placed
// in a register, the registers drive the MAC stage and the configurable logic
// fabric, and the fabric's outputs come back to the registers on a dedicated
// bus, from where the DADG stores them to memory.
//
// Each register has three load sources, in priority order:
//   1. cfg_we[i]  - a register write from the processor or the DPM (initial
//                   values of scalars, e.g. a running result);
//   2. mem_ld[i]  - the word the DADG has just read (shared bus mem_data);
//   3. fab_ld[i]  - the fabric's result bus fab_data[i].
// Otherwise it holds. All loads take effect at the clock edge. The priority and
// the configuration write are this design's choices.
module wcla_regs
  import warp_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we   [NCH],
  input  logic [DW-1:0] cfg_data,
  input  logic          mem_ld   [NCH],
  input  logic [DW-1:0] mem_data,
  input  logic          fab_ld   [NCH],
  input  logic [DW-1:0] fab_data [NCH],
  output logic [DW-1:0] q        [NCH]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCH; i++) q[i] <= '0;
    end else begin
      for (int i = 0; i < NCH; i++) begin
        if (cfg_we[i])      q[i] <= cfg_data;
        else if (mem_ld[i]) q[i] <= mem_data;
        else if (fab_ld[i]) q[i] <= fab_data[i];
      end
    end
  end

endmodule
