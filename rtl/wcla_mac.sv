// wcla_mac: the WCLA's 32-bit multiplier-accumulator stage.
//
// In the paper's WCLA the three registers Reg0-Reg2 feed the configurable logic
// fabric either directly or through a 32-bit multiplier-accumulator (MAC); the
// figure draws the MAC as a layer between the registers and the fabric, with
// three inputs and three outputs. This module is that layer:
//   * out[i] = reg_in[i] for every i, except that when the MAC is enabled the
//     output cfg.slot carries the MAC result instead;
//   * the MAC result is acc + reg_in[cfg.sel_a] * reg_in[cfg.sel_b], the low
//     32 bits of the product added to the 32-bit accumulator (wrapping), i.e.
//     the value the accumulator takes at the end of the current step;
//   * step (one pulse per loop iteration, from the loop control hardware)
//     commits that value to the accumulator;
//   * acc_we loads the accumulator (initial value, or clearing it).
// The multiply and add are combinational, so the fabric sees the updated sum
// in the same cycle. Operand selection, wrap-around and single-cycle timing are
// this design's choices; the paper gives only the width and the placement.
module wcla_mac
  import warp_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  mac_cfg_t      cfg,
  input  logic [DW-1:0] reg_in [NCH],
  input  logic          step,
  input  logic          acc_we,
  input  logic [DW-1:0] acc_wdata,
  output logic [DW-1:0] out    [NCH],
  output logic [DW-1:0] acc
);

  logic [DW-1:0] a, b, sum;

  // a slot/select value of 3 is treated as 2
  function automatic int unsigned idx(logic [1:0] s);
    return (s == 2'd3) ? 2 : int'(s);
  endfunction

  always_comb begin
    a   = reg_in[idx(cfg.sel_a)];
    b   = reg_in[idx(cfg.sel_b)];
    sum = acc + DW'(a * b);
    for (int i = 0; i < NCH; i++)
      out[i] = (cfg.en && idx(cfg.slot) == i) ? sum : reg_in[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               acc <= '0;
    else if (acc_we)          acc <= acc_wdata;
    else if (step && cfg.en)  acc <= sum;
  end

endmodule
