// lmb_cntrl: Local Memory Bus to BRAM interface controller.
//
// The paper places one of these between the MicroBlaze and each of its two
// BRAMs (instruction side i_lmb, data side d_lmb). It decodes the LMB access,
// drives the BRAM port and acknowledges the processor. The paper names the
// block only; this is the simplest controller with the usual LMB behaviour:
//   * the BRAM is enabled in the cycle of addr_strobe when the address falls
//     in [BASE, BASE + 4*DEPTH);
//   * a write uses write_strobe and the byte enables;
//   * ready rises one cycle later, together with the BRAM's read data, so
//     every access takes one cycle of latency and a new access may start in
//     every cycle;
//   * dbus is zero when ready is low, so several LMB slaves may be ORed.
module lmb_cntrl
  import warp_pkg::*;
#(
  parameter logic [AW-1:0] BASE  = '0,
  parameter int unsigned   DEPTH = 2048,        // words behind this controller
  localparam int unsigned  BAW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // LMB slave side
  input  lmb_req_t        lmb_req,
  output lmb_rsp_t        lmb_rsp,
  // BRAM port
  output logic            bram_en,
  output logic [3:0]      bram_we,
  output logic [BAW-1:0]  bram_addr,
  output logic [DW-1:0]   bram_wdata,
  input  logic [DW-1:0]   bram_rdata
);

  logic [AW-1:0] offset;
  logic          hit;
  logic          ack_q;

  assign offset     = lmb_req.abus - BASE;
  // an address below BASE wraps to a large offset and misses as well
  assign hit        = lmb_req.addr_strobe && ({2'b00, offset[AW-1:2]} < AW'(DEPTH));
  assign bram_en    = hit;
  assign bram_we    = (hit && lmb_req.write_strobe) ? lmb_req.be : 4'b0000;
  assign bram_addr  = offset[BAW+1:2];
  assign bram_wdata = lmb_req.wdbus;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ack_q <= 1'b0;
    else        ack_q <= hit;
  end

  assign lmb_rsp.ready = ack_q;
  assign lmb_rsp.dbus  = ack_q ? bram_rdata : '0;

endmodule
