// wcla_opb_slave: On-chip Peripheral Bus (OPB) slave of the WCLA.
//
// The paper's WCLA talks to the MicroBlaze over the OPB: the patched binary
// uses it to hand the loop to the hardware and to learn when it has finished.
// This module turns OPB transfers in its address window [BASE, BASE + 128)
// into accesses of the WCLA's 32-word register file (see warp_pkg for the map).
//
// OPB behaviour (the usual CoreConnect slave handshake; bit order [31:0]):
//   * a master holds select, rnw, abus and dbus until the slave's xfer_ack;
//   * the slave issues one register access when select is high, the address is
//     in its window and it is not already acknowledging; the access is done in
//     that cycle if rb_gnt is high (the register file may be busy with the
//     DPM's configuration port, which has priority) and is retried otherwise;
//   * xfer_ack is raised for exactly one cycle, the cycle after the access,
//     with the read data on dbus; outside that cycle dbus is zero, so slave
//     responses can be ORed onto the bus.
// Minimum latency is therefore 1 wait cycle: select in cycle t, ack in t + 1.
module wcla_opb_slave
  import warp_pkg::*;
#(
  parameter logic [AW-1:0] BASE = 32'h8000_0000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  opb_req_t        opb_req,
  output opb_rsp_t        opb_rsp,
  // register file access
  output logic            rb_req,
  output logic            rb_we,
  output logic [4:0]      rb_addr,
  output logic [DW-1:0]   rb_wdata,
  input  logic            rb_gnt,
  input  logic [DW-1:0]   rb_rdata
);

  logic          hit;
  logic          ack_q;
  logic [DW-1:0] data_q;

  assign hit      = opb_req.select && (opb_req.abus[AW-1:7] == BASE[AW-1:7]);
  assign rb_req   = hit && !ack_q;
  assign rb_we    = !opb_req.rnw;
  assign rb_addr  = opb_req.abus[6:2];
  assign rb_wdata = opb_req.dbus;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_q  <= 1'b0;
      data_q <= '0;
    end else begin
      ack_q  <= rb_req && rb_gnt;
      data_q <= (rb_req && rb_gnt && opb_req.rnw) ? rb_rdata : '0;
    end
  end

  assign opb_rsp.xfer_ack = ack_q;
  assign opb_rsp.dbus     = ack_q ? data_q : '0;

  // a master must keep select asserted until it is acknowledged
  a_hold_select: assert property (@(posedge clk) disable iff (!rst_n)
    (rb_req && !rb_gnt) |=> opb_req.select);

endmodule
