// tb_wcla_opb_slave: self-checking test of the WCLA's OPB slave.
// An OPB master does random reads and writes, inside and outside the slave's
// window, while the register-file grant is randomly withheld. A 32-word array
// behind the slave stands for the register file. Checks: one ack per
// transfer, at the earliest one cycle after select and only after a grant;
// read data; writes land once; no ack outside the window; quiet bus.
module tb_wcla_opb_slave;
  import warp_pkg::*;
  localparam logic [31:0] BASE = 32'h8000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  opb_req_t opb_req; opb_rsp_t opb_rsp;
  logic rb_req, rb_we, rb_gnt; logic [4:0] rb_addr; logic [31:0] rb_wdata, rb_rdata;
  logic [31:0] rf [32];
  logic [31:0] model [32];
  int checks = 0, failures = 0, n_wr_done = 0, n_stall = 0;

  wcla_opb_slave #(.BASE(BASE)) dut (.*);

  assign rb_rdata = rf[rb_addr];
  always_ff @(posedge clk) if (rb_req && rb_gnt && rb_we) begin rf[rb_addr] <= rb_wdata; n_wr_done++; end
  always @(negedge clk) rb_gnt = ($urandom % 3 != 0);
  always @(posedge clk) if (rb_req && !rb_gnt) n_stall++;
  // the response bus must be zero whenever there is no ack
  always @(negedge clk) if (rst_n && !opb_rsp.xfer_ack) begin
    checks++; if (opb_rsp.dbus != 0) begin failures++; $display("FAIL: dbus not quiet"); end
  end

  task automatic check(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(input logic [31:0] a, input logic rnw, input logic [31:0] d,
                      output logic [31:0] q, output int lat);
    @(negedge clk);
    opb_req = '{select: 1'b1, rnw: rnw, abus: a, dbus: d};
    lat = 0;
    do begin @(negedge clk); lat++; end while (!opb_rsp.xfer_ack && lat < 20);
    q = opb_rsp.dbus;
    // like a real OPB master, drop select only after the edge that samples the ack
    @(posedge clk); #1;
    opb_req = '0;
    @(negedge clk);
    check("ack lasts one cycle", !opb_rsp.xfer_ack);
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] q; int lat, wr0;
    opb_req = '0;
    for (int i = 0; i < 32; i++) begin rf[i] = $urandom; model[i] = rf[i]; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int r;
      r = $urandom % 32;
      wr0 = n_wr_done;
      if (n % 10 == 9) begin
        xfer(32'h4000_0000 + 4 * r, 1'b0, 0, q, lat);
        check("no ack outside window", lat == 20);
      end else if ($urandom % 2) begin
        logic [31:0] d;
        d = $urandom;
        xfer(BASE + 4 * r, 1'b0, d, q, lat);
        model[r] = d;
        check("write acked", lat >= 1 && lat < 20);
        check("write done once", n_wr_done == wr0 + 1);
      end else begin
        xfer(BASE + 4 * r + 32'h0, 1'b1, 0, q, lat);
        check("read acked", lat >= 1 && lat < 20);
        check($sformatf("read %0d", r), q == model[r]);
      end
    end
    check("grant stalls seen", n_stall > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
