// tb_lmb_cntrl: self-checking test of the LMB-to-BRAM controller.
// An LMB master writes words and bytes, reads them back, and accesses
// addresses outside the window. Checks: ready exactly one cycle after
// addr_strobe for a hit, never for a miss; read data; dbus zero when idle.
module tb_lmb_cntrl;
  import warp_pkg::*;
  localparam int unsigned DEPTH = 256;
  localparam logic [31:0] BASE = 32'h0000_1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lmb_req_t req;
  lmb_rsp_t rsp;
  logic        en;
  logic [3:0]  we;
  logic [7:0]  addr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [31:0] model [DEPTH];

  lmb_cntrl #(.BASE(BASE), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .lmb_req(req), .lmb_rsp(rsp),
    .bram_en(en), .bram_we(we), .bram_addr(addr), .bram_wdata(wdata), .bram_rdata(rdata));
  dp_bram #(.DEPTH(DEPTH)) mem (
    .clk, .a_en(en), .a_we(we), .a_addr(addr), .a_wdata(wdata), .a_rdata(rdata),
    .b_en(1'b0), .b_we(4'h0), .b_addr('0), .b_wdata('0), .b_rdata());

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one LMB access; returns read data; expects ready next cycle iff in range
  task automatic access(input logic [31:0] a, input logic wr, input logic [3:0] be,
                        input logic [31:0] d, output logic [31:0] q);
    logic inrange;
    inrange = (a >= BASE) && (a < BASE + 4*DEPTH);
    @(negedge clk);
    req = '{abus: a, wdbus: d, be: be, addr_strobe: 1'b1, read_strobe: !wr, write_strobe: wr};
    #1;
    check("no ready during strobe", rsp.ready == 1'b0);
    @(negedge clk);
    req = '0;
    #1;
    check("ready one cycle later iff in range", rsp.ready == inrange);
    q = rsp.dbus;
    @(negedge clk);
    check("idle bus quiet", rsp.ready == 1'b0 && rsp.dbus == '0);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] q, a;
    logic [3:0] be;
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = $urandom;
      access(BASE + 4*i, 1'b1, 4'hF, model[i], q);
    end
    for (int n = 0; n < 300; n++) begin
      int i;
      i = $urandom % DEPTH;
      if ($urandom % 2) begin
        logic [31:0] d;
        d = $urandom; be = 4'($urandom);
        access(BASE + 4*i, 1'b1, be, d, q);
        for (int b = 0; b < 4; b++) if (be[b]) model[i][8*b +: 8] = d[8*b +: 8];
      end else begin
        access(BASE + 4*i, 1'b0, 4'hF, 0, q);
        check($sformatf("read word %0d", i), q == model[i]);
      end
    end
    // out of range: below and above the window
    access(BASE - 4, 1'b0, 4'hF, 0, q);
    access(BASE + 4*DEPTH, 1'b1, 4'hF, 32'hdead_beef, q);
    access(BASE, 1'b0, 4'hF, 0, q);
    check("out-of-range write ignored", q == model[0]);
    // back-to-back reads, one per cycle
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      req = '{abus: BASE + 4*i, wdbus: 0, be: 4'hF, addr_strobe: 1'b1, read_strobe: 1'b1, write_strobe: 1'b0};
      @(negedge clk);
      check("pipelined read", rsp.ready && rsp.dbus == model[i]);
    end
    req = '0;
    check("last pipelined read", rsp.ready && rsp.dbus == model[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
