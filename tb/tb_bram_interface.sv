// tb_bram_interface: self-checking test of the DPM's BRAM Interface.
// Three cores' instruction BRAMs hang off the interface. The test writes a
// different image into each core's memory through the interface, reads them
// back, checks that only the selected core's port is enabled, that an out of
// range select is ignored, and that read data follows the core accessed even
// when the select changes right after the access.
module tb_bram_interface;
  import warp_pkg::*;
  localparam int unsigned N = 3, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sel_we; logic [1:0] sel_in, sel;
  logic dpm_en; logic [3:0] dpm_we; logic [5:0] dpm_addr; logic [31:0] dpm_wdata, dpm_rdata;
  logic ib_en [N]; logic [3:0] ib_we [N]; logic [5:0] ib_addr [N];
  logic [31:0] ib_wdata [N]; logic [31:0] ib_rdata [N];
  int checks = 0, failures = 0;

  bram_interface #(.NUM_CORES(N), .DEPTH(DEPTH)) dut (.*);
  for (genvar c = 0; c < N; c++) begin : g_mem
    dp_bram #(.DEPTH(DEPTH)) m (.clk,
      .a_en(1'b0), .a_we(4'h0), .a_addr('0), .a_wdata('0), .a_rdata(),
      .b_en(ib_en[c]), .b_we(ib_we[c]), .b_addr(ib_addr[c]), .b_wdata(ib_wdata[c]), .b_rdata(ib_rdata[c]));
  end

  task automatic check(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [31:0] img(int c, int a); return 32'(c * 32'h0101_0000 + a * 7 + 1); endfunction

  task automatic select(int c);
    @(negedge clk); sel_we = 1; sel_in = 2'(c);
    @(negedge clk); sel_we = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sel_we = 0; sel_in = 0; dpm_en = 0; dpm_we = 0; dpm_addr = 0; dpm_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < N; c++) begin
      select(c);
      check("select register", sel == 2'(c));
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk); dpm_en = 1; dpm_we = 4'hF; dpm_addr = 6'(a); dpm_wdata = img(c, a);
        #1;
        for (int k = 0; k < N; k++) check("only the selected port is enabled", ib_en[k] == (k == c));
      end
      @(negedge clk); dpm_en = 0; dpm_we = 0;
    end
    select(3);   // no such core
    check("out of range select ignored", sel == 2'd2);
    for (int n = 0; n < 100; n++) begin
      int c, a;
      c = $urandom % N; a = $urandom % DEPTH;
      select(c);
      // change the select in the same cycle as the access: the data must
      // still come from the core that was accessed
      @(negedge clk); dpm_en = 1; dpm_we = 0; dpm_addr = 6'(a); sel_we = 1; sel_in = 2'((c + 1) % N);
      @(negedge clk); dpm_en = 0; sel_we = 0;
      check($sformatf("read core %0d word %0d", c, a), dpm_rdata == img(c, a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
