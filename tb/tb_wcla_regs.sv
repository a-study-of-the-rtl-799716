// tb_wcla_regs: self-checking test of Reg0-Reg2.
// Random simultaneous load requests from the configuration write, the DADG's
// memory bus and the fabric's result bus; checks the priority and that a
// register holds when nothing loads it.
module tb_wcla_regs;
  import warp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we [NCH]; logic [31:0] cfg_data;
  logic mem_ld [NCH]; logic [31:0] mem_data;
  logic fab_ld [NCH]; logic [31:0] fab_data [NCH];
  logic [31:0] q [NCH];
  logic [31:0] m [NCH];
  int checks = 0, failures = 0;

  wcla_regs dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < NCH; i++) begin cfg_we[i] = 0; mem_ld[i] = 0; fab_ld[i] = 0; fab_data[i] = 0; m[i] = 0; end
    cfg_data = 0; mem_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      for (int i = 0; i < NCH; i++) begin
        checks++;
        if (q[i] !== m[i]) begin failures++; $display("FAIL reg%0d %h exp %h", i, q[i], m[i]); end
      end
      cfg_data = $urandom; mem_data = $urandom;
      for (int i = 0; i < NCH; i++) begin
        cfg_we[i] = ($urandom % 5 == 0); mem_ld[i] = ($urandom % 3 == 0); fab_ld[i] = ($urandom % 2 == 0);
        fab_data[i] = $urandom;
        if (cfg_we[i]) m[i] = cfg_data;
        else if (mem_ld[i]) m[i] = mem_data;
        else if (fab_ld[i]) m[i] = fab_data[i];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
