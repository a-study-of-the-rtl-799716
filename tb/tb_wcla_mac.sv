// tb_wcla_mac: self-checking test of the WCLA's MAC stage.
// Random register values and configurations; checks the pass-through of the
// three outputs, the MAC result on the configured slot (acc + a*b, 32-bit
// wrap), accumulation over steps, that nothing accumulates when disabled, and
// the accumulator load.
module tb_wcla_mac;
  import warp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mac_cfg_t cfg;
  logic [31:0] reg_in [NCH];
  logic [31:0] out [NCH];
  logic [31:0] acc, acc_wdata, m_acc;
  logic step, acc_we;
  int checks = 0, failures = 0;

  wcla_mac dut (.*);

  function automatic int ix(logic [1:0] s); return (s == 3) ? 2 : int'(s); endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0; step = 0; acc_we = 0; acc_wdata = 0;
    for (int i = 0; i < NCH; i++) reg_in[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    m_acc = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] sum;
      @(negedge clk);
      if (n % 50 == 0) cfg = mac_cfg_t'($urandom);
      for (int i = 0; i < NCH; i++) reg_in[i] = (n % 7 == 0) ? $urandom : $urandom % 1000;
      step = 1'($urandom); acc_we = ($urandom % 40 == 0); acc_wdata = $urandom;
      #1;
      sum = m_acc + reg_in[ix(cfg.sel_a)] * reg_in[ix(cfg.sel_b)];
      for (int i = 0; i < NCH; i++) begin
        checks++;
        if (out[i] !== ((cfg.en && ix(cfg.slot) == i) ? sum : reg_in[i])) begin
          failures++; $display("FAIL out[%0d] %h", i, out[i]);
        end
      end
      checks++;
      if (acc !== m_acc) begin failures++; $display("FAIL acc %h exp %h", acc, m_acc); end
      if (acc_we) m_acc = acc_wdata;
      else if (step && cfg.en) m_acc = sum;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
