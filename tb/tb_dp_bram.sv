// tb_dp_bram: self-checking test of the dual-port BRAM.
// Random byte-masked writes and reads on both ports against a reference
// array; checks the one-cycle read latency and read-first behaviour.
module tb_dp_bram;
  localparam int unsigned DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        a_en, b_en;
  logic [3:0]  a_we, b_we;
  logic [5:0]  a_addr, b_addr;
  logic [31:0] a_wdata, b_wdata, a_rdata, b_rdata;
  int checks = 0, failures = 0;
  logic [31:0] model [DEPTH];

  dp_bram #(.DEPTH(DEPTH)) dut (.*);

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] we);
    for (int i = 0; i < 4; i++) if (we[i]) old[8*i +: 8] = d[8*i +: 8];
    return old;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_a, exp_b;
    logic        chk_a, chk_b;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // initialise every word through port A, full writes
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 4'hF; a_addr = 6'(i); a_wdata = $urandom; model[i] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    chk_a = 0; chk_b = 0; exp_a = 0; exp_b = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // check the reads issued in the previous cycle
      if (chk_a) begin checks++; if (a_rdata !== exp_a) begin failures++; $display("A mismatch %h %h", a_rdata, exp_a); end end
      if (chk_b) begin checks++; if (b_rdata !== exp_b) begin failures++; $display("B mismatch %h %h", b_rdata, exp_b); end end
      a_en = 1'($urandom); b_en = 1'($urandom);
      a_we = ($urandom % 3 == 0) ? 4'($urandom) : 4'h0;
      b_we = ($urandom % 3 == 0) ? 4'($urandom) : 4'h0;
      a_addr = 6'($urandom); b_addr = 6'($urandom);
      if (a_addr == b_addr) b_we = 4'h0;   // no same-word write collisions
      a_wdata = $urandom; b_wdata = $urandom;
      chk_a = a_en; chk_b = b_en;
      exp_a = model[a_addr]; exp_b = model[b_addr];   // read-first
      if (a_en) model[a_addr] = merge(model[a_addr], a_wdata, a_we);
      if (b_en) model[b_addr] = merge(model[b_addr], b_wdata, b_we);
    end
    @(negedge clk);
    if (chk_a) begin checks++; if (a_rdata !== exp_a) failures++; end
    if (chk_b) begin checks++; if (b_rdata !== exp_b) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
