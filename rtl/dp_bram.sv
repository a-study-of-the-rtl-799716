// dp_bram: true dual-port block RAM, used for both the instruction BRAM and
// the data BRAM of each processor.
//
// The paper's system keeps the MicroBlaze's program and data in two on-chip
// BRAMs whose size is user defined. Both are dual ported: port A serves the
// processor through its LMB controller; port B of the instruction BRAM serves
// the dynamic partitioning module (through the BRAM Interface), which reads
// and patches the binary, and port B of the data BRAM serves the WCLA's data
// address generator. The depth (2048 words = 8 KB) is this design's choice.
//
// Interface: per port an enable, byte write enables, a word address, write
// data and read data. Timing: synchronous, one cycle read latency; a read that
// coincides with a write on the same port returns the old word (read-first).
// When both ports write the same word in one cycle the result is undefined,
// as in an FPGA block RAM (here port B wins).
module dp_bram #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned DW    = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  // port A
  input  logic            a_en,
  input  logic [DW/8-1:0] a_we,
  input  logic [AW-1:0]   a_addr,
  input  logic [DW-1:0]   a_wdata,
  output logic [DW-1:0]   a_rdata,
  // port B
  input  logic            b_en,
  input  logic [DW/8-1:0] b_we,
  input  logic [AW-1:0]   b_addr,
  input  logic [DW-1:0]   b_wdata,
  output logic [DW-1:0]   b_rdata
);

  logic [DW-1:0] mem [DEPTH];

  // One process for both ports, as the tools require of a single array.
  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      for (int i = 0; i < DW/8; i++)
        if (a_we[i]) mem[a_addr][8*i +: 8] <= a_wdata[8*i +: 8];
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      for (int i = 0; i < DW/8; i++)
        if (b_we[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
    end
  end

endmodule
