// warp_pkg: types and constants shared by the warp processor blocks.
//
// Bus bundles: the MicroBlaze Local Memory Bus (LMB) request and response, and
// the On-chip Peripheral Bus (OPB) request and slave response. Signal names
// follow the Xilinx/CoreConnect conventions (AddrStrobe, ReadStrobe, xferAck ...)
// but bit vectors are little-endian [31:0] here rather than the vendor's [0:31].
// The WCLA register map and the channel mode bits are this design's own choice;
// the paper does not give a programming model for the WCLA.
package warp_pkg;

  localparam int unsigned DW = 32;   // MicroBlaze data width (paper: 32-bit core)
  localparam int unsigned AW = 32;   // MicroBlaze address width

  // Local Memory Bus, master to slave
  typedef struct packed {
    logic [AW-1:0] abus;        // byte address
    logic [DW-1:0] wdbus;       // write data
    logic [3:0]    be;          // byte enables, be[0] = bits 7:0
    logic          addr_strobe; // start of an access
    logic          read_strobe;
    logic          write_strobe;
  } lmb_req_t;

  // Local Memory Bus, slave to master
  typedef struct packed {
    logic [DW-1:0] dbus;        // read data, valid with ready
    logic          ready;       // access complete
  } lmb_rsp_t;

  // On-chip Peripheral Bus, master side
  typedef struct packed {
    logic          select;      // held until the slave acknowledges
    logic          rnw;         // 1 = read
    logic [AW-1:0] abus;
    logic [DW-1:0] dbus;        // write data
  } opb_req_t;

  // On-chip Peripheral Bus, slave side (all zero when not acknowledging,
  // so that slave responses can be ORed together on the bus)
  typedef struct packed {
    logic          xfer_ack;
    logic [DW-1:0] dbus;
  } opb_rsp_t;

  // ---- WCLA register map (word index = byte offset / 4) -------------------
  localparam logic [4:0] R_CTRL    = 5'h00;  // W: bit0 = start
  localparam logic [4:0] R_STATUS  = 5'h01;  // R: bit0 busy, bit1 done
  localparam logic [4:0] R_ITERS   = 5'h02;  // loop iteration count (LCH)
  localparam logic [4:0] R_LOOPCFG = 5'h03;  // bit0: also stop on fabric exit
  localparam logic [4:0] R_ACC     = 5'h04;  // MAC accumulator
  localparam logic [4:0] R_MACCFG  = 5'h05;  // bit0 en, [2:1] A, [4:3] B, [6:5] slot
  localparam logic [4:0] R_CYCLES  = 5'h06;  // R: cycles of the last run
  localparam logic [4:0] R_ITDONE  = 5'h07;  // R: iterations of the last run
  // per channel c (0..2): base address 8+4c, stride 9+4c, mode 10+4c, value 11+4c
  localparam logic [4:0] R_CH0     = 5'h08;

  // channel mode bits
  localparam int unsigned M_RD  = 0;  // load Reg from memory at the start of an iteration
  localparam int unsigned M_FAB = 1;  // load Reg from the fabric's result bus each iteration
  localparam int unsigned M_WR  = 2;  // store Reg to memory at the end of an iteration

  localparam int unsigned NCH = 3;    // Reg0, Reg1, Reg2

  // MACCFG register layout: bit0 en, [2:1] sel_a, [4:3] sel_b, [6:5] slot
  typedef struct packed {
    logic [1:0] slot;   // which of the three outputs to the fabric carries the MAC result
    logic [1:0] sel_b;  // multiplier operands: Reg index (3 acts as 2)
    logic [1:0] sel_a;
    logic       en;
  } mac_cfg_t;

  // One profiler cache entry as seen by the DPM
  typedef struct packed {
    logic          valid;
    logic [AW-1:0] src;    // address of the backward branch
    logic [AW-1:0] tgt;    // its target, the loop head
    logic [15:0]   count;  // branch frequency
  } prof_entry_t;

endpackage
