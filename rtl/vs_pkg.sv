// vs_pkg: constants and types shared by the trigger-logic validation system.
//
// The host and the FPGA exchange everything as 32-bit words over AXI; one
// validation cycle (one event) moves at most 4096 such words in each
// direction. Both numbers are the system's own published sizes. The AXI burst
// limit, the 64-bit address width and the control-register map are this
// design's choices (AXI4 maximum burst; the usual accelerator-kernel layout of
// an AXI4-Lite control port with start/done/idle flags).
package vs_pkg;

  localparam int unsigned AXI_DATA_W = 32;    // every transfer is a 32-bit word
  localparam int unsigned AXI_ADDR_W = 64;
  localparam int unsigned BUF_WORDS  = 4096;  // words per event, each direction
  localparam int unsigned MAX_BURST  = 256;   // AXI4 INCR burst limit
  localparam int unsigned CNT_W      = 16;    // width of clock / word counters

  // AXI4-Lite control register byte offsets
  localparam logic [5:0] REG_CTRL     = 6'h00; // b0 start(w)/busy(r) b1 done(r, clear on read) b2 idle(r)
  localparam logic [5:0] REG_IN_LO    = 6'h10; // input buffer address [31:0]
  localparam logic [5:0] REG_IN_HI    = 6'h14; // input buffer address [63:32]
  localparam logic [5:0] REG_OUT_LO   = 6'h18; // output buffer address [31:0]
  localparam logic [5:0] REG_OUT_HI   = 6'h1C; // output buffer address [63:32]
  localparam logic [5:0] REG_IN_CLKS  = 6'h20; // trigger clocks of input per event
  localparam logic [5:0] REG_OUT_CLKS = 6'h24; // trigger clocks of output to capture

  // Parameters of one validation cycle, as set by the host.
  typedef struct packed {
    logic [AXI_ADDR_W-1:0] in_addr;
    logic [AXI_ADDR_W-1:0] out_addr;
    logic [CNT_W-1:0]      in_clks;
    logic [CNT_W-1:0]      out_clks;
  } run_cfg_t;

  typedef enum logic [2:0] {
    S_IDLE,   // waiting for start
    S_LOAD,   // reading the event from DDR into the input buffer
    S_RUN,    // playing the event through the trigger logic, capturing outputs
    S_DRAIN,  // writing the captured outputs back to DDR
    S_DONE    // raising done
  } seq_state_t;

endpackage
