// wrap_pkg: shared sizes and types of the WrAP persistent memory controller.
//
// The controller sits between the last-level cache and persistent memory (PM).
// Cache lines are 64 bytes; the controller works on line addresses (byte
// address with the 6 offset bits dropped). Transactions ("wraps") are named
// by a small integer, the thread id, and the set of open wraps is a bit vector
// with one bit per wrap id.
//
// Numbers that follow the paper: 64-byte lines and a delay buffer of 1024
// lines (the paper reports the buffer stays below "1k cache lines or 64KB").
// Own choices: 16 wrap ids (the largest thread count the evaluation uses),
// 48-bit byte addresses, and the notification and PM request encodings below.
package wrap_pkg;

  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;
  localparam int unsigned OFFSET_BITS = $clog2(LINE_BYTES);
  localparam int unsigned ADDR_W      = 48;                 // byte address width
  localparam int unsigned LADDR_W     = ADDR_W - OFFSET_BITS; // line address width

  localparam int unsigned NUM_WRAPS   = 16;
  localparam int unsigned VDB_DEPTH   = 1024;

  typedef logic [ADDR_W-1:0]     addr_t;
  typedef logic [LADDR_W-1:0]    laddr_t;
  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [LINE_BYTES-1:0] strb_t;

  // Kind of notification software sends to the controller.
  typedef enum logic {
    NTF_OPEN  = 1'b0,
    NTF_CLOSE = 1'b1
  } ntf_kind_e;

  // Which source owns the single PM request port in a cycle.
  typedef enum logic [2:0] {
    SRC_NONE   = 3'd0,
    SRC_NOTIFY = 3'd1,   // durability notification write from the DWQ
    SRC_READ   = 3'd2,   // read that missed the delay buffer
    SRC_PASS   = 3'd3,   // pass-through write (log area, or nothing open)
    SRC_DRAIN  = 3'd4    // head of the delay buffer written back
  } pm_src_e;

  // One request to persistent memory. Writes use the byte strobe; reads
  // return a whole line.
  typedef struct packed {
    logic  we;
    addr_t addr;
    line_t data;
    strb_t strb;
  } pm_req_t;

  // One-cycle event pulses of the controller, for counters and testbenches.
  typedef struct packed {
    logic open;       // open notification taken
    logic close;      // close notification taken
    logic strict;     // close with a durability address queued in the DWQ
    logic notify;     // durability write issued to PM
    logic pass_wr;    // write sent straight to PM
    logic log_wr;     // ... of which to the log area
    logic buf_wr;     // write parked in the delay buffer
    logic buf_full;   // write held back because the delay buffer is full
    logic drain;      // delay-buffer head written back to PM
    logic rd_hit;     // read served from the delay buffer
    logic rd_miss;    // read served from PM
  } wrap_ev_t;

endpackage
