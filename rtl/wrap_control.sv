// wrap_control: the Control block of the WrAP persistent memory controller.
//
// It takes the three kinds of traffic that reach the controller and drives the
// COT, the Volatile Delay Buffer (VDB), the Dependency Wait Queue (DWQ) and the
// single request port to persistent memory (PM).
//
// Memory write (a cache eviction or streaming store, one 64-byte line): a write
// into the log area [log_base, log_limit) goes straight to PM. Any other write
// goes to PM directly only when no wrap is open and the VDB is empty; otherwise
// it is pushed into the VDB tagged with the current COT. The paper writes
// through whenever the COT is empty; this design also waits for the VDB to
// empty, so that a line cannot overtake an older copy of itself still queued
// (with an empty dependency set) in the VDB.
//
// Memory read: the VDB hash table is consulted first and a hit returns the
// newest buffered copy; a miss reads PM. One read is in flight at a time.
//
// Notifications: open sets the wrap's COT bit. Close clears it, clears the
// wrap from every VDB and DWQ dependency set, and, when a durability address is
// given (non-zero), queues (COT without the closer, address) in the DWQ. A
// write and a notification in the same cycle are ordered write first.
//
// PM port: one request per cycle, fixed priority durability write, read miss,
// pass-through write, VDB write-back. The durability write stores the 64-bit
// value 1 at the durability address (byte strobes select that word).
//
// Timing: writes and notifications take one cycle when accepted; a VDB read
// hit answers 1 + (chain steps) cycles after the request, a miss adds the PM
// latency. All handshakes are valid/ready.
//
// Following the paper: the write routing, the read path through the hash
// table, the close actions and the write of 1 to the durability address. Own
// choices: the handshakes, the PM arbitration order, the VDB-empty condition
// for pass-through and the 64-bit notification word.
module wrap_control #(
  parameter int unsigned NW = wrap_pkg::NUM_WRAPS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // log area bounds, programmed by software
  input  wrap_pkg::addr_t         log_base,
  input  wrap_pkg::addr_t         log_limit,
  // memory write from the cache side
  input  logic                    wr_valid,
  output logic                    wr_ready,
  input  wrap_pkg::addr_t         wr_addr,
  input  wrap_pkg::line_t         wr_data,
  // memory read from the cache side
  input  logic                    rd_valid,
  output logic                    rd_ready,
  input  wrap_pkg::addr_t         rd_addr,
  output logic                    rd_rsp_valid,
  output wrap_pkg::line_t         rd_rsp_data,
  // open / close notifications
  input  logic                    ntf_valid,
  output logic                    ntf_ready,
  input  wrap_pkg::ntf_kind_e     ntf_kind,
  input  wrap_pkg::addr_t         ntf_dur_addr,
  // COT
  output logic                    cot_ntf_valid,
  input  logic [NW-1:0]           cot,
  input  logic                    cot_empty,
  // VDB
  output logic                    vdb_push_valid,
  input  logic                    vdb_push_ready,
  output wrap_pkg::laddr_t        vdb_push_addr,
  output logic [NW-1:0]           vdb_push_ds,
  output logic                    clr_valid,
  input  logic                    vdb_head_valid,
  output logic                    vdb_head_pop,
  input  wrap_pkg::laddr_t        vdb_head_addr,
  input  wrap_pkg::line_t         vdb_head_data,
  output logic                    vdb_lk_valid,
  input  logic                    vdb_lk_ready,
  output wrap_pkg::laddr_t        vdb_lk_addr,
  input  logic                    vdb_lk_done,
  input  logic                    vdb_lk_hit,
  input  wrap_pkg::line_t         vdb_lk_data,
  input  logic                    vdb_empty,
  // DWQ
  output logic                    dwq_push_valid,
  input  logic                    dwq_push_ready,
  input  logic                    dwq_notify_valid,
  input  wrap_pkg::addr_t         dwq_notify_addr,
  output logic                    dwq_notify_pop,
  // persistent memory
  output logic                    pm_req_valid,
  input  logic                    pm_req_ready,
  output wrap_pkg::pm_req_t       pm_req,
  input  logic                    pm_rsp_valid,
  input  wrap_pkg::line_t         pm_rsp_data,
  // event pulses
  output wrap_pkg::wrap_ev_t      ev
);
  import wrap_pkg::*;

  typedef enum logic [1:0] {RD_IDLE, RD_LOOKUP, RD_PM, RD_WAIT} rd_state_e;

  // ---------------- notifications
  logic is_close, is_strict;
  assign is_close       = (ntf_kind == NTF_CLOSE);
  assign is_strict      = is_close && (ntf_dur_addr != '0);
  assign ntf_ready      = !is_strict || dwq_push_ready;
  assign cot_ntf_valid  = ntf_valid && ntf_ready;
  assign clr_valid      = cot_ntf_valid && is_close;
  assign dwq_push_valid = cot_ntf_valid && is_strict;

  // ---------------- writes
  logic wr_is_log, wr_pass;
  assign wr_is_log = (wr_addr >= log_base) && (wr_addr < log_limit);
  assign wr_pass   = wr_is_log || (cot_empty && vdb_empty);

  assign vdb_push_valid = wr_valid && !wr_pass;
  assign vdb_push_addr  = wr_addr[ADDR_W-1:OFFSET_BITS];
  assign vdb_push_ds    = cot;

  // ---------------- reads
  rd_state_e rd_state;
  laddr_t    rd_line;

  assign rd_ready     = (rd_state == RD_IDLE) && vdb_lk_ready;
  assign vdb_lk_valid = rd_valid && rd_ready;
  assign vdb_lk_addr  = rd_addr[ADDR_W-1:OFFSET_BITS];

  // ---------------- PM arbitration
  pm_src_e src;
  logic    gnt;

  always_comb begin
    if      (dwq_notify_valid)           src = SRC_NOTIFY;
    else if (rd_state == RD_PM)          src = SRC_READ;
    else if (wr_valid && wr_pass)        src = SRC_PASS;
    else if (vdb_head_valid)             src = SRC_DRAIN;
    else                                 src = SRC_NONE;
  end

  assign pm_req_valid = (src != SRC_NONE);
  assign gnt          = pm_req_valid && pm_req_ready;

  always_comb begin
    pm_req = '0;
    unique case (src)
      SRC_NOTIFY: begin
        pm_req.we   = 1'b1;
        pm_req.addr = {dwq_notify_addr[ADDR_W-1:OFFSET_BITS], OFFSET_BITS'(0)};
        pm_req.data = line_t'(64'd1) << (64 * dwq_notify_addr[OFFSET_BITS-1:3]);
        pm_req.strb = strb_t'(8'hFF) << (8 * dwq_notify_addr[OFFSET_BITS-1:3]);
      end
      SRC_READ: begin
        pm_req.we   = 1'b0;
        pm_req.addr = {rd_line, OFFSET_BITS'(0)};
      end
      SRC_PASS: begin
        pm_req.we   = 1'b1;
        pm_req.addr = {wr_addr[ADDR_W-1:OFFSET_BITS], OFFSET_BITS'(0)};
        pm_req.data = wr_data;
        pm_req.strb = '1;
      end
      SRC_DRAIN: begin
        pm_req.we   = 1'b1;
        pm_req.addr = {vdb_head_addr, OFFSET_BITS'(0)};
        pm_req.data = vdb_head_data;
        pm_req.strb = '1;
      end
      default: ;
    endcase
  end

  assign dwq_notify_pop = gnt && (src == SRC_NOTIFY);
  assign vdb_head_pop   = gnt && (src == SRC_DRAIN);
  assign wr_ready       = wr_pass ? (gnt && src == SRC_PASS) : vdb_push_ready;

  // ---------------- read state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_state <= RD_IDLE;
      rd_line  <= '0;
    end else begin
      unique case (rd_state)
        RD_IDLE:   if (vdb_lk_valid) begin
                     rd_state <= RD_LOOKUP;
                     rd_line  <= vdb_lk_addr;
                   end
        RD_LOOKUP: if (vdb_lk_done) rd_state <= vdb_lk_hit ? RD_IDLE : RD_PM;
        RD_PM:     if (gnt && src == SRC_READ) rd_state <= RD_WAIT;
        RD_WAIT:   if (pm_rsp_valid) rd_state <= RD_IDLE;
        default:   rd_state <= RD_IDLE;
      endcase
    end
  end

  assign rd_rsp_valid = (rd_state == RD_LOOKUP && vdb_lk_done && vdb_lk_hit) ||
                        (rd_state == RD_WAIT && pm_rsp_valid);
  assign rd_rsp_data  = (rd_state == RD_LOOKUP) ? vdb_lk_data : pm_rsp_data;

  // ---------------- events
  always_comb begin
    ev          = '0;
    ev.open     = cot_ntf_valid && !is_close;
    ev.close    = clr_valid;
    ev.strict   = dwq_push_valid;
    ev.notify   = dwq_notify_pop;
    ev.pass_wr  = wr_valid && wr_ready && wr_pass;
    ev.log_wr   = wr_valid && wr_ready && wr_pass && wr_is_log;
    ev.buf_wr   = vdb_push_valid && vdb_push_ready;
    ev.buf_full = vdb_push_valid && !vdb_push_ready;
    ev.drain    = vdb_head_pop;
    ev.rd_hit   = rd_state == RD_LOOKUP && vdb_lk_done && vdb_lk_hit;
    ev.rd_miss  = rd_state == RD_WAIT && pm_rsp_valid;
  end

  a_rsp_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    pm_rsp_valid |-> rd_state == RD_WAIT);
  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data));
endmodule
