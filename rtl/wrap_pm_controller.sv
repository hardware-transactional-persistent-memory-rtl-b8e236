// wrap_pm_controller: WrAP persistent memory controller (top level).
//
// The controller is placed between the processor's last-level cache and
// persistent memory (PM). It makes the updates of hardware transactions (HTM)
// reach PM only once recovery is guaranteed to replay their logs, without any
// change to the processor: software tells it when a transaction ("wrap")
// opens and closes, and every dirty line evicted while wraps are open is held
// in the Volatile Delay Buffer until all wraps that were open at the moment of
// the eviction have closed (and so have persisted their logs). Writes to the
// log area pass straight through. A closing wrap that asks for strict
// durability gets the value 1 written to its durability address once every
// wrap open at its close has closed too.
//
// Blocks: wrap_control (routing, reads, PM arbitration), wrap_cot (set of open
// wraps), wrap_vdb (FIFO + hash table of delayed lines) and wrap_dwq (strict
// durability wait queue). PM itself is outside, behind one valid/ready request
// port (reads answered in order on pm_rsp_*).
//
// Interface summary (all valid/ready, one clock, active-low async reset):
//   wr_*    line write from the cache side (eviction / streaming store)
//   rd_*    line read from the cache side, answered on rd_rsp_*
//   ntf_*   open / close notification; a close with ntf_dur_addr != 0 asks
//           for strict durability
//   pm_*    request port to PM and its read response
//   log_base / log_limit   log-area bounds (byte addresses, limit exclusive)
//   vdb_count, vdb_max_count, dwq_count, cot, ev   status and event pulses
//
// Sizes: NW wrap ids (16 by default), VDB_DEPTH lines of 64 bytes (1024, the
// paper's bound of "less than 1k cache lines or 64KB"), 2**HASH_BITS hash
// buckets and DWQ_DEPTH wait-queue entries (one per wrap).
module wrap_pm_controller #(
  parameter int unsigned NW        = wrap_pkg::NUM_WRAPS,
  parameter int unsigned VDB_DEPTH = wrap_pkg::VDB_DEPTH,
  parameter int unsigned HASH_BITS = 10,
  parameter int unsigned DWQ_DEPTH = NW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  wrap_pkg::addr_t           log_base,
  input  wrap_pkg::addr_t           log_limit,
  input  logic                      wr_valid,
  output logic                      wr_ready,
  input  wrap_pkg::addr_t           wr_addr,
  input  wrap_pkg::line_t           wr_data,
  input  logic                      rd_valid,
  output logic                      rd_ready,
  input  wrap_pkg::addr_t           rd_addr,
  output logic                      rd_rsp_valid,
  output wrap_pkg::line_t           rd_rsp_data,
  input  logic                      ntf_valid,
  output logic                      ntf_ready,
  input  wrap_pkg::ntf_kind_e       ntf_kind,
  input  logic [$clog2(NW)-1:0]     ntf_id,
  input  wrap_pkg::addr_t           ntf_dur_addr,
  output logic                      pm_req_valid,
  input  logic                      pm_req_ready,
  output wrap_pkg::pm_req_t         pm_req,
  input  logic                      pm_rsp_valid,
  input  wrap_pkg::line_t           pm_rsp_data,
  output logic [NW-1:0]             cot,
  output logic [$clog2(VDB_DEPTH):0] vdb_count,
  output logic [$clog2(VDB_DEPTH):0] vdb_max_count,
  output logic [$clog2(DWQ_DEPTH):0] dwq_count,
  output wrap_pkg::wrap_ev_t        ev
);
  import wrap_pkg::*;

  logic          cot_ntf_valid, cot_empty;
  logic [NW-1:0] cot_less_closer;
  logic          clr_valid;

  logic          vdb_push_valid, vdb_push_ready;
  laddr_t        vdb_push_addr;
  logic [NW-1:0] vdb_push_ds;
  logic          vdb_head_valid, vdb_head_pop;
  laddr_t        vdb_head_addr;
  line_t         vdb_head_data;
  logic          vdb_lk_valid, vdb_lk_ready, vdb_lk_done, vdb_lk_hit;
  laddr_t        vdb_lk_addr;
  line_t         vdb_lk_data;
  logic          vdb_empty;

  logic          dwq_push_valid, dwq_push_ready, dwq_notify_valid, dwq_notify_pop;
  addr_t         dwq_notify_addr;

  wrap_control #(.NW(NW)) u_control (
    .clk, .rst_n, .log_base, .log_limit,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .rd_valid, .rd_ready, .rd_addr, .rd_rsp_valid, .rd_rsp_data,
    .ntf_valid, .ntf_ready, .ntf_kind, .ntf_dur_addr,
    .cot_ntf_valid, .cot, .cot_empty,
    .vdb_push_valid, .vdb_push_ready, .vdb_push_addr, .vdb_push_ds, .clr_valid,
    .vdb_head_valid, .vdb_head_pop, .vdb_head_addr, .vdb_head_data,
    .vdb_lk_valid, .vdb_lk_ready, .vdb_lk_addr, .vdb_lk_done, .vdb_lk_hit, .vdb_lk_data,
    .vdb_empty,
    .dwq_push_valid, .dwq_push_ready, .dwq_notify_valid, .dwq_notify_addr, .dwq_notify_pop,
    .pm_req_valid, .pm_req_ready, .pm_req, .pm_rsp_valid, .pm_rsp_data,
    .ev
  );

  wrap_cot #(.NW(NW)) u_cot (
    .clk, .rst_n,
    .ntf_valid(cot_ntf_valid), .ntf_kind, .ntf_id,
    .cot, .cot_less_closer, .cot_empty
  );

  wrap_vdb #(.DEPTH(VDB_DEPTH), .NW(NW), .HASH_BITS(HASH_BITS)) u_vdb (
    .clk, .rst_n,
    .push_valid(vdb_push_valid), .push_ready(vdb_push_ready),
    .push_addr(vdb_push_addr), .push_data(wr_data), .push_ds(vdb_push_ds),
    .clr_valid, .clr_id(ntf_id),
    .head_valid(vdb_head_valid), .head_pop(vdb_head_pop),
    .head_addr(vdb_head_addr), .head_data(vdb_head_data),
    .lk_valid(vdb_lk_valid), .lk_ready(vdb_lk_ready), .lk_addr(vdb_lk_addr),
    .lk_done(vdb_lk_done), .lk_hit(vdb_lk_hit), .lk_data(vdb_lk_data),
    .count(vdb_count), .max_count(vdb_max_count), .empty(vdb_empty)
  );

  wrap_dwq #(.DEPTH(DWQ_DEPTH), .NW(NW)) u_dwq (
    .clk, .rst_n,
    .push_valid(dwq_push_valid), .push_ready(dwq_push_ready),
    .push_ds(cot_less_closer), .push_addr(ntf_dur_addr),
    .clr_valid, .clr_id(ntf_id),
    .notify_valid(dwq_notify_valid), .notify_addr(dwq_notify_addr),
    .notify_pop(dwq_notify_pop), .count(dwq_count)
  );
endmodule
