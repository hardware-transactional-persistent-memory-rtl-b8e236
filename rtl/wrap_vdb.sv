// wrap_vdb: the Volatile Delay Buffer (VDB) of the controller.
//
// Evicted cache lines that may not yet reach persistent memory wait here. The
// buffer is a FIFO of (line address, data, dependency set) entries plus a hash
// table that finds the newest copy of a line for reads.
//
// FIFO. A push writes the entry at the tail, tagged with the dependency set the
// caller passes (the COT at that instant). A close clears its wrap-id bit in
// the dependency set of every entry at once, including one pushed in the same
// cycle. The head is offered for write-back (`head_valid`) as soon as its set
// is empty; the caller pops it when persistent memory takes the write. Because
// later entries carry supersets of the still-open wraps of earlier ones, sets
// empty in FIFO order and only the head has to be looked at.
//
// Hash table. 2**HASH_BITS buckets each hold a pointer to the youngest entry
// whose address hashes there. Every entry keeps a pointer to the entry that was
// the bucket's youngest when it was pushed, so a bucket heads a chain through
// the FIFO from newest to oldest. A lookup follows the chain one entry per
// cycle and stops at the first address match (the newest copy) or when the
// chain leaves the live part of the FIFO. When the head drains and its bucket
// still points at it, the bucket is emptied, as the paper describes. Pointers
// carry one wrap bit more than the index, so a pointer to an entry that has
// drained is recognised even after its slot is reused.
//
// Timing: push and pop take one cycle each and can happen together. A lookup
// is accepted when `lk_ready`; `lk_done` rises one cycle later at the earliest,
// plus one cycle for each non-matching entry on the chain, with `lk_hit` and
// `lk_data` valid in that cycle. `push_ready` is low when the FIFO is full.
//
// Following the paper: FIFO of (address, data, dependency set), tagging with
// the COT, clearing a closing wrap from every entry, FIFO-order write-back,
// hash table pointing at the newest entry and its removal on drain. Own
// choices: the hash function (XOR fold of the line address), collision
// handling by chaining through the FIFO, a power-of-two depth, and the
// high-water mark output `max_count`.
module wrap_vdb #(
  parameter int unsigned DEPTH     = wrap_pkg::VDB_DEPTH,
  parameter int unsigned NW        = wrap_pkg::NUM_WRAPS,
  parameter int unsigned HASH_BITS = 10,
  parameter int unsigned AW        = wrap_pkg::LADDR_W,
  parameter int unsigned DW        = wrap_pkg::LINE_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // push at tail
  input  logic                  push_valid,
  output logic                  push_ready,
  input  logic [AW-1:0]         push_addr,
  input  logic [DW-1:0]         push_data,
  input  logic [NW-1:0]         push_ds,
  // a closing wrap leaves every dependency set
  input  logic                  clr_valid,
  input  logic [$clog2(NW)-1:0] clr_id,
  // head write-back
  output logic                  head_valid,
  input  logic                  head_pop,
  output logic [AW-1:0]         head_addr,
  output logic [DW-1:0]         head_data,
  // lookup of the newest copy of a line
  input  logic                  lk_valid,
  output logic                  lk_ready,
  input  logic [AW-1:0]         lk_addr,
  output logic                  lk_done,
  output logic                  lk_hit,
  output logic [DW-1:0]         lk_data,
  // occupancy
  output logic [$clog2(DEPTH):0] count,
  output logic [$clog2(DEPTH):0] max_count,
  output logic                  empty
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned NB = 2 ** HASH_BITS;

  typedef logic [PW:0] seq_t;   // FIFO position with one wrap bit

  logic [AW-1:0]  ent_addr   [DEPTH];
  logic [DW-1:0]  ent_data   [DEPTH];
  logic [NW-1:0]  ent_ds     [DEPTH];
  seq_t           ent_prev   [DEPTH];
  logic [DEPTH-1:0] ent_prev_v;

  seq_t           bkt_ptr    [NB];
  logic [NB-1:0]  bkt_v;

  seq_t head, tail;

  function automatic logic [HASH_BITS-1:0] hash(input logic [AW-1:0] a);
    logic [HASH_BITS-1:0] h;
    h = '0;
    for (int unsigned i = 0; i < AW; i += HASH_BITS) begin
      h ^= HASH_BITS'(a >> i);
    end
    return h;
  endfunction

  function automatic logic is_live(input seq_t p, input seq_t hd, input logic [PW:0] cnt);
    seq_t d;
    d = p - hd;
    return d < cnt;
  endfunction

  assign count      = tail - head;
  assign empty      = (count == '0);
  assign push_ready = (count != (PW+1)'(DEPTH));
  assign head_valid = !empty && (ent_ds[head[PW-1:0]] == '0);
  assign head_addr  = ent_addr[head[PW-1:0]];
  assign head_data  = ent_data[head[PW-1:0]];

  logic do_push, do_pop;
  assign do_push = push_valid && push_ready;
  assign do_pop  = head_pop && head_valid;

  logic [NW-1:0] clr_mask;
  assign clr_mask = clr_valid ? (NW'(1) << clr_id) : '0;

  logic [HASH_BITS-1:0] push_h, head_h;
  assign push_h = hash(push_addr);
  assign head_h = hash(head_addr);

  // FIFO pointers, bucket valid bits and high-water mark
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head      <= '0;
      tail      <= '0;
      bkt_v     <= '0;
      max_count <= '0;
    end else begin
      if (do_pop) begin
        head <= head + 1'b1;
        if (bkt_v[head_h] && bkt_ptr[head_h] == head) bkt_v[head_h] <= 1'b0;
      end
      if (do_push) begin
        tail          <= tail + 1'b1;
        bkt_v[push_h] <= 1'b1;   // a push to the same bucket wins over the drain
      end
      if (count > max_count) max_count <= count;
    end
  end

  // entry storage and bucket pointers (no reset needed: only live entries and
  // valid buckets are ever read)
  always_ff @(posedge clk) begin
    if (do_push) begin
      ent_addr[tail[PW-1:0]]   <= push_addr;
      ent_data[tail[PW-1:0]]   <= push_data;
      ent_prev[tail[PW-1:0]]   <= bkt_ptr[push_h];
      ent_prev_v[tail[PW-1:0]] <= bkt_v[push_h];
      bkt_ptr[push_h]          <= tail;
    end
  end

  // dependency sets: a close drains its bit from every entry at once
  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < DEPTH; i++) begin
      if (do_push && tail[PW-1:0] == PW'(i)) ent_ds[i] <= push_ds & ~clr_mask;
      else                                   ent_ds[i] <= ent_ds[i] & ~clr_mask;
    end
  end

  // chained hash lookup
  logic          lk_busy;
  logic [AW-1:0] lk_key;
  seq_t          lk_ptr;
  logic          lk_ptr_v;
  logic          lk_live, lk_match;

  assign lk_ready = !lk_busy;
  assign lk_live  = lk_ptr_v && is_live(lk_ptr, head, count);
  assign lk_match = lk_live && (ent_addr[lk_ptr[PW-1:0]] == lk_key);
  assign lk_done  = lk_busy && (!lk_live || lk_match);
  assign lk_hit   = lk_match;
  assign lk_data  = ent_data[lk_ptr[PW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_busy  <= 1'b0;
      lk_key   <= '0;
      lk_ptr   <= '0;
      lk_ptr_v <= 1'b0;
    end else if (!lk_busy) begin
      if (lk_valid) begin
        lk_busy  <= 1'b1;
        lk_key   <= lk_addr;
        lk_ptr   <= bkt_ptr[hash(lk_addr)];
        lk_ptr_v <= bkt_v[hash(lk_addr)];
      end
    end else if (lk_done) begin
      lk_busy <= 1'b0;
    end else begin
      lk_ptr   <= ent_prev[lk_ptr[PW-1:0]];
      lk_ptr_v <= ent_prev_v[lk_ptr[PW-1:0]];
    end
  end

  initial begin
    assert (DEPTH == 2 ** PW) else $error("wrap_vdb: DEPTH must be a power of two");
  end

  a_pop_only_valid: assert property (@(posedge clk) disable iff (!rst_n)
    head_pop |-> head_valid);
endmodule
