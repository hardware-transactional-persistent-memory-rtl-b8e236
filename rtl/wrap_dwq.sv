// wrap_dwq: the Dependency Wait Queue (DWQ) for strict durability.
//
// A transaction that asks for strict durability closes with a non-zero
// durability address. The controller then pushes (dependency set, durability
// address) here, the set being the COT without the closing wrap. Every later
// close clears its wrap-id bit in all entries (including one pushed in the
// same cycle). Sets empty in FIFO order, so only the head is watched: when its
// set is empty, `notify_valid` asks the controller to write 1 to the durability
// address; the entry leaves the queue when `notify_pop` says the write was
// taken. A thread waits on at most one close, so DEPTH = number of wraps never
// overflows; `push_ready` still reports a full queue.
//
// Following the paper: the entry contents, the clearing on close and FIFO-order
// notification. Own choices: the depth and the handshake.
module wrap_dwq #(
  parameter int unsigned DEPTH = wrap_pkg::NUM_WRAPS,
  parameter int unsigned NW    = wrap_pkg::NUM_WRAPS,
  parameter int unsigned AW    = wrap_pkg::ADDR_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  push_valid,
  output logic                  push_ready,
  input  logic [NW-1:0]         push_ds,
  input  logic [AW-1:0]         push_addr,
  input  logic                  clr_valid,
  input  logic [$clog2(NW)-1:0] clr_id,
  output logic                  notify_valid,
  output logic [AW-1:0]         notify_addr,
  input  logic                  notify_pop,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [NW-1:0] ent_ds   [DEPTH];
  logic [AW-1:0] ent_addr [DEPTH];
  logic [PW-1:0] head, tail;

  logic do_push, do_pop;
  logic [NW-1:0] clr_mask;

  assign push_ready   = (count != ($clog2(DEPTH)+1)'(DEPTH));
  assign notify_valid = (count != '0) && (ent_ds[head] == '0);
  assign notify_addr  = ent_addr[head];
  assign do_push      = push_valid && push_ready;
  assign do_pop       = notify_pop && notify_valid;
  assign clr_mask     = clr_valid ? (NW'(1) << clr_id) : '0;

  function automatic logic [PW-1:0] next(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
    end else begin
      if (do_push) tail <= next(tail);
      if (do_pop)  head <= next(head);
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < DEPTH; i++) begin
      if (do_push && tail == PW'(i)) begin
        ent_ds[i]   <= push_ds & ~clr_mask;
        ent_addr[i] <= push_addr;
      end else begin
        ent_ds[i]   <= ent_ds[i] & ~clr_mask;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push_valid |-> push_ready);
  a_pop_only_valid: assert property (@(posedge clk) disable iff (!rst_n)
    notify_pop |-> notify_valid);
endmodule
