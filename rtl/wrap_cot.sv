// wrap_cot: the Current Open Transactions (COT) set of the controller.
//
// A bit vector with one bit per wrap id. An open notification sets the bit of
// the wrap id, a close notification clears it; one notification is taken per
// cycle. The register value `cot` is what a memory write arriving in the same
// cycle is tagged with, so a write and a notification in one cycle are ordered
// write first. `cot_less_closer` is the set after removing the closing wrap,
// which is what a strict-durability close puts into the wait queue.
//
// Following the paper: the bit vector, its set/clear on open/close. Own choice:
// reset to all closed, and assertions that a wrap is not opened twice or
// closed while not open (the paper's library never does either).
module wrap_cot #(
  parameter int unsigned NW = wrap_pkg::NUM_WRAPS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ntf_valid,
  input  wrap_pkg::ntf_kind_e   ntf_kind,
  input  logic [$clog2(NW)-1:0] ntf_id,
  output logic [NW-1:0]         cot,
  output logic [NW-1:0]         cot_less_closer,
  output logic                  cot_empty
);
  import wrap_pkg::*;

  logic [NW-1:0] id_mask;
  assign id_mask         = NW'(1) << ntf_id;
  assign cot_less_closer = cot & ~id_mask;
  assign cot_empty       = (cot == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cot <= '0;
    end else if (ntf_valid) begin
      if (ntf_kind == NTF_OPEN) cot <= cot | id_mask;
      else                      cot <= cot & ~id_mask;
    end
  end

  a_no_double_open: assert property (@(posedge clk) disable iff (!rst_n)
    ntf_valid && ntf_kind == NTF_OPEN |-> !(|(cot & id_mask)));
  a_close_open_only: assert property (@(posedge clk) disable iff (!rst_n)
    ntf_valid && ntf_kind == NTF_CLOSE |-> |(cot & id_mask));
endmodule
