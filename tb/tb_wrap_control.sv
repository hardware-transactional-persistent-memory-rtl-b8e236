// tb_wrap_control: directed test of the Control block on its own. The
// testbench plays the COT, the delay buffer, the wait queue and PM, and checks
// the routing of writes (log area and empty-COT pass-through versus
// buffering with the COT as tag), the close/strict-close actions, the PM
// arbitration order, the durability write (value 1, strobes on its word), the
// write-back of the buffer head, and the read paths (buffer hit answered in
// the cycle the lookup finishes; miss answered when PM answers).
module tb_wrap_control;
  import wrap_pkg::*;
  localparam int unsigned NW = 4;
  localparam addr_t LOG_BASE = 48'h1000_0000, LOG_LIMIT = 48'h2000_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_valid, wr_ready, rd_valid, rd_ready, rd_rsp_valid, ntf_valid, ntf_ready;
  addr_t wr_addr, rd_addr, ntf_dur_addr, dwq_notify_addr;
  line_t wr_data, rd_rsp_data, vdb_head_data, vdb_lk_data, pm_rsp_data;
  ntf_kind_e ntf_kind;
  logic cot_ntf_valid, cot_empty, clr_valid;
  logic [NW-1:0] cot, vdb_push_ds;
  logic vdb_push_valid, vdb_push_ready, vdb_head_valid, vdb_head_pop;
  laddr_t vdb_push_addr, vdb_head_addr, vdb_lk_addr;
  logic vdb_lk_valid, vdb_lk_ready, vdb_lk_done, vdb_lk_hit, vdb_empty;
  logic dwq_push_valid, dwq_push_ready, dwq_notify_valid, dwq_notify_pop;
  logic pm_req_valid, pm_req_ready, pm_rsp_valid;
  pm_req_t pm_req;
  wrap_ev_t ev;
  int checks = 0, failures = 0;

  wrap_control #(.NW(NW)) dut (.*, .log_base(LOG_BASE), .log_limit(LOG_LIMIT));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t: %s", $time, what); end
  endtask

  task automatic quiet();
    wr_valid = 0; rd_valid = 0; ntf_valid = 0; vdb_head_valid = 0; dwq_notify_valid = 0;
    vdb_lk_done = 0; vdb_lk_hit = 0; pm_rsp_valid = 0;
  endtask

  line_t d1, d2;
  initial begin
    quiet();
    wr_addr = '0; wr_data = '0; rd_addr = '0; ntf_kind = NTF_OPEN; ntf_dur_addr = '0;
    cot = '0; cot_empty = 1; vdb_push_ready = 1; vdb_head_addr = '0; vdb_head_data = '0;
    vdb_lk_ready = 1; vdb_lk_data = '0; vdb_empty = 1; dwq_push_ready = 1; dwq_notify_addr = '0;
    pm_req_ready = 1; pm_rsp_data = '0;
    d1 = {16{32'hCAFE_0001}}; d2 = {16{32'hBEEF_0002}};
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. log-area write passes through while wraps are open
    @(negedge clk); cot = 4'b0101; cot_empty = 0; vdb_empty = 0;
    wr_valid = 1; wr_addr = LOG_BASE + 48'h40; wr_data = d1; #1;
    check(pm_req_valid && pm_req.we && pm_req.addr == LOG_BASE + 48'h40 && pm_req.data == d1 && pm_req.strb == '1, "log write goes to PM");
    check(!vdb_push_valid && wr_ready, "log write not buffered");
    pm_req_ready = 0; #1;
    check(!wr_ready, "log write waits for PM");
    pm_req_ready = 1;

    // 2. data write with open wraps is buffered with the COT as tag
    @(negedge clk); wr_addr = 48'h0004_0080; wr_data = d2; #1;
    check(vdb_push_valid && vdb_push_addr == laddr_t'(48'h0004_0080 >> 6) && vdb_push_ds == 4'b0101, "write buffered, tagged with COT");
    check(!pm_req_valid && wr_ready, "buffered write takes no PM slot");
    vdb_push_ready = 0; #1;
    check(!wr_ready && ev.buf_full, "full buffer holds the write back");
    vdb_push_ready = 1;

    // 3. no wrap open but buffer not empty: still buffered
    @(negedge clk); cot = '0; cot_empty = 1; vdb_empty = 0; #1;
    check(vdb_push_valid && vdb_push_ds == '0 && !pm_req_valid, "write queues behind a non-empty buffer");
    // 4. nothing open, buffer empty: pass-through
    @(negedge clk); vdb_empty = 1; #1;
    check(!vdb_push_valid && pm_req_valid && pm_req.we && pm_req.data == d2, "write passes through when nothing is open");
    @(negedge clk); quiet(); #1;
    check(!pm_req_valid, "idle port");

    // 5. arbitration: durability write first, then pass-through, then write-back
    @(negedge clk); cot_empty = 1; vdb_empty = 1;
    dwq_notify_valid = 1; dwq_notify_addr = 48'h3000_0058;   // word 3 of its line
    vdb_head_valid = 1; vdb_head_addr = laddr_t'(48'h0005_0000 >> 6); vdb_head_data = d1;
    wr_valid = 1; wr_addr = 48'h0006_0000; wr_data = d2; #1;
    check(pm_req_valid && pm_req.we && pm_req.addr == 48'h3000_0040, "durability write wins the port");
    check(pm_req.strb == strb_t'(64'hFF) << 24 && pm_req.data[255:192] == 64'd1 && pm_req.data[191:0] == '0, "value 1 in the addressed word");
    check(dwq_notify_pop && !vdb_head_pop && !wr_ready, "only the durability write proceeds");
    @(negedge clk); dwq_notify_valid = 0; #1;
    check(pm_req.addr == 48'h0006_0000 && wr_ready && !vdb_head_pop, "pass-through before write-back");
    @(negedge clk); wr_valid = 0; #1;
    check(pm_req.addr == 48'h0005_0000 && pm_req.data == d1 && vdb_head_pop, "head written back");
    pm_req_ready = 0; #1;
    check(!vdb_head_pop, "head stays until PM takes it");
    pm_req_ready = 1;
    @(negedge clk); quiet();

    // 6. notifications
    @(negedge clk); cot = 4'b0011; cot_empty = 0;
    ntf_valid = 1; ntf_kind = NTF_OPEN; #1;
    check(cot_ntf_valid && !clr_valid && !dwq_push_valid && ntf_ready, "open");
    @(negedge clk); ntf_kind = NTF_CLOSE; ntf_dur_addr = '0; #1;
    check(cot_ntf_valid && clr_valid && !dwq_push_valid, "relaxed close clears, queues nothing");
    @(negedge clk); ntf_dur_addr = 48'h3000_0000; #1;
    check(cot_ntf_valid && clr_valid && dwq_push_valid, "strict close queues a durability wait");
    dwq_push_ready = 0; #1;
    check(!ntf_ready && !cot_ntf_valid && !clr_valid, "strict close waits for queue room");
    dwq_push_ready = 1;
    @(negedge clk); quiet();

    // 7. read hit in the buffer
    @(negedge clk); rd_valid = 1; rd_addr = 48'h0004_0080; #1;
    check(rd_ready && vdb_lk_valid && vdb_lk_addr == laddr_t'(48'h0004_0080 >> 6), "read starts a lookup");
    @(negedge clk); rd_valid = 0; #1;
    check(!rd_ready && !rd_rsp_valid, "lookup in progress");
    @(negedge clk); vdb_lk_done = 1; vdb_lk_hit = 1; vdb_lk_data = d2; #1;
    check(rd_rsp_valid && rd_rsp_data == d2 && !pm_req_valid, "hit answered from the buffer");
    @(negedge clk); vdb_lk_done = 0; vdb_lk_hit = 0; #1;
    check(rd_ready, "ready for the next read");

    // 8. read miss goes to PM
    @(negedge clk); rd_valid = 1; rd_addr = 48'h0007_0000; #1;
    @(negedge clk); rd_valid = 0; vdb_lk_done = 1; vdb_lk_hit = 0; #1;
    check(!rd_rsp_valid, "miss not answered from the buffer");
    @(negedge clk); vdb_lk_done = 0; #1;
    check(pm_req_valid && !pm_req.we && pm_req.addr == 48'h0007_0000, "miss reads PM");
    @(negedge clk); #1;
    check(!pm_req_valid && !rd_rsp_valid, "waiting for PM");
    @(negedge clk); pm_rsp_valid = 1; pm_rsp_data = d1; #1;
    check(rd_rsp_valid && rd_rsp_data == d1, "miss answered with PM data");
    @(negedge clk); pm_rsp_valid = 0; #1;
    check(rd_ready, "read path idle again");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
