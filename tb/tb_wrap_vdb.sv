// tb_wrap_vdb: the delay buffer against a queue model, at a small depth and
// with few hash buckets so chains form. Random pushes (tagged with random
// dependency sets that cover the older ones), closes, pops of an eligible head
// and lookups. Checks head eligibility, head contents, occupancy, full
// back-pressure, and that a lookup returns the newest copy of a line (or a
// miss) in 1 + (entries walked) cycles at most.
module tb_wrap_vdb;
  localparam int unsigned DEPTH = 16, NW = 8, HB = 2, AW = 10, DW = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic push_valid, push_ready, clr_valid, head_valid, head_pop;
  logic lk_valid, lk_ready, lk_done, lk_hit, empty;
  logic [AW-1:0] push_addr, head_addr, lk_addr;
  logic [DW-1:0] push_data, head_data, lk_data;
  logic [NW-1:0] push_ds;
  logic [$clog2(NW)-1:0] clr_id;
  logic [$clog2(DEPTH):0] count, max_count;
  int checks = 0, failures = 0;
  int hits = 0, misses = 0, fulls = 0;

  typedef struct { logic [AW-1:0] a; logic [DW-1:0] d; logic [NW-1:0] ds; } ent_t;
  ent_t q[$];

  wrap_vdb #(.DEPTH(DEPTH), .NW(NW), .HASH_BITS(HB), .AW(AW), .DW(DW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t: %s", $time, what); end
  endtask

  task automatic lookup(input logic [AW-1:0] a);
    int idx, cyc;
    idx = -1;
    for (int k = 0; k < q.size(); k++) if (q[k].a == a) idx = k;
    @(negedge clk);
    lk_valid = 1; lk_addr = a;
    #1;
    check(lk_ready, "lookup accepted when idle");
    @(posedge clk); #1;
    lk_valid = 0;
    cyc = 0;
    while (!lk_done && cyc < 40) begin @(posedge clk); #1; cyc++; end
    check(lk_done, "lookup finishes");
    check(cyc <= q.size(), "lookup takes at most one cycle per buffered entry");
    check(lk_hit == (idx >= 0), "lookup hit/miss");
    if (idx >= 0) begin
      check(lk_data == q[idx].d, "lookup returns the newest copy");
      hits++;
    end else misses++;
    @(posedge clk);
  endtask

  initial begin
    push_valid = 0; clr_valid = 0; head_pop = 0; lk_valid = 0;
    push_addr = '0; push_data = '0; push_ds = '0; clr_id = '0; lk_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if ($urandom % 8 == 0) begin
        push_valid = 0; clr_valid = 0; head_pop = 0;
        lookup(AW'($urandom % 12) * 7);
        continue;
      end
      push_valid = ($urandom % 2 == 0);
      push_addr  = AW'($urandom % 12) * 7;
      push_data  = DW'({$urandom, $urandom});
      push_ds    = NW'($urandom) & NW'($urandom) & NW'($urandom);
      if (q.size() > 0) push_ds = push_ds | q[$].ds;
      clr_valid  = ($urandom % 3 == 0);
      clr_id     = ($clog2(NW))'($urandom % NW);
      #1;
      check(count == ($clog2(DEPTH)+1)'(q.size()), "count");
      check(empty == (q.size() == 0), "empty");
      check(push_ready == (q.size() < DEPTH), "full back-pressure");
      if (push_valid && !push_ready) fulls++;
      check(head_valid == (q.size() > 0 && q[0].ds == '0), "head eligible exactly when its set is empty");
      if (head_valid && q.size() > 0) check(head_addr == q[0].a && head_data == q[0].d, "head contents");
      head_pop = head_valid && ($urandom % 3 != 0);
      @(posedge clk);
      if (head_pop) void'(q.pop_front());
      if (push_valid && push_ready) q.push_back('{push_addr, push_data, push_ds});
      if (clr_valid) foreach (q[k]) q[k].ds[clr_id] = 1'b0;
    end
    check(max_count == ($clog2(DEPTH)+1)'(DEPTH), "high-water mark reached the depth");
    check(hits > 0 && misses > 0 && fulls > 0, "hits, misses and a full buffer all happened");
    $display("hits=%0d misses=%0d fulls=%0d", hits, misses, fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
