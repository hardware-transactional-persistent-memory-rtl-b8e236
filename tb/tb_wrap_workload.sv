// tb_wrap_workload: the controller under the two simulated workloads of its
// evaluation, at default sizes, with persistent memory 1, 2, 4 and 8 times
// slower than a one-cycle write.
//
//  * hash table: each thread runs transactions of 10 element updates on its
//    own part of a table (no conflicts); every update makes the cache evict a
//    dirty line of that part. 4 threads, as in the buffer-length experiment.
//  * B-tree: each thread inserts into its own tree; an insert reads about 5
//    lines for every line it writes. 8 threads.
//
// A transaction is: open, one log line (start time), its reads and evictions,
// the log lines of its write set (16 bytes per update), close. Thread 0 asks
// for strict durability on every fourth transaction and then waits, as the
// software library does, until its durability flag is set in PM. Threads
// share the controller's ports through simple locks.
//
// For each run it prints the buffer high-water mark (the "maximum FIFO queue
// length" of the evaluation) and the throughput, and checks: every read
// returns the newest data of its line; every strict close is notified; the
// high-water mark stays within the buffer; at the end the buffer has drained
// and PM holds the newest data of every line.
module tb_wrap_workload;
  import wrap_pkg::*;

  localparam addr_t LOG_BASE  = 48'h0000_1000_0000;
  localparam addr_t LOG_LIMIT = 48'h0000_2000_0000;
  localparam addr_t DUR_BASE  = 48'h0000_3000_0000;
  localparam addr_t DATA_BASE = 48'h0000_0100_0000;
  localparam int unsigned TXNS        = 60;   // transactions per thread per run
  localparam int unsigned REGION_LINES = 256; // table lines per thread
  localparam int unsigned COMPUTE      = 8;   // cycles of work per update

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_valid, wr_ready, rd_valid, rd_ready, rd_rsp_valid, ntf_valid, ntf_ready;
  addr_t wr_addr, rd_addr, ntf_dur_addr;
  line_t wr_data, rd_rsp_data, pm_rsp_data;
  ntf_kind_e ntf_kind;
  logic [$clog2(NUM_WRAPS)-1:0] ntf_id;
  logic pm_req_valid, pm_req_ready, pm_rsp_valid;
  pm_req_t pm_req;
  logic [NUM_WRAPS-1:0] cot;
  logic [$clog2(VDB_DEPTH):0] vdb_count, vdb_max_count;
  logic [$clog2(NUM_WRAPS):0] dwq_count;
  wrap_ev_t ev;

  wrap_pm_controller dut (
    .clk, .rst_n, .log_base(LOG_BASE), .log_limit(LOG_LIMIT),
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .rd_valid, .rd_ready, .rd_addr, .rd_rsp_valid, .rd_rsp_data,
    .ntf_valid, .ntf_ready, .ntf_kind, .ntf_id, .ntf_dur_addr,
    .pm_req_valid, .pm_req_ready, .pm_req, .pm_rsp_valid, .pm_rsp_data,
    .cot, .vdb_count, .vdb_max_count, .dwq_count, .ev
  );

  pm_model #(.LAT(3)) u_pm (
    .clk, .rst_n, .req_valid(pm_req_valid), .req_ready(pm_req_ready),
    .req(pm_req), .rsp_valid(pm_rsp_valid), .rsp_data(pm_rsp_data)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t: %s", $time, what);
    end
  endtask

  // newest data accepted per line
  line_t newest [laddr_t];
  always @(posedge clk)
    if (rst_n && wr_valid && wr_ready && !(wr_addr >= LOG_BASE && wr_addr < LOG_LIMIT))
      newest[wr_addr[ADDR_W-1:OFFSET_BITS]] = wr_data;

  // ------------------------------------------------------------ shared ports
  bit wr_lock = 0, rd_lock = 0, ntf_lock = 0;
  int unsigned serial = 1;

  task automatic do_write(input addr_t a);
    while (wr_lock) @(negedge clk);
    wr_lock = 1;
    @(negedge clk);
    wr_valid = 1'b1; wr_addr = a; wr_data = '0;
    wr_data[31:0] = serial; wr_data[79:32] = a; serial++;
    #1;
    while (!wr_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    wr_valid = 1'b0;
    wr_lock = 0;
  endtask

  task automatic do_ntf(input ntf_kind_e k, input int id, input bit strict);
    while (ntf_lock) @(negedge clk);
    ntf_lock = 1;
    @(negedge clk);
    ntf_valid = 1'b1; ntf_kind = k; ntf_id = ($clog2(NUM_WRAPS))'(id);
    ntf_dur_addr = strict ? DUR_BASE + addr_t'(id) * LINE_BYTES : '0;
    #1;
    while (!ntf_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    ntf_valid = 1'b0;
    ntf_lock = 0;
  endtask

  task automatic do_read_check(input addr_t a);
    line_t exp;
    laddr_t l;
    while (rd_lock) @(negedge clk);
    rd_lock = 1;
    l = a[ADDR_W-1:OFFSET_BITS];
    exp = newest.exists(l) ? newest[l] : u_pm.peek(a);
    @(negedge clk);
    rd_valid = 1'b1; rd_addr = a;
    #1;
    while (!rd_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    rd_valid = 1'b0;
    while (!rd_rsp_valid) @(negedge clk);
    check(rd_rsp_data == exp, "read returns the newest data of its line");
    rd_lock = 0;
  endtask

  // ------------------------------------------------------------ one thread
  int unsigned strict_done;

  task automatic thread_run(input int id, input int updates, input int reads_per_write);
    addr_t region, logp;
    region = DATA_BASE + addr_t'(id) * REGION_LINES * LINE_BYTES;
    logp   = LOG_BASE + addr_t'(id) * 48'h10_0000;
    for (int t = 0; t < TXNS; t++) begin
      bit strict;
      strict = (id == 0) && (t % 4 == 3);
      do_ntf(NTF_OPEN, id, 0);
      do_write(logp);                                   // start time
      for (int u = 0; u < updates; u++) begin
        for (int r = 0; r < reads_per_write; r++)
          if ($urandom % 4 == 0) do_read_check(region + addr_t'($urandom % REGION_LINES) * LINE_BYTES);
          else repeat (2) @(negedge clk);               // read served by the cache
        repeat (COMPUTE) @(negedge clk);                  // hash / compute the element
        do_write(region + addr_t'($urandom % REGION_LINES) * LINE_BYTES);  // eviction
      end
      for (int g = 0; g < (updates * 16 + 63) / 64; g++)
        do_write(logp + addr_t'(g + 1) * LINE_BYTES);   // write set and persist time
      if (strict) begin
        // clear the flag the way software does before asking
        while (u_pm.peek(DUR_BASE + addr_t'(id) * LINE_BYTES)[63:0] == 64'd1)
          u_pm.mem[(DUR_BASE + addr_t'(id) * LINE_BYTES) >> OFFSET_BITS] = '0;
      end
      do_ntf(NTF_CLOSE, id, strict);
      if (strict) begin
        int w;
        w = 0;
        while (u_pm.peek(DUR_BASE + addr_t'(id) * LINE_BYTES)[63:0] != 64'd1 && w < 20000) begin
          @(negedge clk); w++;
        end
        check(w < 20000, "strict close is notified");
        strict_done++;
      end
      repeat ($urandom % 8) @(negedge clk);             // work outside the transaction
    end
  endtask

  task automatic run(input string name, input int threads, input int updates,
                     input int reads_per_write, input int slow);
    longint t0, t1;
    rst_n = 1'b0;
    u_pm.wr_cycles = slow;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    strict_done = 0;
    t0 = $time;
    for (int i = 0; i < threads; i++) begin
      fork
        automatic int id = i;
        thread_run(id, updates, reads_per_write);
      join_none
    end
    wait fork;
    t1 = $time;
    repeat (VDB_DEPTH * slow + 50) @(negedge clk);
    check(vdb_count == 0 && dwq_count == 0, "buffer and wait queue drain");
    check(vdb_max_count > 0 && vdb_max_count <= ($clog2(VDB_DEPTH)+1)'(VDB_DEPTH), "high-water mark within the buffer");
    check(strict_done == TXNS / 4, "all strict transactions of thread 0 finished");
    $display("%s threads=%0d pm_write=%0dx max_fifo=%0d txns=%0d cycles=%0d",
             name, threads, slow, vdb_max_count, threads * TXNS, (t1 - t0) / 10);
  endtask

  initial begin
    wr_valid = 0; rd_valid = 0; ntf_valid = 0;
    wr_addr = '0; wr_data = '0; rd_addr = '0; ntf_kind = NTF_OPEN; ntf_id = '0; ntf_dur_addr = '0;
    for (int s = 1; s <= 8; s *= 2) run("hash-table-10", 4, 10, 0, s);
    for (int s = 1; s <= 8; s *= 2) run("b-tree", 8, 2, 5, s);
    foreach (newest[l]) check(u_pm.peek({l, OFFSET_BITS'(0)}) == newest[l], "PM holds the newest data of every line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
