// tb_wrap_pm_controller: end-to-end test of the WrAP controller at its
// default sizes (16 wraps, 1024-line delay buffer), against a behavioural PM.
//
// Phase 1 replays the four-transaction example T1..T4 (wrap ids 0..3): three
// opens, eviction of X, T4 opens, eviction of Y, T3 and T2 close (T2 asking
// for strict durability), evictions of Z and of X again, T1 closes, T4 closes
// (strict). After each step it checks the COT, the buffer occupancy and what
// has reached PM: nothing before T1 closes, the old X right after, Y, Z and
// the new X after T4 closes; T4's durability write comes at once, T2's only
// after T1 and T4 have closed.
//
// Phase 2 fills the buffer to its depth to force back-pressure, then releases it.
//
// Phase 3 runs random wraps on a small set of lines with a slow PM. A checker
// independent of the RTL follows every accepted write: when the line reaches
// PM, every wrap open at the write must have closed since (close counters), and
// lines of one address must reach PM in write order. Reads must return the
// newest written data; durability writes must come only after every wrap open
// at the strict close has closed, and each must come. At the end everything
// must have drained and PM must hold the newest data of every line.
//
// Each mechanism (pass-through, log write, buffered write, full buffer,
// write-back, read hit, read miss, strict close, durability write) is counted
// and one that never happened is a failure.
module tb_wrap_pm_controller;
  import wrap_pkg::*;

  localparam int unsigned NWR   = NUM_WRAPS;
  localparam int unsigned DEPTH = VDB_DEPTH;
  localparam addr_t LOG_BASE  = 48'h0000_1000_0000;
  localparam addr_t LOG_LIMIT = 48'h0000_2000_0000;
  localparam addr_t DUR_BASE  = 48'h0000_3000_0000;
  localparam addr_t DATA_BASE = 48'h0000_0001_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_valid, wr_ready, rd_valid, rd_ready, rd_rsp_valid, ntf_valid, ntf_ready;
  addr_t wr_addr, rd_addr, ntf_dur_addr;
  line_t wr_data, rd_rsp_data, pm_rsp_data;
  ntf_kind_e ntf_kind;
  logic [$clog2(NWR)-1:0] ntf_id;
  logic pm_req_valid, pm_req_ready, pm_rsp_valid;
  pm_req_t pm_req;
  logic [NWR-1:0] cot;
  logic [$clog2(DEPTH):0] vdb_count, vdb_max_count;
  logic [$clog2(NWR):0] dwq_count;
  wrap_ev_t ev;
  int unsigned stall_pct = 0;

  wrap_pm_controller dut (
    .clk, .rst_n, .log_base(LOG_BASE), .log_limit(LOG_LIMIT),
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .rd_valid, .rd_ready, .rd_addr, .rd_rsp_valid, .rd_rsp_data,
    .ntf_valid, .ntf_ready, .ntf_kind, .ntf_id, .ntf_dur_addr,
    .pm_req_valid, .pm_req_ready, .pm_req, .pm_rsp_valid, .pm_rsp_data,
    .cot, .vdb_count, .vdb_max_count, .dwq_count, .ev
  );

  // PM with ready gated by the testbench so phases can slow it down
  logic pm_ready_raw;
  pm_model #(.LAT(3)) u_pm (
    .clk, .rst_n, .req_valid(pm_req_valid && pm_req_ready), .req_ready(pm_ready_raw),
    .req(pm_req), .rsp_valid(pm_rsp_valid), .rsp_data(pm_rsp_data)
  );
  logic pm_gate;
  always @(negedge clk) pm_gate <= (stall_pct == 0) || (($urandom % 100) >= stall_pct);
  assign pm_req_ready = pm_ready_raw && pm_gate;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t: %s", $time, what);
    end
  endtask

  // ------------------------------------------------------------ checker model
  int unsigned close_cnt [NWR];           // closes seen per wrap
  bit          open_m    [NWR];           // wraps open (model)
  // per accepted non-log write, keyed by serial number in data[31:0]
  int unsigned w_snap    [int unsigned][NWR];
  bit          w_open    [int unsigned][NWR];
  laddr_t      w_line    [int unsigned];
  int unsigned last_pm_serial [laddr_t];  // newest serial persisted per line
  line_t       newest     [laddr_t];      // newest data accepted per line
  // strict closes waiting for their durability write, per wrap
  bit          dur_wait  [NWR];
  int unsigned dur_snap  [NWR][NWR];
  bit          dur_open  [NWR][NWR];

  int unsigned n_pass, n_log, n_buf, n_full, n_drain, n_hit, n_miss, n_strict, n_notify;

  always @(posedge clk) if (rst_n) begin
    if (ev.pass_wr)  n_pass++;
    if (ev.log_wr)   n_log++;
    if (ev.buf_wr)   n_buf++;
    if (ev.buf_full) n_full++;
    if (ev.drain)    n_drain++;
    if (ev.rd_hit)   n_hit++;
    if (ev.rd_miss)  n_miss++;
    if (ev.strict)   n_strict++;
    if (ev.notify)   n_notify++;

    // accepted cache-side write: remember who was open
    if (wr_valid && wr_ready) begin
      laddr_t l;
      int unsigned s;
      l = wr_addr[ADDR_W-1:OFFSET_BITS];
      s = wr_data[31:0];
      if (!(wr_addr >= LOG_BASE && wr_addr < LOG_LIMIT)) begin
        w_line[s] = l;
        for (int w = 0; w < NWR; w++) begin
          w_open[s][w] = open_m[w];
          w_snap[s][w] = close_cnt[w];
        end
        newest[l] = wr_data;
      end
    end

    // persistent memory write
    if (pm_req_valid && pm_req_ready && pm_req.we) begin
      laddr_t l;
      l = pm_req.addr[ADDR_W-1:OFFSET_BITS];
      if (pm_req.addr >= DUR_BASE) begin
        int w;
        w = int'((pm_req.addr - DUR_BASE) >> OFFSET_BITS);
        check(w < NWR && dur_wait[w], "durability write only for a waiting strict close");
        if (w < NWR) begin
          for (int v = 0; v < NWR; v++)
            if (dur_open[w][v])
              check(close_cnt[v] > dur_snap[w][v], "durability write after all wraps open at the close have closed");
          dur_wait[w] = 1'b0;
        end
        check(pm_req.strb == strb_t'(8'hFF) && pm_req.data[63:0] == 64'd1, "durability write stores 1 in the first word");
      end else if (!(pm_req.addr >= LOG_BASE && pm_req.addr < LOG_LIMIT)) begin
        int unsigned s;
        s = pm_req.data[31:0];
        check(w_line.exists(s) && w_line[s] == l, "PM write carries a line that was written");
        if (w_line.exists(s)) begin
          for (int w = 0; w < NWR; w++)
            if (w_open[s][w])
              check(close_cnt[w] > w_snap[s][w], "line reaches PM only after every wrap open at its eviction closed");
        end
        if (last_pm_serial.exists(l))
          check(s > last_pm_serial[l], "copies of one line reach PM in write order");
        last_pm_serial[l] = s;
      end
    end

    // notifications (model of open set and close counters)
    if (ntf_valid && ntf_ready) begin
      if (ntf_kind == NTF_OPEN) open_m[ntf_id] = 1'b1;
      else begin
        open_m[ntf_id] = 1'b0;
        close_cnt[ntf_id]++;
        if (ntf_dur_addr != '0) begin
          dur_wait[ntf_id] = 1'b1;
          for (int v = 0; v < NWR; v++) begin
            dur_open[ntf_id][v] = open_m[v] && (v != int'(ntf_id));
            dur_snap[ntf_id][v] = close_cnt[v];
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ drivers
  int unsigned serial = 1;

  function automatic line_t mk_data(input addr_t a, input int unsigned s);
    line_t d;
    d = '0;
    d[31:0]   = s;
    d[79:32]  = a;
    d[511:480] = s ^ 32'hA5A5_5A5A;
    return d;
  endfunction

  task automatic do_write(input addr_t a);
    @(negedge clk);
    wr_valid = 1'b1; wr_addr = a; wr_data = mk_data(a, serial); serial++;
    #1;
    while (!wr_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    wr_valid = 1'b0;
  endtask

  task automatic do_ntf(input ntf_kind_e k, input int id, input bit strict);
    @(negedge clk);
    ntf_valid = 1'b1; ntf_kind = k; ntf_id = ($clog2(NWR))'(id);
    ntf_dur_addr = strict ? DUR_BASE + addr_t'(id) * LINE_BYTES : '0;
    #1;
    while (!ntf_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    ntf_valid = 1'b0;
  endtask

  task automatic do_read(input addr_t a, output line_t d);
    @(negedge clk);
    rd_valid = 1'b1; rd_addr = a;
    #1;
    while (!rd_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    rd_valid = 1'b0;
    while (!rd_rsp_valid) begin @(negedge clk); end
    d = rd_rsp_data;
  endtask

  task automatic check_read(input addr_t a);
    line_t d, exp;
    laddr_t l;
    l = a[ADDR_W-1:OFFSET_BITS];
    exp = newest.exists(l) ? newest[l] : u_pm.peek(a);
    do_read(a, d);
    check(d == exp, $sformatf("read of %h returns the newest data", a));
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  // ------------------------------------------------------------ phases
  localparam addr_t X = DATA_BASE + 48'h0000, Y = DATA_BASE + 48'h0040, Z = DATA_BASE + 48'h0080;
  line_t x_old, x_new;

  task automatic phase_example();
    // t1..t3
    do_ntf(NTF_OPEN, 0, 0); do_ntf(NTF_OPEN, 1, 0); do_ntf(NTF_OPEN, 2, 0);
    check(cot[3:0] == 4'b0111, "t1-t3 COT {1,1,1,0}");
    // t4: evict X
    do_write(X); x_old = newest[X[ADDR_W-1:OFFSET_BITS]];
    idle(2);
    check(vdb_count == 1, "t4 X buffered");
    // t5
    do_ntf(NTF_OPEN, 3, 0);
    check(cot[3:0] == 4'b1111, "t5 COT {1,1,1,1}");
    // t6: evict Y
    do_write(Y); idle(2);
    check(vdb_count == 2, "t6 X,Y buffered");
    // t7: T3 ends; t8: T2 ends, strict
    do_ntf(NTF_CLOSE, 2, 0);
    check(cot[3:0] == 4'b1011, "t7 COT {1,1,0,1}");
    do_ntf(NTF_CLOSE, 1, 1);
    check(cot[3:0] == 4'b1001, "t8 COT {1,0,0,1}");
    idle(3);
    check(vdb_count == 2 && u_pm.writes == 1, "t8 nothing reached PM since the first pass-through write");
    check(dwq_count == 1, "t8 T2 waits for durability");
    // t9, t10: evict Z, evict X again
    do_write(Z); do_write(X); x_new = newest[X[ADDR_W-1:OFFSET_BITS]];
    idle(2);
    check(vdb_count == 4, "t10 two copies of X buffered");
    check_read(X);
    check_read(Y);
    // t11: T1 ends -> the first X drains
    do_ntf(NTF_CLOSE, 0, 0);
    check(cot[3:0] == 4'b1000, "t11 COT {0,0,0,1}");
    idle(4);
    check(vdb_count == 3, "t11 only the first X written back");
    check(u_pm.peek(X) == x_old, "t11 PM holds the first X");
    check(u_pm.peek(Y) == '0, "t11 Y still held");
    check(dwq_count == 1, "t11 T2 still waits on T4");
    // t12: T4 ends (strict) -> Y, Z, X drain, both notifications
    do_ntf(NTF_CLOSE, 3, 1);
    check(cot[3:0] == 4'b0000, "t12 COT {0,0,0,0}");
    idle(8);
    check(vdb_count == 0, "t12 buffer empty");
    check(u_pm.peek(X) == x_new, "t12 PM holds the newest X");
    check(u_pm.peek(Y) == newest[Y[ADDR_W-1:OFFSET_BITS]], "t12 PM holds Y");
    check(u_pm.peek(Z) == newest[Z[ADDR_W-1:OFFSET_BITS]], "t12 PM holds Z");
    check(dwq_count == 0, "t12 durability queue empty");
    check(u_pm.peek(DUR_BASE + 1*LINE_BYTES)[63:0] == 64'd1, "T2 durability flag set");
    check(u_pm.peek(DUR_BASE + 3*LINE_BYTES)[63:0] == 64'd1, "T4 durability flag set");
  endtask

  task automatic phase_fill();
    int unsigned full_before;
    full_before = n_full;
    do_ntf(NTF_OPEN, 5, 0);
    for (int i = 0; i < int'(DEPTH); i++) do_write(DATA_BASE + 48'h10_0000 + addr_t'(i) * LINE_BYTES);
    check(vdb_count == ($clog2(DEPTH)+1)'(DEPTH), "buffer holds its full depth");
    fork
      do_write(DATA_BASE + 48'h20_0000);
      begin idle(20); do_ntf(NTF_CLOSE, 5, 0); end
    join
    check(n_full > full_before, "write held back while the buffer is full");
    check_read(DATA_BASE + 48'h10_0000 + 48'd5 * LINE_BYTES);
    idle(DEPTH + 20);
    check(vdb_count == 0, "full buffer drains after the close");
    check(vdb_max_count == ($clog2(DEPTH)+1)'(DEPTH), "high-water mark is the depth");
  endtask

  task automatic phase_random(input int ops);
    bit open_t [NWR];
    for (int w = 0; w < NWR; w++) open_t[w] = 0;
    stall_pct = 30;
    for (int i = 0; i < ops; i++) begin
      int w, r;
      w = $urandom % NWR;
      r = $urandom % 100;
      // a nearly full buffer makes the software side close wraps (a core
      // stalled on an eviction still lets other cores close theirs)
      if (vdb_count > ($clog2(DEPTH)+1)'(DEPTH - 8)) r = 0;
      if (r < 15) begin
        // a thread waiting for its durability write does not open a new wrap
        if (!open_t[w] && dur_wait[w]) idle(1);
        else if (!open_t[w]) begin do_ntf(NTF_OPEN, w, 0); open_t[w] = 1; end
        else begin
          do_write(LOG_BASE + addr_t'(w) * 48'h1000 + addr_t'($urandom % 4) * LINE_BYTES);
          do_ntf(NTF_CLOSE, w, ($urandom % 2) == 1); open_t[w] = 0;
        end
      end else if (r < 75) begin
        do_write(DATA_BASE + addr_t'($urandom % 24) * LINE_BYTES);
      end else begin
        check_read(DATA_BASE + addr_t'($urandom % 24) * LINE_BYTES);
      end
    end
    for (int w = 0; w < NWR; w++) if (open_t[w]) do_ntf(NTF_CLOSE, w, 1);
    idle(400);
    stall_pct = 0;
    idle(50);
    check(vdb_count == 0 && dwq_count == 0, "everything drained at the end");
    for (int w = 0; w < NWR; w++) check(!dur_wait[w], "every strict close got its durability write");
    foreach (newest[l]) check(u_pm.peek({l, OFFSET_BITS'(0)}) == newest[l], "PM holds the newest data of every line");
  endtask

  initial begin
    wr_valid = 0; rd_valid = 0; ntf_valid = 0;
    wr_addr = '0; wr_data = '0; rd_addr = '0; ntf_kind = NTF_OPEN; ntf_id = '0; ntf_dur_addr = '0;
    for (int w = 0; w < NWR; w++) begin
      close_cnt[w] = 0; open_m[w] = 0; dur_wait[w] = 0;
    end
    n_pass = 0; n_log = 0; n_buf = 0; n_full = 0; n_drain = 0; n_hit = 0; n_miss = 0; n_strict = 0; n_notify = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // a write with nothing open goes straight through
    do_write(Z + 48'h1000); idle(2);
    check(u_pm.peek(Z + 48'h1000) == newest[(Z + 48'h1000) >> OFFSET_BITS], "write with no open wrap passes through");
    phase_example();
    $display("example done t=%0t", $time);
    phase_fill();
    $display("fill done t=%0t", $time);
    phase_random(3000);
    $display("events: pass=%0d log=%0d buffered=%0d full=%0d drained=%0d rd_hit=%0d rd_miss=%0d strict=%0d notify=%0d",
             n_pass, n_log, n_buf, n_full, n_drain, n_hit, n_miss, n_strict, n_notify);
    check(n_pass > 0, "pass-through happened");
    check(n_log > 0, "log-area write happened");
    check(n_buf > 0, "buffered write happened");
    check(n_full > 0, "full buffer happened");
    check(n_drain > 0, "write-back happened");
    check(n_hit > 0, "read hit happened");
    check(n_miss > 0, "read miss happened");
    check(n_strict > 0, "strict close happened");
    check(n_notify > 0, "durability write happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
