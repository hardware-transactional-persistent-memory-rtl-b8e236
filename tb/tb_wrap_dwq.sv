// tb_wrap_dwq: random strict closes (pushes), closes (clears) and
// notification pops against a queue model; checks that the head is offered
// exactly when its dependency set is empty and carries the right address.
module tb_wrap_dwq;
  localparam int unsigned NW = 8, DEPTH = 8, AW = 48;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic push_valid, push_ready, clr_valid, notify_valid, notify_pop;
  logic [NW-1:0] push_ds;
  logic [AW-1:0] push_addr, notify_addr;
  logic [$clog2(NW)-1:0] clr_id;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;

  typedef struct { logic [NW-1:0] ds; logic [AW-1:0] a; } ent_t;
  ent_t q[$];

  wrap_dwq #(.DEPTH(DEPTH), .NW(NW), .AW(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t: %s", $time, what); end
  endtask

  initial begin
    push_valid = 0; clr_valid = 0; notify_pop = 0; push_ds = '0; push_addr = '0; clr_id = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      push_valid = (q.size() < DEPTH) && ($urandom % 3 == 0);
      push_ds    = NW'($urandom) & NW'($urandom);
      if (q.size() > 0) push_ds = push_ds | q[$].ds;  // later sets cover earlier ones
      push_addr  = AW'({$urandom, $urandom});
      clr_valid  = ($urandom % 3 == 0);
      clr_id     = ($clog2(NW))'($urandom % NW);
      #1;
      check(notify_valid == (q.size() > 0 && q[0].ds == '0), "head offered when its set is empty");
      if (q.size() > 0 && notify_valid) check(notify_addr == q[0].a, "head address");
      check(count == ($clog2(DEPTH)+1)'(q.size()), "count");
      check(push_ready == (q.size() < DEPTH), "push_ready");
      notify_pop = notify_valid && ($urandom % 2 == 0);
      @(posedge clk);
      if (notify_pop) void'(q.pop_front());
      if (push_valid) q.push_back('{push_ds, push_addr});
      if (clr_valid) foreach (q[k]) q[k].ds[clr_id] = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
