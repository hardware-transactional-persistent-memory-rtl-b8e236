// tb_wrap_cot: random open/close notifications against a bit-vector model of
// the set of open wraps; checks cot, cot_less_closer and cot_empty every cycle.
module tb_wrap_cot;
  import wrap_pkg::*;
  localparam int unsigned NW = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic ntf_valid;
  ntf_kind_e ntf_kind;
  logic [$clog2(NW)-1:0] ntf_id;
  logic [NW-1:0] cot, cot_less_closer, model;
  logic cot_empty;
  int checks = 0, failures = 0;

  wrap_cot #(.NW(NW)) dut (.clk, .rst_n, .ntf_valid, .ntf_kind, .ntf_id, .cot, .cot_less_closer, .cot_empty);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL t=%0t: %s", $time, what); end
  endtask

  initial begin
    ntf_valid = 0; ntf_kind = NTF_OPEN; ntf_id = '0; model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(cot == '0 && cot_empty, "reset: nothing open");
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ntf_id = ($clog2(NW))'($urandom % NW);
      ntf_valid = ($urandom % 4) != 0;
      ntf_kind = model[ntf_id] ? NTF_CLOSE : NTF_OPEN;
      #1;
      check(cot_less_closer == (model & ~(NW'(1) << ntf_id)), "cot_less_closer");
      @(posedge clk);
      if (ntf_valid) model[ntf_id] = (ntf_kind == NTF_OPEN);
      #1;
      check(cot == model, "cot follows opens and closes");
      check(cot_empty == (model == '0), "cot_empty");
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
