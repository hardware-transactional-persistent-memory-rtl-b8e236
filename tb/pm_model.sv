// pm_model: behavioural model of persistent memory for the testbenches.
//
// Not synthesizable. Lines are kept in an associative array indexed by line
// address; lines never written read as zero. Requests use the controller's
// valid/ready port. A write is applied, byte strobe by byte strobe, in the
// cycle it is accepted. A read captures the line when accepted and answers
// LAT cycles later on rsp_valid/rsp_data; requests are served in order. When
// STALL_PCT > 0, ready is dropped at random in that share of cycles to model a
// slow device. Setting wr_cycles to k > 1 at run time keeps the port busy for
// k cycles after each write, to model PM writes k times slower than DRAM.
// peek() lets a testbench read what is persistent.
module pm_model #(
  parameter int unsigned LAT       = 3,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  wrap_pkg::pm_req_t req,
  output logic              rsp_valid,
  output wrap_pkg::line_t   rsp_data
);
  import wrap_pkg::*;

  line_t mem [laddr_t];
  int unsigned writes;
  int unsigned reads;

  line_t       rd_q   [$];
  int unsigned rd_due [$];
  int unsigned cyc;
  int unsigned wr_cycles;
  int unsigned busy;

  function automatic line_t peek(input addr_t a);
    laddr_t l;
    l = a[ADDR_W-1:OFFSET_BITS];
    if (mem.exists(l)) return mem[l];
    return '0;
  endfunction

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_data  = '0;
    writes    = 0;
    reads     = 0;
    cyc       = 0;
    wr_cycles = 1;
    busy      = 0;
  end

  always @(negedge clk) begin
    req_ready <= (busy == 0) && ((STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT));
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rsp_valid <= 1'b0;
    if (busy > 0) busy--;
    if (rst_n && req_valid && req_ready) begin
      laddr_t l;
      line_t  v;
      l = req.addr[ADDR_W-1:OFFSET_BITS];
      v = mem.exists(l) ? mem[l] : '0;
      if (req.we) begin
        for (int b = 0; b < LINE_BYTES; b++)
          if (req.strb[b]) v[8*b +: 8] = req.data[8*b +: 8];
        mem[l] = v;
        writes++;
        busy = wr_cycles - 1;
      end else begin
        rd_q.push_back(v);
        rd_due.push_back(cyc + LAT);
        reads++;
      end
    end
    if (rd_q.size() > 0 && rd_due[0] <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= rd_q.pop_front();
      void'(rd_due.pop_front());
    end
  end
endmodule
