// tb_pe_mem_noc: eight behavioural PE memory ports (one-cycle read latency,
// random ready) behind one region NoC; random writes and reads must reach
// the addressed PE and read data must come back in order.
module tb_pe_mem_noc;
  import bts_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask
  mem_req_t req, pe_req [8]; logic ready, pe_ready [8]; mem_rsp_t rsp, pe_rsp [8];
  pe_mem_noc #(.NPES(8)) dut (.clk, .rst_n, .req, .ready, .rsp, .pe_req, .pe_ready, .pe_rsp);
  word_t mem [8][16];
  // behavioural PE memory ports
  always_ff @(posedge clk) begin
    for (int k = 0; k < 8; k++) begin
      pe_rsp[k].valid <= 1'b0;
      if (pe_req[k].valid && pe_ready[k]) begin
        if (pe_req[k].we) mem[k][pe_req[k].addr[3:0]] <= pe_req[k].wdata;
        else begin pe_rsp[k].valid <= 1'b1; pe_rsp[k].rdata <= mem[k][pe_req[k].addr[3:0]]; end
      end
    end
  end
  always_ff @(posedge clk) for (int k = 0; k < 8; k++) pe_ready[k] <= ($urandom_range(0, 3) != 0);
  word_t shadow [8][16];
  initial begin
    req = '0;
    for (int k = 0; k < 8; k++) begin pe_rsp[k] = '0; pe_ready[k] = 1; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 8; k++) for (int a = 0; a < 16; a++) begin
      @(negedge clk); req = '0; req.valid = 1; req.we = 1; req.pe = 8'(k); req.addr = 15'(a);
      req.wdata = {$urandom(), $urandom()}; shadow[k][a] = req.wdata;
      @(posedge clk); while (!ready) @(posedge clk);
    end
    for (int t = 0; t < 200; t++) begin
      int k, a;
      k = $urandom_range(0, 7); a = $urandom_range(0, 15);
      @(negedge clk); req = '0; req.valid = 1; req.pe = 8'(k); req.addr = 15'(a);
      @(posedge clk); while (!ready) @(posedge clk);
      @(negedge clk); req = '0;
      @(posedge clk); @(negedge clk);
      checks++;
      if (!rsp.valid) begin failures++; $display("FAIL no response"); end
      else check("read", rsp.rdata, shadow[k][a]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
