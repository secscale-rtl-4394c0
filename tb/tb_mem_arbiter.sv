// tb_mem_arbiter: two random requesters share one memory through the
// arbiter.  Checks that every request is answered exactly once with the data
// of its own address, that a pending read is granted before a pending write
// (including the read-before-waiting-write counter), that requester 0 wins
// between two reads, and that no request is lost under random traffic.
module tb_mem_arbiter;
  import secscale_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mem_req_t req [2];
  logic     ready [2];
  mem_rsp_t rsp [2];
  mem_req_t mreq;
  logic     mreq_ready;
  mem_rsp_t mrsp;
  logic [31:0] n_reads, n_writes, n_read_first;
  int checks = 0, failures = 0;

  mem_arbiter dut (.*);
  tb_mem_model #(.LAT (3)) u_mem (.clk, .mreq, .mreq_ready, .mrsp);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int done_cnt [2];
  line_t got [2];
  int order [$];

  // one requester: issue r and wait for its answer
  task automatic access(input int i, input bit we, input addr_t a, input line_t d);
    @(negedge clk);
    req[i] = '{valid: 1'b1, we: we, addr: a, wdata: d};
    @(posedge clk);
    while (!ready[i]) @(posedge clk);
    order.push_back(i * 2 + int'(we));
    @(negedge clk); req[i] = '0;
    while (!rsp[i].valid) @(posedge clk);
    got[i] = rsp[i].rdata;
    done_cnt[i]++;
  endtask

  initial begin
    line_t model [addr_t];
    req[0] = '0; req[1] = '0; done_cnt[0] = 0; done_cnt[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    u_mem.mem[40'h10] = {16{32'hA5A5_0001}};
    // requester 0 writes while requester 1 reads, both in the same cycle
    fork
      access(0, 1'b1, 40'h20, {16{32'h1234_5678}});
      access(1, 1'b0, 40'h10, '0);
    join
    check(order.size() == 2 && order[0] == 2 && order[1] == 1, "read granted before the waiting write");
    check(n_read_first == 1, "read-first counter");
    check(got[1] == {16{32'hA5A5_0001}}, "read data routed to requester 1");
    check(u_mem.mem[40'h20] == {16{32'h1234_5678}}, "write reached memory");
    // two reads in the same cycle: requester 0 first
    order.delete();
    fork
      access(1, 1'b0, 40'h20, '0);
      access(0, 1'b0, 40'h10, '0);
    join
    check(order[0] == 0 && order[1] == 2, "requester 0 wins between reads");
    check(got[1] == {16{32'h1234_5678}} && got[0] == {16{32'hA5A5_0001}}, "each read gets its own data");
    // random traffic
    for (int k = 0; k < 200; k++) begin
      automatic addr_t a0 = addr_t'($urandom_range(0, 15)), a1 = addr_t'(16 + $urandom_range(0, 15));
      automatic bit w0 = $urandom_range(0, 1), w1 = $urandom_range(0, 1);
      automatic line_t d0 = {16{$urandom}}, d1 = {16{$urandom}};
      automatic line_t e0 = model.exists(a0) ? model[a0] : u_mem.mem.exists(a0) ? u_mem.mem[a0] : '0;
      automatic line_t e1 = model.exists(a1) ? model[a1] : u_mem.mem.exists(a1) ? u_mem.mem[a1] : '0;
      fork
        access(0, w0, a0, d0);
        access(1, w1, a1, d1);
      join
      if (!w0) check(got[0] == e0, "random read 0"); else model[a0] = d0;
      if (!w1) check(got[1] == e1, "random read 1"); else model[a1] = d1;
    end
    check(n_reads + n_writes == 404, $sformatf("all requests granted (%0d)", n_reads + n_writes));
    check(done_cnt[0] + done_cnt[1] == 404, "all requests answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
