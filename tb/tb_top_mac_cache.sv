// tb_top_mac_cache: random lookups and fills over 12 subtrees against a
// queue-based LRU model of an 8-entry cache; also checks the hit and lookup
// counters.
module tb_top_mac_cache;
  import secscale_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        lk_en, lk_hit, fill_en;
  sub_t        lk_sub, fill_sub;
  mac_t        lk_mac, fill_mac;
  logic [31:0] lookups, hits;
  int checks = 0, failures = 0;

  top_mac_cache dut (.*);

  // Model: most recently used at the front.
  sub_t q_sub [$];
  mac_t q_mac [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int find(sub_t s);
    foreach (q_sub[i]) if (q_sub[i] == s) return i;
    return -1;
  endfunction

  initial begin
    int n_lk = 0, n_hit = 0, i;
    mac_t m;
    lk_en = 0; fill_en = 0; lk_sub = '0; fill_sub = '0; fill_mac = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 600; it++) begin
      @(negedge clk);
      lk_en = 0; fill_en = 0;
      if ($urandom_range(1) == 0) begin
        lk_en = 1; lk_sub = SUB_W'($urandom_range(11));
        #1;
        i = find(lk_sub);
        n_lk++;
        check(lk_hit == (i >= 0), $sformatf("lookup %0d hit=%0d model=%0d", lk_sub, lk_hit, i >= 0));
        if (i >= 0) begin
          n_hit++;
          check(lk_mac == q_mac[i], "hit data");
          m = q_mac[i];
          q_sub.delete(i); q_mac.delete(i);
          q_sub.push_front(lk_sub); q_mac.push_front(m);
        end
      end else begin
        fill_en = 1; fill_sub = SUB_W'($urandom_range(11)); fill_mac = {$urandom, $urandom};
        i = find(fill_sub);
        if (i >= 0) begin q_sub.delete(i); q_mac.delete(i); end
        else if (q_sub.size() == 8) begin void'(q_sub.pop_back()); void'(q_mac.pop_back()); end
        q_sub.push_front(fill_sub); q_mac.push_front(fill_mac);
      end
    end
    @(negedge clk); lk_en = 0; fill_en = 0;
    @(negedge clk);
    check(lookups == 32'(n_lk), $sformatf("lookup counter %0d vs %0d", lookups, n_lk));
    check(hits == 32'(n_hit), $sformatf("hit counter %0d vs %0d", hits, n_hit));
    check(n_hit > 50 && n_hit < n_lk, "both hits and misses exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
