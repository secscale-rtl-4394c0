// tb_secscale_top: end-to-end test of the SecScale controller at its default
// parameters (32 ESHRs, 8-entry top-MAC cache).
//
// A behavioural DRAM holds an eEPC whose pages are AES-ECB encrypted under
// per-page keys, the key table (page keys wrapped under the SSK), a
// consistent MAC forest and an EPC whose frames hold CTR-encrypted pages.  An
// EPC counter model answers the ctr_* port.  Everything expected is computed
// with the independent reference models of tb_ref_pkg / tb_forest_pkg.
//
// Sequence:
//   F1 read fault P1 -> frame 3, evicting V1 (evict register points at V2,
//      same subtree: the root update is clubbed); the critical block must
//      come back after exactly two memory reads; a system call raised now
//      must wait for verification.
//   F2 read fault P2 -> frame 7 while F1 is still moving blocks: preemption.
//   F3 write fault P3 -> frame 8 while busy: queued, answered in the EPC.
//   F4 read fault on P2 again while P2 is in transfer: merged via the ESHR.
//   Then every frame is checked block by block against the reference.
//   F5 V1 brought back into frame 3 evicting P1, F6 P1 back into frame 7
//      evicting P2: round trips through the eviction path, key table and
//      forest updates.
//   F7 a tampered eEPC block of P4, in another subtree (root-cache miss): the
//      MVC flags a violation.
// Each mechanism (stall of the system call, preemption, queued write, merge,
// eviction, clubbing, root-cache hit and miss, read-before-write, critical
// block return, verification, violation) is counted and a mechanism that
// never happens counts as a failure.  The arbiter's read-before-write choice
// is printed here but checked in tb_mem_arbiter: with one request in flight
// per requester the two rarely collide in this sequence.
module tb_secscale_top;
  import secscale_pkg::*;
  import tb_ref_pkg::*;
  import tb_forest_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              boot, ready;
  logic [127:0]      boot_time, dev_key2;
  logic [HWKEY_W-1:0] hw_key;
  key_t              epc_key;
  logic              fault_valid, fault_ready, fault_write, fault_e;
  ppn_t              fault_lppn, fault_vppn;
  eid_t              fault_leid, fault_veid;
  blk_t              fault_crit;
  frame_t            fault_frame;
  logic              resp_valid, resp_in_epc;
  ppn_t              resp_ppn;
  blk_t              resp_blk;
  line_t             resp_data;
  logic              next_evict_valid;
  ppn_t              next_evict_ppn;
  mem_req_t          mreq;
  logic              mreq_ready;
  mem_rsp_t          mrsp;
  frame_t            ctr_frame;
  blk_t              ctr_blk;
  logic [CTR_W-1:0]  ctr_val;
  logic              ctr_inc;
  logic              syscall_req, syscall_grant;
  logic              ver_done, ver_ok, upd_done, violation, busy;
  ppn_t              ver_ppn;
  stats_t            stats;

  secscale_top dut (.*);
  tb_mem_model #(.LAT (4)) u_mem (.clk, .mreq, .mreq_ready, .mrsp);

  // EPC counters (SGX's counter tree, outside the design)
  logic [CTR_W-1:0] ctr [logic [20:0]];
  assign ctr_val = ctr.exists({ctr_frame, ctr_blk}) ? ctr[{ctr_frame, ctr_blk}] : '0;
  always @(posedge clk) if (ctr_inc) ctr[{ctr_frame, ctr_blk}] = ctr_val + 1;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ the pages
  rline_t plain [ppn_t][];
  logic [127:0] rnd_of [ppn_t];
  eid_t         eid_of [ppn_t];
  key_t         ssk;

  function automatic key_t bkey(ppn_t p, blk_t b);
    return {hw_key, eid_of[p], rnd_of[p], p, b};
  endfunction

  function automatic void new_page(ppn_t p, eid_t e);
    rline_t pg [] = new[64];
    foreach (pg[i]) for (int j = 0; j < 16; j++) pg[i][32*j +: 32] = $urandom;
    plain[p] = pg;
    eid_of[p] = e;
    for (int j = 0; j < 4; j++) rnd_of[p][32*j +: 32] = $urandom;
  endfunction

  // page p stored in the eEPC with its key in the key table and its leaf MAC
  function automatic void put_eepc(ppn_t p);
    line_t kl;
    for (int b = 0; b < 64; b++) u_mem.mem[eepc_addr(p, 6'(b))] = ref_ecb(bkey(p, 6'(b)), plain[p][b]);
    kl = rd(u_mem.mem, keyt_addr(p));
    kl[128*p[1:0] +: 128] = ref_aes_enc(ssk, rnd_of[p]);
    u_mem.mem[keyt_addr(p)] = kl;
    put_slot(u_mem.mem, leaf_addr(p), p[2:0], page_mac(plain[p], bkey(p, 6'd0)));
  endfunction

  // page p resident in EPC frame f
  function automatic void put_epc(ppn_t p, frame_t f);
    for (int b = 0; b < 64; b++)
      u_mem.mem[epc_addr(f, 6'(b))] = ref_ctr(epc_key, ref_ctr_iv(f, 6'(b), 56'd0), plain[p][b]);
  endfunction

  function automatic bit epc_holds(ppn_t p, frame_t f);
    for (int b = 0; b < 64; b++) begin
      logic [CTR_W-1:0] c = ctr.exists({f, 6'(b)}) ? ctr[{f, 6'(b)}] : '0;
      if (rd(u_mem.mem, epc_addr(f, 6'(b))) != ref_ctr(epc_key, ref_ctr_iv(f, 6'(b), c), plain[p][b]))
        return 1'b0;
    end
    return 1'b1;
  endfunction

  // ------------------------------------------------------------- monitors
  int n_resp_data = 0, n_resp_epc = 0, n_ver_ok = 0, n_ver_bad = 0, n_upd = 0;
  int n_crit2 = 0, crit_cycles = 0, acc_reads = 0, acc_cycle = 0, cyc = 0;
  frame_t frame_of [ppn_t];
  always @(posedge clk) begin
    cyc++;
    if (ver_done) begin if (ver_ok) n_ver_ok++; else n_ver_bad++; end
    if (upd_done) n_upd++;
    if (resp_valid) begin
      if (!resp_in_epc) begin
        n_resp_data++;
        if (resp_data != plain[resp_ppn][resp_blk])
          begin failures++; $display("FAIL: wrong critical block data for %h/%0d", resp_ppn, resp_blk); end
        if (u_mem.reads() - acc_reads == 2) n_crit2++;
        crit_cycles = cyc - acc_cycle;
      end else begin
        n_resp_epc++;
        if (!frame_of.exists(resp_ppn)) begin failures++; $display("FAIL: response for unknown page"); end
      end
    end
  end

  task automatic fault(input bit wr, input ppn_t p, input blk_t crit, input frame_t f,
                       input bit e, input ppn_t v);
    @(negedge clk);
    fault_valid = 1; fault_write = wr; fault_lppn = p; fault_leid = eid_of[p]; fault_crit = crit;
    fault_frame = f; fault_e = e; fault_vppn = v; fault_veid = e ? eid_of[v] : '0;
    @(posedge clk);
    while (!fault_ready) @(posedge clk);
    acc_reads = u_mem.reads(); acc_cycle = cyc;
    frame_of[p] = f;
    @(negedge clk); fault_valid = 0;
  endtask

  task automatic wait_idle();
    int t = 0;
    do begin @(posedge clk); t++; end while ((busy || t < 4) && t < 100000);
  endtask

  int sys_wait_seen = 0;
  initial begin
    ppn_t S = 27'h12_3456;
    ppn_t P1 = {S[26:7], 7'h05}, V1 = {S[26:7], 7'h11}, V2 = {S[26:7], 7'h12};
    ppn_t P2 = {S[26:7], 7'h20}, P3 = {S[26:7], 7'h31}, P4 = {S[26:7] + 20'd1, 7'h44};
    int vb, n;
    boot = 0; fault_valid = 0; fault_write = 0; fault_lppn = '0; fault_leid = '0; fault_crit = '0;
    fault_frame = '0; fault_e = 0; fault_vppn = '0; fault_veid = '0; syscall_req = 0;
    next_evict_valid = 0; next_evict_ppn = '0;
    boot_time = {$urandom, $urandom, $urandom, $urandom};
    dev_key2  = {$urandom, $urandom, $urandom, $urandom};
    hw_key    = {$urandom, $urandom};
    epc_key   = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    ssk       = {dev_key2, boot_time};
    new_page(P1, 31'd5); new_page(P2, 31'd5); new_page(P3, 31'd7); new_page(P4, 31'd7);
    new_page(V1, 31'd6); new_page(V2, 31'd6);
    for (int i = 0; i < 16; i++) u_mem.mem[leaf_addr({S[26:7], 7'(8*i)})] = {16{$urandom}};
    put_eepc(P1); put_eepc(P2); put_eepc(P3); put_eepc(P4);
    build_subtree(u_mem.mem, S, ssk);
    build_subtree(u_mem.mem, P4, ssk);
    put_epc(V1, 15'd3);
    frame_of[V1] = 15'd3;

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); boot = 1; @(negedge clk); boot = 0;
    n = 0;
    while (!ready && n < 100) begin @(negedge clk); n++; end
    check(ready && n <= 14, $sformatf("SSK ready after %0d cycles", n + 1));

    // F1
    next_evict_valid = 1; next_evict_ppn = V2;
    fault(0, P1, 6'd9, 15'd3, 1, V1);
    wait (n_resp_data == 1);
    check(n_crit2 == 1, "critical block of P1 returned after two memory reads");
    $display("critical block latency %0d cycles", crit_cycles);
    fork
      begin
        int w = 0;
        @(negedge clk); syscall_req = 1;
        while (!syscall_grant && w < 100000) begin @(posedge clk); w++; end
        sys_wait_seen = w;
        check(syscall_grant && n_ver_ok >= 1, "system call granted once verification is done");
        @(negedge clk); syscall_req = 0;
      end
    join_none

    // F2 during F1's load phase: preemption; F3 queued behind it
    wait (stats.evicted == 1);
    repeat (200) @(posedge clk);
    fault(0, P2, 6'd0, 15'd7, 0, '0);
    fault(1, P3, 6'd4, 15'd8, 0, '0);
    wait (n_resp_data == 2);
    check(n_crit2 == 2, "critical block of P2 returned after two memory reads");
    // F4: P2 again, block 60, while P2 is still being loaded
    fault(0, P2, 6'd60, 15'd7, 0, '0);
    wait_idle();
    check(stats.faults == 4, "four faults accepted");
    check(n_resp_epc == 2, "write fault and merged fault answered from the EPC");
    check(n_ver_ok == 3 && n_ver_bad == 0 && !violation, "P1, P2, P3 verified");
    check(epc_holds(P1, 15'd3), "frame 3 holds P1");
    check(epc_holds(P2, 15'd7), "frame 7 holds P2");
    check(epc_holds(P3, 15'd8), "frame 8 holds P3");
    check(path_ok(u_mem.mem, V1, ssk), "forest consistent after V1's eviction");

    // F5, F6: round trips
    next_evict_valid = 0;
    fault(0, V1, 6'd33, 15'd3, 1, P1);
    wait_idle();
    check(epc_holds(V1, 15'd3), "frame 3 holds V1 again");
    fault(0, P1, 6'd2, 15'd7, 1, P2);
    wait_idle();
    check(epc_holds(P1, 15'd7), "frame 7 holds P1 again");
    check(n_ver_ok == 5 && n_ver_bad == 0 && !violation, "round trips verified");
    check(n_upd == 3, "three pages evicted and their MACs updated");

    // F7: tampering
    u_mem.mem[eepc_addr(P4, 6'd50)] = u_mem.mem[eepc_addr(P4, 6'd50)] ^ 512'h1;
    fault(0, P4, 6'd1, 15'd8, 1, P3);
    wait_idle();
    check(violation && n_ver_bad == 1, "tampered page flagged");

    // mechanisms
    check(n_crit2 >= 2,             "mechanism: critical block after two reads");
    check(stats.preempt > 0,        "mechanism: preemption by a read fault");
    check(stats.wr_queued > 0,      "mechanism: queued write fault");
    check(stats.merged > 0,         "mechanism: fault merged into an ESHR");
    check(stats.evicted == 4,       "mechanism: evictions");
    check(stats.clubbed > 0,        "mechanism: clubbed root update");
    check(stats.cache_hits > 0,     "mechanism: top-MAC cache hit");
    check(stats.cache_lookups > stats.cache_hits, "mechanism: top-MAC cache miss");
    check(stats.syscall_wait > 0 && sys_wait_seen > 0, "mechanism: system call stalled");
    check(stats.verified == 6,      "mechanism: verifications");
    check(violation,                "mechanism: violation");
    $display("faults %0d merged %0d preempt %0d wr_queued %0d evicted %0d verified %0d clubbed %0d",
             stats.faults, stats.merged, stats.preempt, stats.wr_queued, stats.evicted,
             stats.verified, stats.clubbed);
    $display("cache %0d/%0d  mvc_mem %0d  mem r/w %0d/%0d  read_first %0d  syscall_wait %0d",
             stats.cache_hits, stats.cache_lookups, stats.mvc_mem, stats.mem_reads,
             stats.mem_writes, stats.read_first, stats.syscall_wait);
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
