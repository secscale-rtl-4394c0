// tb_mac_forest_unit: verification and update walks of the MAC forest.
//
// A behavioural memory holds a subtree built with the reference MAC model.
// The testbench streams whole pages as plaintext blocks and checks:
//   1. a genuine page verifies, with 4 extra reads on a root-cache miss;
//   2. a second page of the same subtree verifies with 3 reads (cache hit);
//   3. interleaved load and evict streams in two slots (chaining values are
//      kept per slot): the load verifies, the eviction leaves leaf, L1 and
//      root consistent with the new page key;
//   4. clubbing: an eviction whose successor in the evict register is in the
//      same subtree defers the root; the next one writes it; a verification
//      afterwards still passes;
//   5. a deferred root is flushed before a verification;
//   6. a tampered page fails and raises the sticky violation.
module tb_mac_forest_unit;
  import secscale_pkg::*;
  import tb_ref_pkg::*;
  import tb_forest_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  key_t       ssk;
  logic       hb_valid, hb_ready, hb_evict;
  logic [4:0] hb_slot;
  blk_t       hb_idx;
  ppn_t       hb_ppn;
  key_t       hb_pkey;
  line_t      hb_data;
  logic       next_evict_valid;
  ppn_t       next_evict_ppn;
  mem_req_t   mreq;
  logic       mreq_ready;
  mem_rsp_t   mrsp;
  logic       ver_done, ver_ok, upd_done, violation;
  ppn_t       ver_ppn;
  logic [5:0] n_pending;
  logic [31:0] n_clubbed, n_mem_acc, cache_lookups, cache_hits;
  int checks = 0, failures = 0;

  mac_forest_unit dut (.*);
  tb_mem_model #(.LAT (4)) u_mem (.clk, .mreq, .mreq_ready, .mrsp);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic void rand_page(ref rline_t pg []);
    pg = new[64];
    foreach (pg[i]) for (int j = 0; j < 16; j++) pg[i][32*j +: 32] = $urandom;
  endfunction

  function automatic key_t rand_key();
    key_t k;
    for (int j = 0; j < 8; j++) k[32*j +: 32] = $urandom;
    return k;
  endfunction

  task automatic send(input bit ev, input int slot, input int b, input ppn_t p, input key_t k, input line_t d);
    @(negedge clk);
    hb_valid = 1; hb_evict = ev; hb_slot = 5'(slot); hb_idx = 6'(b); hb_ppn = p; hb_pkey = k; hb_data = d;
    @(posedge clk);
    while (!hb_ready) @(posedge clk);
    @(negedge clk); hb_valid = 0;
  endtask

  task automatic stream(input bit ev, input int slot, input ppn_t p, input key_t k, input rline_t pg []);
    foreach (pg[i]) send(ev, slot, i, p, k, pg[i]);
  endtask

  int n_ver = 0, n_upd = 0, n_bad = 0;
  always @(posedge clk) begin
    if (ver_done) begin n_ver++; if (!ver_ok) n_bad++; end
    if (upd_done) n_upd++;
  end

  task automatic wait_ver(input int n);
    int t = 0;
    while (n_ver < n && t < 20000) begin @(posedge clk); t++; end
  endtask

  task automatic wait_upd(input int n);
    int t = 0;
    while (n_upd < n && t < 20000) begin @(posedge clk); t++; end
  endtask

  initial begin
    rline_t pa [], pb [], pc [], pd [], pe [], pf [];
    key_t ka, kb, kc, kd, ke, kf;
    int r0;
    ppn_t A = 27'h12_3456, B, C, D, E, F;
    B = {A[26:7], 7'h25};   // same subtree, other group
    C = {A[26:7], 7'h41};
    D = {A[26:7], 7'h42};   // same group as C
    E = {A[26:7] + 20'd1, 7'h03};  // next subtree
    F = {A[26:7], 7'h7f};
    hb_valid = 0; hb_evict = 0; hb_slot = 0; hb_idx = 0; hb_ppn = 0; hb_pkey = 0; hb_data = 0;
    next_evict_valid = 0; next_evict_ppn = 0;
    ssk = rand_key();
    rand_page(pa); rand_page(pb); rand_page(pc); rand_page(pd); rand_page(pe); rand_page(pf);
    ka = rand_key(); kb = rand_key(); kc = rand_key(); kd = rand_key(); ke = rand_key(); kf = rand_key();
    // genuine leaves for A, B, F; random leaves elsewhere; consistent forest
    for (int i = 0; i < 16; i++) u_mem.mem[leaf_addr({A[26:7], 7'(8*i)})] = {16{$urandom}};
    put_slot(u_mem.mem, leaf_addr(A), A[2:0], page_mac(pa, ka));
    put_slot(u_mem.mem, leaf_addr(B), B[2:0], page_mac(pb, kb));
    put_slot(u_mem.mem, leaf_addr(F), F[2:0], page_mac(pf, kf));
    build_subtree(u_mem.mem, A, ssk);
    build_subtree(u_mem.mem, E, ssk);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. genuine page, root-cache miss
    r0 = u_mem.reads();
    stream(0, 3, A, ka, pa);
    wait_ver(1);
    check(n_ver == 1 && n_bad == 0 && ver_ppn == A, "page A verifies");
    check(u_mem.reads() - r0 == 4, $sformatf("verify with cache miss used %0d reads", u_mem.reads() - r0));
    check(n_pending == 0, "no verification pending");

    // 2. same subtree, root-cache hit
    r0 = u_mem.reads();
    stream(0, 4, B, kb, pb);
    wait_ver(2);
    check(n_bad == 0, "page B verifies");
    check(u_mem.reads() - r0 == 3, $sformatf("verify with cache hit used %0d reads", u_mem.reads() - r0));
    check(cache_hits == 1 && cache_lookups == 2, "one cache hit out of two lookups");

    // 3. interleaved load (A again, slot 1) and eviction (C with new key, slot 2)
    fork
      stream(0, 1, A, ka, pa);
      stream(1, 2, C, kc, pc);
    join
    wait_ver(3); wait_upd(1);
    check(n_bad == 0, "interleaved load verifies");
    check(get_slot(u_mem.mem, leaf_addr(C), C[2:0]) == page_mac(pc, kc), "evicted page's leaf MAC");
    check(path_ok(u_mem.mem, C, ssk), "forest path of C consistent after update");

    // 4. clubbing: evict D while the next victim (F) is in the same subtree
    next_evict_valid = 1; next_evict_ppn = F;
    stream(1, 5, D, kd, pd);
    wait_upd(2);
    check(n_clubbed == 1, "update of D clubbed");
    check(!path_ok(u_mem.mem, D, ssk), "root deferred while clubbed");
    next_evict_valid = 1; next_evict_ppn = E;
    stream(1, 6, F, kf, pf);
    wait_upd(3);
    check(n_clubbed == 1, "update of F not clubbed");
    check(path_ok(u_mem.mem, D, ssk) && path_ok(u_mem.mem, F, ssk), "root written once for D and F");

    // 5. deferred root flushed before a verification
    next_evict_valid = 1; next_evict_ppn = A;
    stream(1, 7, C, kc, pc);    // C evicted again, next victim A: clubbed
    wait_upd(4);
    check(n_clubbed == 2, "second clubbing");
    next_evict_valid = 0;
    stream(0, 8, B, kb, pb);
    wait_ver(4);
    check(n_bad == 0 && !violation, "verification after flush passes");
    check(path_ok(u_mem.mem, C, ssk), "flush wrote the root");

    // 6. tampered page
    pe = pb;
    pe[17][5] = ~pe[17][5];
    stream(0, 9, B, kb, pe);
    wait_ver(5);
    check(n_bad == 1 && violation, "tampered page detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
