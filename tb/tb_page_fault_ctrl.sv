// tb_page_fault_ctrl: the page-fault controller with a real key generator,
// MEE and ESHR table, a behavioural DRAM and an MVC stand-in that accepts
// the block stream with random back-pressure and records it.
//
// Checks: the critical block comes back decrypted after exactly two memory
// reads; the victim's blocks reach the MVC in order 0..63 as plaintext,
// tagged as eviction, before the new page's blocks, also in order; the EPC
// frame ends up holding the new page under CTR with incremented counters; a
// read fault arriving during a transfer preempts it at a block boundary and
// both pages complete; a write fault waits and is answered once its block is
// in the EPC; the evicted page, faulted back, returns its original data
// (new key written to the key table, eEPC re-encrypted).
module tb_page_fault_ctrl;
  import secscale_pkg::*;
  import tb_ref_pkg::*;
  import tb_forest_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               boot, ready;
  logic [127:0]       boot_time, dev_key2;
  logic [HWKEY_W-1:0] hw_key;
  key_t               epc_key, ssk_o;
  logic               fault_valid, fault_ready, fault_write, fault_e;
  ppn_t               fault_lppn, fault_vppn;
  eid_t               fault_leid, fault_veid;
  blk_t               fault_crit;
  frame_t             fault_frame;
  logic               resp_valid, resp_in_epc;
  ppn_t               resp_ppn;
  blk_t               resp_blk;
  line_t              resp_data;
  mem_req_t           mreq;
  logic               mreq_ready;
  mem_rsp_t           mrsp;
  frame_t             ctr_frame;
  blk_t               ctr_blk;
  logic [CTR_W-1:0]   ctr_val;
  logic               ctr_inc;
  logic               kg_req, kg_unwrap, kg_busy, kg_done;
  logic [127:0]       kg_wrapped_in, kg_wrapped, kg_rnd;
  logic               mee_start, mee_evict, mee_busy, mee_pv, mee_done;
  line_t              mee_din, mee_plain, mee_dout;
  key_t               mee_ecb_key, mee_ctr_key;
  logic [127:0]       mee_ctr_iv;
  logic               hb_valid, hb_ready, hb_evict;
  logic [4:0]         hb_slot;
  blk_t               hb_idx;
  ppn_t               hb_ppn;
  key_t               hb_pkey;
  line_t              hb_data;
  logic               e_alloc_en, e_alloc_e, e_alloc_ok, e_set_en, e_complete, e_probe_hit, e_probe_loaded;
  ppn_t               e_alloc_lpage, e_probe_lpage;
  frame_t             e_alloc_epage;
  logic [4:0]         e_alloc_idx, e_set_idx, e_complete_idx, e_probe_idx;
  blk_t               e_set_blk, e_probe_blk;
  eshr_t              e_rd_entry;
  logic [5:0]         e_n_valid;
  logic               active;
  logic [31:0]        n_faults, n_merged, n_preempt, n_wr_queued, n_evicted;

  key_generator u_kg (.clk, .rst_n, .boot, .boot_time, .hw_key, .dev_key2, .ssk (ssk_o), .ready,
    .req (kg_req), .unwrap (kg_unwrap), .wrapped_in (kg_wrapped_in), .busy (kg_busy),
    .done (kg_done), .rnd (kg_rnd), .wrapped (kg_wrapped));
  mee u_mee (.clk, .rst_n, .start (mee_start), .evict (mee_evict), .din (mee_din),
    .ecb_key (mee_ecb_key), .ctr_key (mee_ctr_key), .ctr_iv (mee_ctr_iv), .busy (mee_busy),
    .plain_valid (mee_pv), .plain (mee_plain), .done (mee_done), .dout (mee_dout));
  eshr_table u_eshr (.clk, .rst_n, .alloc_en (e_alloc_en), .alloc_lpage (e_alloc_lpage),
    .alloc_epage (e_alloc_epage), .alloc_e (e_alloc_e), .alloc_ok (e_alloc_ok),
    .alloc_idx (e_alloc_idx), .set_en (e_set_en), .set_idx (e_set_idx), .set_blk (e_set_blk),
    .complete (e_complete), .complete_idx (e_complete_idx), .rd_idx (e_set_idx),
    .rd_entry (e_rd_entry), .probe_lpage (e_probe_lpage), .probe_blk (e_probe_blk),
    .probe_hit (e_probe_hit), .probe_idx (e_probe_idx), .probe_loaded (e_probe_loaded),
    .n_valid (e_n_valid));
  page_fault_ctrl dut (.clk, .rst_n, .hw_key, .epc_key,
    .fault_valid, .fault_ready, .fault_write, .fault_lppn, .fault_leid, .fault_crit,
    .fault_frame, .fault_e, .fault_vppn, .fault_veid,
    .resp_valid, .resp_in_epc, .resp_ppn, .resp_blk, .resp_data,
    .mreq, .mreq_ready, .mrsp, .ctr_frame, .ctr_blk, .ctr_val, .ctr_inc,
    .kg_ready (ready), .kg_req, .kg_unwrap, .kg_wrapped_in, .kg_busy, .kg_done, .kg_rnd, .kg_wrapped,
    .mee_start, .mee_evict, .mee_din, .mee_ecb_key, .mee_ctr_key, .mee_ctr_iv, .mee_busy,
    .mee_plain_valid (mee_pv), .mee_plain, .mee_done, .mee_dout,
    .hb_valid, .hb_ready, .hb_evict, .hb_slot, .hb_idx, .hb_ppn, .hb_pkey, .hb_data,
    .eshr_alloc_en (e_alloc_en), .eshr_alloc_lpage (e_alloc_lpage), .eshr_alloc_epage (e_alloc_epage),
    .eshr_alloc_e (e_alloc_e), .eshr_alloc_ok (e_alloc_ok), .eshr_alloc_idx (e_alloc_idx),
    .eshr_set_en (e_set_en), .eshr_set_idx (e_set_idx), .eshr_set_blk (e_set_blk),
    .eshr_probe_lpage (e_probe_lpage), .eshr_probe_blk (e_probe_blk), .eshr_probe_hit (e_probe_hit),
    .eshr_probe_idx (e_probe_idx), .eshr_probe_loaded (e_probe_loaded),
    .active, .n_faults, .n_merged, .n_preempt, .n_wr_queued, .n_evicted);
  tb_mem_model #(.LAT (4)) u_mem (.clk, .mreq, .mreq_ready, .mrsp);

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
  int n_resp_data = 0, n_resp_epc = 0, n_crit2 = 0, acc_reads = 0, n_hb_bad = 0;
  int next_blk [ppn_t];
  int n_hb [2];
  always @(posedge clk) begin
    hb_ready <= ($urandom_range(0, 3) != 0);
    if (hb_valid && hb_ready) begin
      n_hb[hb_evict]++;
      if (!next_blk.exists(hb_ppn)) next_blk[hb_ppn] = 0;
      if (int'(hb_idx) != next_blk[hb_ppn] || hb_data != plain[hb_ppn][hb_idx] ||
          // page key fields other than the random part (which changes at
          // every eviction; the round trip checks it)
          {hb_pkey[255:161], hb_pkey[32:0]} != {hw_key, eid_of[hb_ppn], hb_ppn, 6'd0}) n_hb_bad++;
      next_blk[hb_ppn] = (next_blk[hb_ppn] + 1) % 64;
    end
    if (resp_valid) begin
      if (!resp_in_epc) begin
        n_resp_data++;
        if (resp_data != plain[resp_ppn][resp_blk])
          begin failures++; $display("FAIL: wrong critical block data for %h/%0d", resp_ppn, resp_blk); end
        if (u_mem.reads() - acc_reads == 2) n_crit2++;
      end else n_resp_epc++;
    end
  end

  task automatic fault(input bit wr, input ppn_t p, input blk_t crit, input frame_t f,
                       input bit e, input ppn_t v);
    @(negedge clk);
    fault_valid = 1; fault_write = wr; fault_lppn = p; fault_leid = eid_of[p]; fault_crit = crit;
    fault_frame = f; fault_e = e; fault_vppn = v; fault_veid = e ? eid_of[v] : '0;
    @(posedge clk);
    while (!fault_ready) @(posedge clk);
    acc_reads = u_mem.reads();
    @(negedge clk); fault_valid = 0;
  endtask

  task automatic wait_idle();
    int t = 0;
    do begin @(posedge clk); t++; end while ((active || t < 4) && t < 100000);
  endtask

  initial begin
    ppn_t P1 = 27'h00_0105, V1 = 27'h00_0211, P2 = 27'h00_0320, P3 = 27'h00_0431;
    logic [127:0] wk_before;
    n_hb[0] = 0; n_hb[1] = 0; hb_ready = 1;
    boot = 0; fault_valid = 0; fault_write = 0; fault_lppn = '0; fault_leid = '0; fault_crit = '0;
    fault_frame = '0; fault_e = 0; fault_vppn = '0; fault_veid = '0;
    boot_time = {$urandom, $urandom, $urandom, $urandom};
    dev_key2  = {$urandom, $urandom, $urandom, $urandom};
    hw_key    = {$urandom, $urandom};
    epc_key   = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    ssk       = {dev_key2, boot_time};
    new_page(P1, 31'd5); new_page(P2, 31'd5); new_page(P3, 31'd9); new_page(V1, 31'd6);
    put_eepc(P1); put_eepc(P2); put_eepc(P3); put_eepc(V1);
    wk_before = rd(u_mem.mem, keyt_addr(V1))[128*V1[1:0] +: 128];
    put_epc(V1, 15'd3);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); boot = 1; @(negedge clk); boot = 0;
    wait (ready);

    fault(0, P1, 6'd9, 15'd3, 1, V1);
    wait (n_resp_data == 1);
    check(n_crit2 == 1, "critical block after two memory reads");
    wait (n_evicted == 1);
    repeat (300) @(posedge clk);
    fault(0, P2, 6'd17, 15'd7, 0, '0);     // preempts P1's load
    fault(1, P3, 6'd40, 15'd8, 0, '0);     // write fault: queued
    wait_idle();
    check(n_resp_data == 2 && n_crit2 == 2, "second critical block after two reads");
    check(n_resp_epc == 1, "write fault answered from the EPC");
    check(n_preempt == 1 && n_wr_queued == 1 && n_faults == 3, "preemption and queued write counted");
    check(n_hb[1] == 64 && n_hb[0] == 3 * 64, "all blocks streamed to the MVC");
    check(n_hb_bad == 0, "MVC stream in order, plaintext, right page key");
    check(epc_holds(P1, 15'd3) && epc_holds(P2, 15'd7) && epc_holds(P3, 15'd8), "EPC frames hold the new pages");
    check(rd(u_mem.mem, keyt_addr(V1))[128*V1[1:0] +: 128] != wk_before, "victim got a new key");
    check(e_n_valid == 0, "all ESHRs released");
    // the victim comes back intact
    fault(0, V1, 6'd63, 15'd8, 1, P3);
    wait_idle();
    check(n_resp_data == 3, "evicted page faulted back");
    check(epc_holds(V1, 15'd8), "frame 8 holds the victim again");
    check(n_hb_bad == 0 && n_evicted == 2, $sformatf("second eviction streamed correctly (bad %0d, evicted %0d)", n_hb_bad, n_evicted));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
