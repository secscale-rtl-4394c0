// secscale_top: the SecScale memory-controller extension (paper Fig. 9).
//
// Inside the trusted boundary of the memory controller the paper places the
// system-specific key, the MAC verification circuit, the memory encryption
// engine and the eviction status holding registers next to SGX's Merkle root
// and counter cache.  This module connects:
//   key_generator    SSK register, PRNG for page keys, key wrapping
//   page_fault_ctrl  page-fault jobs (critical block first, eviction, load)
//   eshr_table       32 ESHRs (Fig. 13)
//   mee              ECB <-> CTR re-encryption (Fig. 11)
//   mac_forest_unit  MVC with the top-level MAC cache and update clubbing
//   mem_arbiter      one memory port; reads before waiting writes
// Outside (ports): the core and caches that raise faults, DRAM and the
// system bus (memory port), SGX's EPC counters (ctr_* port), the EPCM/LRU
// that picks victims (fault_* fields and the evict register next_evict_*)
// and the OS communication region (syscall_req / syscall_grant).
//
// System calls: "If speculative execution is in progress when a system call
// occurs, the processor first waits for the MAC verification to complete"
// (Corner Cases).  syscall_grant is high only while syscall_req is high and no
// page transfer is in progress and no loaded page awaits verification: the
// core may be running on a critical block whose page is not yet verified.  A failed verification sets the sticky
// violation output; the paper treats it as an attack and halts the enclave,
// which is left to the core.
//
// Timing: boot pulse, then ready after 14 cycles (SSK expanded); a read fault
// is answered after two memory reads plus decryption; the rest of the page
// moves in the background.
module secscale_top
  import secscale_pkg::*;
#(
  parameter int unsigned ESHR_N    = 32,   // ESHR entries
  parameter int unsigned TOP_CACHE = 8,    // top-level MAC cache entries r
  parameter int unsigned STACK     = 4     // preempted jobs kept
) (
  input  logic                clk,
  input  logic                rst_n,
  // boot and keys
  input  logic                boot,
  input  logic [127:0]        boot_time,
  input  logic [HWKEY_W-1:0]  hw_key,
  input  logic [127:0]        dev_key2,
  input  key_t                epc_key,
  output logic                ready,
  // page faults from the core (EPCM/LRU supplies frame and victim)
  input  logic                fault_valid,
  output logic                fault_ready,
  input  logic                fault_write,
  input  ppn_t                fault_lppn,
  input  eid_t                fault_leid,
  input  blk_t                fault_crit,
  input  frame_t              fault_frame,
  input  logic                fault_e,
  input  ppn_t                fault_vppn,
  input  eid_t                fault_veid,
  output logic                resp_valid,
  output logic                resp_in_epc,
  output ppn_t                resp_ppn,
  output blk_t                resp_blk,
  output line_t               resp_data,
  // evict register: next victim
  input  logic                next_evict_valid,
  input  ppn_t                next_evict_ppn,
  // DRAM over the system bus
  output mem_req_t            mreq,
  input  logic                mreq_ready,
  input  mem_rsp_t            mrsp,
  // SGX EPC counters
  output frame_t              ctr_frame,
  output blk_t                ctr_blk,
  input  logic [CTR_W-1:0]    ctr_val,
  output logic                ctr_inc,
  // OS communication region
  input  logic                syscall_req,
  output logic                syscall_grant,
  // integrity
  output logic                ver_done,
  output logic                ver_ok,
  output ppn_t                ver_ppn,
  output logic                upd_done,
  output logic                violation,
  output logic                busy,
  output stats_t              stats
);
  localparam int unsigned SW = $clog2(ESHR_N);

  // key generator
  key_t         ssk;
  logic         kg_req, kg_unwrap, kg_busy, kg_done;
  logic [127:0] kg_wrapped_in, kg_wrapped, kg_rnd;

  key_generator u_kg (
    .clk, .rst_n, .boot, .boot_time, .hw_key, .dev_key2, .ssk, .ready,
    .req (kg_req), .unwrap (kg_unwrap), .wrapped_in (kg_wrapped_in),
    .busy (kg_busy), .done (kg_done), .rnd (kg_rnd), .wrapped (kg_wrapped)
  );

  // memory encryption engine
  logic         mee_start, mee_evict, mee_busy, mee_pv, mee_done;
  line_t        mee_din, mee_plain, mee_dout;
  key_t         mee_ecb_key, mee_ctr_key;
  logic [127:0] mee_ctr_iv;

  mee u_mee (
    .clk, .rst_n, .start (mee_start), .evict (mee_evict), .din (mee_din),
    .ecb_key (mee_ecb_key), .ctr_key (mee_ctr_key), .ctr_iv (mee_ctr_iv),
    .busy (mee_busy), .plain_valid (mee_pv), .plain (mee_plain),
    .done (mee_done), .dout (mee_dout)
  );

  // ESHR table
  logic          e_alloc_en, e_alloc_e, e_alloc_ok, e_set_en, e_complete;
  logic          e_probe_hit, e_probe_loaded;
  ppn_t          e_alloc_lpage, e_probe_lpage;
  frame_t        e_alloc_epage;
  logic [SW-1:0] e_alloc_idx, e_set_idx, e_complete_idx, e_probe_idx;
  blk_t          e_set_blk, e_probe_blk;
  eshr_t         e_rd_entry;
  logic [SW:0]   e_n_valid;

  eshr_table #(.ENTRIES (ESHR_N)) u_eshr (
    .clk, .rst_n,
    .alloc_en (e_alloc_en), .alloc_lpage (e_alloc_lpage), .alloc_epage (e_alloc_epage),
    .alloc_e (e_alloc_e), .alloc_ok (e_alloc_ok), .alloc_idx (e_alloc_idx),
    .set_en (e_set_en), .set_idx (e_set_idx), .set_blk (e_set_blk),
    .complete (e_complete), .complete_idx (e_complete_idx),
    .rd_idx (e_set_idx), .rd_entry (e_rd_entry),
    .probe_lpage (e_probe_lpage), .probe_blk (e_probe_blk), .probe_hit (e_probe_hit),
    .probe_idx (e_probe_idx), .probe_loaded (e_probe_loaded), .n_valid (e_n_valid)
  );

  // MVC
  logic          hb_valid, hb_ready, hb_evict;
  logic [SW-1:0] hb_slot;
  blk_t          hb_idx;
  ppn_t          hb_ppn;
  key_t          hb_pkey;
  line_t         hb_data;
  logic [SW:0]   n_pending;
  logic [31:0]   n_clubbed, n_mvc_mem, c_lookups, c_hits;

  // memory ports
  mem_req_t arb_req [2];
  logic     arb_ready [2];
  mem_rsp_t arb_rsp [2];
  logic [31:0] n_reads, n_writes, n_read_first;
  logic [31:0] n_faults, n_merged, n_preempt, n_wr_queued, n_evicted;
  logic        pf_active;

  page_fault_ctrl #(.SLOTS (ESHR_N), .STACK (STACK)) u_pf (
    .clk, .rst_n, .hw_key, .epc_key,
    .fault_valid, .fault_ready, .fault_write, .fault_lppn, .fault_leid, .fault_crit,
    .fault_frame, .fault_e, .fault_vppn, .fault_veid,
    .resp_valid, .resp_in_epc, .resp_ppn, .resp_blk, .resp_data,
    .mreq (arb_req[0]), .mreq_ready (arb_ready[0]), .mrsp (arb_rsp[0]),
    .ctr_frame, .ctr_blk, .ctr_val, .ctr_inc,
    .kg_ready (ready), .kg_req, .kg_unwrap, .kg_wrapped_in, .kg_busy, .kg_done,
    .kg_rnd, .kg_wrapped,
    .mee_start, .mee_evict, .mee_din, .mee_ecb_key, .mee_ctr_key, .mee_ctr_iv,
    .mee_busy, .mee_plain_valid (mee_pv), .mee_plain, .mee_done, .mee_dout,
    .hb_valid, .hb_ready, .hb_evict, .hb_slot, .hb_idx, .hb_ppn, .hb_pkey, .hb_data,
    .eshr_alloc_en (e_alloc_en), .eshr_alloc_lpage (e_alloc_lpage),
    .eshr_alloc_epage (e_alloc_epage), .eshr_alloc_e (e_alloc_e),
    .eshr_alloc_ok (e_alloc_ok), .eshr_alloc_idx (e_alloc_idx),
    .eshr_set_en (e_set_en), .eshr_set_idx (e_set_idx), .eshr_set_blk (e_set_blk),
    .eshr_probe_lpage (e_probe_lpage), .eshr_probe_blk (e_probe_blk),
    .eshr_probe_hit (e_probe_hit), .eshr_probe_idx (e_probe_idx),
    .eshr_probe_loaded (e_probe_loaded),
    .active (pf_active), .n_faults, .n_merged, .n_preempt, .n_wr_queued, .n_evicted
  );

  mac_forest_unit #(.SLOTS (ESHR_N), .CACHE_ENT (TOP_CACHE)) u_mvc (
    .clk, .rst_n, .ssk,
    .hb_valid, .hb_ready, .hb_evict, .hb_slot, .hb_idx, .hb_ppn, .hb_pkey, .hb_data,
    .next_evict_valid, .next_evict_ppn,
    .mreq (arb_req[1]), .mreq_ready (arb_ready[1]), .mrsp (arb_rsp[1]),
    .ver_done, .ver_ok, .ver_ppn, .upd_done, .violation, .n_pending,
    .n_clubbed, .n_mem_acc (n_mvc_mem), .cache_lookups (c_lookups), .cache_hits (c_hits)
  );

  mem_arbiter u_arb (
    .clk, .rst_n, .req (arb_req), .ready (arb_ready), .rsp (arb_rsp),
    .mreq, .mreq_ready, .mrsp, .n_reads, .n_writes, .n_read_first
  );

  // system calls wait for outstanding verifications
  logic [31:0] n_verified, n_sys_wait;
  assign busy          = pf_active || (n_pending != '0) || (e_n_valid != '0);
  assign syscall_grant = syscall_req && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_verified <= '0; n_sys_wait <= '0;
    end else begin
      if (ver_done) n_verified <= n_verified + 1;
      if (syscall_req && !syscall_grant) n_sys_wait <= n_sys_wait + 1;
    end
  end

  assign stats = '{faults: n_faults, merged: n_merged, preempt: n_preempt,
                   wr_queued: n_wr_queued, evicted: n_evicted, verified: n_verified,
                   clubbed: n_clubbed, cache_lookups: c_lookups, cache_hits: c_hits,
                   mvc_mem: n_mvc_mem, mem_reads: n_reads, mem_writes: n_writes,
                   read_first: n_read_first, syscall_wait: n_sys_wait};

  a_sys_wait: assert property (@(posedge clk) disable iff (!rst_n)
                               syscall_grant |-> n_pending == '0 && !pf_active);
endmodule
