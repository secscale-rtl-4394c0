// page_fault_ctrl: EPC page-fault handling with the eEPC (paper Sec. V-D,
// Fig. 12) around the ESHR table (Fig. 13) and the memory encryption engine
// (Fig. 11).
//
// A fault names the enclave page (lppn, leid), the block the core needs
// (crit), the EPC frame to fill and, if E is set, the page now in that frame
// (vppn, veid), which has to be evicted first.  A job runs as follows:
//   1. allocate an ESHR entry (LPage, EPage, E; LS cleared);
//   2. read the key-table line of lppn and unwrap its random part (memory
//      read 1);
//   3. read fault: read eEPC block crit (memory read 2), ECB-decrypt it and
//      return the plaintext to the core at once ("read first, verify later",
//      the MVC checks the page afterwards);
//   4. if E: draw a new key for the victim, write it to the key table, then
//      move the victim block by block EPC -> CTR decrypt -> ECB encrypt ->
//      eEPC, streaming the plaintext to the MVC (forest update);
//   5. move the page block 0..63 eEPC -> ECB decrypt -> CTR encrypt -> EPC,
//      streaming the plaintext to the MVC (verification) and setting the LS
//      bit of each block written.  The critical block is fetched again in
//      this pass so the MVC sees the blocks in order.
// A write fault skips step 3 and is answered (resp_in_epc) once its block is
// in the EPC.  A fault on a page that the ESHR shows in transfer ("Page load
// in progress? Yes -> Update ESHR") allocates nothing: it is answered at once
// if its block is loaded, or as soon as it is.
// Preemption: a read fault waiting behind a running job takes over at the
// next block boundary; the running job's context is pushed on a stack of
// STACK entries and resumed afterwards.  Write faults wait their turn.
//
// This design's choices (the paper is silent): one memory request at a time,
// the stack depth, the key-table slot layout, the EPC counter interface
// (ctr_val for the addressed block, ctr_inc when a block is written: the
// SGX counter tree itself is outside this design) and the CTR counter block
// {frame, block, counter, 0}.
//
// Interface: fault_* valid/ready; resp_* one-cycle pulse; mreq/mreq_ready/
// mrsp memory port (one outstanding request); mee_* and kg_* drive the
// external MEE and key generator; hb_* feed the MVC; eshr_* drive the ESHR
// table.
module page_fault_ctrl
  import secscale_pkg::*;
#(
  parameter int unsigned SLOTS = 32,   // ESHR entries
  parameter int unsigned STACK = 4     // preempted jobs kept
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [HWKEY_W-1:0]       hw_key,
  input  key_t                     epc_key,
  // fault request
  input  logic                     fault_valid,
  output logic                     fault_ready,
  input  logic                     fault_write,
  input  ppn_t                     fault_lppn,
  input  eid_t                     fault_leid,
  input  blk_t                     fault_crit,
  input  frame_t                   fault_frame,
  input  logic                     fault_e,
  input  ppn_t                     fault_vppn,
  input  eid_t                     fault_veid,
  // response to the core
  output logic                     resp_valid,
  output logic                     resp_in_epc,   // 0: data below; 1: block now in the EPC
  output ppn_t                     resp_ppn,
  output blk_t                     resp_blk,
  output line_t                    resp_data,
  // memory
  output mem_req_t                 mreq,
  input  logic                     mreq_ready,
  input  mem_rsp_t                 mrsp,
  // EPC CTR counters
  output frame_t                   ctr_frame,
  output blk_t                     ctr_blk,
  input  logic [CTR_W-1:0]         ctr_val,
  output logic                     ctr_inc,
  // key generator
  input  logic                     kg_ready,
  output logic                     kg_req,
  output logic                     kg_unwrap,
  output logic [127:0]             kg_wrapped_in,
  input  logic                     kg_busy,
  input  logic                     kg_done,
  input  logic [PRNG_W-1:0]        kg_rnd,
  input  logic [127:0]             kg_wrapped,
  // memory encryption engine
  output logic                     mee_start,
  output logic                     mee_evict,
  output line_t                    mee_din,
  output key_t                     mee_ecb_key,
  output key_t                     mee_ctr_key,
  output logic [127:0]             mee_ctr_iv,
  input  logic                     mee_busy,
  input  logic                     mee_plain_valid,
  input  line_t                    mee_plain,
  input  logic                     mee_done,
  input  line_t                    mee_dout,
  // MVC block stream
  output logic                     hb_valid,
  input  logic                     hb_ready,
  output logic                     hb_evict,
  output logic [$clog2(SLOTS)-1:0] hb_slot,
  output blk_t                     hb_idx,
  output ppn_t                     hb_ppn,
  output key_t                     hb_pkey,
  output line_t                    hb_data,
  // ESHR table
  output logic                     eshr_alloc_en,
  output ppn_t                     eshr_alloc_lpage,
  output frame_t                   eshr_alloc_epage,
  output logic                     eshr_alloc_e,
  input  logic                     eshr_alloc_ok,
  input  logic [$clog2(SLOTS)-1:0] eshr_alloc_idx,
  output logic                     eshr_set_en,
  output logic [$clog2(SLOTS)-1:0] eshr_set_idx,
  output blk_t                     eshr_set_blk,
  output ppn_t                     eshr_probe_lpage,
  output blk_t                     eshr_probe_blk,
  input  logic                     eshr_probe_hit,
  input  logic [$clog2(SLOTS)-1:0] eshr_probe_idx,
  input  logic                     eshr_probe_loaded,
  // status
  output logic                     active,
  output logic [31:0]              n_faults,
  output logic [31:0]              n_merged,
  output logic [31:0]              n_preempt,
  output logic [31:0]              n_wr_queued,
  output logic [31:0]              n_evicted
);
  localparam int unsigned SW = $clog2(SLOTS);
  localparam int unsigned KW = $clog2(STACK);

  typedef struct packed {
    logic          wr;
    ppn_t          lppn;
    eid_t          leid;
    blk_t          crit;
    frame_t        frame;
    logic          e;
    ppn_t          vppn;
    eid_t          veid;
    logic [127:0]  rnd_l;
    logic [127:0]  rnd_v;
    logic [SW-1:0] slot;
    logic          ev_phase;   // 1 while the victim is being moved out
    blk_t          blk;
  } job_t;

  typedef enum logic [3:0] {
    J_IDLE, J_ALLOC, J_KRD, J_KUNW, J_CRD, J_CDEC, J_VKEY, J_VKRD, J_VKWR,
    J_BLK, J_RD, J_MEE, J_WR
  } jstate_e;

  jstate_e        st;
  job_t           cur;
  job_t           pend;          // accepted fault waiting for a job slot
  logic           pend_v;
  job_t           stk [STACK];
  logic [KW:0]    sp;
  logic           sent;
  line_t          kline;         // key-table line being modified
  line_t          buf_q;         // block read from memory / produced by the MEE
  logic           plain_got, hb_sent, dout_got;
  line_t          plain_q;
  // waiter for a block of a page already in transfer
  logic           wt_v;
  logic [SW-1:0]  wt_slot;
  blk_t           wt_blk;
  ppn_t           wt_ppn;

  logic mem_st, mem_rsp, mem_we;
  addr_t mem_addr;
  line_t mem_wdata;
  logic  fire, preempt;

  // ---------------------------------------------------------------- memory
  always_comb begin
    mem_st    = 1'b0; mem_we = 1'b0; mem_addr = '0; mem_wdata = buf_q;
    unique case (st)
      J_KRD:  begin mem_st = 1'b1; mem_addr = keyt_addr(cur.lppn); end
      J_CRD:  begin mem_st = 1'b1; mem_addr = eepc_addr(cur.lppn, cur.crit); end
      J_VKRD: begin mem_st = 1'b1; mem_addr = keyt_addr(cur.vppn); end
      J_VKWR: begin mem_st = 1'b1; mem_we = 1'b1; mem_addr = keyt_addr(cur.vppn); mem_wdata = kline; end
      J_RD:   begin
        mem_st = 1'b1;
        mem_addr = cur.ev_phase ? epc_addr(cur.frame, cur.blk) : eepc_addr(cur.lppn, cur.blk);
      end
      J_WR:   begin
        mem_st = 1'b1; mem_we = 1'b1;
        mem_addr = cur.ev_phase ? eepc_addr(cur.vppn, cur.blk) : epc_addr(cur.frame, cur.blk);
      end
      default: ;
    endcase
  end
  assign mreq    = '{valid: mem_st && !sent, we: mem_we, addr: mem_addr, wdata: mem_wdata};
  assign mem_rsp = mem_st && sent && mrsp.valid;

  // ------------------------------------------------------------ fault port
  assign eshr_probe_lpage = fault_lppn;
  assign eshr_probe_blk   = fault_crit;
  // a merged fault needs the waiter register unless its block is loaded; a
  // fault for the page being allocated this cycle waits one cycle
  assign fault_ready = rst_n && !(st == J_ALLOC && fault_lppn == cur.lppn) &&
                       (eshr_probe_hit ? (eshr_probe_loaded || !wt_v) : !pend_v);
  assign fire        = fault_valid && fault_ready;

  // ---------------------------------------------------------------- helpers
  assign ctr_frame   = cur.frame;
  assign ctr_blk     = cur.blk;
  assign mee_ctr_key = epc_key;
  assign mee_evict   = cur.ev_phase;
  assign mee_ecb_key = cur.ev_phase ? block_key(hw_key, cur.veid, cur.rnd_v, cur.vppn, cur.blk)
                                    : block_key(hw_key, cur.leid, cur.rnd_l, cur.lppn,
                                                (st == J_CDEC) ? cur.crit : cur.blk);
  // on a load the EPC block gets the next counter value
  assign mee_ctr_iv  = {cur.frame, cur.blk, cur.ev_phase ? ctr_val : ctr_val + CTR_W'(1), 51'd0};
  assign mee_din     = buf_q;

  assign hb_valid = (st == J_MEE) && plain_got && !hb_sent;
  assign hb_evict = cur.ev_phase;
  assign hb_slot  = cur.slot;
  assign hb_idx   = cur.blk;
  assign hb_ppn   = cur.ev_phase ? cur.vppn : cur.lppn;
  assign hb_pkey  = cur.ev_phase ? block_key(hw_key, cur.veid, cur.rnd_v, cur.vppn, '0)
                                 : block_key(hw_key, cur.leid, cur.rnd_l, cur.lppn, '0);
  assign hb_data  = plain_q;

  assign eshr_alloc_lpage = cur.lppn;
  assign eshr_alloc_epage = cur.frame;
  assign eshr_alloc_e     = cur.e;
  assign eshr_alloc_en    = (st == J_ALLOC) && eshr_alloc_ok;
  assign eshr_set_en      = (st == J_WR) && !cur.ev_phase && mem_rsp;
  assign eshr_set_idx     = cur.slot;
  assign ctr_inc          = eshr_set_en;   // the EPC block was rewritten
  assign eshr_set_blk     = cur.blk;

  assign preempt = pend_v && !pend.wr && (sp != (KW+1)'(STACK)) && eshr_alloc_ok;
  assign active  = (st != J_IDLE) || pend_v || (sp != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= J_IDLE; cur <= '0; pend <= '0; pend_v <= 1'b0; sp <= '0; sent <= 1'b0;
      kline <= '0; buf_q <= '0; plain_q <= '0; plain_got <= 1'b0; hb_sent <= 1'b0; dout_got <= 1'b0;
      wt_v <= 1'b0; wt_slot <= '0; wt_blk <= '0; wt_ppn <= '0;
      resp_valid <= 1'b0; resp_in_epc <= 1'b0; resp_ppn <= '0; resp_blk <= '0; resp_data <= '0;
      kg_req <= 1'b0; kg_unwrap <= 1'b0; kg_wrapped_in <= '0; mee_start <= 1'b0;
      n_faults <= '0; n_merged <= '0; n_preempt <= '0; n_wr_queued <= '0; n_evicted <= '0;
      for (int i = 0; i < STACK; i++) stk[i] <= '0;
    end else begin
      resp_valid <= 1'b0;
      kg_req     <= 1'b0;
      mee_start  <= 1'b0;
      if (mreq.valid && mreq_ready) sent <= 1'b1;
      if (mem_rsp) sent <= 1'b0;

      // ---- accept faults
      if (fire) begin
        n_faults <= n_faults + 1;
        if (eshr_probe_hit) begin
          n_merged <= n_merged + 1;
          if (eshr_probe_loaded) begin
            resp_valid <= 1'b1; resp_in_epc <= 1'b1; resp_ppn <= fault_lppn; resp_blk <= fault_crit;
          end else begin
            wt_v <= 1'b1; wt_slot <= eshr_probe_idx; wt_blk <= fault_crit; wt_ppn <= fault_lppn;
          end
        end else begin
          pend_v <= 1'b1;
          pend   <= '{wr: fault_write, lppn: fault_lppn, leid: fault_leid, crit: fault_crit,
                      frame: fault_frame, e: fault_e, vppn: fault_vppn, veid: fault_veid,
                      rnd_l: '0, rnd_v: '0, slot: '0, ev_phase: 1'b0, blk: '0};
          if (fault_write && st != J_IDLE) n_wr_queued <= n_wr_queued + 1;
        end
      end
      // ---- waiter answered when its block is written
      if (wt_v && eshr_set_en && eshr_set_idx == wt_slot && eshr_set_blk == wt_blk) begin
        wt_v <= 1'b0;
        resp_valid <= 1'b1; resp_in_epc <= 1'b1; resp_ppn <= wt_ppn; resp_blk <= wt_blk;
      end

      unique case (st)
        J_IDLE: if (sp != '0) begin
          sp  <= sp - 1'b1;
          cur <= stk[KW'(sp - 1'b1)];
          st  <= J_BLK;
        end else if (pend_v) begin
          cur    <= pend;
          pend_v <= 1'b0;
          st     <= J_ALLOC;
        end
        J_ALLOC: if (eshr_alloc_ok) begin
          cur.slot <= eshr_alloc_idx;
          st       <= J_KRD;
        end
        J_KRD: if (mem_rsp) begin
          kg_wrapped_in <= mrsp.rdata[128*cur.lppn[1:0] +: 128];
          kg_unwrap     <= 1'b1;
          kg_req        <= 1'b1;
          st            <= J_KUNW;
        end
        J_KUNW: if (kg_done) begin
          cur.rnd_l <= kg_rnd;
          if (!cur.wr) st <= J_CRD;
          else begin
            st           <= cur.e ? J_VKEY : J_BLK;
            cur.ev_phase <= cur.e;
            kg_req       <= cur.e;   // new key for the victim
            kg_unwrap    <= 1'b0;
          end
        end
        J_CRD: if (mem_rsp) begin
          buf_q     <= mrsp.rdata;
          mee_start <= 1'b1;
          st        <= J_CDEC;
        end
        J_CDEC: begin
          if (mee_plain_valid) begin
            resp_valid <= 1'b1; resp_in_epc <= 1'b0; resp_ppn <= cur.lppn;
            resp_blk <= cur.crit; resp_data <= mee_plain;
          end
          if (mee_done) begin
            st           <= cur.e ? J_VKEY : J_BLK;
            cur.ev_phase <= cur.e;
            kg_req       <= cur.e;
            kg_unwrap    <= 1'b0;
          end
        end
        J_VKEY: if (kg_done) begin
          cur.rnd_v <= kg_rnd;
          st        <= J_VKRD;
        end
        J_VKRD: if (mem_rsp) begin
          kline <= mrsp.rdata;
          kline[128*cur.vppn[1:0] +: 128] <= kg_wrapped;
          st    <= J_VKWR;
        end
        J_VKWR: if (mem_rsp) st <= J_BLK;
        J_BLK: begin
          plain_got <= 1'b0; hb_sent <= 1'b0; dout_got <= 1'b0;
          if (preempt) begin
            stk[sp[KW-1:0]] <= cur;
            sp              <= sp + 1'b1;
            cur             <= pend;
            pend_v          <= 1'b0;
            n_preempt       <= n_preempt + 1;
            st              <= J_ALLOC;
          end else st <= J_RD;
        end
        J_RD: if (mem_rsp) begin
          buf_q     <= mrsp.rdata;
          mee_start <= 1'b1;
          st        <= J_MEE;
        end
        J_MEE: begin
          if (mee_plain_valid) begin plain_q <= mee_plain; plain_got <= 1'b1; end
          if (hb_valid && hb_ready) hb_sent <= 1'b1;
          if (mee_done) begin buf_q <= mee_dout; dout_got <= 1'b1; end
          if (dout_got && (hb_sent || (hb_valid && hb_ready))) st <= J_WR;
        end
        J_WR: if (mem_rsp) begin
          if (!cur.ev_phase) begin
            if (cur.wr && cur.blk == cur.crit) begin
              resp_valid <= 1'b1; resp_in_epc <= 1'b1; resp_ppn <= cur.lppn; resp_blk <= cur.crit;
            end
          end
          if (cur.blk == blk_t'(NBLK - 1)) begin
            cur.blk <= '0;
            if (cur.ev_phase) begin
              cur.ev_phase <= 1'b0;
              n_evicted    <= n_evicted + 1;
              st           <= J_BLK;
            end else st <= J_IDLE;
          end else begin
            cur.blk <= cur.blk + 1'b1;
            st      <= J_BLK;
          end
        end
        default: st <= J_IDLE;
      endcase
    end
  end

  a_kg_ready: assert property (@(posedge clk) disable iff (!rst_n) kg_req |-> kg_ready && !kg_busy);
  a_mee_idle: assert property (@(posedge clk) disable iff (!rst_n) mee_start |-> !mee_busy);
  a_stack:    assert property (@(posedge clk) disable iff (!rst_n) sp <= (KW+1)'(STACK));
endmodule
