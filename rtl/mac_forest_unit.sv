// mac_forest_unit: the MAC verification circuit (MVC) and MAC-forest updater.
//
// The eEPC is protected by a forest of MAC subtrees (paper Sec. V-B, Fig. 10):
// every 4 KB page has an 8-byte leaf MAC, 16 leaf MACs are hashed into a
// level-1 MAC and 8 level-1 MACs into a top-level MAC, which is the root of a
// 512 KB subtree region and is kept in the EPC (trusted).  A leaf MAC is the
// page's SHA-256 hash encrypted with the page key; higher MACs are hashes
// encrypted with the system-specific key SSK.
//
// Page blocks arrive in order (block 0..63) as plaintext from the page-fault
// handler while the transfer is running, tagged with the ESHR slot and with
// whether they belong to the page being loaded (verify) or to the page being
// evicted (update).  A chaining value per slot and direction lets transfers
// interleave.  After block 63:
//   verify: leaf' = MAC_K(page); read the 16-leaf group (2 lines), put leaf'
//           in its slot, L1' = MAC_SSK(group); read the subtree's L1 line, put
//           L1' in its slot, top' = MAC_SSK(L1 line); compare with the root
//           from the top-MAC cache or, on a miss, from memory.  At most four
//           extra memory reads, as in the paper.  A mismatch raises the
//           sticky violation output: the paper treats it as fatal.
//   update: the same walk with the evicted page's new key, writing the leaf
//           line, the L1 line and the root (memory and cache) back.
// Update clubbing (Sec. V-E-2): if the next page in line for eviction (the
// evict register, an input here) lies in the same subtree, the root update
// is deferred and done once by the next eviction.  A deferred root is flushed
// before any verification and before an update in another subtree.
// The walk order, the memory layout and the flush rule are this design's
// choice; the paper gives the forest shape, the MAC definition and the two
// optimisations.
//
// Interface: block stream hb_* (valid/ready, accepted while idle); memory
// request/response port; ver_done with ver_ok and ver_ppn per verified page;
// upd_done per updated page; n_pending counts loaded pages whose
// verification has not finished (speculation in flight).
module mac_forest_unit
  import secscale_pkg::*;
#(
  parameter int unsigned SLOTS     = 32,   // ESHR entries
  parameter int unsigned CACHE_ENT = 8     // top-level MAC cache size r
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  key_t                     ssk,
  // plaintext page blocks
  input  logic                     hb_valid,
  output logic                     hb_ready,
  input  logic                     hb_evict,
  input  logic [$clog2(SLOTS)-1:0] hb_slot,
  input  blk_t                     hb_idx,
  input  ppn_t                     hb_ppn,
  input  key_t                     hb_pkey,
  input  line_t                    hb_data,
  // evict register (next victim)
  input  logic                     next_evict_valid,
  input  ppn_t                     next_evict_ppn,
  // memory port
  output mem_req_t                 mreq,
  input  logic                     mreq_ready,
  input  mem_rsp_t                 mrsp,
  // results
  output logic                     ver_done,
  output logic                     ver_ok,
  output ppn_t                     ver_ppn,
  output logic                     upd_done,
  output logic                     violation,
  output logic [$clog2(SLOTS):0]   n_pending,
  output logic [31:0]              n_clubbed,
  output logic [31:0]              n_mem_acc,
  output logic [31:0]              cache_lookups,
  output logic [31:0]              cache_hits
);
  localparam int unsigned SW = $clog2(SLOTS);

  typedef enum logic [4:0] {
    S_IDLE, S_ABS, S_LEAF_FIN, S_PRE,
    S_FL_RD_L1, S_FL_ABS, S_FL_FIN, S_FL_RD_TOP, S_FL_WR_TOP,
    S_RD_LA, S_RD_LB, S_WR_LEAF, S_G_ABS_A, S_G_ABS_B, S_G_FIN,
    S_RD_L1, S_WR_L1, S_T_ABS, S_T_FIN, S_CHK, S_RD_TOP, S_U_RD_TOP, S_U_WR_TOP
  } state_e;
  state_e st;

  logic [255:0] ctx [SLOTS][2];   // chaining value per slot: [0] load, [1] evict

  // latched block
  logic          b_evict;
  logic [SW-1:0] b_slot;
  blk_t          b_idx;
  ppn_t          b_ppn;
  key_t          b_pkey;
  line_t         b_data;

  line_t        line_a, line_b, l1_line, top_line;
  mac_t         leaf_new, l1_new, top_new, top_ref;
  logic [255:0] h_acc;
  logic         sent, kick;
  logic         pend_valid;
  sub_t         pend_sub;
  sub_t         cur_sub;

  assign cur_sub = subtree_of(b_ppn);

  // ---------------------------------------------------------------- MAC engine
  logic         me_start, me_finish, me_busy, me_done;
  logic [255:0] me_hin, me_hout;
  line_t        me_blk;
  logic [6:0]   me_nblk;
  key_t         me_key;
  mac_t         me_mac;

  mac_engine u_me (
    .clk, .rst_n, .start (me_start), .finish (me_finish), .h_in (me_hin), .block (me_blk),
    .nblk (me_nblk), .key (me_key), .busy (me_busy), .done (me_done), .h_out (me_hout), .mac (me_mac)
  );

  // ---------------------------------------------------------- top MAC cache
  logic c_lk_en, c_hit, c_fill;
  mac_t c_mac, c_fill_mac;
  sub_t c_fill_sub;

  top_mac_cache #(.ENTRIES (CACHE_ENT)) u_cache (
    .clk, .rst_n, .lk_en (c_lk_en), .lk_sub (cur_sub), .lk_hit (c_hit), .lk_mac (c_mac),
    .fill_en (c_fill), .fill_sub (c_fill_sub), .fill_mac (c_fill_mac),
    .lookups (cache_lookups), .hits (cache_hits)
  );

  // Replace MAC slot i of a line.
  function automatic line_t put_mac(line_t l, logic [2:0] i, mac_t m);
    line_t o = l;
    o[i*MAC_W +: MAC_W] = m;
    return o;
  endfunction

  ppn_t pend_ppn;
  assign pend_ppn = {pend_sub, 7'd0};

  // ------------------------------------------------------- combinational control
  always_comb begin
    me_start  = kick;
    me_finish = 1'b0;
    me_hin    = h_acc;
    me_blk    = b_data;
    me_nblk   = 7'd1;
    me_key    = ssk;
    case (st)
      S_LEAF_FIN: begin me_finish = 1'b1; me_nblk = 7'd64; me_key = b_pkey; end
      S_FL_ABS, S_T_ABS: begin me_hin = sha256_pkg::H0; me_blk = l1_line; end
      S_FL_FIN, S_T_FIN: begin me_finish = 1'b1; me_nblk = 7'd1; end
      S_G_ABS_A: begin me_hin = sha256_pkg::H0; me_blk = line_a; end
      S_G_ABS_B: me_blk = line_b;
      S_G_FIN:   begin me_finish = 1'b1; me_nblk = 7'd2; end
      default: ;
    endcase

    mreq = '0;
    case (st)
      S_FL_RD_L1:  mreq = '{valid: !sent, we: 1'b0, addr: l1_addr(pend_ppn), wdata: '0};
      S_FL_RD_TOP: mreq = '{valid: !sent, we: 1'b0, addr: top_addr(pend_sub), wdata: '0};
      S_FL_WR_TOP: mreq = '{valid: !sent, we: 1'b1, addr: top_addr(pend_sub),
                            wdata: put_mac(top_line, pend_sub[2:0], top_new)};
      S_RD_LA:     mreq = '{valid: !sent, we: 1'b0, addr: leaf_addr({b_ppn[PPN_W-1:4], 4'b0000}), wdata: '0};
      S_RD_LB:     mreq = '{valid: !sent, we: 1'b0, addr: leaf_addr({b_ppn[PPN_W-1:4], 4'b1000}), wdata: '0};
      S_WR_LEAF:   mreq = '{valid: !sent, we: 1'b1, addr: leaf_addr(b_ppn),
                            wdata: b_ppn[3] ? line_b : line_a};
      S_RD_L1:     mreq = '{valid: !sent, we: 1'b0, addr: l1_addr(b_ppn), wdata: '0};
      S_WR_L1:     mreq = '{valid: !sent, we: 1'b1, addr: l1_addr(b_ppn), wdata: l1_line};
      S_RD_TOP, S_U_RD_TOP:
                   mreq = '{valid: !sent, we: 1'b0, addr: top_addr(cur_sub), wdata: '0};
      S_U_WR_TOP:  mreq = '{valid: !sent, we: 1'b1, addr: top_addr(cur_sub),
                            wdata: put_mac(top_line, cur_sub[2:0], top_new)};
      default: ;
    endcase

    hb_ready = (st == S_IDLE);
    c_lk_en  = (st == S_CHK);
  end

  logic mem_rsp;
  assign mem_rsp = sent && mrsp.valid;

  // ------------------------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; sent <= 1'b0; kick <= 1'b0;
      for (int i = 0; i < SLOTS; i++) begin ctx[i][0] <= '0; ctx[i][1] <= '0; end
      b_evict <= 1'b0; b_slot <= '0; b_idx <= '0; b_ppn <= '0; b_pkey <= '0; b_data <= '0;
      line_a <= '0; line_b <= '0; l1_line <= '0; top_line <= '0;
      leaf_new <= '0; l1_new <= '0; top_new <= '0; top_ref <= '0; h_acc <= '0;
      pend_valid <= 1'b0; pend_sub <= '0;
      ver_done <= 1'b0; ver_ok <= 1'b0; ver_ppn <= '0; upd_done <= 1'b0; violation <= 1'b0;
      n_pending <= '0; n_clubbed <= '0; n_mem_acc <= '0;
      c_fill <= 1'b0; c_fill_sub <= '0; c_fill_mac <= '0;
    end else begin
      kick     <= 1'b0;
      ver_done <= 1'b0;
      upd_done <= 1'b0;
      c_fill   <= 1'b0;
      if (mreq.valid && mreq_ready) begin
        sent      <= 1'b1;
        n_mem_acc <= n_mem_acc + 1;
      end
      if (mem_rsp) sent <= 1'b0;
      if (ver_done) n_pending <= n_pending - 1'b1;

      case (st)
        S_IDLE: if (hb_valid) begin
          b_evict <= hb_evict; b_slot <= hb_slot; b_idx <= hb_idx;
          b_ppn <= hb_ppn; b_pkey <= hb_pkey; b_data <= hb_data;
          h_acc <= (hb_idx == '0) ? sha256_pkg::H0 : ctx[hb_slot][hb_evict];
          if (hb_idx == '0 && !hb_evict) n_pending <= n_pending + 1'b1 - (ver_done ? 1'b1 : 1'b0);
          kick  <= 1'b1;
          st    <= S_ABS;
        end
        S_ABS: if (me_done) begin
          if (b_idx == blk_t'(NBLK - 1)) begin
            h_acc <= me_hout; kick <= 1'b1; st <= S_LEAF_FIN;
          end else begin
            ctx[b_slot][b_evict] <= me_hout;
            st <= S_IDLE;
          end
        end
        S_LEAF_FIN: if (me_done) begin
          leaf_new <= me_mac;
          st       <= S_PRE;
        end
        // Flush a deferred root first if this walk could see it.
        S_PRE: st <= (pend_valid && (!b_evict || pend_sub != cur_sub)) ? S_FL_RD_L1 : S_RD_LA;

        // ---- flush of a clubbed root update
        S_FL_RD_L1: if (mem_rsp) begin l1_line <= mrsp.rdata; kick <= 1'b1; st <= S_FL_ABS; end
        S_FL_ABS:   if (me_done) begin h_acc <= me_hout; kick <= 1'b1; st <= S_FL_FIN; end
        S_FL_FIN:   if (me_done) begin top_new <= me_mac; st <= S_FL_RD_TOP; end
        S_FL_RD_TOP: if (mem_rsp) begin top_line <= mrsp.rdata; st <= S_FL_WR_TOP; end
        S_FL_WR_TOP: if (mem_rsp) begin
          c_fill <= 1'b1; c_fill_sub <= pend_sub; c_fill_mac <= top_new;
          pend_valid <= 1'b0;
          st <= S_RD_LA;
        end

        // ---- leaf group
        S_RD_LA: if (mem_rsp) begin
          line_a <= b_ppn[3] ? mrsp.rdata : put_mac(mrsp.rdata, b_ppn[2:0], leaf_new);
          st <= S_RD_LB;
        end
        S_RD_LB: if (mem_rsp) begin
          line_b <= b_ppn[3] ? put_mac(mrsp.rdata, b_ppn[2:0], leaf_new) : mrsp.rdata;
          st <= b_evict ? S_WR_LEAF : S_G_ABS_A;
          if (!b_evict) kick <= 1'b1;
        end
        S_WR_LEAF: if (mem_rsp) begin kick <= 1'b1; st <= S_G_ABS_A; end
        S_G_ABS_A: if (me_done) begin h_acc <= me_hout; kick <= 1'b1; st <= S_G_ABS_B; end
        S_G_ABS_B: if (me_done) begin h_acc <= me_hout; kick <= 1'b1; st <= S_G_FIN; end
        S_G_FIN:   if (me_done) begin l1_new <= me_mac; st <= S_RD_L1; end

        // ---- level 1
        S_RD_L1: if (mem_rsp) begin
          l1_line <= put_mac(mrsp.rdata, b_ppn[6:4], l1_new);
          if (!b_evict) begin kick <= 1'b1; st <= S_T_ABS; end
          else st <= S_WR_L1;
        end
        S_WR_L1: if (mem_rsp) begin
          if (next_evict_valid && subtree_of(next_evict_ppn) == cur_sub && next_evict_ppn != b_ppn) begin
            // club: the next eviction will write this subtree's root
            pend_valid <= 1'b1;
            pend_sub   <= cur_sub;
            n_clubbed  <= n_clubbed + 1;
            upd_done   <= 1'b1;
            st         <= S_IDLE;
          end else begin
            kick <= 1'b1;
            st   <= S_T_ABS;
          end
        end
        S_T_ABS: if (me_done) begin h_acc <= me_hout; kick <= 1'b1; st <= S_T_FIN; end
        S_T_FIN: if (me_done) begin
          top_new <= me_mac;
          st      <= b_evict ? S_U_RD_TOP : S_CHK;
        end

        // ---- root: verify
        S_CHK: begin
          if (c_hit) begin
            ver_done <= 1'b1; ver_ok <= (c_mac == top_new); ver_ppn <= b_ppn;
            if (c_mac != top_new) violation <= 1'b1;
            st <= S_IDLE;
          end else st <= S_RD_TOP;
        end
        S_RD_TOP: if (mem_rsp) begin
          ver_done <= 1'b1; ver_ppn <= b_ppn;
          ver_ok   <= (mac_slot(mrsp.rdata, cur_sub[2:0]) == top_new);
          if (mac_slot(mrsp.rdata, cur_sub[2:0]) != top_new) violation <= 1'b1;
          else begin c_fill <= 1'b1; c_fill_sub <= cur_sub; c_fill_mac <= top_new; end
          st <= S_IDLE;
        end

        // ---- root: update
        S_U_RD_TOP: if (mem_rsp) begin top_line <= mrsp.rdata; st <= S_U_WR_TOP; end
        S_U_WR_TOP: if (mem_rsp) begin
          c_fill <= 1'b1; c_fill_sub <= cur_sub; c_fill_mac <= top_new;
          if (pend_valid && pend_sub == cur_sub) pend_valid <= 1'b0;
          upd_done <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_one_outstanding: assert property (@(posedge clk) disable iff (!rst_n) mreq.valid |-> !sent);

endmodule
