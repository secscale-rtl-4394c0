// secscale_pkg: widths, memory-map encoding and bus structures shared by the
// SecScale memory-controller extension.
//
// Sizes that follow the paper: 4 KB pages of 64 blocks of 64 bytes, a 512 GB
// extended EPC (eEPC) addressed by a 27-bit page number, 31-bit enclave IDs,
// a 64-bit hardware key, a 128-bit PRNG field, 8-byte MACs, a MAC forest whose
// subtrees have arity 16 at the lowest level and 8 above it, and a 256-bit
// AES key.  Everything else here is this design's own choice: the 128 MB EPC
// gives 2^15 frames, and the memory is seen as an array of 64-byte lines
// whose 40-bit line address carries a 3-bit region tag (eEPC data, key table,
// leaf MACs, level-1 MACs, top-level MACs, EPC data).
//
// The memory port is a simple request/response bus: the requester holds a
// request until it sees req_ready, then waits for exactly one response (a
// read returns data, a write returns an acknowledge).
package secscale_pkg;

  localparam int unsigned PPN_W    = 27;   // eEPC page number (512 GB / 4 KB)
  localparam int unsigned BLK_W    = 6;    // block index inside a page
  localparam int unsigned NBLK     = 64;   // blocks per page
  localparam int unsigned EID_W    = 31;   // enclave ID
  localparam int unsigned HWKEY_W  = 64;   // hardware-specific key
  localparam int unsigned PRNG_W   = 128;  // random part of the page key
  localparam int unsigned FRAME_W  = 15;   // EPC frame number (128 MB / 4 KB)
  localparam int unsigned LINE_W   = 512;  // one page block / memory line
  localparam int unsigned MAC_W    = 64;   // 8-byte MAC
  localparam int unsigned KEY_W    = 256;  // AES-256 key
  localparam int unsigned ADDR_W   = 40;   // line address on the memory port
  localparam int unsigned CTR_W    = 56;   // EPC block counter (SGX-style)

  // MAC forest shape: 16 leaf MACs -> one level-1 MAC, 8 level-1 MACs -> one
  // top-level MAC.  A subtree covers 128 pages = 512 KB.
  localparam int unsigned ARITY_LO = 16;
  localparam int unsigned ARITY_HI = 8;
  localparam int unsigned SUB_W    = PPN_W - 7;  // subtree index, 2^20 roots

  typedef logic [PPN_W-1:0]   ppn_t;
  typedef logic [BLK_W-1:0]   blk_t;
  typedef logic [FRAME_W-1:0] frame_t;
  typedef logic [EID_W-1:0]   eid_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [MAC_W-1:0]   mac_t;
  typedef logic [KEY_W-1:0]   key_t;
  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [SUB_W-1:0]   sub_t;

  typedef enum logic [2:0] {
    RG_EEPC = 3'd0,   // encrypted eEPC pages
    RG_KEYT = 3'd1,   // key table: 4 wrapped 16-byte page keys per line
    RG_LEAF = 3'd2,   // leaf MACs: 8 per line, 16 per level-1 group
    RG_L1   = 3'd3,   // level-1 MACs: the 8 of one subtree fill one line
    RG_TOP  = 3'd4,   // top-level MACs (EPC metadata): 8 per line
    RG_EPC  = 3'd5    // EPC frames
  } region_e;

  typedef struct packed {
    logic  valid;
    logic  we;
    addr_t addr;
    line_t wdata;
  } mem_req_t;

  typedef struct packed {
    logic  valid;
    line_t rdata;
  } mem_rsp_t;

  // One Eviction Status Holding Register (paper Fig. 13): the page being
  // loaded, the EPC frame it replaces, the load-status vector (bit b set once
  // block b is in the EPC), valid (transfer not finished) and evict (the
  // frame's old page must be written back).
  typedef struct packed {
    ppn_t              lpage;
    frame_t            epage;
    logic [NBLK-1:0]   ls;
    logic              v;
    logic              e;
  } eshr_t;

  // Event counters of the whole controller (read by software / testbenches).
  typedef struct packed {
    logic [31:0] faults;         // page faults accepted
    logic [31:0] merged;         // faults on a page already in transfer
    logic [31:0] preempt;        // jobs preempted by a read fault
    logic [31:0] wr_queued;      // write faults that had to wait
    logic [31:0] evicted;        // pages moved EPC -> eEPC
    logic [31:0] verified;       // pages verified by the MVC
    logic [31:0] clubbed;        // root updates deferred by clubbing
    logic [31:0] cache_lookups;  // top-MAC cache lookups
    logic [31:0] cache_hits;     // top-MAC cache hits
    logic [31:0] mvc_mem;        // memory accesses of the MVC
    logic [31:0] mem_reads;      // reads granted on the memory port
    logic [31:0] mem_writes;     // writes granted on the memory port
    logic [31:0] read_first;     // reads granted ahead of a waiting write
    logic [31:0] syscall_wait;   // cycles a system call waited for verification
  } stats_t;

  // Cipher modes of one 64-byte line.
  typedef enum logic [1:0] {
    CM_ECB_ENC = 2'd0,
    CM_ECB_DEC = 2'd1,
    CM_CTR     = 2'd2
  } cmode_e;

  function automatic addr_t eepc_addr(ppn_t ppn, blk_t b);
    return {RG_EEPC, 4'd0, ppn, b};
  endfunction

  function automatic addr_t keyt_addr(ppn_t ppn);
    return {RG_KEYT, 12'd0, ppn[PPN_W-1:2]};
  endfunction

  function automatic addr_t leaf_addr(ppn_t ppn);   // line holding ppn's leaf MAC
    return {RG_LEAF, 13'd0, ppn[PPN_W-1:3]};
  endfunction

  function automatic addr_t l1_addr(ppn_t ppn);     // line of the subtree's 8 L1 MACs
    return {RG_L1, 17'd0, ppn[PPN_W-1:7]};
  endfunction

  function automatic addr_t top_addr(sub_t s);      // line holding subtree s's root
    return {RG_TOP, 20'd0, s[SUB_W-1:3]};
  endfunction

  function automatic addr_t epc_addr(frame_t f, blk_t b);
    return {RG_EPC, 16'd0, f, b};
  endfunction

  function automatic sub_t subtree_of(ppn_t ppn);
    return ppn[PPN_W-1:7];
  endfunction

  // Byte-lane helpers: slot i (0 = least significant) of a line.
  function automatic mac_t mac_slot(line_t l, logic [2:0] i);
    return l[i*MAC_W +: MAC_W];
  endfunction

  // Block key k_b = {HW key, enclave ID, PRNG, page address, block address}.
  function automatic key_t block_key(logic [HWKEY_W-1:0] hw, eid_t eid,
                                     logic [PRNG_W-1:0] rnd, ppn_t ppn, blk_t b);
    return {hw, eid, rnd, ppn, b};
  endfunction

endpackage
