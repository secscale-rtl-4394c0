// top_mac_cache: small cache of top-level MACs of the MAC forest.
//
// Each top-level MAC is the root of a subtree covering a 512 KB region and
// lives in the EPC; the paper keeps the r = 8 most recently used ones in the
// trusted computing base so that a MAC verification in a recently touched
// region saves the DRAM read of its root.  The paper gives the size and the
// "recently accessed" policy; this design makes the cache fully associative
// with true LRU (per-entry age counters) and write-through (the forest unit
// also writes every new root to memory).
//
// Interface and timing:
//   lookup   lk_en with lk_sub: lk_hit and lk_mac answer in the same cycle; a
//            hit makes the entry most recently used at the clock edge.
//   fill     fill_en with fill_sub and fill_mac: overwrites the entry of
//            fill_sub if present, else an invalid entry, else the LRU one.
//   lookups / hits count lk_en cycles and hits (hit rate, paper Fig. 18).
module top_mac_cache
  import secscale_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        lk_en,
  input  sub_t        lk_sub,
  output logic        lk_hit,
  output mac_t        lk_mac,
  input  logic        fill_en,
  input  sub_t        fill_sub,
  input  mac_t        fill_mac,
  output logic [31:0] lookups,
  output logic [31:0] hits
);
  localparam int unsigned AW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic          valid [ENTRIES];
  sub_t          tag   [ENTRIES];
  mac_t          data  [ENTRIES];
  logic [ENTRIES-1:0][AW-1:0] age, age_n;   // 0 = most recently used

  logic [AW-1:0] lk_idx, f_idx, vic_idx;
  logic          f_hit, have_inv;
  logic [AW-1:0] inv_idx, w;

  always_comb begin
    lk_hit = 1'b0; lk_idx = '0; f_hit = 1'b0; f_idx = '0;
    have_inv = 1'b0; inv_idx = '0; vic_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid[i] && tag[i] == lk_sub)   begin lk_hit = 1'b1; lk_idx = AW'(i); end
      if (valid[i] && tag[i] == fill_sub) begin f_hit  = 1'b1; f_idx  = AW'(i); end
      if (!valid[i] && !have_inv)         begin have_inv = 1'b1; inv_idx = AW'(i); end
      if (age[i] == AW'(ENTRIES - 1))     vic_idx = AW'(i);
    end
    lk_mac = data[lk_idx];
  end

  // Make entry u the most recently used.
  function automatic logic [ENTRIES-1:0][AW-1:0] touch(logic [ENTRIES-1:0][AW-1:0] ages,
                                                       logic [AW-1:0] u);
    logic [ENTRIES-1:0][AW-1:0] r = ages;
    for (int j = 0; j < ENTRIES; j++)
      if (ages[j] < ages[u]) r[j] = ages[j] + 1'b1;
    r[u] = '0;
    return r;
  endfunction

  always_comb begin
    w     = f_hit ? f_idx : (have_inv ? inv_idx : vic_idx);
    age_n = age;
    if (lk_en && lk_hit) age_n = touch(age_n, lk_idx);
    if (fill_en)         age_n = touch(age_n, w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        valid[i] <= 1'b0; tag[i] <= '0; data[i] <= '0; age[i] <= AW'(i);
      end
      lookups <= '0; hits <= '0;
    end else begin
      if (lk_en) begin
        lookups <= lookups + 1;
        if (lk_hit) hits <= hits + 1;
      end
      if (fill_en) begin
        valid[w] <= 1'b1;
        tag[w]   <= fill_sub;
        data[w]  <= fill_mac;
      end
      age <= age_n;
    end
  end

endmodule
