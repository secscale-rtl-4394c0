// tb_forest_pkg: builds and checks MAC-forest and key-table contents in a
// testbench memory, using the behavioural reference models.
//
// Leaf MAC of page p: line leaf_addr(p), slot p[2:0].  Level-1 MAC of group
// g = p[26:4]: MAC_SSK(leaf line {g,0} ++ leaf line {g,1}), stored in line
// l1_addr(p), slot p[6:4].  Root of subtree s = p[26:7]: MAC_SSK(L1 line),
// stored in line top_addr(s), slot s[2:0].  Wrapped key of page p: line
// keyt_addr(p), 16-byte slot p[1:0].
package tb_forest_pkg;
  import secscale_pkg::*;
  import tb_ref_pkg::*;

  function automatic line_t rd(ref line_t mem [addr_t], input addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void put_slot(ref line_t mem [addr_t], input addr_t a, input int i, input mac_t m);
    line_t l = rd(mem, a);
    l[64*i +: 64] = m;
    mem[a] = l;
  endfunction

  function automatic mac_t get_slot(ref line_t mem [addr_t], input addr_t a, input int i);
    line_t l = rd(mem, a);
    return l[64*i +: 64];
  endfunction

  function automatic mac_t l1_of(ref line_t mem [addr_t], input ppn_t p, input key_t ssk);
    rline_t msg [] = new[2];
    msg[0] = rd(mem, leaf_addr({p[26:4], 4'b0000}));
    msg[1] = rd(mem, leaf_addr({p[26:4], 4'b1000}));
    return ref_mac(msg, ssk);
  endfunction

  function automatic mac_t top_of(ref line_t mem [addr_t], input ppn_t p, input key_t ssk);
    rline_t msg [] = new[1];
    msg[0] = rd(mem, l1_addr(p));
    return ref_mac(msg, ssk);
  endfunction

  // Recompute the whole subtree of page p from its leaf MACs.
  function automatic void build_subtree(ref line_t mem [addr_t], input ppn_t p, input key_t ssk);
    for (int g = 0; g < 8; g++) begin
      ppn_t q = {p[26:7], 3'(g), 4'd0};
      put_slot(mem, l1_addr(q), g, l1_of(mem, q, ssk));
    end
    put_slot(mem, top_addr(subtree_of(p)), int'(subtree_of(p) % 8), top_of(mem, p, ssk));
  endfunction

  // Is the path from page p's leaf to its root consistent?
  function automatic bit path_ok(ref line_t mem [addr_t], input ppn_t p, input key_t ssk);
    sub_t s = subtree_of(p);
    return get_slot(mem, l1_addr(p), int'(p[6:4])) == l1_of(mem, p, ssk) &&
           get_slot(mem, top_addr(s), int'(s % 8)) == top_of(mem, p, ssk);
  endfunction

  function automatic mac_t page_mac(rline_t pg [], input key_t k);
    return ref_mac(pg, k);
  endfunction

endpackage
