// eshr_table: the table of Eviction Status Holding Registers (ESHRs).
//
// Each entry records one EPC page transfer that has started or is waiting:
// LPage (eEPC page being loaded), EPage (EPC frame it goes to, whose old
// page is evicted when E is set), the 64-bit load-status (LS) vector and the
// valid bit V (paper Sec. V-D, Fig. 13).  Setting the last LS bit clears V, as
// the paper describes.  The paper gives the five fields and the 32 entries;
// the port set below (allocate, mark a block loaded, read an entry, probe by
// page number) is this design's choice.
//
// Interface and timing (all writes at the clock edge, reads combinational):
//   alloc_en     with alloc_lpage/epage/e: fills the lowest free entry,
//                alloc_idx, which is valid when alloc_ok (table not full).
//   set_en       with set_idx/set_blk: sets LS[set_blk]; if that completes
//                the vector, V clears and complete pulses next cycle with
//                complete_idx.
//   rd_idx       -> rd_entry.
//   probe_lpage  -> probe_hit (a valid entry loads that page), probe_idx and
//                probe_loaded (LS bit of probe_blk), so that accesses to a
//                page under transfer can tell whether a block is in the EPC.
module eshr_table
  import secscale_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       alloc_en,
  input  ppn_t                       alloc_lpage,
  input  frame_t                     alloc_epage,
  input  logic                       alloc_e,
  output logic                       alloc_ok,
  output logic [$clog2(ENTRIES)-1:0] alloc_idx,
  input  logic                       set_en,
  input  logic [$clog2(ENTRIES)-1:0] set_idx,
  input  blk_t                       set_blk,
  output logic                       complete,
  output logic [$clog2(ENTRIES)-1:0] complete_idx,
  input  logic [$clog2(ENTRIES)-1:0] rd_idx,
  output eshr_t                      rd_entry,
  input  ppn_t                       probe_lpage,
  input  blk_t                       probe_blk,
  output logic                       probe_hit,
  output logic [$clog2(ENTRIES)-1:0] probe_idx,
  output logic                       probe_loaded,
  output logic [$clog2(ENTRIES):0]   n_valid
);
  localparam int unsigned IW = $clog2(ENTRIES);

  eshr_t tab [ENTRIES];

  always_comb begin
    alloc_ok = 1'b0; alloc_idx = '0;
    probe_hit = 1'b0; probe_idx = '0;
    n_valid = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!tab[i].v) begin alloc_ok = 1'b1; alloc_idx = IW'(i); end
      if (tab[i].v && tab[i].lpage == probe_lpage) begin probe_hit = 1'b1; probe_idx = IW'(i); end
      n_valid = n_valid + (IW+1)'(tab[i].v);
    end
    probe_loaded = probe_hit && tab[probe_idx].ls[probe_blk];
    rd_entry     = tab[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab[i] <= '0;
      complete <= 1'b0; complete_idx <= '0;
    end else begin
      complete <= 1'b0;
      if (alloc_en && alloc_ok) begin
        tab[alloc_idx].lpage <= alloc_lpage;
        tab[alloc_idx].epage <= alloc_epage;
        tab[alloc_idx].ls    <= '0;
        tab[alloc_idx].v     <= 1'b1;
        tab[alloc_idx].e     <= alloc_e;
      end
      if (set_en) begin
        tab[set_idx].ls[set_blk] <= 1'b1;
        if ((tab[set_idx].ls | (NBLK'(1) << set_blk)) == '1) begin
          tab[set_idx].v <= 1'b0;
          complete       <= 1'b1;
          complete_idx   <= set_idx;
        end
      end
    end
  end

  a_alloc_ok: assert property (@(posedge clk) disable iff (!rst_n) alloc_en |-> alloc_ok);
  a_set_valid: assert property (@(posedge clk) disable iff (!rst_n) set_en |-> tab[set_idx].v);
  a_no_clash: assert property (@(posedge clk) disable iff (!rst_n)
                               alloc_en && set_en |-> alloc_idx != set_idx);

endmodule
