// tb_eshr_table: fills all 32 ESHRs, loads blocks of several entries in
// random order against a model, and checks completion (V cleared after the
// 64th block), probing by page number, and reuse of a freed entry.  Also
// replays the paper's Fig. 13 example: LPage 4 into EPage 10 with E set,
// where after block 2 is loaded the LS vector reads 0010 (block 0 first) and
// V = 1.
module tb_eshr_table;
  import secscale_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       alloc_en, alloc_e, alloc_ok, set_en, complete, probe_hit, probe_loaded;
  ppn_t       alloc_lpage, probe_lpage;
  frame_t     alloc_epage;
  logic [4:0] alloc_idx, set_idx, complete_idx, rd_idx, probe_idx;
  blk_t       set_blk, probe_blk;
  eshr_t      rd_entry;
  logic [5:0] n_valid;
  int checks = 0, failures = 0;

  eshr_table dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic alloc(input ppn_t lp, input frame_t ep, input bit e, output logic [4:0] idx);
    @(negedge clk);
    alloc_en = 1; alloc_lpage = lp; alloc_epage = ep; alloc_e = e;
    #1 idx = alloc_idx;
    @(negedge clk); alloc_en = 0;
  endtask

  task automatic set(input logic [4:0] idx, input blk_t b);
    @(negedge clk); set_en = 1; set_idx = idx; set_blk = b;
    @(negedge clk); set_en = 0;
  endtask

  initial begin
    logic [4:0] idx, ids [32];
    logic [63:0] model;
    int order [64];
    alloc_en = 0; alloc_e = 0; set_en = 0; alloc_lpage = '0; alloc_epage = '0;
    set_idx = '0; set_blk = '0; rd_idx = '0; probe_lpage = '0; probe_blk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Fig. 13: four-block example, block 2 of LPage 4 loaded into EPage 10.
    alloc(27'd4, 15'd10, 1'b1, idx);
    set(idx, 6'd2);
    rd_idx = idx; #1;
    check(rd_entry.lpage == 4 && rd_entry.epage == 10 && rd_entry.v && rd_entry.e, "Fig. 13 fields");
    check({rd_entry.ls[0], rd_entry.ls[1], rd_entry.ls[2], rd_entry.ls[3]} == 4'b0010,
          "Fig. 13 LS vector 0010");
    probe_lpage = 27'd4; probe_blk = 6'd2; #1;
    check(probe_hit && probe_idx == idx && probe_loaded, "probe finds loaded block 2");
    probe_blk = 6'd3; #1;
    check(probe_hit && !probe_loaded, "block 3 not yet loaded");
    ids[0] = idx;

    // Fill the rest of the table.
    for (int i = 1; i < 32; i++) alloc(27'(100 + i), 15'(i), i[0], ids[i]);
    #1 check(!alloc_ok && n_valid == 32, "table full after 32 allocations");
    for (int i = 0; i < 32; i++) for (int j = 0; j < i; j++)
      if (ids[i] == ids[j]) check(0, "duplicate entry index");

    // Load entry ids[5] completely in random order.
    foreach (order[i]) order[i] = i;
    order.shuffle();
    model = '0;
    foreach (order[i]) begin
      set(ids[5], 6'(order[i]));
      model[order[i]] = 1'b1;
      rd_idx = ids[5]; #1;
      if (i < 63) check(rd_entry.ls == model && rd_entry.v, "LS vector follows loads");
      if (i == 62) begin
        @(negedge clk);
        check(!complete, "no completion before the last block");
      end
    end
    // complete pulses the cycle after the last set
    check(rd_entry.v == 1'b0, "V cleared after all 64 blocks");
    @(negedge clk);
    check(n_complete == 1, "exactly one completion pulse");
    check(n_valid == 31 && alloc_ok, "one entry free again");
    probe_lpage = 27'd105; #1;
    check(!probe_hit, "completed page no longer probes");
    alloc(27'd999, 15'd77, 1'b0, idx);
    check(idx == ids[5], "freed entry reused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Entries are allocated lowest-free-first, so the fully loaded one is 5.
  int n_complete = 0;
  always @(posedge clk) if (complete) begin
    n_complete++;
    if (complete_idx != 5'd5) begin failures++; $display("FAIL: complete index %0d", complete_idx); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
