// tb_sha256_core: FIPS 180-4 known-answer tests of the SHA-256 compression core.
//
// "abc" (one padded block) and the 56-byte "abcdbcdecdef..." message (two
// padded blocks, the second fed back-to-back on the cycle after done).  The
// block latency (64 cycles) and the throughput bound of the paper's MAC
// verification circuit (40 Gb/s at 5.15 GHz, i.e. at most 65.9 cycles per
// 512-bit block) are checked.
module tb_sha256_core;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, busy, done;
  logic [511:0] block;
  logic [255:0] h_in, h_out;
  int checks = 0, failures = 0;

  sha256_core dut (.*);

  localparam logic [255:0] IV = 256'h6a09e667bb67ae853c6ef372a54ff53a510e527f9b05688c1f83d9ab5be0cd19;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compress(input logic [511:0] blk, input logic [255:0] hi,
                          output logic [255:0] ho, output int cyc);
    @(negedge clk); start = 1'b1; block = blk; h_in = hi;
    @(negedge clk); start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    ho = h_out;
  endtask

  initial begin
    logic [255:0] hv;
    logic [511:0] b0, b1;
    int cyc, t0;
    start = 0; block = '0; h_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // "abc"
    compress({24'h616263, 8'h80, 416'h0, 64'd24}, IV, hv, cyc);
    check(hv == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
          $sformatf("abc digest %h", hv));
    check(cyc == 64, $sformatf("block latency %0d, expected 64", cyc));

    // 448-bit message -> two blocks
    b0 = {"abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", 8'h80, 56'h0};
    b1 = {448'h0, 64'd448};
    t0 = $time;
    compress(b0, IV, hv, cyc);
    // next block starts on the negedge right after done was seen
    compress(b1, hv, hv, cyc);
    check(hv == 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1,
          $sformatf("two-block digest %h", hv));
    // two blocks from first start edge to second done: 2 x 65 cycles - 1
    check(($time - t0) / 10 <= 2 * 66, $sformatf("two blocks took %0d cycles", ($time - t0) / 10));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
