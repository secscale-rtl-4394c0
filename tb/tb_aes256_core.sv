// tb_aes256_core: known-answer test of the AES-256 core.
//
// Uses the FIPS-197 Appendix C.3 vector and four further vectors computed
// with an independent AES implementation.  Each vector is encrypted and the
// ciphertext decrypted back; the 13-cycle key expansion and the 14-cycle block
// latency are checked too.
module tb_aes256_core;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         key_load, key_ready, start, decrypt, busy, done;
  logic [255:0] key;
  logic [127:0] din, dout;
  int checks = 0, failures = 0;

  aes256_core dut (.*);

  typedef struct packed { logic [255:0] k; logic [127:0] p; logic [127:0] c; } vec_t;
  localparam vec_t V [5] = '{
    '{256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f,
      128'h00112233445566778899aabbccddeeff, 128'h8ea2b7ca516745bfeafc49904b496089},
    '{256'h2291d8cdc310411e7ec27378a661c935187c07e4d5636e9bc3c400b27244b8cd, 128'h3a97f11ae651070506a68a02f0e161af, 128'hb3f29ed77caf61e0b838f1ef11638358},
    '{256'h37f86cb9078738c370f07e8d3b583bad38c275f34aed056ad6ea8eeca4192fa1, 128'hfeb9dc4b1ebe55e5b8f9b680eff76c81, 128'h396ca9c7c41a8e22caad96d3c06b4e74},
    '{256'hd4e9ab304d4896f9e17fd8f0816496da087a3ebecc676aaa2c5d8ce1b3c6acbc, 128'h5f1670a9821bc72985d7645e7dbb0778, 128'hcc32843063c5f7d593ce8a1deaacf1bf},
    '{256'h0b4eb4d9fb9d979464a52b2b803afb03c5338aebdc8c3b678358f3d8935a75e8, 128'h44a88c9bf5ba0162c8dbd2f4e2f0bd83, 128'h87c2aa24129a11b996f101fff8a57a58}};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input logic [127:0] d, input bit dec, output logic [127:0] q, output int cyc);
    @(negedge clk); start = 1'b1; din = d; decrypt = dec;
    @(negedge clk); start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    q = dout;
  endtask

  initial begin
    int cyc, kc;
    logic [127:0] q;
    key_load = 0; start = 0; decrypt = 0; key = '0; din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (V[i]) begin
      @(negedge clk); key_load = 1'b1; key = V[i].k;
      @(negedge clk); key_load = 1'b0;
      kc = 0;
      while (!key_ready) begin @(negedge clk); kc++; end
      check(kc == 13, $sformatf("key expansion took %0d cycles, expected 13", kc));
      run(V[i].p, 1'b0, q, cyc);
      check(q == V[i].c, $sformatf("vector %0d encrypt got %h", i, q));
      check(cyc == 14, $sformatf("encrypt latency %0d, expected 14", cyc));
      run(V[i].c, 1'b1, q, cyc);
      check(q == V[i].p, $sformatf("vector %0d decrypt got %h", i, q));
      check(cyc == 14, $sformatf("decrypt latency %0d, expected 14", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
