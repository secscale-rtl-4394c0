// tb_mac_engine: MACs of one-, two- and 64-block messages against the
// behavioural reference, and the ABSORB/FINISH latencies.
//
// The reference itself is first checked against FIPS-197 (AES-256) and
// FIPS 180-4 ("abc") known answers.
module tb_mac_engine;
  import secscale_pkg::*;
  import tb_ref_pkg::ref_aes_enc, tb_ref_pkg::ref_compress, tb_ref_pkg::ref_sha, tb_ref_pkg::ref_mac, tb_ref_pkg::ref_h0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, finish, busy, done;
  logic [255:0] h_in, h_out;
  line_t        block;
  logic [6:0]   nblk;
  key_t         key;
  mac_t         mac;
  int checks = 0, failures = 0;

  mac_engine dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic op(input bit fin, input logic [255:0] hi, input line_t b, input int n,
                    input key_t k, output int cyc);
    @(negedge clk); start = 1'b1; finish = fin; h_in = hi; block = b; nblk = 7'(n); key = k;
    @(negedge clk); start = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  // MAC of msg computed by the engine: absorb every block, then finish.
  task automatic engine_mac(input line_t msg [], input key_t k, output mac_t m,
                            output int c_abs, output int c_fin);
    logic [255:0] h = ref_h0();
    foreach (msg[i]) begin op(1'b0, h, msg[i], 0, k, c_abs); h = h_out; end
    op(1'b1, h, '0, msg.size(), k, c_fin);
    m = mac;
  endtask

  initial begin
    line_t msg [];
    key_t k;
    mac_t m;
    int ca, cf;
    start = 0; finish = 0; h_in = '0; block = '0; nblk = '0; key = '0;
    check(ref_aes_enc(256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f,
                      128'h00112233445566778899aabbccddeeff) == 128'h8ea2b7ca516745bfeafc49904b496089,
          "reference AES known answer");
    check(ref_compress(ref_h0(), {24'h616263, 8'h80, 416'h0, 64'd24}) ==
          256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad,
          "reference SHA-256 known answer");
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int n = 1; n <= 64; n = (n == 1) ? 2 : 64) begin
      msg = new[n];
      foreach (msg[i]) for (int j = 0; j < 16; j++) msg[i][32*j +: 32] = $urandom;
      for (int j = 0; j < 8; j++) k[32*j +: 32] = $urandom;
      engine_mac(msg, k, m, ca, cf);
      check(m == ref_mac(msg, k), $sformatf("%0d-block MAC %h, expected %h", n, m, ref_mac(msg, k)));
      check(ca == 64, $sformatf("ABSORB took %0d cycles", ca));
      check(cf == 96, $sformatf("FINISH took %0d cycles", cf));
      if (n == 64) break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
