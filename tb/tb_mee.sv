// tb_mee: page-block load (ECB decrypt -> CTR encrypt) and eviction (CTR
// decrypt -> ECB encrypt) through the memory encryption engine, against values
// from an independent AES implementation.  The plaintext must appear between
// the two stages, before done.
module tb_mee;
  import secscale_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start, evict, busy, plain_valid, done;
  key_t         ecb_key, ctr_key;
  logic [127:0] ctr_iv;
  line_t        din, plain, dout;
  int checks = 0, failures = 0;

  mee dut (.*);

  localparam key_t  K   = 256'h52f22665a60c12d289185d950ee8813609166f6b113d178d6c0fd3901ff239a1;
  localparam key_t  K2  = 256'ha095f20f9395650cf9380b8edb224a6b248a1e924e8fd0ae2e1a9492a3305f18;
  localparam line_t P   = 512'h8cb610900f9e347fae886dc6507795ec745c4c3fcb2eb2c73e14934c867ee057ba72499bfa121e836b2ac15726ee7d6b0af6ab13c38e92cae0d15057b159987f;
  localparam logic [127:0] IV = 128'h94cc7411d717f14579b2aa100fbbb34f;
  localparam line_t ECB = 512'h752e37161d065fe03c2b783a3257eebfd55099c180f62e23b56f0c1e33f9508012e1adfbb6e66408ed7813685806ca0ee6634587af5edc89ca52033258d6e8e5;
  localparam line_t CTR = 512'h7b65b3917f5fb47cb91783e85df41b4198d88bcb40a04d86b36397449c224e525f6fa2cbba9e6e0c0e9ec31ede49f66d6e28cc17bb506e9c25b893de0d67c114;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic op(input bit ev, input line_t d, output line_t p, output line_t q,
                    output int tp, output int tq);
    @(negedge clk); start = 1'b1; evict = ev; din = d;
    @(negedge clk); start = 1'b0;
    tp = -1; tq = 0;
    while (!done) begin
      if (plain_valid) begin tp = tq; p = plain; end
      @(negedge clk); tq++;
    end
    q = dout;
  endtask

  initial begin
    line_t p, q;
    int tp, tq;
    start = 0; evict = 0; din = '0;
    ecb_key = K; ctr_key = K2; ctr_iv = IV;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    op(1'b0, ECB, p, q, tp, tq);
    check(p == P, $sformatf("load plaintext %h", p));
    check(q == CTR, $sformatf("load EPC ciphertext %h", q));
    check(tp > 0 && tp < tq, $sformatf("load: plaintext at %0d, done at %0d", tp, tq));
    op(1'b1, CTR, p, q, tp, tq);
    check(p == P, $sformatf("evict plaintext %h", p));
    check(q == ECB, $sformatf("evict eEPC ciphertext %h", q));
    check(tp > 0 && tp < tq, $sformatf("evict: plaintext at %0d, done at %0d", tp, tq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
