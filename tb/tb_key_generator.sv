// tb_key_generator: draws three page keys after a boot and unwraps one.
//
// Expected random parts (xorshift128 from the boot seed) and their AES-256
// encryptions under SSK = {dev_key2, boot_time} were computed with an
// independent model.  Checks the 16-cycle request latency, that consecutive
// keys differ, and that a wrapped key unwraps to its random part.
module tb_key_generator;
  import secscale_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               boot, ready, req, unwrap, busy, done;
  logic [127:0]       boot_time, dev_key2, wrapped_in, wrapped;
  logic [HWKEY_W-1:0] hw_key;
  key_t               ssk;
  logic [PRNG_W-1:0]  rnd;
  int checks = 0, failures = 0;

  key_generator dut (.*);

  localparam logic [127:0] EXP_R [3] = '{128'hbd042682684b093e0d859fd980f16912,
                                         128'h1c5d7fb82c6f87f40d35aef70687efba,
                                         128'hf1d0f06da1d099840132d95f38f11cfc};
  localparam logic [127:0] EXP_W [3] = '{128'h6419255401a13379740a0be03e77f393,
                                         128'h030cc121282e8b051d0866c737edcc03,
                                         128'ha11bb31a6ae57d229b51c91443695509};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic op(input bit uw, input logic [127:0] win, output int cyc);
    @(negedge clk); req = 1'b1; unwrap = uw; wrapped_in = win;
    @(negedge clk); req = 1'b0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    boot = 0; req = 0; unwrap = 0; wrapped_in = '0;
    boot_time = 128'h00000000_65f1a2b3_00000000_12345678;
    hw_key    = 64'h0badc0de_cafef00d;
    dev_key2  = 128'h11112222_33334444_55556666_77778888;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); boot = 1'b1;
    @(negedge clk); boot = 1'b0;
    cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    check(ssk == {dev_key2, boot_time}, "SSK register");
    for (int i = 0; i < 3; i++) begin
      op(1'b0, '0, cyc);
      check(rnd == EXP_R[i], $sformatf("key %0d random part %h", i, rnd));
      check(wrapped == EXP_W[i], $sformatf("key %0d wrapped %h", i, wrapped));
      check(cyc == 16, $sformatf("request took %0d cycles after the request edge", cyc));
    end
    op(1'b1, EXP_W[1], cyc);
    check(rnd == EXP_R[1], $sformatf("unwrap gave %h", rnd));
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
