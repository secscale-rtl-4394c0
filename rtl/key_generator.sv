// key_generator: fresh page keys for the eEPC and their wrapping with the SSK.
//
// Every time a page is written to the eEPC it gets a new key; only the
// 128-bit random part changes, the rest of the 256-bit block key k_b
// (hardware key, enclave ID, page address, block index) is rebuilt from the
// context at every use (secscale_pkg::block_key).  The paper asks for a PRNG
// seeded by the boot time and the hardware key; this design uses xorshift128
// (four steps per draw, 128 bits per cycle) seeded with
//   boot_time ^ {hw_key, hw_key}   (a zero seed is replaced by a constant).
// The system-specific key SSK = {dev_key2, boot_time} is held in a register
// here; the random part of a page key is stored in the key table encrypted
// with AES-256 under the SSK, which fills exactly the paper's 16 bytes per
// page.
//
// Interface and timing:
//   boot       pulse with boot_time, hw_key and dev_key2: seeds the PRNG, sets
//              the SSK and expands it (ready after 14 cycles).
//   req        pulse, only when ready && !busy:  unwrap = 0 draws a new random
//              part and encrypts it; unwrap = 1 decrypts wrapped_in.
//              done pulses 16 cycles later with rnd (the plain random part)
//              and wrapped (its encryption under the SSK).
module key_generator
  import secscale_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                boot,
  input  logic [127:0]        boot_time,
  input  logic [HWKEY_W-1:0]  hw_key,
  input  logic [127:0]        dev_key2,
  output key_t                ssk,
  output logic                ready,
  input  logic                req,
  input  logic                unwrap,
  input  logic [127:0]        wrapped_in,
  output logic                busy,
  output logic                done,
  output logic [PRNG_W-1:0]   rnd,
  output logic [127:0]        wrapped
);
  logic [31:0] x, y, z, w;

  // Four xorshift128 steps; returns the new state {x, y, z, w}.
  function automatic logic [127:0] xs4(logic [127:0] s);
    logic [31:0] a, b, c, d, t;
    {a, b, c, d} = s;
    for (int i = 0; i < 4; i++) begin
      t = a ^ (a << 11);
      a = b; b = c; c = d;
      d = d ^ (d >> 19) ^ t ^ (t >> 8);
    end
    return {a, b, c, d};
  endfunction

  logic         a_key_load, a_start, a_busy, a_done, a_kr;
  logic [127:0] a_din, a_dout;
  logic         unwrap_q, pend;
  logic [127:0] seed;

  aes256_core u_aes (
    .clk, .rst_n, .key_load (a_key_load), .key (ssk), .key_ready (a_kr),
    .start (a_start), .decrypt (unwrap_q), .din (a_din),
    .busy (a_busy), .done (a_done), .dout (a_dout)
  );

  assign seed  = boot_time ^ {hw_key, hw_key};
  assign ready = a_kr;
  assign busy  = pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {x, y, z, w} <= 128'h0;
      ssk <= '0; a_key_load <= 1'b0; a_start <= 1'b0; a_din <= '0;
      unwrap_q <= 1'b0; pend <= 1'b0; done <= 1'b0; rnd <= '0; wrapped <= '0;
    end else begin
      a_key_load <= 1'b0;
      a_start    <= 1'b0;
      done       <= 1'b0;
      if (boot) begin
        {x, y, z, w} <= (seed == '0) ? 128'h0123_4567_89ab_cdef_fedc_ba98_7654_3210 : seed;
        ssk          <= {dev_key2, boot_time};
        a_key_load   <= 1'b1;
      end else if (req && !pend) begin
        pend     <= 1'b1;
        unwrap_q <= unwrap;
        a_start  <= 1'b1;
        if (unwrap) a_din <= wrapped_in;
        else begin
          {x, y, z, w} <= xs4({x, y, z, w});
          a_din        <= xs4({x, y, z, w});
          rnd          <= xs4({x, y, z, w});
        end
      end else if (pend && a_done) begin
        pend <= 1'b0;
        done <= 1'b1;
        if (unwrap_q) begin rnd <= a_dout; wrapped <= a_din; end
        else          wrapped <= a_dout;
      end
    end
  end

  a_req_ready: assert property (@(posedge clk) disable iff (!rst_n) req |-> ready);

endmodule
