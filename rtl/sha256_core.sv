// sha256_core: SHA-256 compression function, one round per clock.
//
// The paper's MAC verification circuit hashes with SHA-2 at 40 Gb/s at
// 5.15 GHz, i.e. at least 7.77 bits per cycle.  This core compresses a
// 512-bit block in 64 cycles and accepts the next block on the cycle after
// done, a period of 65 cycles (7.88 bits/cycle, 40.6 Gb/s at 5.15 GHz).
// The round structure is the standard one; the paper does not describe it.
//
// Interface and timing:
//   start   pulse with block (word 0 in bits [511:480]) and h_in, the chaining
//           value (H0 for the first block of a message); only when !busy.
//   done    pulses 64 cycles after the start edge with h_out = h_in + rounds.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  input  logic [255:0] h_in,
  output logic         busy,
  output logic         done,
  output logic [255:0] h_out
);
  import sha256_pkg::*;

  logic [31:0]  w [16];        // message schedule window, w[0] = W[t]
  logic [31:0]  a, b, c, d, e, f, g, h;
  logic [255:0] hq;
  logic [6:0]   t;

  logic [31:0] t1, t2, wnext;
  logic [255:0] hnew;
  always_comb begin
    t1    = h + bsig1(e) + ((e & f) ^ (~e & g)) + K[t[5:0]] + w[0];
    t2    = bsig0(a) + ((a & b) ^ (a & c) ^ (b & c));
    wnext = ssig1(w[14]) + w[9] + ssig0(w[1]) + w[0];
    hnew  = {hq[255:224] + t1 + t2, hq[223:192] + a, hq[191:160] + b, hq[159:128] + c,
             hq[127:96]  + d + t1,  hq[95:64]   + e, hq[63:32]   + f, hq[31:0]    + g};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; t <= '0; hq <= '0; h_out <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        t    <= '0;
        hq   <= h_in;
        {a, b, c, d, e, f, g, h} <= h_in;
        for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
      end else if (busy) begin
        {a, b, c, d, e, f, g, h} <= {t1 + t2, a, b, c, d + t1, e, f, g};
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= wnext;
        t <= t + 7'd1;
        if (t == 7'd63) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          h_out <= hnew;
        end
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
