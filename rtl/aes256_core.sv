// aes256_core: iterative AES-256 block cipher (FIPS-197), encrypt and decrypt.
//
// SecScale encrypts eEPC page blocks with AES-ECB under a 256-bit key and
// wraps page keys with the 256-bit system-specific key; this core is the
// cipher behind both.  The paper names AES-256 but gives no micro-architecture;
// the iterative one-round-per-cycle structure is this design's choice.
//
// Interface and timing:
//   key_load  pulse with key: expands the 15 round keys, one per cycle;
//             key_ready rises 13 cycles later and stays high until the next
//             key_load.  A key is kept for any number of blocks.
//   start     pulse with din and decrypt, only while key_ready and !busy;
//             done pulses with dout exactly 14 cycles later.
module aes256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         key_load,
  input  logic [255:0] key,
  output logic         key_ready,
  input  logic         start,
  input  logic         decrypt,
  input  logic [127:0] din,
  output logic         busy,
  output logic         done,
  output logic [127:0] dout
);
  import aes_pkg::*;

  logic [127:0] rk [15];
  logic [3:0]   kidx;      // next round key to compute (2..14), 15 = ready
  logic [3:0]   round;
  logic         dec_q;
  logic [127:0] st;

  // One key-expansion step: round key j from round keys j-2 and j-1.
  function automatic logic [127:0] expand(logic [127:0] p2, logic [127:0] p1, logic [3:0] j);
    logic [31:0] t, w0, w1, w2, w3;
    logic [7:0]  rcon;
    rcon = 8'h01 << (j/2 - 1);
    t = p1[31:0];
    if (j[0] == 1'b0) t = sub_word({t[23:0], t[31:24]}) ^ {rcon, 24'h0};
    else              t = sub_word(t);
    w0 = p2[127:96] ^ t;
    w1 = p2[95:64]  ^ w0;
    w2 = p2[63:32]  ^ w1;
    w3 = p2[31:0]   ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  assign key_ready = (kidx == 4'd15);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kidx <= 4'd0;
      for (int i = 0; i < 15; i++) rk[i] <= '0;
    end else if (key_load) begin
      rk[0] <= key[255:128];
      rk[1] <= key[127:0];
      kidx  <= 4'd2;
    end else if (kidx >= 4'd2 && kidx <= 4'd14) begin
      rk[kidx] <= expand(rk[kidx-2], rk[kidx-1], kidx);
      kidx     <= kidx + 4'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      round <= '0;
      dec_q <= 1'b0;
      st    <= '0;
      dout  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        dec_q <= decrypt;
        round <= 4'd1;
        st    <= din ^ (decrypt ? rk[14] : rk[0]);
      end else if (busy) begin
        if (!dec_q) begin
          if (round < 4'd14)
            st <= mix_columns(shift_rows(sub_bytes(st, 1'b0), 1'b0), 1'b0) ^ rk[round];
          else begin
            dout <= shift_rows(sub_bytes(st, 1'b0), 1'b0) ^ rk[14];
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          if (round < 4'd14)
            st <= mix_columns(sub_bytes(shift_rows(st, 1'b1), 1'b1) ^ rk[4'd14 - round], 1'b1);
          else begin
            dout <= sub_bytes(shift_rows(st, 1'b1), 1'b1) ^ rk[0];
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        round <= round + 4'd1;
      end
    end
  end

  a_start_ready: assert property (@(posedge clk) disable iff (!rst_n) start |-> key_ready && !busy);

endmodule
