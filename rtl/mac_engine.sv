// mac_engine: the MAC engine ("ME" in the paper's MAC-forest figure).
//
// An 8-byte MAC is an encrypted SHA-256 hash: the paper states that a page's
// MAC is its hash encrypted with the page key and that higher-level MACs are
// hashes encrypted with the system-specific key.  How 256 hash bits become a
// 64-bit MAC is not given; this design folds the hash to 128 bits, encrypts
// that with AES-256 and keeps the upper 64 bits:
//   MAC = AES_key(H[255:128] ^ H[127:0])[127:64].
// Messages are whole numbers of 512-bit blocks (a 4 KB page is 64 blocks, a
// group of 16 MACs 2 blocks, of 8 MACs 1 block), so padding is always the
// fixed block {1'b1, 447'b0, 64-bit length}.
//
// The engine keeps no message state between operations: the caller passes
// the chaining value h_in, so that several messages can be hashed
// interleaved (the MAC verification circuit keeps one per page in flight).
//   op ABSORB: h_out = compress(h_in, block)                    (64 cycles)
//   op FINISH: mac   = AES_key(fold(compress(h_in, pad(nblk)))) (96 cycles)
// start pulses only when !busy; done pulses when h_out or mac is valid; the
// latencies above count from the start edge to the cycle done is seen.
module mac_engine
  import secscale_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         finish,     // 0: ABSORB, 1: FINISH
  input  logic [255:0] h_in,
  input  line_t        block,
  input  logic [6:0]   nblk,       // message length in 512-bit blocks (FINISH)
  input  key_t         key,
  output logic         busy,
  output logic         done,
  output logic [255:0] h_out,   // valid with done
  output mac_t         mac
);
  typedef enum logic [2:0] {E_IDLE, E_SHAW, E_KEY, E_KWAIT, E_AES, E_AESW} state_e;
  state_e st;

  logic         fin_q;
  logic [255:0] h_q;
  line_t        blk_q;
  key_t         key_q;

  logic         s_start, s_busy, s_done;
  line_t        s_blk;
  logic [255:0] s_h;
  logic [255:0] s_hout;
  logic         a_kl, a_kr, a_start, a_busy, a_done;
  logic [127:0] a_dout;

  sha256_core u_sha (
    .clk, .rst_n, .start (s_start), .block (s_blk), .h_in (s_h),
    .busy (s_busy), .done (s_done), .h_out (s_hout)
  );

  aes256_core u_aes (
    .clk, .rst_n, .key_load (a_kl), .key (key_q), .key_ready (a_kr),
    .start (a_start), .decrypt (1'b0), .din (h_q[255:128] ^ h_q[127:0]),
    .busy (a_busy), .done (a_done), .dout (a_dout)
  );

  // The hash starts in the cycle start is seen, and an ABSORB result leaves
  // in the cycle the core finishes, so back-to-back blocks keep the core's
  // 65-cycle period.
  logic         done_q, abs_done;
  logic [255:0] h_out_q;
  assign s_start  = (st == E_IDLE) && start;
  assign s_blk    = (st == E_IDLE) ? (finish ? {1'b1, 447'd0, 64'(nblk) << 9} : block) : blk_q;
  assign s_h      = (st == E_IDLE) ? h_in : h_q;
  assign abs_done = (st == E_SHAW) && s_done && !fin_q;
  assign done     = done_q | abs_done;
  assign h_out    = abs_done ? s_hout : h_out_q;
  assign a_kl    = (st == E_KEY);
  assign a_start = (st == E_AES);
  assign busy    = (st != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; fin_q <= 1'b0; h_q <= '0; blk_q <= '0; key_q <= '0;
      done_q <= 1'b0; h_out_q <= '0; mac <= '0;
    end else begin
      done_q <= 1'b0;
      case (st)
        E_IDLE: if (start) begin
          fin_q <= finish;
          h_q   <= h_in;
          key_q <= key;
          blk_q <= s_blk;
          st    <= E_SHAW;
        end
        E_SHAW: if (s_done) begin
          h_q <= s_hout;
          if (fin_q) st <= E_KEY;
          else st <= E_IDLE;
        end
        E_KEY:   st <= E_KWAIT;
        E_KWAIT: if (a_kr) st <= E_AES;
        E_AES:   st <= E_AESW;
        E_AESW: if (a_done) begin
          mac     <= a_dout[127:64];
          h_out_q <= h_q;
          done_q  <= 1'b1;
          st    <= E_IDLE;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
