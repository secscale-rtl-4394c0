// line_cipher: AES-256 on one 64-byte page block, in ECB or CTR mode.
//
// The paper encrypts eEPC page blocks with AES-ECB-256 under a block-specific
// key k_b and keeps EPC blocks under SGX-style AES-CTR (Fig. 11).  A 64-byte
// block is four 16-byte AES blocks; chunk 0 is bits [511:384].
//   ECB:  c_i = AES_k(p_i)               (decrypt: p_i = AES_k^-1(c_i))
//   CTR:  c_i = p_i ^ AES_k({iv[127:2], i})   (the same for both directions)
// The key schedule is kept between requests and re-expanded only when the key
// changes.  The chunk order and the CTR counter-block layout are this design's
// choice; the paper does not give them.
//
// Interface and timing: start (pulse, only when !busy) with mode, key, iv and
// din; done pulses with dout 64 cycles (4 x 16) after the start edge, or 79
// cycles when the key changed and had to be expanded again.
module line_cipher
  import secscale_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  cmode_e       mode,
  input  key_t         key,
  input  logic [127:0] iv,
  input  line_t        din,
  output logic         busy,
  output logic         done,
  output line_t        dout
);
  typedef enum logic [2:0] {S_IDLE, S_KEY, S_KWAIT, S_ISSUE, S_WAIT} state_e;
  state_e st;

  key_t         key_q;
  logic         key_valid;
  cmode_e       mode_q;
  logic [127:0] iv_q;
  line_t        din_q;
  logic [1:0]   idx;

  logic         a_key_load, a_key_ready, a_start, a_busy, a_done;
  logic [127:0] a_din, a_dout;

  aes256_core u_aes (
    .clk, .rst_n,
    .key_load (a_key_load), .key (key_q), .key_ready (a_key_ready),
    .start (a_start), .decrypt (mode_q == CM_ECB_DEC), .din (a_din),
    .busy (a_busy), .done (a_done), .dout (a_dout)
  );

  logic [127:0] chunk;
  assign chunk      = din_q[511 - 128*idx -: 128];
  assign a_din      = (mode_q == CM_CTR) ? {iv_q[127:2], idx} : chunk;
  assign a_key_load = (st == S_KEY);
  assign a_start    = (st == S_ISSUE);
  assign busy       = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; key_q <= '0; key_valid <= 1'b0; mode_q <= CM_ECB_ENC;
      iv_q <= '0; din_q <= '0; idx <= '0; done <= 1'b0; dout <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          mode_q <= mode; iv_q <= iv; din_q <= din; idx <= '0;
          if (!key_valid || key != key_q) begin
            key_q <= key; key_valid <= 1'b1; st <= S_KEY;
          end else st <= S_ISSUE;
        end
        S_KEY:   st <= S_KWAIT;
        S_KWAIT: if (a_key_ready) st <= S_ISSUE;
        S_ISSUE: st <= S_WAIT;
        S_WAIT: if (a_done) begin
          dout[511 - 128*idx -: 128] <= (mode_q == CM_CTR) ? (a_dout ^ chunk) : a_dout;
          idx <= idx + 2'd1;
          if (idx == 2'd3) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_ISSUE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
