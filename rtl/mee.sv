// mee: memory encryption engine for EPC <-> eEPC page-block transfer.
//
// Follows Fig. 11 of the paper.  A block moving from the eEPC into the EPC
// (page load) is first decrypted with AES-ECB under its block key k_b and then
// re-encrypted with AES-CTR for the EPC; a block leaving the EPC (eviction) is
// CTR-decrypted and then ECB-encrypted under the new block key of the evicted
// page.  The two stages run on two line_cipher instances, so the EPC's CTR key
// schedule stays expanded while the ECB key changes with every block.
//
// Interface and timing: start (pulse, only when !busy) with op, din, ecb_key,
// ctr_key and ctr_iv (the CTR counter block of this EPC block).  plain_valid
// pulses with plain, the block's plaintext, when the first stage ends: on a
// load this is the data the core is waiting for.  done pulses with dout, the
// block re-encrypted for its destination, when the second stage ends.
module mee
  import secscale_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         evict,      // 0: eEPC -> EPC (load), 1: EPC -> eEPC (evict)
  input  line_t        din,
  input  key_t         ecb_key,
  input  key_t         ctr_key,
  input  logic [127:0] ctr_iv,
  output logic         busy,
  output logic         plain_valid,
  output line_t        plain,
  output logic         done,
  output line_t        dout
);
  typedef enum logic [1:0] {M_IDLE, M_STAGE1, M_STAGE2} state_e;
  state_e st;
  logic   evict_q;

  logic  ecb_start, ecb_busy, ecb_done;
  logic  ctr_start, ctr_busy, ctr_done;
  line_t ecb_din, ecb_dout, ctr_din, ctr_dout;

  line_cipher u_ecb (
    .clk, .rst_n, .start (ecb_start), .mode (evict_q ? CM_ECB_ENC : CM_ECB_DEC),
    .key (ecb_key), .iv ('0), .din (ecb_din), .busy (ecb_busy), .done (ecb_done), .dout (ecb_dout)
  );

  line_cipher u_ctr (
    .clk, .rst_n, .start (ctr_start), .mode (CM_CTR),
    .key (ctr_key), .iv (ctr_iv), .din (ctr_din), .busy (ctr_busy), .done (ctr_done), .dout (ctr_dout)
  );

  line_t din_q;
  logic  kick;   // first cycle of a stage
  // Stage 1 uses ECB on a load and CTR on an eviction; stage 2 the other one.
  assign ecb_din   = evict_q ? plain : din_q;
  assign ctr_din   = evict_q ? din_q : plain;
  assign ecb_start = kick && ((st == M_STAGE1) != evict_q);
  assign ctr_start = kick && ((st == M_STAGE1) == evict_q);
  assign busy      = (st != M_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; evict_q <= 1'b0; din_q <= '0; kick <= 1'b0;
      plain <= '0; plain_valid <= 1'b0; done <= 1'b0; dout <= '0;
    end else begin
      plain_valid <= 1'b0;
      done        <= 1'b0;
      kick        <= 1'b0;
      case (st)
        M_IDLE: if (start) begin
          evict_q <= evict; din_q <= din; st <= M_STAGE1; kick <= 1'b1;
        end
        M_STAGE1: if (evict_q ? ctr_done : ecb_done) begin
          plain       <= evict_q ? ctr_dout : ecb_dout;
          plain_valid <= 1'b1;
          st          <= M_STAGE2;
          kick        <= 1'b1;
        end
        M_STAGE2: if (evict_q ? ecb_done : ctr_done) begin
          dout <= evict_q ? ecb_dout : ctr_dout;
          done <= 1'b1;
          st   <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
