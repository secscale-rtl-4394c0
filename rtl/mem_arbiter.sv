// mem_arbiter: shares the memory port between the page-fault controller
// (requester 0) and the MAC verification circuit (requester 1).
//
// The paper gives reads priority over waiting writes ("If a read request
// arrives while this write is waiting, the read request is given higher
// priority", Write Path); this arbiter picks a pending
// read before a pending write and, between two requests of the same kind,
// requester 0 (the data path the core waits on) before requester 1.  The
// grant is held until the memory answers, so each requester has at most one
// request in flight and gets its own response back.
//
// Interface: per requester mem_req_t req[i] / ready[i] / mem_rsp_t rsp[i]
// (a request is taken in the cycle where valid and ready are both high);
// downstream mreq / mreq_ready / mrsp of the same kind.  Counts granted
// reads and writes.
module mem_arbiter
  import secscale_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  mem_req_t    req   [2],
  output logic        ready [2],
  output mem_rsp_t    rsp   [2],
  output mem_req_t    mreq,
  input  logic        mreq_ready,
  input  mem_rsp_t    mrsp,
  output logic [31:0] n_reads,
  output logic [31:0] n_writes,
  output logic [31:0] n_read_first    // a read granted while a write waited
);
  logic busy, owner, pick, any;

  always_comb begin
    any  = req[0].valid || req[1].valid;
    // read before write, then requester 0 before requester 1
    if (req[0].valid && !req[0].we)      pick = 1'b0;
    else if (req[1].valid && !req[1].we) pick = 1'b1;
    else                                 pick = !req[0].valid;
  end

  assign mreq     = (!busy && any) ? req[pick] : '0;
  assign ready[0] = !busy && mreq_ready && any && (pick == 1'b0);
  assign ready[1] = !busy && mreq_ready && any && (pick == 1'b1);
  assign rsp[0]   = (busy && owner == 1'b0) ? mrsp : '0;
  assign rsp[1]   = (busy && owner == 1'b1) ? mrsp : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; owner <= 1'b0; n_reads <= '0; n_writes <= '0; n_read_first <= '0;
    end else if (!busy) begin
      if (any && mreq_ready) begin
        busy  <= 1'b1;
        owner <= pick;
        if (req[pick].we) n_writes <= n_writes + 1;
        else begin
          n_reads <= n_reads + 1;
          if (req[!pick].valid && req[!pick].we) n_read_first <= n_read_first + 1;
        end
      end
    end else if (mrsp.valid) busy <= 1'b0;
  end

  a_one_rsp: assert property (@(posedge clk) disable iff (!rst_n) !(rsp[0].valid && rsp[1].valid));
endmodule
