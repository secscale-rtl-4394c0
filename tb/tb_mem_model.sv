// tb_mem_model: behavioural DRAM behind the memory port, for testbenches.
//
// Stores 64-byte lines in an associative array (unwritten lines read as 0).
// Accepts one request at a time and answers it LAT cycles later (a read with
// its data, a write with an acknowledge).  Counts reads and writes per region
// tag (address bits [39:37]).  Testbenches preload and inspect `mem` directly.
module tb_mem_model
  import secscale_pkg::*;
#(
  parameter int LAT = 4
) (
  input  logic     clk,
  input  mem_req_t mreq,
  output logic     mreq_ready,
  output mem_rsp_t mrsp
);
  line_t mem [addr_t];
  int    n_rd [8];
  int    n_wr [8];

  logic     busy = 1'b0;
  int       cnt;
  mem_req_t cur;

  initial begin
    foreach (n_rd[i]) begin n_rd[i] = 0; n_wr[i] = 0; end
    mrsp = '0;
  end

  assign mreq_ready = !busy;

  always @(posedge clk) begin
    mrsp <= '0;
    if (!busy && mreq.valid) begin
      busy <= 1'b1;
      cur  <= mreq;
      cnt  <= LAT;
    end else if (busy) begin
      if (cnt > 1) cnt <= cnt - 1;
      else begin
        busy <= 1'b0;
        if (cur.we) begin
          mem[cur.addr] = cur.wdata;
          n_wr[cur.addr[39:37]]++;
          mrsp <= '{valid: 1'b1, rdata: '0};
        end else begin
          n_rd[cur.addr[39:37]]++;
          mrsp <= '{valid: 1'b1, rdata: mem.exists(cur.addr) ? mem[cur.addr] : '0};
        end
      end
    end
  end

  function automatic int reads();
    int s = 0;
    foreach (n_rd[i]) s += n_rd[i];
    return s;
  endfunction

  function automatic int writes();
    int s = 0;
    foreach (n_wr[i]) s += n_wr[i];
    return s;
  endfunction
endmodule
