// mem_model: behavioural model of a banked memory device (PCM or DRAM
// chips behind their bank logic), for testbenches only.
//
// Blocks are interleaved over BANKS banks at 64-byte granularity. Each
// bank serves one request at a time: a read answers READ_LAT cycles after
// it is accepted, a write is stored and acknowledged after WRITE_LAT
// cycles. A request is accepted when its bank is free. Finished requests
// wait in a response queue, so responses of different banks may leave in
// a different order from their requests; each carries the request's src
// and id. Storage is a sparse associative array; a block never written
// reads as a pattern derived from its address (init_block), so copies can
// be checked without preloading data. Counts reads and writes.
module mem_model
  import ms_pkg::*;
#(
  parameter int unsigned READ_LAT  = 4,
  parameter int unsigned WRITE_LAT = 8,
  parameter int unsigned BANKS     = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output mem_rsp_t rsp
);

  block_t      mem [paddr_t];
  int unsigned n_reads = 0, n_writes = 0;
  int unsigned max_busy = 0;
  int unsigned cnt  [BANKS];
  logic        bbusy[BANKS];     // working copy inside the clocked process
  logic        bbusy_q[BANKS];   // state seen by req_ready, updated with <=
  mem_req_t    cur  [BANKS];
  mem_rsp_t    rq   [$];
  int          nq;
  logic        accept;

  function automatic block_t init_block(paddr_t a);
    block_t b;
    for (int i = 0; i < 16; i++) b[i*32 +: 32] = {a[33:6], 4'(i)} ^ 32'h5a5a_0000;
    return b;
  endfunction

  function automatic block_t peek(paddr_t a);
    return mem.exists(a) ? mem[a] : init_block(a);
  endfunction

  function automatic int bank_of(paddr_t a);
    return int'(a[PA_W-1:6] % BANKS);
  endfunction

  always_comb req_ready = rst_n && !bbusy_q[bank_of(req.addr)] && nq < 64;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++) begin bbusy[b] = 1'b0; bbusy_q[b] <= 1'b0; cnt[b] = 0; cur[b] = '0; end
      rq.delete(); nq <= 0;
      rsp_valid <= 1'b0; rsp <= '0;
    end else begin
      int nb;
      accept = req_valid && req_ready;   // decided on the values before this edge
      if (rsp_valid && rsp_ready) void'(rq.pop_front());
      for (int b = 0; b < BANKS; b++) begin
        if (bbusy[b]) begin
          if (cnt[b] > 1) cnt[b]--;
          else begin
            mem_rsp_t r;
            r = '0; r.src = cur[b].src; r.id = cur[b].id; r.we = cur[b].we;
            if (cur[b].we) begin mem[cur[b].addr] = cur[b].wdata; n_writes++; end
            else begin r.rdata = peek(cur[b].addr); n_reads++; end
            rq.push_back(r);
            bbusy[b] = 1'b0;
          end
        end
      end
      if (accept) begin
        nb = bank_of(req.addr);
        bbusy[nb] = 1'b1;
        cur[nb]   = req;
        cnt[nb]   = req.we ? WRITE_LAT : READ_LAT;
      end
      nb = 0;
      for (int b = 0; b < BANKS; b++) if (bbusy[b]) nb++;
      if (nb > int'(max_busy)) max_busy = nb;
      nq <= rq.size();
      for (int b = 0; b < BANKS; b++) bbusy_q[b] <= bbusy[b];
      rsp_valid <= (rq.size() > 0);
      if (rq.size() > 0) rsp <= rq[0];
    end
  end
endmodule
