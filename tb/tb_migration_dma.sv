// tb_migration_dma: runs migrations through the DMA engine against one
// behavioural memory that holds both the PCM and the DRAM addresses, and a
// model L2 that acknowledges flushes after a random delay.
// Checks after each migration: the frame holds the demand page; the stale
// PCM page of the victim holds the victim's data in exactly its dirty
// sub-blocks and is untouched elsewhere; the numbers of reads, writes and
// flushes are those the dirty bits imply; every block was flushed from the
// L2 before it was read; `done` pulses once; requests overlap (more than
// one and at most 16 in flight) so that a migration takes well under the
// time of the same bursts done one after another. The memory has 8 banks.
module tb_migration_dma;
  import ms_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy, done;
  dma_cmd_t cmd = '0;
  logic flush_valid, flush_ack = 0;
  paddr_t flush_addr;
  logic req_valid, req_ready, rsp_valid;
  mem_req_t req;
  mem_rsp_t rsp;

  migration_dma dut (.*);
  mem_model #(.READ_LAT(12), .WRITE_LAT(20), .BANKS(8)) u_mem (.clk, .rst_n, .req_valid, .req_ready, .req,
    .rsp_valid, .rsp_ready(1'b1), .rsp);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_flush, n_rd, n_wr, n_done, inflight = 0, max_inflight = 0, t_start;
  logic flushed [paddr_t];

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // model L2: acknowledge a flush after 0..3 cycles
  always @(posedge clk) if (rst_n) begin
    if (flush_ack) flush_ack <= 0;
    else if (flush_valid && ($urandom % 3) == 0) begin
      flush_ack <= 1; n_flush++; flushed[flush_addr] = 1;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      if (req.we) n_wr++;
      else begin
        n_rd++;
        check(flushed.exists(req.addr), $sformatf("block %h read before its L2 flush", req.addr));
      end
    end
    if (done) n_done++;
    inflight = inflight + int'(req_valid && req_ready) - int'(rsp_valid);
    if (inflight > max_inflight) max_inflight = inflight;
  end

  task automatic migrate(input logic [19:0] src, input frame_t frame, input logic vv,
                         input logic [19:0] vpage, input field_t dirty);
    int pop, exp_rd, exp_wr;
    block_t before_victim [128];
    for (int i = 0; i < 128; i++) before_victim[i] = u_mem.peek(ms_block_addr(frame, 7'(i)));
    n_flush = 0; n_rd = 0; n_wr = 0; n_done = 0; flushed.delete();
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{src_page: src, dst_frame: frame, victim_valid: vv, victim_page: vpage, victim_dirty: dirty};
    @(posedge clk); #1; cmd_valid = 0; t_start = $time;
    check(busy, "busy after command");
    while (!done) @(posedge clk);
    $display("migration of %0d blocks took %0d cycles, up to %0d requests in flight",
             n_rd + n_wr, ($time - t_start) / 10, max_inflight);
    // with 8 banks the bursts must overlap: well under the serial time
    check(($time - t_start) / 10 < (n_rd * 12 + n_wr * 20) / 2, "bursts overlap across banks");
    check(max_inflight > 1 && max_inflight <= 16, $sformatf("in-flight requests %0d", max_inflight));
    @(posedge clk); #1;
    check(!busy && cmd_ready, "idle after done");
    pop = vv ? $countones(dirty) : 0;
    exp_rd = 128 + pop * 8;
    exp_wr = 128 + pop * 8;
    check(n_done == 1, "one done pulse");
    check(n_rd == exp_rd, $sformatf("reads %0d expected %0d", n_rd, exp_rd));
    check(n_wr == exp_wr, $sformatf("writes %0d expected %0d", n_wr, exp_wr));
    check(n_flush == (vv ? 256 : 128), $sformatf("flushes %0d", n_flush));
    for (int i = 0; i < 128; i++) begin
      check(u_mem.peek(ms_block_addr(frame, 7'(i))) == u_mem.peek(pcm_block_addr(src, 7'(i))),
            $sformatf("frame block %0d not copied", i));
      if (vv) begin
        if (dirty[i / 8])
          check(u_mem.peek(pcm_block_addr(vpage, 7'(i))) == before_victim[i], $sformatf("dirty victim block %0d not written back", i));
        else
          check(!u_mem.mem.exists(pcm_block_addr(vpage, 7'(i))), $sformatf("clean victim block %0d written", i));
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    migrate(20'h00123, 14'd7, 1'b0, 20'h0, 16'h0);            // empty frame
    migrate(20'h00456, 14'd7, 1'b1, 20'h00123, 16'hA05C);     // victim with some dirty sub-blocks
    migrate(20'h00789, 14'd9, 1'b1, 20'h00ABC, 16'h0000);     // clean victim
    migrate(20'h00123, 14'd7, 1'b1, 20'h00456, 16'hFFFF);     // all dirty
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
