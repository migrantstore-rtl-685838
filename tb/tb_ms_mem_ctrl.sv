// tb_ms_mem_ctrl: the controller between two random requesters (demand and
// DMA, one request outstanding each) and two behavioural devices.
// Checks: every read returns the data last written to that block (a
// shadow memory in the testbench), every response goes to the requester
// that asked, a demand request for a device always wins over a DMA request
// for the same device, and the RAPid buffer lists exactly the distinct
// MigrantStore frames of accepted demand requests, newest first.
module tb_ms_mem_ctrl;
  import ms_pkg::*;

  logic clk = 0, rst_n = 0;
  logic dm_req_valid = 0, dm_req_ready, dm_rsp_valid;
  logic dma_req_valid = 0, dma_req_ready, dma_rsp_valid;
  mem_req_t dm_req = '0, dma_req = '0;
  mem_rsp_t dm_rsp, dma_rsp;
  logic pcm_req_valid, pcm_req_ready, pcm_rsp_valid, pcm_rsp_ready;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid, dram_rsp_ready;
  mem_req_t pcm_req, dram_req;
  mem_rsp_t pcm_rsp, dram_rsp;
  logic rapid_clear = 0, rapid_overflow;
  logic [4:0] rapid_rd_idx = '0, rapid_count;
  frame_t rapid_rd_id;

  ms_mem_ctrl #(.RAPID_ENTRIES(20)) dut (.*);
  mem_model #(.READ_LAT(3), .WRITE_LAT(5)) u_pcm (.clk, .rst_n, .req_valid(pcm_req_valid), .req_ready(pcm_req_ready),
    .req(pcm_req), .rsp_valid(pcm_rsp_valid), .rsp_ready(pcm_rsp_ready), .rsp(pcm_rsp));
  mem_model #(.READ_LAT(2), .WRITE_LAT(2)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req(dram_req), .rsp_valid(dram_rsp_valid), .rsp_ready(dram_rsp_ready), .rsp(dram_rsp));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, conflicts = 0, n_dm = 0, n_dma = 0, n_collide = 0;
  block_t shadow [paddr_t];
  frame_t rapid_ref [$];
  mem_req_t dm_out [2], dma_out;     // demand: one outstanding per device (0 PCM, 1 DRAM)
  logic dm_busy [2] = '{0, 0};
  logic dma_busy = 0, pause = 0;
  block_t dm_exp [2], dma_exp;        // read data expected, fixed when the read is accepted

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic block_t expect_data(paddr_t a);
    return shadow.exists(a) ? shadow[a] : u_pcm.init_block(a);
  endfunction

  function automatic mem_req_t rand_req();
    mem_req_t r;
    r = '0;
    if ($urandom % 2) r.addr = ms_block_addr(frame_t'($urandom % 24), 7'($urandom % 4));
    else              r.addr = pcm_block_addr(20'($urandom % 8), 7'($urandom % 4));
    r.we = $urandom % 2;
    for (int i = 0; i < 16; i++) r.wdata[i*32 +: 32] = $urandom;
    return r;
  endfunction

  // monitor on the accepting edge
  always @(posedge clk) if (rst_n) begin
    if (dm_req_valid && dma_req_valid && is_ms_addr(dm_req.addr) == is_ms_addr(dma_req.addr)) begin
      conflicts++;
      check(!dma_req_ready, "DMA must not win over demand for the same device");
    end
    if (pcm_rsp_valid && dram_rsp_valid && pcm_rsp.src == dram_rsp.src) n_collide++;
    if (dm_req_valid && dm_req_ready) begin
      dm_out[is_ms_addr(dm_req.addr)] = dm_req; dm_busy[is_ms_addr(dm_req.addr)] = 1; n_dm++;
      dm_exp[is_ms_addr(dm_req.addr)] = expect_data(dm_req.addr);
      if (dm_req.we) shadow[dm_req.addr] = dm_req.wdata;
      if (is_ms_addr(dm_req.addr)) begin
        frame_t f; logic found; found = 0;
        f = dm_req.addr[PAGE_OFF_W +: MS_FRAME_W];
        foreach (rapid_ref[i]) if (rapid_ref[i] == f) found = 1;
        if (!found) begin rapid_ref.push_front(f); if (rapid_ref.size() > 20) void'(rapid_ref.pop_back()); end
      end
    end
    if (dma_req_valid && dma_req_ready) begin
      dma_out = dma_req; dma_busy = 1; n_dma++;
      dma_exp = expect_data(dma_req.addr);
      if (dma_req.we) shadow[dma_req.addr] = dma_req.wdata;
    end
    if (dm_rsp_valid) begin
      int d;
      d = (pcm_rsp_valid && pcm_rsp.src == SRC_DEMAND) ? 0 : 1;
      check(dm_busy[d], "unexpected demand response");
      check(dm_rsp.we == dm_out[d].we, "demand response kind");
      if (!dm_out[d].we) check(dm_rsp.rdata == dm_exp[d], $sformatf("demand read data %h", dm_out[d].addr));
      dm_busy[d] = 0;
    end
    if (dma_rsp_valid) begin
      check(dma_busy, "unexpected DMA response");
      check(dma_rsp.we == dma_out.we, "DMA response kind");
      if (!dma_out.we) check(dma_rsp.rdata == dma_exp, $sformatf("DMA read data %h", dma_out.addr));
      dma_busy = 0;
    end
  end

  // requesters: drive on the negative edge
  always @(negedge clk) if (rst_n) begin
    if (dm_req_valid && !dm_req_ready) ; // hold
    else if (!pause && !dm_req_valid && ($urandom % 2) == 0) begin
      mem_req_t r;
      r = rand_req();
      if (!dm_busy[is_ms_addr(r.addr)]) begin dm_req = r; dm_req_valid = 1; end
    end
    if (dma_req_valid && !dma_req_ready) ;
    else if (!dma_busy && !dma_req_valid) begin dma_req = rand_req(); dma_req_valid = 1; end
  end
  always @(posedge clk) begin
    #1;
    if (dm_req_valid && dm_busy[is_ms_addr(dm_req.addr)] && dm_out[is_ms_addr(dm_req.addr)] == dm_req) dm_req_valid = 0;
    if (dma_req_valid && dma_busy) dma_req_valid = 0;
  end

  task automatic compare_rapid();
    check(rapid_count == 5'(rapid_ref.size()), $sformatf("RAPid count %0d expected %0d", rapid_count, rapid_ref.size()));
    for (int i = 0; i < rapid_ref.size(); i++) begin
      rapid_rd_idx = 5'(i); #0.1;
      check(rapid_rd_id == rapid_ref[i], $sformatf("RAPid entry %0d = %0d expected %0d", i, rapid_rd_id, rapid_ref[i]));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      repeat (400) @(posedge clk);
      pause = 1;
      while (dm_req_valid) @(posedge clk);
      @(negedge clk);
      compare_rapid();
      rapid_clear = 1; @(posedge clk); #1; rapid_clear = 0;
      rapid_ref.delete();
      pause = 0;
    end
    check(conflicts > 0, "priority conflicts exercised");
    check(n_collide > 0, "response collisions exercised");
    $display("demand=%0d dma=%0d conflicts=%0d collide=%0d", n_dm, n_dma, conflicts, n_collide);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
