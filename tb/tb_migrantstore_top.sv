// tb_migrantstore_top: end-to-end run of the MigrantStore hardware at its
// default parameters (64-entry TLB, hysteresis threshold 16, 20-entry
// RAPid buffer, 8-KB pages, 512-byte sub-blocks).
//
// The testbench plays the parts outside the chip: a core that issues
// loads and stores to 96 virtual pages (most to a hot set of 40), an L2
// that misses for 3 of 4 accesses and replays each miss to the TLB with
// the off-chip flag, the page-table walker, the OS trap handler, and the
// PCM and DRAM devices (behavioural models with the evaluated latencies,
// 1 memory cycle = 10 core cycles: PCM 550 / 1430 cycles for read /
// write over 64 banks, DRAM 160 over 16 banks, 64-byte interleaving). The handler keeps MigrantStore to 32 frames so that
// replacement happens; it keeps an LRU list of frames that it updates from
// the RAPid buffer at each migration and evicts the least recent frame.
// While a migration runs, a second requester reads other pages, so demand
// and DMA requests compete.
//
// Checked against the testbench's own page table: every load returns the
// last value stored to that virtual block, whichever memory the page is
// in and however often it moved; the trap fires exactly on the 16th
// off-chip miss to a PCM page; every entry the TLB writes back carries the
// expected count or sub-block dirty bits; the RAPid buffer lists exactly
// the distinct frames touched since the last clear; each migration moves
// the expected number of blocks, and the mean migration time stays within
// three times the published figure of about 6000 cycles. Every mechanism must occur at least once.
module tb_migrantstore_top;
  import ms_pkg::*;

  localparam int NPAGES  = 96;
  localparam int NHOT    = 40;
  localparam int NFRAMES = 32;
  localparam int NACC    = 6000;
  localparam int TH      = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------- DUT ----------------
  logic acc_valid = 0, acc_write = 0, acc_offchip = 0;
  vaddr_t acc_vaddr = '0;
  logic acc_hit, acc_in_ms, trap_valid;
  paddr_t acc_paddr;
  vpn_t trap_vpn; ppn_t trap_ppn;
  logic fill_valid = 0, inv_valid = 0;
  vpn_t fill_vpn = '0, inv_vpn = '0;
  pte_t fill_pte = '0;
  logic evict_valid; vpn_t evict_vpn; pte_t evict_pte;
  logic dm_req_valid = 0, dm_req_ready, dm_rsp_valid;
  mem_req_t dm_req = '0; mem_rsp_t dm_rsp;
  logic flush_valid, flush_ack = 0; paddr_t flush_addr;
  logic mig_cmd_valid = 0, mig_cmd_ready, mig_busy, mig_done;
  dma_cmd_t mig_cmd = '0;
  logic rapid_clear = 0, rapid_overflow;
  logic [4:0] rapid_rd_idx = '0, rapid_count;
  frame_t rapid_rd_id;
  logic pcm_req_valid, pcm_req_ready, pcm_rsp_valid, pcm_rsp_ready;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid, dram_rsp_ready;
  mem_req_t pcm_req, dram_req; mem_rsp_t pcm_rsp, dram_rsp;

  migrantstore_top dut (.*);

  mem_model #(.READ_LAT(550), .WRITE_LAT(1430), .BANKS(64)) u_pcm (.clk, .rst_n, .req_valid(pcm_req_valid),
    .req_ready(pcm_req_ready), .req(pcm_req), .rsp_valid(pcm_rsp_valid), .rsp_ready(pcm_rsp_ready), .rsp(pcm_rsp));
  mem_model #(.READ_LAT(160), .WRITE_LAT(160), .BANKS(16)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid),
    .req_ready(dram_req_ready), .req(dram_req), .rsp_valid(dram_rsp_valid), .rsp_ready(dram_rsp_ready), .rsp(dram_rsp));

  // ---------------- testbench state ----------------
  int checks = 0, failures = 0;
  int n_fill = 0, n_evict = 0, n_shoot = 0, n_l2hit = 0, n_count = 0, n_trap = 0, n_mig = 0;
  int n_victim = 0, n_wb_blocks = 0, n_clean_skip = 0, n_rapid_ins = 0, n_rapid_ovf = 0;
  int n_ms_acc = 0, n_prio = 0, n_bg = 0, n_flush = 0;
  longint mig_cycles = 0, cycle = 0;

  logic [19:0] home   [NPAGES];   // PCM page of each virtual page (kept while in MigrantStore)
  logic        in_ms  [NPAGES];
  frame_t      frame_of [NPAGES];
  field_t      rfield [NPAGES];   // expected count / dirty bits
  int          owner  [NFRAMES];  // virtual page index in each frame, -1 free
  int          lru [$];           // frames, most recent first
  block_t      shadow [int];      // last stored data by virtual block
  frame_t      rapid_ref [$];
  logic        rapid_ref_ovf = 0;
  logic        bg_busy = 0, bg_enable = 0;
  int          mig_demand = -1, mig_victim = -1;

  function automatic vpn_t vpn_of(int p); return vpn_t'(256 + p); endfunction
  function automatic int page_of(vpn_t v); return int'(v) - 256; endfunction
  function automatic ppn_t ppn_of(int p);
    return in_ms[p] ? ppn_t'({1'b1, 6'b0, frame_of[p]}) : ppn_t'({1'b0, home[p]});
  endfunction
  function automatic pte_t pte_of(int p);
    pte_t e; e = '0; e.ppn = ppn_of(p); e.in_ms = in_ms[p]; e.field = rfield[p]; return e;
  endfunction
  function automatic block_t expect_data(int p, int b);
    return shadow.exists(p * 128 + b) ? shadow[p * 128 + b] : u_pcm.init_block(pcm_block_addr(home[p], 7'(b)));
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------- monitors ----------------
  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (evict_valid) begin
      int p; p = page_of(evict_vpn);
      n_evict++;
      check(evict_pte.ppn == ppn_of(p) && evict_pte.in_ms == in_ms[p], "evicted translation");
      check(evict_pte.field == rfield[p], $sformatf("evicted field of page %0d: %h expected %h", p, evict_pte.field, rfield[p]));
    end
    // RAPid reference: clear first, then the insert of this edge
    if (rapid_clear) begin rapid_ref.delete(); rapid_ref_ovf = 0; end
    if (dm_req_valid && dm_req_ready && is_ms_addr(dm_req.addr)) begin
      frame_t f; logic found; found = 0;
      f = dm_req.addr[PAGE_OFF_W +: MS_FRAME_W];
      foreach (rapid_ref[i]) if (rapid_ref[i] == f) found = 1;
      if (!found) begin
        rapid_ref.push_front(f); n_rapid_ins++;
        if (rapid_ref.size() > 20) begin void'(rapid_ref.pop_back()); rapid_ref_ovf = 1; end
      end
    end
    // demand wins over a migration burst for the same device
    if (dut.u_ctrl.dm_req_valid && dut.u_ctrl.dma_req_valid &&
        is_ms_addr(dut.u_ctrl.dm_req.addr) == is_ms_addr(dut.u_ctrl.dma_req.addr)) begin
      n_prio++;
      check(!dut.u_ctrl.dma_req_ready, "migration burst overtook a demand request");
    end
    // model L2: acknowledge flushes one cycle later
    flush_ack <= flush_valid && !flush_ack;
    if (flush_valid && !flush_ack) n_flush++;
  end

  // ---------------- helpers ----------------
  task automatic tlb_fill(input int p);
    @(negedge clk);
    fill_valid = 1; fill_vpn = vpn_of(p); fill_pte = pte_of(p);
    @(posedge clk); #1; fill_valid = 0; n_fill++;
  endtask

  task automatic tlb_shoot(input int p);
    @(negedge clk);
    inv_valid = 1; inv_vpn = vpn_of(p);
    @(posedge clk); #1; inv_valid = 0; n_shoot++;
    @(posedge clk); #1;     // let the write-back be checked
  endtask

  task automatic mem_op(input paddr_t a, input logic we, input block_t wd, output block_t rd);
    @(negedge clk);
    dm_req_valid = 1; dm_req = '0; dm_req.addr = a; dm_req.we = we; dm_req.wdata = wd;
    do @(posedge clk); while (!dm_req_ready);
    #1; dm_req_valid = 0;
    while (!dm_rsp_valid) @(posedge clk);
    rd = dm_rsp.rdata;
    check(dm_rsp.we == we, "response kind");
    @(posedge clk); #1;
  endtask

  // One TLB lookup; refills on a miss. Returns the translation.
  task automatic tlb_access(input int p, input int b, input logic we, input logic off, output paddr_t pa, output logic trap);
    logic [12:0] o;
    o = {7'(b), 6'($urandom)};
    forever begin
      @(negedge clk);
      acc_valid = 1; acc_vaddr = {vpn_of(p), o}; acc_write = we; acc_offchip = off;
      #1;
      if (acc_hit) break;
      acc_valid = 0;
      tlb_fill(p);
    end
    pa = acc_paddr; trap = trap_valid;
    check(acc_paddr == {ppn_of(p), o}, $sformatf("translation of page %0d", p));
    check(acc_in_ms == in_ms[p], "in_ms");
    @(posedge clk); #1; acc_valid = 0;
  endtask

  // ---------------- OS trap handler ----------------
  task automatic migrate(input int p);
    int fr, victim, t0;
    dma_cmd_t c;
    n_mig++;
    victim = -1;
    if (lru.size() < NFRAMES) fr = lru.size();
    else begin fr = lru[lru.size() - 1]; victim = owner[fr]; end
    tlb_shoot(p);
    if (victim >= 0) tlb_shoot(victim);
    c = '0;
    c.src_page = home[p]; c.dst_frame = frame_t'(fr);
    if (victim >= 0) begin
      c.victim_valid = 1; c.victim_page = home[victim]; c.victim_dirty = rfield[victim];
      n_victim++;
      n_wb_blocks += 8 * $countones(rfield[victim]);
      if (rfield[victim] != '1) n_clean_skip++;
    end
    mig_demand = p; mig_victim = victim;
    u_pcm.n_writes = 0; u_dram.n_writes = 0;
    @(negedge clk);
    mig_cmd_valid = 1; mig_cmd = c;
    @(posedge clk); #1; mig_cmd_valid = 0; t0 = int'(cycle);
    bg_enable = 1;
    // scan the RAPid buffer (within one cycle) and update the LRU list
    @(negedge clk);
    check(rapid_count == 5'(rapid_ref.size()), $sformatf("RAPid count %0d expected %0d", rapid_count, rapid_ref.size()));
    check(rapid_overflow == rapid_ref_ovf, "RAPid overflow flag");
    if (rapid_overflow) n_rapid_ovf++;
    for (int i = int'(rapid_count) - 1; i >= 0; i--) begin
      frame_t f;
      rapid_rd_idx = 5'(i); #0.01;
      f = rapid_rd_id;
      if (i < rapid_ref.size()) check(f == rapid_ref[i], $sformatf("RAPid entry %0d", i));
      foreach (lru[k]) if (lru[k] == int'(f)) begin lru.delete(k); break; end
      lru.push_front(int'(f));
    end
    rapid_clear = 1; @(posedge clk); #1; rapid_clear = 0;
    while (!mig_done) @(posedge clk);
    mig_cycles += longint'(cycle) - t0;
    #1;
    bg_enable = 0;
    while (bg_busy) @(posedge clk);
    #1;
    check(u_dram.n_writes == 128, "demand page written to the frame");
    check(u_pcm.n_writes == 8 * (victim >= 0 ? $countones(c.victim_dirty) : 0), "only dirty sub-blocks written back");
    // page tables: victim back to its PCM page, demand page into the frame
    if (victim >= 0) begin in_ms[victim] = 0; rfield[victim] = '0; end
    in_ms[p] = 1; frame_of[p] = frame_t'(fr); rfield[p] = '0; owner[fr] = p;
    foreach (lru[k]) if (lru[k] == fr) begin lru.delete(k); break; end
    lru.push_front(fr);
    mig_demand = -1; mig_victim = -1;
  endtask

  // second requester: reads other pages while a migration runs
  initial begin
    forever begin
      @(posedge clk);
      if (bg_enable && ($urandom % 4) == 0) begin
        int q, b; block_t rd;
        q = $urandom % NPAGES; b = $urandom % 128;
        if (q != mig_demand && q != mig_victim && !(in_ms[q] && $urandom % 2)) begin
          bg_busy = 1;
          mem_op({ppn_of(q), 7'(b), 6'b0}, 1'b0, '0, rd);
          check(rd == expect_data(q, b), $sformatf("background read page %0d block %0d", q, b));
          n_bg++;
          bg_busy = 0;
        end
      end
    end
  end

  // ---------------- core ----------------
  initial begin
    for (int p = 0; p < NPAGES; p++) begin
      home[p] = 20'(32'h400 + p * 3); in_ms[p] = 0; frame_of[p] = '0; rfield[p] = '0;
    end
    for (int f = 0; f < NFRAMES; f++) owner[f] = -1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < NACC; n++) begin
      int p, b, cnt;
      logic we, off, trap, exp_trap;
      paddr_t pa;
      block_t wd, rd;
      p   = ($urandom % 5 != 0) ? ($urandom % NHOT) : ($urandom % NPAGES);
      b   = $urandom % 128;
      we  = ($urandom % 3) == 0;
      off = ($urandom % 4) != 0;
      // the access itself: translation, reference/dirty update
      tlb_access(p, b, we, 1'b0, pa, trap);
      check(!trap, "trap without off-chip miss");
      if (in_ms[p] && we) rfield[p][b / 8] = 1'b1;
      if (!off) begin n_l2hit++; continue; end
      // the off-chip miss (or write-back of the stored block)
      for (int i = 0; i < 16; i++) wd[i*32 +: 32] = $urandom;
      mem_op({pa[PA_W-1:6], 6'b0}, we, wd, rd);
      if (in_ms[p]) n_ms_acc++;
      if (we) shadow[p * 128 + b] = wd;
      else check(rd == expect_data(p, b), $sformatf("load page %0d block %0d (in_ms=%0b)", p, b, in_ms[p]));
      // replay with the off-chip flag
      exp_trap = 0;
      if (!in_ms[p]) begin
        cnt = int'(rfield[p]);
        if (cnt < TH) cnt++;
        rfield[p] = field_t'(cnt);
        exp_trap = (cnt >= TH);
        n_count++;
      end else if (we) rfield[p][b / 8] = 1'b1;
      tlb_access(p, b, we, 1'b1, pa, trap);
      check(trap == exp_trap, $sformatf("trap %0b expected %0b for page %0d", trap, exp_trap, p));
      if (trap) begin n_trap++; migrate(p); end
    end
    // every mechanism must have happened
    check(n_fill > 0, "TLB refill");
    check(n_evict > 0, "TLB write-back on eviction");
    check(n_shoot > 0, "TLB shoot-down");
    check(n_l2hit > 0, "on-chip hit not counted");
    check(n_count > 0, "hysteresis count");
    check(n_trap > 0, "hysteresis trap");
    check(n_mig > 0, "migration");
    check(n_victim > 0, "replacement of a MigrantStore page");
    check(n_wb_blocks > 0, "dirty sub-block write-back");
    check(n_clean_skip > 0, "clean sub-blocks skipped");
    check(n_ms_acc > 0, "access served by MigrantStore");
    check(n_rapid_ins > 0, "RAPid insert");
    check(n_rapid_ovf > 0, "RAPid overflow (truncated list)");
    check(n_prio > 0, "demand request ahead of migration burst");
    check(n_bg > 0, "demand traffic during migration");
    $display("fills=%0d evicts=%0d shootdowns=%0d l2hits=%0d counts=%0d traps=%0d migrations=%0d victims=%0d",
             n_fill, n_evict, n_shoot, n_l2hit, n_count, n_trap, n_mig, n_victim);
    $display("wb_blocks=%0d clean_skip=%0d ms_accesses=%0d rapid_inserts=%0d rapid_overflows=%0d priority=%0d bg_reads=%0d flushes=%0d",
             n_wb_blocks, n_clean_skip, n_ms_acc, n_rapid_ins, n_rapid_ovf, n_prio, n_bg, n_flush);
    if (n_mig > 0) $display("mean migration time %0d cycles", mig_cycles / n_mig);
    // published: about 6000 memory-system cycles per migration with
    // bank-parallel bursts; allow three times that for this device model,
    // which has no row-buffer hits
    check(n_mig > 0 && mig_cycles / n_mig < 18000, "migration time within 3x of the published ~6000 cycles");
    $display("cycles=%0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
