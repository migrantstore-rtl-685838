// tb_ms_tlb: random traffic against a reference page table.
// The reference keeps, per virtual page, the entry the TLB should hold:
// translation, MigrantStore bit, reference/dirty bits and the shared
// field (count for PCM pages, sub-block dirty bits for MigrantStore pages).
// Each access is checked for hit/miss, physical address and trap; every
// write-back on the evict port is compared with the reference, and pages
// are refilled from the reference after a miss, as a page walker would.
// Uses 8 entries so that evictions are frequent.
module tb_ms_tlb;
  import ms_pkg::*;
  localparam int E = 8;
  localparam int TH = 16;

  logic clk = 0, rst_n = 0;
  logic acc_valid = 0, acc_write = 0, acc_offchip = 0;
  vaddr_t acc_vaddr = '0;
  logic acc_hit, acc_in_ms, trap_valid, evict_valid;
  paddr_t acc_paddr;
  vpn_t trap_vpn, evict_vpn;
  ppn_t trap_ppn;
  logic fill_valid = 0, inv_valid = 0;
  vpn_t fill_vpn = '0, inv_vpn = '0;
  pte_t fill_pte = '0, evict_pte;

  ms_tlb #(.ENTRIES(E), .HYST_THRESHOLD(TH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_traps = 0, n_evicts = 0, n_dirty = 0, n_inv = 0;
  pte_t   pt [vpn_t];       // reference page table
  logic   held [vpn_t];     // pages the reference believes are in the TLB

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // evict port monitor
  always @(posedge clk) if (rst_n && evict_valid) begin
    n_evicts++;
    check(held.exists(evict_vpn), $sformatf("evicted vpn %0h not held", evict_vpn));
    check(pt.exists(evict_vpn) && evict_pte == pt[evict_vpn],
          $sformatf("evicted entry %0h: %h expected %h", evict_vpn, evict_pte, pt[evict_vpn]));
    held.delete(evict_vpn);
  end

  task automatic fill(input vpn_t v);
    @(negedge clk);
    fill_valid = 1; fill_vpn = v; fill_pte = pt[v];
    @(posedge clk); #1; fill_valid = 0;
    held[v] = 1;
  endtask

  task automatic access(input vpn_t v, input logic w, input logic off);
    logic [12:0] off13;
    pte_t e;
    int cnt;
    logic exp_trap;
    off13 = 13'($urandom);
    @(negedge clk);
    acc_valid = 1; acc_vaddr = {v, off13}; acc_write = w; acc_offchip = off;
    #1;
    if (!acc_hit) begin
      check(!held.exists(v), $sformatf("miss on held page %0h", v));
      acc_valid = 0;
      fill(v);
      @(negedge clk);
      acc_valid = 1; #1;
    end
    check(acc_hit, "hit after fill");
    e = pt[v];
    check(acc_paddr == {e.ppn, off13}, "physical address");
    check(acc_in_ms == e.in_ms, "in_ms");
    exp_trap = 0;
    if (e.in_ms) begin
      if (w) begin e.field[off13[12:9]] = 1'b1; n_dirty++; end
    end else if (off) begin
      cnt = int'(e.field);
      if (cnt < TH) cnt++;
      e.field = field_t'(cnt);
      exp_trap = (cnt >= TH);
    end
    check(trap_valid == exp_trap, $sformatf("trap %0b expected %0b", trap_valid, exp_trap));
    if (trap_valid) begin
      n_traps++;
      check(trap_vpn == v && trap_ppn == e.ppn, "trap page");
    end
    e.ref_bit = 1; e.dirty = e.dirty | w;
    pt[v] = e;
    @(posedge clk); #1; acc_valid = 0;
  endtask

  initial begin
    // 12 pages, half in MigrantStore
    for (int i = 0; i < 12; i++) begin
      pte_t e;
      e = '0;
      e.in_ms = (i % 2);
      e.ppn   = e.in_ms ? ppn_t'({1'b1, 6'b0, 14'(100 + i)}) : ppn_t'(1000 + i);
      pt[vpn_t'(i * 7 + 3)] = e;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      vpn_t v;
      v = vpn_t'(($urandom % 12) * 7 + 3);
      if (($urandom % 50) == 0 && held.exists(v)) begin
        @(negedge clk); inv_valid = 1; inv_vpn = v;
        @(posedge clk); #1; inv_valid = 0; n_inv++;
        @(posedge clk); #1;
        check(!held.exists(v), "shoot-down wrote the entry back");
      end else begin
        access(v, ($urandom % 2), ($urandom % 4) != 0);
      end
    end
    check(n_traps > 0, "hysteresis trap exercised");
    check(n_evicts > 0, "eviction exercised");
    check(n_dirty > 0, "sub-block dirty bits exercised");
    check(n_inv > 0, "shoot-down exercised");
    $display("traps=%0d evicts=%0d dirty=%0d inv=%0d", n_traps, n_evicts, n_dirty, n_inv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
