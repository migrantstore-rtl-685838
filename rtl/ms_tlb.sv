// ms_tlb: data TLB extended for MigrantStore.
//
// Each entry holds a translation plus the page-table bits MigrantStore
// relies on: the "page is in MigrantStore" bit set by the OS, the usual
// reference and dirty bits, and the 16-bit field that is a hysteresis
// count for a PCM page and the sub-block dirty bits for a MigrantStore
// page. Every access updates that field in the same write that sets the
// reference bit (hyst_field_update computes the new value), so the paper's
// scheme needs no extra TLB access. A replayed access that missed off chip
// arrives with acc_offchip set; when it takes a PCM page's count to the
// hysteresis threshold, trap_valid asks the OS to migrate the page.
// Evicted and shot-down entries are handed back on the evict_* port so the
// count and dirty bits reach the page table, as TLBs already do for
// reference and dirty bits.
//
// Organisation (this design's choice; the paper does not size the TLB):
// ENTRIES fully-associative entries, round-robin victim choice after
// invalid entries, page walks done outside (a miss is reported; the walker
// or OS answers with fill_*).
//
// Timing: lookup, acc_hit/acc_paddr and trap_* are combinational in the
// access cycle; entry updates, fills and shoot-downs take effect at the
// next rising edge; evict_* is registered and valid for one cycle after
// the fill or shoot-down that caused it. At most one of fill_valid and
// inv_valid may be high in a cycle; if a fill or shoot-down hits the
// entry being accessed, the access's update goes out with the eviction.
module ms_tlb
  import ms_pkg::*;
#(
  parameter int unsigned ENTRIES        = 64,
  parameter int unsigned HYST_THRESHOLD = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  // access from the core (or the replay of an off-chip miss)
  input  logic   acc_valid,
  input  vaddr_t acc_vaddr,
  input  logic   acc_write,
  input  logic   acc_offchip,
  output logic   acc_hit,
  output paddr_t acc_paddr,
  output logic   acc_in_ms,
  // PCM fault: hysteresis threshold reached
  output logic   trap_valid,
  output vpn_t   trap_vpn,
  output ppn_t   trap_ppn,
  // refill and shoot-down
  input  logic   fill_valid,
  input  vpn_t   fill_vpn,
  input  pte_t   fill_pte,
  input  logic   inv_valid,
  input  vpn_t   inv_vpn,
  // entry going back to the page table
  output logic   evict_valid,
  output vpn_t   evict_vpn,
  output pte_t   evict_pte
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic             valid [ENTRIES];
  vpn_t             vpns  [ENTRIES];
  pte_t             ptes  [ENTRIES];
  logic [IDX_W-1:0] rr_ptr;

  vpn_t             acc_vpn;
  logic [IDX_W-1:0] hit_idx;
  pte_t             hit_pte, upd_pte;
  field_t           new_field;
  logic             migrate;

  assign acc_vpn = acc_vaddr[VA_W-1:PAGE_OFF_W];

  // ---- lookup ----
  always_comb begin
    acc_hit = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (valid[i] && vpns[i] == acc_vpn) begin
        acc_hit = 1'b1;
        hit_idx = IDX_W'(i);
      end
  end

  assign hit_pte   = ptes[hit_idx];
  assign acc_paddr = {hit_pte.ppn, acc_vaddr[PAGE_OFF_W-1:0]};
  assign acc_in_ms = acc_hit & hit_pte.in_ms;

  hyst_field_update #(.HYST_THRESHOLD(HYST_THRESHOLD)) u_field (
    .in_ms       (hit_pte.in_ms),
    .field_i     (hit_pte.field),
    .access      (acc_valid & acc_hit),
    .is_write    (acc_write),
    .offchip_miss(acc_offchip),
    .page_off    (acc_vaddr[PAGE_OFF_W-1:0]),
    .field_o     (new_field),
    .migrate     (migrate)
  );

  always_comb begin
    upd_pte         = hit_pte;
    upd_pte.ref_bit = 1'b1;
    upd_pte.dirty   = hit_pte.dirty | acc_write;
    upd_pte.field   = new_field;
  end

  assign trap_valid = acc_valid & acc_hit & migrate;
  assign trap_vpn   = acc_vpn;
  assign trap_ppn   = hit_pte.ppn;

  // ---- fill / shoot-down target ----
  logic             fill_match, inv_match, have_free;
  logic [IDX_W-1:0] fill_match_idx, inv_idx, free_idx, fill_idx;

  always_comb begin
    fill_match = 1'b0; fill_match_idx = '0;
    inv_match  = 1'b0; inv_idx        = '0;
    have_free  = 1'b0; free_idx       = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (valid[i] && vpns[i] == fill_vpn) begin fill_match = 1'b1; fill_match_idx = IDX_W'(i); end
      if (valid[i] && vpns[i] == inv_vpn)  begin inv_match  = 1'b1; inv_idx        = IDX_W'(i); end
      if (!valid[i])                       begin have_free  = 1'b1; free_idx       = IDX_W'(i); end
    end
    fill_idx = fill_match ? fill_match_idx : (have_free ? free_idx : rr_ptr);
  end

  // entry as it stands this cycle, including the access's update
  function automatic pte_t current_pte(logic [IDX_W-1:0] idx);
    if (acc_valid && acc_hit && hit_idx == idx) return upd_pte;
    return ptes[idx];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        valid[i] <= 1'b0;
        vpns[i]  <= '0;
        ptes[i]  <= '0;
      end
      rr_ptr      <= '0;
      evict_valid <= 1'b0;
      evict_vpn   <= '0;
      evict_pte   <= '0;
    end else begin
      evict_valid <= 1'b0;
      if (acc_valid && acc_hit) ptes[hit_idx] <= upd_pte;
      if (inv_valid) begin
        if (inv_match) begin
          valid[inv_idx] <= 1'b0;
          evict_valid    <= 1'b1;
          evict_vpn      <= vpns[inv_idx];
          evict_pte      <= current_pte(inv_idx);
        end
      end else if (fill_valid) begin
        // a refill of a page already held replaces it without write-back
        if (!fill_match && valid[fill_idx]) begin
          evict_valid <= 1'b1;
          evict_vpn   <= vpns[fill_idx];
          evict_pte   <= current_pte(fill_idx);
        end
        valid[fill_idx] <= 1'b1;
        vpns[fill_idx]  <= fill_vpn;
        ptes[fill_idx]  <= fill_pte;
        if (!fill_match && !have_free)
          rr_ptr <= (rr_ptr == IDX_W'(ENTRIES - 1)) ? '0 : rr_ptr + 1'b1;
      end
    end
  end

  a_one_update: assert property (@(posedge clk) disable iff (!rst_n) !(fill_valid && inv_valid))
    else $error("ms_tlb: fill and shoot-down in the same cycle");

endmodule
