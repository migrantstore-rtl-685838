// migrantstore_top: the hardware of a MigrantStore DRAM-PCM memory.
//
// MigrantStore is a DRAM that is part of physical memory next to a much
// larger PCM. Pages live in PCM until the OS migrates them into the DRAM;
// whether a page is in MigrantStore is a bit of its page-table entry, so
// ordinary address translation finds it and no tags are needed. Three
// pieces of hardware support the OS:
//   * ms_tlb: TLB entries carry a 16-bit field that counts off-chip misses
//     while the page is in PCM (migration hysteresis: the trap that
//     migrates the page is raised only when the count reaches 16) and
//     holds one dirty bit per 512-byte sub-block while the page is in
//     MigrantStore (page sub-blocking).
//   * ms_mem_ctrl: one controller for PCM and DRAM, demand traffic ahead
//     of migration bursts, with the RAPid buffer that lists the
//     MigrantStore frames touched since the last migration for the OS's
//     replacement code.
//   * migration_dma: copies the demand page in and writes back only the
//     victim's dirty sub-blocks, in 64-byte bursts, up to 16 at a time so
//     that the bursts of a page spread over the memory banks.
//
// The cores, caches and interconnect, the PCM and DRAM devices and the OS
// trap handler are outside; this module's ports are where they connect:
// core accesses and replays to the TLB, the page-table walker / OS to the
// TLB refill, shoot-down and write-back ports, the L2 to the demand and
// flush ports, the trap handler to the DMA command and RAPid ports, and
// the memory devices to the PCM and DRAM ports. Timing is that of the
// three blocks; nothing is added between them.
module migrantstore_top
  import ms_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES    = 64,
  parameter int unsigned HYST_THRESHOLD = 16,
  parameter int unsigned RAPID_ENTRIES  = 20,
  parameter int unsigned DMA_MAX_OUT    = 16,
  localparam int unsigned RIDX_W = $clog2(RAPID_ENTRIES),
  localparam int unsigned RCNT_W = $clog2(RAPID_ENTRIES + 1)
) (
  input  logic     clk,
  input  logic     rst_n,
  // core side: TLB
  input  logic     acc_valid,
  input  vaddr_t   acc_vaddr,
  input  logic     acc_write,
  input  logic     acc_offchip,
  output logic     acc_hit,
  output paddr_t   acc_paddr,
  output logic     acc_in_ms,
  output logic     trap_valid,
  output vpn_t     trap_vpn,
  output ppn_t     trap_ppn,
  input  logic     fill_valid,
  input  vpn_t     fill_vpn,
  input  pte_t     fill_pte,
  input  logic     inv_valid,
  input  vpn_t     inv_vpn,
  output logic     evict_valid,
  output vpn_t     evict_vpn,
  output pte_t     evict_pte,
  // L2 side: demand memory traffic and flushes for the migration DMA
  input  logic     dm_req_valid,
  output logic     dm_req_ready,
  input  mem_req_t dm_req,
  output logic     dm_rsp_valid,
  output mem_rsp_t dm_rsp,
  output logic     flush_valid,
  output paddr_t   flush_addr,
  input  logic     flush_ack,
  // OS trap handler: migration command and RAPid buffer
  input  logic     mig_cmd_valid,
  output logic     mig_cmd_ready,
  input  dma_cmd_t mig_cmd,
  output logic     mig_busy,
  output logic     mig_done,
  input  logic              rapid_clear,
  input  logic [RIDX_W-1:0] rapid_rd_idx,
  output frame_t            rapid_rd_id,
  output logic [RCNT_W-1:0] rapid_count,
  output logic              rapid_overflow,
  // memory devices
  output logic     pcm_req_valid,
  input  logic     pcm_req_ready,
  output mem_req_t pcm_req,
  input  logic     pcm_rsp_valid,
  output logic     pcm_rsp_ready,
  input  mem_rsp_t pcm_rsp,
  output logic     dram_req_valid,
  input  logic     dram_req_ready,
  output mem_req_t dram_req,
  input  logic     dram_rsp_valid,
  output logic     dram_rsp_ready,
  input  mem_rsp_t dram_rsp
);

  logic     dma_req_valid, dma_req_ready, dma_rsp_valid;
  mem_req_t dma_req;
  mem_rsp_t dma_rsp;

  ms_tlb #(.ENTRIES(TLB_ENTRIES), .HYST_THRESHOLD(HYST_THRESHOLD)) u_tlb (
    .clk, .rst_n,
    .acc_valid, .acc_vaddr, .acc_write, .acc_offchip,
    .acc_hit, .acc_paddr, .acc_in_ms,
    .trap_valid, .trap_vpn, .trap_ppn,
    .fill_valid, .fill_vpn, .fill_pte,
    .inv_valid, .inv_vpn,
    .evict_valid, .evict_vpn, .evict_pte
  );

  migration_dma #(.MAX_OUT(DMA_MAX_OUT)) u_dma (
    .clk, .rst_n,
    .cmd_valid (mig_cmd_valid),
    .cmd_ready (mig_cmd_ready),
    .cmd       (mig_cmd),
    .busy      (mig_busy),
    .done      (mig_done),
    .flush_valid, .flush_addr, .flush_ack,
    .req_valid (dma_req_valid),
    .req_ready (dma_req_ready),
    .req       (dma_req),
    .rsp_valid (dma_rsp_valid),
    .rsp       (dma_rsp)
  );

  ms_mem_ctrl #(.RAPID_ENTRIES(RAPID_ENTRIES)) u_ctrl (
    .clk, .rst_n,
    .dm_req_valid, .dm_req_ready, .dm_req, .dm_rsp_valid, .dm_rsp,
    .dma_req_valid, .dma_req_ready, .dma_req, .dma_rsp_valid, .dma_rsp,
    .pcm_req_valid, .pcm_req_ready, .pcm_req, .pcm_rsp_valid, .pcm_rsp_ready, .pcm_rsp,
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_rsp_valid, .dram_rsp_ready, .dram_rsp,
    .rapid_clear, .rapid_rd_idx, .rapid_rd_id, .rapid_count, .rapid_overflow
  );

endmodule
