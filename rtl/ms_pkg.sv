// ms_pkg: constants and types shared by the MigrantStore blocks.
//
// Geometry follows the evaluated configuration: 8-KB pages, 64-byte
// blocks (one memory burst), 512-byte sub-blocks (16 per page, so the
// shared count/dirty field is 16 bits), an 8-GB PCM and a 128-MB DRAM
// MigrantStore. The physical address map is this design's choice: PCM
// occupies [0, 8 GB) and MigrantStore [8 GB, 8 GB + 128 MB), so bit 33
// of a physical address selects MigrantStore. A 48-bit virtual address is
// also a choice of this design.
//
// Memory requests move one whole block. A request is offered with
// valid/ready; the device returns a response (for reads and writes alike)
// that carries the request's `src` and `id` unchanged. Responses of
// different requests may come back in any order (different banks), so a
// requester with several requests in flight tells them apart by `id`.
package ms_pkg;

  localparam int unsigned PAGE_BYTES      = 8192;
  localparam int unsigned PAGE_OFF_W      = 13;
  localparam int unsigned BLOCK_BYTES     = 64;
  localparam int unsigned BLOCK_OFF_W     = 6;
  localparam int unsigned BLOCK_BITS      = 512;
  localparam int unsigned SUBBLOCK_BYTES  = 512;
  localparam int unsigned SUBBLOCK_OFF_W  = 9;
  localparam int unsigned SUBBLOCKS       = PAGE_BYTES / SUBBLOCK_BYTES;   // 16
  localparam int unsigned BLOCKS_PER_PAGE = PAGE_BYTES / BLOCK_BYTES;      // 128
  localparam int unsigned BLOCKS_PER_SUB  = SUBBLOCK_BYTES / BLOCK_BYTES;  // 8

  localparam int unsigned PA_W        = 34;          // 8 GB PCM + 128 MB DRAM
  localparam int unsigned PPN_W       = PA_W - PAGE_OFF_W;   // 21
  localparam int unsigned PCM_PPN_W   = 20;          // 8 GB / 8 KB
  localparam int unsigned MS_FRAME_W  = 14;          // 128 MB / 8 KB
  localparam int unsigned VA_W        = 48;
  localparam int unsigned VPN_W       = VA_W - PAGE_OFF_W;   // 35
  localparam int unsigned FIELD_W     = SUBBLOCKS;   // shared count / dirty field
  localparam int unsigned MS_SEL_BIT  = 33;          // physical address bit for MigrantStore
  localparam int unsigned ID_W        = 6;           // request id returned with the response

  typedef logic [BLOCK_BITS-1:0] block_t;
  typedef logic [PA_W-1:0]       paddr_t;
  typedef logic [VA_W-1:0]       vaddr_t;
  typedef logic [VPN_W-1:0]      vpn_t;
  typedef logic [PPN_W-1:0]      ppn_t;
  typedef logic [FIELD_W-1:0]    field_t;
  typedef logic [MS_FRAME_W-1:0] frame_t;

  // Who issued a memory request; returned with the response.
  typedef enum logic [0:0] { SRC_DEMAND = 1'b0, SRC_DMA = 1'b1 } src_e;

  typedef struct packed {
    src_e            src;
    logic [ID_W-1:0] id;      // requester's own tag, returned unchanged
    logic   we;
    paddr_t addr;     // block aligned
    block_t wdata;
  } mem_req_t;

  typedef struct packed {
    src_e            src;
    logic [ID_W-1:0] id;
    logic   we;       // response to a write (acknowledge only)
    block_t rdata;
  } mem_rsp_t;

  // Page table entry as held in the TLB.
  typedef struct packed {
    ppn_t   ppn;
    logic   in_ms;    // page is in MigrantStore
    logic   ref_bit;
    logic   dirty;
    field_t field;    // hysteresis count (PCM page) or sub-block dirty bits (MigrantStore page)
  } pte_t;

  // Migration command written by the trap handler.
  typedef struct packed {
    logic [PCM_PPN_W-1:0] src_page;      // demand page in PCM
    frame_t               dst_frame;     // MigrantStore frame to fill
    logic                 victim_valid;  // frame currently holds a page
    logic [PCM_PPN_W-1:0] victim_page;   // stale PCM copy of the victim page
    field_t               victim_dirty;  // victim's sub-block dirty bits
  } dma_cmd_t;

  function automatic paddr_t pcm_block_addr(logic [PCM_PPN_W-1:0] page, logic [6:0] blk);
    return {1'b0, page, blk, 6'b0};
  endfunction

  function automatic paddr_t ms_block_addr(frame_t frame, logic [6:0] blk);
    return {1'b1, 6'b0, frame, blk, 6'b0};
  endfunction

  function automatic logic is_ms_addr(paddr_t a);
    return a[MS_SEL_BIT];
  endfunction

endpackage
