// ms_mem_ctrl: memory controller front end for the DRAM-PCM memory.
//
// PCM and the MigrantStore DRAM are both ordinary physical memory on one
// memory system, so one controller serves both. It has two requesters --
// demand traffic from the L2 (misses and write-backs) and the migration
// DMA -- and two devices, chosen by physical address bit 33 (set for
// MigrantStore). Per device, a demand request always wins over a DMA
// request. Because the DMA issues one 64-byte burst per request, demand
// accesses slip in between the bursts of a migration, which is the
// priority rule the paper gives to keep migrations from swamping the PCM
// banks and the bus. Bank queues and bank scheduling belong to the device
// side and are not modelled here.
//
// Every demand request accepted for the DRAM inserts its MigrantStore
// frame number into the RAPid buffer, which the OS reads through rapid_*.
// Migration traffic does not insert (this design's choice).
//
// Interface: requests use valid/ready with an ms_pkg::mem_req_t payload;
// the controller stamps the requester in the `src` field and devices
// return it in the response. Device responses use valid/ready: when both
// devices answer the same requester in one cycle, the PCM answer is
// passed and the DRAM answer waits a cycle. Responses to requesters are
// always accepted. All paths are combinational; the only state is the
// RAPid buffer.
module ms_mem_ctrl
  import ms_pkg::*;
#(
  parameter int unsigned RAPID_ENTRIES = 20,
  localparam int unsigned RIDX_W = $clog2(RAPID_ENTRIES),
  localparam int unsigned RCNT_W = $clog2(RAPID_ENTRIES + 1)
) (
  input  logic     clk,
  input  logic     rst_n,
  // demand port (L2)
  input  logic     dm_req_valid,
  output logic     dm_req_ready,
  input  mem_req_t dm_req,
  output logic     dm_rsp_valid,
  output mem_rsp_t dm_rsp,
  // migration DMA port
  input  logic     dma_req_valid,
  output logic     dma_req_ready,
  input  mem_req_t dma_req,
  output logic     dma_rsp_valid,
  output mem_rsp_t dma_rsp,
  // PCM device
  output logic     pcm_req_valid,
  input  logic     pcm_req_ready,
  output mem_req_t pcm_req,
  input  logic     pcm_rsp_valid,
  output logic     pcm_rsp_ready,
  input  mem_rsp_t pcm_rsp,
  // MigrantStore DRAM device
  output logic     dram_req_valid,
  input  logic     dram_req_ready,
  output mem_req_t dram_req,
  input  logic     dram_rsp_valid,
  output logic     dram_rsp_ready,
  input  mem_rsp_t dram_rsp,
  // RAPid buffer, OS side
  input  logic              rapid_clear,
  input  logic [RIDX_W-1:0] rapid_rd_idx,
  output frame_t            rapid_rd_id,
  output logic [RCNT_W-1:0] rapid_count,
  output logic              rapid_overflow
);

  logic dm_ms, dma_ms;
  logic dm_to_pcm, dm_to_dram, dma_to_pcm, dma_to_dram;

  assign dm_ms       = is_ms_addr(dm_req.addr);
  assign dma_ms      = is_ms_addr(dma_req.addr);
  assign dm_to_pcm   = dm_req_valid  & ~dm_ms;
  assign dm_to_dram  = dm_req_valid  &  dm_ms;
  assign dma_to_pcm  = dma_req_valid & ~dma_ms;
  assign dma_to_dram = dma_req_valid &  dma_ms;

  // ---- request side: demand first, per device ----
  always_comb begin
    pcm_req        = dm_to_pcm  ? dm_req : dma_req;
    pcm_req.src    = dm_to_pcm  ? SRC_DEMAND : SRC_DMA;
    pcm_req_valid  = dm_to_pcm | dma_to_pcm;
    dram_req       = dm_to_dram ? dm_req : dma_req;
    dram_req.src   = dm_to_dram ? SRC_DEMAND : SRC_DMA;
    dram_req_valid = dm_to_dram | dma_to_dram;

    dm_req_ready  = dm_ms  ? dram_req_ready : pcm_req_ready;
    dma_req_ready = dma_ms ? (dram_req_ready & ~dm_to_dram)
                           : (pcm_req_ready  & ~dm_to_pcm);
  end

  // ---- response side ----
  logic dram_blocked;
  assign dram_blocked   = pcm_rsp_valid & dram_rsp_valid & (pcm_rsp.src == dram_rsp.src);
  assign pcm_rsp_ready  = 1'b1;
  assign dram_rsp_ready = ~dram_blocked;

  always_comb begin
    dm_rsp_valid  = 1'b0;
    dma_rsp_valid = 1'b0;
    dm_rsp        = pcm_rsp;
    dma_rsp       = pcm_rsp;
    if (pcm_rsp_valid) begin
      if (pcm_rsp.src == SRC_DEMAND) dm_rsp_valid  = 1'b1;
      else                           dma_rsp_valid = 1'b1;
    end
    if (dram_rsp_valid && !dram_blocked) begin
      if (dram_rsp.src == SRC_DEMAND) begin dm_rsp_valid  = 1'b1; dm_rsp  = dram_rsp; end
      else                            begin dma_rsp_valid = 1'b1; dma_rsp = dram_rsp; end
    end
  end

  // ---- RAPid buffer: frames of demand MigrantStore accesses ----
  rapid_buffer #(.ENTRIES(RAPID_ENTRIES), .ID_W(MS_FRAME_W)) u_rapid (
    .clk      (clk),
    .rst_n    (rst_n),
    .ins_valid(dm_req_valid & dm_req_ready & dm_ms),
    .ins_id   (dm_req.addr[PAGE_OFF_W +: MS_FRAME_W]),
    .clear    (rapid_clear),
    .rd_idx   (rapid_rd_idx),
    .rd_id    (rapid_rd_id),
    .count    (rapid_count),
    .overflow (rapid_overflow)
  );

  // ---- handshake rules ----
  a_dm_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dm_req_valid && !dm_req_ready |=> dm_req_valid && $stable(dm_req))
    else $error("demand request changed while waiting");
  a_dma_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dma_req_valid && !dma_req_ready |=> dma_req_valid && $stable(dma_req))
    else $error("DMA request changed while waiting");

endmodule
