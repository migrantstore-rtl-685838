// migration_dma: the DMA engine that performs one MigrantStore migration.
//
// The PCM-fault trap handler picks a MigrantStore frame, and writes a
// command naming the demand page in PCM, the frame, and -- if the frame
// holds a page -- that victim's stale PCM page and its sub-block dirty
// bits. The engine then performs the paper's four operations: read the
// victim page from DRAM, write back to PCM only the victim's dirty
// 512-byte sub-blocks (page sub-blocking; clean sub-blocks are still
// intact in the stale PCM page), read the demand page from PCM and write
// it into the frame. Before a block is read, the L2 is asked to flush
// (write back and invalidate) its copy of that block.
//
// Data moves in 64-byte bursts, one request per burst, so the controller
// can let demand requests in between bursts. As in the paper, the bursts
// of a page go to many banks in parallel: up to MAX_OUT blocks are in
// flight at once, each in a slot with a 64-byte buffer. The slot number is
// the request id, so read data may return in any order. Two phases:
//   1. victim (only if the frame is occupied): for blocks 0..127, flush
//      the victim's block from the L2; if its sub-block is dirty, read it
//      from DRAM into a free slot and, once the data is back, write it to
//      the stale PCM page;
//   2. demand: for blocks 0..127, flush the PCM block from the L2, read it
//      into a free slot, then write it into the frame.
// Phase 2 starts only when every slot of phase 1 is free, so no victim
// block is overwritten before it has been read. Within a phase, a slot
// whose data is back sends its write before a new read is issued. The
// chosen request waits in an output register until it is accepted, and
// the next one is loaded in the following cycle, so the engine offers at
// most one burst every two cycles -- far more than the banks can take.
// The slot count (16) and this ordering are this design's choices.
//
// Interface: cmd_valid/cmd_ready accept a command when idle; `done`
// pulses for one cycle after the last write is acknowledged (the L2 miss
// that caused the migration waits for it). flush_valid is held with
// flush_addr until flush_ack pulses; the L2 acknowledges only after any
// write-back it caused has been accepted. Memory requests use the
// controller's valid/ready request and always-accepted response.
module migration_dma
  import ms_pkg::*;
#(
  parameter int unsigned MAX_OUT = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  dma_cmd_t cmd,
  output logic     busy,
  output logic     done,
  // L2 flush of one block
  output logic     flush_valid,
  output paddr_t   flush_addr,
  input  logic     flush_ack,
  // memory requests
  output logic     req_valid,
  input  logic     req_ready,
  output mem_req_t req,
  input  logic     rsp_valid,
  input  mem_rsp_t rsp
);

  localparam int unsigned SLOT_W = (MAX_OUT > 1) ? $clog2(MAX_OUT) : 1;

  typedef enum logic [1:0] { P_IDLE, P_VICTIM, P_DEMAND, P_FINISH } phase_e;
  typedef enum logic [1:0] { I_FLUSH, I_READ, I_DONE } issue_e;
  typedef enum logic [1:0] { S_FREE, S_READ, S_DATA, S_WRITE } slot_e;

  phase_e     phase;
  issue_e     iss;
  dma_cmd_t   c;
  logic [6:0] blk;                 // next block to flush / read
  slot_e      sst  [MAX_OUT];
  logic [6:0] sblk [MAX_OUT];
  block_t     sbuf [MAX_OUT];

  logic              have_free, have_data, all_free;
  logic [SLOT_W-1:0] free_idx, data_idx, rsp_slot;
  logic              move_blk;     // the current block is moved, not only flushed
  logic              do_write, do_read;

  assign cmd_ready = (phase == P_IDLE);
  assign busy      = (phase != P_IDLE);
  assign move_blk  = (phase == P_DEMAND) | c.victim_dirty[blk[6:3]];
  assign rsp_slot  = rsp.id[SLOT_W-1:0];

  always_comb begin
    have_free = 1'b0; free_idx = '0;
    have_data = 1'b0; data_idx = '0;
    all_free  = 1'b1;
    for (int s = MAX_OUT - 1; s >= 0; s--) begin
      if (sst[s] == S_FREE) begin have_free = 1'b1; free_idx = SLOT_W'(s); end
      if (sst[s] == S_DATA) begin have_data = 1'b1; data_idx = SLOT_W'(s); end
      if (sst[s] != S_FREE) all_free = 1'b0;
    end
  end

  // The request register: loaded when empty, held until accepted.
  logic     r_valid;
  mem_req_t r_req;

  assign req_valid = r_valid;
  assign req       = r_req;

  // next request: a slot whose data is back writes first, then a new read
  always_comb begin
    do_write = (phase == P_VICTIM || phase == P_DEMAND) && !r_valid && have_data;
    do_read  = (phase == P_VICTIM || phase == P_DEMAND) && !r_valid && !have_data &&
               iss == I_READ && have_free;
    flush_valid = (phase == P_VICTIM || phase == P_DEMAND) && iss == I_FLUSH;
    flush_addr  = (phase == P_VICTIM) ? ms_block_addr(c.dst_frame, blk)
                                      : pcm_block_addr(c.src_page, blk);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= P_IDLE;
      iss     <= I_FLUSH;
      c       <= '0;
      blk     <= '0;
      done    <= 1'b0;
      r_valid <= 1'b0;
      r_req   <= '0;
      for (int s = 0; s < MAX_OUT; s++) begin
        sst[s]  <= S_FREE;
        sblk[s] <= '0;
        sbuf[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      // responses free a slot (write) or fill its buffer (read)
      if (rsp_valid) begin
        if (rsp.we) sst[rsp_slot] <= S_FREE;
        else begin
          sst[rsp_slot]  <= S_DATA;
          sbuf[rsp_slot] <= rsp.rdata;
        end
      end
      if (r_valid && req_ready) r_valid <= 1'b0;
      if (do_write) begin
        r_valid       <= 1'b1;
        r_req         <= '0;
        r_req.src     <= SRC_DMA;
        r_req.we      <= 1'b1;
        r_req.id      <= ID_W'(data_idx);
        r_req.addr    <= (phase == P_VICTIM) ? pcm_block_addr(c.victim_page, sblk[data_idx])
                                             : ms_block_addr(c.dst_frame, sblk[data_idx]);
        r_req.wdata   <= sbuf[data_idx];
        sst[data_idx] <= S_WRITE;
      end else if (do_read) begin
        r_valid        <= 1'b1;
        r_req          <= '0;
        r_req.src      <= SRC_DMA;
        r_req.we       <= 1'b0;
        r_req.id       <= ID_W'(free_idx);
        r_req.addr     <= (phase == P_VICTIM) ? ms_block_addr(c.dst_frame, blk)
                                              : pcm_block_addr(c.src_page, blk);
        sst[free_idx]  <= S_READ;
        sblk[free_idx] <= blk;
      end
      // issue sequence
      unique case (phase)
        P_IDLE: if (cmd_valid) begin
          c     <= cmd;
          blk   <= '0;
          iss   <= I_FLUSH;
          phase <= cmd.victim_valid ? P_VICTIM : P_DEMAND;
        end
        P_VICTIM, P_DEMAND: begin
          unique case (iss)
            I_FLUSH: if (flush_ack) begin
              if (move_blk) iss <= I_READ;
              else if (blk == 7'(BLOCKS_PER_PAGE - 1)) iss <= I_DONE;
              else blk <= blk + 1'b1;
            end
            I_READ: if (do_read) begin
              if (blk == 7'(BLOCKS_PER_PAGE - 1)) iss <= I_DONE;
              else begin blk <= blk + 1'b1; iss <= I_FLUSH; end
            end
            I_DONE: if (all_free && !r_valid) begin
              blk   <= '0;
              iss   <= I_FLUSH;
              phase <= (phase == P_VICTIM) ? P_DEMAND : P_FINISH;
            end
            default: iss <= I_DONE;
          endcase
        end
        P_FINISH: begin done <= 1'b1; phase <= P_IDLE; end
        default: phase <= P_IDLE;
      endcase
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req))
    else $error("migration_dma: request changed while waiting");
  a_rsp_slot: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> (sst[rsp_slot] == (rsp.we ? S_WRITE : S_READ)))
    else $error("migration_dma: response for a slot that is not waiting");

endmodule
