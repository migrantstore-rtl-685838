// rapid_buffer: the recently-accessed-page-id (RAPid) buffer.
//
// Sits in the memory controller. Each demand access that goes to the
// MigrantStore DRAM inserts the frame number of its page. Between two
// migrations the buffer therefore lists the MigrantStore pages touched, so
// the OS replacement code can update its LRU stack by reading these few
// entries instead of scanning page-table reference bits. When more than
// ENTRIES distinct pages are touched, the oldest entry is overwritten and
// the list is truncated, as in the paper.
//
// Organisation: a circular array with a write pointer. A frame already in
// the buffer is not inserted again (the buffer holds distinct pages; this
// design does not move a repeated page to the front). The OS reads entry
// rd_idx combinationally, index 0 being the newest, reads `count` and
// `overflow` (set once an entry has been overwritten), and pulses `clear`
// after its scan. An insert in the same cycle as `clear` is kept as the
// only entry. Inserts take effect at the next clock edge.
module rapid_buffer #(
  parameter int unsigned ENTRIES = 20,
  parameter int unsigned ID_W    = 14,
  localparam int unsigned IDX_W  = $clog2(ENTRIES),
  localparam int unsigned CNT_W  = $clog2(ENTRIES + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ins_valid,
  input  logic [ID_W-1:0]  ins_id,
  input  logic             clear,
  input  logic [IDX_W-1:0] rd_idx,
  output logic [ID_W-1:0]  rd_id,
  output logic [CNT_W-1:0] count,
  output logic             overflow
);

  logic [ID_W-1:0]  ids [ENTRIES];
  logic [IDX_W-1:0] wr_ptr;
  logic             present;

  // Is the frame already held among the valid entries?
  always_comb begin
    present = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      // entry i is valid when it is one of the `count` slots behind wr_ptr
      logic [IDX_W:0] age;   // 1 = newest
      age = (i < int'(wr_ptr)) ? (IDX_W+1)'(int'(wr_ptr) - i)
                               : (IDX_W+1)'(int'(wr_ptr) + ENTRIES - i);
      if (age <= (IDX_W+1)'(count) && ids[i] == ins_id) present = 1'b1;
    end
  end

  function automatic logic [IDX_W-1:0] inc(logic [IDX_W-1:0] p);
    return (p == IDX_W'(ENTRIES - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
      for (int i = 0; i < ENTRIES; i++) ids[i] <= '0;
    end else if (clear) begin
      overflow <= 1'b0;
      if (ins_valid) begin
        ids[0] <= ins_id;
        wr_ptr <= IDX_W'(1 % ENTRIES);
        count  <= CNT_W'(1);
      end else begin
        wr_ptr <= '0;
        count  <= '0;
      end
    end else if (ins_valid && !present) begin
      ids[wr_ptr] <= ins_id;
      wr_ptr      <= inc(wr_ptr);
      if (count == CNT_W'(ENTRIES)) overflow <= 1'b1;
      else                          count    <= count + 1'b1;
    end
  end

  // Read port: entry rd_idx counted back from the newest.
  always_comb begin
    int slot;
    slot = int'(wr_ptr) - 1 - int'(rd_idx);
    if (slot < 0) slot += ENTRIES;
    rd_id = ids[slot[IDX_W-1:0]];
  end

endmodule
