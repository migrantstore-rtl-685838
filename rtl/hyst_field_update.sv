// hyst_field_update: next value of the per-page field that MigrantStore
// shares between migration hysteresis and page sub-blocking.
//
// The page table entry and TLB entry hold one 16-bit field whose meaning
// depends on where the page lives:
//   * page in PCM: the field is a count of off-chip misses to the page.
//     Every access flagged as an off-chip miss adds one. When the count
//     reaches HYST_THRESHOLD the access raises `migrate`, which becomes
//     the PCM-fault trap that migrates the page (hysteresis, as in the
//     paper). The count sits in the low bits and saturates at the
//     threshold; that layout is this design's choice.
//   * page in MigrantStore: the field is one dirty bit per 512-byte
//     sub-block; a store sets the bit of the sub-block it touches, so
//     only dirty sub-blocks are written back to PCM on eviction.
// Both reads and writes are counted. Clearing the dirty bits when a page
// enters MigrantStore is done by the OS writing the new entry.
//
// Purely combinational; the TLB applies field_o at its next clock edge.
module hyst_field_update
  import ms_pkg::*;
#(
  parameter int unsigned HYST_THRESHOLD = 16
) (
  input  logic                  in_ms,
  input  field_t                field_i,
  input  logic                  access,
  input  logic                  is_write,
  input  logic                  offchip_miss,
  input  logic [PAGE_OFF_W-1:0] page_off,
  output field_t                field_o,
  output logic                  migrate
);

  localparam int unsigned CNT_W = $clog2(HYST_THRESHOLD + 1);

  logic [CNT_W-1:0]          count;
  logic [CNT_W-1:0]          count_next;
  logic [$clog2(SUBBLOCKS)-1:0] sub_idx;

  assign count   = field_i[CNT_W-1:0];
  assign sub_idx = page_off[PAGE_OFF_W-1:SUBBLOCK_OFF_W];

  always_comb begin
    field_o    = field_i;
    migrate    = 1'b0;
    count_next = count;
    if (access) begin
      if (in_ms) begin
        if (is_write) field_o[sub_idx] = 1'b1;
      end else if (offchip_miss) begin
        if (count < CNT_W'(HYST_THRESHOLD)) count_next = count + 1'b1;
        field_o          = '0;
        field_o[CNT_W-1:0] = count_next;
        migrate          = (count_next >= CNT_W'(HYST_THRESHOLD));
      end
    end
  end

endmodule
