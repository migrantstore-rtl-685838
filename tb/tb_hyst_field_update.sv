// tb_hyst_field_update: checks the shared count / dirty-bit field.
// A PCM page is driven with off-chip misses until the migration request
// appears exactly on the 16th one; hits (no off-chip miss) must not count.
// A MigrantStore page gets stores to random offsets and the dirty bits are
// compared with a reference computed from the offsets.
module tb_hyst_field_update;
  import ms_pkg::*;

  logic   in_ms, access, is_write, offchip_miss, migrate;
  field_t field_i, field_o;
  logic [PAGE_OFF_W-1:0] page_off;
  int checks = 0, failures = 0;

  hyst_field_update #(.HYST_THRESHOLD(16)) dut (.*);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    field_t ref_dirty;
    int k;
    // PCM page: count off-chip misses
    in_ms = 0; field_i = '0; access = 1; is_write = 0; offchip_miss = 1; page_off = '0;
    for (k = 1; k <= 20; k++) begin
      #1;
      check(field_o == field_t'(k > 16 ? 16 : k), $sformatf("count after %0d misses = %0d", k, field_o));
      check(migrate == (k >= 16), $sformatf("migrate after %0d misses = %0b", k, migrate));
      // an on-chip hit leaves the count alone
      offchip_miss = 0; #1;
      check(field_o == field_i && !migrate, "hit must not count");
      offchip_miss = 1;
      field_i = field_o;
      field_i = field_t'(k > 16 ? 16 : k);
    end
    // no access: nothing changes
    access = 0; field_i = 16'd5; #1;
    check(field_o == 16'd5 && !migrate, "idle keeps field");
    // MigrantStore page: sub-block dirty bits
    access = 1; in_ms = 1; field_i = '0; ref_dirty = '0;
    for (k = 0; k < 40; k++) begin
      page_off = PAGE_OFF_W'($urandom);
      is_write = ($urandom % 3) != 0;
      offchip_miss = $urandom;
      #1;
      if (is_write) ref_dirty[page_off / 512] = 1'b1;
      check(field_o == ref_dirty, $sformatf("dirty bits %h expected %h", field_o, ref_dirty));
      check(!migrate, "no migrate for MigrantStore page");
      field_i = field_o;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
