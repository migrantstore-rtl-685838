// tb_rapid_buffer: drives random frame numbers (drawn from a small pool so
// that repeats occur) into the RAPid buffer and keeps a reference list in
// a queue: newest first, distinct, truncated to 20 entries. After every
// insert the full contents, count and overflow flag are compared; clears
// (with and without a simultaneous insert) are mixed in.
module tb_rapid_buffer;
  localparam int N = 20;
  logic clk = 0, rst_n = 0;
  logic ins_valid = 0, clear = 0, overflow;
  logic [13:0] ins_id = '0, rd_id;
  logic [4:0] rd_idx = '0;
  logic [4:0] count;
  int checks = 0, failures = 0;
  int dedup_seen = 0, overflow_seen = 0;

  rapid_buffer #(.ENTRIES(N), .ID_W(14)) dut (.*);

  always #5 clk = ~clk;

  logic [13:0] refq [$];
  logic ref_ovf = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic ref_insert(input logic [13:0] id);
    foreach (refq[i]) if (refq[i] == id) begin dedup_seen++; return; end
    refq.push_front(id);
    if (refq.size() > N) begin void'(refq.pop_back()); ref_ovf = 1; overflow_seen++; end
  endtask

  task automatic compare();
    check(count == 5'(refq.size()), $sformatf("count %0d expected %0d", count, refq.size()));
    check(overflow == ref_ovf, "overflow flag");
    for (int i = 0; i < refq.size(); i++) begin
      rd_idx = 5'(i); #1;
      check(rd_id == refq[i], $sformatf("entry %0d = %0d expected %0d", i, rd_id, refq[i]));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); compare();
    for (int n = 0; n < 400; n++) begin
      int r = $urandom % 100;
      @(negedge clk);
      ins_valid = (r < 90) || (r >= 97);
      clear     = (r >= 95);
      ins_id    = 14'($urandom % (n < 200 ? 30 : 60));
      @(posedge clk); #1;
      if (clear) begin refq.delete(); ref_ovf = 0; end
      if (ins_valid) ref_insert(ins_id);
      ins_valid = 0; clear = 0;
      compare();
    end
    check(dedup_seen > 0, "repeat inserts exercised");
    check(overflow_seen > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
