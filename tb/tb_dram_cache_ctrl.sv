// tb_dram_cache_ctrl: checks the DRAM buffer cache controller with a small
// cache (16 lines) over a DRAM model and a downstream line memory. Checks:
// after reset the tags are swept; when disabled every request bypasses the
// cache; when enabled a read miss fills the line and the next read hits in
// DRAM without going downstream; a conflicting miss evicts a dirty line to
// the NVM path; disabling writes every dirty line back, after which the
// downstream memory equals the reference; flush does the same with the cache
// left on; data is always the latest written.
module tb_dram_cache_ctrl;
  import snvm_pkg::*;
  import tb_ref_pkg::*;
  localparam int AW = 10, DCL = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  line_if #(.AW(AW)) up (.clk, .rst_n);
  line_if #(.AW(AW)) dn (.clk, .rst_n);
  logic en, active, init_done, flush_req, flush_done;
  logic dr_req_valid, dr_req_ready, dr_req_we, dr_resp_valid;
  logic [3:0] dr_req_idx;
  logic [511:0] dr_req_data, dr_resp_data;
  int checks = 0, failures = 0;

  dram_cache_ctrl #(.AW(AW), .DC_LINES(DCL)) dut (.up(up.slave), .dn(dn.master), .*);
  tb_mem_model #(.AW(4), .RD_LAT(4), .WR_LAT(2)) dram (
    .clk, .req_valid(dr_req_valid), .req_ready(dr_req_ready), .req_we(dr_req_we),
    .req_addr(dr_req_idx), .req_data(dr_req_data), .resp_valid(dr_resp_valid),
    .resp_data(dr_resp_data));

  // downstream: line memory answering every request after 6 cycles
  logic [AW-1:0] wr_log [$];
  tb_mem_model #(.AW(AW), .RD_LAT(6), .WR_LAT(6), .WR_RESP(1'b1)) dmem (
    .clk, .req_valid(dn.req_valid), .req_ready(dn.req_ready), .req_we(dn.req_we),
    .req_addr(dn.req_addr), .req_data(dn.req_data), .resp_valid(dn.resp_valid),
    .resp_data(dn.resp_data));
  always @(posedge clk) if (dn.req_valid && dn.req_ready && dn.req_we) wr_log.push_back(dn.req_addr);
  logic [511:0] ref_mem [logic [AW-1:0]];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(logic we, logic [AW-1:0] a, logic [511:0] d, output logic [511:0] r);
    up.req_valid = 1; up.req_we = we; up.req_addr = a; up.req_data = d;
    @(posedge clk); while (!up.req_ready) @(posedge clk);
    @(negedge clk); up.req_valid = 0;
    while (!up.resp_valid) @(negedge clk);
    r = up.resp_data;
    if (we) ref_mem[a] = d;
  endtask

  function automatic logic [511:0] refv(logic [AW-1:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : '0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] r;
    int n, r0, w0, dr0;
    up.req_valid = 0; up.req_we = 0; up.req_addr = 0; up.req_data = 0;
    en = 0; flush_req = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    n = 0;
    while (!init_done) begin @(negedge clk); n++; end
    check(n == DCL, "tag sweep one line per cycle");
    dr0 = dram.reads + dram.writes;
    // disabled: bypass
    w0 = dmem.writes;
    xfer(1, 10'd5, rand_line(), r);
    check(dmem.writes - w0 == 1 && dram.reads + dram.writes == dr0, "disabled cache is bypassed");
    xfer(0, 10'd5, '0, r);
    check(r == refv(10'd5) && dram.reads + dram.writes == dr0, "bypass read");
    // enable
    en = 1;
    repeat (2) @(negedge clk);
    check(active, "cache on");
    r0 = dmem.reads;
    xfer(0, 10'd5, '0, r);
    check(r == refv(10'd5) && dmem.reads - r0 == 1, "read miss fetched from NVM path");
    xfer(0, 10'd5, '0, r);
    check(r == refv(10'd5) && dmem.reads - r0 == 1, "second read hits in DRAM");
    // write hit then conflicting miss evicts the dirty line (5 and 21 share index 5)
    xfer(1, 10'd5, rand_line(), r);
    w0 = dmem.writes;
    xfer(0, 10'd21, '0, r);
    check(dmem.writes - w0 == 1 && dmem.peek(10'd5) == ref_mem[10'd5], "dirty victim written back");
    // random traffic
    for (int i = 0; i < 300; i++) begin
      automatic logic [AW-1:0] a = AW'($urandom_range(0, 63));
      if ($urandom_range(0, 1)) xfer(1, a, rand_line(), r);
      else begin xfer(0, a, '0, r); check(r == refv(a), "random read"); end
    end
    // flush with the cache on
    flush_req = 1; @(negedge clk);
    while (!flush_done) @(negedge clk);
    flush_req = 0; @(negedge clk);
    check(active, "flush keeps the cache on");
    foreach (ref_mem[a]) check(dmem.peek(a) == ref_mem[a], "memory current after flush");
    for (int i = 0; i < 100; i++) begin
      automatic logic [AW-1:0] a = AW'($urandom_range(0, 63));
      if ($urandom_range(0, 1)) xfer(1, a, rand_line(), r);
      else begin xfer(0, a, '0, r); check(r == refv(a), "random read"); end
    end
    // disable: write back and bypass
    en = 0;
    n = 0;
    while (active) begin @(negedge clk); n++; end
    foreach (ref_mem[a]) check(dmem.peek(a) == ref_mem[a], "memory current after disable");
    r0 = dram.reads + dram.writes;
    for (int i = 0; i < 20; i++) begin
      automatic logic [AW-1:0] a = AW'($urandom_range(0, 63));
      xfer(0, a, '0, r); check(r == refv(a), "bypass read after disable");
    end
    check(dram.reads + dram.writes == r0, "DRAM untouched while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
