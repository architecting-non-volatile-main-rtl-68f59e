// tb_write_buffer: checks the page-combining write buffer. Downstream is a
// line memory that answers after a few cycles and records the order of the
// writes it receives. Checks: repeated writes to one line are merged (one
// downstream write), reads of buffered lines are answered from the buffer,
// writes interleaved over two pages leave in page groups, a full buffer
// drains and accepts again, and after flush memory equals the reference.
module tb_write_buffer;
  import snvm_pkg::*;
  import tb_ref_pkg::*;
  localparam int AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  line_if #(.AW(AW)) up (.clk, .rst_n);
  line_if #(.AW(AW)) dn (.clk, .rst_n);
  logic flush_req, flush_done;
  int checks = 0, failures = 0;

  write_buffer #(.AW(AW), .ENTRIES(8), .DRAIN_THRESH(6), .IDLE_DRAIN(1000)) dut (
    .clk, .rst_n, .up(up.slave), .dn(dn.master), .flush_req, .flush_done);

  // downstream memory
  // downstream: line memory answering every request after 3 cycles
  logic [AW-1:0] wr_log [$];
  tb_mem_model #(.AW(AW), .RD_LAT(3), .WR_LAT(3), .WR_RESP(1'b1)) dmem (
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

  task automatic flush();
    flush_req = 1;
    @(negedge clk);
    while (!flush_done) @(negedge clk);
    flush_req = 0;
    @(negedge clk);
  endtask

  function automatic logic [AW-1:0] la(int page, int line);
    return AW'(page * 64 + line);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] r, d;
    int switches, w0;
    up.req_valid = 0; up.req_we = 0; up.req_addr = 0; up.req_data = 0; flush_req = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // merging: the same line written 4 times
    w0 = dmem.writes;
    for (int i = 0; i < 4; i++) xfer(1, la(3, 5), rand_line(), r);
    check(dut.count == 1, "four writes to one line held in one entry");
    // read forwarding
    xfer(0, la(3, 5), '0, r);
    check(r == ref_mem[la(3, 5)], "read served from buffer");
    check(dmem.reads == 0, "no downstream read for buffered line");
    flush();
    check(dmem.writes - w0 == 1, "merged writes reach memory once");
    // interleaved pages: p1,p2,p1,p2,... then flush: page groups
    wr_log.delete();
    for (int i = 0; i < 5; i++) begin
      xfer(1, la(1, i), rand_line(), r);
      xfer(1, la(2, i), rand_line(), r);
    end
    flush();
    switches = 0;
    for (int i = 1; i < wr_log.size(); i++)
      if (wr_log[i][AW-1:6] != wr_log[i-1][AW-1:6]) switches++;
    check(wr_log.size() == 10, "ten lines written");
    check(switches <= 3, $sformatf("writes grouped by page (%0d page switches)", switches));
    // random traffic with reads
    for (int i = 0; i < 400; i++) begin
      automatic logic [AW-1:0] a = la($urandom_range(0, 5), $urandom_range(0, 7));
      if ($urandom_range(0, 2) != 0) xfer(1, a, rand_line(), r);
      else begin
        xfer(0, a, '0, r);
        check(r == (ref_mem.exists(a) ? ref_mem[a] : '0), "read returns latest data");
      end
    end
    flush();
    check(dut.count == 0, "empty after flush");
    foreach (ref_mem[a]) check(dmem.peek(a) == ref_mem[a], "memory matches after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
