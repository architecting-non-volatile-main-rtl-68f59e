// tb_page_attr_table: checks the per-page security flags and the per-bank
// algorithm (highest level among the valid pages of the bank) against a
// reference copy of the table, over the reset sweep, directed phase changes
// and random OS writes. Also checks the lookup port and the sweep length.
module tb_page_attr_table;
  import snvm_pkg::*;
  localparam int NP = 64, NB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init_done, wr_valid, busy, rd_en;
  logic [5:0] wr_page, rd_page;
  page_attr_t wr_attr, rd_attr;
  level_e [NB-1:0] bank_alg;
  page_attr_t ref_tbl [NP];
  int checks = 0, failures = 0;

  page_attr_table #(.NUM_PAGES(NP), .NUM_BANKS(NB), .DEFAULT_LEVEL(2)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic level_e ref_alg(int b);
    level_e m = LVL_NONE;
    for (int p = 0; p < NP; p++)
      if (p % NB == b && ref_tbl[p].valid && ref_tbl[p].level > m) m = ref_tbl[p].level;
    return m;
  endfunction

  task automatic os_write(int p, logic v, level_e l);
    while (busy) @(negedge clk);
    wr_valid = 1; wr_page = 6'(p); wr_attr = '{valid: v, level: l};
    @(negedge clk);
    wr_valid = 0;
    ref_tbl[p] = '{valid: v, level: l};
    @(negedge clk);
  endtask

  task automatic check_all(string what);
    for (int b = 0; b < NB; b++) check(bank_alg[b] == ref_alg(b), $sformatf("%s bank %0d", what, b));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    wr_valid = 0; wr_page = 0; wr_attr = '0; rd_en = 0; rd_page = 0;
    for (int p = 0; p < NP; p++) ref_tbl[p] = '{valid: 1'b1, level: LVL_AES};
    repeat (2) @(negedge clk);
    rst_n = 1;
    n = 0;
    while (!init_done) begin @(negedge clk); n++; end
    check(n == NP, "sweep takes one cycle per page");
    check_all("after reset");
    // a sensitive phase: page 5 (bank 1) holds kernel pointers
    os_write(5, 1, LVL_RSA);
    check_all("rsa page");
    check(bank_alg[1] == LVL_RSA && bank_alg[0] == LVL_AES, "only bank 1 raised");
    // phase ends: page back to DES; bank falls back to AES (others)
    os_write(5, 1, LVL_DES);
    check_all("back to des");
    // bank 2 made unencrypted page by page
    for (int p = 2; p < NP; p += NB) os_write(p, 1, LVL_NONE);
    check_all("bank 2 plain");
    check(bank_alg[2] == LVL_NONE, "bank 2 needs no cipher");
    // an invalid RSA page does not raise its bank
    os_write(6, 0, LVL_RSA);
    check(bank_alg[2] == LVL_NONE, "invalid page ignored");
    // random phase changes
    for (int i = 0; i < 300; i++) begin
      os_write($urandom_range(0, NP-1), 1'($urandom), level_e'($urandom_range(0, 3)));
      check_all("random");
    end
    // lookup port
    for (int i = 0; i < 20; i++) begin
      automatic int p = $urandom_range(0, NP-1);
      rd_en = 1; rd_page = 6'(p);
      @(negedge clk);
      rd_en = 0;
      check(rd_attr == ref_tbl[p], "lookup");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
