// tb_snvm_top: end-to-end test of the self-obscuring NVM controller at a
// reduced size (64 pages of 4 KB in 4 banks, 16-line DRAM cache), with
// models of the cipher engine (per-word latency of DES/AES/RSA), a PCM with
// 50-cycle reads and 1000-cycle writes, the DRAM and the random source.
// It plays a session: boot with fresh keys, OS tags pages with different
// security levels, traffic with the DRAM cache off and on, flush, page-out
// to the drive, sleep with the keys wiped and restored, a phase change that
// lowers a bank's algorithm with the stale pages invalidated, and a reboot
// after which the old contents no longer decrypt. Data returned to the LLC
// is checked against a reference memory, and the NVM contents against the
// reference ciphertext (never the plaintext). Each mechanism is counted and
// a failure is counted for one that never happened.
module tb_snvm_top;
  import snvm_pkg::*;
  import tb_ref_pkg::*;
  localparam int NP = 64, NB = 4, KW = 521, DCL = 16;
  localparam int AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic llc_req_valid, llc_req_ready, llc_req_we, llc_resp_valid;
  logic [AW-1:0] llc_req_addr;
  logic [511:0] llc_req_data, llc_resp_data;
  logic csr_valid, csr_we, csr_priv, csr_ready, csr_err;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic rng_valid, rng_ready;
  logic [31:0] rng_data;
  logic ce_req_valid, ce_req_ready, ce_req_encrypt, ce_resp_valid;
  level_e ce_req_alg;
  logic [KW-1:0] ce_req_key;
  logic [63:0] ce_req_data, ce_resp_data;
  logic nvm_req_valid, nvm_req_ready, nvm_req_we, nvm_resp_valid;
  logic [AW-1:0] nvm_req_addr;
  logic [511:0] nvm_req_data, nvm_resp_data;
  logic dr_req_valid, dr_req_ready, dr_req_we, dr_resp_valid;
  logic [3:0] dr_req_idx;
  logic [511:0] dr_req_data, dr_resp_data;
  logic disk_valid, disk_ready;
  logic [AW-1:0] disk_addr;
  logic [511:0] disk_data;
  int checks = 0, failures = 0;

  snvm_top #(.NUM_PAGES(NP), .NUM_BANKS(NB), .KEY_W(KW), .DC_LINES(DCL),
             .WB_ENTRIES(8), .DEFAULT_LEVEL(2)) dut (.*);

  tb_cipher_model #(.KEY_W(KW)) ce (
    .clk, .req_valid(ce_req_valid), .req_ready(ce_req_ready), .req_alg(ce_req_alg),
    .req_encrypt(ce_req_encrypt), .req_key(ce_req_key), .req_data(ce_req_data),
    .resp_valid(ce_resp_valid), .resp_data(ce_resp_data));
  tb_mem_model #(.AW(AW), .RD_LAT(50), .WR_LAT(1000)) nvm (
    .clk, .req_valid(nvm_req_valid), .req_ready(nvm_req_ready), .req_we(nvm_req_we),
    .req_addr(nvm_req_addr), .req_data(nvm_req_data), .resp_valid(nvm_resp_valid),
    .resp_data(nvm_resp_data));
  tb_mem_model #(.AW(4), .RD_LAT(10), .WR_LAT(10)) dram (
    .clk, .req_valid(dr_req_valid), .req_ready(dr_req_ready), .req_we(dr_req_we),
    .req_addr(dr_req_idx), .req_data(dr_req_data), .resp_valid(dr_resp_valid),
    .resp_data(dr_resp_data));

  // random source
  always @(posedge clk) rng_data <= $urandom;
  assign rng_valid = 1'b1;

  // ---- mechanism counters ----
  int n_rb_hit, n_rb_miss, n_wb_line, n_zero_fill, n_merge, n_fwd, n_drain;
  int n_dc_hit, n_dc_miss, n_dc_evict, n_bypass, n_pageout, n_stall, n_refused;
  int n_plain_wr, n_sleep, n_phase, n_reboot;
  always @(posedge clk) begin
    n_rb_hit    += int'(dut.u_rb.ev_hit);
    n_rb_miss   += int'(dut.u_rb.ev_miss);
    n_wb_line   += int'(dut.u_rb.ev_wb_line);
    n_zero_fill += int'(dut.u_rb.ev_zero_fill);
    n_merge     += int'(dut.u_wb.ev_merge);
    n_fwd       += int'(dut.u_wb.ev_fwd);
    n_drain     += int'(dut.u_wb.ev_drain);
    n_dc_hit    += int'(dut.u_dc.ev_hit);
    n_dc_miss   += int'(dut.u_dc.ev_miss);
    n_dc_evict  += int'(dut.u_dc.ev_evict);
    n_bypass    += int'(dut.u_dc.ev_bypass);
    n_pageout   += int'(disk_valid && disk_ready);
  end

  // ---- reference state ----
  logic [511:0] ref_mem [logic [AW-1:0]];
  page_attr_t   flags [NP];
  logic [KW-1:0] key_ref [NB];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [AW-1:0] la(int page, int line);
    return AW'(page * 64 + line);
  endfunction

  function automatic level_e bank_alg_ref(int b);
    level_e m = LVL_NONE;
    for (int p = b; p < NP; p += NB) if (flags[p].valid && flags[p].level > m) m = flags[p].level;
    return m;
  endfunction

  function automatic logic [511:0] nvm_expect(logic [AW-1:0] a);
    int p = int'(a[AW-1:6]);
    level_e alg = (flags[p].level == LVL_NONE) ? LVL_NONE : bank_alg_ref(p % NB);
    return cipher_line(ref_mem[a], key_ref[p % NB], alg, 1'b1);
  endfunction

  task automatic csr(logic we, logic priv, logic [11:0] a, logic [31:0] d,
                     output logic [31:0] rd, output logic err);
    @(negedge clk);
    csr_valid = 1; csr_we = we; csr_priv = priv; csr_addr = a; csr_wdata = d;
    #1; while (!csr_ready) begin @(negedge clk); #1; end
    rd = csr_rdata; err = csr_err;
    @(posedge clk); #1 csr_valid = 0;
  endtask

  task automatic wait_idle();
    logic [31:0] rd; logic err;
    do csr(0, 1, CSR_STATUS, 0, rd, err); while (rd[1]);
  endtask

  task automatic set_flag(int p, logic v, level_e l);
    logic [31:0] rd; logic err;
    csr(1, 1, CSR_PAGE, {9'b0, 2'(l), v, 20'(p)}, rd, err);
    flags[p] = '{valid: v, level: l};
  endtask

  task automatic read_keys();
    logic [31:0] rd; logic err;
    for (int b = 0; b < NB; b++) begin
      logic [17*32-1:0] k;
      for (int w = 0; w < 17; w++) begin
        csr(0, 1, CSR_KEY_BASE + 12'(b * 32 + w), 0, rd, err);
        k[32*w +: 32] = rd;
      end
      key_ref[b] = KW'(k);
    end
  endtask

  task automatic xfer(logic we, logic [AW-1:0] a, logic [511:0] d, output logic [511:0] r);
    @(negedge clk);
    llc_req_valid = 1; llc_req_we = we; llc_req_addr = a; llc_req_data = d;
    @(posedge clk); while (!llc_req_ready) @(posedge clk);
    @(negedge clk); llc_req_valid = 0;
    while (!llc_resp_valid) @(negedge clk);
    r = llc_resp_data;
    if (we) ref_mem[a] = d;
  endtask

  function automatic logic [511:0] refv(logic [AW-1:0] a);
    if (!flags[a[AW-1:6]].valid) return '0;
    return ref_mem.exists(a) ? ref_mem[a] : '0;
  endfunction

  task automatic traffic(int n, int pages);
    logic [511:0] r;
    for (int i = 0; i < n; i++) begin
      automatic logic [AW-1:0] a = la($urandom_range(0, pages - 1), $urandom_range(0, 5));
      if (!flags[a[AW-1:6]].valid) continue;
      if ($urandom_range(0, 2) != 0) xfer(1, a, rand_line(), r);
      else if (ref_mem.exists(a)) begin
        xfer(0, a, '0, r);
        check(r == refv(a), $sformatf("read %h", a));
      end
    end
  endtask

  task automatic do_cmd(logic [2:0] c);
    logic [31:0] rd; logic err;
    csr(1, 1, CSR_CMD, 32'(c), rd, err);
    wait_idle();
  endtask

  task automatic check_nvm(string what);
    int bad = 0, leaks = 0;
    foreach (ref_mem[a]) begin
      if (nvm.peek(a) != nvm_expect(a)) bad++;
      if (flags[a[AW-1:6]].level != LVL_NONE && nvm.peek(a) == ref_mem[a]) leaks++;
      if (flags[a[AW-1:6]].level == LVL_NONE) n_plain_wr++;
    end
    check(bad == 0, $sformatf("%s: %0d NVM lines differ from reference ciphertext", what, bad));
    check(leaks == 0, $sformatf("%s: %0d plaintext lines in NVM", what, leaks));
  endtask

  task automatic boot();
    logic [31:0] rd; logic err;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do csr(0, 1, CSR_STATUS, 0, rd, err); while (!(rd[0] && rd[3]));
    for (int p = 0; p < NP; p++) flags[p] = '{valid: 1'b1, level: LVL_AES};
    read_keys();
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog: dc=%0d wb=%0d rb=%0d llc v/r=%b%b nvm v/r=%b%b ce v/r=%b%b",
             dut.u_dc.state, dut.u_wb.state, dut.u_rb.state, llc_req_valid, llc_req_ready,
             nvm_req_valid, nvm_req_ready, ce_req_valid, ce_req_ready);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd; logic err;
    logic [511:0] r;
    logic [KW-1:0] old_keys [NB];
    llc_req_valid = 0; llc_req_we = 0; llc_req_addr = 0; llc_req_data = 0;
    csr_valid = 0; csr_we = 0; csr_priv = 0; csr_addr = 0; csr_wdata = 0; disk_ready = 1;
    {n_rb_hit, n_rb_miss, n_wb_line, n_zero_fill, n_merge, n_fwd, n_drain} = '0;
    {n_dc_hit, n_dc_miss, n_dc_evict, n_bypass, n_pageout, n_stall, n_refused} = '0;
    {n_plain_wr, n_sleep, n_phase, n_reboot} = '0;

    // ---- session 1: boot, fresh keys ----
    boot();
    check(key_ref[0] != key_ref[1] && key_ref[0] != '0, "fresh per-bank keys");
    csr(0, 0, CSR_KEY_BASE, 0, rd, err);
    check(err && rd == 0, "user mode cannot read keys");
    n_refused += int'(err);
    csr(1, 0, CSR_CTRL, 1, rd, err);
    n_refused += int'(err);
    check(err, "user mode cannot switch the DRAM cache");

    // ---- differentiated flags ----
    $display("phase differentiated flags - t=%0t", $time);
    for (int p = 0; p < NP; p += NB) set_flag(p, 1, LVL_DES);   // bank 0: DES
    set_flag(1, 1, LVL_RSA);                                    // bank 1: RSA (kernel page)
    set_flag(2, 1, LVL_NONE);                                   // plaintext page in bank 2
    set_flag(7, 1, LVL_DES);                                    // weak page in AES bank 3
    csr(0, 1, CSR_BANKALG, 0, rd, err);
    check(rd[7:0] == {2'(bank_alg_ref(3)), 2'(bank_alg_ref(2)), 2'(bank_alg_ref(1)), 2'(bank_alg_ref(0))},
          $sformatf("bank algorithms %h", rd[7:0]));

    // ---- DRAM cache off: straight to NVM ----
    $display("phase DRAM cache off straig t=%0t", $time);
    traffic(120, 12);
    // repeated writes to one line: combined in the write buffer
    for (int i = 0; i < 3; i++) xfer(1, la(5, 9), rand_line(), r);
    xfer(0, la(5, 9), '0, r);
    check(r == ref_mem[la(5, 9)], "read of a just-written line");
    do_cmd(CMD_FLUSH);
    check_nvm("after flush");

    // ---- DRAM cache on ----
    $display("phase DRAM cache on t=%0t", $time);
    csr(1, 1, CSR_CTRL, 1, rd, err);
    traffic(200, 12);
    // the same line read twice: second time from DRAM
    xfer(1, la(3, 1), rand_line(), r);
    xfer(0, la(3, 1), '0, r);
    check(r == ref_mem[la(3, 1)], "DRAM cache hit");
    // turn it off again: dirty lines go down encrypted
    csr(1, 1, CSR_CTRL, 0, rd, err);
    do csr(0, 1, CSR_STATUS, 0, rd, err); while (rd[2]);
    do_cmd(CMD_FLUSH);
    check_nvm("after cache disable");

    // ---- page-out of page 1 to the drive ----
    $display("phase page-out of page 1 to  t=%0t", $time);
    begin
      int n0 = n_pageout;
      csr(1, 1, CSR_PAGEOUT, 1, rd, err);
      fork
        wait_idle();
        forever begin
          @(posedge clk);
          if (disk_valid && disk_ready && ref_mem.exists(disk_addr))
            check(disk_data == ref_mem[disk_addr], "page-out carries plaintext to the drive");
        end
      join_any
      disable fork;
      check(n_pageout - n0 == 64, "64 lines paged out");
    end

    // ---- sleep: OS saves keys, controller wipes them ----
    $display("phase sleep OS saves keys,  t=%0t", $time);
    read_keys();
    for (int b = 0; b < NB; b++) old_keys[b] = key_ref[b];
    xfer(1, la(6, 2), rand_line(), r);          // dirty data in a row buffer
    do_cmd(CMD_SLEEP);
    n_sleep++;
    csr(0, 1, CSR_STATUS, 0, rd, err);
    check(rd[0] == 0, "locked in sleep");
    csr(0, 1, CSR_KEY_BASE + 12'd32, 0, rd, err);
    check(rd == 0, "key registers cleared");
    check_nvm("in sleep");
    // a request during sleep is taken by the LLC port but reaches neither
    // the NVM nor the cipher engine until the keys are back
    @(negedge clk);
    llc_req_valid = 1; llc_req_we = 0; llc_req_addr = la(6, 2);
    @(posedge clk); while (!llc_req_ready) @(posedge clk);
    @(negedge clk); llc_req_valid = 0;
    repeat (200) begin
      @(negedge clk);
      n_stall += int'(!nvm_req_valid && !ce_req_valid && !llc_resp_valid);
    end
    check(n_stall == 200, "no memory access while keys are wiped");
    // wake: OS restores keys
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < 17; w++)
        csr(1, 1, CSR_KEY_BASE + 12'(b * 32 + w), 32'(old_keys[b] >> (32 * w)), rd, err);
    csr(1, 1, CSR_CMD, 32'(CMD_RESUME), rd, err);
    while (!llc_resp_valid) @(negedge clk);
    check(llc_resp_data == ref_mem[la(6, 2)], "data intact after sleep and resume");

    // ---- phase change
    // bank 1 drops from RSA to AES; its pages, encrypted with RSA, are now
    // garbage and the OS marks them invalid (working sets not overlapping)
    $display("phase phase change t=%0t", $time);
    for (int p = 1; p < NP; p += NB) begin
      set_flag(p, 0, LVL_AES);
      for (int l = 0; l < 64; l++) ref_mem.delete(la(p, l));
    end
    set_flag(5, 1, LVL_AES);                    // re-allocated for the new phase
    set_flag(9, 1, LVL_AES);
    n_phase++;
    csr(0, 1, CSR_BANKALG, 0, rd, err);
    check(level_e'(rd[3:2]) == LVL_AES, "bank 1 switched to the cheaper algorithm");
    xfer(0, la(1, 0), '0, r);
    check(r == '0, "invalidated page reads as zero");
    traffic(100, 12);
    do_cmd(CMD_FLUSH);
    check_nvm("after phase change");

    // ---- reboot
    // new keys, old contents unreadable
    $display("phase reboot t=%0t", $time);
    boot();
    n_reboot++;
    check(key_ref[0] != old_keys[0], "new key after reboot");
    begin
      int same = 0, n = 0;
      foreach (ref_mem[a]) if (flags[a[AW-1:6]].level != LVL_NONE && n < 20) begin
        xfer(0, a, '0, r);
        same += int'(r == ref_mem[a]);
        n++;
      end
      check(n > 0 && same == 0, "data of the old session does not decrypt");
    end

    // ---- mechanisms seen ----
    $display("phase mechanisms seen t=%0t", $time);
    check(n_rb_hit > 0, "row buffer hit");
    check(n_rb_miss > 0, "row buffer miss");
    check(n_wb_line > 0, "dirty line encrypted and written back");
    check(n_zero_fill > 0, "invalid page zero fill");
    check(n_merge > 0, "write combining");
    check(n_fwd > 0, "write buffer read forwarding");
    check(n_drain > 0, "write buffer drain");
    check(n_dc_hit > 0, "DRAM cache hit");
    check(n_dc_miss > 0, "DRAM cache miss");
    check(n_dc_evict > 0, "DRAM cache dirty eviction");
    check(n_bypass > 0, "DRAM cache bypass");
    check(n_pageout > 0, "page-out");
    check(n_stall > 0, "stall while locked");
    check(n_refused > 0, "privilege refusal");
    check(n_plain_wr > 0, "plaintext (level none) page");
    check(ce.words[LVL_DES] > 0 && ce.words[LVL_AES] > 0 && ce.words[LVL_RSA] > 0,
          "DES, AES and RSA all used");
    check(n_sleep > 0 && n_phase > 0 && n_reboot > 0, "sleep, phase change, reboot");
    $display("mechanisms: rb_hit=%0d rb_miss=%0d wb_line=%0d zero_fill=%0d merge=%0d fwd=%0d drain=%0d",
             n_rb_hit, n_rb_miss, n_wb_line, n_zero_fill, n_merge, n_fwd, n_drain);
    $display("            dc_hit=%0d dc_miss=%0d dc_evict=%0d bypass=%0d pageout=%0d stall=%0d refused=%0d",
             n_dc_hit, n_dc_miss, n_dc_evict, n_bypass, n_pageout, n_stall, n_refused);
    $display("            words DES=%0d AES=%0d RSA=%0d", ce.words[1], ce.words[2], ce.words[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
