// tb_nvm_rowbuf_ctrl: checks the row buffers that keep NVM data decrypted.
// Uses the cipher and PCM models and a small page-flag table. Checks: data
// read back equals data written across page replacements; what lands in the
// NVM is the reference ciphertext of the right key and algorithm (plaintext
// for level-none pages); only dirty lines are written back; a page is
// decrypted exactly once per fill (64 lines x 8 words); an invalid page is
// zero-filled without NVM reads; flush writes back and closes; page-out
// streams the decrypted page; nothing is accepted while enable is low; the
// time of a miss matches the NVM plus cipher latency.
module tb_nvm_rowbuf_ctrl;
  import snvm_pkg::*;
  import tb_ref_pkg::*;
  localparam int NP = 64, NB = 4, KW = 521, AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  line_if #(.AW(AW)) up (.clk, .rst_n);
  logic enable;
  logic pa_rd_en;
  logic [5:0] pa_rd_page;
  page_attr_t pa_rd_attr;
  level_e [NB-1:0] bank_alg;
  logic [NB-1:0][KW-1:0] keys;
  logic flush_req, flush_done, pageout_req, pageout_done;
  logic [5:0] pageout_page;
  logic disk_valid, disk_ready;
  logic [AW-1:0] disk_addr;
  logic [511:0] disk_data;
  logic nvm_req_valid, nvm_req_ready, nvm_req_we, nvm_resp_valid;
  logic [AW-1:0] nvm_req_addr;
  logic [511:0] nvm_req_data, nvm_resp_data;
  logic ce_req_valid, ce_req_ready, ce_req_encrypt, ce_resp_valid;
  level_e ce_req_alg;
  logic [KW-1:0] ce_req_key;
  logic [63:0] ce_req_data, ce_resp_data;
  int checks = 0, failures = 0;

  nvm_rowbuf_ctrl #(.NUM_PAGES(NP), .NUM_BANKS(NB), .KEY_W(KW)) dut (.up(up.slave), .*);
  tb_cipher_model #(.KEY_W(KW)) ce (
    .clk, .req_valid(ce_req_valid), .req_ready(ce_req_ready), .req_alg(ce_req_alg),
    .req_encrypt(ce_req_encrypt), .req_key(ce_req_key), .req_data(ce_req_data),
    .resp_valid(ce_resp_valid), .resp_data(ce_resp_data));
  tb_mem_model #(.AW(AW), .RD_LAT(50), .WR_LAT(20)) nvm (
    .clk, .req_valid(nvm_req_valid), .req_ready(nvm_req_ready), .req_we(nvm_req_we),
    .req_addr(nvm_req_addr), .req_data(nvm_req_data), .resp_valid(nvm_resp_valid),
    .resp_data(nvm_resp_data));

  page_attr_t pat [NP];
  always @(posedge clk) if (pa_rd_en) pa_rd_attr <= pat[pa_rd_page];

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

  // what the NVM must hold for a line written by the test
  function automatic logic [511:0] nvm_expect(logic [AW-1:0] a);
    int p = int'(a[AW-1:6]);
    level_e alg = (pat[p].level == LVL_NONE) ? LVL_NONE
                : (bank_alg[p % NB] > pat[p].level ? bank_alg[p % NB] : pat[p].level);
    return cipher_line(ref_mem[a], keys[p % NB], alg, 1'b1);
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] r;
    int w0, r0, d0, t0, cyc;
    up.req_valid = 0; up.req_we = 0; up.req_addr = 0; up.req_data = 0;
    flush_req = 0; pageout_req = 0; pageout_page = 0; disk_ready = 1; enable = 0;
    // flags consistent with the bank choice (highest level in the bank)
    bank_alg = {LVL_AES, LVL_RSA, LVL_DES, LVL_DES};     // banks 3..0
    for (int p = 0; p < NP; p++) pat[p] = '{valid: 1'b1, level: bank_alg[p % NB]};
    pat[6].level = LVL_AES;                              // weaker flag in the RSA bank
    pat[4].level = LVL_NONE;                             // plaintext page
    pat[9].valid = 1'b0;                                 // invalid page
    for (int b = 0; b < NB; b++) keys[b] = {17{$urandom}};
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // locked: nothing accepted; the request waits and is served once enabled
    up.req_valid = 1; up.req_we = 0; up.req_addr = la(0, 3);
    repeat (5) begin @(negedge clk); check(!up.req_ready, "no request while disabled"); end
    // first touch of page 0 (bank 0, DES): miss, full page fill
    r0 = nvm.reads; d0 = ce.dec_words; t0 = $time;
    enable = 1;
    @(posedge clk); while (!up.req_ready) @(posedge clk);
    @(negedge clk); up.req_valid = 0;
    while (!up.resp_valid) @(negedge clk);
    r = up.resp_data;
    cyc = int'(($time - t0) / 10);
    check(r == cipher_line('0, keys[0], LVL_DES, 1'b0), "never-written NVM decrypts to garbage");
    check(nvm.reads - r0 == 64, "fill reads the 64 lines of the page");
    check(ce.dec_words - d0 == 512, "page decrypted once: 64 lines x 8 words");
    check(cyc >= 64 * (50 + 8 * 7) && cyc <= 64 * (56 + 8 * 12) + 10,
          $sformatf("miss latency %0d cycles", cyc));
    // hits cost no cipher work
    d0 = ce.dec_words + ce.enc_words; r0 = nvm.reads;
    for (int i = 0; i < 10; i++) xfer(1, la(0, i), rand_line(), r);
    for (int i = 0; i < 10; i++) begin
      xfer(0, la(0, i), '0, r);
      check(r == ref_mem[la(0, i)], "row buffer hit returns written data");
    end
    check(ce.dec_words + ce.enc_words == d0 && nvm.reads == r0, "hits need no NVM or cipher");
    // replace page 0 by page 4 (bank 0): 10 dirty lines written back encrypted
    w0 = nvm.writes;
    xfer(0, la(4, 0), '0, r);
    check(nvm.writes - w0 == 10, "only dirty lines written back");
    for (int i = 0; i < 10; i++)
      check(nvm.peek(la(0, i)) == nvm_expect(la(0, i)) && nvm.peek(la(0, i)) != ref_mem[la(0, i)],
            "NVM holds ciphertext of page 0 (DES bank)");
    // plaintext page 4
    xfer(1, la(4, 7), rand_line(), r);
    // RSA page 2 (bank 2), AES page 3 (bank 3), page 6 (bank 2, AES flag -> RSA bank)
    for (int i = 0; i < 4; i++) begin
      xfer(1, la(2, i), rand_line(), r);
      xfer(1, la(3, i), rand_line(), r);
      xfer(1, la(6, i + 8), rand_line(), r);
    end
    // invalid page 9 (bank 1): zero fill without reads
    r0 = nvm.reads;
    xfer(0, la(9, 1), '0, r);
    check(r == '0 && nvm.reads == r0, "invalid page zero-filled without NVM reads");
    flush();
    check(dut.rb_valid == '0, "flush closes every row buffer");
    check(nvm.peek(la(4, 7)) == ref_mem[la(4, 7)], "level-none page stored in plaintext");
    foreach (ref_mem[a]) check(nvm.peek(a) == nvm_expect(a), "NVM holds reference ciphertext");
    check(ce.words[LVL_RSA] > 0 && ce.words[LVL_AES] > 0 && ce.words[LVL_DES] > 0,
          "all three algorithms used by their banks");
    // read back everything after reopening
    foreach (ref_mem[a]) begin
      xfer(0, a, '0, r);
      check(r == ref_mem[a], "data survives encryption round trip");
    end
    // page-out of page 3 to the disk
    pageout_page = 3; pageout_req = 1;
    begin
      int n = 0;
      while (!pageout_done) begin
        @(posedge clk);
        if (disk_valid && disk_ready) begin
          if (ref_mem.exists(disk_addr))
            check(disk_data == ref_mem[disk_addr], "page-out sends plaintext");
          n++;
        end
      end
      check(n == 64, "page-out streams 64 lines");
    end
    @(negedge clk); pageout_req = 0;
    // random traffic across pages
    for (int i = 0; i < 150; i++) begin
      automatic logic [AW-1:0] a = la($urandom_range(0, 15), $urandom_range(0, 3));
      if (pat[a[AW-1:6]].valid) begin
        // a line never written holds no defined plaintext: write it first
        if ($urandom_range(0, 1) || !ref_mem.exists(a)) xfer(1, a, rand_line(), r);
        else begin
          xfer(0, a, '0, r);
          check(r == ref_mem[a], "random read");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
