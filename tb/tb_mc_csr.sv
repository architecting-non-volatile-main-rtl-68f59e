// tb_mc_csr: checks the OS register interface. The data-path children are
// replaced by small responders that answer each held request with a done
// pulse after a few cycles and log the order. Checks: user-mode accesses are
// refused without effect; CTRL, STATUS, BANKALG read back; page flags and
// key words are forwarded; flush runs DRAM cache, write buffer, row buffers
// in that order; sleep adds the key wipe after them; resume unlocks; a
// page-out flushes first and then asks the row buffers for the page; a new
// command is held off while one runs.
module tb_mc_csr;
  import snvm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic csr_valid, csr_we, csr_priv, csr_ready, csr_err;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic dcache_en, dcache_active;
  logic pat_wr_valid, pat_busy;
  logic [19:0] pat_wr_page;
  page_attr_t pat_wr_attr;
  level_e [3:0] bank_alg;
  logic key_acc_valid, key_acc_we, key_acc_priv, key_acc_err, key_clear, key_resume, keys_ok, init_done;
  logic [1:0] key_acc_bank;
  logic [4:0] key_acc_word;
  logic [31:0] key_acc_wdata, key_acc_rdata;
  logic dc_flush_req, dc_flush_done, wb_flush_req, wb_flush_done;
  logic rb_flush_req, rb_flush_done, rb_pageout_req, rb_pageout_done;
  logic [19:0] rb_pageout_page;
  int checks = 0, failures = 0;
  string log_s;

  mc_csr #(.NUM_PAGES(1 << 20), .NUM_BANKS(4)) dut (.*);

  // responders
  task automatic responder(ref logic req, ref logic done, input string name);
    forever begin
      done = 0;
      @(posedge clk);
      if (req) begin
        repeat (3) @(posedge clk);
        #1 done = 1; log_s = {log_s, name, " "};
        @(posedge clk); #1 done = 0;
        @(posedge clk);
      end
    end
  endtask
  initial fork
    responder(dc_flush_req, dc_flush_done, "dc");
    responder(wb_flush_req, wb_flush_done, "wb");
    responder(rb_flush_req, rb_flush_done, "rb");
    responder(rb_pageout_req, rb_pageout_done, "po");
  join_none
  always @(posedge clk) if (key_clear) log_s = {log_s, "clear "};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic acc(logic we, logic priv, logic [11:0] a, logic [31:0] d,
                     output logic [31:0] rd, output logic err);
    @(negedge clk);
    csr_valid = 1; csr_we = we; csr_priv = priv; csr_addr = a; csr_wdata = d;
    #1; while (!csr_ready) begin @(negedge clk); #1; end
    rd = csr_rdata; err = csr_err;
    @(posedge clk); #1 csr_valid = 0;
  endtask

  task automatic wait_idle();
    logic [31:0] rd; logic err;
    do acc(0, 1, CSR_STATUS, 0, rd, err); while (rd[1]);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd; logic err;
    csr_valid = 0; csr_we = 0; csr_priv = 0; csr_addr = 0; csr_wdata = 0;
    dcache_active = 0; pat_busy = 0; keys_ok = 1; init_done = 1;
    bank_alg = {LVL_AES, LVL_RSA, LVL_NONE, LVL_DES};
    key_acc_rdata = 32'h1234_5678; key_acc_err = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // user mode refused
    acc(1, 0, CSR_CTRL, 1, rd, err);
    check(err && !dcache_en, "user write to CTRL refused");
    acc(0, 0, CSR_STATUS, 0, rd, err);
    check(err && rd == 0, "user read refused");
    acc(1, 0, CSR_CMD, CMD_SLEEP, rd, err);
    repeat (3) @(negedge clk);
    check(err && !dc_flush_req, "user command refused");
    // CTRL
    acc(1, 1, CSR_CTRL, 1, rd, err);
    check(!err && dcache_en, "DRAM cache enabled by OS");
    acc(0, 1, CSR_CTRL, 0, rd, err);
    check(rd == 1, "CTRL reads back");
    acc(0, 1, CSR_BANKALG, 0, rd, err);
    check(rd[7:0] == {2'd2, 2'd3, 2'd0, 2'd1}, "BANKALG");
    acc(0, 1, CSR_STATUS, 0, rd, err);
    check(rd[3:0] == 4'b1001, "STATUS");
    // page flags
    fork
      acc(1, 1, CSR_PAGE, {9'b0, 2'd3, 1'b1, 20'h0abcd}, rd, err);
      begin
        @(posedge clk iff pat_wr_valid);
        check(pat_wr_page == 20'h0abcd && pat_wr_attr.valid && pat_wr_attr.level == LVL_RSA,
              "page flag forwarded");
      end
    join
    // keys
    fork
      acc(0, 1, CSR_KEY_BASE + 12'd32*2 + 12'd5, 0, rd, err);
      begin
        @(posedge clk iff key_acc_valid);
        check(key_acc_bank == 2 && key_acc_word == 5 && !key_acc_we, "key address decoded");
      end
    join
    check(rd == 32'h1234_5678, "key word read");
    // flush order
    log_s = "";
    acc(1, 1, CSR_CMD, CMD_FLUSH, rd, err);
    wait_idle();
    check(log_s == "dc wb rb ", {"flush order: ", log_s});
    // sleep
    log_s = "";
    acc(1, 1, CSR_CMD, CMD_SLEEP, rd, err);
    acc(1, 1, CSR_CMD, CMD_FLUSH, rd, err);   // held off until sleep is done
    check(log_s == "dc wb rb clear ", {"sleep order: ", log_s});
    wait_idle();
    // resume
    fork
      acc(1, 1, CSR_CMD, CMD_RESUME, rd, err);
      begin @(posedge clk iff key_resume); check(1, "resume pulse"); end
    join
    // page-out
    log_s = "";
    acc(1, 1, CSR_PAGEOUT, 32'h77, rd, err);
    wait_idle();
    check(log_s == "dc wb rb po " && rb_pageout_page == 20'h77, {"page-out: ", log_s});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
