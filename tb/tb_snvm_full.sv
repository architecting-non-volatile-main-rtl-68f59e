// tb_snvm_full: the controller at its full default size (4 GB of PCM in
// 4 KB pages over 4 banks, 128 MB DRAM cache, 521-bit keys) taken through
// one complete operation: boot with fresh keys and the table sweeps, an LLC
// write to a high address, a read of it from the open row buffer, a flush
// that encrypts the line into the NVM (checked against the reference
// ciphertext, AES by default), and a read that reopens and decrypts the page.
module tb_snvm_full;
  import snvm_pkg::*;
  import tb_ref_pkg::*;
  localparam int AW = 26, IW = 21, KW = 521;
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
  logic [IW-1:0] dr_req_idx;
  logic [511:0] dr_req_data, dr_resp_data;
  logic disk_valid, disk_ready;
  logic [AW-1:0] disk_addr;
  logic [511:0] disk_data;
  int checks = 0, failures = 0;

  snvm_top dut (.*);

  tb_cipher_model #(.KEY_W(KW)) ce (
    .clk, .req_valid(ce_req_valid), .req_ready(ce_req_ready), .req_alg(ce_req_alg),
    .req_encrypt(ce_req_encrypt), .req_key(ce_req_key), .req_data(ce_req_data),
    .resp_valid(ce_resp_valid), .resp_data(ce_resp_data));
  tb_mem_model #(.AW(AW), .RD_LAT(50), .WR_LAT(1000)) nvm (
    .clk, .req_valid(nvm_req_valid), .req_ready(nvm_req_ready), .req_we(nvm_req_we),
    .req_addr(nvm_req_addr), .req_data(nvm_req_data), .resp_valid(nvm_resp_valid),
    .resp_data(nvm_resp_data));
  tb_mem_model #(.AW(IW), .RD_LAT(10), .WR_LAT(10)) dram (
    .clk, .req_valid(dr_req_valid), .req_ready(dr_req_ready), .req_we(dr_req_we),
    .req_addr(dr_req_idx), .req_data(dr_req_data), .resp_valid(dr_resp_valid),
    .resp_data(dr_resp_data));

  always @(posedge clk) rng_data <= $urandom;
  assign rng_valid = 1'b1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic csr(logic we, logic [11:0] a, logic [31:0] d, output logic [31:0] rd);
    @(negedge clk);
    csr_valid = 1; csr_we = we; csr_priv = 1; csr_addr = a; csr_wdata = d;
    #1; while (!csr_ready) begin @(negedge clk); #1; end
    rd = csr_rdata;
    @(posedge clk); #1 csr_valid = 0;
  endtask

  task automatic xfer(logic we, logic [AW-1:0] a, logic [511:0] d, output logic [511:0] r);
    @(negedge clk);
    llc_req_valid = 1; llc_req_we = we; llc_req_addr = a; llc_req_data = d;
    @(posedge clk); while (!llc_req_ready) @(posedge clk);
    @(negedge clk); llc_req_valid = 0;
    while (!llc_resp_valid) @(negedge clk);
    r = llc_resp_data;
  endtask

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    logic [511:0] r, plain;
    logic [17*32-1:0] k;
    logic [AW-1:0] a;
    int bank;
    llc_req_valid = 0; llc_req_we = 0; llc_req_addr = 0; llc_req_data = 0;
    csr_valid = 0; csr_we = 0; csr_priv = 0; csr_addr = 0; csr_wdata = 0; disk_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do csr(0, CSR_STATUS, 0, rd); while (!(rd[0] && rd[3]));
    check(1, "booted: keys drawn, tables swept");
    a = {20'hfedcb, 6'd17};                 // page 0xfedcb, bank 3
    bank = 3;
    for (int w = 0; w < 17; w++) begin
      csr(0, CSR_KEY_BASE + 12'(bank * 32 + w), 0, rd);
      k[32*w +: 32] = rd;
    end
    csr(0, CSR_BANKALG, 0, rd);
    check(level_e'(rd[7:6]) == LVL_AES, "default algorithm AES");
    plain = rand_line();
    xfer(1, a, plain, r);
    xfer(0, a, '0, r);
    check(r == plain, "read back from the open row buffer");
    csr(1, CSR_CMD, 32'(CMD_FLUSH), rd);
    do csr(0, CSR_STATUS, 0, rd); while (rd[1]);
    check(nvm.peek(a) == cipher_line(plain, KW'(k), LVL_AES, 1'b1), "NVM holds AES ciphertext");
    check(nvm.peek(a) != plain, "no plaintext in NVM");
    xfer(0, a, '0, r);
    check(r == plain, "reopened page decrypts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
