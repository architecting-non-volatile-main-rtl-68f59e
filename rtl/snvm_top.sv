// snvm_top: self-obscuring non-volatile main memory controller.
//
// Sits between the last-level cache and a PCM main memory and makes sure no
// data reaches the non-volatile cells in plaintext, so a powered-down or
// sleeping memory holds nothing readable. Path of an LLC miss:
//
//   LLC --> dram_cache_ctrl --> write_buffer --> nvm_rowbuf_ctrl --> NVM
//           (optional plain-     (combines       (open page kept      (cipher-
//            text DRAM cache,     writes per      decrypted; crypt_    text)
//            bypassed when off)   page)           seq + cipher engine)
//
// key_store holds one fresh random key per NVM bank for each session (drawn
// at reset from the rng port), page_attr_table holds the OS's per-page
// security flags and derives each bank's algorithm, mc_csr is the privileged
// OS register interface and sequences flush, sleep and page-out. The cipher
// engine, the random source, the PCM and DRAM devices and the disk are
// outside this module; their ports are brought out (ce_*, rng_*, nvm_*,
// dr_*, disk_*). No LLC request is served by the NVM path before the tables
// are initialised and while the keys are wiped (sleep).
//
// Sizes default to the evaluated system: 4 GB PCM in 4 banks of 4 KB pages,
// 64-byte lines, 128 MB DRAM cache, keys as long as the largest (RSA 521 bit)
// key. LLC port: valid/ready request, one response per request, one request
// outstanding.
//
// rst_n is an asynchronous reset of every flop and also the disable
// condition of the handshake assertions (disable iff), which lint reports
// as a signal used both asynchronously and synchronously; the assertions
// generate no logic.
module snvm_top
  import snvm_pkg::*;
#(
  parameter int NUM_PAGES     = 1 << 20,
  parameter int NUM_BANKS     = 4,
  parameter int KEY_W         = 521,
  parameter int DC_LINES      = 1 << 21,
  parameter int WB_ENTRIES    = 8,
  parameter int DEFAULT_LEVEL = 2,
  localparam int PW = $clog2(NUM_PAGES),
  localparam int AW = PW + LPP_W,
  localparam int IW = $clog2(DC_LINES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // LLC side
  input  logic              llc_req_valid,
  output logic              llc_req_ready,
  input  logic              llc_req_we,
  input  logic [AW-1:0]     llc_req_addr,
  input  logic [LINE_W-1:0] llc_req_data,
  output logic              llc_resp_valid,
  output logic [LINE_W-1:0] llc_resp_data,
  // OS register bus
  input  logic              csr_valid,
  input  logic              csr_we,
  input  logic              csr_priv,
  input  logic [11:0]       csr_addr,
  input  logic [31:0]       csr_wdata,
  output logic              csr_ready,
  output logic [31:0]       csr_rdata,
  output logic              csr_err,
  // random source
  input  logic              rng_valid,
  input  logic [31:0]       rng_data,
  output logic              rng_ready,
  // cipher engine
  output logic              ce_req_valid,
  input  logic              ce_req_ready,
  output level_e            ce_req_alg,
  output logic              ce_req_encrypt,
  output logic [KEY_W-1:0]  ce_req_key,
  output logic [WORD_W-1:0] ce_req_data,
  input  logic              ce_resp_valid,
  input  logic [WORD_W-1:0] ce_resp_data,
  // PCM device
  output logic              nvm_req_valid,
  input  logic              nvm_req_ready,
  output logic              nvm_req_we,
  output logic [AW-1:0]     nvm_req_addr,
  output logic [LINE_W-1:0] nvm_req_data,
  input  logic              nvm_resp_valid,
  input  logic [LINE_W-1:0] nvm_resp_data,
  // DRAM cache device
  output logic              dr_req_valid,
  input  logic              dr_req_ready,
  output logic              dr_req_we,
  output logic [IW-1:0]     dr_req_idx,
  output logic [LINE_W-1:0] dr_req_data,
  input  logic              dr_resp_valid,
  input  logic [LINE_W-1:0] dr_resp_data,
  // disk (self-encrypting drive) page-out
  output logic              disk_valid,
  input  logic              disk_ready,
  output logic [AW-1:0]     disk_addr,
  output logic [LINE_W-1:0] disk_data
);
  localparam int BW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;

  line_if #(.AW(AW), .DW(LINE_W)) llc_if (.clk, .rst_n);
  line_if #(.AW(AW), .DW(LINE_W)) dc2wb  (.clk, .rst_n);
  line_if #(.AW(AW), .DW(LINE_W)) wb2rb  (.clk, .rst_n);

  assign llc_if.req_valid = llc_req_valid;
  assign llc_if.req_we    = llc_req_we;
  assign llc_if.req_addr  = llc_req_addr;
  assign llc_if.req_data  = llc_req_data;
  assign llc_req_ready    = llc_if.req_ready;
  assign llc_resp_valid   = llc_if.resp_valid;
  assign llc_resp_data    = llc_if.resp_data;

  // control
  logic dcache_en, dcache_active, dc_init_done;
  logic pat_wr_valid, pat_busy, pat_init_done;
  logic [PW-1:0] pat_wr_page;
  page_attr_t pat_wr_attr;
  level_e [NUM_BANKS-1:0] bank_alg;
  logic pa_rd_en;
  logic [PW-1:0] pa_rd_page;
  page_attr_t pa_rd_attr;
  logic key_acc_valid, key_acc_we, key_acc_priv, key_acc_err, key_clear, key_resume, keys_ok;
  logic [BW-1:0] key_acc_bank;
  logic [4:0] key_acc_word;
  logic [31:0] key_acc_wdata, key_acc_rdata;
  logic [NUM_BANKS-1:0][KEY_W-1:0] keys;
  logic dc_flush_req, dc_flush_done, wb_flush_req, wb_flush_done;
  logic rb_flush_req, rb_flush_done, rb_pageout_req, rb_pageout_done;
  logic [PW-1:0] rb_pageout_page;
  logic init_done;

  assign init_done = pat_init_done && dc_init_done;

  mc_csr #(.NUM_PAGES(NUM_PAGES), .NUM_BANKS(NUM_BANKS)) u_csr (
    .clk, .rst_n,
    .csr_valid, .csr_we, .csr_priv, .csr_addr, .csr_wdata, .csr_ready, .csr_rdata, .csr_err,
    .dcache_en, .dcache_active,
    .pat_wr_valid, .pat_wr_page, .pat_wr_attr, .pat_busy, .bank_alg,
    .key_acc_valid, .key_acc_we, .key_acc_priv, .key_acc_bank, .key_acc_word,
    .key_acc_wdata, .key_acc_rdata, .key_acc_err, .key_clear, .key_resume, .keys_ok,
    .init_done,
    .dc_flush_req, .dc_flush_done, .wb_flush_req, .wb_flush_done,
    .rb_flush_req, .rb_flush_done, .rb_pageout_req, .rb_pageout_page, .rb_pageout_done
  );

  key_store #(.NUM_BANKS(NUM_BANKS), .KEY_W(KEY_W), .RNG_W(32)) u_keys (
    .clk, .rst_n, .rng_valid, .rng_data, .rng_ready,
    .acc_valid(key_acc_valid), .acc_we(key_acc_we), .acc_priv(key_acc_priv),
    .acc_bank(key_acc_bank), .acc_word(key_acc_word), .acc_wdata(key_acc_wdata),
    .acc_rdata(key_acc_rdata), .acc_err(key_acc_err),
    .clear(key_clear), .resume(key_resume), .keys, .keys_ok
  );

  page_attr_table #(.NUM_PAGES(NUM_PAGES), .NUM_BANKS(NUM_BANKS),
                    .DEFAULT_LEVEL(DEFAULT_LEVEL)) u_pat (
    .clk, .rst_n, .init_done(pat_init_done),
    .wr_valid(pat_wr_valid), .wr_page(pat_wr_page), .wr_attr(pat_wr_attr), .busy(pat_busy),
    .rd_en(pa_rd_en), .rd_page(pa_rd_page), .rd_attr(pa_rd_attr), .bank_alg
  );

  dram_cache_ctrl #(.AW(AW), .DC_LINES(DC_LINES)) u_dc (
    .clk, .rst_n, .en(dcache_en), .active(dcache_active), .init_done(dc_init_done),
    .flush_req(dc_flush_req), .flush_done(dc_flush_done),
    .up(llc_if), .dn(dc2wb),
    .dr_req_valid, .dr_req_ready, .dr_req_we, .dr_req_idx, .dr_req_data,
    .dr_resp_valid, .dr_resp_data
  );

  write_buffer #(.AW(AW), .ENTRIES(WB_ENTRIES)) u_wb (
    .clk, .rst_n, .up(dc2wb), .dn(wb2rb),
    .flush_req(wb_flush_req), .flush_done(wb_flush_done)
  );

  nvm_rowbuf_ctrl #(.NUM_PAGES(NUM_PAGES), .NUM_BANKS(NUM_BANKS), .KEY_W(KEY_W)) u_rb (
    .clk, .rst_n, .enable(keys_ok && init_done), .up(wb2rb),
    .pa_rd_en, .pa_rd_page, .pa_rd_attr, .bank_alg, .keys,
    .flush_req(rb_flush_req), .flush_done(rb_flush_done),
    .pageout_req(rb_pageout_req), .pageout_page(rb_pageout_page),
    .pageout_done(rb_pageout_done),
    .disk_valid, .disk_ready, .disk_addr, .disk_data,
    .nvm_req_valid, .nvm_req_ready, .nvm_req_we, .nvm_req_addr, .nvm_req_data,
    .nvm_resp_valid, .nvm_resp_data,
    .ce_req_valid, .ce_req_ready, .ce_req_alg, .ce_req_encrypt, .ce_req_key,
    .ce_req_data, .ce_resp_valid, .ce_resp_data
  );
endmodule
