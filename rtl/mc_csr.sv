// mc_csr: privileged OS interface of the memory controller and its command
// sequencer.
//
// All registers may only be touched in privileged mode; any other access is
// answered with err and has no effect. Through them the OS turns the DRAM
// buffer cache on or off, tags pages with their security flags, saves and
// restores the session keys around sleep, and starts three commands:
//   flush   - write back the DRAM cache, drain the write buffer, write back
//             and close the row buffers (in that order, so the data moves
//             down the hierarchy and is encrypted on its way into the NVM);
//   sleep   - flush, then wipe the key registers (the controller stays
//             locked until resume);
//   resume  - the OS has written the keys back: unlock;
// and a page-out (write the page number to PAGEOUT): flush, then stream the
// page decrypted to the disk port for a self-encrypting drive.
// Map (word addresses, snvm_pkg): CTRL, STATUS, CMD, PAGE, PAGEOUT, BANKALG,
// KEY_BASE + bank*32 + word. A bus access completes in the cycle csr_ready
// is high; rdata/err are valid in that cycle. Commands are refused
// (csr_ready low) while one is running, and a BANKALG read waits for a page
// flag update to settle; each child's request is held until
// its done pulse. The register map and the sequencing order are this
// design's; the privileged access, the OS control of the DRAM cache, the
// clearing of keys on sleep and the page flags come from the paper.
module mc_csr
  import snvm_pkg::*;
#(
  parameter int NUM_PAGES = 1 << 20,
  parameter int NUM_BANKS = 4,
  localparam int PW = $clog2(NUM_PAGES),
  localparam int BW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // CSR bus
  input  logic        csr_valid,
  input  logic        csr_we,
  input  logic        csr_priv,
  input  logic [11:0] csr_addr,
  input  logic [31:0] csr_wdata,
  output logic        csr_ready,
  output logic [31:0] csr_rdata,
  output logic        csr_err,
  // DRAM cache control
  output logic        dcache_en,
  input  logic        dcache_active,
  // page flags
  output logic        pat_wr_valid,
  output logic [PW-1:0] pat_wr_page,
  output page_attr_t  pat_wr_attr,
  input  logic        pat_busy,
  input  level_e [NUM_BANKS-1:0] bank_alg,
  // key store
  output logic        key_acc_valid,
  output logic        key_acc_we,
  output logic        key_acc_priv,
  output logic [BW-1:0] key_acc_bank,
  output logic [4:0]  key_acc_word,
  output logic [31:0] key_acc_wdata,
  input  logic [31:0] key_acc_rdata,
  input  logic        key_acc_err,
  output logic        key_clear,
  output logic        key_resume,
  input  logic        keys_ok,
  input  logic        init_done,
  // sequencing of the data path
  output logic        dc_flush_req,
  input  logic        dc_flush_done,
  output logic        wb_flush_req,
  input  logic        wb_flush_done,
  output logic        rb_flush_req,
  input  logic        rb_flush_done,
  output logic        rb_pageout_req,
  output logic [PW-1:0] rb_pageout_page,
  input  logic        rb_pageout_done
);
  typedef enum logic [2:0] {SQ_IDLE, SQ_DC, SQ_WB, SQ_RB, SQ_PO, SQ_CLEAR} seq_e;
  seq_e seq;
  logic after_sleep, after_pageout;

  logic is_key, is_cmd;
  logic [11:0] key_off;
  assign key_off = csr_addr - CSR_KEY_BASE;
  assign is_key  = (csr_addr >= CSR_KEY_BASE) && (32'(key_off) < NUM_BANKS * 32);
  assign is_cmd  = csr_we && (csr_addr == CSR_CMD || csr_addr == CSR_PAGEOUT);

  always_comb begin
    csr_ready = 1'b1;
    if (is_cmd && seq != SQ_IDLE) csr_ready = 1'b0;
    if (csr_addr == CSR_PAGE && csr_we && pat_busy) csr_ready = 1'b0;
    if (csr_addr == CSR_BANKALG && !csr_we && pat_busy) csr_ready = 1'b0;
  end

  logic acc;
  assign acc = csr_valid && csr_ready;

  assign key_acc_valid = acc && is_key;
  assign key_acc_we    = csr_we;
  assign key_acc_priv  = csr_priv;
  assign key_acc_bank  = BW'(key_off[11:5]);
  assign key_acc_word  = key_off[4:0];
  assign key_acc_wdata = csr_wdata;

  assign pat_wr_valid = acc && csr_priv && csr_we && csr_addr == CSR_PAGE;
  assign pat_wr_page  = csr_wdata[PW-1:0];
  assign pat_wr_attr  = '{valid: csr_wdata[20], level: level_e'(csr_wdata[22:21])};

  always_comb begin
    csr_rdata = '0;
    csr_err   = 1'b0;
    if (acc) begin
      if (is_key) begin
        csr_rdata = key_acc_rdata;
        csr_err   = key_acc_err;
      end else if (!csr_priv) begin
        csr_err = 1'b1;
      end else if (!csr_we) begin
        unique case (csr_addr)
          CSR_CTRL:    csr_rdata = {31'b0, dcache_en};
          CSR_STATUS:  csr_rdata = {28'b0, init_done, dcache_active, seq != SQ_IDLE, keys_ok};
          CSR_BANKALG: for (int b = 0; b < NUM_BANKS; b++) csr_rdata[2*b +: 2] = bank_alg[b];
          default:     csr_err = 1'b1;
        endcase
      end else if (!(csr_addr inside {CSR_CTRL, CSR_CMD, CSR_PAGE, CSR_PAGEOUT})) begin
        csr_err = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcache_en       <= 1'b0;
      seq             <= SQ_IDLE;
      after_sleep     <= 1'b0;
      after_pageout   <= 1'b0;
      dc_flush_req    <= 1'b0;
      wb_flush_req    <= 1'b0;
      rb_flush_req    <= 1'b0;
      rb_pageout_req  <= 1'b0;
      rb_pageout_page <= '0;
      key_clear       <= 1'b0;
      key_resume      <= 1'b0;
    end else begin
      key_clear  <= 1'b0;
      key_resume <= 1'b0;
      if (acc && csr_priv && csr_we) begin
        if (csr_addr == CSR_CTRL) dcache_en <= csr_wdata[0];
        if (csr_addr == CSR_CMD) begin
          if (csr_wdata[2:0] == CMD_RESUME) key_resume <= 1'b1;
          else if (csr_wdata[2:0] == CMD_FLUSH || csr_wdata[2:0] == CMD_SLEEP) begin
            after_sleep   <= csr_wdata[2:0] == CMD_SLEEP;
            after_pageout <= 1'b0;
            dc_flush_req  <= 1'b1;
            seq           <= SQ_DC;
          end
        end
        if (csr_addr == CSR_PAGEOUT) begin
          rb_pageout_page <= csr_wdata[PW-1:0];
          after_sleep     <= 1'b0;
          after_pageout   <= 1'b1;
          dc_flush_req    <= 1'b1;
          seq             <= SQ_DC;
        end
      end
      unique case (seq)
        SQ_DC: if (dc_flush_done) begin
          dc_flush_req <= 1'b0;
          wb_flush_req <= 1'b1;
          seq          <= SQ_WB;
        end
        SQ_WB: if (wb_flush_done) begin
          wb_flush_req <= 1'b0;
          rb_flush_req <= 1'b1;
          seq          <= SQ_RB;
        end
        SQ_RB: if (rb_flush_done) begin
          rb_flush_req <= 1'b0;
          if (after_pageout) begin
            rb_pageout_req <= 1'b1;
            seq            <= SQ_PO;
          end else if (after_sleep) begin
            seq <= SQ_CLEAR;
          end else begin
            seq <= SQ_IDLE;
          end
        end
        SQ_PO: if (rb_pageout_done) begin
          rb_pageout_req <= 1'b0;
          seq            <= SQ_IDLE;
        end
        SQ_CLEAR: begin
          key_clear <= 1'b1;
          seq       <= SQ_IDLE;
        end
        default: ;
      endcase
    end
  end
endmodule
