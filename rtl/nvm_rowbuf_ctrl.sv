// nvm_rowbuf_ctrl: per-bank row buffers that keep NVM data decrypted.
//
// Each NVM bank has one open page (4 KB, 64 lines) in its row buffer, held
// in plaintext. A page is decrypted once, line by line, when it is brought
// into the row buffer; reads and writes to the open page then cost no
// cipher work; when another page of the bank is needed, the lines written
// while the page was open are encrypted and written back before the new page
// is fetched. Data therefore never reaches the NVM in plaintext (unless the OS
// marked the page as needing no encryption), and encryption adds no NVM
// writes beyond the ones the program caused: only dirty lines are written.
// A page the OS marked invalid is not read at all; its row buffer is filled
// with zeros. flush writes back every dirty line and closes all row buffers
// (used before sleep, when the keys are wiped). pageout opens a page and
// streams its 64 decrypted lines to the disk port, where a self-encrypting
// drive encrypts them with its own key.
//
// The cipher algorithm of a line is the bank's (page_attr_table), or none
// for a page of level none. Requests arrive on a line_if slave port and are
// served one at a time; none is accepted while enable is low (keys wiped or
// tables initialising). NVM port: valid/ready requests, reads answered by
// nvm_resp_valid. Open-page row buffers, decrypt-on-fill and encrypt on
// replacement follow the paper; per-line dirty bits, zero fill of invalid
// pages, fill order and the request protocol are this design's choices.
//
// The ev_* registers are one-cycle event strobes (hit, miss, line written
// back, zero fill) for statistics counters and tests; nothing inside reads
// them, which lint reports as unused.
module nvm_rowbuf_ctrl
  import snvm_pkg::*;
#(
  parameter int NUM_PAGES = 1 << 20,
  parameter int NUM_BANKS = 4,
  parameter int KEY_W     = 521,
  localparam int PW = $clog2(NUM_PAGES),
  localparam int AW = PW + LPP_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enable,
  line_if.slave                   up,
  // page flags
  output logic                    pa_rd_en,
  output logic [PW-1:0]           pa_rd_page,
  input  page_attr_t              pa_rd_attr,
  input  level_e [NUM_BANKS-1:0]  bank_alg,
  input  logic [NUM_BANKS-1:0][KEY_W-1:0] keys,
  // commands (held until done)
  input  logic                    flush_req,
  output logic                    flush_done,
  input  logic                    pageout_req,
  input  logic [PW-1:0]           pageout_page,
  output logic                    pageout_done,
  // disk (SED) port
  output logic                    disk_valid,
  input  logic                    disk_ready,
  output logic [AW-1:0]           disk_addr,
  output logic [LINE_W-1:0]       disk_data,
  // NVM device
  output logic                    nvm_req_valid,
  input  logic                    nvm_req_ready,
  output logic                    nvm_req_we,
  output logic [AW-1:0]           nvm_req_addr,
  output logic [LINE_W-1:0]       nvm_req_data,
  input  logic                    nvm_resp_valid,
  input  logic [LINE_W-1:0]       nvm_resp_data,
  // cipher engine
  output logic                    ce_req_valid,
  input  logic                    ce_req_ready,
  output level_e                  ce_req_alg,
  output logic                    ce_req_encrypt,
  output logic [KEY_W-1:0]        ce_req_key,
  output logic [WORD_W-1:0]       ce_req_data,
  input  logic                    ce_resp_valid,
  input  logic [WORD_W-1:0]       ce_resp_data
);
  localparam int BW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;
  localparam int NB_W = $clog2(NUM_BANKS + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_CHECK, S_WB_LOOKUP, S_WB_ATTR, S_WB_SCAN, S_WB_ENC, S_WB_WRITE,
    S_FILL_LOOKUP, S_FILL_ATTR, S_FILL_READ, S_FILL_WAIT, S_FILL_DEC,
    S_SERVE, S_PO_STREAM, S_FL_BANK, S_FL_NEXT
  } state_e;
  typedef enum logic [1:0] {OP_ACCESS, OP_PAGEOUT, OP_FLUSH} op_e;

  state_e state;
  op_e    op;

  logic [LINE_W-1:0]         rb       [NUM_BANKS][LINES_PER_PAGE];
  logic [NUM_BANKS-1:0]      rb_valid;
  logic [PW-1:0]             rb_page  [NUM_BANKS];
  logic [LINES_PER_PAGE-1:0] rb_dirty [NUM_BANKS];

  logic              req_we;
  logic [AW-1:0]     req_addr;
  logic [LINE_W-1:0] req_data;
  logic [PW-1:0]     tgt_page;
  logic [BW-1:0]     cb;            // bank being worked on
  logic [LPP_W-1:0]  li;            // line index within the page
  logic [NB_W-1:0]   fb;            // flush bank counter
  page_attr_t        attr_q;

  // events, for statistics and test
  logic ev_hit, ev_miss, ev_wb_line, ev_zero_fill;

  function automatic logic [BW-1:0] bank_of(logic [PW-1:0] p);
    return (NUM_BANKS > 1) ? BW'(p) : '0;
  endfunction

  // effective algorithm: none for a plaintext page, else the bank's choice
  // (never weaker than the page's own flag)
  function automatic level_e eff_alg(page_attr_t a, level_e b);
    if (a.level == LVL_NONE) return LVL_NONE;
    return (b > a.level) ? b : a.level;
  endfunction

  // first dirty line of the bank being written back
  logic             any_dirty;
  logic [LPP_W-1:0] first_dirty;
  always_comb begin
    any_dirty   = 1'b0;
    first_dirty = '0;
    for (int i = LINES_PER_PAGE - 1; i >= 0; i--)
      if (rb_dirty[cb][i]) begin
        any_dirty   = 1'b1;
        first_dirty = LPP_W'(i);
      end
  end

  // cipher stage
  logic              cs_start, cs_encrypt, cs_done, cs_busy;
  logic [LINE_W-1:0] cs_in, cs_out;
  level_e            cs_alg;

  crypt_seq #(.KEY_W(KEY_W)) u_crypt (
    .clk, .rst_n,
    .start(cs_start), .line_in(cs_in), .key(keys[cb]), .alg(cs_alg),
    .encrypt(cs_encrypt), .busy(cs_busy), .done(cs_done), .line_out(cs_out),
    .ce_req_valid, .ce_req_ready, .ce_req_alg, .ce_req_encrypt, .ce_req_key,
    .ce_req_data, .ce_resp_valid, .ce_resp_data
  );

  logic [LINE_W-1:0] wb_line;       // encrypted line waiting for the NVM

  assign up.req_ready = (state == S_IDLE) && enable && !flush_req && !pageout_req;

  always_comb begin
    pa_rd_en   = 1'b0;
    pa_rd_page = tgt_page;
    if (state == S_WB_LOOKUP) begin pa_rd_en = 1'b1; pa_rd_page = rb_page[cb]; end
    if (state == S_FILL_LOOKUP) pa_rd_en = 1'b1;
  end

  always_comb begin
    nvm_req_valid = (state == S_WB_WRITE) || (state == S_FILL_READ);
    nvm_req_we    = (state == S_WB_WRITE);
    nvm_req_addr  = (state == S_WB_WRITE) ? {rb_page[cb], li} : {tgt_page, li};
    nvm_req_data  = wb_line;
  end

  assign disk_valid = (state == S_PO_STREAM);
  assign disk_addr  = {tgt_page, li};
  assign disk_data  = rb[cb][li];

  always_comb begin
    cs_start   = 1'b0;
    cs_in      = rb[cb][first_dirty];
    cs_encrypt = 1'b1;
    cs_alg     = eff_alg(attr_q, bank_alg[cb]);
    if (state == S_WB_SCAN && any_dirty) cs_start = 1'b1;
    if (state == S_FILL_WAIT && nvm_resp_valid) begin
      cs_start   = 1'b1;
      cs_in      = nvm_resp_data;
      cs_encrypt = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      op             <= OP_ACCESS;
      rb_valid       <= '0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        rb_dirty[b] <= '0;
        rb_page[b]  <= '0;
      end
      req_we         <= 1'b0;
      req_addr       <= '0;
      req_data       <= '0;
      tgt_page       <= '0;
      cb             <= '0;
      li             <= '0;
      fb             <= '0;
      attr_q         <= '0;
      wb_line        <= '0;
      up.resp_valid  <= 1'b0;
      up.resp_data   <= '0;
      flush_done     <= 1'b0;
      pageout_done   <= 1'b0;
      ev_hit         <= 1'b0;
      ev_miss        <= 1'b0;
      ev_wb_line     <= 1'b0;
      ev_zero_fill   <= 1'b0;
    end else begin
      up.resp_valid <= 1'b0;
      flush_done    <= 1'b0;
      pageout_done  <= 1'b0;
      ev_hit        <= 1'b0;
      ev_miss       <= 1'b0;
      ev_wb_line    <= 1'b0;
      ev_zero_fill  <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (flush_req && !flush_done) begin
            op    <= OP_FLUSH;
            fb    <= '0;
            state <= S_FL_BANK;
          end else if (pageout_req && !pageout_done) begin
            op       <= OP_PAGEOUT;
            tgt_page <= pageout_page;
            cb       <= bank_of(pageout_page);
            state    <= S_CHECK;
          end else if (up.req_valid && enable) begin
            op       <= OP_ACCESS;
            req_we   <= up.req_we;
            req_addr <= up.req_addr;
            req_data <= up.req_data;
            tgt_page <= up.req_addr[AW-1:LPP_W];
            cb       <= bank_of(up.req_addr[AW-1:LPP_W]);
            state    <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (rb_valid[cb] && rb_page[cb] == tgt_page) begin
            if (op == OP_PAGEOUT) begin
              li    <= '0;
              state <= S_PO_STREAM;
            end else begin
              ev_hit <= 1'b1;
              state  <= S_SERVE;
            end
          end else begin
            if (op == OP_ACCESS) ev_miss <= 1'b1;
            state <= (rb_valid[cb] && (|rb_dirty[cb])) ? S_WB_LOOKUP : S_FILL_LOOKUP;
          end
        end
        // ---- write back the dirty lines of the open page, encrypted ----
        S_WB_LOOKUP: state <= S_WB_ATTR;
        S_WB_ATTR: begin
          attr_q <= pa_rd_attr;
          state  <= S_WB_SCAN;
        end
        S_WB_SCAN: begin
          if (any_dirty) begin
            li    <= first_dirty;
            state <= S_WB_ENC;
          end else if (op == OP_FLUSH) begin
            rb_valid[cb] <= 1'b0;
            state        <= S_FL_NEXT;
          end else begin
            state <= S_FILL_LOOKUP;
          end
        end
        S_WB_ENC: if (cs_done) begin
          wb_line <= cs_out;
          state   <= S_WB_WRITE;
        end
        S_WB_WRITE: if (nvm_req_ready) begin
          rb_dirty[cb][li] <= 1'b0;
          ev_wb_line       <= 1'b1;
          state            <= S_WB_SCAN;
        end
        // ---- bring the requested page in, decrypted ----
        S_FILL_LOOKUP: begin
          rb_valid[cb] <= 1'b0;
          state        <= S_FILL_ATTR;
        end
        S_FILL_ATTR: begin
          attr_q <= pa_rd_attr;
          li     <= '0;
          if (!pa_rd_attr.valid) begin
            for (int i = 0; i < LINES_PER_PAGE; i++) rb[cb][i] <= '0;
            rb_valid[cb] <= 1'b1;
            rb_page[cb]  <= tgt_page;
            rb_dirty[cb] <= '0;
            ev_zero_fill <= 1'b1;
            state        <= S_CHECK;
          end else begin
            state <= S_FILL_READ;
          end
        end
        S_FILL_READ: if (nvm_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (nvm_resp_valid) state <= S_FILL_DEC;
        S_FILL_DEC: if (cs_done) begin
          rb[cb][li] <= cs_out;
          if (li == LPP_W'(LINES_PER_PAGE - 1)) begin
            rb_valid[cb] <= 1'b1;
            rb_page[cb]  <= tgt_page;
            rb_dirty[cb] <= '0;
            state        <= S_CHECK;
          end else begin
            li    <= li + 1'b1;
            state <= S_FILL_READ;
          end
        end
        // ---- serve the request from the open page ----
        S_SERVE: begin
          if (req_we) begin
            rb[cb][req_addr[LPP_W-1:0]]       <= req_data;
            rb_dirty[cb][req_addr[LPP_W-1:0]] <= 1'b1;
          end
          up.resp_data  <= rb[cb][req_addr[LPP_W-1:0]];
          up.resp_valid <= 1'b1;
          state         <= S_IDLE;
        end
        // ---- page-out: hand the decrypted page to the drive ----
        S_PO_STREAM: if (disk_ready) begin
          if (li == LPP_W'(LINES_PER_PAGE - 1)) begin
            pageout_done <= 1'b1;
            state        <= S_IDLE;
          end
          li <= li + 1'b1;
        end
        // ---- flush: write back and close every row buffer ----
        S_FL_BANK: begin
          cb <= BW'(fb);
          if (rb_valid[BW'(fb)]) begin
            state <= (|rb_dirty[BW'(fb)]) ? S_WB_LOOKUP : S_FL_NEXT;
            if (!(|rb_dirty[BW'(fb)])) rb_valid[BW'(fb)] <= 1'b0;
          end else begin
            state <= S_FL_NEXT;
          end
        end
        S_FL_NEXT: begin
          if (32'(fb) == NUM_BANKS - 1) begin
            flush_done <= 1'b1;
            state      <= S_IDLE;
          end else begin
            fb    <= fb + 1'b1;
            state <= S_FL_BANK;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A write back never starts a new cipher job while one is running.
  a_cs_free: assert property (@(posedge clk) disable iff (!rst_n) cs_start |-> !cs_busy);
endmodule
