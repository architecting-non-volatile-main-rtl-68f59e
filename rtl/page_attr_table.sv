// page_attr_table: per-page security flags and the per-bank choice of cipher.
//
// The OS tags every NVM page with a valid bit and a security level (none,
// DES, AES, RSA). A page of level none is kept in plaintext; every other page
// of a bank is encrypted with the algorithm of the most demanding valid page
// in that bank. To know that maximum without scanning the table, the block
// keeps, per bank and per level, a count of the valid pages at that level;
// bank_alg is the highest level whose count is not zero. Pages are spread
// over banks by the low bits of the page number.
//
// After reset all pages are swept to {valid=1, level=DEFAULT_LEVEL} (one
// page per cycle, init_done rises at the end), which is the single-algorithm
// configuration. An OS write is a read-modify-write of two cycles (busy is
// high in the second), updating the counters from the old and new flags.
// The lookup port has one cycle of latency. Following the paper: per-page
// flags, encrypt-or-not per page, bank algorithm = highest demand. This
// design's choice: the counters, the bank interleaving and the reset value.
module page_attr_table
  import snvm_pkg::*;
#(
  parameter int NUM_PAGES     = 1 << 20,   // 4 GB / 4 KB
  parameter int NUM_BANKS     = 4,
  parameter int DEFAULT_LEVEL = 2          // AES
) (
  input  logic                         clk,
  input  logic                         rst_n,
  output logic                         init_done,
  // OS write
  input  logic                         wr_valid,
  input  logic [$clog2(NUM_PAGES)-1:0] wr_page,
  input  page_attr_t                   wr_attr,
  output logic                         busy,
  // lookup (1-cycle latency)
  input  logic                         rd_en,
  input  logic [$clog2(NUM_PAGES)-1:0] rd_page,
  output page_attr_t                   rd_attr,
  // bank algorithm
  output level_e [NUM_BANKS-1:0]       bank_alg
);
  localparam int PW  = $clog2(NUM_PAGES);
  localparam int BW  = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;
  localparam int CW  = $clog2(NUM_PAGES / NUM_BANKS + 1);
  localparam logic [CW-1:0] PAGES_PER_BANK = CW'(NUM_PAGES / NUM_BANKS);

  page_attr_t tbl [NUM_PAGES];
  logic [CW-1:0] cnt [NUM_BANKS][1:3];

  logic [PW-1:0] sweep;
  logic          pend;
  logic [PW-1:0] pend_page;
  page_attr_t    pend_attr, old_attr;

  assign busy = pend || !init_done;

  always_ff @(posedge clk) begin
    if (rd_en) rd_attr <= tbl[rd_page];
  end

  function automatic logic [BW-1:0] bank_of(logic [PW-1:0] p);
    return (NUM_BANKS > 1) ? BW'(p) : '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done <= 1'b0;
      sweep     <= '0;
      pend      <= 1'b0;
      pend_page <= '0;
      pend_attr <= '0;
      old_attr  <= '0;
      for (int b = 0; b < NUM_BANKS; b++)
        for (int l = 1; l <= 3; l++)
          cnt[b][l] <= (l == DEFAULT_LEVEL) ? PAGES_PER_BANK : '0;
    end else if (!init_done) begin
      tbl[sweep] <= '{valid: 1'b1, level: level_e'(DEFAULT_LEVEL)};
      sweep      <= sweep + 1'b1;
      if (32'(sweep) == NUM_PAGES - 1) init_done <= 1'b1;
    end else if (pend) begin
      tbl[pend_page] <= pend_attr;
      if (old_attr.valid && old_attr.level != LVL_NONE)
        cnt[bank_of(pend_page)][old_attr.level] <= cnt[bank_of(pend_page)][old_attr.level] - 1'b1;
      if (pend_attr.valid && pend_attr.level != LVL_NONE) begin
        if (old_attr.valid && old_attr.level == pend_attr.level)
          cnt[bank_of(pend_page)][pend_attr.level] <= cnt[bank_of(pend_page)][pend_attr.level];
        else
          cnt[bank_of(pend_page)][pend_attr.level] <= cnt[bank_of(pend_page)][pend_attr.level] + 1'b1;
      end
      pend <= 1'b0;
    end else if (wr_valid) begin
      pend      <= 1'b1;
      pend_page <= wr_page;
      pend_attr <= wr_attr;
      old_attr  <= tbl[wr_page];
    end
  end

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      bank_alg[b] = LVL_NONE;
      for (int l = 1; l <= 3; l++)
        if (cnt[b][l] != '0) bank_alg[b] = level_e'(l);
    end
  end
endmodule
