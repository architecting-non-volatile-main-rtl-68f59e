// write_buffer: page-combining write buffer in front of the NVM row buffers.
//
// Writes arriving for the NVM are parked here so that writes to the same
// page can be applied together while the page is open in its row buffer,
// instead of opening (decrypting) and closing (encrypting) the page once per
// write. A write to a line already held overwrites that entry. Entries leave
// in page groups: the buffer picks a page (that of the lowest-numbered
// entry) and sends every entry of that page before choosing another.
// Draining starts when DRAIN_THRESH entries are held, when a write finds the
// buffer full, after IDLE_DRAIN cycles without requests, or on flush (held
// until flush_done; no new requests are taken meanwhile). A read that hits
// the buffer is answered from it, the next cycle; other reads pass
// downstream. One downstream transaction is outstanding at a time.
//
// The paper asks only for a write buffer that combines writes of one page;
// the entry count, line-granular entries, drain triggers and page-group
// order are this design's choices.
//
// The ev_* registers are one-cycle event strobes (merge, forward, drain) for
// statistics counters and tests; nothing inside reads them, which lint
// reports as unused.
module write_buffer
  import snvm_pkg::*;
#(
  parameter int AW           = 26,
  parameter int ENTRIES      = 8,
  parameter int DRAIN_THRESH = ENTRIES / 2,
  parameter int IDLE_DRAIN   = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  line_if.slave  up,
  line_if.master dn,
  input  logic  flush_req,
  output logic  flush_done
);
  localparam int EW = $clog2(ENTRIES);
  localparam int PW = AW - LPP_W;

  logic [ENTRIES-1:0] v;
  logic [AW-1:0]      la [ENTRIES];
  logic [LINE_W-1:0]  d  [ENTRIES];

  typedef enum logic [1:0] {S_IDLE, S_RD_DOWN, S_WR_DOWN} state_e;
  state_e state;

  logic [PW-1:0] drain_page;
  logic [EW-1:0] drain_idx;
  logic [$clog2(IDLE_DRAIN+1)-1:0] idle_cnt;
  logic [$clog2(ENTRIES+1)-1:0] count;

  // events, for statistics and test
  logic ev_merge, ev_fwd, ev_drain;

  // lookup of the incoming address
  logic hit, has_free;
  logic [EW-1:0] hit_idx, free_idx;
  always_comb begin
    hit = 1'b0; hit_idx = '0; has_free = 1'b0; free_idx = '0;
    count = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (v[i] && la[i] == up.req_addr) begin hit = 1'b1; hit_idx = EW'(i); end
      if (!v[i]) begin has_free = 1'b1; free_idx = EW'(i); end
    end
    for (int i = 0; i < ENTRIES; i++) count = count + v[i];
  end

  // choice of the next entry to drain: same page first
  logic          same_found;
  logic [EW-1:0] same_idx, first_idx;
  always_comb begin
    same_found = 1'b0; same_idx = '0; first_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (v[i] && la[i][AW-1:LPP_W] == drain_page) begin same_found = 1'b1; same_idx = EW'(i); end
      if (v[i]) first_idx = EW'(i);
    end
  end

  logic take_read, take_write, blocked_write, want_drain;
  always_comb begin
    take_read     = up.req_valid && !up.req_we;
    take_write    = up.req_valid && up.req_we && (hit || has_free);
    blocked_write = up.req_valid && up.req_we && !hit && !has_free;
    want_drain    = (count != '0) &&
                    (flush_req || blocked_write || 32'(count) >= DRAIN_THRESH ||
                     32'(idle_cnt) >= IDLE_DRAIN);
  end

  assign up.req_ready = (state == S_IDLE) && !flush_req && (take_read || take_write);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v             <= '0;
      for (int i = 0; i < ENTRIES; i++) begin la[i] <= '0; d[i] <= '0; end
      state         <= S_IDLE;
      drain_page    <= '0;
      drain_idx     <= '0;
      idle_cnt      <= '0;
      up.resp_valid <= 1'b0;
      up.resp_data  <= '0;
      dn.req_valid  <= 1'b0;
      dn.req_we     <= 1'b0;
      dn.req_addr   <= '0;
      dn.req_data   <= '0;
      flush_done    <= 1'b0;
      ev_merge      <= 1'b0;
      ev_fwd        <= 1'b0;
      ev_drain      <= 1'b0;
    end else begin
      up.resp_valid <= 1'b0;
      flush_done    <= 1'b0;
      ev_merge      <= 1'b0;
      ev_fwd        <= 1'b0;
      ev_drain      <= 1'b0;
      if (dn.req_valid && dn.req_ready) dn.req_valid <= 1'b0;
      if (up.req_valid) idle_cnt <= '0;
      else if (32'(idle_cnt) < IDLE_DRAIN) idle_cnt <= idle_cnt + 1'b1;

      unique case (state)
        S_IDLE: begin
          if (up.req_ready && take_write) begin
            if (hit) begin
              d[hit_idx] <= up.req_data;
              ev_merge   <= 1'b1;
            end else begin
              v[free_idx]  <= 1'b1;
              la[free_idx] <= up.req_addr;
              d[free_idx]  <= up.req_data;
            end
            up.resp_valid <= 1'b1;
          end else if (up.req_ready && take_read && hit) begin
            up.resp_data  <= d[hit_idx];
            up.resp_valid <= 1'b1;
            ev_fwd        <= 1'b1;
          end else if (up.req_ready && take_read) begin
            dn.req_valid <= 1'b1;
            dn.req_we    <= 1'b0;
            dn.req_addr  <= up.req_addr;
            state        <= S_RD_DOWN;
          end else if (want_drain) begin
            drain_idx    <= same_found ? same_idx : first_idx;
            drain_page   <= same_found ? drain_page : la[first_idx][AW-1:LPP_W];
            dn.req_valid <= 1'b1;
            dn.req_we    <= 1'b1;
            dn.req_addr  <= la[same_found ? same_idx : first_idx];
            dn.req_data  <= d[same_found ? same_idx : first_idx];
            state        <= S_WR_DOWN;
          end else if (flush_req && !flush_done) begin
            flush_done <= 1'b1;     // nothing left to drain
          end
        end
        S_RD_DOWN: if (dn.resp_valid) begin
          up.resp_data  <= dn.resp_data;
          up.resp_valid <= 1'b1;
          state         <= S_IDLE;
        end
        S_WR_DOWN: if (dn.resp_valid) begin
          v[drain_idx] <= 1'b0;
          ev_drain     <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_dup: assert property (@(posedge clk) disable iff (!rst_n)
    up.req_valid && up.req_ready && up.req_we && !hit |-> has_free);
endmodule
