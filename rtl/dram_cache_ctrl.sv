// dram_cache_ctrl: controller of the optional DRAM buffer cache in front of
// the encrypted NVM.
//
// The DRAM buffer cache keeps the working set in plaintext, so that hits
// cost neither an NVM access nor a decryption. DRAM is volatile, so its
// contents vanish at power down like ordinary DRAM main memory. The OS turns
// the cache on or off through en, e.g. from hardware counters of memory
// traffic: when it is off, every request bypasses it and goes straight to the
// NVM path. Turning it off first writes every dirty line back to the NVM path
// and invalidates all lines (the same walk as flush, which the OS uses before
// sleep); turning it on is immediate because the cache is then empty.
//
// Organisation (this design's choice, the paper gives only the size): direct
// mapped, one 64-byte line per entry, write-back, write-allocate without a
// fetch (LLC writes are whole lines). Tags live in an on-chip array with a
// one-cycle read; data lives in the external DRAM (dr_* port: valid/ready
// requests, reads answered by dr_resp_valid). After reset all tags are
// invalidated, one per cycle; the flush walk takes three cycles per clean
// line. One request is served at a time.
//
// The ev_* registers are one-cycle event strobes (hit, miss, eviction,
// bypass) for statistics counters and tests; nothing inside reads them,
// which lint reports as unused.
module dram_cache_ctrl
  import snvm_pkg::*;
#(
  parameter int AW       = 26,
  parameter int DC_LINES = 1 << 21,   // 128 MB / 64 B
  localparam int IW = $clog2(DC_LINES)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  output logic  active,
  output logic  init_done,
  input  logic  flush_req,
  output logic  flush_done,
  line_if.slave  up,
  line_if.master dn,
  // DRAM device
  output logic              dr_req_valid,
  input  logic              dr_req_ready,
  output logic              dr_req_we,
  output logic [IW-1:0]     dr_req_idx,
  output logic [LINE_W-1:0] dr_req_data,
  input  logic              dr_resp_valid,
  input  logic [LINE_W-1:0] dr_resp_data
);
  localparam int TW = AW - IW;

  typedef struct packed {
    logic          valid;
    logic          dirty;
    logic [TW-1:0] tag;
  } tag_t;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_BYP, S_LOOK, S_HIT_RD, S_EV_RD, S_EV_DN, S_MISS_DN,
    S_FILL, S_WR, S_FL_LOOK, S_FL_CHK, S_FL_RD, S_FL_DN, S_FL_NEXT
  } state_e;
  state_e state;

  tag_t              tags [DC_LINES];
  tag_t              tag_q;
  logic              tag_rd;
  logic [IW-1:0]     tag_ridx;
  logic [IW-1:0]     sweep;
  logic              req_we;
  logic [AW-1:0]     req_addr;
  logic [LINE_W-1:0] req_data;
  logic [LINE_W-1:0] line_q;
  logic              fl_disable;

  // events, for statistics and test
  logic ev_hit, ev_miss, ev_evict, ev_bypass;

  logic [IW-1:0] idx;
  logic [TW-1:0] tg;
  assign idx = req_addr[IW-1:0];
  assign tg  = req_addr[AW-1:IW];

  always_ff @(posedge clk) begin
    if (tag_rd) tag_q <= tags[tag_ridx];
  end

  always_comb begin
    tag_rd   = 1'b0;
    tag_ridx = up.req_addr[IW-1:0];
    if (state == S_IDLE && up.req_valid && active) tag_rd = 1'b1;
    if (state == S_FL_LOOK) begin tag_rd = 1'b1; tag_ridx = sweep; end
  end

  assign up.req_ready = (state == S_IDLE) && init_done && !flush_req &&
                        !(active && !en);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_INIT;
      sweep         <= '0;
      init_done     <= 1'b0;
      active        <= 1'b0;
      req_we        <= 1'b0;
      req_addr      <= '0;
      req_data      <= '0;
      line_q        <= '0;
      dr_req_valid  <= 1'b0;
      dr_req_we     <= 1'b0;
      dr_req_idx    <= '0;
      dr_req_data   <= '0;
      dn.req_valid  <= 1'b0;
      dn.req_we     <= 1'b0;
      dn.req_addr   <= '0;
      dn.req_data   <= '0;
      up.resp_valid <= 1'b0;
      up.resp_data  <= '0;
      flush_done    <= 1'b0;
      fl_disable    <= 1'b0;
      {ev_hit, ev_miss, ev_evict, ev_bypass} <= '0;
    end else begin
      up.resp_valid <= 1'b0;
      flush_done    <= 1'b0;
      {ev_hit, ev_miss, ev_evict, ev_bypass} <= '0;
      if (dr_req_valid && dr_req_ready) dr_req_valid <= 1'b0;
      if (dn.req_valid && dn.req_ready) dn.req_valid <= 1'b0;

      unique case (state)
        S_INIT: begin
          tags[sweep] <= '0;
          sweep       <= sweep + 1'b1;
          if (32'(sweep) == DC_LINES - 1) begin
            init_done <= 1'b1;
            state     <= S_IDLE;
          end
        end
        S_IDLE: begin
          if (flush_req && !active) begin
            if (!flush_done) flush_done <= 1'b1;   // empty: nothing to write back
          end else if ((flush_req && !flush_done) || (active && !en)) begin
            fl_disable <= !flush_req;
            sweep      <= '0;
            state      <= S_FL_LOOK;
          end else if (up.req_valid && init_done) begin
            req_we   <= up.req_we;
            req_addr <= up.req_addr;
            req_data <= up.req_data;
            if (active) state <= S_LOOK;
            else begin
              dn.req_valid <= 1'b1;
              dn.req_we    <= up.req_we;
              dn.req_addr  <= up.req_addr;
              dn.req_data  <= up.req_data;
              ev_bypass    <= 1'b1;
              state        <= S_BYP;
            end
          end else if (!active && en && init_done) begin
            active <= 1'b1;
          end
        end
        S_BYP: if (dn.resp_valid) begin
          up.resp_data  <= dn.resp_data;
          up.resp_valid <= 1'b1;
          state         <= S_IDLE;
        end
        S_LOOK: begin
          if (tag_q.valid && tag_q.tag == tg) begin
            ev_hit <= 1'b1;
            if (req_we) begin
              dr_req_valid <= 1'b1; dr_req_we <= 1'b1;
              dr_req_idx   <= idx;  dr_req_data <= req_data;
              tags[idx]    <= '{valid: 1'b1, dirty: 1'b1, tag: tg};
              state        <= S_WR;
            end else begin
              dr_req_valid <= 1'b1; dr_req_we <= 1'b0; dr_req_idx <= idx;
              state        <= S_HIT_RD;
            end
          end else begin
            ev_miss <= 1'b1;
            if (tag_q.valid && tag_q.dirty) begin
              dr_req_valid <= 1'b1; dr_req_we <= 1'b0; dr_req_idx <= idx;
              ev_evict     <= 1'b1;
              state        <= S_EV_RD;
            end else begin
              state <= S_MISS_DN;
              if (!req_we) begin
                dn.req_valid <= 1'b1; dn.req_we <= 1'b0; dn.req_addr <= req_addr;
              end
            end
          end
        end
        S_HIT_RD: if (dr_resp_valid) begin
          up.resp_data  <= dr_resp_data;
          up.resp_valid <= 1'b1;
          state         <= S_IDLE;
        end
        // victim line: DRAM -> NVM path
        S_EV_RD: if (dr_resp_valid) begin
          dn.req_valid <= 1'b1; dn.req_we <= 1'b1;
          dn.req_addr  <= {tag_q.tag, idx};
          dn.req_data  <= dr_resp_data;
          state        <= S_EV_DN;
        end
        S_EV_DN: if (dn.resp_valid) begin
          state <= S_MISS_DN;
          if (!req_we) begin
            dn.req_valid <= 1'b1; dn.req_we <= 1'b0; dn.req_addr <= req_addr;
          end
        end
        S_MISS_DN: begin
          if (req_we) begin
            // whole-line write: allocate without fetching
            dr_req_valid <= 1'b1; dr_req_we <= 1'b1;
            dr_req_idx   <= idx;  dr_req_data <= req_data;
            tags[idx]    <= '{valid: 1'b1, dirty: 1'b1, tag: tg};
            state        <= S_WR;
          end else if (dn.resp_valid) begin
            line_q       <= dn.resp_data;
            dr_req_valid <= 1'b1; dr_req_we <= 1'b1;
            dr_req_idx   <= idx;  dr_req_data <= dn.resp_data;
            tags[idx]    <= '{valid: 1'b1, dirty: 1'b0, tag: tg};
            state        <= S_FILL;
          end
        end
        S_FILL: if (!dr_req_valid) begin
          up.resp_data  <= line_q;
          up.resp_valid <= 1'b1;
          state         <= S_IDLE;
        end
        S_WR: if (!dr_req_valid) begin
          up.resp_valid <= 1'b1;
          state         <= S_IDLE;
        end
        // flush / disable: write back dirty lines, invalidate all
        S_FL_LOOK: state <= S_FL_CHK;
        S_FL_CHK: begin
          if (tag_q.valid && tag_q.dirty) begin
            dr_req_valid <= 1'b1; dr_req_we <= 1'b0; dr_req_idx <= sweep;
            ev_evict     <= 1'b1;
            state        <= S_FL_RD;
          end else begin
            tags[sweep] <= '0;
            state       <= S_FL_NEXT;
          end
        end
        S_FL_RD: if (dr_resp_valid) begin
          dn.req_valid <= 1'b1; dn.req_we <= 1'b1;
          dn.req_addr  <= {tag_q.tag, sweep};
          dn.req_data  <= dr_resp_data;
          state        <= S_FL_DN;
        end
        S_FL_DN: if (dn.resp_valid) begin
          tags[sweep] <= '0;
          state       <= S_FL_NEXT;
        end
        S_FL_NEXT: begin
          if (32'(sweep) == DC_LINES - 1) begin
            if (fl_disable) active <= 1'b0;
            else flush_done <= 1'b1;
            state <= S_IDLE;
          end else begin
            sweep <= sweep + 1'b1;
            state <= S_FL_LOOK;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_dram_req: assert property (@(posedge clk) disable iff (!rst_n)
    dr_req_valid && !dr_req_ready |=> dr_req_valid && $stable(dr_req_idx));
endmodule
