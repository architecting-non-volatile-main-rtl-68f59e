// crypt_seq: the NVM encryption/decryption stage of the memory controller.
//
// Every line that leaves the row buffer for the NVM is encrypted, and every
// line read from the NVM is decrypted, here. The line is cut into
// WORDS_PER_LINE words that are handed one at a time, with the bank's key,
// the bank's algorithm and the direction, to the cipher engine, which the
// controller provides as a programmable unit able to run DES, AES or RSA. The
// engine is outside this block (engine port, ce_*), so its latency, a few to
// a few tens of cycles per word, sets the time a line takes. A line of a page
// whose level is none skips the engine and is returned the next cycle.
//
// Interface: pulse start with line/key/alg/encrypt; done pulses with
// line_out. ce_req is a valid/ready request, ce_resp_valid returns the word;
// one word is in flight at a time. Word-serial processing and the plaintext
// bypass are this design's choices; per-word cost and algorithm choice are
// the paper's.
module crypt_seq
  import snvm_pkg::*;
#(
  parameter int KEY_W = 521
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [LINE_W-1:0] line_in,
  input  logic [KEY_W-1:0]  key,
  input  level_e            alg,        // LVL_NONE: no encryption
  input  logic              encrypt,    // 1 encrypt, 0 decrypt
  output logic              busy,
  output logic              done,
  output logic [LINE_W-1:0] line_out,
  // cipher engine
  output logic              ce_req_valid,
  input  logic              ce_req_ready,
  output level_e            ce_req_alg,
  output logic              ce_req_encrypt,
  output logic [KEY_W-1:0]  ce_req_key,
  output logic [WORD_W-1:0] ce_req_data,
  input  logic              ce_resp_valid,
  input  logic [WORD_W-1:0] ce_resp_data
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;
  state_e state;
  logic [$clog2(WORDS_PER_LINE)-1:0] widx;
  logic [LINE_W-1:0] buf_q;
  logic [KEY_W-1:0]  key_q;
  level_e            alg_q;
  logic              enc_q;

  assign busy           = state != S_IDLE;
  assign ce_req_valid   = state == S_REQ;
  assign ce_req_alg     = alg_q;
  assign ce_req_encrypt = enc_q;
  assign ce_req_key     = key_q;
  assign ce_req_data    = buf_q[widx*WORD_W +: WORD_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      widx     <= '0;
      buf_q    <= '0;
      key_q    <= '0;
      alg_q    <= LVL_NONE;
      enc_q    <= 1'b0;
      done     <= 1'b0;
      line_out <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          if (alg == LVL_NONE) begin
            line_out <= line_in;
            done     <= 1'b1;
          end else begin
            buf_q <= line_in;
            key_q <= key;
            alg_q <= alg;
            enc_q <= encrypt;
            widx  <= '0;
            state <= S_REQ;
          end
        end
        S_REQ: if (ce_req_ready) state <= S_WAIT;
        S_WAIT: if (ce_resp_valid) begin
          buf_q[widx*WORD_W +: WORD_W] <= ce_resp_data;
          if (32'(widx) == WORDS_PER_LINE - 1) begin
            line_out <= {ce_resp_data, buf_q[LINE_W-WORD_W-1:0]};
            state    <= S_IDLE;
            done     <= 1'b1;
          end else begin
            widx  <= widx + 1'b1;
            state <= S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
