// tb_cipher_model: behavioural model of the programmable cipher engine
// (DES/AES/RSA) the controller hands words to. One word at a time; the
// result appears after a random latency inside the algorithm's range of
// cycles per word. Counts the words it handled per algorithm.
module tb_cipher_model
  import snvm_pkg::*;
  import tb_ref_pkg::*;
#(parameter int KEY_W = 521) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  level_e            req_alg,
  input  logic              req_encrypt,
  input  logic [KEY_W-1:0]  req_key,
  input  logic [WORD_W-1:0] req_data,
  output logic              resp_valid,
  output logic [WORD_W-1:0] resp_data
);
  int words [4];
  int enc_words, dec_words;
  int busy_cnt;
  logic [WORD_W-1:0] res;
  initial begin
    req_ready = 1'b1; resp_valid = 1'b0; resp_data = '0; busy_cnt = 0;
    for (int i = 0; i < 4; i++) words[i] = 0;
    enc_words = 0; dec_words = 0;
  end
  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (busy_cnt > 0) begin
      busy_cnt <= busy_cnt - 1;
      if (busy_cnt == 1) begin
        resp_valid <= 1'b1;
        resp_data  <= res;
        req_ready  <= 1'b1;
      end
    end else if (req_valid && req_ready) begin
      res       <= cipher_word(req_data, 521'(req_key), req_alg, req_encrypt);
      busy_cnt  <= (req_alg == LVL_NONE) ? 1 :
                   min_lat(req_alg) - 1 + int'($urandom_range(0, max_lat(req_alg) - min_lat(req_alg)));
      req_ready <= 1'b0;
      words[req_alg]++;
      if (req_encrypt) enc_words++; else dec_words++;
    end
  end
endmodule
