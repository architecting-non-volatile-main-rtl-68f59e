// tb_crypt_seq: checks that a line is encrypted and decrypted word by word
// with the requested key, algorithm and direction, that a level-none line
// passes in one cycle, and that the time per line is 8 words times the
// engine's per-word latency of the algorithm.
module tb_crypt_seq;
  import snvm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, encrypt, busy, done;
  logic [511:0] line_in, line_out;
  logic [520:0] key;
  level_e alg;
  logic ce_req_valid, ce_req_ready, ce_req_encrypt, ce_resp_valid;
  level_e ce_req_alg;
  logic [520:0] ce_req_key;
  logic [63:0] ce_req_data, ce_resp_data;
  int checks = 0, failures = 0;

  crypt_seq #(.KEY_W(521)) dut (.*);
  tb_cipher_model #(.KEY_W(521)) ce (
    .clk, .req_valid(ce_req_valid), .req_ready(ce_req_ready), .req_alg(ce_req_alg),
    .req_encrypt(ce_req_encrypt), .req_key(ce_req_key), .req_data(ce_req_data),
    .resp_valid(ce_resp_valid), .resp_data(ce_resp_data));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(logic [511:0] l, logic [520:0] k, level_e a, logic e,
                     output logic [511:0] o, output int cyc);
    line_in = l; key = k; alg = a; encrypt = e; start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    o = line_out;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] p, c, d;
    logic [520:0] k;
    int cyc;
    start = 0; line_in = 0; key = 0; alg = LVL_NONE; encrypt = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      level_e a;
      a = level_e'(i % 4);
      p = rand_line();
      k = {$urandom, $urandom, $urandom, $urandom, 409'($urandom)};
      run(p, k, a, 1'b1, c, cyc);
      check(c == cipher_line(p, k, a, 1'b1), "ciphertext");
      if (a != LVL_NONE) check(c != p, "ciphertext differs from plaintext");
      if (a == LVL_NONE) check(cyc == 1, "plaintext page bypasses the engine");
      else check(cyc >= 8 * min_lat(a) && cyc <= 8 * (max_lat(a) + 3),
                 $sformatf("latency %0d for alg %0d", cyc, a));
      run(c, k, a, 1'b0, d, cyc);
      check(d == p, "decrypts back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
