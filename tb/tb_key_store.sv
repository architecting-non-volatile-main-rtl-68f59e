// tb_key_store: checks the session key registers. A random source feeds
// words after reset; the test checks that the keys equal the words drawn,
// that the refill takes exactly one cycle per word, that privileged reads
// return them and non-privileged ones are refused, that clear wipes and
// locks, and that keys written back plus resume unlock again.
module tb_key_store;
  localparam int NB = 4, KW = 521, KWORDS = 17;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rng_valid, rng_ready;
  logic [31:0] rng_data;
  logic acc_valid, acc_we, acc_priv, acc_err, clear, resume, keys_ok;
  logic [1:0] acc_bank;
  logic [4:0] acc_word;
  logic [31:0] acc_wdata, acc_rdata;
  logic [NB-1:0][KW-1:0] keys;
  int checks = 0, failures = 0;
  logic [31:0] drawn [NB*KWORDS];

  key_store #(.NUM_BANKS(NB), .KEY_W(KW)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [KW-1:0] expect_key(int b);
    logic [KWORDS*32-1:0] k;
    for (int w = 0; w < KWORDS; w++) k[32*w +: 32] = drawn[b*KWORDS + w];
    return KW'(k);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    rng_valid = 0; rng_data = 0; acc_valid = 0; acc_we = 0; acc_priv = 0;
    acc_bank = 0; acc_word = 0; acc_wdata = 0; clear = 0; resume = 0;
    for (int i = 0; i < NB*KWORDS; i++) drawn[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(keys_ok == 0 && rng_ready == 1, "locked and drawing after reset");
    t0 = $time;
    for (int i = 0; i < NB*KWORDS; i++) begin
      rng_valid = 1; rng_data = drawn[i];
      @(negedge clk);
    end
    rng_valid = 0;
    t1 = $time;
    check((t1 - t0) / 10 == NB*KWORDS, "one word per cycle");
    check(keys_ok == 1 && rng_ready == 0, "unlocked after refill");
    for (int b = 0; b < NB; b++) check(keys[b] == expect_key(b), $sformatf("key %0d from rng", b));
    // privileged read of every word
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < KWORDS; w++) begin
        acc_valid = 1; acc_we = 0; acc_priv = 1; acc_bank = 2'(b); acc_word = 5'(w);
        #1;
        check(!acc_err && acc_rdata == drawn[b*KWORDS+w], "privileged read");
        @(negedge clk);
      end
    // user-mode read and write refused
    acc_priv = 0; acc_bank = 1; acc_word = 3; #1;
    check(acc_err && acc_rdata == 0, "user read refused");
    acc_we = 1; acc_wdata = 32'hdead_beef;
    @(negedge clk);
    acc_valid = 0; acc_we = 0;
    check(keys[1] == expect_key(1), "user write has no effect");
    // sleep: clear
    clear = 1; @(negedge clk); clear = 0;
    check(keys_ok == 0, "locked after clear");
    check(keys == '0, "keys wiped");
    // wake: OS restores keys, then resume
    for (int b = 0; b < NB; b++)
      for (int w = 0; w < KWORDS; w++) begin
        acc_valid = 1; acc_we = 1; acc_priv = 1; acc_bank = 2'(b); acc_word = 5'(w);
        acc_wdata = drawn[b*KWORDS+w];
        @(negedge clk);
      end
    acc_valid = 0; acc_we = 0;
    check(keys_ok == 0, "still locked before resume");
    resume = 1; @(negedge clk); resume = 0;
    check(keys_ok == 1, "unlocked by resume");
    for (int b = 0; b < NB; b++) check(keys[b] == expect_key(b), "key restored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
