// key_store: per-bank session key registers of the memory controller.
//
// At every reboot (reset) a new key is drawn for each NVM bank from a random
// source, RNG_W bits per accepted rng word, so that data left in the NVM by an
// earlier session cannot be decrypted. The keys are only reachable in
// privileged mode: a non-privileged access is refused (err, read data 0).
// Before the NVM is power gated for sleep the OS reads the keys into its
// kernel state and issues clear, which zeroes all key bits and locks the
// controller (keys_ok = 0); on wake it writes them back and issues resume.
// Keeping one key per bank, the reboot refill, privilege check and clear on
// sleep follow the paper; the word-wise access, the key width (the paper's
// largest key, RSA 521 bit) and the lock flag are choices of this design.
//
// Timing: the refill takes NUM_BANKS*KEY_WORDS accepted rng words after
// reset. Accesses complete in the cycle they are presented (rdata is
// combinational).
module key_store #(
  parameter int NUM_BANKS = 4,
  parameter int KEY_W     = 521,
  parameter int RNG_W     = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // random source
  input  logic                       rng_valid,
  input  logic [RNG_W-1:0]           rng_data,
  output logic                       rng_ready,
  // privileged word access: index = bank*KEY_WORDS + word
  input  logic                       acc_valid,
  input  logic                       acc_we,
  input  logic                       acc_priv,
  input  logic [$clog2(NUM_BANKS)-1:0] acc_bank,
  input  logic [4:0]                 acc_word,
  input  logic [RNG_W-1:0]           acc_wdata,
  output logic [RNG_W-1:0]           acc_rdata,
  output logic                       acc_err,
  input  logic                       clear,      // sleep: wipe keys, lock
  input  logic                       resume,     // wake: keys restored, unlock
  output logic [NUM_BANKS-1:0][KEY_W-1:0] keys,
  output logic                       keys_ok
);
  localparam int KEY_WORDS = (KEY_W + RNG_W - 1) / RNG_W;
  localparam int TOTAL     = NUM_BANKS * KEY_WORDS;

  logic [NUM_BANKS-1:0][KEY_WORDS-1:0][RNG_W-1:0] kr;
  logic [$clog2(TOTAL+1)-1:0] fill_idx;
  logic filling;

  assign rng_ready = filling;

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++)
      keys[b] = KEY_W'(kr[b]);
  end

  logic acc_ok;
  assign acc_ok   = acc_valid && acc_priv && (32'(acc_word) < KEY_WORDS) && !filling;
  assign acc_err  = acc_valid && !acc_ok;
  assign acc_rdata = acc_ok && !acc_we ? kr[acc_bank][acc_word] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kr       <= '0;
      fill_idx <= '0;
      filling  <= 1'b1;
      keys_ok  <= 1'b0;
    end else if (filling) begin
      if (rng_valid) begin
        kr[32'(fill_idx) / KEY_WORDS][32'(fill_idx) % KEY_WORDS] <= rng_data;
        if (32'(fill_idx) == TOTAL - 1) begin
          filling <= 1'b0;
          keys_ok <= 1'b1;
        end
        fill_idx <= fill_idx + 1'b1;
      end
    end else if (clear) begin
      kr      <= '0;
      keys_ok <= 1'b0;
    end else begin
      if (acc_ok && acc_we) kr[acc_bank][acc_word] <= acc_wdata;
      if (resume) keys_ok <= 1'b1;
    end
  end

endmodule
