// secddr_session: transaction key K_t and transaction counter C_t of one
// SecDDR channel end (one rank).
//
// After attestation the processor and the rank's ECC chip share a 128-bit
// K_t and agree on a starting C_t; `load` installs both and marks the session
// established.  Every column command then takes the next counter value:
// C_t = 2*n + type, reads even and writes odd as the paper asks, with n
// advanced by one step per READ and two per WRITE.  The step rule is this
// design's choice: with it a dropped WRITE and a WRITE turned into a READ
// both leave the two ends permanently apart, so every later read fails
// verification (a plain "next value of the right parity" would let a read
// after a dropped write fall back into step).
// Both ends run identical copies of this block, so their counters stay in
// step as long as every command reaches the DIMM unchanged.
//
// Interface: `load`, `load_key`, `load_ctr` (from the key-exchange logic);
// `adv` with `adv_is_write` consumes one counter value; `ctr_next` is the
// value that `adv` would consume now (combinational from `adv_is_write`), so
// the caller uses it in the same cycle it asserts `adv`.  `last_ctr` is the
// last value consumed (the loaded value right after `load`).  The 64-bit
// counter does not wrap in a system lifetime, so no overflow handling.
// Asynchronous active-low reset clears the key, the counter and `established`.
module secddr_session
  import secddr_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [KEY_W-1:0] load_key,
  input  logic [CTR_W-1:0] load_ctr,
  input  logic             adv,
  input  logic             adv_is_write,
  output logic [KEY_W-1:0] key,
  output logic [CTR_W-1:0] ctr_next,
  output logic [CTR_W-1:0] last_ctr,
  output logic             established
);
  assign ctr_next = next_ctr(last_ctr, adv_is_write);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key         <= '0;
      last_ctr    <= '0;
      established <= 1'b0;
    end else if (load) begin
      key         <= load_key;
      last_ctr    <= load_ctr;
      established <= 1'b1;
    end else if (adv) begin
      last_ctr    <= ctr_next;
    end
  end

  a_adv_needs_session: assert property (@(posedge clk) disable iff (!rst_n)
    adv |-> established);
endmodule
