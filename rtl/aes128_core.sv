// aes128_core: iterative AES-128 encryption unit (FIPS-197).
//
// SecDDR derives every one-time pad with AES under the transaction key K_t;
// the paper budgets "an AES unit" per endpoint but does not describe its
// insides.  This is the simplest complete implementation: one round per
// clock, round keys expanded on the fly, S-boxes computed as the GF(2^8)
// inverse (x^254) followed by the affine map, so no table is stored.
//
// Interface: pulse `start` with `key` and `block` while `busy` is low.  The
// unit whitens at the clock edge that samples `start`, runs rounds 1..10 on
// the next ten edges, and raises `done` (one cycle) with `result` in the 11th
// cycle after the `start` cycle.  `result` holds until the next start.
// Asynchronous active-low reset.
module aes128_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] block,
  output logic         busy,
  output logic         done,
  output logic [127:0] result
);

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] a);
    logic [7:0] x2, x3, x6, x12, x15, x30, x60, x120, x240, inv;
    x2   = gmul(a, a);
    x3   = gmul(x2, a);
    x6   = gmul(x3, x3);
    x12  = gmul(x6, x6);
    x15  = gmul(x12, x3);
    x30  = gmul(x15, x15);
    x60  = gmul(x30, x30);
    x120 = gmul(x60, x60);
    x240 = gmul(x120, x120);
    inv  = gmul(gmul(x240, x12), x2);          // a^254 = a^-1, and 0 -> 0
    return inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]}
               ^ {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
  endfunction

  // byte i of a 128-bit word, i = 0 is the most significant byte
  function automatic logic [7:0] byte_of(input logic [127:0] w, input int i);
    return w[127-8*i -: 8];
  endfunction

  function automatic logic [127:0] next_round_key(input logic [127:0] rk,
                                                 input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = rk;
    t  = {sbox(w3[23:16]) ^ rcon, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  function automatic logic [127:0] aes_round(input logic [127:0] s,
                                            input logic [127:0] rk,
                                            input logic last);
    logic [7:0] b  [16];
    logic [7:0] sr [16];
    logic [7:0] m  [16];
    logic [127:0] o;
    for (int i = 0; i < 16; i++) b[i] = sbox(byte_of(s, i));
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sr[4*c + r] = b[4*((c + r) % 4) + r];
    for (int c = 0; c < 4; c++) begin
      m[4*c+0] = xtime(sr[4*c+0]) ^ xtime(sr[4*c+1]) ^ sr[4*c+1] ^ sr[4*c+2] ^ sr[4*c+3];
      m[4*c+1] = sr[4*c+0] ^ xtime(sr[4*c+1]) ^ xtime(sr[4*c+2]) ^ sr[4*c+2] ^ sr[4*c+3];
      m[4*c+2] = sr[4*c+0] ^ sr[4*c+1] ^ xtime(sr[4*c+2]) ^ xtime(sr[4*c+3]) ^ sr[4*c+3];
      m[4*c+3] = xtime(sr[4*c+0]) ^ sr[4*c+0] ^ sr[4*c+1] ^ sr[4*c+2] ^ xtime(sr[4*c+3]);
    end
    for (int i = 0; i < 16; i++) o[127-8*i -: 8] = last ? sr[i] : m[i];
    return o ^ rk;
  endfunction

  logic [127:0] state_q, rk_q;
  logic [3:0]   round_q;   // round to run next, 1..10
  logic [7:0]   rcon_q;
  logic [127:0] rk_next;

  assign rk_next = next_round_key(rk_q, rcon_q);
  assign result  = state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      round_q <= 4'd0;
      rcon_q  <= 8'h01;
      state_q <= '0;
      rk_q    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        state_q <= block ^ key;
        rk_q    <= key;
        rcon_q  <= 8'h01;
        round_q <= 4'd1;
        busy    <= 1'b1;
      end else if (busy) begin
        state_q <= aes_round(state_q, rk_next, round_q == 4'd10);
        rk_q    <= rk_next;
        rcon_q  <= xtime(rcon_q);
        round_q <= round_q + 4'd1;
        if (round_q == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
