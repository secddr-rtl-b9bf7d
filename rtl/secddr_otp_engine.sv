// secddr_otp_engine: one-time-pad generator built from NUM_AES AES units.
//
// Each SecDDR endpoint turns (K_t, C_t[, write address]) into a pad by AES
// encryption: OTP_t for reads, OTP_t^w for writes.  One iterative AES unit
// takes 11 cycles per block, so the engine keeps NUM_AES units and hands
// requests to them round-robin; results are collected in the same round-robin
// order, so pads leave in request order.  The paper sizes the ECC chip of an
// x8 DDR4-3200 rank with 3 AES units to keep up with the transfer rate; that
// is the default here.  With 3 units the engine accepts a new request every
// ~4 cycles on average, which matches the DDR4 column-to-column spacing
// (tCCD_S = 4 clocks).
//
// Interface: `req_valid/req_ready` handshake with `req_key`, `req_block`
// (the caller forms the block, see secddr_pkg::pad_block); `pad_valid/
// pad_ready` handshake with `pad`, in request order.  A request is refused
// (req_ready low) while the next unit in turn is still busy or holds an
// unread pad.  A pad is offered from the unit's `done` cycle, so a request
// accepted at edge t yields its pad in the 11th cycle after, and a unit can
// restart on the edge its pad is taken: one pad per unit every 11 cycles.  Asynchronous active-low reset.
module secddr_otp_engine #(
  parameter int unsigned NUM_AES = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic [127:0] req_key,
  input  logic [127:0] req_block,
  output logic         pad_valid,
  input  logic         pad_ready,
  output logic [127:0] pad
);
  localparam int unsigned PW = (NUM_AES > 1) ? $clog2(NUM_AES) : 1;

  logic [NUM_AES-1:0] busy, done, hold, start, full;
  logic [127:0]       res [NUM_AES];
  logic [PW-1:0]      disp_q, coll_q;

  for (genvar g = 0; g < NUM_AES; g++) begin : g_aes
    assign start[g] = req_valid && req_ready && (disp_q == PW'(g));
    aes128_core u_aes (
      .clk, .rst_n,
      .start  (start[g]),
      .key    (req_key),
      .block  (req_block),
      .busy   (busy[g]),
      .done   (done[g]),
      .result (res[g])
    );
  end

  // a unit holds a pad from its `done` cycle until the pad is taken; it may
  // start again on the edge at which its pad is taken
  assign full      = done | hold;
  assign req_ready = !busy[disp_q] &&
                     (!full[disp_q] || (pad_ready && coll_q == disp_q));
  assign pad_valid = full[coll_q];
  assign pad       = res[coll_q];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(NUM_AES - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold   <= '0;
      disp_q <= '0;
      coll_q <= '0;
    end else begin
      for (int i = 0; i < NUM_AES; i++) begin
        if (pad_valid && pad_ready && coll_q == PW'(i)) hold[i] <= 1'b0;
        else if (done[i]) hold[i] <= 1'b1;
      end
      if (req_valid && req_ready) disp_q <= inc(disp_q);
      if (pad_valid && pad_ready) coll_q <= inc(coll_q);
    end
  end
endmodule
