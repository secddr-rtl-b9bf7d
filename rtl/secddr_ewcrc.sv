// secddr_ewcrc: extended write CRC (eWCRC) generator/checker.
//
// DDR4 chips can check a write CRC carried in extra beats of the write
// burst; the eWCRC extends the protected message with the write address
// (rank, bank group, bank, row, column) so a chip notices a write that was
// steered to the wrong location.  SecDDR uses a 16-bit eWCRC for an x8
// device.  The polynomial is not given; this block uses the CCITT polynomial
// x^16 + x^12 + x^5 + 1 (0x1021), initial value 0, message MSB first, no
// final XOR (the CRC-16/XMODEM convention).  It is purely combinational,
// unrolled over MSG_W message bits; the same block serves as generator at the
// memory controller and as checker in the ECC chip.
//
// Interface: `msg` in, `crc` out in the same cycle.  The default MSG_W is
// the ECC-chip message {write address, 64-bit ECC-lane word}.
//
// The scheme fixes a 16-bit CRC over {address, data}.  The polynomial
// (x^16+x^12+x^5+1, zero init, MSB first) is this design's own choice.
module secddr_ewcrc
  import secddr_pkg::*;
#(
  parameter int unsigned MSG_W = ADDR_W + MAC_W
) (
  input  logic [MSG_W-1:0] msg,
  output logic [CRC_W-1:0] crc
);
  localparam logic [15:0] POLY = 16'h1021;

  always_comb begin
    logic [15:0] c;
    c = '0;
    for (int i = MSG_W - 1; i >= 0; i--) begin
      if (c[15] ^ msg[i]) c = {c[14:0], 1'b0} ^ POLY;
      else                c = {c[14:0], 1'b0};
    end
    crc = c;
  end
endmodule
