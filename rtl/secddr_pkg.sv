// secddr_pkg: types and constants shared by the SecDDR blocks.
//
// The design protects one DDR4 channel.  Sizes follow the evaluated system
// (16 GB, 1 channel, 2 ranks of 8Gb x8 chips, 4 bank groups x 4 banks):
// a 64-bit transaction counter C_t and a 128-bit transaction key K_t, as the
// area estimate lists them; a 64-bit MAC on the ECC lane (an x8 ECC chip
// moves 8 bits x 8 beats per burst); a 16-bit eWCRC carried in the two extra
// beats of a BL10 write burst.  The DDR4 row and column widths (16 and 10
// bits for an 8Gb x8 die) are standard JEDEC geometry, not numbers from the
// paper.  The AES input-block layout and the CRC polynomial are this
// design's own choices and are documented where they are used.
package secddr_pkg;

  localparam int unsigned KEY_W   = 128;  // K_t, 16-byte register
  localparam int unsigned CTR_W   = 64;   // C_t, 8-byte counter
  localparam int unsigned BLOCK_W = 128;  // AES block
  localparam int unsigned MAC_W   = 64;   // ECC-lane word per burst (x8, BL8)
  localparam int unsigned CRC_W   = 16;   // eWCRC for an x8 device
  localparam int unsigned WLANE_W = MAC_W + CRC_W; // write burst on the ECC lane (BL10)

  localparam int unsigned RANK_W = 1;     // 2 ranks
  localparam int unsigned BG_W   = 2;     // 4 bank groups
  localparam int unsigned BA_W   = 2;     // 4 banks per group
  localparam int unsigned ROW_W  = 16;    // 64K rows (8Gb x8)
  localparam int unsigned COL_W  = 10;    // 1K columns
  localparam int unsigned ADDR_W = RANK_W + BG_W + BA_W + ROW_W + COL_W; // 31

  // DDR4-3200 timings of the evaluated system, in memory-clock cycles
  localparam int unsigned T_CL  = 22;
  localparam int unsigned T_CWL = 16;

  typedef struct packed {
    logic [RANK_W-1:0] rank;
    logic [BG_W-1:0]   bg;
    logic [BA_W-1:0]   ba;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
  } ddr_addr_t;

  // A column command as the ECC chip sees it: the row is the one latched by
  // the preceding ACTIVATE, the column the one carried by the READ/WRITE.
  typedef struct packed {
    logic      valid;
    logic      is_write;
    ddr_addr_t addr;
  } ddr_cmd_t;

  // AES input block for a pad.  C_t sits in the low 64 bits.  Write pads
  // (OTP_t^w) also carry the full write address; read pads carry zeros there.
  // Reads use even and writes odd counter values, so the two kinds of pad
  // never share an input block.
  function automatic logic [BLOCK_W-1:0] pad_block(input logic is_write,
                                                   input ddr_addr_t addr,
                                                   input logic [CTR_W-1:0] ctr);
    logic [63:0] hi;
    hi = '0;
    if (is_write) hi[ADDR_W-1:0] = addr;
    return {hi, ctr};
  endfunction

  // Counter value for the next column command.  C_t = 2*n + type, where the
  // low bit marks the command (0 read, 1 write: reads use even values, writes
  // odd ones) and n counts steps: one per READ, two per WRITE.  So
  //   next = (last with bit 0 cleared) + 2 + 3*is_write.
  // A command dropped, or a WRITE turned into a READ, leaves the two ends a
  // constant number of steps apart; honest traffic never brings them back.
  function automatic logic [CTR_W-1:0] next_ctr(input logic [CTR_W-1:0] last,
                                                input logic is_write);
    return {last[CTR_W-1:1], 1'b0} + (is_write ? CTR_W'(5) : CTR_W'(2));
  endfunction

endpackage
