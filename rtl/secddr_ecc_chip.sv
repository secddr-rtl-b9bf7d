// secddr_ecc_chip: SecDDR security logic inside the ECC DRAM chip of one
// rank (the only part of the DIMM that SecDDR trusts).
//
// The chip holds its own copy of K_t and C_t (secddr_session) and an OTP
// engine with NUM_AES AES units.  Every column command addressed to the rank
// consumes a counter value, exactly as at the memory controller: next even for
// READ, next odd for WRITE.
//
// WRITE: the pad OTP_t^w = AES_Kt({address, C_t}) can only be started when
// the command arrives, because it depends on the address.  The 80-bit ECC
// lane burst that follows TCWL later is buffered until the pad is ready, then
// decrypted into {eWCRC, MAC}.  As in any DRAM, the burst is whatever the
// lane carries TCWL cycles after the chip's own WRITE command.  The chip recomputes the eWCRC over its own
// view of the write (rank RANK_ID, bank group, bank, row, column) and the
// decrypted MAC.  Only if the two agree is the MAC written to the array; if
// not, the write is dropped and `crc_alert` pulses (the DDR4 ALERT_n event).
// The MAC is never verified here: it is stored as decrypted.
// READ: the stored MAC is read from the array when the command arrives, the
// pad OTP_t = AES_Kt({0, C_t}) is computed meanwhile, and TCL cycles after the
// command the chip drives E-MAC = MAC XOR OTP_t[63:0] on the ECC lane.
//
// Interface: `cmd` is this rank's column command (already chip-selected);
// `wlane` the write lane (sampled TCWL after each WRITE); `rlane_valid/rlane` the read burst.
// The DRAM array is outside: `st_rd_en/st_rd_addr` return `st_rd_data` on the
// next cycle, `st_wr_en/st_wr_addr/st_wr_data` write.  Commands cannot be
// refused: the OTP engine must keep up with the command rate, which the paper's
// 3 AES units do at tCCD_S = 4; assertions flag a missed deadline.
// Asynchronous active-low reset.
module secddr_ecc_chip
  import secddr_pkg::*;
#(
  parameter int unsigned       NUM_AES = 3,
  parameter int unsigned       TCL     = T_CL,
  parameter int unsigned       TCWL    = T_CWL,
  parameter int unsigned       QDEPTH  = 8,
  parameter logic [RANK_W-1:0] RANK_ID = '0
) (
  input  logic               clk,
  input  logic               rst_n,
  // session set-up from the key exchange
  input  logic               ld_valid,
  input  logic [KEY_W-1:0]   ld_key,
  input  logic [CTR_W-1:0]   ld_ctr,
  // DDR channel, this rank
  input  ddr_cmd_t           cmd,
  input  logic [WLANE_W-1:0] wlane,
  output logic               rlane_valid,
  output logic [MAC_W-1:0]   rlane,
  // DRAM array of the ECC chip
  output logic               st_rd_en,
  output logic [ADDR_W-RANK_W-1:0] st_rd_addr,
  input  logic [MAC_W-1:0]   st_rd_data,
  output logic               st_wr_en,
  output logic [ADDR_W-RANK_W-1:0] st_wr_addr,
  output logic [MAC_W-1:0]   st_wr_data,
  // status
  output logic               crc_alert,
  output logic               established,
  output logic [CTR_W-1:0]   last_ctr
);
  localparam int unsigned TW = 16;
  typedef struct packed {
    logic          is_write;
    ddr_addr_t     addr;      // rank field replaced by RANK_ID
    logic [TW-1:0] due;
  } pend_t;

  logic [TW-1:0] now;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0; else now <= now + 1'b1;

  ddr_addr_t my_addr;
  always_comb begin
    my_addr      = cmd.addr;
    my_addr.rank = RANK_ID;
  end

  // ---------------- session ----------------
  logic [KEY_W-1:0] key;
  logic [CTR_W-1:0] ctr_next;

  secddr_session u_sess (
    .clk, .rst_n,
    .load        (ld_valid),
    .load_key    (ld_key),
    .load_ctr    (ld_ctr),
    .adv         (cmd.valid),
    .adv_is_write(cmd.is_write),
    .key         (key),
    .ctr_next    (ctr_next),
    .last_ctr    (last_ctr),
    .established (established)
  );

  // ---------------- pad requests, engine, pads ----------------
  logic         rq_full, rq_valid, rq_pop;
  logic [127:0] rq_block;
  logic         otp_req_ready, otp_pad_valid;
  logic [127:0] otp_pad;
  logic         padq_full, padq_valid, padq_pop;
  logic [WLANE_W-1:0] padq_data;
  logic [$clog2(QDEPTH+1)-1:0] rq_count, padq_count;

  secddr_fifo #(.WIDTH(128), .DEPTH(QDEPTH)) u_reqq (
    .clk, .rst_n,
    .wr_en   (cmd.valid),
    .wr_data (pad_block(cmd.is_write, my_addr, ctr_next)),
    .full    (rq_full),
    .rd_en   (rq_pop),
    .rd_valid(rq_valid),
    .rd_data (rq_block),
    .count   (rq_count)
  );
  assign rq_pop = rq_valid && otp_req_ready;

  secddr_otp_engine #(.NUM_AES(NUM_AES)) u_otp (
    .clk, .rst_n,
    .req_valid (rq_valid),
    .req_ready (otp_req_ready),
    .req_key   (key),
    .req_block (rq_block),
    .pad_valid (otp_pad_valid),
    .pad_ready (!padq_full),
    .pad       (otp_pad)
  );

  secddr_fifo #(.WIDTH(WLANE_W), .DEPTH(QDEPTH)) u_padq (
    .clk, .rst_n,
    .wr_en   (otp_pad_valid && !padq_full),
    .wr_data (otp_pad[WLANE_W-1:0]),
    .full    (padq_full),
    .rd_en   (padq_pop),
    .rd_valid(padq_valid),
    .rd_data (padq_data),
    .count   (padq_count)
  );

  // ---------------- transactions in flight ----------------
  pend_t pend_in, head;
  logic  pq_full, pq_valid, pq_pop;
  logic [$clog2(QDEPTH+1)-1:0] pq_count;

  assign pend_in = '{is_write: cmd.is_write, addr: my_addr, due: now + TW'(TCL - 1)};

  secddr_fifo #(.WIDTH($bits(pend_t)), .DEPTH(QDEPTH)) u_pend (
    .clk, .rst_n,
    .wr_en   (cmd.valid),
    .wr_data (pend_in),
    .full    (pq_full),
    .rd_en   (pq_pop),
    .rd_valid(pq_valid),
    .rd_data (head),
    .count   (pq_count)
  );

  // array read at command time; the word joins the read-MAC queue next cycle
  logic rd_cmd_q;
  logic rmq_full, rmq_valid, rmq_pop;
  logic [MAC_W-1:0] rmq_data;
  logic [$clog2(QDEPTH+1)-1:0] rmq_count;

  assign st_rd_en   = cmd.valid && !cmd.is_write;
  assign st_rd_addr = {cmd.addr.bg, cmd.addr.ba, cmd.addr.row, cmd.addr.col};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_cmd_q <= 1'b0; else rd_cmd_q <= st_rd_en;

  secddr_fifo #(.WIDTH(MAC_W), .DEPTH(QDEPTH)) u_rmacq (
    .clk, .rst_n,
    .wr_en   (rd_cmd_q),
    .wr_data (st_rd_data),
    .full    (rmq_full),
    .rd_en   (rmq_pop),
    .rd_valid(rmq_valid),
    .rd_data (rmq_data),
    .count   (rmq_count)
  );

  // Like any DRAM, the chip samples the write burst TCWL cycles after its
  // WRITE command, whatever the lane holds then; bursts wait for their pad.
  logic wdue_full, wdue_valid, wcap;
  logic [TW-1:0] wdue_head;
  logic [$clog2(QDEPTH+1)-1:0] wdue_count;

  secddr_fifo #(.WIDTH(TW), .DEPTH(QDEPTH)) u_wdueq (
    .clk, .rst_n,
    .wr_en   (cmd.valid && cmd.is_write),
    .wr_data (now + TW'(TCWL)),
    .full    (wdue_full),
    .rd_en   (wcap),
    .rd_valid(wdue_valid),
    .rd_data (wdue_head),
    .count   (wdue_count)
  );
  assign wcap = wdue_valid && (wdue_head == now);

  logic wq_full, wq_valid, wq_pop;
  logic [WLANE_W-1:0] wq_data;
  logic [$clog2(QDEPTH+1)-1:0] wq_count;

  secddr_fifo #(.WIDTH(WLANE_W), .DEPTH(QDEPTH)) u_wlaneq (
    .clk, .rst_n,
    .wr_en   (wcap),
    .wr_data (wlane),
    .full    (wq_full),
    .rd_en   (wq_pop),
    .rd_valid(wq_valid),
    .rd_data (wq_data),
    .count   (wq_count)
  );

  // ---------------- write check ----------------
  logic [WLANE_W-1:0] w_plain;
  logic [CRC_W-1:0]   w_crc_calc;
  assign w_plain = wq_data ^ padq_data[WLANE_W-1:0];
  secddr_ewcrc u_crc (.msg({head.addr, w_plain[MAC_W-1:0]}), .crc(w_crc_calc));

  logic wr_fire, rd_fire, crc_ok;
  assign wr_fire = pq_valid && head.is_write && wq_valid && padq_valid;
  assign rd_fire = pq_valid && !head.is_write && (head.due == now);
  assign crc_ok  = (w_crc_calc == w_plain[WLANE_W-1:MAC_W]);

  assign pq_pop   = wr_fire || rd_fire;
  assign padq_pop = pq_pop;
  assign wq_pop   = wr_fire;
  assign rmq_pop  = rd_fire;

  assign st_wr_en   = wr_fire && crc_ok;
  assign st_wr_addr = {head.addr.bg, head.addr.ba, head.addr.row, head.addr.col};
  assign st_wr_data = w_plain[MAC_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rlane_valid <= 1'b0;
      rlane       <= '0;
      crc_alert   <= 1'b0;
    end else begin
      rlane_valid <= rd_fire;
      if (rd_fire) rlane <= rmq_data ^ padq_data[MAC_W-1:0];
      crc_alert   <= wr_fire && !crc_ok;
    end
  end

  // deadlines that the command rate and the AES pool must meet
  a_rd_ready: assert property (@(posedge clk) disable iff (!rst_n)
    rd_fire |-> (padq_valid && rmq_valid));
  a_no_lost_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    cmd.valid |-> (!rq_full && !pq_full && !wdue_full && established));
  a_no_lost_wdata: assert property (@(posedge clk) disable iff (!rst_n)
    wcap |-> !wq_full);
endmodule
