// secddr_mc: processor-side SecDDR unit, between the memory encryption
// engine (which computes and verifies MACs) and the DDR channel.
//
// Writes: the MAC of the line arrives with the request.  The unit takes the
// next odd C_t of the target rank, computes the 16-bit eWCRC over {write
// address, MAC}, asks the OTP engine for OTP_t^w = AES_Kt({address, C_t}) and,
// TCWL cycles after the WRITE command, drives the 80-bit ECC-lane burst
// {eWCRC, MAC} XOR OTP_t^w[79:0] (the E-MAC plus the encrypted eWCRC of a BL10
// burst).  Reads: the unit takes the next even C_t, asks for OTP_t =
// AES_Kt({0, C_t}) at command time (11 cycles, hidden under tCL) and, when
// the ECC-lane word comes back, returns E-MAC XOR OTP_t[63:0] = the stored
// MAC, with the read address, for verification.  Verification itself is done
// by the encryption engine, outside this block.
//
// Each rank has its own K_t and C_t (secddr_session); one OTP engine serves
// all ranks.  Commands are issued in request order, one per accepted request;
// the request source (the memory-controller scheduler) is responsible for
// DDR timing, in particular that data bursts on the channel follow command
// order.  `req_ready` is low while the rank's session is not established, the
// OTP engine cannot take a request, or QDEPTH transactions are in flight.
//
// Timing: `cmd` is valid in the cycle after the request is accepted
// (registered).  `wlane_valid` rises TCWL cycles after the WRITE's `cmd`
// cycle.  `rsp_valid` rises the cycle after `rlane_valid` (registered).
// Asynchronous active-low reset.
//
// What follows the SecDDR scheme: per-rank K_t/C_t, MAC XOR pad on the bus,
// even counters for reads and odd for writes, the eWCRC made before
// encryption, and a write pad that includes the address.  This design's own
// choices: the pad block layout, the counter step rule (see secddr_pkg),
// lane-word rather than beat-level transfers, and the queue depth.  `last_ctr`
// and `established` expose each rank's counter and session state.
module secddr_mc
  import secddr_pkg::*;
#(
  parameter int unsigned NUM_RANKS = 2,
  parameter int unsigned NUM_AES   = 3,
  parameter int unsigned TCWL      = T_CWL,
  parameter int unsigned QDEPTH    = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // session set-up from the key exchange
  input  logic               ld_valid,
  input  logic [RANK_W-1:0]  ld_rank,
  input  logic [KEY_W-1:0]   ld_key,
  input  logic [CTR_W-1:0]   ld_ctr,
  // column requests from the scheduler / encryption engine
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_is_write,
  input  ddr_addr_t          req_addr,
  input  logic [MAC_W-1:0]   req_mac,
  // DDR channel
  output ddr_cmd_t           cmd,
  output logic               wlane_valid,
  output logic [WLANE_W-1:0] wlane,
  input  logic               rlane_valid,
  input  logic [MAC_W-1:0]   rlane,
  // decrypted read MAC, to verification
  output logic               rsp_valid,
  output ddr_addr_t          rsp_addr,
  output logic [MAC_W-1:0]   rsp_mac,
  output logic [NUM_RANKS-1:0] established,
  output logic [NUM_RANKS-1:0][CTR_W-1:0] last_ctr
);
  localparam int unsigned TW = 16;
  typedef struct packed {
    logic             is_write;
    ddr_addr_t        addr;
    logic [MAC_W-1:0] mac;
    logic [TW-1:0]    due;
  } pend_t;

  logic [TW-1:0] now;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0; else now <= now + 1'b1;

  // ---------------- per-rank sessions ----------------
  logic [KEY_W-1:0] s_key  [NUM_RANKS];
  logic [CTR_W-1:0] s_next [NUM_RANKS];
  logic             accept;

  for (genvar r = 0; r < NUM_RANKS; r++) begin : g_rank
    secddr_session u_sess (
      .clk, .rst_n,
      .load        (ld_valid && ld_rank == RANK_W'(r)),
      .load_key    (ld_key),
      .load_ctr    (ld_ctr),
      .adv         (accept && req_addr.rank == RANK_W'(r)),
      .adv_is_write(req_is_write),
      .key         (s_key[r]),
      .ctr_next    (s_next[r]),
      .last_ctr    (last_ctr[r]),
      .established (established[r])
    );
  end

  // ---------------- OTP engine and pad queue ----------------
  logic         otp_req_ready, otp_pad_valid;
  logic [127:0] otp_pad;
  logic         padq_full, padq_valid, padq_pop;
  logic [WLANE_W-1:0] padq_data;
  logic [$clog2(QDEPTH+1)-1:0] padq_count;

  secddr_otp_engine #(.NUM_AES(NUM_AES)) u_otp (
    .clk, .rst_n,
    .req_valid (accept),
    .req_ready (otp_req_ready),
    .req_key   (s_key[req_addr.rank]),
    .req_block (pad_block(req_is_write, req_addr, s_next[req_addr.rank])),
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

  assign pend_in = '{is_write: req_is_write, addr: req_addr, mac: req_mac,
                     due: now + TW'(TCWL)};

  secddr_fifo #(.WIDTH($bits(pend_t)), .DEPTH(QDEPTH)) u_pend (
    .clk, .rst_n,
    .wr_en   (accept),
    .wr_data (pend_in),
    .full    (pq_full),
    .rd_en   (pq_pop),
    .rd_valid(pq_valid),
    .rd_data (head),
    .count   (pq_count)
  );

  assign req_ready = established[req_addr.rank] && otp_req_ready && !pq_full;
  assign accept    = req_valid && req_ready;

  // eWCRC over {address, MAC} of the write at the head
  logic [CRC_W-1:0] head_crc;
  secddr_ewcrc u_crc (.msg({head.addr, head.mac}), .crc(head_crc));

  logic wr_fire, rd_fire;
  assign wr_fire  = pq_valid && head.is_write && (head.due == now);
  assign rd_fire  = pq_valid && !head.is_write && rlane_valid;
  assign pq_pop   = wr_fire || rd_fire;
  assign padq_pop = pq_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd         <= '0;
      wlane_valid <= 1'b0;
      wlane       <= '0;
      rsp_valid   <= 1'b0;
      rsp_addr    <= '0;
      rsp_mac     <= '0;
    end else begin
      cmd         <= '{valid: accept, is_write: req_is_write, addr: req_addr};
      wlane_valid <= 1'b0;
      rsp_valid   <= 1'b0;
      if (wr_fire) begin
        wlane_valid <= 1'b1;
        wlane       <= {head_crc, head.mac} ^ padq_data[WLANE_W-1:0];
      end
      if (rd_fire) begin
        rsp_valid <= 1'b1;
        rsp_addr  <= head.addr;
        rsp_mac   <= rlane ^ padq_data[MAC_W-1:0];
      end
    end
  end

  // the pad of a write must be ready by its data slot; read data must match
  // an outstanding read (channel bursts follow command order)
  a_wr_pad_ready: assert property (@(posedge clk) disable iff (!rst_n)
    wr_fire |-> padq_valid);
  a_rd_pad_ready: assert property (@(posedge clk) disable iff (!rst_n)
    rlane_valid |-> (pq_valid && !head.is_write && padq_valid));
endmodule
