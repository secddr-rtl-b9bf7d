// secddr_channel: one SecDDR-protected DDR4 channel: the processor-side unit
// and the SecDDR logic of the ECC chip of every rank.
//
// SecDDR protects the DDR interface against replay by encrypting the per-line
// MAC while it crosses the bus (E-MAC), with a pad from a counter that both
// ends advance on every column command, and by an encrypted, address-aware
// write CRC (eWCRC) that the ECC chip checks before storing a MAC.  Only the
// processor and the ECC chip of each rank are trusted; everything between
// them is not.  This top therefore leaves that untrusted path outside, as
// ports: the memory-controller side of the channel (mc_*) and the DIMM side
// (dimm_*).  Connect mc_cmd to dimm_cmd, mc_wlane to dimm_wlane and dimm_rlane
// to mc_rlane (with its valid) for a plain channel; anything in between models the board,
// the RCD and data buffers, or an attacker on them.  The rank decode (chip
// select) of dimm_cmd is done here.  The data lanes carry already-encrypted
// data that SecDDR does not touch, so they are not modelled.
//
// The key exchange that installs K_t and the initial C_t at both ends is not
// part of this RTL: its results enter through mc_ld_* and dimm_ld_*.  The
// ECC chips' DRAM arrays are outside too (st_* ports, one set per rank).
// Per-rank counters are visible for monitoring.  Timing: see secddr_mc and
// secddr_ecc_chip (WRITE burst TCWL and READ burst TCL cycles after the
// command, DDR4-3200 values by default).  Asynchronous active-low reset.
//
// What follows the SecDDR scheme: one processor-side unit per channel and
// SecDDR logic in each rank's ECC chip, with everything in between untrusted.
// This design's own choices: the untrusted channel is two port sets rather than
// wires, and commands are steered to ranks by the address rank bit, as chip
// select does on a DDR4 bus.
module secddr_channel
  import secddr_pkg::*;
#(
  parameter int unsigned NUM_RANKS   = 2,
  parameter int unsigned MC_NUM_AES  = 3,
  parameter int unsigned ECC_NUM_AES = 3,
  parameter int unsigned TCL         = T_CL,
  parameter int unsigned TCWL        = T_CWL,
  parameter int unsigned QDEPTH      = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // results of the key exchange, processor side and DIMM side
  input  logic               mc_ld_valid,
  input  logic [RANK_W-1:0]  mc_ld_rank,
  input  logic [KEY_W-1:0]   mc_ld_key,
  input  logic [CTR_W-1:0]   mc_ld_ctr,
  input  logic               dimm_ld_valid,
  input  logic [RANK_W-1:0]  dimm_ld_rank,
  input  logic [KEY_W-1:0]   dimm_ld_key,
  input  logic [CTR_W-1:0]   dimm_ld_ctr,
  // column requests from the memory controller / encryption engine
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_is_write,
  input  ddr_addr_t          req_addr,
  input  logic [MAC_W-1:0]   req_mac,
  // decrypted read MACs, to verification
  output logic               rsp_valid,
  output ddr_addr_t          rsp_addr,
  output logic [MAC_W-1:0]   rsp_mac,
  // processor end of the channel
  output ddr_cmd_t           mc_cmd,
  output logic               mc_wlane_valid,
  output logic [WLANE_W-1:0] mc_wlane,
  input  logic               mc_rlane_valid,
  input  logic [MAC_W-1:0]   mc_rlane,
  // DIMM end of the channel
  input  ddr_cmd_t           dimm_cmd,
  input  logic [WLANE_W-1:0] dimm_wlane,
  output logic               dimm_rlane_valid,
  output logic [MAC_W-1:0]   dimm_rlane,
  // ECC-chip DRAM arrays, one port set per rank
  output logic [NUM_RANKS-1:0]                   st_rd_en,
  output logic [NUM_RANKS-1:0][ADDR_W-RANK_W-1:0] st_rd_addr,
  input  logic [NUM_RANKS-1:0][MAC_W-1:0]        st_rd_data,
  output logic [NUM_RANKS-1:0]                   st_wr_en,
  output logic [NUM_RANKS-1:0][ADDR_W-RANK_W-1:0] st_wr_addr,
  output logic [NUM_RANKS-1:0][MAC_W-1:0]        st_wr_data,
  // status
  output logic [NUM_RANKS-1:0]            crc_alert,
  output logic [NUM_RANKS-1:0]            mc_established,
  output logic [NUM_RANKS-1:0]            dimm_established,
  output logic [NUM_RANKS-1:0][CTR_W-1:0] mc_ctr,
  output logic [NUM_RANKS-1:0][CTR_W-1:0] dimm_ctr
);

  secddr_mc #(
    .NUM_RANKS(NUM_RANKS), .NUM_AES(MC_NUM_AES), .TCWL(TCWL), .QDEPTH(QDEPTH)
  ) u_mc (
    .clk, .rst_n,
    .ld_valid    (mc_ld_valid),
    .ld_rank     (mc_ld_rank),
    .ld_key      (mc_ld_key),
    .ld_ctr      (mc_ld_ctr),
    .req_valid, .req_ready, .req_is_write, .req_addr, .req_mac,
    .cmd         (mc_cmd),
    .wlane_valid (mc_wlane_valid),
    .wlane       (mc_wlane),
    .rlane_valid (mc_rlane_valid),
    .rlane       (mc_rlane),
    .rsp_valid, .rsp_addr, .rsp_mac,
    .established (mc_established),
    .last_ctr    (mc_ctr)
  );

  logic [NUM_RANKS-1:0]            r_valid;
  logic [NUM_RANKS-1:0][MAC_W-1:0] r_lane;

  for (genvar r = 0; r < NUM_RANKS; r++) begin : g_rank
    ddr_cmd_t rcmd;
    always_comb begin
      rcmd       = dimm_cmd;
      rcmd.valid = dimm_cmd.valid && (dimm_cmd.addr.rank == RANK_W'(r));
    end

    secddr_ecc_chip #(
      .NUM_AES(ECC_NUM_AES), .TCL(TCL), .TCWL(TCWL), .QDEPTH(QDEPTH),
      .RANK_ID(RANK_W'(r))
    ) u_ecc (
      .clk, .rst_n,
      .ld_valid    (dimm_ld_valid && dimm_ld_rank == RANK_W'(r)),
      .ld_key      (dimm_ld_key),
      .ld_ctr      (dimm_ld_ctr),
      .cmd         (rcmd),
      .wlane       (dimm_wlane),
      .rlane_valid (r_valid[r]),
      .rlane       (r_lane[r]),
      .st_rd_en    (st_rd_en[r]),
      .st_rd_addr  (st_rd_addr[r]),
      .st_rd_data  (st_rd_data[r]),
      .st_wr_en    (st_wr_en[r]),
      .st_wr_addr  (st_wr_addr[r]),
      .st_wr_data  (st_wr_data[r]),
      .crc_alert   (crc_alert[r]),
      .established (dimm_established[r]),
      .last_ctr    (dimm_ctr[r])
    );
  end

  // one rank drives the shared read lane at a time
  always_comb begin
    dimm_rlane_valid = 1'b0;
    dimm_rlane       = '0;
    for (int r = 0; r < NUM_RANKS; r++) begin
      if (r_valid[r]) begin
        dimm_rlane_valid = 1'b1;
        dimm_rlane       = r_lane[r];
      end
    end
  end

  a_one_driver: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(r_valid));
endmodule
