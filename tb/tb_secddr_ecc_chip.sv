// tb_secddr_ecc_chip: checks the ECC-chip logic of rank 1 on its own.  The
// testbench plays the memory controller (encrypting MACs and eWCRCs with the
// reference AES, counter rule and CRC) and the chip's DRAM array.  It checks
// that honest writes store the decrypted MAC at the right location, that
// reads return MAC XOR OTP_t exactly TCL cycles after the command, and that a
// write whose address was altered on the way (wrong row, column or bank)
// or whose burst was altered is refused with an eWCRC alert.
//
// The checks follow the scheme's rules: stored MAC in plaintext, eWCRC
// checked after decryption, read E-MAC under an even counter.
module tb_secddr_ecc_chip;
  import secddr_pkg::*;
  import aes_ref_pkg::*;
  localparam logic [RANK_W-1:0] MY_RANK = 1'b1;
  logic clk = 0, rst_n = 0;
  logic ld_valid = 0; logic [KEY_W-1:0] ld_key = '0; logic [CTR_W-1:0] ld_ctr = '0;
  ddr_cmd_t cmd = '0;
  logic [WLANE_W-1:0] wlane = '0;
  logic rlane_valid; logic [MAC_W-1:0] rlane;
  logic st_rd_en, st_wr_en;
  logic [ADDR_W-RANK_W-1:0] st_rd_addr, st_wr_addr;
  logic [MAC_W-1:0] st_rd_data = '0, st_wr_data;
  logic crc_alert, established;
  logic [CTR_W-1:0] last_ctr;

  always #5 clk = ~clk;
  secddr_ecc_chip #(.RANK_ID(MY_RANK)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", w, $time); end
  endtask

  int unsigned now = 0;
  always @(posedge clk) now <= now + 1;

  // DRAM array
  logic [MAC_W-1:0] mem [logic [ADDR_W-RANK_W-1:0]];
  int n_store = 0, n_alert = 0;
  always @(posedge clk) begin
    if (rst_n && st_wr_en) begin mem[st_wr_addr] = st_wr_data; n_store++; end
    if (st_rd_en) st_rd_data <= mem.exists(st_rd_addr) ? mem[st_rd_addr] : '0;
    if (rst_n && crc_alert) n_alert++;
  end

  // expected read bursts
  typedef struct { int unsigned t; logic [MAC_W-1:0] e; } rexp_t;
  rexp_t rq[$];
  int n_rd = 0;
  always @(posedge clk) if (rst_n && rlane_valid) begin
    rexp_t x;
    x = rq.pop_front();
    chk(now == x.t, $sformatf("read burst at %0d, expected %0d", now, x.t));
    chk(rlane == x.e, "E-MAC on the read lane");
    n_rd++;
  end

  logic [127:0] key = 128'h10a58869d74be5a374cf867cfb473859;
  longint unsigned ctr = 64'h0123_4567_89ab_cdee;
  logic [MAC_W-1:0] shadow [logic [ADDR_W-RANK_W-1:0]];

  function automatic logic [ADDR_W-RANK_W-1:0] loc(ddr_addr_t a);
    return {a.bg, a.ba, a.row, a.col};
  endfunction

  // WRITE of `mac` meant for `a`; `seen` is the address the chip receives,
  // `flip` is XORed into the burst on the way
  task automatic write(input ddr_addr_t a, input ddr_addr_t seen,
                       input logic [MAC_W-1:0] mac, input logic [WLANE_W-1:0] flip);
    logic [127:0] pad;
    logic [WLANE_W-1:0] burst;
    int unsigned t0;
    ctr = ref_next_ctr(ctr, 1);
    pad = aes128(key, {33'b0, a, ctr});
    burst = {ref_crc16(256'({a, mac}), ADDR_W + MAC_W), mac} ^ pad[WLANE_W-1:0] ^ flip;
    @(negedge clk);
    cmd = '{valid: 1'b1, is_write: 1'b1, addr: seen};
    t0 = now;
    @(negedge clk);
    cmd = '0;
    while (now != t0 + T_CWL) @(negedge clk);
    wlane = burst;
    @(negedge clk);
    wlane = '0;
    repeat (8) @(negedge clk);
  endtask

  task automatic read(input ddr_addr_t a);
    logic [127:0] pad;
    rexp_t x;
    ctr = ref_next_ctr(ctr, 0);
    pad = aes128(key, {64'b0, ctr});
    @(negedge clk);
    cmd = '{valid: 1'b1, is_write: 1'b0, addr: a};
    x.t = now + T_CL;
    x.e = (shadow.exists(loc(a)) ? shadow[loc(a)] : '0) ^ pad[MAC_W-1:0];
    rq.push_back(x);
    @(negedge clk);
    cmd = '0;
  endtask

  function automatic ddr_addr_t rnd_addr();
    return '{rank: MY_RANK, bg: BG_W'($urandom), ba: BA_W'($urandom),
             row: ROW_W'($urandom), col: COL_W'($urandom)};
  endfunction

  initial begin
    ddr_addr_t a[10], b;
    logic [MAC_W-1:0] m;
    int s0, al0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    ld_valid = 1; ld_key = key; ld_ctr = ctr;
    @(negedge clk);
    ld_valid = 0;
    chk(established, "session loaded");
    // honest writes then reads (reads back-to-back, 4 cycles apart)
    for (int i = 0; i < 10; i++) begin
      a[i] = rnd_addr();
      m = {$urandom, $urandom};
      write(a[i], a[i], m, '0);
      chk(mem.exists(loc(a[i])) && mem[loc(a[i])] == m, "MAC stored in plain");
      shadow[loc(a[i])] = m;
    end
    for (int i = 0; i < 10; i++) begin read(a[i]); repeat (2) @(negedge clk); end
    repeat (40) @(negedge clk);
    chk(n_rd == 10, "all reads answered");
    chk(n_alert == 0, "no alert on honest writes");
    // misdirected and corrupted writes
    for (int k = 0; k < 4; k++) begin
      b = a[k];
      case (k)
        0: b.row = b.row ^ 16'h0100;
        1: b.col = b.col ^ 10'h004;
        2: b.ba  = b.ba ^ 2'b01;
        default: ;
      endcase
      s0 = n_store; al0 = n_alert;
      write(a[k], b, {$urandom, $urandom}, (k == 3) ? 80'h1 << $urandom_range(0, 79) : '0);
      chk(n_alert == al0 + 1, $sformatf("eWCRC alert, case %0d", k));
      chk(n_store == s0, $sformatf("tampered write not stored, case %0d", k));
    end
    // the old MACs are still in place and read back correctly
    for (int i = 0; i < 4; i++) begin read(a[i]); repeat (3) @(negedge clk); end
    repeat (40) @(negedge clk);
    chk(n_rd == 14, "reads after the attacks answered");
    chk(last_ctr == ctr, "counter matches model");
    $display("stores=%0d alerts=%0d reads=%0d", n_store, n_alert, n_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
