// tb_secddr_mc: checks the processor-side unit on its own.  The testbench
// plays the DIMM: for every WRITE it predicts the ECC-lane burst
// {eWCRC(address, MAC), MAC} XOR AES_Kt({address, C_t})[79:0] from reference
// models and checks it arrives exactly TCWL cycles after the command; for
// every READ it returns MAC XOR AES_Kt({0, C_t})[63:0] TCL cycles after the
// command and checks that the unit hands back the plain MAC and address.
// Two ranks with different keys and counters, random traffic; also checks
// that nothing is accepted before a rank's session exists.
//
// Expected lane words come from the reference AES and CRC, not from the RTL.
module tb_secddr_mc;
  import secddr_pkg::*;
  import aes_ref_pkg::*;
  localparam int NR = 2;
  logic clk = 0, rst_n = 0;
  logic ld_valid = 0; logic [RANK_W-1:0] ld_rank = '0;
  logic [KEY_W-1:0] ld_key = '0; logic [CTR_W-1:0] ld_ctr = '0;
  logic req_valid = 0, req_ready, req_is_write = 0;
  ddr_addr_t req_addr = '0; logic [MAC_W-1:0] req_mac = '0;
  ddr_cmd_t cmd;
  logic wlane_valid; logic [WLANE_W-1:0] wlane;
  logic rlane_valid = 0; logic [MAC_W-1:0] rlane = '0;
  logic rsp_valid; ddr_addr_t rsp_addr; logic [MAC_W-1:0] rsp_mac;
  logic [NR-1:0] established;
  logic [NR-1:0][CTR_W-1:0] last_ctr;

  always #5 clk = ~clk;
  secddr_mc dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL %s t=%0t", w, $time); end
  endtask

  int unsigned now = 0;
  always @(posedge clk) now <= now + 1;

  logic [127:0] keys [NR];
  longint unsigned ctr [NR];
  typedef struct { int unsigned t; logic [WLANE_W-1:0] v; } wexp_t;
  typedef struct { int unsigned t; logic [MAC_W-1:0] e; logic [MAC_W-1:0] m; ddr_addr_t a; } rexp_t;
  wexp_t wq[$]; rexp_t rq[$]; rexp_t rsp_q[$];
  ddr_cmd_t exp_cmd_q[$];
  int n_w = 0, n_r = 0;

  // the DIMM side
  always @(posedge clk) if (rst_n) begin
    logic [127:0] pad;
    int r;
    if (cmd.valid) begin
      ddr_cmd_t ec;
      ec = exp_cmd_q.pop_front();
      chk(cmd == ec, "command on the bus");
      r = cmd.addr.rank;
      ctr[r] = ref_next_ctr(ctr[r], cmd.is_write);
      if (cmd.is_write) begin
        wexp_t w;
        pad = aes128(keys[r], {33'b0, cmd.addr, ctr[r]});
        w.t = now + T_CWL;
        w.v = {ref_crc16(256'({cmd.addr, req_mac_of[cmd.addr]}), ADDR_W + MAC_W),
               req_mac_of[cmd.addr]} ^ pad[WLANE_W-1:0];
        wq.push_back(w);
      end else begin
        rexp_t x;
        pad = aes128(keys[r], {64'b0, ctr[r]});
        x.m = {$urandom, $urandom};
        x.e = x.m ^ pad[MAC_W-1:0];
        x.t = now + T_CL;
        x.a = cmd.addr;
        rq.push_back(x);
        rsp_q.push_back(x);
      end
    end
    if (wlane_valid) begin
      wexp_t w;
      w = wq.pop_front();
      chk(now == w.t, $sformatf("write burst at %0d, expected %0d", now, w.t));
      chk(wlane == w.v, "encrypted {eWCRC, MAC} burst");
      n_w++;
    end
    if (rsp_valid) begin
      rexp_t x;
      x = rsp_q.pop_front();
      chk(rsp_mac == x.m && rsp_addr == x.a, "decrypted read MAC");
      n_r++;
    end
  end

  // drive the read lane TCL after each READ
  always @(negedge clk) begin
    rlane_valid = 0;
    if (rq.size() > 0 && rq[0].t == now) begin
      rlane_valid = 1; rlane = rq[0].e;
      void'(rq.pop_front());
    end
  end

  logic [MAC_W-1:0] req_mac_of [ddr_addr_t];
  int unsigned last_w = 0, last_r = 0;

  task automatic issue(input bit w, input ddr_addr_t a);
    if (w) while (now < last_r + 8) @(negedge clk);
    req_valid = 1; req_is_write = w; req_addr = a;
    req_mac = {$urandom, $urandom};
    if (w) req_mac_of[a] = req_mac;
    do @(posedge clk); while (!req_ready);
    exp_cmd_q.push_back('{valid: 1'b1, is_write: w, addr: a});
    #1;
    if (w) last_w = now; else last_r = now;
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    ddr_addr_t a;
    repeat (3) @(negedge clk);
    rst_n = 1;
    req_valid = 1; req_addr = '0;
    @(negedge clk);
    chk(!req_ready, "not ready before the session is loaded");
    req_valid = 0;
    keys[0] = 128'h000102030405060708090a0b0c0d0e0f; ctr[0] = 64'd4;
    keys[1] = 128'h3243f6a8885a308d313198a2e0370734; ctr[1] = 64'd999;
    for (int r = 0; r < NR; r++) begin
      ld_valid = 1; ld_rank = RANK_W'(r); ld_key = keys[r]; ld_ctr = ctr[r];
      @(negedge clk);
    end
    ld_valid = 0;
    for (int i = 0; i < 60; i++) begin
      a = '{rank: RANK_W'($urandom), bg: BG_W'($urandom), ba: BA_W'($urandom),
            row: ROW_W'($urandom), col: COL_W'($urandom)};
      issue($urandom_range(0, 1), a);
      if ($urandom_range(0, 2) == 0) repeat ($urandom_range(1, 6)) @(negedge clk);
    end
    repeat (60) @(negedge clk);
    chk(n_w > 10 && n_r > 10, "traffic seen");
    chk(wq.size() == 0 && rsp_q.size() == 0, "nothing left outstanding");
    for (int r = 0; r < NR; r++) chk(last_ctr[r] == ctr[r], "counter matches model");
    $display("writes=%0d reads=%0d", n_w, n_r);
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
