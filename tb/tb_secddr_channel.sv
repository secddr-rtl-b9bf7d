// tb_secddr_channel: end-to-end test of one SecDDR channel with two ranks at
// the default (paper) parameters.  The testbench plays three roles:
//  - the memory encryption engine: it invents a MAC for every write, keeps a
//    shadow copy per address and verifies every MAC returned by a read;
//  - the untrusted channel between processor and ECC chips, which passes
//    traffic through or attacks it (replayed read E-MAC, write redirected to
//    another row, dropped write, write turned into a read, a DIMM brought
//    back with an old counter);
//  - the ECC chips' DRAM arrays.
// It checks that honest traffic always verifies, that the per-rank counters
// stay equal at both ends, the TCWL/TCL burst timing, and that every attack
// is detected (a MAC mismatch at the processor or an eWCRC alert).  Each
// mechanism is counted and a mechanism that never occurred is a failure.
module tb_secddr_channel;
  import secddr_pkg::*;

  localparam int NR = 2;
  logic clk = 1'b0, rst_n = 1'b0;

  logic               mc_ld_valid = 0, dimm_ld_valid = 0;
  logic [RANK_W-1:0]  mc_ld_rank = '0, dimm_ld_rank = '0;
  logic [KEY_W-1:0]   mc_ld_key = '0, dimm_ld_key = '0;
  logic [CTR_W-1:0]   mc_ld_ctr = '0, dimm_ld_ctr = '0;
  logic               req_valid = 0, req_ready, req_is_write = 0;
  ddr_addr_t          req_addr = '0;
  logic [MAC_W-1:0]   req_mac = '0;
  logic               rsp_valid;
  ddr_addr_t          rsp_addr;
  logic [MAC_W-1:0]   rsp_mac;
  ddr_cmd_t           mc_cmd, dimm_cmd;
  logic               mc_wlane_valid, mc_rlane_valid, dimm_rlane_valid;
  logic [WLANE_W-1:0] mc_wlane, dimm_wlane;
  logic [MAC_W-1:0]   mc_rlane, dimm_rlane;
  logic [NR-1:0]                    st_rd_en, st_wr_en;
  logic [NR-1:0][ADDR_W-RANK_W-1:0] st_rd_addr, st_wr_addr;
  logic [NR-1:0][MAC_W-1:0]         st_rd_data, st_wr_data;
  logic [NR-1:0]                    crc_alert, mc_established, dimm_established;
  logic [NR-1:0][CTR_W-1:0]         mc_ctr, dimm_ctr;

  always #5 clk = ~clk;

  secddr_channel dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  int unsigned now = 0;
  always @(posedge clk) now <= now + 1;

  // ---------------- DRAM arrays of the ECC chips ----------------
  logic [MAC_W-1:0] mem [NR][logic [ADDR_W-RANK_W-1:0]];
  always @(posedge clk) begin
    for (int r = 0; r < NR; r++) begin
      if (st_wr_en[r]) mem[r][st_wr_addr[r]] = st_wr_data[r];
      if (st_rd_en[r]) st_rd_data[r] <= mem[r].exists(st_rd_addr[r]) ? mem[r][st_rd_addr[r]] : '0;
    end
  end

  // ---------------- the untrusted channel ----------------
  bit atk_drop = 0, atk_redirect = 0, atk_w2r = 0, atk_replay = 0;
  logic [MAC_W-1:0] replay_val;
  int unsigned suppress_at = 0;
  bit suppress = 0;
  logic [MAC_W-1:0] last_emac;      // last E-MAC seen on the read lane

  always_comb begin
    dimm_cmd   = mc_cmd;
    dimm_wlane = mc_wlane;
    if (mc_cmd.valid && atk_drop) dimm_cmd.valid = 1'b0;
    if (mc_cmd.valid && mc_cmd.is_write && atk_redirect) dimm_cmd.addr.row = mc_cmd.addr.row ^ 16'h0040;
    if (mc_cmd.valid && mc_cmd.is_write && atk_w2r) dimm_cmd.is_write = 1'b0;
    mc_rlane_valid = dimm_rlane_valid && !(suppress && now == suppress_at);
    mc_rlane       = (atk_replay && dimm_rlane_valid) ? replay_val : dimm_rlane;
  end

  always @(posedge clk) begin
    if (mc_cmd.valid) begin
      if (atk_w2r && mc_cmd.is_write) begin suppress = 1; suppress_at = now + T_CL; end
      atk_drop <= 0; atk_redirect <= 0; atk_w2r <= 0;
    end
    if (dimm_rlane_valid) begin
      last_emac <= dimm_rlane;
      atk_replay <= 0;
    end
  end

  // ---------------- burst timing ----------------
  int unsigned rd_cmd_t[$], wr_cmd_t[$];
  int n_rd_timing = 0, n_wr_timing = 0;
  always @(posedge clk) if (rst_n) begin
    int unsigned t0;
    if (mc_cmd.valid) begin
      if (mc_cmd.is_write) wr_cmd_t.push_back(now);
      if (!mc_cmd.is_write || atk_w2r) rd_cmd_t.push_back(now);  // DIMM sees a READ
    end
    if (mc_wlane_valid) begin
      t0 = wr_cmd_t.pop_front();
      chk(now - t0 == T_CWL, $sformatf("write burst %0d cycles after WRITE", now - t0));
      n_wr_timing++;
    end
    if (dimm_rlane_valid) begin
      t0 = rd_cmd_t.pop_front();
      chk(now - t0 == T_CL, $sformatf("read burst %0d cycles after READ", now - t0));
      n_rd_timing++;
    end
  end

  // ---------------- encryption engine model: MAC verification ----------------
  logic [MAC_W-1:0] shadow [logic [ADDR_W-1:0]];
  typedef struct { ddr_addr_t a; logic [MAC_W-1:0] m; } exp_t;
  exp_t exp_q[$];
  int n_ok = 0, n_bad = 0;
  always @(posedge clk) if (rst_n && rsp_valid) begin
    exp_t e;
    e = exp_q.pop_front();
    chk(rsp_addr == e.a, "response order");
    if (rsp_mac == e.m) n_ok++; else n_bad++;
  end

  int n_stall = 0;
  always @(posedge clk) if (rst_n && req_valid && !req_ready && mc_established[req_addr.rank]) n_stall++;

  int unsigned last_wr = 0, last_rd = 0;

  task automatic issue(input bit w, input ddr_addr_t a, input logic [MAC_W-1:0] m);
    // turnaround rules a DDR controller keeps: data bursts in command order,
    // and a read of a line only after an earlier write to it has landed
    if (w)  while (now < last_rd + 8)  @(negedge clk);
    if (!w) while (now < last_wr + 24) @(negedge clk);
    req_valid = 1; req_is_write = w; req_addr = a; req_mac = m;
    do @(posedge clk); while (!req_ready);
    #1;
    if (w) begin shadow[a] = m; last_wr = now; end
    else begin
      exp_q.push_back('{a, shadow.exists(a) ? shadow[a] : '0});
      last_rd = now;
    end
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic wr(input ddr_addr_t a); issue(1, a, {$urandom, $urandom}); endtask
  task automatic rd(input ddr_addr_t a); issue(0, a, '0); endtask
  task automatic drain; repeat (60) @(negedge clk); endtask

  function automatic ddr_addr_t rnd_addr(input int rank);
    ddr_addr_t a;
    a = '{rank: RANK_W'(rank), bg: BG_W'($urandom), ba: BA_W'($urandom),
          row: ROW_W'($urandom), col: COL_W'($urandom)};
    return a;
  endfunction

  task automatic establish(input int r, input logic [127:0] k, input logic [63:0] c,
                           input bit mc_side, input bit dimm_side);
    @(negedge clk);
    mc_ld_valid = mc_side;  mc_ld_rank = RANK_W'(r); mc_ld_key = k; mc_ld_ctr = c;
    dimm_ld_valid = dimm_side; dimm_ld_rank = RANK_W'(r); dimm_ld_key = k; dimm_ld_ctr = c;
    @(negedge clk);
    mc_ld_valid = 0; dimm_ld_valid = 0;
  endtask

  // mechanism counters
  int m_verified = 0, m_replay = 0, m_redirect = 0, m_drop = 0, m_w2r = 0,
      m_subst = 0, m_stall = 0, m_rekey = 0;
  int n_alert = 0;
  always @(posedge clk) if (rst_n) n_alert += $countones(crc_alert);

  initial begin
    ddr_addr_t a[8];
    ddr_addr_t x;
    int ok0, bad0, al0;
    logic [63:0] old_ctr;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!req_ready, "no request before the session is established");
    establish(0, 128'h000102030405060708090a0b0c0d0e0f, 64'd1000, 1, 1);
    establish(1, 128'h2b7e151628aed2a6abf7158809cf4f3c, 64'd77, 1, 1);

    // 1. honest traffic on both ranks
    for (int i = 0; i < 8; i++) begin a[i] = rnd_addr(i % 2); wr(a[i]); end
    for (int i = 0; i < 8; i++) rd(a[i]);
    drain;
    chk(n_ok == 8 && n_bad == 0, $sformatf("honest reads verified: ok=%0d bad=%0d", n_ok, n_bad));
    for (int r = 0; r < NR; r++) chk(mc_ctr[r] == dimm_ctr[r], "counters in step");
    if (n_ok == 8) m_verified++;

    // 2. back-to-back reads: the pad engines limit the command rate
    n_stall = 0;
    fork
      for (int i = 0; i < 8; i++) rd(a[i]);
    join
    drain;
    chk(n_ok == 16 && n_bad == 0, "back-to-back reads verified");
    if (n_stall > 0) m_stall++;

    // 3. replay of an old read E-MAC for a line that has since been rewritten
    x = a[0];
    rd(x); drain;                       // last_emac now holds this read's E-MAC
    replay_val = last_emac;
    wr(x);
    ok0 = n_ok; bad0 = n_bad;
    atk_replay = 1;
    rd(x); drain;
    chk(n_bad == bad0 + 1, "replayed E-MAC detected");
    if (n_bad == bad0 + 1) m_replay++;
    rd(x); drain;
    chk(n_ok == ok0 + 1, "line readable after the replay attempt");

    // 4. write redirected to another row by corrupting the command
    x = a[1];
    al0 = n_alert; bad0 = n_bad;
    atk_redirect = 1;
    wr(x); drain;
    chk(n_alert == al0 + 1, "eWCRC alert on redirected write");
    chk(mem[x.rank].exists({x.bg, x.ba, x.row ^ 16'h0040, x.col}) == 0, "redirected write not stored");
    rd(x); drain;                        // stale MAC still in place
    chk(n_bad == bad0 + 1, "stale line after the dropped write fails verification");
    if (n_alert == al0 + 1 && n_bad == bad0 + 1) m_redirect++;
    wr(x); rd(x); drain;                 // rewrite repairs the line
    chk(n_bad == bad0 + 1, "line repaired by a new write");

    // 5. dropped write: counters desynchronise, every later read fails
    x = a[2];
    bad0 = n_bad;
    atk_drop = 1;
    wr(x); drain;
    chk(mc_ctr[x.rank] != dimm_ctr[x.rank], "dropped write desynchronises counters");
    rd(a[4]); rd(a[6]); drain;           // same rank (rank 0)
    chk(n_bad == bad0 + 2, "reads after a dropped write fail");
    if (n_bad == bad0 + 2) m_drop++;
    // re-attestation installs a fresh key and counter at both ends
    establish(0, 128'hfeedfacecafebeef0011223344556677, 64'd5000, 1, 1);
    wr(x); rd(x); rd(a[4]); drain;
    ok0 = n_ok;
    chk(n_bad == bad0 + 2, "rank 0 verifies again after re-keying");
    if (mc_ctr[0] == dimm_ctr[0]) m_rekey++;

    // 6. write turned into a read (its read data hidden from the processor)
    x = a[3];                            // rank 1
    bad0 = n_bad;
    atk_w2r = 1;
    wr(x); drain;
    rd(a[5]); drain;
    chk(n_bad == bad0 + 1, "write-to-read conversion detected by counter parity");
    if (n_bad == bad0 + 1) m_w2r++;
    establish(1, 128'h0f0e0d0c0b0a09080706050403020100, 64'd9, 1, 1);
    wr(x); rd(x); drain;

    // 7. DIMM substitution: the DIMM side comes back with an old counter
    x = a[4];
    old_ctr = dimm_ctr[0];
    for (int i = 0; i < 4; i++) begin wr(x); end
    rd(x); drain;
    bad0 = n_bad;
    establish(0, 128'hfeedfacecafebeef0011223344556677, old_ctr, 0, 1);
    rd(x); drain;
    chk(n_bad == bad0 + 1, "old-state DIMM detected");
    if (n_bad == bad0 + 1) m_subst++;

    chk(n_rd_timing > 0 && n_wr_timing > 0, "burst timing observed");
    chk(m_verified > 0, "mechanism: honest verification");
    chk(m_stall > 0,    "mechanism: stall on pad-engine throughput");
    chk(m_replay > 0,   "mechanism: replay detection");
    chk(m_redirect > 0, "mechanism: eWCRC alert on misdirected write");
    chk(m_drop > 0,     "mechanism: dropped-write detection");
    chk(m_rekey > 0,    "mechanism: re-keying");
    chk(m_w2r > 0,      "mechanism: write/read parity");
    chk(m_subst > 0,    "mechanism: DIMM substitution");
    $display("verified=%0d violations=%0d alerts=%0d stall_cycles=%0d", n_ok, n_bad, n_alert, n_stall);
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
