// tb_secddr_session: loads K_t and C_t, then runs a random mix of reads and
// writes and checks every counter value against the rule (even values for
// reads, odd for writes, one step per read and two per write); also checks
// the reset state and a reload in the middle of the sequence.
//
// The expected counters come from the arithmetic form of the step rule,
// 2*(last/2 + 1 or 2) + type, written independently of the RTL.
module tb_secddr_session;
  import secddr_pkg::*;
  import aes_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic load = 1'b0, adv = 1'b0, adv_is_write = 1'b0;
  logic [KEY_W-1:0] load_key = '0, key;
  logic [CTR_W-1:0] load_ctr = '0, ctr_next, last_ctr;
  logic established;
  int checks = 0, failures = 0;
  longint unsigned model;

  always #5 clk = ~clk;
  secddr_session dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic do_load(input logic [127:0] k, input longint unsigned c);
    @(negedge clk); load = 1'b1; load_key = k; load_ctr = c;
    @(negedge clk); load = 1'b0;
    model = c;
    chk(established && key == k && last_ctr == c, "load");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk(!established && last_ctr == 0 && key == 0, "reset state");
    do_load(128'h0123456789abcdeffedcba9876543210, 64'd10);
    for (int n = 0; n < 300; n++) begin
      if (n == 150) do_load(128'h55, 64'hffff_ffff_0000_0007);
      adv_is_write = $urandom_range(0, 1);
      adv = 1'b1;
      #1;
      chk(ctr_next == ref_next_ctr(model, adv_is_write), $sformatf("ctr_next %0d", n));
      chk(ctr_next[0] == adv_is_write, "parity");
      model = ref_next_ctr(model, adv_is_write);
      @(negedge clk);
      adv = 1'b0;
      chk(last_ctr == model, "last_ctr");
      if ($urandom_range(0, 3) == 0) @(negedge clk);   // idle cycle: no change
      chk(last_ctr == model, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
