// tb_aes128_core: checks the AES-128 unit against published known-answer
// vectors (FIPS-197 Appendices B and C.1, AESAVS GFSbox/KeySbox) and checks
// that `done` rises exactly 11 cycles after `start`.
//
// Known-answer vectors are the published AES-128 test vectors.
module tb_aes128_core;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [127:0] key = '0, block = '0;
  logic busy, done;
  logic [127:0] result;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes128_core dut (.*);

  task automatic run(input logic [127:0] k, input logic [127:0] p, input logic [127:0] exp);
    int cyc;
    @(negedge clk);
    key = k; block = p; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 40) begin @(negedge clk); cyc++; end
    checks++;
    if (result !== exp) begin
      failures++;
      $display("FAIL key=%h pt=%h got %h exp %h", k, p, result, exp);
    end
    checks++;
    if (cyc != 11) begin
      failures++;
      $display("FAIL latency %0d cycles, expected 11", cyc);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32);
    run(128'h0, 128'hf34481ec3cc627bacd5dc3fb08f273e6,
        128'h0336763e966d92595a567cc9ce537f5e);
    run(128'h10a58869d74be5a374cf867cfb473859, 128'h0,
        128'h6d251e6944b051e04eaa6fb4dbf78465);
    // back-to-back: start again on the cycle after done
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
