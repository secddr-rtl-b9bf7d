// tb_secddr_otp_engine: streams pad requests (random keys and blocks) into
// the AES pool, with and without back-pressure on the pad side, and checks
// that every pad equals the reference AES of its request, that pads leave in
// request order, and that with the sink always ready the pool sustains
// NUM_AES pads per 11 cycles (24 pads within 24/3*11 + 12 cycles).
//
// The throughput bound follows from the three AES units per ECC chip of
// the x8 configuration and the 11-cycle unit latency of this design.
module tb_secddr_otp_engine;
  import aes_ref_pkg::*;
  localparam int N = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_ready;
  logic [127:0] req_key = '0, req_block = '0;
  logic pad_valid, pad_ready = 1'b0;
  logic [127:0] pad;
  int checks = 0, failures = 0;
  logic [127:0] exp_q[$];
  int n_out;
  bit backpressure = 1'b0;

  always #5 clk = ~clk;
  secddr_otp_engine #(.NUM_AES(3)) dut (.*);

  // sink: compare in order
  always @(posedge clk) begin
    if (rst_n && pad_valid && pad_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL pad with no request");
      end else begin
        logic [127:0] e;
        e = exp_q.pop_front();
        if (pad !== e) begin failures++; $display("FAIL pad %h exp %h", pad, e); end
      end
      n_out++;
    end
  end
  always @(negedge clk) pad_ready <= backpressure ? ($urandom_range(0, 3) == 0) : 1'b1;

  // record the expected pad at the clock edge that accepts a request
  int n_acc;
  always @(posedge clk)
    if (rst_n && req_valid && req_ready) begin
      exp_q.push_back(aes128(req_key, req_block));
      n_acc++;
    end

  task automatic stream(input int count, output int cycles);
    int start_out = n_out, start_acc = n_acc;
    cycles = 0;
    @(negedge clk);
    while (n_out - start_out < count && cycles < 2000) begin
      if (n_acc - start_acc < count) begin
        if (!(req_valid && !req_ready)) begin   // hold a refused request
          req_valid = 1'b1;
          req_key   = {$urandom, $urandom, $urandom, $urandom};
          req_block = {$urandom, $urandom, $urandom, $urandom};
        end
      end else req_valid = 1'b0;
      @(negedge clk);
      cycles++;
      if (n_acc - start_acc >= count) req_valid = 1'b0;
    end
    req_valid = 1'b0;
  endtask

  initial begin
    int cyc;
    n_out = 0;
    n_acc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    stream(N, cyc);
    checks++;
    if (cyc > N / 3 * 11 + 12) begin
      failures++; $display("FAIL throughput: %0d pads took %0d cycles", N, cyc);
    end else $display("%0d pads in %0d cycles", N, cyc);
    backpressure = 1'b1;
    stream(N, cyc);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d pads missing", exp_q.size()); end
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
