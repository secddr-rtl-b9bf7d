// tb_secddr_ewcrc: checks the eWCRC against the CRC-16/XMODEM check value
// ("123456789" -> 0x31C3) and, at the default message width {address, MAC},
// against a long-division reference on random messages, including a
// one-bit address change that must change the CRC.
//
// The check value of "123456789" (0x31C3) is the standard one for this CRC.
module tb_secddr_ewcrc;
  import secddr_pkg::*;
  import aes_ref_pkg::*;
  localparam int W = ADDR_W + MAC_W;
  logic [71:0]    msg72 = "123456789";
  logic [15:0]    crc72;
  logic [W-1:0]   msg;
  logic [15:0]    crc;
  int checks = 0, failures = 0;

  secddr_ewcrc #(.MSG_W(72)) u_check (.msg(msg72), .crc(crc72));
  secddr_ewcrc                u_dut   (.msg(msg),   .crc(crc));

  initial begin
    logic [15:0] c0;
    int k;
    #1;
    checks++;
    if (crc72 !== 16'h31c3) begin failures++; $display("FAIL check value %h", crc72); end
    for (int n = 0; n < 200; n++) begin
      msg = {$urandom, $urandom, $urandom};
      #1;
      checks++;
      if (crc !== ref_crc16(256'(msg), W)) begin
        failures++;
        $display("FAIL msg=%h crc=%h ref=%h", msg, crc, ref_crc16(256'(msg), W));
      end
      c0 = crc;
      k = MAC_W + int'($urandom % ADDR_W);
      msg[k] = ~msg[k];                           // flip one address bit
      #1;
      checks++;
      if (crc === c0) begin failures++; $display("FAIL address flip not detected"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
