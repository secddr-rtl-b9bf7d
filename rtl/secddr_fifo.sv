// secddr_fifo: small synchronous FIFO used to keep transactions in command
// order inside the SecDDR endpoints.
//
// Registered storage of DEPTH entries of WIDTH bits, first-word fall-through:
// `rd_data` shows the head whenever `rd_valid` is high; `rd_en` pops it.
// `wr_en` pushes `wr_data` when `full` is low.  A push and a pop may occur in
// the same cycle.  Pushing when full or popping when empty is a protocol
// error and is caught by assertions.  Asynchronous active-low reset.
//
// A generic helper; nothing in it is specific to SecDDR.
module secddr_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic             rd_valid,
  output logic [WIDTH-1:0] rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;

  assign full     = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en && !full) wp <= inc(wp);
      if (rd_en && rd_valid) rp <= inc(rp);
      case ({wr_en && !full, rd_en && rd_valid})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && !rd_valid));
endmodule
