// timestamp_counter -- 32-bit wall clock with 10 us resolution.
//
// A prescaler divides the 125 MHz GT reference clock by DIV = 1250 and the
// 32-bit counter advances once per 10 us. The MAC copies its value into the
// TIMESTAMP field of every packet. The 32-bit width and 10 us resolution
// follow the published packet format; deriving it from the GT clock and the
// reset value 0 are choices of this implementation.
//
// Timing: `ts` increments every DIV clocks, wraps after about 11.9 hours.
module timestamp_counter #(
  parameter int unsigned DIV  = 1250,
  parameter int unsigned TS_W = 32
) (
  input  logic            clk,
  input  logic            rst,
  output logic [TS_W-1:0] ts
);
  localparam int unsigned PW = $clog2(DIV);
  logic [PW-1:0] pre;

  always_ff @(posedge clk) begin
    if (rst) begin
      pre <= '0;
      ts  <= '0;
    end else if (pre == PW'(DIV - 1)) begin
      pre <= '0;
      ts  <= ts + 1'b1;
    end else begin
      pre <= pre + 1'b1;
    end
  end
endmodule
