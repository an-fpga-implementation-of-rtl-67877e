// uart_tx: asynchronous serial transmitter, 8 data bits, no parity, 1 stop
// bit, least significant bit first, idle line high.
//
// A one-cycle start pulse while busy is low loads data; the frame (start bit,
// 8 data bits, stop bit) then takes 10 * CLKS_PER_BIT cycles, during which
// busy is high. The line is driven from the shift register; busy falls as the stop bit ends.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       busy,
  output logic       txd
);
  localparam int unsigned TW = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]    shreg;    // {stop, data, start}, shifted out LSB first
  logic [3:0]    nbits;
  logic [TW-1:0] timer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '1;
      nbits <= '0;
      timer <= '0;
      busy  <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        shreg <= {1'b1, data, 1'b0};
        nbits <= 4'd10;
        timer <= TW'(CLKS_PER_BIT - 1);
        busy  <= 1'b1;
      end
    end else if (timer == '0) begin
      if (nbits == 4'd1) begin
        busy <= 1'b0;
      end else begin
        shreg <= {1'b1, shreg[9:1]};
        nbits <= nbits - 1'b1;
        timer <= TW'(CLKS_PER_BIT - 1);
      end
    end else begin
      timer <= timer - 1'b1;
    end
  end

  assign txd = busy ? shreg[0] : 1'b1;
endmodule
