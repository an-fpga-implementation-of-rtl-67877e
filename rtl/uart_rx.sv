// uart_rx: asynchronous serial receiver, 8 data bits, no parity, 1 stop bit,
// least significant bit first, idle line high.
//
// The input is synchronised through two flip-flops. A falling edge starts a
// frame; the start bit is checked at its middle, then each data bit and the
// stop bit are sampled CLKS_PER_BIT cycles apart. valid pulses for one cycle
// with the byte on data when a stop bit is high; a frame with a low stop bit
// is dropped. CLKS_PER_BIT is the clock frequency over the baud rate
// (100 MHz / 115200 by default); the serial format is this design's choice.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data
);
  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_e;
  localparam int unsigned TW = $clog2(CLKS_PER_BIT + 1);

  rx_state_e     state;
  logic [TW-1:0] timer;
  logic [2:0]    bit_idx;
  logic [1:0]    sync;
  logic          rx;

  assign rx = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync    <= 2'b11;
      state   <= RX_IDLE;
      timer   <= '0;
      bit_idx <= '0;
      valid   <= 1'b0;
      data    <= '0;
    end else begin
      sync  <= {sync[0], rxd};
      valid <= 1'b0;
      unique case (state)
        RX_IDLE:
          if (!rx) begin
            state <= RX_START;
            timer <= TW'(CLKS_PER_BIT / 2 - 1);
          end
        RX_START:
          if (timer == '0) begin
            if (!rx) begin
              state   <= RX_DATA;
              timer   <= TW'(CLKS_PER_BIT - 1);
              bit_idx <= '0;
            end else begin
              state <= RX_IDLE;          // glitch, not a start bit
            end
          end else timer <= timer - 1'b1;
        RX_DATA:
          if (timer == '0) begin
            data  <= {rx, data[7:1]};
            timer <= TW'(CLKS_PER_BIT - 1);
            if (bit_idx == 3'd7) state <= RX_STOP;
            bit_idx <= bit_idx + 1'b1;
          end else timer <= timer - 1'b1;
        RX_STOP:
          if (timer == '0) begin
            valid <= rx;
            state <= RX_IDLE;
          end else timer <= timer - 1'b1;
        default: state <= RX_IDLE;
      endcase
    end
  end
endmodule
