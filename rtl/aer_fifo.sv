// aer_fifo: synchronous first-in first-out buffer for AER (address-event)
// words in front of a time-division-multiplexed layer.
//
// A write happens on a clock edge with wr_en high and full low. A read
// (rd_en high, empty low) pops the oldest word; it appears on dout on the
// next cycle and stays there until the next read, which matches the FIFO
// waveform of the convolutional layer (data_out one cycle after rd_en).
// count gives the number of stored words so a sender can see free space.
// Depth (any value from 2) and width are parameters; the depth of 16 is
// this design's choice.
module aer_fifo #(
  parameter int unsigned W     = 10,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [W-1:0]  din,
  output logic          full,
  input  logic          rd_en,
  output logic [W-1:0]  dout,
  output logic          empty,
  output logic [AW:0]   count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
      dout  <= '0;
    end else begin
      if (do_wr) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (do_rd) begin
        rp   <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
        dout <= mem[rp];
      end
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
