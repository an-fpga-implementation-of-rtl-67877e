// test_vector_driver: turns test vectors received over the serial link into
// stimulus for the network.
//
// A test vector is 16 bits sent as two bytes, high byte first. Bits 15:14
// select what it is (csnn_pkg::tv_op_e):
//   00  event: bits 9:0 are an energy channel, sent to the network as one
//       AER request (aer_req held with aer_addr until aer_ack)
//   01  collect: wait until the network is idle and the result monitor is
//       free, then pulse collect so the per-class counts are sent back
//   10  reset: pulse soft_rst for one cycle, which resets the network and
//       clears the counts
//   11  ignored
// Complete vectors wait in a 16-deep FIFO so a new one can arrive while the
// previous one is still being served. The host must not run more than 16
// vectors ahead of the network: at 115200 baud a vector takes 17,360 clock
// cycles and the network needs at most a few hundred per event, but during
// the 4096-cycle RAM clear after a reset a much faster link could overrun
// the queue (an assertion flags it). The two control vectors are the ones
// the published test set-up describes; their encoding is this design's.
module test_vector_driver
  import csnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                rx_valid,
  input  logic [7:0]          rx_data,
  output logic                aer_req,
  output logic [AER_IN_W-1:0] aer_addr,
  input  logic                aer_ack,
  input  logic                core_idle,
  input  logic                mon_busy,
  output logic                collect,
  output logic                soft_rst
);
  typedef enum logic [1:0] {D_IDLE, D_LOAD, D_EXEC} drv_state_e;

  logic        have_hi;
  logic [7:0]  hi;
  logic        wq_wr, wq_full, wq_empty, wq_rd;
  logic [15:0] wq_dout;
  logic [4:0]  wq_count;
  drv_state_e  state;
  logic [15:0] word;
  tv_op_e      op;

  assign wq_wr = rx_valid && have_hi;
  assign op    = tv_op_e'(word[15:14]);

  aer_fifo #(.W(16), .DEPTH(16)) u_wq (
    .clk, .rst_n, .wr_en (wq_wr), .din ({hi, rx_data}), .full (wq_full),
    .rd_en (wq_rd), .dout (wq_dout), .empty (wq_empty), .count (wq_count)
  );

  assign wq_rd = (state == D_IDLE) && !wq_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_hi  <= 1'b0;
      hi       <= '0;
      state    <= D_IDLE;
      word     <= '0;
      aer_req  <= 1'b0;
      aer_addr <= '0;
      collect  <= 1'b0;
      soft_rst <= 1'b0;
    end else begin
      collect  <= 1'b0;
      soft_rst <= 1'b0;
      if (rx_valid) begin
        have_hi <= !have_hi;
        if (!have_hi) hi <= rx_data;
      end
      unique case (state)
        D_IDLE: if (!wq_empty) state <= D_LOAD;
        D_LOAD: begin
          word  <= wq_dout;
          state <= D_EXEC;
          if (tv_op_e'(wq_dout[15:14]) == TV_EVENT) begin
            aer_req  <= 1'b1;
            aer_addr <= wq_dout[AER_IN_W-1:0];
          end
        end
        D_EXEC: begin
          unique case (op)
            TV_EVENT:
              if (aer_ack) begin
                aer_req <= 1'b0;
                state   <= D_IDLE;
              end
            TV_COLLECT:
              if (core_idle && !mon_busy) begin
                collect <= 1'b1;
                state   <= D_IDLE;
              end
            TV_RESET: begin
              soft_rst <= 1'b1;
              state    <= D_IDLE;
            end
            default: state <= D_IDLE;
          endcase
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  a_queue_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) wq_wr |-> !wq_full);

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    aer_req && !aer_ack |=> aer_req && $stable(aer_addr));
endmodule
