// result_monitor: counts the output spikes of each isotope class and sends
// the counts to the host.
//
// Every out_req pulse increments the counter of class out_addr (16 bits,
// saturating). A collect pulse copies all counters into a snapshot and sends
// it over the serial transmitter as 2*N_OUT bytes: class 0 first, high byte
// first; busy is high until the last byte has left. clear (or reset) zeroes
// the counters. The host takes the class with the largest count as the
// identified isotope. Counting per class is what the published test set-up
// does; the counter width and byte order are this design's.
module result_monitor
  import csnn_pkg::*;
#(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             out_req,
  input  logic [OUT_W-1:0] out_addr,
  input  logic             collect,
  input  logic             clear,
  output logic             tx_start,
  output logic [7:0]       tx_data,
  input  logic             tx_busy,
  output logic             busy
);
  typedef enum logic [1:0] {M_IDLE, M_SEND, M_WAIT} mon_state_e;
  localparam int unsigned NB = N_OUT * ((CNT_W + 7) / 8);   // bytes per report

  logic [CNT_W-1:0]       count [N_OUT];
  logic [N_OUT*CNT_W-1:0] snap;           // class 0 in the top bits
  mon_state_e             state;
  logic [$clog2(NB+1)-1:0] nsent;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_OUT; i++) count[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < N_OUT; i++) count[i] <= '0;
    end else if (out_req && !(&count[out_addr])) begin
      count[out_addr] <= count[out_addr] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_IDLE;
      snap  <= '0;
      nsent <= '0;
    end else begin
      unique case (state)
        M_IDLE:
          if (collect) begin
            for (int i = 0; i < N_OUT; i++)
              snap[(N_OUT-1-i)*CNT_W +: CNT_W] <= count[i];
            nsent <= '0;
            state <= M_SEND;
          end
        M_SEND:
          if (!tx_busy) state <= M_WAIT;
        M_WAIT:
          if (!tx_busy) begin
            snap  <= snap << 8;
            nsent <= nsent + 1'b1;
            state <= (32'(nsent) == NB - 1) ? M_IDLE : M_SEND;
          end
        default: state <= M_IDLE;
      endcase
    end
  end

  assign tx_start = (state == M_SEND) && !tx_busy;
  assign tx_data  = snap[N_OUT*CNT_W-1 -: 8];
  assign busy     = (state != M_IDLE);
endmodule
