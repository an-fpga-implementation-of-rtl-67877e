// conv_control: the Control Logic state machine of the convolutional layer.
//
// After reset it walks the whole Neuron RAM once, writing 0 into every
// membrane voltage (CLEAR), because a block RAM keeps its contents through a
// reset. Then, for each input event:
//   IDLE     FIFO not empty and the downstream has room: pulse fifo_rd_en
//   LOAD     the FIFO output now holds the channel i; latch it
//   READ     address neuron (filter f, position i-(K-1)+n); weight f*K+n is
//            already on the ROM output (it was addressed a cycle earlier)
//   PROCESS  the RAM output and the weight are valid; the ALU result is
//            written back to the same address, and the next weight is
//            addressed
// READ/PROCESS repeat for n = 0..K-1 and then f = 0..N_FILT-1, so one event
// costs 1 + 1 + 2*K*N_FILT = 42 cycles at the default sizes. Position and tap
// pairing (address i-4+n with weight n) follows the published timing diagram.
// Positions outside 0..N_CONV-1 (channels near either end of the spectrum)
// still take their two cycles but with ram_en low, so they are neither read,
// written nor allowed to fire; this keeps the event time fixed.
// The ds_ready gate (downstream room for the worst-case spikes of one event)
// is this design's addition; the published diagram has no back-pressure
// input on the layer output.
module conv_control
  import csnn_pkg::*;
#(
  parameter int unsigned NF   = N_FILT,
  parameter int unsigned KS   = K,
  parameter int unsigned NIN  = N_IN,
  localparam int unsigned NC  = NIN - KS + 1,
  localparam int unsigned IW  = $clog2(NIN),
  localparam int unsigned FW  = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned PW  = $clog2(NC),
  localparam int unsigned RAW = FW + PW,
  localparam int unsigned CW  = (NF*KS > 1) ? $clog2(NF*KS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            fifo_empty,
  input  logic [IW-1:0]   fifo_dout,
  input  logic            ds_ready,
  output logic            fifo_rd_en,
  output logic [CW-1:0]   rom_addr,
  output logic [RAW-1:0]  ram_addr,
  output logic            ram_en,
  output logic            ram_we,
  output logic            clearing,    // write 0, not the ALU result
  output logic            processing,  // PROCESS state of a valid neuron
  output tdm_state_e      state,
  output logic            busy
);
  logic [IW-1:0]  ev;        // latched input channel
  logic [FW-1:0]  f;
  logic [$clog2(KS+1)-1:0] n;
  logic [RAW-1:0] clr_addr;
  logic [IW:0]    pos_ext;   // i + n, one bit wider
  logic           slot_valid;
  logic [PW-1:0]  pos;
  logic           last_slot;

  always_comb begin
    pos_ext    = (IW+1)'(ev) + (IW+1)'(n);
    slot_valid = (pos_ext >= (IW+1)'(KS-1)) && (pos_ext < (IW+1)'(NC + KS - 1));
    pos        = PW'(pos_ext - (IW+1)'(KS-1));
    last_slot  = (32'(n) == KS-1) && (32'(f) == NF-1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_CLEAR;
      clr_addr <= '0;
      ev       <= '0;
      f        <= '0;
      n        <= '0;
    end else begin
      unique case (state)
        ST_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (&clr_addr) state <= ST_IDLE;
        end
        ST_IDLE:
          if (!fifo_empty && ds_ready) state <= ST_LOAD;
        ST_LOAD: begin
          ev    <= fifo_dout;
          f     <= '0;
          n     <= '0;
          state <= ST_READ;
        end
        ST_READ:
          state <= ST_PROCESS;
        ST_PROCESS: begin
          if (last_slot) begin
            state <= ST_IDLE;
          end else begin
            state <= ST_READ;
            if (32'(n) == KS-1) begin
              n <= '0;
              f <= f + 1'b1;
            end else begin
              n <= n + 1'b1;
            end
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    fifo_rd_en = (state == ST_IDLE) && !fifo_empty && ds_ready;
    // The ROM output is registered: address the slot a cycle ahead so the
    // weight is valid in both READ and PROCESS (LOAD fetches slot 0, and
    // PROCESS fetches the next slot).
    if (state == ST_LOAD)
      rom_addr = '0;
    else if (state == ST_PROCESS && !last_slot)
      rom_addr = (32'(n) == KS-1) ? CW'((32'(f) + 1) * KS) : CW'(32'(f) * KS + 32'(n) + 1);
    else
      rom_addr = CW'(32'(f) * KS + 32'(n));
    clearing   = (state == ST_CLEAR);
    busy       = (state != ST_IDLE);
    processing = (state == ST_PROCESS) && slot_valid;
    if (state == ST_CLEAR) begin
      ram_addr = clr_addr;
      ram_en   = 1'b1;
      ram_we   = 1'b1;
    end else begin
      ram_addr = {f, pos};
      ram_en   = ((state == ST_READ) || (state == ST_PROCESS)) && slot_valid;
      ram_we   = (state == ST_PROCESS) && slot_valid;
    end
  end
endmodule
