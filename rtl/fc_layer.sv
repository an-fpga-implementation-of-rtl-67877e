// fc_layer: fully-connected spiking output layer, one neuron per isotope
// class, processed in time-division multiplex.
//
// Each pool spike {filter f, window q} is queued in a FIFO. The controller
// then takes it (IDLE, LOAD) and updates the N_OUT output neurons one after
// another, each in a READ cycle (weight ROM word row*N_OUT+o addressed) and a
// PROCESS cycle (V[o] + w through the shared integrate-and-fire ALU, result
// written back). A neuron that fires emits its class number on aer_out with a
// one-cycle req_out pulse in the following cycle. One pool spike therefore
// costs 2 + 2*N_OUT = 18 cycles.
//
// The weight ROM has rows only for the 63 full pool windows of each filter
// (4 x 63 x 8 = 2016 weights, which with the 20 conv weights gives the
// network's published total of 2036). A spike from the last, partial window
// of a filter has no row and is discarded in LOAD.
//
// ready is high while the FIFO has room for READY_SLOTS more spikes: the
// worst case of one input event (8) plus two already on their way through
// the conv and pool output registers. The 8 membrane voltages are registers,
// cleared by reset. The TDM scheme follows the published convolutional
// layer; widths, V_thr, V_min and FIFO depth are this design's choices.
module fc_layer
  import csnn_pkg::*;
#(
  parameter int unsigned NF          = N_FILT,
  parameter int unsigned NP          = N_POOL,        // pool neurons per filter
  parameter int unsigned NPF         = N_POOL_FULL,   // those with weights
  parameter int unsigned NO          = N_OUT,
  parameter int unsigned VW          = 16,
  parameter int signed   V_THR       = 64,
  parameter int signed   V_MIN       = -64,
  parameter int unsigned FIFO_DEPTH  = 16,
  parameter int unsigned READY_SLOTS = MAX_POOL_SPIKES_PER_EVENT + 2,
  parameter string       WEIGHT_FILE = "",
  localparam int unsigned FW  = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned QW  = (NP > 1) ? $clog2(NP) : 1,
  localparam int unsigned OW  = (NO > 1) ? $clog2(NO) : 1,
  localparam int unsigned NW  = NF * NPF * NO,
  localparam int unsigned WAW = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_in,
  input  logic [FW+QW-1:0] aer_in,
  output logic             ready,
  output logic             req_out,
  output logic [OW-1:0]    aer_out,
  output logic             discard,   // pulse: a partial-window spike was dropped
  output logic             idle
);
  localparam int unsigned CNTW = $clog2(FIFO_DEPTH) + 1;

  logic                 fifo_full, fifo_empty, fifo_rd_en;
  logic [FW+QW-1:0]     fifo_dout;
  logic [CNTW-1:0]      fifo_count;
  tdm_state_e           state;
  logic [WAW-1:0]       row_base;   // row * NO
  logic [OW-1:0]        o;
  logic [WAW-1:0]       rom_addr;
  weight_t              weight;
  logic signed [VW-1:0] v [NO];
  logic signed [VW-1:0] integ, post_fire;
  logic                 fire;
  logic [FW-1:0]        f_ld;
  logic [QW-1:0]        q_ld;

  aer_fifo #(.W(FW+QW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en (req_in), .din (aer_in), .full (fifo_full),
    .rd_en (fifo_rd_en), .dout (fifo_dout), .empty (fifo_empty),
    .count (fifo_count)
  );

  weight_rom #(.DEPTH(NW), .KIND(ROM_FC), .INIT_FILE(WEIGHT_FILE)) u_rom (
    .clk, .addr (rom_addr), .data_out (weight)
  );

  neuron_alu #(.VW(VW), .WW(WW)) u_alu (
    .v_in (v[o]), .weight, .v_thr (VW'(V_THR)), .v_min (VW'(V_MIN)),
    .fire, .integration_result (integ), .post_fire_result (post_fire)
  );

  always_comb begin
    f_ld       = fifo_dout[FW+QW-1 -: FW];
    q_ld       = fifo_dout[QW-1:0];
    fifo_rd_en = (state == ST_IDLE) && !fifo_empty;
    rom_addr   = row_base + WAW'(o);
    ready      = (32'(fifo_count) + READY_SLOTS <= FIFO_DEPTH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      row_base <= '0;
      o        <= '0;
      req_out  <= 1'b0;
      aer_out  <= '0;
      discard  <= 1'b0;
      for (int i = 0; i < NO; i++) v[i] <= '0;
    end else begin
      req_out <= 1'b0;
      discard <= 1'b0;
      unique case (state)
        ST_IDLE:
          if (!fifo_empty) state <= ST_LOAD;
        ST_LOAD: begin
          o <= '0;
          if (32'(q_ld) >= NPF) begin
            discard <= 1'b1;
            state   <= ST_IDLE;
          end else begin
            row_base <= WAW'((32'(f_ld) * NPF + 32'(q_ld)) * NO);
            state    <= ST_READ;
          end
        end
        ST_READ:
          state <= ST_PROCESS;
        ST_PROCESS: begin
          v[o]    <= fire ? post_fire : integ;
          req_out <= fire;
          if (fire) aer_out <= o;
          if (32'(o) == NO - 1) state <= ST_IDLE;
          else begin
            o     <= o + 1'b1;
            state <= ST_READ;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign idle = (state == ST_IDLE) && fifo_empty && !req_out;

  a_fifo_never_full_on_write: assert property (@(posedge clk) disable iff (!rst_n)
    req_in |-> !fifo_full);
endmodule
