// weight_rom: read-only memory of 8-bit signed synaptic weights.
//
// The convolutional layer keeps its 20 weights (4 filters x 5 taps) in one
// of these and the output layer its 2016 weights (252 pool rows x 8 classes)
// in another. The word at addr appears on data_out one clock later. The
// conv controller addresses each weight one cycle before that neuron's READ
// state, so the weight is on data_out through READ and PROCESS, as in the
// published timing diagram; the output-layer controller addresses it in
// READ and uses it in PROCESS.
//
// Contents: if INIT_FILE is a non-empty path the ROM is loaded from that hex
// file (one two-digit two's-complement word per line); otherwise the built-in
// formula csnn_pkg::rom_default(KIND, addr) fills it. The published work does
// not list its trained weights, so the built-in set is a stand-in.
module weight_rom
  import csnn_pkg::*;
#(
  parameter int unsigned DEPTH     = N_CONV_W,
  parameter rom_kind_e   KIND      = ROM_CONV,
  parameter string       INIT_FILE = "",
  localparam int unsigned AW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk,
  input  logic [AW-1:0]   addr,
  output weight_t         data_out
);
  weight_t rom [DEPTH];

  initial begin
    if (INIT_FILE != "") begin
      $readmemh(INIT_FILE, rom);
    end else begin
      for (int unsigned a = 0; a < DEPTH; a++) rom[a] = rom_default(KIND, a);
    end
  end

  always_ff @(posedge clk) begin
    data_out <= (32'(addr) < DEPTH) ? rom[addr] : weight_t'(0);
  end
endmodule
