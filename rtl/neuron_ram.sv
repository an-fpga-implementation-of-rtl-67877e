// neuron_ram: single-port block RAM holding the membrane voltages of the
// convolutional neurons.
//
// Port names follow the layer's block diagram: address, chip_en, read_write
// (1 = write), data_in, data_out. With chip_en high the word at address is
// read on the clock edge and appears on data_out in the next cycle; with
// read_write also high data_in is written on that edge and data_out shows the
// old word (read-first). With chip_en low nothing changes.
//
// 4096 x 9 bits is one 36 Kb Artix-7 block RAM in 4K x 9 mode; 4080 words
// are used. The 9-bit width is this design's choice, made so the layer fits
// the single block RAM of the reported utilisation. The contents are not
// reset: the layer controller clears them after reset.
module neuron_ram #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned VW    = 9,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic [AW-1:0]        address,
  input  logic                 chip_en,
  input  logic                 read_write,
  input  logic signed [VW-1:0] data_in,
  output logic signed [VW-1:0] data_out
);
  logic signed [VW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (chip_en) begin
      data_out <= mem[address];
      if (read_write) mem[address] <= data_in;
    end
  end
endmodule
