// weight_sram: one synaptic weight bank of a neuron core.
//
// A core keeps its 256x256 5-bit weights in four banks; each bank holds the
// weights from 128 axons to 128 neurons. One row is the weights of one axon
// to all 128 neurons of the bank (128 x 5 = 640 bits), so a row read serves
// one input spike for all neurons at once. The chip uses foundry-compiled
// SRAM macros; here the bank is a synchronous single-port array that a
// synthesis flow can map onto such a macro.
//
// Interface and timing: en/we/addr/wdata are sampled on the rising clock
// edge. A write stores wdata at addr. A read (en=1, we=0) returns the row on
// rdata one cycle later; rdata holds its value until the next read. The bank
// organisation (4 banks, 128 x 128 weights each) follows the paper's figure
// of the neuron core; single-port, one-cycle read latency is this design's
// choice.
module weight_sram #(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned WIDTH = 640
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(ROWS)-1:0]  addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
