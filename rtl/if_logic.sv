// if_logic: integrate-and-fire spiking logic of one neuron.
//
// What it does: when enabled (the SPIKE operation) it adds the neuron's
// weighted sum x to its membrane potential. If the new potential exceeds the
// threshold (strictly greater), it fires a spike and the threshold is
// subtracted from the potential ("reset by subtraction"); otherwise the new
// potential is kept. clr resets the potential to 0, e.g. between frames.
//
// Interface and timing: x, threshold and en are sampled at the rising edge;
// spike and potential are registers, valid the cycle after the SPIKE. spike
// holds its value until the next SPIKE, so it can be sent several times.
//
// From the paper: integrate, compare with the threshold, fire, subtract.
// The paper's sentence reads "the potential value is subtracted from the
// threshold"; this design follows the usual reset-by-subtraction
// (potential - threshold) that its ANN-to-SNN conversion relies on. The
// potential width (20 bits), saturation at its limits, the strict ">"
// comparison and the clear input are this design's choices.
module if_logic #(
  parameter int unsigned XW = 16,   // weighted-sum width
  parameter int unsigned PW = 20    // potential width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 en,
  input  logic signed [XW-1:0] x,
  input  logic signed [PW-1:0] threshold,
  output logic                 spike,
  output logic signed [PW-1:0] potential
);

  localparam logic signed [PW-1:0] PMAX = {1'b0, {(PW-1){1'b1}}};
  localparam logic signed [PW-1:0] PMIN = {1'b1, {(PW-1){1'b0}}};

  logic signed [PW:0]   wide;
  logic signed [PW-1:0] integ;
  logic                 fire;

  assign wide  = (PW+1)'(potential) + (PW+1)'(x);
  assign integ = (wide > (PW+1)'(PMAX)) ? PMAX :
                 (wide < (PW+1)'(PMIN)) ? PMIN : PW'(wide);
  assign fire  = integ > threshold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      potential <= '0;
      spike     <= 1'b0;
    end else if (clr) begin
      potential <= '0;
      spike     <= 1'b0;
    end else if (en) begin
      potential <= fire ? integ - threshold : integ;
      spike     <= fire;
    end
  end

endmodule
