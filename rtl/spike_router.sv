// spike_router: the spike router of one neuron, with its spiking logic.
//
// What it does: a multiplexer picks the neuron's input to the spiking logic:
// the local partial sum from the core (a layer that fits in one core) or the
// full weighted sum ejected by the neuron's PS router (a layer spread over
// several cores). The integrate-and-fire logic (if_logic) turns it into a
// 1-bit spike, which the 5x5 crossbar sends into this neuron's spike NoC.
// Spikes from other cores pass through (BYPASS) or are delivered to axon n
// of the local core (eject), where n is this router's neuron index.
//
// Operations (words of type 01):
//   SPIKE s     spike_en=1, sum_or_local=s: integrate and fire
//   SEND dst    inject_en=1: put the last spike on link dst
//   BYPASS s,d  bypass=1: forward link s to link d; with the eject flag
//               (sum_or_local bit, spike_en=0) also deliver it locally,
//               which gives the multicast of successive destinations
//   RECV s      only the eject flag: deliver link s locally
// Ejection and the reuse of the sum_or_local bit as eject flag are this
// design's choices; the paper's table lists SPIKE, SEND and BYPASS only and
// has no field for ejection.
//
// Timing: SPIKE in cycle t updates the spike register at t+1; SEND in t+1
// drives the link register, seen by the neighbour in t+2. BYPASS and eject
// take the raw link value, so a spike advances one hop per cycle, and an
// ejected spike reaches the core's axon latch at the next clock edge.
// Idle output link registers return to 0.
//
// From the paper: the sum/local multiplexer, IF logic, 5x5 crossbar,
// registered outputs, multicast and the SPIKE/SEND/BYPASS fields. The figure
// also draws input registers; here links are registered once, at the output,
// which keeps one cycle per hop (this design's choice).
module spike_router
  import shenjing_pkg::*;
#(
  parameter int unsigned W  = PS_W,
  parameter int unsigned LW = LPS_W,
  parameter int unsigned PW = POT_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  spk_word_t            word,
  input  logic                 clr_pot,
  input  logic signed [PW-1:0] threshold,
  input  logic [LW-1:0]        local_ps,   // from the neuron core (signed)
  input  logic [W-1:0]         ws,         // weighted sum from the PS router
  input  logic [3:0]           in_link,
  output logic [3:0]           out_link,
  output logic                 eject,      // spike to the local core's axon
  output logic                 spike,      // last spike produced
  output logic                 fired       // pulse: SPIKE produced a spike
);

  logic              active, do_spike, do_inject, do_bypass, do_eject;
  logic signed [W-1:0] if_in;
  logic              if_en_q;
  logic signed [PW-1:0] potential;

  assign active    = (word.op_type == OP_SPIKE);
  assign do_spike  = active && word.spike_en;
  assign do_inject = active && !word.spike_en && word.inject_en && !word.bypass;
  assign do_bypass = active && !word.spike_en && word.bypass;
  assign do_eject  = active && !word.spike_en && !word.inject_en && word.sum_or_local;

  // sum_or_local multiplexer
  assign if_in = word.sum_or_local ? $signed(ws) : W'($signed(local_ps));

  if_logic #(.XW(W), .PW(PW)) u_if (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (clr_pot),
    .en        (do_spike),
    .x         (if_in),
    .threshold (threshold),
    .spike     (spike),
    .potential (potential)
  );

  assign eject = do_eject && in_link[word.in_sel];
  assign fired = if_en_q && spike;

  // 5x5 crossbar with registered link outputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_link <= '0;
      if_en_q  <= 1'b0;
    end else begin
      if_en_q <= do_spike;
      for (int d = 0; d < 4; d++) begin
        if (do_inject && word.out_sel == 2'(d))      out_link[d] <= spike;
        else if (do_bypass && word.out_sel == 2'(d)) out_link[d] <= in_link[word.in_sel];
        else                                         out_link[d] <= 1'b0;
      end
    end
  end

  a_one_action: assert property (@(posedge clk) disable iff (!rst_n)
    active |-> !(word.spike_en && (word.inject_en || word.bypass)))
    else $error("spike_router: SPIKE combined with SEND/BYPASS");

endmodule
