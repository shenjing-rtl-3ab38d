// ps_router: the partial-sum (PS) router of one neuron.
//
// What it does: neuron n of every core has its own PS network, a mesh of
// these routers, over which partial sums of that neuron travel between cores
// and are added on the way. The router has no buffers, no flow control and
// no routing logic: a control word from the configuration memory tells it,
// cycle by cycle, what to do.
//
// How it works:
//   * Every link input is captured in an input register each cycle. The 4x2
//     input crossbar takes (in_sel) either the registered value as the
//     adder's second operand (OP2), or the raw link value as "NoC input
//     bypass" towards the output crossbar.
//   * The adder's first operand (OP1) is the local partial sum from the core
//     (consec_add = 0) or the router's own running sum (consec_add = 1).
//     With add_en the 16-bit sum is written to the sum register.
//   * The 3x5 output crossbar takes the NoC input bypass (bypass = 1), the
//     sum register (sum_buf = 1) or the local partial sum (sum_buf = 0), and
//     drives one of the four output link registers, or (out_sel = 4) the
//     "weighted sum" line to the spiking logic of the same neuron.
//
// Operations (words of type 00): SUM src,consec; SEND sum_buf,dst;
// BYPASS src,dst. An output link register that is not written in a cycle
// returns to 0, so a link carries a value for exactly one cycle.
//
// Timing: a SEND or BYPASS in cycle t puts the value on the output link in
// cycle t+1. The next router can BYPASS it in t+1 (one cycle per hop) or add
// it with a SUM in t+2 (it first passes the input register). The weighted
// sum line to the spiking logic is combinational in the cycle of the SEND.
//
// From the paper: the crossbar sizes, the registered/bypass input paths, the
// OP1 multiplexer, 13-bit local and 16-bit NoC widths, and the control
// fields. This design's choices: port codes (N,S,E,W = 0..3, 4 = to spiking
// logic), wrap-around addition, clearing of idle link registers, and where
// the registers sit on the OP1 path (the local partial sum is already a
// register in the core, the running sum is the sum register, so the OP1
// multiplexer feeds the adder directly).
module ps_router
  import shenjing_pkg::*;
#(
  parameter int unsigned W  = PS_W,   // NoC and adder width
  parameter int unsigned LW = LPS_W   // local partial-sum width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  ps_word_t             word,
  input  logic [LW-1:0]        local_ps,       // from the neuron core (signed)
  input  logic [3:0][W-1:0]    in_link,        // from N, S, E, W neighbours
  output logic [3:0][W-1:0]    out_link,       // to N, S, E, W neighbours
  output logic [W-1:0]         ws,             // weighted sum to spiking logic
  output logic                 ws_valid,
  output logic [W-1:0]         sum             // running sum register
);

  logic [3:0][W-1:0] in_reg;
  logic [W-1:0]      sum_reg, op1, op2, noc_bypass, xbar_src, local_ext;
  logic              active, do_add, do_out;

  assign active     = (word.op_type == OP_PS);
  assign do_add     = active && word.add_en;
  assign do_out     = active && !word.add_en;
  assign local_ext  = W'($signed(local_ps));

  // 4x2 input crossbar
  assign op2        = in_reg[word.in_sel];
  assign noc_bypass = in_link[word.in_sel];

  // OP1 multiplexer (consec_add)
  assign op1        = word.consec_add ? sum_reg : local_ext;

  // 3x5 output crossbar source
  assign xbar_src   = word.bypass ? noc_bypass : (word.sum_buf ? sum_reg : local_ext);

  assign ws         = (do_out && word.out_sel == PS_OUT_LOCAL) ? xbar_src : '0;
  assign ws_valid   = do_out && (word.out_sel == PS_OUT_LOCAL);
  assign sum        = sum_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_reg   <= '0;
      out_link <= '0;
      sum_reg  <= '0;
    end else begin
      in_reg <= in_link;
      if (do_add) sum_reg <= op1 + op2;
      for (int d = 0; d < 4; d++)
        out_link[d] <= (do_out && word.out_sel == 3'(d)) ? xbar_src : '0;
    end
  end

  // SUM carries no destination; its out_sel field is 000 in the table.
  a_sum_no_out: assert property (@(posedge clk) disable iff (!rst_n)
    do_add |-> !word.bypass)
    else $error("ps_router: SUM with bypass set");

endmodule
