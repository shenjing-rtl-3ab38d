// cfg_mem: configuration memory of one tile.
//
// What it does: holds the compiled, cycle-by-cycle program of a tile. Entry
// k is executed in the k-th cycle of a period: one 16-bit word for the
// neuron core, and one 16-bit word for each of the 256 PS routers and each
// of the 256 spike routers, so every neuron's two NoCs can be configured
// individually.
//
// How it works: a register file of DEPTH entries with an asynchronous read
// port (raddr -> words, same cycle) and a masked broadcast write port. A
// write to the core slot sets that entry's core word; a write to the PS or
// spike slot stores wdata into the routers whose bit is set in wmask, so a
// word shared by many neurons is written in one cycle. The array has no
// reset: software writes every entry the program counter will reach,
// normally by first broadcasting no-operation words (type 11).
//
// From the paper: configuration memory loaded before execution, driving the
// select signals of crossbars and multiplexers, 16-bit words with a 2-bit
// type. The layout (one core word and one word per router per entry), the
// depth of 256 and the masked write port are this design's choices.
module cfg_mem
  import shenjing_pkg::*;
#(
  parameter int unsigned NN    = NUM_NEURONS,
  parameter int unsigned DEPTH = CFG_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  cfg_slot_e            wslot,
  input  logic [AW-1:0]        waddr,
  input  logic [NN-1:0]        wmask,
  input  logic [15:0]          wdata,
  input  logic [AW-1:0]        raddr,
  output core_word_t           core_word,
  output ps_word_t  [NN-1:0]   ps_words,
  output spk_word_t [NN-1:0]   spk_words
);

  core_word_t            core_mem [DEPTH];
  ps_word_t  [NN-1:0]    ps_mem   [DEPTH];
  spk_word_t [NN-1:0]    spk_mem  [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      case (wslot)
        SLOT_CORE: core_mem[waddr] <= core_word_t'(wdata);
        SLOT_PS:
          for (int n = 0; n < int'(NN); n++)
            if (wmask[n]) ps_mem[waddr][n] <= ps_word_t'(wdata);
        SLOT_SPIKE:
          for (int n = 0; n < int'(NN); n++)
            if (wmask[n]) spk_mem[waddr][n] <= spk_word_t'(wdata);
        default: ;
      endcase
    end
  end

  assign core_word = core_mem[raddr];
  assign ps_words  = ps_mem[raddr];
  assign spk_words = spk_mem[raddr];

endmodule
