// shenjing_pkg: sizes, control-word layouts and port encodings shared by all
// modules of the Shenjing spiking-neural-network accelerator.
//
// A tile is a neuron core (256 axons x 256 neurons, 5-bit weights in four
// SRAM banks) plus one partial-sum (PS) router and one spike router per
// neuron. All three are driven by 16-bit control words whose top two bits
// give the word's type: 00 PS router, 01 spike router, 10 neuron core. The
// field order inside each word follows the published control-signal table;
// packing the fields MSB-first with the padding at the LSB end, and using the
// spare type 11 as a no-operation, are this design's own choices.
//
// Port encoding (this design's choice, the paper only lists N, S, E, W):
//   N = 0, S = 1, E = 2, W = 3. Row 0 of the mesh is the north edge and
//   column 0 the west edge.
package shenjing_pkg;

  // ---- sizes taken from the paper -------------------------------------
  localparam int unsigned NUM_AXONS   = 256;  // synapses (inputs) per core
  localparam int unsigned NUM_NEURONS = 256;  // neurons (outputs) per core
  localparam int unsigned NUM_BANKS   = 4;    // weight SRAM banks per core
  localparam int unsigned WEIGHT_W    = 5;    // synaptic weight width
  localparam int unsigned LPS_W       = 13;   // local partial-sum width (Fig. 2 "13b")
  localparam int unsigned PS_W        = 16;   // PS NoC / adder width (Fig. 2 "16b")
  localparam int unsigned CORE_OP_CYCLES = 131; // LD_WT and ACC length

  // ---- sizes chosen here -------------------------------------------------
  localparam int unsigned POT_W       = 20;   // membrane potential width
  localparam int unsigned CFG_DEPTH   = 256;  // control words per program

  // ---- directions --------------------------------------------------------
  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_S = 2'd1,
    DIR_E = 2'd2,
    DIR_W = 2'd3
  } dir_e;

  // PS router out_sel: the four links plus ejection to the spiking logic.
  localparam logic [2:0] PS_OUT_LOCAL = 3'd4;

  // ---- control word types ------------------------------------------------
  typedef enum logic [1:0] {
    OP_PS    = 2'b00,
    OP_SPIKE = 2'b01,
    OP_CORE  = 2'b10,
    OP_NOP   = 2'b11
  } op_type_e;

  // Partial-sum router word: type[2] sum_buf add_en consec_add bypass
  // in_sel[2] out_sel[3] (+5 pad bits).
  typedef struct packed {
    op_type_e    op_type;
    logic        sum_buf;
    logic        add_en;
    logic        consec_add;
    logic        bypass;
    logic [1:0]  in_sel;
    logic [2:0]  out_sel;
    logic [4:0]  pad;
  } ps_word_t;

  // Spike router word: type[2] spike_en sum_or_local inject_en bypass
  // in_sel[2] out_sel[2] (+6 pad bits). When spike_en is 0 the sum_or_local
  // bit is reused as "eject": the spike selected by in_sel is delivered to
  // the local core's axon (RECV, or BYPASS that also ejects = multicast).
  typedef struct packed {
    op_type_e    op_type;
    logic        spike_en;
    logic        sum_or_local;
    logic        inject_en;
    logic        bypass;
    logic [1:0]  in_sel;
    logic [1:0]  out_sel;
    logic [5:0]  pad;
  } spk_word_t;

  // Neuron core word: type[2] r_weight w_weight[4] acc[4] pad[5].
  typedef struct packed {
    op_type_e    op_type;
    logic        r_weight;
    logic [3:0]  w_weight;
    logic [3:0]  acc;
    logic [4:0]  pad;
  } core_word_t;

  // Configuration write slots.
  typedef enum logic [1:0] {
    SLOT_CORE  = 2'd0,
    SLOT_PS    = 2'd1,
    SLOT_SPIKE = 2'd2,
    SLOT_REG   = 2'd3   // tile registers: addr 0 threshold, addr 1 last pc
  } cfg_slot_e;

  localparam core_word_t CORE_NOP = '{op_type: OP_NOP, default: '0};
  localparam ps_word_t   PS_NOP   = '{op_type: OP_NOP, default: '0};
  localparam spk_word_t  SPK_NOP  = '{op_type: OP_NOP, default: '0};

  // ---- assembler helpers (the atomic operations of the control table) ----
  function automatic ps_word_t ps_sum(input dir_e src, input logic consec);
    ps_word_t w = PS_NOP;
    w.op_type = OP_PS; w.add_en = 1'b1; w.consec_add = consec; w.in_sel = src;
    return w;
  endfunction

  // SEND: sum_buf selects the running sum (1) or the local PS (0).
  function automatic ps_word_t ps_send(input logic from_sum, input logic [2:0] dst);
    ps_word_t w = PS_NOP;
    w.op_type = OP_PS; w.sum_buf = from_sum; w.out_sel = dst;
    return w;
  endfunction

  function automatic ps_word_t ps_bypass(input dir_e src, input logic [2:0] dst);
    ps_word_t w = PS_NOP;
    w.op_type = OP_PS; w.bypass = 1'b1; w.in_sel = src; w.out_sel = dst;
    return w;
  endfunction

  function automatic spk_word_t spk_spike(input logic sum_or_local);
    spk_word_t w = SPK_NOP;
    w.op_type = OP_SPIKE; w.spike_en = 1'b1; w.sum_or_local = sum_or_local;
    return w;
  endfunction

  function automatic spk_word_t spk_send(input dir_e dst);
    spk_word_t w = SPK_NOP;
    w.op_type = OP_SPIKE; w.inject_en = 1'b1; w.out_sel = dst;
    return w;
  endfunction

  function automatic spk_word_t spk_bypass(input dir_e src, input dir_e dst, input logic eject);
    spk_word_t w = SPK_NOP;
    w.op_type = OP_SPIKE; w.bypass = 1'b1; w.in_sel = src; w.out_sel = dst;
    w.sum_or_local = eject;
    return w;
  endfunction

  function automatic spk_word_t spk_recv(input dir_e src);
    spk_word_t w = SPK_NOP;
    w.op_type = OP_SPIKE; w.sum_or_local = 1'b1; w.in_sel = src;
    return w;
  endfunction

  function automatic core_word_t core_ld_wt(input logic [3:0] banks);
    core_word_t w = CORE_NOP;
    w.op_type = OP_CORE; w.w_weight = banks;
    return w;
  endfunction

  function automatic core_word_t core_acc(input logic [3:0] banks);
    core_word_t w = CORE_NOP;
    w.op_type = OP_CORE; w.r_weight = 1'b1; w.acc = banks;
    return w;
  endfunction

endpackage
