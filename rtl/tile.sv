// tile: one Shenjing tile, a neuron core with its per-neuron NoC routers.
//
// What it does: the tile holds 256 neurons. Its neuron core forms the local
// partial sums; neuron n's PS router and spike router connect it to the
// neuron-n PS network and spike network that run through all tiles of the
// mesh. A configuration memory and a program counter drive everything.
//
// How it works: while run is high the program counter steps through entries
// 0..last_pc of the configuration memory and starts again at 0, one entry
// per cycle; one pass is one time step of the spiking network. The entry's
// core word goes to the neuron core, word n of the PS and spike slots to the
// routers of neuron n. When run is low the counter sits at 0 and every word
// is treated as a no-operation. The PS router's weighted-sum output feeds
// the spike router's multiplexer; the spike router's eject output sets the
// matching bit of the core's axon latch.
//
// Host interface: cfg_we/cfg_slot/cfg_addr/cfg_mask/cfg_data write the
// configuration memory (see cfg_mem) or, with slot 3, the tile registers:
// address 0 = firing threshold (sign-extended), address 1 = last_pc.
// wt_row supplies weight rows for LD_WT, ext_valid/ext_spk inject input
// spikes into the axon latch, clr_pot clears all membrane potentials.
//
// Links: ps_in/ps_out and spk_in/spk_out are indexed [direction][neuron];
// outputs are registers, inputs come from the neighbours' registers.
//
// From the paper: the tile composition and the per-neuron NoCs. The
// program counter, period register, threshold register and host ports are
// this design's choices.
module tile
  import shenjing_pkg::*;
#(
  parameter int unsigned NN    = NUM_NEURONS,
  parameter int unsigned NA    = NUM_AXONS,
  parameter int unsigned WW    = WEIGHT_W,
  parameter int unsigned W     = PS_W,
  parameter int unsigned PW    = POT_W,
  parameter int unsigned DEPTH = CFG_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = (NN / 2) * WW,
  localparam int unsigned LW   = WW + $clog2(NA)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          run,
  input  logic                          clr_pot,
  // configuration
  input  logic                          cfg_we,
  input  cfg_slot_e                     cfg_slot,
  input  logic [AW-1:0]                 cfg_addr,
  input  logic [NN-1:0]                 cfg_mask,
  input  logic [15:0]                   cfg_data,
  // weights and input spikes
  input  logic [3:0][BW-1:0]            wt_row,
  input  logic                          ext_valid,
  input  logic [NA-1:0]                 ext_spk,
  // NoC links
  input  logic [3:0][NN-1:0][W-1:0]     ps_in,
  output logic [3:0][NN-1:0][W-1:0]     ps_out,
  input  logic [3:0][NN-1:0]            spk_in,
  output logic [3:0][NN-1:0]            spk_out,
  // status
  output logic [NN-1:0]                 fired,
  output logic                          busy,
  output logic [AW-1:0]                 pc
);

  logic [AW-1:0]          last_pc;
  logic signed [PW-1:0]   threshold;

  core_word_t             core_word, core_op;
  ps_word_t  [NN-1:0]     ps_words;
  spk_word_t [NN-1:0]     spk_words;
  logic [NN-1:0][LW-1:0]  local_ps;
  logic [NA-1:0]          axon_set;
  logic                   ps_valid;

  // ---- tile registers and program counter ---------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_pc   <= '0;
      threshold <= '0;
      pc        <= '0;
    end else begin
      if (cfg_we && cfg_slot == SLOT_REG) begin
        if (cfg_addr == AW'(0)) threshold <= PW'($signed(cfg_data));
        if (cfg_addr == AW'(1)) last_pc   <= cfg_data[AW-1:0];
      end
      if (!run)                pc <= '0;
      else if (pc == last_pc)  pc <= '0;
      else                     pc <= pc + AW'(1);
    end
  end

  cfg_mem #(.NN(NN), .DEPTH(DEPTH)) u_cfg (
    .clk       (clk),
    .we        (cfg_we),
    .wslot     (cfg_slot),
    .waddr     (cfg_addr),
    .wmask     (cfg_mask),
    .wdata     (cfg_data),
    .raddr     (pc),
    .core_word (core_word),
    .ps_words  (ps_words),
    .spk_words (spk_words)
  );

  assign core_op = run ? core_word : CORE_NOP;

  neuron_core #(.NA(NA), .NN(NN), .WW(WW)) u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .op        (core_op),
    .axon_set  (axon_set),
    .ext_valid (ext_valid),
    .ext_spk   (ext_spk),
    .wt_row    (wt_row),
    .busy      (busy),
    .ps_valid  (ps_valid),
    .local_ps  (local_ps)
  );

  // ---- per-neuron routers ----------------------------------------------------
  for (genvar n = 0; n < int'(NN); n++) begin : g_neuron
    logic [3:0][W-1:0] p_in, p_out;
    logic [3:0]        s_in, s_out;
    logic [W-1:0]      ws;
    logic              ws_valid;
    ps_word_t          pw;
    spk_word_t         sw;

    assign pw = run ? ps_words[n]  : PS_NOP;
    assign sw = run ? spk_words[n] : SPK_NOP;

    for (genvar d = 0; d < 4; d++) begin : g_dir
      assign p_in[d]       = ps_in[d][n];
      assign ps_out[d][n]  = p_out[d];
      assign s_in[d]       = spk_in[d][n];
      assign spk_out[d][n] = s_out[d];
    end

    ps_router #(.W(W), .LW(LW)) u_ps (
      .clk      (clk),
      .rst_n    (rst_n),
      .word     (pw),
      .local_ps (local_ps[n]),
      .in_link  (p_in),
      .out_link (p_out),
      .ws       (ws),
      .ws_valid (ws_valid),
      .sum      ()
    );

    spike_router #(.W(W), .LW(LW), .PW(PW)) u_spk (
      .clk       (clk),
      .rst_n     (rst_n),
      .word      (sw),
      .clr_pot   (clr_pot),
      .threshold (threshold),
      .local_ps  (local_ps[n]),
      .ws        (ws),
      .in_link   (s_in),
      .out_link  (s_out),
      .eject     (axon_set[n]),
      .spike     (),
      .fired     (fired[n])
    );

    // A spike taken from the weighted-sum line needs a PS ejection in the
    // same cycle.
    a_ws_present: assert property (@(posedge clk) disable iff (!rst_n)
      (sw.op_type == OP_SPIKE && sw.spike_en && sw.sum_or_local) |-> ws_valid)
      else $error("tile: SPIKE from weighted sum without PS ejection");
  end

  // The neurons exist for NA == NN only (neuron n ejects to axon n).
  if (NA != NN) begin : g_bad_size
    $error("tile: NA must equal NN");
  end

endmodule
