// neuron_core: synaptic weight storage and spike-driven weighted sums.
//
// What it does: for every time step the core adds, for each of its 256
// neurons, the weights of those of its 256 axons that received a spike. The
// result, one 13-bit signed "local partial sum" per neuron, goes to that
// neuron's PS router and spike router.
//
// How it works: the weights sit in four banks (weight_sram). Bank 0 holds
// axons 0-127 -> neurons 0-127, bank 1 axons 0-127 -> neurons 128-255,
// bank 2 axons 128-255 -> neurons 0-127, bank 3 axons 128-255 -> neurons
// 128-255. An ACC walks the 128 rows of all banks in parallel, one row (one
// axon per bank) per cycle; when that axon's spike bit is set, each of the
// bank's 128 accumulators adds its weight. Finally the two accumulators that
// feed each neuron are combined into the local partial sum. Spikes arriving
// from the spike NoC (axon_set) or from outside (ext_valid/ext_spk) are ORed
// into an axon latch; an ACC takes a snapshot of the latch and clears it, so
// spikes delivered during one time step are consumed by the next ACC.
//
// Operations (control words of type 10): LD_WT (w_weight != 0) writes the
// selected banks, row r taken from wt_row in cycle issue+r, r = 0..127.
// ACC (r_weight = 1) accumulates the banks selected by acc[3:0]. Both take
// 131 cycles: busy is high from the issue cycle for 130 more cycles, a new
// core word is accepted in cycle issue+131, and the local partial sums are
// valid from cycle issue+130 until the next ACC finishes.
//
// From the paper: 4 banks, 256 axons x 256 neurons, 5-bit weights, 13-bit
// local partial sums, serial per-axon accumulation, the 131-cycle length of
// LD_WT and ACC, and the LD_WT/ACC control fields. This design's choices:
// signed two's-complement weights, the bank-to-axon/neuron assignment, the
// axon latch, the broadcast weight-row input and the cycle-by-cycle timing.
module neuron_core
  import shenjing_pkg::*;
#(
  parameter int unsigned NA = NUM_AXONS,    // axons per core
  parameter int unsigned NN = NUM_NEURONS,  // neurons per core
  parameter int unsigned WW = WEIGHT_W,     // weight width
  localparam int unsigned ROWS = NA / 2,
  localparam int unsigned COLS = NN / 2,
  localparam int unsigned BW   = COLS * WW,               // bank row width
  localparam int unsigned AW   = WW + $clog2(ROWS),       // bank accumulator
  localparam int unsigned OW   = WW + $clog2(NA)          // local PS width
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  core_word_t                   op,          // this cycle's core word
  input  logic [NA-1:0]                axon_set,    // spikes ejected by the spike NoC
  input  logic                         ext_valid,   // external input spikes
  input  logic [NA-1:0]                ext_spk,
  input  logic [3:0][BW-1:0]           wt_row,      // row data for LD_WT
  output logic                         busy,
  output logic                         ps_valid,    // local_ps holds an ACC result
  output logic signed [NN-1:0][OW-1:0] local_ps
);

  localparam int unsigned CW = $clog2(CORE_OP_CYCLES);

  typedef enum logic [1:0] {C_IDLE, C_LOAD, C_ACC} cstate_e;

  cstate_e                  state;
  logic [CW-1:0]            cnt;
  logic [3:0]               bank_mask;
  logic [NA-1:0]            axon_latch, axons;
  logic signed [AW-1:0]     acc [4][COLS];

  logic                     issue_ld, issue_acc;
  logic [3:0]               b_en, b_we;
  logic [$clog2(ROWS)-1:0]  b_addr;
  logic [3:0][BW-1:0]       b_rdata;
  logic [NA-1:0]            incoming;

  assign issue_ld  = (state == C_IDLE) && (op.op_type == OP_CORE) && (op.w_weight != '0);
  assign issue_acc = (state == C_IDLE) && (op.op_type == OP_CORE) && (op.w_weight == '0)
                     && op.r_weight;
  assign busy      = (state != C_IDLE);
  assign incoming  = axon_set | (ext_valid ? ext_spk : '0);

  // ---- bank control --------------------------------------------------------
  always_comb begin
    b_en   = '0;
    b_we   = '0;
    b_addr = '0;
    if (issue_ld) begin
      b_en = op.w_weight; b_we = op.w_weight; b_addr = '0;
    end else if (issue_acc) begin
      b_en = 4'hF; b_addr = '0;
    end else if (state == C_LOAD && cnt < CW'(ROWS)) begin
      b_en = bank_mask; b_we = bank_mask; b_addr = cnt[$clog2(ROWS)-1:0];
    end else if (state == C_ACC && cnt < CW'(ROWS)) begin
      b_en = 4'hF; b_addr = cnt[$clog2(ROWS)-1:0];
    end
  end

  for (genvar b = 0; b < 4; b++) begin : g_bank
    weight_sram #(.ROWS(ROWS), .WIDTH(BW)) u_bank (
      .clk   (clk),
      .en    (b_en[b]),
      .we    (b_we[b]),
      .addr  (b_addr),
      .wdata (wt_row[b]),
      .rdata (b_rdata[b])
    );
  end

  // ---- sequencing ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      cnt        <= '0;
      bank_mask  <= '0;
      axon_latch <= '0;
      axons      <= '0;
      ps_valid   <= 1'b0;
    end else begin
      axon_latch <= axon_latch | incoming;
      case (state)
        C_IDLE: begin
          if (issue_ld) begin
            state     <= C_LOAD;
            cnt       <= CW'(1);
            bank_mask <= op.w_weight;
          end else if (issue_acc) begin
            state      <= C_ACC;
            cnt        <= CW'(1);
            bank_mask  <= op.acc;
            axons      <= axon_latch | incoming;
            axon_latch <= '0;
          end
        end
        default: begin
          if (cnt == CW'(CORE_OP_CYCLES - 1)) begin
            state <= C_IDLE;
            cnt   <= '0;
          end else begin
            cnt <= cnt + CW'(1);
          end
          if (state == C_ACC && cnt == CW'(ROWS + 1)) ps_valid <= 1'b1;
        end
      endcase
    end
  end

  // ---- accumulation --------------------------------------------------------
  // In cycle cnt = k (1..ROWS) bank b delivers row k-1; banks 0/1 serve axon
  // k-1, banks 2/3 axon ROWS+k-1.
  logic [$clog2(ROWS)-1:0] row_idx;
  assign row_idx = $clog2(ROWS)'(cnt - CW'(1));

  always_ff @(posedge clk) begin
    if (issue_acc) begin
      for (int b = 0; b < 4; b++)
        for (int n = 0; n < int'(COLS); n++)
          acc[b][n] <= '0;
    end else if (state == C_ACC && cnt >= CW'(1) && cnt <= CW'(ROWS)) begin
      for (int b = 0; b < 4; b++) begin
        if (bank_mask[b] && axons[(b >= 2 ? ROWS : 0) + row_idx]) begin
          for (int n = 0; n < int'(COLS); n++)
            acc[b][n] <= acc[b][n] + AW'($signed(b_rdata[b][n*WW +: WW]));
        end
      end
    end
  end

  // Combine: neuron n < COLS = bank0 + bank2, neuron n >= COLS = bank1 + bank3.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      local_ps <= '0;
    end else if (state == C_ACC && cnt == CW'(ROWS + 1)) begin
      for (int n = 0; n < int'(COLS); n++) begin
        local_ps[n]        <= OW'(acc[0][n]) + OW'(acc[2][n]);
        local_ps[COLS + n] <= OW'(acc[1][n]) + OW'(acc[3][n]);
      end
    end
  end

  // A core word that arrives while an operation is running is dropped.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (op.op_type != OP_CORE))
    else $error("neuron_core: core word issued while busy");

endmodule
