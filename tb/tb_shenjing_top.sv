// tb_shenjing_top: end-to-end run of the default chip (4 x 3 grid, 10 tiles,
// 256 neurons each, no parameter overrides) on the two-layer MNIST-style
// perceptron mapping 784 -> 512 -> 10 of the paper's first figure, with
// random weights and random input spike trains over 20 time steps.
//
// Mapping: input pixels 196*r .. 196*r+195 go to axons 0..195 of the tiles
// of row r; tiles (r,0) hold hidden neurons 0..255, tiles (r,1) hidden
// neurons 256..511. Partial sums are reduced down each column in two steps
// (row 3 -> row 2 and row 1 -> row 0, then row 2 -> row 0 bypassing row 1),
// and rows 0 fire. Hidden spikes travel (0,0) -> (0,1) bypass -> (0,2), and
// (0,1) -> (0,2) bypass -> (1,2). The output layer sums (1,2) into (0,2),
// whose neurons 0..9 fire the outputs. A probe also fires tile (2,0)'s own
// partial sums of neurons 200..255 (SPIKE from the local sum) and multicasts
// them south through (3,0), which both ejects them and forwards them off
// the grid edge.
//
// Per time step (one 145-entry program pass):
//   e0        ACC in all ten tiles
//   e131      PS SEND local N: (3,c), (1,c), (1,2); probe SPIKE local (2,0)
//   e132      probe SEND S at (2,0)
//   e133      PS SUM from S: (2,c), (0,c), (0,2); probe BYPASS N->S+eject (3,0)
//   e134      PS SEND sum N at (2,c); (0,2) SEND sum to spiking + SPIKE
//   e135      PS BYPASS S->N at (1,c)
//   e137      PS SUM consecutive from S at (0,c)
//   e138      (0,c) SEND sum to spiking + SPIKE
//   e139..144 spike SEND / BYPASS / RECV as above
// Every value is compared with an integrate-and-fire model computed here:
// hidden spikes, output spikes, probe spikes, the probe's edge output and
// the spikes found in the receiving tiles' axon latches.
module tb_shenjing_top;
  import shenjing_pkg::*;
  localparam int ROWS = 4, COLS = 3, NT = 12, NN = 256, BW = 128 * WEIGHT_W;
  localparam int NIN = 784, NH = 512, NO = 10, PER_ROW = 196, T = 20;
  localparam int LAST = 144, TH1 = 60, TH2 = 60;

  logic clk = 0, rst_n = 0, run = 0, clr_pot = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_tile;
  cfg_slot_e cfg_slot;
  logic [7:0] cfg_addr;
  logic [NN-1:0] cfg_mask;
  logic [15:0] cfg_data;
  logic [3:0][BW-1:0] wt_row;
  logic [NT-1:0] ext_valid;
  logic [NT-1:0][NN-1:0] ext_spk, fired;
  logic [NT-1:0] busy;
  logic [COLS-1:0][NN-1:0][15:0] edge_ps_n_in, edge_ps_s_in, edge_ps_n_out, edge_ps_s_out;
  logic [ROWS-1:0][NN-1:0][15:0] edge_ps_e_in, edge_ps_w_in, edge_ps_e_out, edge_ps_w_out;
  logic [COLS-1:0][NN-1:0] edge_spk_n_in, edge_spk_s_in, edge_spk_n_out, edge_spk_s_out;
  logic [ROWS-1:0][NN-1:0] edge_spk_e_in, edge_spk_w_in, edge_spk_e_out, edge_spk_w_out;

  shenjing_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_ldwt = 0, n_acc = 0, n_hid_fire = 0, n_out_fire = 0, n_probe_fire = 0;
  int n_mcast = 0, n_recv = 0, n_edge = 0;

  logic signed [4:0] w1 [NIN][NH];
  logic signed [4:0] w2 [NH][NO];
  logic [NIN-1:0] x [T];
  int pot1 [NH], pot2 [NO], potp [NN];
  logic [NH-1:0] s1, s1_prev;

  initial begin
    #400000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tid(int r, int c); return r * COLS + c; endfunction

  task automatic cfg(input int t, input cfg_slot_e s, input int a, input logic [NN-1:0] m,
                     input logic [15:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_tile = 4'(t); cfg_slot = s; cfg_addr = 8'(a); cfg_mask = m; cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic clear_prog(input int t, input int last);
    for (int a = 0; a <= last; a++) begin
      cfg(t, SLOT_CORE, a, '1, 16'(CORE_NOP));
      cfg(t, SLOT_PS, a, '1, 16'(PS_NOP));
      cfg(t, SLOT_SPIKE, a, '1, 16'(SPK_NOP));
    end
    cfg(t, SLOT_REG, 1, '1, 16'(last));
  endtask

  // weight of tile (r,c) from axon a to neuron n
  function automatic logic [4:0] tile_w(int r, int c, int a, int n);
    if (c < 2) return (a < PER_ROW) ? w1[r * PER_ROW + a][c * NN + n] : 5'd0;
    else       return (n < NO) ? w2[r * NN + a][n] : 5'd0;
  endfunction


  logic [NN-1:0] tile_list_mask;
  initial begin : main
    logic [NN-1:0] probe_mask, exp_probe, exp_hid0, exp_hid1, exp_out;
    int lp;
    cfg_tile = '0; cfg_slot = SLOT_CORE; cfg_addr = '0; cfg_mask = '0; cfg_data = '0;
    wt_row = '0; ext_valid = '0; ext_spk = '0;
    edge_ps_n_in = '0; edge_ps_s_in = '0; edge_ps_e_in = '0; edge_ps_w_in = '0;
    edge_spk_n_in = '0; edge_spk_s_in = '0; edge_spk_e_in = '0; edge_spk_w_in = '0;
    for (int n = 0; n < NN; n++) probe_mask[n] = (n >= 200);
    for (int i = 0; i < NIN; i++) for (int j = 0; j < NH; j++) w1[i][j] = 5'($urandom);
    for (int j = 0; j < NH; j++) for (int k = 0; k < NO; k++) w2[j][k] = 5'($urandom);
    for (int t = 0; t < T; t++) for (int i = 0; i < NIN; i++) x[t][i] = ($urandom_range(0, 99) < 20);
    for (int j = 0; j < NH; j++) pot1[j] = 0;
    for (int k = 0; k < NO; k++) pot2[k] = 0;
    for (int n = 0; n < NN; n++) potp[n] = 0;
    s1_prev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- weight loading: one LD_WT per tile, rows on the shared bus -------
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++)
      if (!(c == 2 && r >= 2)) clear_prog(tid(r, c), CORE_OP_CYCLES - 1);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      if (c == 2 && r >= 2) continue;
      cfg(tid(r, c), SLOT_CORE, 0, '1, 16'(core_ld_wt(4'hF)));
      @(negedge clk);
      run = 1;
      for (int k = 0; k < CORE_OP_CYCLES; k++) begin
        for (int b = 0; b < 4; b++) for (int q = 0; q < 128; q++)
          wt_row[b][q*5 +: 5] = k < 128 ? tile_w(r, c, (b >= 2 ? 128 : 0) + k, (b % 2 ? 128 : 0) + q) : 5'd0;
        @(negedge clk);
      end
      run = 0;
      checks++; if (busy != '0) failures++;
      n_ldwt++;
      cfg(tid(r, c), SLOT_CORE, 0, '1, 16'(CORE_NOP));
    end

    // ---- time-step program --------------------------------------------------
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      if (c == 2 && r >= 2) continue;
      clear_prog(tid(r, c), LAST);
      cfg(tid(r, c), SLOT_REG, 0, '1, 16'(c < 2 ? TH1 : TH2));
      cfg(tid(r, c), SLOT_CORE, 0, '1, 16'(core_acc(4'hF)));
    end
    for (int c = 0; c < 2; c++) begin
      cfg(tid(3, c), SLOT_PS, 131, '1, 16'(ps_send(1'b0, 3'(DIR_N))));
      cfg(tid(1, c), SLOT_PS, 131, '1, 16'(ps_send(1'b0, 3'(DIR_N))));
      cfg(tid(2, c), SLOT_PS, 133, '1, 16'(ps_sum(DIR_S, 1'b0)));
      cfg(tid(0, c), SLOT_PS, 133, '1, 16'(ps_sum(DIR_S, 1'b0)));
      cfg(tid(2, c), SLOT_PS, 134, '1, 16'(ps_send(1'b1, 3'(DIR_N))));
      cfg(tid(1, c), SLOT_PS, 135, '1, 16'(ps_bypass(DIR_S, 3'(DIR_N))));
      cfg(tid(0, c), SLOT_PS, 137, '1, 16'(ps_sum(DIR_S, 1'b1)));
      cfg(tid(0, c), SLOT_PS, 138, '1, 16'(ps_send(1'b1, PS_OUT_LOCAL)));
      cfg(tid(0, c), SLOT_SPIKE, 138, '1, 16'(spk_spike(1'b1)));
    end
    // hidden spikes: (0,0) -> (0,2)
    cfg(tid(0, 0), SLOT_SPIKE, 139, '1, 16'(spk_send(DIR_E)));
    cfg(tid(0, 1), SLOT_SPIKE, 140, '1, 16'(spk_bypass(DIR_W, DIR_E, 1'b0)));
    cfg(tid(0, 2), SLOT_SPIKE, 141, '1, 16'(spk_recv(DIR_W)));
    // hidden spikes: (0,1) -> (0,2) -> (1,2)
    cfg(tid(0, 1), SLOT_SPIKE, 142, '1, 16'(spk_send(DIR_E)));
    cfg(tid(0, 2), SLOT_SPIKE, 143, '1, 16'(spk_bypass(DIR_W, DIR_S, 1'b0)));
    cfg(tid(1, 2), SLOT_SPIKE, 144, '1, 16'(spk_recv(DIR_N)));
    // output layer
    cfg(tid(1, 2), SLOT_PS, 131, '1, 16'(ps_send(1'b0, 3'(DIR_N))));
    cfg(tid(0, 2), SLOT_PS, 133, '1, 16'(ps_sum(DIR_S, 1'b0)));
    cfg(tid(0, 2), SLOT_PS, 134, '1, 16'(ps_send(1'b1, PS_OUT_LOCAL)));
    cfg(tid(0, 2), SLOT_SPIKE, 134, '1, 16'(spk_spike(1'b1)));
    // probe: local spike at (2,0), multicast south through (3,0)
    cfg(tid(2, 0), SLOT_SPIKE, 131, probe_mask, 16'(spk_spike(1'b0)));
    cfg(tid(2, 0), SLOT_SPIKE, 132, probe_mask, 16'(spk_send(DIR_S)));
    cfg(tid(3, 0), SLOT_SPIKE, 133, probe_mask, 16'(spk_bypass(DIR_N, DIR_S, 1'b1)));

    // ---- run T time steps ---------------------------------------------------
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < 2; c++) begin
      ext_valid[tid(r, c)] = 1;
      ext_spk[tid(r, c)] = NN'(x[0][r * PER_ROW +: PER_ROW]);
    end
    @(negedge clk);
    ext_valid = '0; ext_spk = '0;
    run = 1;
    for (int t = 0; t < T; t++) begin
      // model of this step
      for (int j = 0; j < NH; j++) begin
        int s; s = 0;
        for (int i = 0; i < NIN; i++) if (x[t][i]) s += w1[i][j];
        pot1[j] += s; s1[j] = pot1[j] > TH1; if (s1[j]) pot1[j] -= TH1;
      end
      exp_out = '0;
      for (int k = 0; k < NO; k++) begin
        int s; s = 0;
        for (int j = 0; j < NH; j++) if (s1_prev[j]) s += w2[j][k];
        pot2[k] += s; exp_out[k] = pot2[k] > TH2; if (exp_out[k]) pot2[k] -= TH2;
      end
      exp_probe = '0;
      for (int n = 200; n < NN; n++) begin
        int s; s = 0;
        for (int a = 0; a < PER_ROW; a++) if (x[t][2 * PER_ROW + a]) s += w1[2 * PER_ROW + a][n];
        potp[n] += s; exp_probe[n] = potp[n] > TH1; if (exp_probe[n]) potp[n] -= TH1;
      end
      exp_hid0 = s1[255:0];
      exp_hid1 = s1[511:256];
      for (int k = 0; k <= LAST; k++) begin
        // k = cycle of entry k; registered results of entry e show at k = e+1
        if (k == 0) n_acc += 10;
        if (k == 132) begin
          checks++; if ((fired[tid(2, 0)] & probe_mask) !== exp_probe) begin failures++; $display("t%0d probe mismatch", t); end
          n_probe_fire += $countones(exp_probe);
        end
        if (k == 134) begin
          checks++; if ((edge_spk_s_out[0] & probe_mask) !== exp_probe) failures++;
          checks++; if ((dut.g_row[3].g_col[0].g_tile.u_tile.u_core.axon_latch & probe_mask) !== exp_probe) failures++;
          n_edge += $countones(edge_spk_s_out[0]);
          n_mcast += $countones(dut.g_row[3].g_col[0].g_tile.u_tile.u_core.axon_latch & probe_mask);
        end
        if (k == 135) begin
          checks++;
          if (fired[tid(0, 2)] !== NN'(exp_out)) begin failures++; $display("t%0d output mismatch %b vs %b", t, fired[tid(0, 2)][9:0], exp_out[9:0]); end
          n_out_fire += $countones(fired[tid(0, 2)]);
        end
        if (k == 139) begin
          checks++; if (fired[tid(0, 0)] !== exp_hid0) begin failures++; $display("t%0d hidden0 mismatch", t); end
          checks++; if (fired[tid(0, 1)] !== exp_hid1) begin failures++; $display("t%0d hidden1 mismatch", t); end
          n_hid_fire += $countones(fired[tid(0, 0)]) + $countones(fired[tid(0, 1)]);
        end
        if (k == 140 && t + 1 < T) begin
          // next step's input spikes, after this step's ACC took its snapshot
          for (int r = 0; r < ROWS; r++) for (int c = 0; c < 2; c++) begin
            ext_valid[tid(r, c)] = 1;
            ext_spk[tid(r, c)] = NN'(x[t + 1][r * PER_ROW +: PER_ROW]);
          end
        end
        if (k == 141) begin ext_valid = '0; ext_spk = '0; end
        if (k == 144) begin
          checks++; if (dut.g_row[0].g_col[2].g_tile.u_tile.u_core.axon_latch !== exp_hid0) begin failures++; $display("t%0d (0,2) axons mismatch", t); end
          n_recv += $countones(dut.g_row[0].g_col[2].g_tile.u_tile.u_core.axon_latch);
        end
        @(negedge clk);
        if (k == LAST) begin
          checks++; if (dut.g_row[1].g_col[2].g_tile.u_tile.u_core.axon_latch !== exp_hid1) begin failures++; $display("t%0d (1,2) axons mismatch", t); end
        end
      end
      s1_prev = s1;
    end
    run = 0;
    $display("mechanisms: ld_wt=%0d acc=%0d hidden_fires=%0d output_fires=%0d local_fires=%0d multicast_ejects=%0d edge_spikes=%0d recv_spikes=%0d",
             n_ldwt, n_acc, n_hid_fire, n_out_fire, n_probe_fire, n_mcast, n_edge, n_recv);
    if (n_ldwt == 0) failures++;
    if (n_acc == 0) failures++;
    if (n_hid_fire == 0) failures++;
    if (n_out_fire == 0) failures++;
    if (n_probe_fire == 0) failures++;
    if (n_mcast == 0) failures++;
    if (n_edge == 0) failures++;
    if (n_recv == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
