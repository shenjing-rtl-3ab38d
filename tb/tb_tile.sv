// tb_tile: one full-size tile (256 neurons) with its links driven and
// watched by the testbench. It loads random weights with an LD_WT program,
// then runs a 140-cycle time-step program twice:
//   entry   0  ACC (all banks)
//   entry 131  PS SEND local -> N, SPIKE from the local partial sum
//   entry 132  spike SEND -> E
//   entry 133  PS SUM local + input from S
//   entry 134  PS SEND running sum -> spiking logic, SPIKE from that sum
//   entry 135  spike SEND -> W
//   entry 136  spike RECV from W            (even neurons)
//              spike BYPASS W -> E + eject  (odd neurons, multicast)
// Local sums, PS link values, spikes on the links, the multicast forward and
// the spikes delivered into the axon latch (used by the second ACC) are all
// compared with values computed here from the weights and inputs.
module tb_tile;
  import shenjing_pkg::*;
  localparam int NN = 256, NA = 256, WW = 5, ROWS = 128, COLS = 128, BW = COLS * WW;
  localparam int LAST = 139, TH = 40;
  logic clk = 0, rst_n = 0, run = 0, clr_pot = 0;
  logic cfg_we = 0;
  cfg_slot_e cfg_slot;
  logic [7:0] cfg_addr;
  logic [NN-1:0] cfg_mask;
  logic [15:0] cfg_data;
  logic [3:0][BW-1:0] wt_row;
  logic ext_valid;
  logic [NA-1:0] ext_spk;
  logic [3:0][NN-1:0][15:0] ps_in, ps_out;
  logic [3:0][NN-1:0] spk_in, spk_out;
  logic [NN-1:0] fired;
  logic busy;
  logic [7:0] pc;
  int checks = 0, failures = 0;
  logic signed [4:0] wmod [NA][NN];
  int pot [NN];
  logic [NN-1:0] m_spk;
  int n_mcast = 0, n_recv = 0, n_fire = 0;

  tile #(.NN(NN), .NA(NA)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input cfg_slot_e s, input int a, input logic [NN-1:0] m, input logic [15:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_slot = s; cfg_addr = 8'(a); cfg_mask = m; cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic clear_prog(input int last);
    for (int a = 0; a <= last; a++) begin
      cfg(SLOT_CORE, a, '1, 16'(CORE_NOP));
      cfg(SLOT_PS, a, '1, 16'(PS_NOP));
      cfg(SLOT_SPIKE, a, '1, 16'(SPK_NOP));
    end
    cfg(SLOT_REG, 1, '1, 16'(last));
  endtask

  function automatic int lsum(input logic [NA-1:0] spk, input int n);
    int s = 0;
    for (int a = 0; a < NA; a++) if (spk[a]) s += wmod[a][n];
    return s;
  endfunction

  function automatic bit fire(input int n, input int x);
    pot[n] += x;
    if (pot[n] > TH) begin pot[n] -= TH; return 1; end
    return 0;
  endfunction

  logic [15:0] ps_s_val [NN];
  logic [NN-1:0] w_spk;

  task automatic run_step(input logic [NA-1:0] axons);
    int ls [NN];
    logic [NN-1:0] s_local, s_sum, got_axons;
    for (int n = 0; n < NN; n++) begin
      ls[n] = lsum(axons, n);
      ps_s_val[n] = 16'($urandom_range(0, 200)) - 16'd100;
    end
    for (int n = 0; n < NN; n++) w_spk[n] = $urandom_range(0, 1);
    @(negedge clk);
    run = 1;                      // cycle 0 = entry 0
    for (int k = 0; k <= LAST; k++) begin
      // inputs for this cycle
      ps_in = '0; spk_in = '0;
      if (k == 132) for (int n = 0; n < NN; n++) ps_in[DIR_S][n] = ps_s_val[n];
      if (k == 136) spk_in[DIR_W] = w_spk;
      // outputs produced by entry k-1
      if (k == 132) begin
        for (int n = 0; n < NN; n++) begin
          s_local[n] = fire(n, ls[n]);
          checks++;
          if ($signed(ps_out[DIR_N][n]) != ls[n]) begin failures++; if (failures < 5) $display("ps N %0d", n); end
        end
        checks++; if (fired !== s_local) begin failures++; $display("fired(local) mismatch"); end
      end
      if (k == 133) begin checks++; if (spk_out[DIR_E] !== s_local) failures++; end
      if (k == 135) begin
        for (int n = 0; n < NN; n++) s_sum[n] = fire(n, ls[n] + int'($signed(ps_s_val[n])));
        checks++; if (fired !== s_sum) begin failures++; $display("fired(sum) mismatch"); end
        n_fire += $countones(s_local) + $countones(s_sum);
      end
      if (k == 136) begin checks++; if (spk_out[DIR_W] !== s_sum) failures++; end
      if (k == 137) begin
        for (int n = 1; n < NN; n += 2) begin
          checks++; if (spk_out[DIR_E][n] !== w_spk[n]) failures++;
        end
        got_axons = dut.u_core.axon_latch;
        checks++; if (got_axons !== w_spk) begin failures++; $display("axon latch mismatch"); end
        for (int n = 0; n < NN; n++) if (w_spk[n]) begin if (n % 2) n_mcast++; else n_recv++; end
      end
      @(negedge clk);
    end
    run = 0;
    ps_in = '0; spk_in = '0;
  endtask

  function automatic logic [NA-1:0] rnd_spk(int pct);
    logic [NA-1:0] s;
    for (int a = 0; a < NA; a++) s[a] = ($urandom_range(0, 99) < pct);
    return s;
  endfunction

  initial begin
    logic [NA-1:0] s0;
    logic [NN-1:0] evens, odds;
    for (int n = 0; n < NN; n++) begin evens[n] = (n % 2 == 0); odds[n] = (n % 2 == 1); pot[n] = 0; end
    cfg_slot = SLOT_CORE; cfg_addr = '0; cfg_mask = '0; cfg_data = '0;
    wt_row = '0; ext_valid = 0; ext_spk = '0; ps_in = '0; spk_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- weight load program --------------------------------------------
    for (int a = 0; a < NA; a++) for (int n = 0; n < NN; n++) wmod[a][n] = 5'($urandom);
    clear_prog(CORE_OP_CYCLES - 1);
    cfg(SLOT_CORE, 0, '1, 16'(core_ld_wt(4'hF)));
    @(negedge clk);
    run = 1;
    for (int r = 0; r < CORE_OP_CYCLES; r++) begin
      for (int b = 0; b < 4; b++) for (int c = 0; c < COLS; c++)
        wt_row[b][c*WW +: WW] = r < ROWS ? wmod[(b >= 2 ? ROWS : 0) + r][(b % 2 ? COLS : 0) + c] : '0;
      @(negedge clk);
    end
    run = 0;
    checks++; if (busy) failures++;
    // ---- time-step program ------------------------------------------------
    clear_prog(LAST);
    cfg(SLOT_REG, 0, '1, 16'(TH));
    cfg(SLOT_CORE, 0,   '1, 16'(core_acc(4'hF)));
    cfg(SLOT_PS,   131, '1, 16'(ps_send(1'b0, 3'(DIR_N))));
    cfg(SLOT_SPIKE,131, '1, 16'(spk_spike(1'b0)));
    cfg(SLOT_SPIKE,132, '1, 16'(spk_send(DIR_E)));
    cfg(SLOT_PS,   133, '1, 16'(ps_sum(DIR_S, 1'b0)));
    cfg(SLOT_PS,   134, '1, 16'(ps_send(1'b1, PS_OUT_LOCAL)));
    cfg(SLOT_SPIKE,134, '1, 16'(spk_spike(1'b1)));
    cfg(SLOT_SPIKE,135, '1, 16'(spk_send(DIR_W)));
    cfg(SLOT_SPIKE,136, evens, 16'(spk_recv(DIR_W)));
    cfg(SLOT_SPIKE,136, odds,  16'(spk_bypass(DIR_W, DIR_E, 1'b1)));
    // ---- two time steps ---------------------------------------------------
    s0 = rnd_spk(25);
    @(negedge clk); ext_valid = 1; ext_spk = s0;
    @(negedge clk); ext_valid = 0; ext_spk = '0;
    run_step(s0);
    run_step(w_spk);   // second ACC consumes the spikes delivered in step 1
    if (n_mcast == 0 || n_recv == 0 || n_fire == 0) failures++;
    $display("fires=%0d multicast_ejects=%0d recv_ejects=%0d", n_fire, n_mcast, n_recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
