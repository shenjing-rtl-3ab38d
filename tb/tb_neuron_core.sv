// tb_neuron_core: loads random signed 5-bit weights into all four banks of a
// full-size core (256 axons x 256 neurons) with LD_WT, then runs ACC with
// random input spikes and compares all 256 local partial sums with sums
// computed here from the same weights. It checks the 131-cycle length of
// LD_WT and ACC (busy high for exactly 131 cycles), that spikes arriving
// during an ACC are kept for the next one, a partial bank mask (acc=0101),
// and the extremes of the 13-bit result (all weights -16 or +15, all axons
// spiking).
module tb_neuron_core;
  import shenjing_pkg::*;
  localparam int NA = 256, NN = 256, WW = 5, ROWS = 128, COLS = 128, BW = COLS * WW;
  logic clk = 0, rst_n = 0;
  core_word_t op;
  logic [NA-1:0] axon_set, ext_spk;
  logic ext_valid;
  logic [3:0][BW-1:0] wt_row;
  logic busy, ps_valid;
  logic [NN-1:0][12:0] local_ps;
  int checks = 0, failures = 0;
  logic signed [4:0] wmod [NA][NN];   // weight from axon a to neuron n

  neuron_core #(.NA(NA), .NN(NN), .WW(WW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bank b, row r, column c  <->  axon, neuron
  function automatic int ax_of(int b, int r); return (b >= 2 ? ROWS : 0) + r; endfunction
  function automatic int ne_of(int b, int c); return (b % 2 == 1 ? COLS : 0) + c; endfunction

  task automatic issue_and_time(input core_word_t w, input bit load);
    int cyc;
    @(negedge clk);
    op = w;
    if (load) for (int b = 0; b < 4; b++) for (int c = 0; c < COLS; c++)
      wt_row[b][c*WW +: WW] = wmod[ax_of(b, 0)][ne_of(b, c)];
    @(negedge clk);
    op = CORE_NOP;
    cyc = 1;
    while (busy) begin
      if (load && cyc < ROWS) for (int b = 0; b < 4; b++) for (int c = 0; c < COLS; c++)
        wt_row[b][c*WW +: WW] = wmod[ax_of(b, cyc)][ne_of(b, c)];
      else wt_row = '0;
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != CORE_OP_CYCLES) begin failures++; $display("op took %0d cycles", cyc); end
  endtask

  task automatic check_sums(input logic [NA-1:0] spk, input logic [3:0] mask);
    for (int n = 0; n < NN; n++) begin
      int s = 0;
      for (int a = 0; a < NA; a++) begin
        int b = (a >= ROWS ? 2 : 0) + (n >= COLS ? 1 : 0);
        if (spk[a] && mask[b]) s += wmod[a][n];
      end
      checks++;
      if ($signed(local_ps[n]) != s) begin
        failures++;
        if (failures < 5) $display("neuron %0d: got %0d exp %0d", n, $signed(local_ps[n]), s);
      end
    end
  endtask

  task automatic load_random();
    for (int a = 0; a < NA; a++) for (int n = 0; n < NN; n++) wmod[a][n] = 5'($urandom);
    issue_and_time(core_ld_wt(4'hF), 1);
  endtask

  task automatic inject(input logic [NA-1:0] s);
    @(negedge clk); ext_valid = 1; ext_spk = s;
    @(negedge clk); ext_valid = 0; ext_spk = '0;
  endtask

  function automatic logic [NA-1:0] rnd_spk(int pct);
    logic [NA-1:0] s;
    for (int a = 0; a < NA; a++) s[a] = ($urandom_range(0, 99) < pct);
    return s;
  endfunction

  initial begin
    logic [NA-1:0] s1, s2;
    op = CORE_NOP; axon_set = '0; ext_spk = '0; ext_valid = 0; wt_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_random();
    for (int t = 0; t < 4; t++) begin
      s1 = rnd_spk(30);
      inject(s1);
      // Spikes that arrive during the ACC belong to the next one.
      fork
        issue_and_time(core_acc(4'hF), 0);
        begin
          s2 = rnd_spk(20);
          repeat (20) @(negedge clk);
          axon_set = s2;
          @(negedge clk);
          axon_set = '0;
        end
      join
      checks++; if (!ps_valid) failures++;
      check_sums(s1, 4'hF);
      issue_and_time(core_acc(4'b0101), 0);
      check_sums(s2, 4'b0101);
    end
    // Extremes: all weights -16, then +15, all axons spiking.
    for (int a = 0; a < NA; a++) for (int n = 0; n < NN; n++) wmod[a][n] = -5'sd16;
    issue_and_time(core_ld_wt(4'hF), 1);
    inject('1);
    issue_and_time(core_acc(4'hF), 0);
    check_sums('1, 4'hF);
    for (int a = 0; a < NA; a++) for (int n = 0; n < NN; n++) wmod[a][n] = 5'sd15;
    issue_and_time(core_ld_wt(4'hF), 1);
    inject('1);
    issue_and_time(core_acc(4'hF), 0);
    check_sums('1, 4'hF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
