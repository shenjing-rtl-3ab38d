// tb_cfg_mem: checks the configuration memory at its default size (256
// entries, 256 neurons): after every entry is first set to no-operations with full-mask writes,
// masked broadcast writes to the PS and spike slots reach exactly the
// neurons selected by the mask; core-slot writes and tile-register writes
// (slot 3) leave the router words alone. Reads are combinational.
module tb_cfg_mem;
  import shenjing_pkg::*;
  localparam int NN = 256, DEPTH = 256;
  logic clk = 0, we = 0;
  cfg_slot_e wslot;
  logic [7:0] waddr, raddr;
  logic [NN-1:0] wmask;
  logic [15:0] wdata;
  core_word_t core_word;
  ps_word_t [NN-1:0] ps_words;
  spk_word_t [NN-1:0] spk_words;
  int checks = 0, failures = 0;
  logic [15:0] m_core [DEPTH];
  logic [15:0] m_ps [DEPTH][NN];
  logic [15:0] m_spk [DEPTH][NN];

  cfg_mem #(.NN(NN), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_addr(input int a);
    raddr = 8'(a);
    #1;
    checks++;
    if (16'(core_word) !== m_core[a]) failures++;
    for (int n = 0; n < NN; n++) begin
      if (16'(ps_words[n]) !== m_ps[a][n] || 16'(spk_words[n]) !== m_spk[a][n]) begin
        failures++; $display("addr %0d neuron %0d mismatch", a, n); break;
      end
    end
  endtask

  initial begin
    wslot = SLOT_CORE; waddr = '0; raddr = '0; wmask = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      m_core[a] = 16'(CORE_NOP);
      for (int n = 0; n < NN; n++) begin m_ps[a][n] = 16'(PS_NOP); m_spk[a][n] = 16'(SPK_NOP); end
    end
    repeat (2) @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      for (int sl = 0; sl < 3; sl++) begin
        we = 1; waddr = 8'(a); wmask = '1;
        wslot = cfg_slot_e'(sl);
        wdata = sl == 0 ? 16'(CORE_NOP) : sl == 1 ? 16'(PS_NOP) : 16'(SPK_NOP);
        @(negedge clk);
      end
    end
    we = 0;
    for (int a = 0; a < DEPTH; a += 17) check_addr(a);
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      we = 1;
      wslot = cfg_slot_e'($urandom_range(0, 3));
      waddr = 8'($urandom_range(0, 40));
      for (int k = 0; k < NN / 32; k++) wmask[k*32 +: 32] = $urandom;
      wdata = 16'($urandom);
      case (wslot)
        SLOT_CORE: m_core[waddr] = wdata;
        SLOT_PS:    for (int n = 0; n < NN; n++) if (wmask[n]) m_ps[waddr][n] = wdata;
        SLOT_SPIKE: for (int n = 0; n < NN; n++) if (wmask[n]) m_spk[waddr][n] = wdata;
        default: ;
      endcase
    end
    @(negedge clk);
    we = 0;
    for (int a = 0; a <= 41; a++) check_addr(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
