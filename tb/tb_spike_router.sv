// tb_spike_router: drives one spike router with random SPIKE (from the
// local partial sum or from the weighted-sum line), SEND, BYPASS (with and
// without eject), RECV and no-op words and random link inputs, and compares
// output links, eject and fired every cycle with an independent model of the
// multiplexer, integrate-and-fire rule and 5x5 crossbar.
module tb_spike_router;
  import shenjing_pkg::*;
  localparam int W = 16, LW = 13, PW = 20;
  logic clk = 0, rst_n = 0, clr_pot = 0;
  spk_word_t word;
  logic signed [PW-1:0] threshold;
  logic [LW-1:0] local_ps;
  logic [W-1:0] ws;
  logic [3:0] in_link, out_link;
  logic eject, spike, fired;
  int checks = 0, failures = 0;
  int n_spk_l = 0, n_spk_s = 0, n_fire = 0, n_send = 0, n_byp = 0, n_mcast = 0, n_recv = 0;
  longint m_pot; bit m_spk, m_fired_next, m_fired;
  logic [3:0] m_out;

  spike_router #(.W(W), .LW(LW), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic spk_word_t rnd_word();
    case ($urandom_range(0, 6))
      0: return spk_spike(1'b0);
      1: return spk_spike(1'b1);
      2: return spk_send(dir_e'($urandom_range(0, 3)));
      3: return spk_bypass(dir_e'($urandom_range(0, 3)), dir_e'($urandom_range(0, 3)), 1'b0);
      4: return spk_bypass(dir_e'($urandom_range(0, 3)), dir_e'($urandom_range(0, 3)), 1'b1);
      5: return spk_recv(dir_e'($urandom_range(0, 3)));
      default: return SPK_NOP;
    endcase
  endfunction

  initial begin
    bit sp, inj, byp, ej;
    longint x, s;
    word = SPK_NOP; threshold = 20'sd300; local_ps = '0; ws = '0; in_link = '0;
    m_pot = 0; m_spk = 0; m_out = '0; m_fired = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      word = rnd_word();
      local_ps = LW'($urandom_range(0, 400));
      ws = W'(int'($urandom_range(0, 900)) - 300);
      in_link = 4'($urandom);
      clr_pot = ($urandom_range(0, 199) == 0);
      #1;
      sp  = word.spike_en;
      inj = !word.spike_en && word.inject_en && !word.bypass;
      byp = !word.spike_en && word.bypass;
      ej  = !word.spike_en && !word.inject_en && word.sum_or_local;
      checks++;
      if (eject !== (ej && in_link[word.in_sel])) begin failures++; $display("eject mismatch %0d", i); end
      if (sp) begin if (word.sum_or_local) n_spk_s++; else n_spk_l++; end
      if (inj) n_send++;
      if (byp && ej) n_mcast++; else if (byp) n_byp++; else if (ej) n_recv++;
      @(posedge clk);
      for (int d = 0; d < 4; d++)
        m_out[d] = (inj && word.out_sel == 2'(d)) ? m_spk :
                   (byp && word.out_sel == 2'(d)) ? in_link[word.in_sel] : 1'b0;
      m_fired = 0;
      if (clr_pot) begin m_pot = 0; m_spk = 0; end
      else if (sp) begin
        x = word.sum_or_local ? longint'($signed(ws)) : longint'($signed(local_ps));
        s = m_pot + x;
        m_spk = s > 300;
        m_pot = m_spk ? s - 300 : s;
        m_fired = m_spk;
        if (m_spk) n_fire++;
      end
      #1;
      checks++;
      if (out_link !== m_out || spike !== m_spk || fired !== m_fired) begin
        failures++; $display("mismatch %0d out=%b/%b spk=%b/%b", i, out_link, m_out, spike, m_spk);
      end
    end
    if (n_spk_l == 0 || n_spk_s == 0 || n_fire == 0 || n_send == 0 || n_byp == 0 || n_mcast == 0 || n_recv == 0)
      failures++;
    $display("spike_local=%0d spike_sum=%0d fires=%0d send=%0d bypass=%0d multicast=%0d recv=%0d",
             n_spk_l, n_spk_s, n_fire, n_send, n_byp, n_mcast, n_recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
