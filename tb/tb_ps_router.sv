// tb_ps_router: applies random SUM / SEND / BYPASS / no-op words with random
// link inputs and local partial sums to one PS router and compares its
// output links, weighted-sum line and running sum every cycle with an
// independent cycle model of the router (input registers, OP1 multiplexer,
// adder, output registers). Also checks that a value sent in cycle t is
// added by the receiver in t+2 and bypassed in t+1 (one cycle per hop).
module tb_ps_router;
  import shenjing_pkg::*;
  localparam int W = 16, LW = 13;
  logic clk = 0, rst_n = 0;
  ps_word_t word;
  logic [LW-1:0] local_ps;
  logic [3:0][W-1:0] in_link, out_link;
  logic [W-1:0] ws, sum;
  logic ws_valid;
  int checks = 0, failures = 0;
  int n_sum = 0, n_consec = 0, n_send = 0, n_bypass = 0, n_eject = 0;
  logic [3:0][W-1:0] m_in, m_out;
  logic [W-1:0] m_sum;

  ps_router #(.W(W), .LW(LW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ps_word_t rnd_word();
    case ($urandom_range(0, 4))
      0: return ps_sum(dir_e'($urandom_range(0, 3)), 1'b0);
      1: return ps_sum(dir_e'($urandom_range(0, 3)), 1'b1);
      2: return ps_send(1'($urandom_range(0, 1)), 3'($urandom_range(0, 4)));
      3: return ps_bypass(dir_e'($urandom_range(0, 3)), 3'($urandom_range(0, 4)));
      default: return PS_NOP;
    endcase
  endfunction

  initial begin
    logic [W-1:0] lext, src, m_ws;
    bit act, add, outp;
    word = PS_NOP; local_ps = '0; in_link = '0;
    m_in = '0; m_out = '0; m_sum = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      word = rnd_word();
      local_ps = LW'($urandom);
      for (int d = 0; d < 4; d++) in_link[d] = W'($urandom);
      #1;
      // model of this cycle
      lext = W'($signed(local_ps));
      act  = word.op_type == OP_PS;
      add  = act && word.add_en;
      outp = act && !word.add_en;
      src  = word.bypass ? in_link[word.in_sel] : (word.sum_buf ? m_sum : lext);
      m_ws = (outp && word.out_sel == 3'd4) ? src : '0;
      checks++;
      if (ws !== m_ws || ws_valid !== (outp && word.out_sel == 3'd4)) begin
        failures++; $display("ws mismatch cycle %0d", i);
      end
      if (add) begin n_sum++; if (word.consec_add) n_consec++; end
      if (outp && word.bypass) n_bypass++;
      else if (outp && word.out_sel < 4) n_send++;
      if (outp && word.out_sel == 3'd4) n_eject++;
      @(posedge clk);
      if (add) m_sum = (word.consec_add ? m_sum : lext) + m_in[word.in_sel];
      for (int d = 0; d < 4; d++) m_out[d] = (outp && word.out_sel == 3'(d)) ? src : '0;
      m_in = in_link;
      #1;
      checks++;
      if (out_link !== m_out || sum !== m_sum) begin
        failures++; $display("state mismatch cycle %0d", i);
      end
    end
    // Two routers in a row: a SEND here in cycle t is addable in t+2.
    @(negedge clk);
    local_ps = 13'd1000; word = ps_send(1'b0, 3'(DIR_E)); in_link = '0;
    @(negedge clk);
    word = PS_NOP;
    checks++; if (out_link[DIR_E] !== 16'd1000) failures++;
    @(negedge clk);
    checks++; if (out_link[DIR_E] !== 16'd0) failures++;
    if (n_sum == 0 || n_consec == 0 || n_send == 0 || n_bypass == 0 || n_eject == 0) failures++;
    $display("sum=%0d consec=%0d send=%0d bypass=%0d eject=%0d", n_sum, n_consec, n_send, n_bypass, n_eject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
