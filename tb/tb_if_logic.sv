// tb_if_logic: drives the integrate-and-fire logic with random weighted sums
// and thresholds and compares spike and potential, cycle by cycle, with a
// reference model (integrate, saturate, fire when above the threshold,
// subtract the threshold). Also checks the clear input, the hold of the
// spike register when not enabled, and saturation at both limits.
module tb_if_logic;
  localparam int XW = 16, PW = 20;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic signed [XW-1:0] x = '0;
  logic signed [PW-1:0] threshold = '0;
  logic spike;
  logic signed [PW-1:0] potential;
  int checks = 0, failures = 0, fires = 0, sats = 0;
  longint m_pot; bit m_spk;

  if_logic #(.XW(XW), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit e, input bit c, input int xv, input int th);
    longint s;
    @(negedge clk);
    en = e; clr = c; x = XW'(xv); threshold = PW'(th);
    @(posedge clk);
    if (c) begin m_pot = 0; m_spk = 0; end
    else if (e) begin
      s = m_pot + xv;
      if (s > 524287) begin s = 524287; sats++; end
      if (s < -524288) begin s = -524288; sats++; end
      m_spk = (s > th);
      m_pot = m_spk ? s - th : s;
      if (m_spk) fires++;
    end
    #1;
    checks++;
    if (potential != PW'(m_pot) || spike != m_spk) begin
      failures++;
      $display("mismatch pot=%0d exp=%0d spk=%0b exp=%0b", potential, m_pot, spike, m_spk);
    end
  endtask

  initial begin
    m_pot = 0; m_spk = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int xv = int'($urandom_range(0, 4000)) - 1500;
      step($urandom_range(0, 3) != 0, $urandom_range(0, 99) == 0, xv, int'($urandom_range(1, 5000)));
    end
    // saturation high and low, with a large threshold that never fires
    for (int i = 0; i < 20; i++) step(1, 0, 32767, 500000);
    step(1, 1, 0, 500000);
    for (int i = 0; i < 20; i++) step(1, 0, -32768, 500000);
    // exactly at threshold: no spike
    step(1, 1, 0, 100);
    step(1, 0, 100, 100);
    step(1, 0, 1, 100);
    if (fires == 0 || sats == 0) failures++;
    $display("fires=%0d saturations=%0d", fires, sats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
