// tb_weight_sram: writes random rows into one weight bank at its default
// size (128 rows of 640 bits), reads them back in a scrambled order and
// checks the data and the one-cycle read latency. It also checks that a
// cycle with en low leaves rdata unchanged and writes nothing.
module tb_weight_sram;
  localparam int ROWS = 128;
  localparam int WIDTH = 640;
  logic clk = 0, en = 0, we = 0;
  logic [6:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [ROWS];
  int checks = 0, failures = 0;

  weight_sram #(.ROWS(ROWS), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rnd_row();
    logic [WIDTH-1:0] r;
    for (int i = 0; i < WIDTH / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      model[r] = rnd_row();
      en = 1; we = 1; addr = 7'(r); wdata = model[r];
      @(negedge clk);
    end
    for (int k = 0; k < ROWS; k++) begin
      int r;
      r = (k * 37 + 11) % ROWS;
      en = 1; we = 0; addr = 7'(r); wdata = rnd_row();
      @(negedge clk);
      checks++;
      if (rdata !== model[r]) begin
        failures++;
        $display("read row %0d mismatch", r);
      end
    end
    // Idle cycle: no write, rdata held.
    begin
      logic [WIDTH-1:0] held;
      held = rdata;
      en = 0; we = 1; addr = 7'd5; wdata = ~model[5];
      @(negedge clk);
      checks++;
      if (rdata !== held) failures++;
      en = 1; we = 0; addr = 7'd5;
      @(negedge clk);
      checks++;
      if (rdata !== model[5]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
