// tb_dl_dac_array: checks that each row emits its input byte LSB first, one
// bit per step, that load wins over step, and that reset clears the lines.
module tb_dl_dac_array;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [ROWS-1:0][7:0] x;
  logic [ROWS-1:0] dl_pulse;
  int checks = 0, failures = 0;

  dl_dac_array #(.ROWS(ROWS), .IN_BITS(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (dl_pulse !== '0) failures++;
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < ROWS; r++) x[r] = 8'($urandom);
      @(negedge clk) load = 1;
      @(negedge clk) load = 0;
      for (int b = 0; b < 8; b++) begin
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (dl_pulse[r] !== x[r][b]) begin
            failures++;
            if (failures < 10) $display("row %0d bit %0d: got %0b want %0b", r, b, dl_pulse[r], x[r][b]);
          end
        end
        step = 1;
        @(negedge clk) step = 0;
      end
      checks++; if (dl_pulse !== '0) failures++;   // all bits shifted out
    end
    // load has priority over step
    for (int r = 0; r < ROWS; r++) x[r] = 8'(r + 1);
    @(negedge clk) begin load = 1; step = 1; end
    @(negedge clk) begin load = 0; step = 0; end
    for (int r = 0; r < ROWS; r++) begin checks++; if (dl_pulse[r] !== x[r][0]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
