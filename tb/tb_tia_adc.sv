// tb_tia_adc: feeds 8 random bit-line currents I_1..I_8 and a conversion,
// and checks the code against Eq. (1) computed independently with real
// arithmetic: D = floor(256 * sum_n 2^-(9-n) I_n / (2560 >> gain)), clipped
// to 255, plus the sat flag, the one-cycle valid, and that a conversion
// clears the held value. Also checks the 9-cycle conversion.
module tb_tia_adc;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, sample = 0, convert = 0;
  logic [1:0] gain = 0;
  current_t i_in = '0;
  logic [7:0] code;
  logic valid, sat;
  int checks = 0, failures = 0, n_sat = 0;

  tia_adc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      real v; int want, cyc;
      automatic int imax = (t % 3 == 0) ? 16383 : 3000;
      gain = 2'($urandom);
      v = 0.0;
      cyc = 0;
      for (int n = 1; n <= 8; n++) begin
        automatic int i = $urandom_range(0, imax);
        @(negedge clk); sample = 1; i_in = current_t'(i); cyc++;
        v = (v + real'(i)) / 2.0;
      end
      @(negedge clk); sample = 0; convert = 1; cyc++;
      @(negedge clk); convert = 0;
      want = int'($floor(256.0 * v / real'(2560 >> gain) + 1e-9));
      checks++; if (!valid) failures++;
      checks++; if (code != ((want > 255) ? 8'd255 : 8'(want))) begin
        failures++;
        if (failures < 10) $display("code %0d want %0d", code, want);
      end
      checks++; if (sat != (want > 255)) failures++;
      if (sat) n_sat++;
      checks++; if (cyc != 9) failures++;
      @(negedge clk);
      checks++; if (valid) failures++;
    end
    // clear discards the held value
    @(negedge clk); sample = 1; i_in = 14'd3000;
    @(negedge clk); sample = 0; clear = 1;
    @(negedge clk); clear = 0; convert = 1; gain = 0;
    @(negedge clk); convert = 0;
    checks++; if (code != 0) failures++;
    checks++; if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
