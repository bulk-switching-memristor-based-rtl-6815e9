// tb_rram_crossbar: checks the array model's as-fabricated levels, its column
// currents I_j = sum over driven rows of (14 + L_ij) for columns whose word
// line is on, and the level change of set and reset pulses (1 + amp/2 plus the
// per-cell offset, saturating at 0 and 127), including that unselected cells
// keep their level. Expected levels are tracked in a copy kept by the bench.
module tb_rram_crossbar;
  import cim_pkg::*;
  logic clk = 0;
  logic [63:0] dl_read = '0, dl_prog = '0, wl_on = '0;
  logic prog_strobe = 0, prog_set = 0;
  logic [3:0] prog_amp = '0;
  current_t [63:0] bl_current;
  int checks = 0, failures = 0;
  int L [64][64];

  rram_crossbar dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  task automatic check_currents();
    for (int c = 0; c < 64; c++) begin
      automatic int s = 0;
      if (wl_on[c]) for (int r = 0; r < 64; r++) if (dl_read[r]) s += 14 + L[r][c];
      check($sformatf("I col %0d", c), bl_current[c], s);
    end
  endtask

  initial begin
    for (int r = 0; r < 64; r++) for (int c = 0; c < 64; c++) L[r][c] = 127 - ((r*37 + c*11) % 32);
    #1;
    check_currents();                       // all zero with nothing driven
    dl_read = '1; wl_on = '1; #1;
    check_currents();                       // full array
    for (int t = 0; t < 10; t++) begin
      dl_read = {$urandom, $urandom}; wl_on = {$urandom, $urandom}; #1;
      check_currents();
    end
    // program pulses on single cells
    dl_read = '0;
    for (int t = 0; t < 200; t++) begin
      automatic int r = $urandom_range(0, 63), c = $urandom_range(0, 63), a = $urandom_range(0, 15);
      automatic bit s = $urandom_range(0, 1);
      automatic int step = 1 + a / 2 + (((r*7 + c*13) >> 2) & 1);
      @(negedge clk);
      dl_prog = 64'(1) << r; wl_on = 64'(1) << c; prog_amp = 4'(a); prog_set = s; prog_strobe = 1;
      @(negedge clk);
      prog_strobe = 0;
      L[r][c] = s ? L[r][c] + step : L[r][c] - step;
      if (L[r][c] > 127) L[r][c] = 127;
      if (L[r][c] < 0) L[r][c] = 0;
    end
    // no strobe: no change
    @(negedge clk);
    dl_prog = '1; wl_on = '1; prog_set = 0; prog_amp = 4'hF;
    @(negedge clk);
    dl_read = '1; wl_on = '1; dl_prog = '0; #1;
    check_currents();
    for (int r = 0; r < 64; r++) for (int c = 0; c < 64; c++)
      check("level", dut.level[r][c], L[r][c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
