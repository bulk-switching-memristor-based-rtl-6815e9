// tb_bl_switch_matrix: checks that TIA g receives column 8g+phase for every
// phase, and the word-line enables per mode (all in MAC, one in READ/PROG,
// none in IDLE).
module tb_bl_switch_matrix;
  import cim_pkg::*;
  op_mode_e mode;
  logic [2:0] phase;
  logic [5:0] col_sel;
  current_t [63:0] bl_current;
  current_t [7:0] tia_in;
  logic [63:0] wl_on;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  bl_switch_matrix dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [63:0] ew;
      mode = op_mode_e'(t % 4); phase = 3'($urandom); col_sel = 6'($urandom);
      for (int c = 0; c < 64; c++) bl_current[c] = current_t'($urandom);
      #1;
      for (int g = 0; g < 8; g++) begin
        checks++;
        if (tia_in[g] !== bl_current[8*g + int'(phase)]) failures++;
      end
      case (t % 4)
        1: ew = '1;
        2, 3: begin ew = '0; ew[col_sel] = 1'b1; end
        default: ew = '0;
      endcase
      checks++; if (wl_on !== ew) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
