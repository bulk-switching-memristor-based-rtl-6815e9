// tb_dl_switch_matrix: checks the drive-line routing in every mode against
// the expected masks: MAC passes all pulses, READ only the selected row,
// PROG selects one row for the program driver, IDLE drives nothing.
module tb_dl_switch_matrix;
  import cim_pkg::*;
  op_mode_e mode;
  logic [63:0] dac_pulse, dl_read, dl_prog;
  logic [5:0] row_sel;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  dl_switch_matrix dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [63:0] er, ep;
      mode = op_mode_e'(t % 4); dac_pulse = {$urandom, $urandom}; row_sel = 6'($urandom);
      #1;
      er = '0; ep = '0;
      case (t % 4)
        1: er = dac_pulse;
        2: begin er = '0; er[row_sel] = dac_pulse[row_sel]; end
        3: ep[row_sel] = 1'b1;
        default: ;
      endcase
      checks++; if (dl_read !== er) failures++;
      checks++; if (dl_prog !== ep) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
