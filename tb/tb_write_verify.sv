// tb_write_verify: runs the write-and-verify sequencer against a cell
// emulated in this bench (a READ returns the level; a set or reset pulse of
// amplitude a moves it by 2 + a) and checks the programming flow step by step
// with an independent model of the expected next command: a read after every
// pulse; set pulses while below the window, amplitude 0,1,2,... within a
// phase; reset pulses while above it; an over-reset starts a new trial or,
// after max_trials trials, ends in fail; ok exactly when the last read is in
// the window. Counts of ok, fail and over-reset outcomes must all be nonzero.
module tb_write_verify;
  import cim_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] row = 0, col = 0;
  logic [7:0] lo = 0, hi = 0, rd_code;
  logic [2:0] max_trials = 2, trials;
  logic busy, ok, fail, ev_over_reset, cmd_valid, cmd_ready, op_done;
  tile_cmd_t cmd;
  int checks = 0, failures = 0, n_ok = 0, n_fail = 0, n_over = 0;
  int level;

  write_verify dut (.*);
  always #5 clk = ~clk;

  // emulated tile: accepts a command immediately, completes it 3 cycles later
  int wait_q = 0;
  tile_cmd_t cur;
  assign cmd_ready = (wait_q == 0);
  assign op_done   = (wait_q == 1);
  assign rd_code   = 8'(level);
  always @(posedge clk) begin
    if (wait_q > 0) wait_q <= wait_q - 1;
    if (rst_n && cmd_valid && cmd_ready) begin cur <= cmd; wait_q <= 3; end
    if (wait_q == 1 && cur.op == OP_SET)   level <= (level + 2 + int'(cur.amp) > 255) ? 255 : level + 2 + int'(cur.amp);
    if (wait_q == 1 && cur.op == OP_RESET) level <= (level - 2 - int'(cur.amp) < 0) ? 0 : level - 2 - int'(cur.amp);
  end

  initial begin
    repeat (400000) @(posedge clk);
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

  // expected-flow model
  typedef enum {M_INIT, M_SET, M_RESET} mphase_e;

  task automatic run_one(input int l0, input int wlo, input int whi, input int mt);
    mphase_e ph = M_INIT;
    tile_op_e last = OP_READ, want_next = OP_READ;
    int amp = 0, npulse = 0, tr = 0, val, over_seen = 0;
    bit finished = 0, want_ok = 0;
    level = l0;
    @(negedge clk);
    lo = 8'(wlo); hi = 8'(whi); max_trials = 3'(mt); row = 6'($urandom); col = 6'($urandom);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!finished) begin
      @(posedge clk);
      if (cmd_valid && cmd_ready) begin
        check("next op", cmd.op, want_next);
        check("row", cmd.row, row); check("col", cmd.col, col);
        if (cmd.op != OP_READ) check("amplitude", cmd.amp, amp);
        last = cmd.op;
      end
      if (op_done) begin
        if (last != OP_READ) begin
          want_next = OP_READ;
          npulse++;
        end else begin
          val = level;
          if (val >= wlo && val <= whi) begin finished = 1; want_ok = 1; end
          else case (ph)
            M_INIT: begin
              tr = 1; amp = 0; npulse = 0;
              if (mt == 0) finished = 1;
              else if (val > whi) begin ph = M_RESET; want_next = OP_RESET; end
              else begin ph = M_SET; want_next = OP_SET; end
            end
            M_SET: if (val > whi) begin
                ph = M_RESET; want_next = OP_RESET; amp = 0; npulse = 0;
              end else begin
                want_next = OP_SET; if (npulse != 0 && amp != 15) amp++;
              end
            default: if (val > whi) begin
                want_next = OP_RESET; if (npulse != 0 && amp != 15) amp++;
              end else begin
                over_seen++;
                if (tr >= mt) finished = 1;
                else begin tr++; ph = M_SET; want_next = OP_SET; amp = 0; npulse = 0; end
              end
          endcase
        end
      end
    end
    @(negedge clk); @(negedge clk);
    check("busy ends", busy, 0);
    check("ok", ok, want_ok);
    check("fail", fail, !want_ok);
    check("trials", trials, tr);
    n_over += over_seen;
    if (ok) n_ok++;
    if (fail) n_fail++;
  endtask

  int ovr_pulses = 0;
  always @(posedge clk) if (ev_over_reset) ovr_pulses++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int wlo = $urandom_range(20, 200);
      automatic int wid = $urandom_range(0, 4);
      run_one($urandom_range(0, 255), wlo, wlo + wid, (t % 10 == 9) ? 1 : 2);
    end
    run_one(100, 100, 102, 2);      // already in the window
    run_one(10, 100, 100, 0);       // no trials allowed
    check("over-reset pulses", ovr_pulses, n_over);
    check("ok seen", n_ok > 0, 1);
    check("fail seen", n_fail > 0, 1);
    check("over-reset seen", n_over > 0, 1);
    $display("ok=%0d fail=%0d over-resets=%0d", n_ok, n_fail, n_over);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
