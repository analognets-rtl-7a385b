// tb_cim_macro: checks the behavioural CiM macro.
//
// Programs random differential weights into the whole array, then runs
// matrix-vector operations with random row/column windows, mux phases and
// activation modes. Each ADC word is compared with a dot product computed
// here (inputs clipped to the DAC range, weights as written, ADC gain
// 2^-adc_shift with rounding, clipping to the mode's range; columns outside
// the window read 0). The latency from `start` to `done` must be the CiM
// cycle of the mode: 104, 28 and 8 clocks for 8, 6 and 4 bits, and
// back-to-back operations must follow each other at that period.
module tb_cim_macro;
  import aon_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic            prog_en;
  logic [9:0]      prog_row;
  wcode_t          prog_w [COLS];
  logic [COLS-1:0] prog_mask;
  logic [4:0]      adc_shift;
  logic            start;
  act_mode_e       mode;
  logic [1:0]      phase;
  logic [9:0]      row0, col0, cols;
  logic [10:0]     rows;
  act_t            in_vec [ROWS];
  logic            busy, done;
  act_t            adc_out [NADC];

  cim_macro u_dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0, t_s = -1, lat = -1, t_prev_done = -1, period = -1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (start && (!busy || done)) t_s = cyc;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected ADC word for ADC a
  function automatic int expect_adc(int a);
    int col;
    longint acc;
    col = int'(phase) * NADC + a;
    if (col < int'(col0) || col >= int'(col0) + int'(cols)) return 0;
    acc = 0;
    for (int r = int'(row0); r < int'(row0) + int'(rows) && r < ROWS; r++)
      acc += longint'(sat(int'(in_vec[r]), qmax(mode))) * longint'(wmem[r][col]);
    return sat(rsr(acc, int'(adc_shift)), qmax(mode));
  endfunction

  initial begin
    prog_en = 0; prog_row = '0; prog_mask = '0; adc_shift = 5'd6;
    start = 0; mode = MODE_8B; phase = '0; row0 = '0; rows = '0; col0 = '0; cols = '0;
    foreach (prog_w[i]) prog_w[i] = '0;
    foreach (in_vec[i]) in_vec[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // program every row; a second pass with a partial mask checks the mask
    for (int pass = 0; pass < 2; pass++)
      for (int r = 0; r < ROWS; r++) begin
        prog_en = 1; prog_row = 10'(r);
        for (int c = 0; c < COLS; c++) begin
          prog_mask[c] = (pass == 0) || (c % 3 == 0);
          prog_w[c]    = wcode_t'(rnd(-127, 127));
          if (prog_mask[c]) wmem[r][c] = int'(prog_w[c]);
        end
        @(negedge clk);
      end
    prog_en = 0;

    for (int t = 0; t < 24; t++) begin
      mode  = act_mode_e'(t % 3);
      phase = 2'(rnd(0, 3));
      row0  = 10'(rnd(0, 900));
      rows  = 11'(rnd(1, 1024));
      col0  = 10'(int'(phase) * NADC + rnd(-20, 100));
      cols  = 10'(rnd(1, 200));
      if (int'(col0) + int'(cols) > COLS) cols = 10'(COLS - int'(col0));
      adc_shift = 5'(rnd(4, 9));
      foreach (in_vec[i]) in_vec[i] = act_t'(rnd(-128, 127));
      start = 1;
      @(negedge clk);
      start = 0;
      // the inputs are latched: disturb them while the operation runs
      foreach (in_vec[i]) in_vec[i] = act_t'(rnd(-128, 127));
      while (!done) @(negedge clk);
      // the monitor counts the edge at which done is first sampled: cyc + 1
      lat = cyc + 1 - t_s;
      t_prev_done = cyc + 1;
      check(lat == int'(tcim_cycles(mode)), $sformatf("latency %0d for mode %0d", lat, mode));
      // recompute with the vector that was actually applied: re-run it
      foreach (in_vec[i]) in_vec[i] = act_t'(rnd(-128, 127));
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      period = cyc + 1 - t_prev_done;
      check(period == int'(tcim_cycles(mode)), $sformatf("period %0d for mode %0d", period, mode));
      for (int a = 0; a < NADC; a++)
        check(int'(adc_out[a]) == expect_adc(a),
              $sformatf("op %0d adc %0d: got %0d expected %0d", t, a, adc_out[a], expect_adc(a)));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
