// tb_layer_seq: checks the layer sequencer with behavioural stand-ins for
// the units it controls.
//
// The IM2COL stand-in finishes a vector a random 1..40 clocks after its
// start, the CiM stand-in signals done a CiM cycle (104/28/8 clocks) after
// its start, and the activation-pipeline stand-in is ready only part of the
// time, so the sequencer must hold ADC results. A four-layer program
// (one- and two-phase layers, a pooled layer, a final layer in phase 3) is
// run. Checked: every (pixel, phase) result reaches the activation pipeline
// exactly once and in order, the number of CiM operations, the phase of
// every operation, the layer configuration seen by each unit, one
// layer_start per layer, one pool flush for the pooled layer, the bank
// swap after each layer, done and the layer count, and that the array is
// never started while busy.
module tb_layer_seq;
  import aon_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic         desc_we;
  logic [4:0]   desc_addr;
  layer_desc_t  desc_wdata;
  logic         start, busy, done;
  layer_desc_t  cfg;
  logic         rd_bank;
  logic         i2c_start, i2c_busy, i2c_done;
  logic [7:0]   i2c_oy, i2c_ox;
  logic         cim_start, cim_busy, cim_done;
  logic [1:0]   cim_phase;
  logic         ap_valid, ap_ready;
  logic [1:0]   ap_phase;
  logic [15:0]  ap_pix;
  logic         layer_start, pool_flush, ap_busy;
  logic [31:0]  n_cim_ops, n_starve;
  logic [7:0]   n_layers;

  layer_seq u_dut (.*);

  int checks = 0, failures = 0;
  layer_desc_t prog [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- stand-ins ------------------------------------------------------------
  int i2c_cnt = 0, cim_cnt = 0, li = -1;
  int exp_pix = 0, exp_ph = 0, n_starts = 0, n_ls = 0, n_fl = 0, n_bad_start = 0;
  logic last_bank = 0;
  always @(posedge clk) if (rst_n) begin
    // IM2COL
    i2c_done <= 1'b0;
    if (i2c_start && !i2c_busy) begin i2c_busy <= 1'b1; i2c_cnt = rnd(1, 40); end
    else if (i2c_busy) begin
      i2c_cnt--;
      if (i2c_cnt == 0) begin i2c_busy <= 1'b0; i2c_done <= 1'b1; end
    end
    // CiM
    cim_done <= 1'b0;
    if (cim_start) begin
      if (cim_busy) n_bad_start++;
      n_starts++;
      check(int'(cim_phase) == exp_ph_at_start(), "phase of CiM operation");
      cim_busy <= 1'b1; cim_cnt = int'(tcim_cycles(cfg.mode)) - 1;
    end else if (cim_busy) begin
      cim_cnt--;
      if (cim_cnt == 0) begin cim_busy <= 1'b0; cim_done <= 1'b1; end
    end
    // activation pipeline
    ap_ready <= rnd(0, 2) != 0;
    if (ap_valid && ap_ready) begin
      check(int'(ap_pix) == exp_pix && int'(ap_phase) == exp_ph,
            $sformatf("result order: got pix %0d phase %0d, expected %0d/%0d", ap_pix, ap_phase, exp_pix, exp_ph));
      if (exp_ph == int'(prog[li].col0 + prog[li].cols - 1) / NADC) begin
        exp_ph = int'(prog[li].col0) / NADC; exp_pix++;
      end else exp_ph++;
    end
    if (layer_start) begin
      li++; n_ls++;
      exp_pix = 0; exp_ph = int'(prog[li].col0) / NADC; ph_s = exp_ph;
      check(cfg == prog[li], "configuration of the layer");
      check(rd_bank == li[0], "read bank of the layer");
    end
    if (pool_flush) begin
      n_fl++;
      check(prog[li].pool && exp_pix == int'(prog[li].out_h) * int'(prog[li].out_w), "flush after the pooled layer's last result");
    end
  end

  int ph_s = 0;
  function automatic int exp_ph_at_start();
    int r;
    r = ph_s;
    if (ph_s == int'(prog[li].col0 + prog[li].cols - 1) / NADC) ph_s = int'(prog[li].col0) / NADC;
    else ph_s++;
    return r;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ops;
    desc_we = 0; desc_addr = '0; desc_wdata = '0; start = 0; ap_busy = 0;
    i2c_busy = 0; i2c_done = 0; cim_busy = 0; cim_done = 0; ap_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    prog.push_back(conv(MODE_8B, 0, 0, 5, 5, 3, 3, 3, 1, 1, 1, 5, 5, 0, 0, 16, 1));
    prog.push_back(conv(MODE_4B, 0, 0, 5, 5, 16, 3, 3, 2, 1, 1, 3, 3, 100, 100, 60, 1));
    prog.push_back(conv(MODE_6B, 0, 0, 3, 3, 60, 1, 1, 1, 0, 0, 3, 3, 300, 200, 30, 1));
    prog[2].pool = 1'b1;
    prog.push_back(conv(MODE_8B, 0, 0, 1, 1, 30, 1, 1, 1, 0, 0, 1, 1, 400, 420, 10, 0));
    foreach (prog[i]) begin
      desc_we = 1; desc_addr = 5'(i); desc_wdata = prog[i]; @(negedge clk);
    end
    desc_addr = 5'(prog.size()); desc_wdata = '0; desc_wdata.ltype = LT_END; @(negedge clk);
    desc_we = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    ops = 0;
    foreach (prog[i])
      ops += int'(prog[i].out_h) * int'(prog[i].out_w) *
             ((int'(prog[i].col0 + prog[i].cols) - 1) / NADC - int'(prog[i].col0) / NADC + 1);
    check(int'(n_cim_ops) == ops && n_starts == ops, $sformatf("%0d CiM operations, expected %0d", n_cim_ops, ops));
    check(n_layers == 8'(prog.size()) && n_ls == prog.size(), "layer count");
    check(n_fl == 1, "one pool flush");
    check(n_bad_start == 0, "array never started while busy");
    check(exp_pix == 1, "last layer fully delivered");
    check(rd_bank == 1'(prog.size()), "bank swapped after every layer");
    @(negedge clk);
    check(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
