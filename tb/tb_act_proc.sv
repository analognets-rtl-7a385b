// tb_act_proc: checks the activation-processing pipeline.
//
// A byte-array model of the write bank receives the unit's masked writes
// and answers its residual reads with one clock of latency. Random column
// parameters are loaded, then three layers are run: one whose columns span
// two mux phases with residual add and ReLU (8-bit), one in 4-bit mode
// without ReLU, and one with global average pooling followed by a flush.
// The expected bytes are computed here from the arithmetic definition
// (two scalings with round-half-up, bias, residual, ReLU, symmetric clip;
// pooled sums times the pooling scale). The unit must accept a new phase
// every 8 clocks (128 words over 16 lanes), matching the 4-bit CiM cycle.
module tb_act_proc;
  import aon_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  layer_desc_t       cfg;
  logic              layer_start;
  logic              cp_we;
  logic [8:0]        cp_addr;
  chan_par_t         cp_wdata;
  logic              in_valid, in_ready;
  act_t              in_words [NADC];
  logic [1:0]        in_phase;
  logic [15:0]       in_pix;
  logic              pool_flush, busy;
  logic              rs_en, wr_en;
  logic [ADDR_W-1:0] rs_addr, wr_addr;
  act_t              rs_data [LANES];
  act_t              wr_data [LANES];
  logic [LANES-1:0]  wr_mask;

  act_proc u_dut (.*);

  int checks = 0, failures = 0;
  int mem [8192];
  int cyc = 0, t_acc = -1, n_acc = 0, bad_rate = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rs_en) for (int k = 0; k < LANES; k++) rs_data[k] <= act_t'(mem[(int'(rs_addr) + k) % 8192]);
    if (wr_en) for (int k = 0; k < LANES; k++) if (wr_mask[k]) mem[(int'(wr_addr) + k) % 8192] = int'(wr_data[k]);
    if (in_valid && in_ready) begin
      if (t_acc >= 0 && cyc - t_acc != 8) bad_rate++;
      t_acc = cyc;
      n_acc++;
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // runs npix pixels through the unit, back to back; checks the result
  task automatic run(layer_desc_t d, int npix);
    int adc [64][COLS];
    int exp_mem [8192];
    longint v, pool [COLS];
    int p_lo, p_hi, m;
    cfg = d;
    m = qmax(d.mode);
    p_lo = int'(d.col0) / NADC;
    p_hi = (int'(d.col0) + int'(d.cols) - 1) / NADC;
    foreach (mem[i]) begin mem[i] = rnd(-m, m); exp_mem[i] = mem[i]; end
    foreach (pool[f]) pool[f] = 0;
    for (int p = 0; p < npix; p++)
      for (int c = 0; c < COLS; c++) adc[p][c] = rnd(-m, m);
    // expected
    for (int p = 0; p < npix; p++)
      for (int f = 0; f < int'(d.cols); f++) begin
        int col;
        col = int'(d.col0) + f;
        v = longint'(adc[p][col]) * longint'(d.s_layer.mant) * longint'(cpm[col].s_ch.mant);
        v = rsr(v, int'(d.s_layer.shift) + int'(cpm[col].s_ch.shift)) + longint'(cpm[col].bias);
        if (d.residual) v += exp_mem[int'(d.res_base) + p * int'(d.cols) + f];
        if (d.relu && v < 0) v = 0;
        v = sat(v, m);
        if (d.pool) pool[f] += v;
        else exp_mem[int'(d.out_base) + p * int'(d.cols) + f] = int'(v);
      end
    if (d.pool)
      for (int f = 0; f < int'(d.cols); f++)
        exp_mem[int'(d.out_base) + f] = sat(rsr(pool[f] * longint'(d.s_pool.mant), int'(d.s_pool.shift)), m);
    // drive
    layer_start = 1; @(negedge clk); layer_start = 0;
    t_acc = -1;
    for (int p = 0; p < npix; p++)
      for (int ph = p_lo; ph <= p_hi; ph++) begin
        in_valid = 1; in_phase = 2'(ph); in_pix = 16'(p);
        for (int a = 0; a < NADC; a++) in_words[a] = act_t'(adc[p][ph * NADC + a]);
        while (!in_ready) @(negedge clk);
        @(negedge clk);
        in_valid = 0;
      end
    @(negedge clk);
    while (busy) @(negedge clk);
    if (d.pool) begin
      pool_flush = 1; @(negedge clk); pool_flush = 0;
      @(negedge clk);
      while (busy) @(negedge clk);
    end
    repeat (2) @(negedge clk);
    for (int i = 0; i < 8192; i++)
      check(mem[i] == exp_mem[i], $sformatf("byte %0d: got %0d expected %0d", i, mem[i], exp_mem[i]));
  endtask

  initial begin
    layer_desc_t d;
    cfg = '0; layer_start = 0; cp_we = 0; cp_addr = '0; cp_wdata = '0;
    in_valid = 0; in_phase = '0; in_pix = '0; pool_flush = 0;
    foreach (in_words[a]) in_words[a] = '0;
    foreach (rs_data[k]) rs_data[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < COLS; c++) begin
      cpm[c].s_ch.mant  = 16'(rnd(-300, 300));
      cpm[c].s_ch.shift = 5'(rnd(6, 9));
      cpm[c].bias       = 16'(rnd(-10, 10));
      cp_we = 1; cp_addr = 9'(c); cp_wdata = cpm[c];
      @(negedge clk);
    end
    cp_we = 0;

    d = '0; d.mode = MODE_8B; d.col0 = 10'd90; d.cols = 10'd70; d.relu = 1; d.residual = 1;
    d.out_base = 16'd0; d.res_base = 16'd4000; d.s_layer.mant = 16'sd3; d.s_layer.shift = 5'd1;
    run(d, 30);
    d = '0; d.mode = MODE_4B; d.col0 = 10'd300; d.cols = 10'd40; d.relu = 0;
    d.out_base = 16'd1003; d.s_layer.mant = 16'sd1;
    run(d, 40);
    check(bad_rate == 0 && n_acc >= 100, $sformatf("one phase per 8 clocks (%0d bad of %0d)", bad_rate, n_acc));
    d = '0; d.mode = MODE_6B; d.col0 = 10'd500; d.cols = 10'd12; d.relu = 1; d.pool = 1;
    d.out_base = 16'd777; d.s_layer.mant = 16'sd1; d.s_pool.mant = 16'sd41; d.s_pool.shift = 5'd10;
    run(d, 25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
