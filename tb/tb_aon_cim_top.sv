// tb_aon_cim_top: end-to-end test of the accelerator.
//
// Runs a six-layer program that exercises every mechanism of the design:
// 8/6/4-bit modes with switches between layers, zero padding, stride 2, a
// layer whose columns straddle two mux phases (two CiM operations per
// pixel), a residual add from the write bank, global average pooling, a
// fully connected layer in the last mux phase, and the bank swap of the
// layer-serial flow. Weights, inputs and column parameters are random; the
// expected SRAM contents come from tb_ref_pkg. Every CiM operation is also
// timed against the 104/28/8-clock CiM cycle of its mode, and the
// activation pipeline against its budget of one phase per 8 clocks.
// Stimulus changes on the falling clock edge.
module tb_aon_cim_top;
  import aon_pkg::*;
  import tb_ref_pkg::*;

  localparam int CMP_BYTES = 'h3200;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic              prog_en;
  logic [9:0]        prog_row;
  wcode_t            prog_w [COLS];
  logic [COLS-1:0]   prog_mask;
  logic [4:0]        adc_shift;
  logic              desc_we;
  logic [4:0]        desc_addr;
  layer_desc_t       desc_wdata;
  logic              cp_we;
  logic [8:0]        cp_addr;
  chan_par_t         cp_wdata;
  logic              host_en, host_we, host_bank;
  logic [ADDR_W-1:0] host_addr;
  act_t              host_wdata, host_rdata;
  logic              start, busy, done;
  logic [31:0]       n_cim_ops, n_starve;
  logic [7:0]        n_layers;

  aon_cim_top u_dut (.*);

  int checks = 0, failures = 0;
  layer_desc_t prog [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- mechanism counters and timing monitors ----------------------------
  int n_phase1 = 0, n_pad = 0, n_res = 0, n_flush = 0, n_mode_sw = 0, n_stride2 = 0;
  int n_tcim_bad = 0, n_tcim = 0, n_ap_bad = 0, n_ap = 0;
  act_mode_e last_mode = MODE_8B;
  int t_start = -1, cyc = 0, t_acc = -1;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (u_dut.cim_start && u_dut.cim_phase == 2'd1) n_phase1++;
    if (u_dut.u_im2col.issuing && !u_dut.u_im2col.tap_ok) n_pad++;
    if (u_dut.rs_en) n_res++;
    if (u_dut.pool_flush) n_flush++;
    if (u_dut.layer_start) begin
      if (u_dut.cfg.mode != last_mode) n_mode_sw++;
      last_mode = u_dut.cfg.mode;
      if (u_dut.cfg.stride == 2) n_stride2++;
    end
    // CiM cycle length: done follows start by tcim_cycles(mode) clocks
    if (u_dut.cim_done) begin
      n_tcim++;
      if (cyc - t_start != int'(tcim_cycles(u_dut.cfg.mode))) n_tcim_bad++;
    end
    if (u_dut.cim_start && (!u_dut.u_cim.busy || u_dut.u_cim.cnt <= 1)) t_start = cyc;
    // activation pipeline: ready for the next phase 8 clocks after accepting one
    if (t_acc >= 0 && cyc - t_acc < 8 && u_dut.ap_ready) n_ap_bad++;
    if (t_acc >= 0 && cyc - t_acc == 8) begin
      n_ap++;
      if (!u_dut.ap_ready) n_ap_bad++;
    end
    if (u_dut.ap_valid && u_dut.ap_ready) t_acc = cyc;
  end

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_write(int b, int a, int v);
    host_en = 1; host_we = 1; host_bank = b[0]; host_addr = ADDR_W'(a); host_wdata = act_t'(v);
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic host_read(int b, int a, output int v);
    host_en = 1; host_we = 0; host_bank = b[0]; host_addr = ADDR_W'(a);
    @(negedge clk);
    host_en = 0;
    v = int'(host_rdata);
  endtask

  initial begin
    int rb, v;
    prog_en = 0; prog_row = '0; prog_mask = '0; adc_shift = 5'd5;
    foreach (prog_w[i]) prog_w[i] = '0;
    desc_we = 0; desc_addr = '0; desc_wdata = '0;
    cp_we = 0; cp_addr = '0; cp_wdata = '0;
    host_en = 0; host_we = 0; host_bank = 0; host_addr = '0; host_wdata = '0;
    start = 0;
    adc_sh = 5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- layer program ---------------------------------------------------
    //                    mode     in       out      h  w  c   kh kw s pt pl oh ow row0 col0 f  relu
    prog.push_back(conv(MODE_8B, 'h0000, 'h0000,  6, 6, 3,  3, 3, 1, 1, 1, 6, 6,   0,   0,  8, 1));
    prog.push_back(conv(MODE_6B, 'h0000, 'h0000,  6, 6, 8,  3, 3, 2, 1, 1, 3, 3,  40, 120, 20, 1));
    prog.push_back(conv(MODE_8B, 'h0000, 'h1000,  3, 3, 20, 1, 1, 1, 0, 0, 3, 3, 200, 200, 24, 1));
    prog.push_back(conv(MODE_4B, 'h1000, 'h2000,  3, 3, 24, 1, 1, 1, 0, 0, 3, 3, 300, 260, 20, 1));
    prog.push_back(conv(MODE_8B, 'h2000, 'h3000,  3, 3, 20, 3, 3, 1, 1, 1, 3, 3, 400, 384, 12, 1));
    prog.push_back(conv(MODE_8B, 'h3000, 'h3100,  1, 1, 12, 1, 1, 1, 0, 0, 1, 1, 700, 500,  5, 0));
    prog[2].s_layer.mant = 16'sd3; prog[2].s_layer.shift = 5'd1;
    prog[3].residual = 1'b1; prog[3].res_base = '0;          // L1's output, still in this bank
    prog[4].pool = 1'b1; prog[4].s_pool.mant = 16'sd57; prog[4].s_pool.shift = 5'd9;  // ~1/9

    // ---- weights, column parameters, input -------------------------------
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) wmem[r][c] = 0;
    foreach (prog[i]) rand_weights(prog[i], 15);
    for (int c = 0; c < COLS; c++) begin
      cpm[c].s_ch.mant  = 16'(rnd(1, 3));
      cpm[c].s_ch.shift = 5'd1;
      cpm[c].bias       = 16'(rnd(-4, 4));
    end
    for (int r = 0; r < ROWS; r++) begin
      prog_en = 1; prog_row = 10'(r); prog_mask = '1;
      for (int c = 0; c < COLS; c++) prog_w[c] = wcode_t'(wmem[r][c]);
      @(negedge clk);
    end
    prog_en = 0;
    for (int c = 0; c < COLS; c++) begin
      cp_we = 1; cp_addr = 9'(c); cp_wdata = cpm[c];
      @(negedge clk);
    end
    cp_we = 0;
    foreach (prog[i]) begin
      desc_we = 1; desc_addr = 5'(i); desc_wdata = prog[i];
      @(negedge clk);
    end
    desc_wdata = '0; desc_wdata.ltype = LT_END; desc_addr = 5'(prog.size());
    @(negedge clk);
    desc_we = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < CMP_BYTES; a++) begin
        v = (b == 0 && a < 6 * 6 * 3) ? rnd(-40, 40) : 0;
        bank[b][a] = v;
        host_write(b, a, v);
      end

    // ---- expected result -------------------------------------------------
    rb = 0;
    foreach (prog[i]) begin
      run_layer(prog[i], rb);
      rb = 1 - rb;
    end

    // ---- run -------------------------------------------------------------
    start = 1; @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    check(n_layers == 8'(prog.size()), "layer count");
    check(!busy, "idle after done");
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < CMP_BYTES; a++) begin
        host_read(b, a, v);
        check(v == bank[b][a], $sformatf("bank %0d addr %h: got %0d expected %0d", b, a, v, bank[b][a]));
      end

    // ---- mechanisms and timing -------------------------------------------
    $display("cim ops %0d, array starved %0d clocks, second-phase ops %0d, padding taps %0d",
             n_cim_ops, n_starve, n_phase1, n_pad);
    $display("residual reads %0d, pool flushes %0d, mode switches %0d, stride-2 layers %0d",
             n_res, n_flush, n_mode_sw, n_stride2);
    check(n_phase1 > 0,   "two-phase layer ran");
    check(n_pad > 0,      "zero padding happened");
    check(n_res > 0,      "residual add happened");
    check(n_flush == 1,   "one pooling flush");
    check(n_mode_sw >= 3, "mode switches");
    check(n_stride2 == 1, "stride-2 layer");
    check(n_starve > 0,   "array starvation counted");
    check(n_tcim == int'(n_cim_ops) && n_tcim_bad == 0,
          $sformatf("CiM cycle length (%0d bad of %0d)", n_tcim_bad, n_tcim));
    check(n_ap > 0 && n_ap_bad == 0,
          $sformatf("activation pipeline 8 clocks per phase (%0d bad of %0d)", n_ap_bad, n_ap));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
