// tb_kws_full: the keyword-spotting network at full size on the default
// accelerator.
//
// Maps the six weight layers of the KWS model (49x10 MFCC input; 10x4
// convolution to 49x10x84; a 3x3 stride-2 convolution to 25x5x112;
// three 3x3 convolutions to 25x5x84; global average pooling; a fully
// connected layer to 12 classes) onto the 1024x512 array and runs the whole
// network as one layer program. The placement packs the layers side by side:
//
//   layer   rows x cols   array rows   array columns   mux phases
//   conv1     40 x  84     756..795       0..83          0
//   conv2    756 x 112       0..755       0..111         0
//   conv3   1008 x  84       0..1007    112..195         0,1
//   conv4    756 x  84       0..755     196..279         1,2
//   conv5    756 x  84       0..755     280..363         2
//   fc        84 x  12       0..83      364..375         2
//
// which uses 300,720 of the 524,288 cells (57.4 %). Weights, input and
// column parameters are random; every byte of the activation banks that a
// layer writes is compared with tb_ref_pkg. The run time in clocks and the
// array's idle clocks are reported; the number of CiM operations is checked.
module tb_kws_full;
  import aon_pkg::*;
  import tb_ref_pkg::*;

  localparam int CMP_BYTES = 49 * 10 * 84;   // largest tensor

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
  int cyc = 0;

  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #20000000;
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
    int rb, v, ops, t0;
    prog_en = 0; prog_row = '0; prog_mask = '0; adc_shift = 5'd8;
    foreach (prog_w[i]) prog_w[i] = '0;
    desc_we = 0; desc_addr = '0; desc_wdata = '0;
    cp_we = 0; cp_addr = '0; cp_wdata = '0;
    host_en = 0; host_we = 0; host_bank = 0; host_addr = '0; host_wdata = '0;
    start = 0;
    adc_sh = 8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    //                   mode     in  out  h   w   c    kh  kw s  pt pl oh  ow  row0 col0  f    relu
    prog.push_back(conv(MODE_8B, 0, 0, 49, 10, 1,   10, 4, 1, 4, 1, 49, 10, 756,  0,  84, 1));
    prog.push_back(conv(MODE_8B, 0, 0, 49, 10, 84,  3,  3, 2, 1, 1, 25, 5,   0,   0, 112, 1));
    prog.push_back(conv(MODE_8B, 0, 0, 25, 5,  112, 3,  3, 1, 1, 1, 25, 5,   0, 112,  84, 1));
    prog.push_back(conv(MODE_8B, 0, 0, 25, 5,  84,  3,  3, 1, 1, 1, 25, 5,   0, 196,  84, 1));
    prog.push_back(conv(MODE_8B, 0, 0, 25, 5,  84,  3,  3, 1, 1, 1, 25, 5,   0, 280,  84, 1));
    prog[4].pool = 1'b1; prog[4].s_pool.mant = 16'sd131; prog[4].s_pool.shift = 5'd14;  // ~1/125
    prog.push_back(conv(MODE_8B, 0, 0, 1,  1,  84,  1,  1, 1, 0, 0, 1,  1,   0, 364,  12, 0));

    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) wmem[r][c] = 0;
    foreach (prog[i]) rand_weights(prog[i], 7);
    for (int c = 0; c < COLS; c++) begin
      cpm[c].s_ch.mant  = 16'(rnd(2, 6));
      cpm[c].s_ch.shift = 5'd2;
      cpm[c].bias       = 16'(rnd(-3, 3));
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
        v = (b == 0 && a < 49 * 10) ? rnd(-100, 100) : 0;
        bank[b][a] = v;
        host_write(b, a, v);
      end

    rb = 0;
    foreach (prog[i]) begin
      run_layer(prog[i], rb);
      rb = 1 - rb;
    end

    t0 = cyc;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    $display("network run: %0d clocks (%0d ns at 1.25 ns), %0d CiM operations, array idle %0d clocks",
             cyc - t0, (cyc - t0) * 5 / 4, n_cim_ops, n_starve);
    ops = 0;
    foreach (prog[i])
      ops += int'(prog[i].out_h) * int'(prog[i].out_w) *
             ((int'(prog[i].col0 + prog[i].cols) - 1) / NADC - int'(prog[i].col0) / NADC + 1);
    check(int'(n_cim_ops) == ops, $sformatf("%0d CiM operations, expected %0d", n_cim_ops, ops));
    check(n_layers == 8'(prog.size()), "layer count");
    @(negedge clk);
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < CMP_BYTES; a++) begin
        host_read(b, a, v);
        check(v == bank[b][a], $sformatf("bank %0d addr %0d: got %0d expected %0d", b, a, v, bank[b][a]));
      end
    $write("class scores:");
    for (int f = 0; f < 12; f++) $write(" %0d", bank[0][f]);
    $display("");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
