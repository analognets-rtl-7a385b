// tb_im2col: checks the IM2COL unit against a direct evaluation of the
// receptive field.
//
// A byte-array model of the read bank answers the unit's LANES-byte reads
// with one clock of latency. For random convolution shapes (channels
// below, at and above LANES, strides 1 and 2, padding 0..2, kernels up to
// 10x4 as in the keyword-spotting network's first layer) and random output
// pixels, every vector row of the layer is compared with the input value
// (or 0 for a padding tap) that the row order row0 + (kh*k_w + kw)*in_c + c
// prescribes. The start-to-done time must be one clock per LANES-byte chunk
// of every tap, padding taps included, plus 2.
module tb_im2col;
  import aon_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  layer_desc_t       cfg;
  logic              start, busy, done;
  logic [7:0]        oy, ox;
  logic              rd_en;
  logic [ADDR_W-1:0] rd_addr;
  act_t              rd_data [LANES];
  act_t              vec [ROWS];

  im2col u_dut (.*);

  int checks = 0, failures = 0;
  act_t mem [8192];
  int cyc = 0, t_s = 0, lat = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  // read-bank model, one clock latency
  always @(posedge clk) begin
    cyc++;
    if (rd_en) for (int k = 0; k < LANES; k++) rd_data[k] <= mem[(int'(rd_addr) + k) % 8192];
    if (start && !busy) t_s = cyc;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h, w, c, kh, kw, s, pt, pl, oh, ow, chunks, y, x, row, e;
    foreach (mem[i]) mem[i] = act_t'(rnd(-128, 127));
    foreach (rd_data[k]) rd_data[k] = '0;
    cfg = '0; start = 0; oy = '0; ox = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      case (t % 4)
        0: begin c = 1;  kh = 10; kw = 4; end
        1: begin c = rnd(2, 15); kh = 3; kw = 3; end
        2: begin c = 16 * rnd(1, 3); kh = rnd(1, 3); kw = rnd(1, 3); end
        default: begin c = rnd(17, 100); kh = rnd(1, 3); kw = kh; end
      endcase
      h = rnd(3, 12); w = rnd(3, 12); s = rnd(1, 2);
      pt = rnd(0, 2); pl = rnd(0, 2);
      oh = (h + 2 * pt - kh) / s + 1; ow = (w + 2 * pl - kw) / s + 1;
      if (oh < 1) oh = 1;
      if (ow < 1) ow = 1;
      cfg = '0;
      cfg.in_base = ADDR_W'(rnd(0, 1000));
      cfg.in_h = 8'(h); cfg.in_w = 8'(w); cfg.in_c = 10'(c);
      cfg.k_h = 4'(kh); cfg.k_w = 4'(kw); cfg.stride = 2'(s);
      cfg.pad_t = 3'(pt); cfg.pad_l = 3'(pl);
      cfg.out_h = 8'(oh); cfg.out_w = 8'(ow);
      cfg.rows = 11'(kh * kw * c);
      cfg.row0 = 10'(rnd(0, ROWS - kh * kw * c));
      oy = 8'(rnd(0, oh - 1)); ox = 8'(rnd(0, ow - 1));
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      lat = cyc + 1 - t_s;
      chunks = 0;
      for (int i = 0; i < kh; i++)
        for (int j = 0; j < kw; j++) begin
          y = int'(oy) * s + i - pt;
          x = int'(ox) * s + j - pl;
          chunks += (c + LANES - 1) / LANES;   // padding taps are written in chunks too
          for (int ch = 0; ch < c; ch++) begin
            row = int'(cfg.row0) + (i * kw + j) * c + ch;
            e = (y < 0 || x < 0 || y >= h || x >= w) ? 0
                : int'(mem[int'(cfg.in_base) + (y * w + x) * c + ch]);
            check(int'(vec[row]) == e, $sformatf("test %0d row %0d: got %0d expected %0d", t, row, vec[row], e));
          end
        end
      check(lat == chunks + 2, $sformatf("test %0d: %0d clocks, expected %0d", t, lat, chunks + 2));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
