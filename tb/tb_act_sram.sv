// tb_act_sram: checks the two-bank, byte-lane activation SRAM.
//
// Keeps a byte-array model of both banks. After filling the first 2 KB of
// each bank through the host port it runs random operations: masked
// LANES-byte writes at any alignment into the write bank, LANES-byte reads
// from the read bank and from the write bank (residual port), host reads,
// and swaps of rd_bank. Every read is compared with the model one clock
// after it was issued (the one-clock read latency).
module tb_act_sram;
  import aon_pkg::*;

  localparam int SPAN = 2048;

  logic              clk = 0;
  always #1 clk = ~clk;

  logic              rd_bank;
  logic              rd_en, rs_en, wr_en;
  logic [ADDR_W-1:0] rd_addr, rs_addr, wr_addr;
  act_t              rd_data [LANES];
  act_t              rs_data [LANES];
  act_t              wr_data [LANES];
  logic [LANES-1:0]  wr_mask;
  logic              host_en, host_we, host_bank;
  logic [ADDR_W-1:0] host_addr;
  act_t              host_wdata, host_rdata;

  act_sram u_dut (.*);

  int checks = 0, failures = 0;
  int model [2][SPAN];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  initial begin
    int ra, sa, op, hb, ha;
    rd_bank = 0; rd_en = 0; rs_en = 0; wr_en = 0;
    rd_addr = '0; rs_addr = '0; wr_addr = '0; wr_mask = '0;
    foreach (wr_data[k]) wr_data[k] = '0;
    host_en = 0; host_we = 0; host_bank = 0; host_addr = '0; host_wdata = '0;
    @(negedge clk);
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < SPAN; a++) begin
        host_en = 1; host_we = 1; host_bank = b[0]; host_addr = ADDR_W'(a);
        host_wdata = act_t'(rnd(-128, 127));
        model[b][a] = int'(host_wdata);
        @(negedge clk);
      end
    host_en = 0; host_we = 0;

    for (int t = 0; t < 4000; t++) begin
      op = rnd(0, 9);
      if (op == 0) rd_bank = ~rd_bank;
      // reads of both ports every clock
      ra = rnd(0, SPAN - LANES); sa = rnd(0, SPAN - LANES);
      rd_en = 1; rd_addr = ADDR_W'(ra);
      rs_en = 1; rs_addr = ADDR_W'(sa);
      hb = rnd(0, 1); ha = rnd(0, SPAN - 1);
      host_en = (op == 1); host_we = 0; host_bank = hb[0]; host_addr = ADDR_W'(ha);
      wr_en = (op >= 5);
      wr_addr = ADDR_W'(rnd(0, SPAN - LANES));
      for (int k = 0; k < LANES; k++) begin
        wr_data[k] = act_t'(rnd(-128, 127));
        wr_mask[k] = rnd(0, 3) != 0;
      end
      @(posedge clk);
      #0.5;
      for (int k = 0; k < LANES; k++) begin
        check(int'(rd_data[k]) == model[rd_bank][ra + k],
              $sformatf("rd bank %0d addr %0d", rd_bank, ra + k));
        check(int'(rs_data[k]) == model[!rd_bank][sa + k],
              $sformatf("rs bank %0d addr %0d", !rd_bank, sa + k));
      end
      if (host_en) check(int'(host_rdata) == model[hb][ha], $sformatf("host read %0d/%0d", hb, ha));
      // the write takes effect at this edge (host has priority)
      if (wr_en && !host_en)
        for (int k = 0; k < LANES; k++)
          if (wr_mask[k]) model[!rd_bank][int'(wr_addr) + k] = int'(wr_data[k]);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
