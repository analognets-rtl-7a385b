// act_sram: the double-buffered activation memory, 128 KB in two banks of
// 64 KB.
//
// In a layer-serial machine one bank holds the input of the current layer
// and the other receives its output; `rd_bank` names the bank being read and
// the other bank is written. The layer sequencer flips `rd_bank` between
// layers, so a layer's output becomes the next layer's input without a copy.
//
// Each bank is built from LANES byte-wide lanes; byte address A sits in lane
// A % LANES at word A / LANES. Because consecutive bytes are in different
// lanes, any LANES consecutive bytes can be read or written in one clock,
// whatever their alignment: lane l uses word A/LANES, or A/LANES + 1 when l is
// below A % LANES. This lets IM2COL fetch unaligned runs of channels and lets
// the activation datapath store output channels at any byte offset.
//
// Ports (all synchronous, reads have one clock of latency):
//   rd_*  : LANES bytes from the read bank  (IM2COL)      rd_data[k] = byte rd_addr+k
//   rs_*  : LANES bytes from the write bank (residual operand for the adder)
//   wr_*  : up to LANES bytes into the write bank, byte k to wr_addr+k when wr_mask[k]
//   host_*: one byte from/to either bank, for loading inputs and reading results;
//           it has priority and is meant for use while the accelerator is idle.
// From the paper: 128 KB, two banks, double buffering. Own choices: the lane
// organisation, the port set and LANES = 16.
module act_sram
  import aon_pkg::*;
#(
  parameter int unsigned BYTES_PER_BANK = BANK_BYTES,
  parameter int unsigned NL             = LANES
) (
  input  logic               clk,
  input  logic               rd_bank,
  // read port, read bank
  input  logic               rd_en,
  input  logic [ADDR_W-1:0]  rd_addr,
  output act_t               rd_data [NL],
  // read port, write bank (residual)
  input  logic               rs_en,
  input  logic [ADDR_W-1:0]  rs_addr,
  output act_t               rs_data [NL],
  // write port, write bank
  input  logic               wr_en,
  input  logic [ADDR_W-1:0]  wr_addr,
  input  act_t               wr_data [NL],
  input  logic [NL-1:0]      wr_mask,
  // host port
  input  logic               host_en,
  input  logic               host_we,
  input  logic               host_bank,
  input  logic [ADDR_W-1:0]  host_addr,
  input  act_t               host_wdata,
  output act_t               host_rdata
);

  localparam int unsigned DEPTH = BYTES_PER_BANK / NL;
  localparam int unsigned LW    = $clog2(NL);
  localparam int unsigned WW    = $clog2(DEPTH);

  act_t mem [2][NL][DEPTH];

  act_t lane_rd [NL];
  act_t lane_rs [NL];
  logic [LW-1:0] rd_rot, rs_rot;

  function automatic logic [WW-1:0] lane_word(logic [ADDR_W-1:0] a, int unsigned l);
    logic [WW-1:0] w;
    w = WW'(a >> LW);
    if (l < 32'(a) % NL) w = w + 1'b1;
    return w;
  endfunction

  always_ff @(posedge clk) begin
    for (int unsigned l = 0; l < NL; l++) begin
      if (rd_en) lane_rd[l] <= mem[rd_bank][l][lane_word(rd_addr, l)];
      if (rs_en) lane_rs[l] <= mem[!rd_bank][l][lane_word(rs_addr, l)];
    end
    if (rd_en) rd_rot <= LW'(rd_addr);
    if (rs_en) rs_rot <= LW'(rs_addr);
    if (host_en) begin
      if (host_we)
        mem[host_bank][LW'(host_addr)][WW'(host_addr >> LW)] <= host_wdata;
      host_rdata <= mem[host_bank][LW'(host_addr)][WW'(host_addr >> LW)];
    end else if (wr_en) begin
      for (int unsigned k = 0; k < NL; k++) begin
        if (wr_mask[k]) begin
          logic [ADDR_W-1:0] a;
          a = wr_addr + ADDR_W'(k);
          mem[!rd_bank][LW'(a)][WW'(a >> LW)] <= wr_data[k];
        end
      end
    end
  end

  // rotate the lanes back into address order
  always_comb begin
    for (int unsigned k = 0; k < NL; k++) begin
      rd_data[k] = lane_rd[LW'(rd_rot + LW'(k))];
      rs_data[k] = lane_rs[LW'(rs_rot + LW'(k))];
    end
  end

endmodule
