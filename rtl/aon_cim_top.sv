// aon_cim_top: the AON-CiM always-on accelerator.
//
// A self-contained inference engine for small (TinyML) networks: all weights
// sit in one 1024 x 512 phase-change-memory compute-in-memory array, all
// activations in a 128 KB two-bank SRAM, and the network runs layer by
// layer. Data path of one layer:
//
//   act_sram (read bank) -> im2col -> cim_macro (DACs, array, mux, ADCs)
//     -> act_proc (scale, scale+bias, add, ReLU, pool) -> act_sram (write bank)
//
// and layer_seq swaps the banks between layers, so the output of one layer
// is the input of the next and no interconnect between arrays is needed.
//
// Host interface (used while `busy` is low):
//   prog_*  program one array row of weight codes (write drivers)
//   desc_*  write the layer program;   cp_*  write per-column scale/bias
//   host_*  byte access to either SRAM bank (network input, results)
//   adc_shift  fixed ADC gain, set once at calibration, same for all layers
//   start / done / busy, and performance counters.
// The first layer reads bank 0; after N layers the result is in bank N % 2.
//
// Clocking: one 800 MHz digital clock (1.25 ns); the array's CiM cycle is
// counted in these clocks (104/28/8 for 8/6/4-bit activations).
//
// Following the paper: the single-array layer-serial organisation, the
// block set (array with DACs/mux/ADCs, double-buffered SRAM, IM2COL,
// activation processing) and the way activations circulate between them.
// Own choices: the host-side ports (the paper leaves the control plane out)
// and the rule, checked by assertions, that the host only touches the SRAM
// and the weights while the accelerator is idle. Lint reports rst_n as
// used both synchronously and asynchronously: the synchronous use is only
// the `disable iff` of these two assertions, not a flop.
module aon_cim_top
  import aon_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // weight programming
  input  logic               prog_en,
  input  logic [9:0]         prog_row,
  input  wcode_t             prog_w [COLS],
  input  logic [COLS-1:0]    prog_mask,
  input  logic [4:0]         adc_shift,
  // layer program and column parameters
  input  logic               desc_we,
  input  logic [4:0]         desc_addr,
  input  layer_desc_t        desc_wdata,
  input  logic               cp_we,
  input  logic [8:0]         cp_addr,
  input  chan_par_t          cp_wdata,
  // SRAM host access
  input  logic               host_en,
  input  logic               host_we,
  input  logic               host_bank,
  input  logic [ADDR_W-1:0]  host_addr,
  input  act_t               host_wdata,
  output act_t               host_rdata,
  // control
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [31:0]        n_cim_ops,
  output logic [31:0]        n_starve,
  output logic [7:0]         n_layers
);

  layer_desc_t cfg;
  logic        rd_bank;

  logic              i2c_start, i2c_busy, i2c_done;
  logic [7:0]        i2c_oy, i2c_ox;
  logic              rd_en;
  logic [ADDR_W-1:0] rd_addr;
  act_t              rd_data [LANES];
  act_t              vec [ROWS];

  logic              cim_start, cim_busy, cim_done;
  logic [1:0]        cim_phase;
  act_t              adc_out [NADC];

  logic              ap_valid, ap_ready, ap_busy, layer_start, pool_flush;
  logic [1:0]        ap_phase;
  logic [15:0]       ap_pix;
  logic              rs_en, wr_en;
  logic [ADDR_W-1:0] rs_addr, wr_addr;
  act_t              rs_data [LANES];
  act_t              wr_data [LANES];
  logic [LANES-1:0]  wr_mask;

  layer_seq u_seq (
    .clk, .rst_n,
    .desc_we, .desc_addr, .desc_wdata,
    .start, .busy, .done, .cfg, .rd_bank,
    .i2c_start, .i2c_oy, .i2c_ox, .i2c_busy, .i2c_done,
    .cim_start, .cim_phase, .cim_busy, .cim_done,
    .ap_valid, .ap_ready, .ap_phase, .ap_pix, .layer_start, .pool_flush, .ap_busy,
    .n_cim_ops, .n_starve, .n_layers
  );

  act_sram u_sram (
    .clk, .rd_bank,
    .rd_en, .rd_addr, .rd_data,
    .rs_en, .rs_addr, .rs_data,
    .wr_en, .wr_addr, .wr_data, .wr_mask,
    .host_en, .host_we, .host_bank, .host_addr, .host_wdata, .host_rdata
  );

  im2col u_im2col (
    .clk, .rst_n, .cfg,
    .start(i2c_start), .oy(i2c_oy), .ox(i2c_ox),
    .busy(i2c_busy), .done(i2c_done),
    .rd_en, .rd_addr, .rd_data,
    .vec
  );

  cim_macro u_cim (
    .clk, .rst_n,
    .prog_en, .prog_row, .prog_w, .prog_mask,
    .adc_shift,
    .start(cim_start), .mode(cfg.mode), .phase(cim_phase),
    .row0(cfg.row0), .rows(cfg.rows), .col0(cfg.col0), .cols(cfg.cols),
    .in_vec(vec),
    .busy(cim_busy), .done(cim_done), .adc_out
  );

  act_proc u_ap (
    .clk, .rst_n, .cfg, .layer_start,
    .cp_we, .cp_addr, .cp_wdata,
    .in_valid(ap_valid), .in_ready(ap_ready), .in_words(adc_out),
    .in_phase(ap_phase), .in_pix(ap_pix),
    .pool_flush, .busy(ap_busy),
    .rs_en, .rs_addr, .rs_data,
    .wr_en, .wr_addr, .wr_data, .wr_mask
  );

  // the host must not touch the SRAM while a layer program runs
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) host_en |-> !busy);
  // weights are not reprogrammed during inference
  a_prog_idle: assert property (@(posedge clk) disable iff (!rst_n) prog_en |-> !busy);

endmodule
