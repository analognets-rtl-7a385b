// act_proc: the digital activation-processing pipeline between the ADCs and
// the activation SRAM: two scalings, bias, residual add, ReLU,
// requantisation and global average pooling.
//
// One CiM cycle delivers 128 ADC words (one mux phase). The unit copies them
// when `in_valid && in_ready` and then works through them LANES (16) at a
// time, so a phase takes 128/16 = 8 clocks; that is the 10 ns CiM cycle of
// 4-bit mode at the 1.25 ns digital clock, so the array is not held up even
// in 4-bit mode. ADC word a of phase p belongs to array column
// col = p*128 + a, i.e. output channel f = col - col0 when col lies in
// [col0, col0+cols); other words are dropped. Each lane computes
//
//   v   = round((adc * s_layer.mant * s_ch[col].mant) / 2^(s_layer.shift + s_ch[col].shift))
//         + bias[col]
//   v  += residual(pix, f)        if cfg.residual
//   v   = max(v, 0)               if cfg.relu
//   out = clip(v, +-(2^(b-1)-1))  b = 8/6/4 from cfg.mode
//
// i.e. two multipliers per lane, 32 in all. `s_layer` is the per-layer
// scale that undoes the fixed ADC gain (and carries global drift
// compensation); `s_ch`/`bias` hold the folded batch norm of each column and
// live in a 512-entry table written through the cp_* port. Output channel f
// of pixel pix is stored at out_base + pix*cols + f; the residual operand is
// read from res_base + pix*cols + f in the bank being written.
//
// With cfg.pool set, outputs are summed per channel instead of stored;
// `pool_flush` then writes round(sum * s_pool) for every channel to
// out_base + f (global average pooling, s_pool = 1/(H*W)). `layer_start`
// clears the sums.
//
// Pipeline: clock 1 issues the residual read for a chunk, clock 2 computes
// and writes it. in_ready is low while chunks of a phase are being issued,
// except during the last chunk, so a new phase is accepted every 8 clocks.
//
// From the paper: the 128-words-per-CiM-cycle throughput, two scalings per
// word, ReLU, pooling and add on the digital side, 800 MHz clock. Own
// choices (the unit reads only the descriptor fields it needs; lint lists
// the others as unused): scale format (16-bit mantissa, power-of-two exponent), bias,
// the pooling as running sums, the order of operations.
module act_proc
  import aon_pkg::*;
#(
  parameter int unsigned NL     = LANES,
  parameter int unsigned N_ADC  = NADC,
  parameter int unsigned N_COLS = COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_desc_t        cfg,
  input  logic               layer_start,
  // channel parameter table
  input  logic               cp_we,
  input  logic [8:0]         cp_addr,
  input  chan_par_t          cp_wdata,
  // ADC words of one phase
  input  logic               in_valid,
  output logic               in_ready,
  input  act_t               in_words [N_ADC],
  input  logic [1:0]         in_phase,
  input  logic [15:0]        in_pix,
  // pooling
  input  logic               pool_flush,
  output logic               busy,
  // SRAM: residual read (write bank) and write
  output logic               rs_en,
  output logic [ADDR_W-1:0]  rs_addr,
  input  act_t               rs_data [NL],
  output logic               wr_en,
  output logic [ADDR_W-1:0]  wr_addr,
  output act_t               wr_data [NL],
  output logic [NL-1:0]      wr_mask
);

  localparam int unsigned NCHUNK = N_ADC / NL;

  chan_par_t cpar [N_COLS];
  logic signed [23:0] pacc [N_COLS];

  act_t        buf_w [N_ADC];
  logic [1:0]  phase_q;
  logic [15:0] pix_q;
  logic        issuing;
  int unsigned chunk;

  // stage 2 registers
  logic        s2_vld;
  int          s2_col0;              // array column of lane 0
  logic [ADDR_W-1:0] s2_addr;
  act_t        s2_w [NL];

  // pooling flush
  logic        flushing;
  int unsigned fchunk;

  always_ff @(posedge clk) begin
    if (cp_we) cpar[cp_addr] <= cp_wdata;
  end

  // address of lane 0 of a chunk whose first column is c
  function automatic logic [ADDR_W-1:0] lane0_addr(logic [ADDR_W-1:0] base, logic [15:0] pix, int c);
    return ADDR_W'(int'(base) + int'(pix) * int'(cfg.cols) + c - int'(cfg.col0));
  endfunction

  function automatic logic lane_in_layer(int c);
    return (c >= int'(cfg.col0)) && (c < int'(cfg.col0) + int'(cfg.cols)) && (c < int'(N_COLS));
  endfunction

  function automatic act_t lane_calc(act_t adc, int c, act_t res);
    longint v;
    chan_par_t p;
    p = cpar[c];
    v = longint'(adc) * longint'(cfg.s_layer.mant) * longint'(p.s_ch.mant);
    v = rshift_round(v, int'(cfg.s_layer.shift) + int'(p.s_ch.shift)) + longint'(p.bias);
    if (cfg.residual) v += longint'(res);
    if (cfg.relu && v < 0) v = 0;
    return act_t'(clip_sym(v, qmax(cfg.mode)));
  endfunction

  int c_issue;
  always_comb begin
    c_issue  = int'(phase_q) * int'(N_ADC) + int'(chunk) * int'(NL);
    in_ready = (!issuing || chunk == NCHUNK - 1) && !flushing;
    rs_en    = issuing && cfg.residual;
    rs_addr  = lane0_addr(cfg.res_base, pix_q, c_issue);
    busy     = issuing || s2_vld || flushing;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing  <= 1'b0;
      chunk    <= 0;
      phase_q  <= '0;
      pix_q    <= '0;
      s2_vld   <= 1'b0;
      s2_col0  <= 0;
      s2_addr  <= '0;
      flushing <= 1'b0;
      fchunk   <= 0;
      wr_en    <= 1'b0;
      wr_addr  <= '0;
      wr_mask  <= '0;
    end else begin
      wr_en  <= 1'b0;
      s2_vld <= 1'b0;
      // ---- stage 1: residual read issued (combinational), latch chunk ----
      if (issuing) begin
        s2_vld  <= 1'b1;
        s2_col0 <= c_issue;
        s2_addr <= lane0_addr(cfg.out_base, pix_q, c_issue);
        for (int unsigned k = 0; k < NL; k++) s2_w[k] <= buf_w[chunk * NL + k];
        if (chunk == NCHUNK - 1) issuing <= 1'b0;
        chunk <= chunk + 1;
      end
      // ---- accept a phase (may coincide with the previous one's last chunk)
      if (in_valid && in_ready) begin
        for (int a = 0; a < int'(N_ADC); a++) buf_w[a] <= in_words[a];
        phase_q <= in_phase;
        pix_q   <= in_pix;
        issuing <= 1'b1;
        chunk   <= 0;
      end
      // ---- stage 2: compute and store / accumulate -----------------------
      if (s2_vld) begin
        wr_addr <= s2_addr;
        for (int unsigned k = 0; k < NL; k++) begin
          int   c;
          act_t o;
          c = s2_col0 + int'(k);
          o = lane_calc(s2_w[k], c, rs_data[k]);
          wr_data[k] <= o;
          wr_mask[k] <= lane_in_layer(c) && !cfg.pool;
          if (lane_in_layer(c) && cfg.pool)
            pacc[c] <= pacc[c] + 24'(o);
        end
        wr_en <= !cfg.pool;
      end
      // ---- pooling ----------------------------------------------------------
      if (layer_start) begin
        for (int c = 0; c < int'(N_COLS); c++) pacc[c] <= '0;
      end
      if (pool_flush && !flushing) begin
        flushing <= 1'b1;
        fchunk   <= 0;
      end else if (flushing) begin
        wr_en   <= 1'b1;
        wr_addr <= ADDR_W'(int'(cfg.out_base) + int'(fchunk) * int'(NL));
        for (int unsigned k = 0; k < NL; k++) begin
          int c;
          c = int'(cfg.col0) + int'(fchunk * NL + k);
          wr_mask[k] <= (fchunk * NL + k) < int'(cfg.cols);
          wr_data[k] <= act_t'(clip_sym(rshift_round(longint'(pacc[c % int'(N_COLS)]) * longint'(cfg.s_pool.mant),
                                                      int'(cfg.s_pool.shift)), qmax(cfg.mode)));
        end
        if ((fchunk + 1) * NL >= int'(cfg.cols)) flushing <= 1'b0;
        fchunk <= fchunk + 1;
      end
    end
  end

endmodule
