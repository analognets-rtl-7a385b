// layer_seq: layer-serial sequencer of the accelerator.
//
// The whole network is stored in one CiM array, so the machine runs one
// layer to completion before it starts the next. A program of layer
// descriptors (layer_desc_t, written through the desc_* port) lists the
// layers; an LT_END entry ends it. For every layer the sequencer
//   1. pulses `layer_start` (clears the pooling sums),
//   2. walks the output pixels in raster order, asking IM2COL for each
//      pixel's input vector,
//   3. for each vector starts one CiM operation per mux phase that the
//      layer's columns [col0, col0+cols) touch (phase = column / 128),
//   4. hands each phase's ADC words, tagged with pixel and phase, to the
//      activation pipeline,
//   5. after the last pixel has drained, flushes the pooling sums if the
//      layer pools, then swaps the SRAM banks so the output becomes the
//      next layer's input.
// The three stages overlap as in a pipeline: IM2COL fills the vector for
// pixel n+1 while the array computes pixel n and the activation pipeline
// stores pixel n-1. IM2COL restarts as soon as the array has copied the
// vector at the start of the pixel's last phase.
//
// Performance counters: `n_cim_ops` counts CiM operations, `n_starve`
// counts clocks in which the array sat idle inside a layer because no input
// vector was ready, `n_layers` counts finished layers.
//
// From the paper: layer-serial operation, a single array holding all
// layers, activations circulating array -> SRAM -> array, the pipelining of
// SRAM read/IM2COL, CiM, activation processing and SRAM write. Own choices:
// everything about the control plane, which the paper leaves out: the
// descriptor program, handshakes and counters.
module layer_seq
  import aon_pkg::*;
#(
  parameter int unsigned N_LAYERS = MAX_LAYERS,
  parameter int unsigned N_ADC    = NADC
) (
  input  logic               clk,
  input  logic               rst_n,
  // program
  input  logic               desc_we,
  input  logic [4:0]         desc_addr,
  input  layer_desc_t        desc_wdata,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output layer_desc_t        cfg,
  output logic               rd_bank,
  // IM2COL
  output logic               i2c_start,
  output logic [7:0]         i2c_oy,
  output logic [7:0]         i2c_ox,
  input  logic               i2c_busy,
  input  logic               i2c_done,
  // CiM macro
  output logic               cim_start,
  output logic [1:0]         cim_phase,
  input  logic               cim_busy,
  input  logic               cim_done,
  // activation pipeline
  output logic               ap_valid,
  input  logic               ap_ready,
  output logic [1:0]         ap_phase,
  output logic [15:0]        ap_pix,
  output logic               layer_start,
  output logic               pool_flush,
  input  logic               ap_busy,
  // counters
  output logic [31:0]        n_cim_ops,
  output logic [31:0]        n_starve,
  output logic [7:0]         n_layers
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_FLUSH, S_FLUSH_WAIT, S_NEXT} state_e;
  state_e state;

  layer_desc_t prog [N_LAYERS];
  logic [4:0]  li;

  // gather side (IM2COL)
  logic [7:0]  g_y, g_x;
  logic [15:0] g_pix;
  logic        g_all;          // all pixels handed to IM2COL
  logic        vec_ready;
  logic [15:0] vec_pix;
  logic [15:0] i2c_pix;        // pixel being gathered
  // issue side (CiM)
  logic [1:0]  cur_phase, p_lo, p_hi;
  logic [15:0] n_issued;       // pixels whose last phase was started
  logic [15:0] n_pix;
  logic        res_pending;
  logic [1:0]  tag_phase;
  logic [15:0] tag_pix;

  logic can_start_cim;
  logic drained;

  always_ff @(posedge clk) begin
    if (desc_we) prog[desc_addr] <= desc_wdata;
  end

  always_comb begin
    can_start_cim = (state == S_RUN) && vec_ready && !cim_busy && !res_pending &&
                    !(cim_done && !ap_ready);
    cim_start  = can_start_cim;
    cim_phase  = cur_phase;
    ap_valid   = cim_done || res_pending;
    ap_phase   = tag_phase;
    ap_pix     = tag_pix;
    i2c_start  = (state == S_RUN) && !g_all && !i2c_busy && !vec_ready && !i2c_done;
    i2c_oy     = g_y;
    i2c_ox     = g_x;
    drained    = (n_issued == n_pix) && !cim_busy && !cim_done && !res_pending && !ap_busy;
    busy       = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      li          <= '0;
      cfg         <= '0;
      rd_bank     <= 1'b0;
      done        <= 1'b0;
      layer_start <= 1'b0;
      pool_flush  <= 1'b0;
      g_y <= '0; g_x <= '0; g_pix <= '0; g_all <= 1'b0;
      vec_ready   <= 1'b0;
      vec_pix     <= '0;
      i2c_pix     <= '0;
      cur_phase   <= '0; p_lo <= '0; p_hi <= '0;
      n_issued    <= '0;
      n_pix       <= '0;
      res_pending <= 1'b0;
      tag_phase   <= '0;
      tag_pix     <= '0;
      n_cim_ops   <= '0;
      n_starve    <= '0;
      n_layers    <= '0;
    end else begin
      done        <= 1'b0;
      layer_start <= 1'b0;
      pool_flush  <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          li      <= '0;
          rd_bank <= 1'b0;
          state   <= S_LOAD;
        end
        S_LOAD: begin
          cfg <= prog[li];
          if (prog[li].ltype == LT_END) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            layer_start <= 1'b1;
            g_y <= '0; g_x <= '0; g_pix <= '0; g_all <= 1'b0;
            vec_ready <= 1'b0;
            n_issued  <= '0;
            n_pix     <= 16'(int'(prog[li].out_h) * int'(prog[li].out_w));
            p_lo      <= 2'(prog[li].col0 / 10'(N_ADC));
            p_hi      <= 2'((prog[li].col0 + prog[li].cols - 10'd1) / 10'(N_ADC));
            cur_phase <= 2'(prog[li].col0 / 10'(N_ADC));
            state     <= S_RUN;
          end
        end
        S_RUN: begin
          // gather
          if (i2c_start) begin
            i2c_pix <= g_pix;
            g_pix   <= g_pix + 16'd1;
            if (g_x == cfg.out_w - 8'd1) begin
              g_x <= '0;
              g_y <= g_y + 8'd1;
              if (g_y == cfg.out_h - 8'd1) g_all <= 1'b1;
            end else begin
              g_x <= g_x + 8'd1;
            end
          end
          if (i2c_done) begin
            vec_ready <= 1'b1;
            vec_pix   <= i2c_pix;
          end
          // issue
          if (can_start_cim) begin
            tag_phase <= cur_phase;
            tag_pix   <= vec_pix;
            n_cim_ops <= n_cim_ops + 32'd1;
            if (cur_phase == p_hi) begin
              cur_phase <= p_lo;
              vec_ready <= 1'b0;
              n_issued  <= n_issued + 16'd1;
            end else begin
              cur_phase <= cur_phase + 2'd1;
            end
          end else if (!cim_busy && !vec_ready && n_issued != n_pix) begin
            n_starve <= n_starve + 32'd1;
          end
          // hand-off to the activation pipeline
          if (cim_done && !ap_ready) res_pending <= 1'b1;
          else if (res_pending && ap_ready) res_pending <= 1'b0;
          if (drained && !i2c_start && !ap_valid)
            state <= cfg.pool ? S_FLUSH : S_NEXT;
        end
        S_FLUSH: begin
          pool_flush <= 1'b1;
          state      <= S_FLUSH_WAIT;
        end
        S_FLUSH_WAIT: if (!pool_flush && !ap_busy) state <= S_NEXT;
        S_NEXT: begin
          rd_bank  <= !rd_bank;
          li       <= li + 5'd1;
          n_layers <= n_layers + 8'd1;
          state    <= S_LOAD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
