// im2col: hardware IM2COL unit. For one output pixel (oy, ox) of a
// convolution it gathers the receptive field from the activation SRAM into
// the CiM input vector, in the row order the weights were programmed in:
// array row row0 + (kh*k_w + kw)*in_c + c holds input (y, x, c) with
// y = oy*stride + kh - pad_t and x = ox*stride + kw - pad_l. Taps that fall
// outside the input (zero padding) are written as 0.
//
// How it works: the address generator walks the taps (kh, kw). Activations
// are stored HWC, so the in_c channels of one tap are a contiguous byte run,
// which is fetched in chunks of up to LANES bytes per clock through the
// SRAM's unaligned read port. Padding taps issue no read. The vector buffer
// (ROWS bytes) is the unit's small buffer; it holds the result until the
// next `start`, and the CiM macro copies it when its operation starts.
//
// Timing: `start` is accepted while idle; `done` pulses one clock after the
// last chunk arrives. A pixel takes sum over taps of max(1, ceil(in_c/LANES))
// clocks plus 2. A fully connected layer is a 1x1 "convolution" on a 1x1
// input with in_c inputs.
//
// The unit reads only the shape fields of the layer descriptor; lint lists
// the others as unused.
//
// From the paper: a hardware IM2COL with a small buffer and a programmable
// address generator. Own choices: HWC layout, tap-by-tap walk, LANES-byte
// fetches, padding given as top/left offsets (bottom/right follow from the
// bounds check).
module im2col
  import aon_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned NL     = LANES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_desc_t        cfg,
  input  logic               start,
  input  logic [7:0]         oy,
  input  logic [7:0]         ox,
  output logic               busy,
  output logic               done,
  // SRAM read port (one clock latency)
  output logic               rd_en,
  output logic [ADDR_W-1:0]  rd_addr,
  input  act_t               rd_data [NL],
  // CiM input vector
  output act_t               vec [N_ROWS]
);

  logic [3:0]  kh, kw;
  logic [9:0]  coff;
  logic [10:0] dest;
  logic [7:0]  oy_q, ox_q;
  logic        issuing;

  // chunk in flight (data arrives next clock)
  logic        p_vld, p_real, p_last;
  logic [10:0] p_dest;
  logic [4:0]  p_n;

  int yi, xi;
  logic tap_ok;
  int   remain;
  logic [4:0] n_now;
  logic last_chunk_of_tap, last_tap;

  always_comb begin
    yi     = int'(oy_q) * int'(cfg.stride) + int'(kh) - int'(cfg.pad_t);
    xi     = int'(ox_q) * int'(cfg.stride) + int'(kw) - int'(cfg.pad_l);
    tap_ok = (yi >= 0) && (yi < int'(cfg.in_h)) && (xi >= 0) && (xi < int'(cfg.in_w));
    remain = int'(cfg.in_c) - int'(coff);
    n_now  = (remain >= int'(NL)) ? 5'(NL) : 5'(remain);
    last_chunk_of_tap = (remain <= int'(NL));
    last_tap = (kw == cfg.k_w - 4'd1) && (kh == cfg.k_h - 4'd1);
    rd_en   = issuing && tap_ok;
    rd_addr = ADDR_W'(int'(cfg.in_base) + (yi * int'(cfg.in_w) + xi) * int'(cfg.in_c) + int'(coff));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
      p_vld   <= 1'b0;
      p_real  <= 1'b0;
      p_last  <= 1'b0;
      p_dest  <= '0;
      p_n     <= '0;
      kh <= '0; kw <= '0; coff <= '0; dest <= '0;
      oy_q <= '0; ox_q <= '0;
    end else begin
      done  <= 1'b0;
      p_vld <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        issuing <= 1'b1;
        kh <= '0; kw <= '0; coff <= '0;
        dest <= 11'(cfg.row0);
        oy_q <= oy; ox_q <= ox;
      end else if (issuing) begin
        p_vld  <= 1'b1;
        p_real <= tap_ok;
        p_dest <= dest;
        p_n    <= n_now;
        p_last <= last_chunk_of_tap && last_tap;
        dest   <= dest + 11'(n_now);
        if (last_chunk_of_tap) begin
          coff <= '0;
          if (kw == cfg.k_w - 4'd1) begin
            kw <= '0;
            kh <= kh + 4'd1;
          end else begin
            kw <= kw + 4'd1;
          end
          if (last_tap) issuing <= 1'b0;
        end else begin
          coff <= coff + 10'(NL);
        end
      end
      if (p_vld) begin
        for (int unsigned k = 0; k < NL; k++)
          if (k < p_n && int'(p_dest) + int'(k) < int'(N_ROWS))
            vec[int'(p_dest) + int'(k)] <= p_real ? rd_data[k] : '0;
        if (p_last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
