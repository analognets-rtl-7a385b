// cim_macro: behavioural model of the analog CiM macro (not synthesizable
// logic: it stands for the PCM array, its PWM DACs, the 4:1 bitline mux, the
// ADCs and the write drivers).
//
// Weights live in a 1024-row x 512-column array of differential PCM cells.
// Each cell is a pair of conductance codes (g+, g-) so that the stored weight
// is g+ - g-. The write drivers program one array row per clock: every
// column whose mask bit is set gets the signed code split into the pair.
//
// A matrix-vector operation (one "CiM cycle") starts with `start`. Each row's
// DAC turns its signed activation code into a train of unit PWM pulses whose
// count is the code's magnitude (at most 2^(b-1)-1 for b-bit mode) and whose
// polarity is its sign. Each bitline integrates sum_r code_r * (g+ - g-).
// Four bitlines share one ADC through the mux: `phase` selects the group of
// 128 columns phase*128 .. phase*128+127 (ADC a sees column phase*128 + a).
// The ADC applies the fixed calibration gain 2^-adc_shift, rounds, and clips
// to the symmetric b-bit range. DACs outside rows [row0, row0+rows) and ADCs
// outside columns [col0, col0+cols) are clock gated: their rows do not drive
// and their ADC outputs read 0.
//
// Timing: `done` pulses tcim_cycles(mode) clocks after `start` (104/28/8
// digital clocks of 1.25 ns for the 130/34/10 ns CiM cycle of 8/6/4-bit
// mode); `adc_out` is valid from `done` until the next `done`. `start` is
// ignored while `busy`, except in the last clock of a cycle, so that
// back-to-back operations follow each other every tcim_cycles(mode) clocks.
// The inputs are latched at `start`, so the vector source may change right
// after it.
//
// From the paper: array size, differential cells, PWM DACs, 4:1 mux, 128
// ADCs, fixed ADC gain for all layers, the CiM cycle times, clock gating of
// unused DACs/ADCs. Own choices: the column-to-mux assignment, 8-bit signed
// weight codes, the gain as a power of two, one row written per clock, and an
// ideal (noise- and drift-free) conversion.
module cim_macro
  import aon_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned N_ADC  = N_COLS / MUX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // write drivers
  input  logic                 prog_en,
  input  logic [9:0]           prog_row,
  input  wcode_t               prog_w    [N_COLS],
  input  logic [N_COLS-1:0]    prog_mask,
  // calibration
  input  logic [4:0]           adc_shift,
  // matrix-vector operation
  input  logic                 start,
  input  act_mode_e            mode,
  input  logic [1:0]           phase,
  input  logic [9:0]           row0,
  input  logic [10:0]          rows,
  input  logic [9:0]           col0,
  input  logic [9:0]           cols,
  input  act_t                 in_vec    [N_ROWS],
  output logic                 busy,
  output logic                 done,
  output act_t                 adc_out   [N_ADC]
);

  logic [6:0] gp [N_ROWS][N_COLS];
  logic [6:0] gm [N_ROWS][N_COLS];

  act_t        vec_q [N_ROWS];
  act_mode_e   mode_q;
  logic [1:0]  phase_q;
  logic [9:0]  row0_q, col0_q, cols_q;
  logic [10:0] rows_q;
  int unsigned cnt;

  // write drivers: program one row of differential pairs
  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < int'(N_COLS); c++) begin
        if (prog_mask[c]) begin
          gp[prog_row][c] <= (prog_w[c] > 0) ? 7'(prog_w[c])  : 7'd0;
          gm[prog_row][c] <= (prog_w[c] < 0) ? 7'(-prog_w[c]) : 7'd0;
        end
      end
    end
  end

  // DAC pulse count for one row: the code clipped to the PWM range
  function automatic int dac_pulses(act_t x, act_mode_e m);
    return clip_sym(longint'(x), qmax(m));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      cnt     <= 0;
      mode_q  <= MODE_8B;
      phase_q <= '0;
      row0_q  <= '0;
      rows_q  <= '0;
      col0_q  <= '0;
      cols_q  <= '0;
      for (int a = 0; a < int'(N_ADC); a++) adc_out[a] <= '0;
    end else begin
      done <= 1'b0;
      if (start && (!busy || cnt <= 1)) begin
        busy    <= 1'b1;
        cnt     <= tcim_cycles(mode) - 1;
        mode_q  <= mode;
        phase_q <= phase;
        row0_q  <= row0;
        rows_q  <= rows;
        col0_q  <= col0;
        cols_q  <= cols;
        for (int r = 0; r < int'(N_ROWS); r++) vec_q[r] <= in_vec[r];
      end else if (busy && cnt > 1) begin
        cnt <= cnt - 1;
      end else if (busy) begin
        busy <= 1'b0;
      end
      if (busy && cnt <= 1) begin
        // end of the integration window: convert the selected columns
        begin
          done <= 1'b1;
          for (int a = 0; a < int'(N_ADC); a++) begin
            int     col;
            longint q;
            col = int'(phase_q) * int'(N_ADC) + a;
            q   = 0;
            if (col >= int'(col0_q) && col < int'(col0_q) + int'(cols_q)) begin
              for (int r = int'(row0_q); r < int'(row0_q) + int'(rows_q) && r < int'(N_ROWS); r++)
                q += longint'(dac_pulses(vec_q[r], mode_q)) *
                     (longint'(gp[r][col]) - longint'(gm[r][col]));
              adc_out[a] <= act_t'(clip_sym(rshift_round(q, 32'(adc_shift)), qmax(mode_q)));
            end else begin
              adc_out[a] <= '0;
            end
          end
        end
      end
    end
  end

endmodule
