// closed_loop_controller: the stimulation decision of the closed-loop policy.
//
// THRESHOLD mode, evaluated once per biomarker calculation (`calc_done`):
//   control value c  = band power P_c, or its derivative P_c(now) - P_c(prev)
//                      when sig_deriv[c] is set (0 until a previous value exists)
//   crossing c       = value > thresh[c] * 2^THR_SHIFT (signed compare)
//   decision         = AND or OR (combine_or) of the crossings of the signals
//                      enabled in sig_use
// A positive decision fires `trigger` and starts a dead time: the next
// `dead_calcs` calculations cannot trigger (3 calculations of a 512-sample
// window at 1 kS/s = 768 ms). A positive decision inside the dead time is
// counted in `blocked_cnt`.
//
// RANDOM mode: triggers at pseudo-random intervals between rand_min_ms and
// rand_max_ms, counted on the 1 ms frame tick. The interval is
// min + (r * (max - min + 1)) >> 16 (ms, from one trigger to the next) with r from a 16-bit maximal-length LFSR
// (x^16 + x^14 + x^13 + x^11 + 1), advanced once per interval.
//
// OFF: never triggers. `trigger` is a one-clock pulse; the caller turns it into
// a stimulation START command.
//
// From the paper: up to two control signals, band power or derivative, a
// threshold for each, AND/OR, a programmable dead time in calculation periods,
// random mode between minimum and maximum intervals. Own choice: fixed-point
// threshold scaling, LFSR polynomial, mapping of the random value onto the
// interval. The paper describes the derivative as "subtracting the newly
// calculated power value from the previous one"; this design uses new minus
// previous so that rising power gives a positive derivative, as in Fig. 6b.
module closed_loop_controller
  import wand_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  cl_mode_e              cl_mode,
  input  logic [1:0]            sig_use,
  input  logic [1:0]            sig_deriv,
  input  logic                  combine_or,
  input  logic [1:0][31:0]      thresh,
  input  logic [7:0]            dead_calcs,
  input  logic [15:0]           rand_min_ms,
  input  logic [15:0]           rand_max_ms,
  input  logic                  ms_tick,
  input  logic                  calc_done,
  input  logic [1:0][PWR_W-1:0] band_pwr,
  output logic                  trigger,
  output logic [1:0]            crossing,
  output logic signed [1:0][PWR_W:0] ctrl_val,
  output logic [15:0]           trig_cnt,
  output logic [15:0]           blocked_cnt
);
  logic [1:0][PWR_W-1:0] prev_q;
  logic                  have_prev_q;
  logic [7:0]            dead_q;
  logic [15:0]           lfsr_q;
  logic [15:0]           rcnt_q;

  logic signed [1:0][PWR_W:0] val;
  logic [1:0]            xing;
  logic                  decide;
  logic [16:0]           span;
  logic [15:0]           interval;

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      if (sig_deriv[c])
        val[c] = have_prev_q ? ($signed({1'b0, band_pwr[c]}) - $signed({1'b0, prev_q[c]})) : '0;
      else
        val[c] = $signed({1'b0, band_pwr[c]});
      xing[c] = $signed(val[c]) > ($signed((PWR_W+1)'($signed(thresh[c]))) <<< THR_SHIFT);
    end
    if (sig_use == 2'b00)    decide = 1'b0;
    else if (combine_or)     decide = |(xing & sig_use);
    else                     decide = &(xing | ~sig_use);
    span     = 17'(rand_max_ms) - 17'(rand_min_ms) + 17'd1;
    interval = rand_min_ms + 16'((32'(lfsr_q) * 32'(span)) >> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q      <= '0;
      have_prev_q <= 1'b0;
      dead_q      <= '0;
      lfsr_q      <= 16'hACE1;
      rcnt_q      <= '0;
      trigger     <= 1'b0;
      crossing    <= '0;
      ctrl_val    <= '0;
      trig_cnt    <= '0;
      blocked_cnt <= '0;
    end else begin
      trigger <= 1'b0;
      unique case (cl_mode)
        CL_THRESHOLD: if (calc_done) begin
          prev_q      <= band_pwr;
          have_prev_q <= 1'b1;
          crossing    <= xing;
          ctrl_val    <= val;
          if (dead_q != 0) begin
            dead_q <= dead_q - 1'b1;
            if (decide) blocked_cnt <= blocked_cnt + 1'b1;
          end else if (decide) begin
            trigger  <= 1'b1;
            trig_cnt <= trig_cnt + 1'b1;
            dead_q   <= dead_calcs;
          end
        end
        CL_RANDOM: if (ms_tick) begin
          if (rcnt_q == 0) begin
            trigger  <= 1'b1;
            trig_cnt <= trig_cnt + 1'b1;
            rcnt_q   <= (interval != 0) ? interval - 1'b1 : '0;
            lfsr_q   <= {lfsr_q[14:0], lfsr_q[15] ^ lfsr_q[13] ^ lfsr_q[12] ^ lfsr_q[10]};
          end else begin
            rcnt_q <= rcnt_q - 1'b1;
          end
        end
        default: begin
          have_prev_q <= 1'b0;
          dead_q      <= '0;
          rcnt_q      <= rand_min_ms;
        end
      endcase
    end
  end

endmodule
