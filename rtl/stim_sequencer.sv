// stim_sequencer: timing and parameter control of one NMIC stimulator.
//
// Parameters are double buffered. Register writes go to a shadow copy; an
// XFER command marks it for transfer, and the transfer to the active copy
// happens at the next moment no pulse is in progress, so new settings can be
// loaded while a pulse or train runs and take effect from the next pulse.
// START begins a pulse train, STOP ends it.
//
// Pulse rate: a phase accumulator adds `freq_hz` on every 15.625 us tick and
// fires a pulse when it passes 64 000 (ticks per second), so the mean rate is
// exactly freq_hz. The first pulse fires on the first tick after START. A
// train ends after `n_pulses` pulses (0 = until STOP). A pulse that would
// start while the previous one is still running is skipped.
//
// Each pulse walks SETUP -> PHASE1 -> [IPG -> PHASE2] -> SHORT -> IDLE, each
// phase lasting its programmed number of ticks (a zero-length setup is
// skipped). `stim_active` is high in SETUP, PHASE1, IPG and PHASE2 but not in
// SHORT: it is the stimulator's contribution to the sample artifact flag.
// `drive` carries the phase, electrodes and current code to the analog
// H-bridge, current source and multiplexers.
//
// From the paper: setup / mono- or biphasic pulse with interphase gap /
// shorting phase, 15.625 us resolution, 15-255 Hz, double-buffered ("shadow")
// registers, flag not set during shorting only, Write Regs -> Stim Xfer ->
// Stim Start command order. Own choice: the field widths and register map
// (wand_pkg::stim_cfg_t), the phase-accumulator rate generator, train length
// in pulses, transfer deferred to the gap between pulses.
module stim_sequencer
  import wand_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         tick,          // 15.625 us strobe
  input  logic         wr_en,         // shadow register write
  input  logic [2:0]   wr_reg,
  input  logic [15:0]  wr_data,
  input  logic         xfer,
  input  logic         start,
  input  logic         stop,
  output stim_drive_t  drive,
  output logic         stim_active,
  output logic         busy,
  output logic         pulse_fire     // one clock at the start of each pulse
);
  logic [STIM_CFG_W-1:0] shadow_q;
  stim_cfg_t             act_q;
  logic                  xfer_pend_q;
  logic                  running_q;
  logic [7:0]            left_q;
  logic [16:0]           nco_q;
  stim_phase_e           ph_q;
  logic [6:0]            tcnt_q;      // ticks left in current phase
  logic                  fire;
  logic [16:0]           nco_sum;

  assign nco_sum = nco_q + 17'(act_q.freq_hz);
  assign fire    = running_q && tick && (nco_sum >= 17'(TICKS_PER_S));

  // length of a phase in ticks
  function automatic logic [6:0] len_of(stim_phase_e p, stim_cfg_t c);
    unique case (p)
      PH_SETUP:  return 7'(c.setup_t);
      PH_PHASE1: return 7'(c.pulse_w);
      PH_IPG:    return c.ipg;
      PH_PHASE2: return 7'(c.pulse_w);
      PH_SHORT:  return c.short_t;
      default:   return 7'd0;
    endcase
  endfunction

  function automatic stim_phase_e next_of(stim_phase_e p, stim_cfg_t c);
    unique case (p)
      PH_SETUP:  return PH_PHASE1;
      PH_PHASE1: return c.biphasic ? PH_IPG : PH_SHORT;
      PH_IPG:    return PH_PHASE2;
      PH_PHASE2: return PH_SHORT;
      default:   return PH_IDLE;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow_q    <= '0;
      act_q       <= '0;
      xfer_pend_q <= 1'b0;
      running_q   <= 1'b0;
      left_q      <= '0;
      nco_q       <= '0;
      ph_q        <= PH_IDLE;
      tcnt_q      <= '0;
    end else begin
      if (wr_en && wr_reg < 3'(STIM_REGS)) shadow_q[16*wr_reg +: 16] <= wr_data;
      if (xfer) xfer_pend_q <= 1'b1;
      // shadow -> active only between pulses
      if ((xfer_pend_q || xfer) && ph_q == PH_IDLE && !fire) begin
        act_q       <= stim_cfg_t'(shadow_q);
        xfer_pend_q <= 1'b0;
      end

      // train control
      if (stop) begin
        running_q <= 1'b0;
      end else if (start) begin
        running_q <= 1'b1;
        left_q    <= act_q.n_pulses;
        nco_q     <= 17'(TICKS_PER_S) - 17'(act_q.freq_hz);  // first tick fires
      end else if (running_q && tick) begin
        if (fire) begin
          nco_q <= nco_sum - 17'(TICKS_PER_S);
          if (act_q.n_pulses != 0) begin
            left_q <= left_q - 1'b1;
            if (left_q == 8'd1) running_q <= 1'b0;
          end
        end else begin
          nco_q <= nco_sum;
        end
      end

      // pulse phases
      if (fire && ph_q == PH_IDLE) begin
        if (act_q.setup_t != 0) begin
          ph_q   <= PH_SETUP;
          tcnt_q <= 7'(act_q.setup_t);
        end else begin
          ph_q   <= PH_PHASE1;
          tcnt_q <= 7'(act_q.pulse_w);
        end
      end else if (tick && ph_q != PH_IDLE) begin
        if (tcnt_q <= 7'd1) begin
          ph_q   <= next_of(ph_q, act_q);
          tcnt_q <= len_of(next_of(ph_q, act_q), act_q);
        end else begin
          tcnt_q <= tcnt_q - 1'b1;
        end
      end
    end
  end

  assign pulse_fire  = fire && ph_q == PH_IDLE;
  assign stim_active = (ph_q == PH_SETUP) || (ph_q == PH_PHASE1) ||
                       (ph_q == PH_IPG)   || (ph_q == PH_PHASE2);
  assign busy        = running_q || (ph_q != PH_IDLE);

  always_comb begin
    drive.phase     = ph_q;
    drive.elec_a    = act_q.elec_a;
    drive.elec_b    = act_q.elec_b;
    drive.amplitude = act_q.amplitude;
    drive.step_sel  = act_q.step_sel;
  end

endmodule
