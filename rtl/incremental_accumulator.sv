// incremental_accumulator: digital half of the NMIC's incremental (resetting)
// ADC for all recording channels of one chip, plus the output MUX that tags
// each sample with the stimulation flag.
//
// Each channel's analog loop (chopped integrator, 5-bit SAR, feedback DAC)
// delivers one 5-bit code per conversion. The accumulator adds OSR = 1024 of
// them, which gives the 15-bit result (31 * 1024 < 2^15). After the last code
// of a sample the sums are latched, the accumulators clear and `s_rst` pulses
// for one clock so that the analog integrators reset too: every sample is
// memoryless. The flag is set when any stimulator was active (shorting phase
// excluded, the stimulators decide that) at some conversion of the window,
// and is placed above the MSB, giving a 16-bit word.
//
// Interface: `conv` strobes once per conversion, with `sar_code` valid.
// `smp_valid` pulses one clock after the conversion that completes a sample;
// `smp` holds the words until the next sample. Rate: one sample per OSR
// conversions (1 kS/s when conv is 1.024 MHz).
//
// From the paper: 5-bit codes, OSR 1024, 15-bit result, accumulator + output
// MUX structure, reset every sample, flag appended after the MSB. Own choice:
// all channels share one conversion strobe; the flag is an OR over the window.
module incremental_accumulator
  import wand_pkg::*;
#(
  parameter int unsigned NCH     = NMIC_CH,
  parameter int unsigned OSR_N   = OSR
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 conv,
  input  logic [SAR_W-1:0]     sar_code [NCH],
  input  logic                 stim_active,
  output logic                 s_rst,
  output logic                 smp_valid,
  output sample_t              smp [NCH]
);
  localparam int unsigned CNT_W = $clog2(OSR_N);

  logic [ADC_W-1:0] acc [NCH];
  logic [CNT_W-1:0] cnt;
  logic             flag_q;
  logic             last;

  assign last = (cnt == CNT_W'(OSR_N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      flag_q    <= 1'b0;
      s_rst     <= 1'b0;
      smp_valid <= 1'b0;
      for (int i = 0; i < NCH; i++) begin
        acc[i] <= '0;
        smp[i] <= '0;
      end
    end else begin
      s_rst     <= 1'b0;
      smp_valid <= 1'b0;
      if (conv) begin
        if (last) begin
          cnt       <= '0;
          flag_q    <= 1'b0;
          s_rst     <= 1'b1;
          smp_valid <= 1'b1;
          for (int i = 0; i < NCH; i++) begin
            smp[i].value <= acc[i] + ADC_W'(sar_code[i]);
            smp[i].flag  <= flag_q | stim_active;
            acc[i]       <= '0;
          end
        end else begin
          cnt    <= cnt + 1'b1;
          flag_q <= flag_q | stim_active;
          for (int i = 0; i < NCH; i++) acc[i] <= acc[i] + ADC_W'(sar_code[i]);
        end
      end
    end
  end

endmodule
