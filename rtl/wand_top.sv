// wand_top: the digital system of the WAND neuromodulation device: two NMIC
// digital cores and the FPGA back-end that closes the loop.
//
// Data path, once per 1 ms frame:
//   NMIC cores (x2)       1024 SAR codes per channel -> 64 16-bit words each,
//                         flagged while a stimulator is active, sent on Data
//   nmic_link             deserialise, FIFO, merge into a 128-channel stream
//   artifact_canceller    8-frame buffer, linear interpolation over flagged
//                         samples (8 ms latency)
//   biomarker_fft         control channel -> windowed FFT -> band powers
//   closed_loop_controller thresholds / AND-OR / dead time / random mode
//   stim_command          trigger -> START command, merged with host commands
//   nmic_link             command words on each NMIC's Cmd line
//   data_aggregation      1 ms uplink packets (96 channels, or closed-loop set)
//   spi_master            packets out to the radio, downlink bytes in
//   system_controller     downlink records -> configuration and NMIC commands
//
// Ports: the analog side of each NMIC (SAR codes in; conversion strobe,
// integrator reset, input range and stimulator drive out) and the SPI bus to
// the radio SoC. The analog front-ends, stimulator output stage and radio are
// outside this RTL. Status counters are brought out for observation.
//
// The parameters let a simulation shorten the frame: OSR_N conversions of
// CONV_DIVN clocks make one frame, which must hold 64 link words of
// 19 * BIT_DIVN clocks and, in open-loop mode, one 195-byte packet of
// 16 * SPI_HALF clocks per byte. Defaults are the device's: 1024 x 20 clocks
// at 20.48 MHz (1 ms), 2.048 Mbps link, 3.41 MHz SPI, 2048-point FFT maximum.
//
// From the paper: the partition of Fig. 1d (chip controllers, artifact
// removal, FFT, threshold detection, stim command, data aggregation, system
// controller) and all rates and sizes. The paper runs cancellation and the
// closed-loop algorithm as software on the FPGA's processor; here they are
// fabric logic, which the paper names as its next step.
module wand_top
  import wand_pkg::*;
#(
  parameter int unsigned OSR_N     = OSR,
  parameter int unsigned CONV_DIVN = CONV_DIV,
  parameter int unsigned TICK_DIVN = TICK_DIV,
  parameter int unsigned BIT_DIVN  = BIT_DIV,
  parameter int unsigned SPI_HALF  = 3,
  parameter int unsigned LOG2_NM   = LOG2_NMAX
) (
  input  logic              clk,
  input  logic              rst_n,
  // NMIC analog side
  input  logic [SAR_W-1:0]  sar_code    [NUM_NMIC][NMIC_CH],
  output logic [NUM_NMIC-1:0] conv,
  output logic [NUM_NMIC-1:0] s_rst,
  output logic [NUM_NMIC-1:0] range_400mv,
  output stim_drive_t       stim_drive  [NUM_NMIC][NUM_STIM],
  output logic [NUM_NMIC-1:0] stim_active,
  // radio SPI
  output logic              spi_sclk,
  output logic              spi_mosi,
  input  logic              spi_miso,
  output logic              spi_cs_n,
  // status
  output logic [15:0]       art_cnt,
  output logic [15:0]       trig_cnt,
  output logic [15:0]       blocked_cnt,
  output logic [15:0]       pkt_cnt,
  output logic [15:0]       drop_cnt,
  output logic [15:0]       link_err_cnt,
  output logic [1:0]        crossing
);
  // ---------------- NMICs and link ----------------
  logic [NUM_NMIC-1:0] data_line, cmd_line, nmic_frame;

  for (genvar n = 0; n < NUM_NMIC; n++) begin : g_nmic
    nmic_digital_core #(
      .NCH(NMIC_CH), .OSR_N(OSR_N), .CONV_DIVN(CONV_DIVN),
      .TICK_DIVN(TICK_DIVN), .BIT_DIVN(BIT_DIVN)
    ) u_core (
      .clk, .rst_n,
      .cmd_line   (cmd_line[n]),
      .data_line  (data_line[n]),
      .sar_code   (sar_code[n]),
      .conv       (conv[n]),
      .s_rst      (s_rst[n]),
      .range_400mv(range_400mv[n]),
      .stim       (stim_drive[n]),
      .stim_active(stim_active[n]),
      .frame_valid(nmic_frame[n])
    );
  end

  logic          l_valid, l_frame, c_valid, c_nmic, c_ready;
  logic [CH_W-1:0] l_ch;
  sample_t       l_smp;
  logic [31:0]   c_word;
  logic [15:0]   sync_err, ovf_cnt;

  nmic_link #(.NN(NUM_NMIC), .NCH(NMIC_CH), .BIT_DIVN(BIT_DIVN)) u_link (
    .clk, .rst_n, .data_line, .cmd_line,
    .smp_valid(l_valid), .smp_ch(l_ch), .smp(l_smp), .frame_done(l_frame),
    .sync_err, .overflow_cnt(ovf_cnt),
    .cmd_valid(c_valid), .cmd_nmic(c_nmic), .cmd_word(c_word), .cmd_ready(c_ready)
  );
  assign link_err_cnt = sync_err + ovf_cnt;

  // ---------------- configuration ----------------
  host_cfg_t   cfg;
  logic        sel_we;
  logic [6:0]  sel_idx, sel_ch;
  logic        h_valid, h_nmic, h_ready;
  logic [31:0] h_word;
  logic [15:0] bad_cnt;
  logic        rx_valid;
  logic [7:0]  rx_byte;

  system_controller u_sys (
    .clk, .rst_n, .rx_valid, .rx_byte, .cfg,
    .sel_we, .sel_idx, .sel_ch,
    .cmd_valid(h_valid), .cmd_nmic(h_nmic), .cmd_word(h_word), .cmd_ready(h_ready),
    .bad_cnt
  );

  // ---------------- artifact cancellation ----------------
  logic          a_valid, a_interp;
  logic [CH_W-1:0] a_ch;
  sample_t       a_smp;
  logic [15:0]   ext_cnt;

  artifact_canceller #(.NCH(NUM_CH), .DEPTH(8)) u_cancel (
    .clk, .rst_n, .cancel_en(cfg.cancel_en), .n_cancel(cfg.n_cancel),
    .in_valid(l_valid), .in_ch(l_ch), .in_smp(l_smp),
    .out_valid(a_valid), .out_ch(a_ch), .out_smp(a_smp), .out_interp(a_interp),
    .art_cnt, .ext_cnt
  );

  // ---------------- biomarker and decision ----------------
  logic                  f_busy, f_done, psd_valid;
  logic [1:0][PWR_W-1:0] band_pwr;
  logic [BIN_W-1:0]      psd_bin;
  logic [PWR_W-1:0]      psd_val;
  logic [15:0]           f_overrun;

  biomarker_fft #(.NCH(NUM_CH), .LOG2_NM(LOG2_NM)) u_fft (
    .clk, .rst_n, .in_valid(a_valid), .in_ch(a_ch), .in_smp(a_smp),
    .ctrl_ch(cfg.ctrl_ch), .log2n(cfg.log2n), .k_lo(cfg.k_lo), .k_hi(cfg.k_hi),
    .busy(f_busy), .calc_done(f_done), .band_pwr,
    .psd_valid, .psd_bin, .psd_val, .overrun_cnt(f_overrun)
  );

  logic                       trigger;
  logic signed [1:0][PWR_W:0] ctrl_val;

  closed_loop_controller u_cl (
    .clk, .rst_n, .cl_mode(cfg.cl_mode), .sig_use(cfg.sig_use), .sig_deriv(cfg.sig_deriv),
    .combine_or(cfg.combine_or), .thresh(cfg.thresh), .dead_calcs(cfg.dead_calcs),
    .rand_min_ms(cfg.rand_min_ms), .rand_max_ms(cfg.rand_max_ms),
    .ms_tick(l_frame), .calc_done(f_done), .band_pwr,
    .trigger, .crossing, .ctrl_val, .trig_cnt, .blocked_cnt
  );

  logic [15:0] start_cnt, merged_cnt;

  stim_command u_cmd (
    .clk, .rst_n, .trigger, .trig_nmic(cfg.trig_nmic), .trig_mask(cfg.trig_mask),
    .host_valid(h_valid), .host_nmic(h_nmic), .host_word(h_word), .host_ready(h_ready),
    .cmd_valid(c_valid), .cmd_nmic(c_nmic), .cmd_word(c_word), .cmd_ready(c_ready),
    .start_cnt, .merged_cnt
  );

  // ---------------- uplink ----------------
  logic       t_valid, t_ready;
  logic [7:0] t_byte;

  data_aggregation #(.NCH(NUM_CH), .NSELN(NSEL)) u_agg (
    .clk, .rst_n, .stream_closed(cfg.stream_closed), .ctrl_ch(cfg.ctrl_ch),
    .stim_ch(cfg.stim_ch), .ctrl_val,
    .sel_we, .sel_idx, .sel_ch,
    .in_valid(a_valid), .in_ch(a_ch), .in_smp(a_smp),
    .tx_valid(t_valid), .tx_byte(t_byte), .tx_ready(t_ready),
    .pkt_cnt, .drop_cnt
  );

  spi_master #(.HALF(SPI_HALF)) u_spi (
    .clk, .rst_n, .tx_valid(t_valid), .tx_byte(t_byte), .tx_ready(t_ready),
    .rx_valid, .rx_byte, .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n)
  );

endmodule
