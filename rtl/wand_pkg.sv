// wand_pkg: constants, types and command encodings shared by the WAND digital
// system: the two neuromodulation IC (NMIC) digital cores and the FPGA-side
// back-end (link, artifact cancellation, biomarker FFT, closed-loop control,
// packetising, radio SPI).
//
// Numbers taken from the paper: 2 NMICs x 64 channels, 4 stimulators per NMIC,
// 15-bit samples at 1 kS/s from 1024 oversampled 5-bit SAR codes, artifact flag
// as bit 15, 15.625 us stimulator time resolution, 20.48 MHz NMIC clock,
// 2 Mbps serial interface, 8-frame cancellation buffer, FFT windows of
// 16..2048 points. The register layout, command word format and serial
// framing are this design's own choices.
package wand_pkg;

  // ---------------- sizes from the paper ----------------
  localparam int unsigned NUM_NMIC     = 2;     // two NMICs on the board
  localparam int unsigned NMIC_CH      = 64;    // recording channels per NMIC
  localparam int unsigned NUM_CH       = NUM_NMIC * NMIC_CH;  // 128
  localparam int unsigned NUM_STIM     = 4;     // stimulators per NMIC
  localparam int unsigned ADC_W        = 15;    // ADC bits
  localparam int unsigned WORD_W       = 16;    // ADC value + artifact flag
  localparam int unsigned SAR_W        = 5;     // SAR code bits
  localparam int unsigned OSR          = 1024;  // SAR codes per sample
  localparam int unsigned CLK_HZ       = 20_480_000;
  localparam int unsigned CONV_DIV     = CLK_HZ / (OSR * 1000);   // 20 clocks per SAR conversion
  localparam int unsigned TICK_DIV     = 320;   // 20.48 MHz / 320 = 64 kHz -> 15.625 us
  localparam int unsigned TICKS_PER_S  = 64_000;
  localparam int unsigned BIT_DIV      = 10;    // 2.048 Mbps serial link
  localparam int unsigned CH_W         = $clog2(NUM_CH);
  localparam int unsigned ELEC_W       = 7;     // 66 addressable electrodes

  // ---------------- sample word ----------------
  // bit 15 = artifact flag, bits 14:0 = ADC value (offset binary)
  typedef struct packed {
    logic              flag;
    logic [ADC_W-1:0]  value;
  } sample_t;

  // ---------------- stimulator configuration ----------------
  // Times are in 15.625 us ticks. Written through five 16-bit registers
  // (STIM_CFG_W bits, register r holds bits 16r+15:16r).
  typedef struct packed {
    logic [12:0]        pad;
    logic [7:0]         n_pulses;   // pulses per train, 0 = run until STOP
    logic [7:0]         freq_hz;    // 15..255 Hz
    logic [6:0]         short_t;    // shorting phase, 2..64 ticks (31.25..1000 us)
    logic [6:0]         ipg;        // interphase gap, 2..64 ticks
    logic [5:0]         pulse_w;    // per phase, 1..32 ticks (15.625..500 us)
    logic [5:0]         setup_t;    // setup phase
    logic               biphasic;   // 0 = monophasic
    logic [7:0]         amplitude;  // current in steps of step_sel
    logic [1:0]         step_sel;   // 20/40/60/80 uA per step
    logic [ELEC_W-1:0]  elec_b;     // return electrode
    logic [ELEC_W-1:0]  elec_a;     // first-phase electrode
  } stim_cfg_t;
  localparam int unsigned STIM_CFG_W = $bits(stim_cfg_t);   // 80
  localparam int unsigned STIM_REGS  = STIM_CFG_W / 16;     // 5

  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,   // electrodes grounded (Supp. Fig. 2 step 1)
    PH_SETUP  = 3'd1,
    PH_PHASE1 = 3'd2,   // current A -> B (step 2)
    PH_IPG    = 3'd3,   // interphase gap (steps 3-4)
    PH_PHASE2 = 3'd4,   // reversed current (step 5)
    PH_SHORT  = 3'd5    // electrodes shorted to reference (step 6)
  } stim_phase_e;

  // Analog-facing controls of one stimulator.
  typedef struct packed {
    stim_phase_e        phase;
    logic [ELEC_W-1:0]  elec_a;
    logic [ELEC_W-1:0]  elec_b;
    logic [7:0]         amplitude;
    logic [1:0]         step_sel;
  } stim_drive_t;

  // ---------------- NMIC command word (32 bits) ----------------
  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_WRITE  = 4'd1,   // write shadow register: stim, reg, data
    OP_XFER   = 4'd2,   // copy shadow -> active for stimulators in mask
    OP_START  = 4'd3,   // start pulse train on stimulators in mask
    OP_STOP   = 4'd4,   // stop trains on stimulators in mask
    OP_RANGE  = 4'd5    // data[0]: input range 0 = 100 mVpp, 1 = 400 mVpp
  } nmic_op_e;

  typedef struct packed {
    nmic_op_e     op;
    logic [1:0]   stim;
    logic [2:0]   regsel;
    logic [6:0]   rsvd;
    logic [15:0]  data;       // WRITE data, or stimulator mask in [3:0]
  } nmic_cmd_t;

  // Word sent on the NMIC Data line: start-of-frame marker and sample.
  typedef struct packed {
    logic     sof;
    sample_t  smp;
  } link_word_t;

  // ---------------- host configuration ----------------
  typedef enum logic [1:0] {CL_OFF = 2'd0, CL_THRESHOLD = 2'd1, CL_RANDOM = 2'd2} cl_mode_e;

  localparam int unsigned LOG2_NMAX = 11;              // 2048-point window maximum
  localparam int unsigned BIN_W     = LOG2_NMAX;
  localparam int unsigned PWR_W     = 64;              // band power width
  localparam int unsigned NSEL      = 96;              // channels streamed in open-loop mode

  typedef struct packed {
    logic                    stream_closed;   // 0 = open-loop streaming, 1 = closed-loop streaming
    logic                    cancel_en;
    logic [2:0]              n_cancel;        // samples interpolated per artifact (1..7)
    logic [3:0]              log2n;           // FFT window length 2^log2n, 4..11
    logic [CH_W-1:0]         ctrl_ch;         // control channel
    logic [CH_W-1:0]         stim_ch;         // stimulation channel streamed in closed-loop mode
    cl_mode_e                cl_mode;
    logic [1:0]              sig_use;         // control signals in use
    logic [1:0]              sig_deriv;       // 1 = derivative of band power
    logic                    combine_or;      // 0 = AND, 1 = OR
    logic [1:0][BIN_W-1:0]   k_lo;            // band limits in FFT bins
    logic [1:0][BIN_W-1:0]   k_hi;
    logic [1:0][31:0]        thresh;          // signed, compared with power >> THR_SHIFT
    logic [7:0]              dead_calcs;      // dead time in calculation periods
    logic [15:0]             rand_min_ms;
    logic [15:0]             rand_max_ms;
    logic                    trig_nmic;       // NMIC that receives START on a trigger
    logic [3:0]              trig_mask;       // stimulators started on a trigger
  } host_cfg_t;

  localparam int unsigned THR_SHIFT = 16;

  // Number of samples to interpolate for a pulse: ceil(pulse length in ms) + 1
  // (Methods). Pulse length = setup + phase 1 [+ gap + phase 2] + shorting.
  function automatic logic [2:0] cancel_len(input stim_cfg_t c);
    int unsigned t;
    int unsigned n;
    t = 32'(c.setup_t) + 32'(c.pulse_w) + 32'(c.short_t);
    if (c.biphasic) t = t + 32'(c.ipg) + 32'(c.pulse_w);
    n = (t + 63) / 64 + 1;               // 64 ticks per ms
    if (n > 7) n = 7;
    return 3'(n);
  endfunction

endpackage
