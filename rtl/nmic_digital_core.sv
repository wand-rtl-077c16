// nmic_digital_core: the digital core of one neuromodulation IC (NMIC): its
// serial interface and system controller.
//
// Downlink: 32-bit command words (wand_pkg::nmic_cmd_t) arrive on the Cmd pin
// through serial_rx. WRITE loads a stimulator's shadow register; XFER, START
// and STOP act on the stimulators selected by a 4-bit mask, so several
// stimulators can be started together; RANGE selects the 100 / 400 mVpp
// input range of the recording front-ends (an analog setting, brought out).
//
// Timing: the 20.48 MHz clock is divided by CONV_DIVN (20) into the 1.024 MHz
// SAR conversion strobe and by TICK_DIVN (320) into the 15.625 us stimulator
// tick. The four stim_sequencers drive the analog stimulator through `stim`;
// their active flags are ORed into the sample flag. The
// incremental_accumulator turns 1024 codes per channel into one 16-bit word
// per millisecond.
//
// Uplink: after every sample the 64 words are sent on the Data pin in
// channel order, each as a 17-bit link word whose top bit marks channel 0.
// 64 words of 19 bit times at 2.048 Mbps take 5.9 ms / 10 = 0.59 ms, inside the
// 1 ms frame.
//
// From the paper: Clk/Cmd/Rst/Data pins, 4 stimulators, 64 channels, 16-bit
// words, 1 kS/s, 2 Mbps, command-driven register writes and stimulation start.
// Own choice: command format, framing, clock dividers.
module nmic_digital_core
  import wand_pkg::*;
#(
  parameter int unsigned NCH       = NMIC_CH,
  parameter int unsigned OSR_N     = OSR,
  parameter int unsigned CONV_DIVN = CONV_DIV,
  parameter int unsigned TICK_DIVN = TICK_DIV,
  parameter int unsigned BIT_DIVN  = BIT_DIV
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_line,
  output logic              data_line,
  // analog recording front-ends
  input  logic [SAR_W-1:0]  sar_code [NCH],
  output logic              conv,
  output logic              s_rst,
  output logic              range_400mv,
  // analog stimulators
  output stim_drive_t       stim [NUM_STIM],
  output logic              stim_active,
  output logic              frame_valid   // pulses when a new sample set is latched
);
  localparam int unsigned CH_IW = (NCH > 1) ? $clog2(NCH) : 1;

  // ---------------- clock dividers ----------------
  logic [$clog2(CONV_DIVN)-1:0] cdiv_q;
  logic [$clog2(TICK_DIVN)-1:0] tdiv_q;
  logic                         tick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cdiv_q <= '0;
      tdiv_q <= '0;
    end else begin
      cdiv_q <= (cdiv_q == $bits(cdiv_q)'(CONV_DIVN - 1)) ? '0 : cdiv_q + 1'b1;
      tdiv_q <= (tdiv_q == $bits(tdiv_q)'(TICK_DIVN - 1)) ? '0 : tdiv_q + 1'b1;
    end
  end
  assign conv = (cdiv_q == '0);
  assign tick = (tdiv_q == '0);

  // ---------------- command receiver ----------------
  logic      cmd_v;
  nmic_cmd_t cmd;
  logic [31:0] cmd_bits;

  serial_rx #(.W(32), .DIV(BIT_DIVN)) u_cmd_rx (
    .clk, .rst_n, .line(cmd_line), .valid(cmd_v), .data(cmd_bits)
  );
  assign cmd = nmic_cmd_t'(cmd_bits);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) range_400mv <= 1'b0;
    else if (cmd_v && cmd.op == OP_RANGE) range_400mv <= cmd.data[0];
  end

  // ---------------- stimulators ----------------
  logic [NUM_STIM-1:0] act, busy, fired;

  for (genvar s = 0; s < NUM_STIM; s++) begin : g_stim
    stim_sequencer u_seq (
      .clk, .rst_n, .tick,
      .wr_en   (cmd_v && cmd.op == OP_WRITE && cmd.stim == 2'(s)),
      .wr_reg  (cmd.regsel),
      .wr_data (cmd.data),
      .xfer    (cmd_v && cmd.op == OP_XFER  && cmd.data[s]),
      .start   (cmd_v && cmd.op == OP_START && cmd.data[s]),
      .stop    (cmd_v && cmd.op == OP_STOP  && cmd.data[s]),
      .drive   (stim[s]),
      .stim_active (act[s]),
      .busy    (busy[s]),
      .pulse_fire (fired[s])
    );
  end
  assign stim_active = |act;

  // ---------------- recording ----------------
  sample_t smp [NCH];

  incremental_accumulator #(.NCH(NCH), .OSR_N(OSR_N)) u_acc (
    .clk, .rst_n, .conv, .sar_code, .stim_active,
    .s_rst, .smp_valid(frame_valid), .smp
  );

  // ---------------- uplink serialiser ----------------
  logic             tx_ready, tx_valid_q;
  logic [CH_IW-1:0] idx_q;
  link_word_t       tx_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_valid_q <= 1'b0;
      idx_q      <= '0;
    end else if (frame_valid) begin
      tx_valid_q <= 1'b1;                 // (re)start at channel 0
      idx_q      <= '0;
    end else if (tx_valid_q && tx_ready) begin
      if (idx_q == CH_IW'(NCH - 1)) tx_valid_q <= 1'b0;
      else                          idx_q      <= idx_q + 1'b1;
    end
  end

  assign tx_word.sof = (idx_q == '0);
  assign tx_word.smp = smp[idx_q];

  serial_tx #(.W($bits(link_word_t)), .DIV(BIT_DIVN)) u_data_tx (
    .clk, .rst_n, .valid(tx_valid_q), .data(tx_word), .ready(tx_ready), .line(data_line)
  );

endmodule
