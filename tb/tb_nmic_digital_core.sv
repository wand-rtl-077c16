// Testbench for nmic_digital_core with a short frame (4 channels, 16
// conversions of 12 clocks, 2 clocks per link bit). The testbench decodes the
// Data line bit by bit and encodes command words on the Cmd line. Checked:
// every uplink word (start-of-frame marker on channel 0, value = sum of the
// constant SAR codes), the RANGE command, and a programmed biphasic pulse
// train (WRITE x5, XFER, START): the stimulator phases and electrodes, the
// number of pulses, and the artifact flag on the words of the frames in which
// the stimulator was active.
module tb_nmic_digital_core;
  import wand_pkg::*;
  localparam int NCH = 4, OSRN = 16, CDIV = 12, TDIV = 4, BDIV = 2;
  logic clk = 0, rst_n = 0, cmd_line = 1;
  logic data_line, conv, s_rst, range_400mv, stim_active, frame_valid;
  logic [SAR_W-1:0] sar_code [NCH];
  stim_drive_t stim [NUM_STIM];
  int checks = 0, failures = 0;
  nmic_digital_core #(.NCH(NCH), .OSR_N(OSRN), .CONV_DIVN(CDIV), .TICK_DIVN(TDIV),
                      .BIT_DIVN(BDIV)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // constant SAR code per channel: every word must equal OSR_N * code
  function automatic int code_of(int c); return 3 * c + 1; endfunction
  initial for (int c = 0; c < NCH; c++) sar_code[c] = SAR_W'(code_of(c));

  // Data line decoder
  int words = 0, flagged = 0, idx = 0, frame_no = 0;
  initial begin
    link_word_t w;
    forever begin
      @(negedge clk);
      if (rst_n && data_line == 1'b0) begin
        for (int b = $bits(link_word_t) - 1; b >= 0; b--) begin
          repeat (BDIV) @(negedge clk);
          w[b] = data_line;
        end
        repeat (BDIV) @(negedge clk);
        checks++;
        if (data_line !== 1'b1) begin failures++; $display("stop bit missing"); end
        if (w.sof) idx = 0;
        checks++;
        if (w.sof != (idx == 0)) failures++;
        if (idx == 0) frame_no++;
        if (frame_no > 1) begin
          checks++;
          if (int'(w.smp.value) != OSRN * code_of(idx)) begin
            failures++; $display("word ch%0d got %0d exp %0d", idx, w.smp.value, OSRN * code_of(idx));
          end
          if (w.smp.flag) flagged++;
        end
        words++;
        idx++;
      end
    end
  end

  task automatic send(nmic_cmd_t c);
    logic [31:0] b = c;
    @(negedge clk);
    cmd_line = 0; repeat (BDIV) @(negedge clk);
    for (int i = 31; i >= 0; i--) begin cmd_line = b[i]; repeat (BDIV) @(negedge clk); end
    cmd_line = 1; repeat (BDIV) @(negedge clk);
  endtask

  // stimulator observation
  int pulses = 0, seen_p2 = 0;
  stim_phase_e last_ph = PH_IDLE;
  always @(posedge clk) begin
    if (stim[1].phase == PH_PHASE1 && last_ph != PH_PHASE1) pulses++;
    if (stim[1].phase == PH_PHASE2) seen_p2 = 1;
    last_ph = stim[1].phase;
  end

  initial begin
    stim_cfg_t cfg;
    nmic_cmd_t c;
    repeat (3) @(negedge clk); rst_n = 1;
    // RANGE
    c = '0; c.op = OP_RANGE; c.data = 16'd1; send(c);
    repeat (4) @(negedge clk);
    checks++; if (range_400mv !== 1'b1) begin failures++; $display("range not set"); end
    // program stimulator 1: biphasic, 3 pulses at 255 Hz
    cfg = '0;
    cfg.elec_a = 7'd5; cfg.elec_b = 7'd9; cfg.amplitude = 8'd50; cfg.step_sel = 2'd1;
    cfg.biphasic = 1; cfg.setup_t = 6'd1; cfg.pulse_w = 6'd8; cfg.ipg = 7'd2; cfg.short_t = 7'd4;
    cfg.freq_hz = 8'd255; cfg.n_pulses = 8'd3;
    for (int r = 0; r < STIM_REGS; r++) begin
      c = '0; c.op = OP_WRITE; c.stim = 2'd1; c.regsel = 3'(r); c.data = cfg[16*r +: 16]; send(c);
    end
    repeat (200) @(negedge clk);
    checks++; if (stim_active !== 1'b0 || stim[1].elec_a != 0) begin failures++; $display("active before xfer/start"); end
    c = '0; c.op = OP_XFER; c.data = 16'b0010; send(c);
    c = '0; c.op = OP_START; c.data = 16'b0010; send(c);
    // 3 pulses, 251 ticks apart: ~3100 clocks
    repeat (5000) @(negedge clk);
    checks++;
    if (pulses != 3 || !seen_p2 || stim[1].elec_a != 7'd5 || stim[1].elec_b != 7'd9 || stim[1].amplitude != 8'd50) begin
      failures++; $display("pulses=%0d p2=%0d", pulses, seen_p2);
    end
    checks++;
    if (flagged < 3 * NCH) begin failures++; $display("flagged words %0d", flagged); end
    checks++;
    if (words < 25 * NCH) begin failures++; $display("words %0d", words); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
