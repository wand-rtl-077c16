// Shared body of the system testbenches of wand_top. The including module
// defines OSRN, CDIV, TDIV, BDIV, SPIH, FRAMES_OL, FRAMES_CL and instantiates
// the device as `dut`.
//
// Models around the device:
//   front-end  every channel's SAR code is constant within a frame and
//              changes from frame to frame; the control channel (5) carries a
//              sine of 3 cycles per 16 frames (bin 3 of a 16-point FFT), the
//              others a small ramp. While a chip's stimulator is active its
//              codes are forced to full scale (the stimulation artifact).
//   radio      SPI slave: sends queued downlink records on MISO (zero fill
//              when idle) and parses uplink packets from MOSI.
// Scenario: configure (16-point window, band = bin 3, signal 0 = power above
// threshold 0, dead time 3), program stimulator 0 of NMIC 0 for one biphasic
// pulse, start it once from the host in open-loop mode, then switch to
// closed-loop threshold mode with closed-loop streaming.
// Every mechanism is counted; the test fails if any of them never happened.

  logic clk = 0, rst_n = 0;
  logic [SAR_W-1:0] sar_code [NUM_NMIC][NMIC_CH];
  logic [NUM_NMIC-1:0] conv, s_rst, range_400mv, stim_active;
  stim_drive_t stim_drive [NUM_NMIC][NUM_STIM];
  logic spi_sclk, spi_mosi, spi_miso, spi_cs_n;
  logic [15:0] art_cnt, trig_cnt, blocked_cnt, pkt_cnt, drop_cnt, link_err_cnt;
  logic [1:0] crossing;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // ---------------- front-end model ----------------
  int nconv [NUM_NMIC];
  bit art [NUM_NMIC];
  for (genvar n = 0; n < NUM_NMIC; n++) begin : g_fe
    always @(posedge clk) if (rst_n && conv[n]) nconv[n]++;
    always @(posedge clk) art[n] <= stim_active[n];
    always_comb begin
      automatic int f = nconv[n] / OSRN;
      for (int c = 0; c < NMIC_CH; c++) begin
        if (art[n])
          sar_code[n][c] = 5'd31;
        else if (n == 0 && c == 5)
          sar_code[n][c] = SAR_W'(16 + $rtoi(12.0 * $sin(2.0 * 3.14159265 * 3.0 * real'(f) / 16.0)));
        else
          sar_code[n][c] = SAR_W'(10 + ((f + c) % 4));
      end
    end
  end

  // ---------------- radio model (SPI slave) ----------------
  logic [7:0] dl [$];
  logic [7:0] miso_sh = 0, mosi_sh = 0;
  int bitn = 0;
  logic [7:0] pkt [$];
  int n_open = 0, n_closed = 0, n_flag_smp = 0, n_cv = 0, n_badpkt = 0, last_fc = -1;

  task automatic put_rec(logic [7:0] a, logic [31:0] v);
    dl.push_back(a);
    for (int i = 3; i >= 0; i--) dl.push_back(v[8*i +: 8]);
  endtask

  function automatic logic [7:0] next_dl();
    return (dl.size() > 0) ? dl.pop_front() : 8'h00;
  endfunction

  always @(negedge spi_cs_n) begin
    miso_sh = next_dl(); bitn = 0; spi_miso = miso_sh[7];
  end
  always @(posedge spi_sclk) if (!spi_cs_n) begin
    mosi_sh = {mosi_sh[6:0], spi_mosi};
    bitn++;
    if (bitn == 8) got_byte(mosi_sh);
  end
  always @(negedge spi_sclk) if (!spi_cs_n) begin
    if (bitn == 8) begin miso_sh = next_dl(); bitn = 0; spi_miso = miso_sh[7]; end
    else spi_miso = miso_sh[7 - bitn];
  end

  task automatic got_byte(logic [7:0] b);
    if (pkt.size() == 0 && b != 8'hA5) begin n_badpkt++; return; end
    pkt.push_back(b);
    if (pkt.size() >= 3 && pkt.size() == ((pkt[2] == 1) ? 15 : 3 + 2 * NSEL)) begin
      if (last_fc >= 0 && int'(pkt[1]) == last_fc) n_badpkt++;
      last_fc = pkt[1];
      if (pkt[2] == 0) begin
        n_open++;
        for (int k = 0; k < NSEL; k++) if (pkt[3 + 2 * k][7]) n_flag_smp++;
      end else begin
        n_closed++;
        if ({pkt[7], pkt[8], pkt[9], pkt[10]} != 0) n_cv++;
      end
      pkt.delete();
    end
  endtask

  // ---------------- observation ----------------
  int n_stim = 0, n_cross = 0, n_stim_ol = 0;
  always @(posedge stim_active[0]) n_stim++;
  always @(posedge clk) if (crossing[0]) n_cross++;

  task automatic frames(int k);
    int t = nconv[0] / OSRN + k;
    while (nconv[0] / OSRN < t) @(negedge clk);
  endtask

  function automatic logic [31:0] cmd(nmic_op_e op, int stim, int r, logic [15:0] d);
    nmic_cmd_t c = '0;
    c.op = op; c.stim = 2'(stim); c.regsel = 3'(r); c.data = d;
    return c;
  endfunction

  function automatic logic [31:0] ctrl_word(bit closed, cl_mode_e mode);
    logic [31:0] v = '0;
    v[0] = closed; v[1] = 1'b1; v[4:2] = 3'd2; v[8:5] = 4'd4; v[15:9] = 7'd5;
    v[22:16] = 7'd3; v[24:23] = mode; v[26:25] = 2'b01; v[28:27] = 2'b00;
    return v;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
    else $display("ok: %s", what);
  endtask

  initial begin
    stim_cfg_t sc;
    spi_miso = 0;
    repeat (5) @(negedge clk); rst_n = 1;
    put_rec(8'h10, ctrl_word(1'b0, CL_OFF));
    put_rec(8'h12, {5'd0, 11'd3, 5'd0, 11'd3});
    put_rec(8'h14, 32'd0);
    put_rec(8'h11, {20'd0, 8'd3, 4'b0001});
    put_rec(8'h01, cmd(OP_RANGE, 0, 0, 16'd1));
    sc = '0;
    sc.elec_a = 7'd3; sc.elec_b = 7'd4; sc.amplitude = 8'd25; sc.biphasic = 1'b1;
    sc.pulse_w = 6'd8; sc.ipg = 7'd2; sc.short_t = 7'd4; sc.freq_hz = 8'd100; sc.n_pulses = 8'd1;
    for (int r = 0; r < STIM_REGS; r++) put_rec(8'h01, cmd(OP_WRITE, 0, r, sc[16*r +: 16]));
    put_rec(8'h01, cmd(OP_XFER, 0, 0, 16'b0001));
    frames(4);
    put_rec(8'h01, cmd(OP_START, 0, 0, 16'b0001));
    frames(FRAMES_OL);
    n_stim_ol = n_stim;
    put_rec(8'h10, ctrl_word(1'b1, CL_THRESHOLD));
    frames(FRAMES_CL);

    check("input range command reached NMIC 0", range_400mv[0] === 1'b1);
    check($sformatf("stimulation pulses (%0d)", n_stim), n_stim >= 2);
    check($sformatf("flagged samples in uplink (%0d)", n_flag_smp), n_flag_smp > 0);
    check($sformatf("artifacts cancelled (%0d)", art_cnt), art_cnt > 0);
    check($sformatf("biomarker values in closed-loop packets (%0d)", n_cv), n_cv > 0);
    check($sformatf("threshold crossings (%0d clocks)", n_cross), n_cross > 0);
    check($sformatf("closed-loop triggers (%0d)", trig_cnt), trig_cnt >= 2);
    check($sformatf("pulses started by closed-loop triggers (%0d)", n_stim - n_stim_ol),
          n_stim - n_stim_ol > 0 && n_stim - n_stim_ol >= int'(trig_cnt) - 1);
    check($sformatf("triggers blocked by dead time (%0d)", blocked_cnt), blocked_cnt > 0);
    check($sformatf("open-loop packets (%0d)", n_open), n_open >= FRAMES_OL / 2);
    check($sformatf("closed-loop packets (%0d)", n_closed), n_closed >= FRAMES_CL / 2);
    check($sformatf("packet framing errors (%0d)", n_badpkt), n_badpkt == 0);
    check($sformatf("link errors (%0d)", link_err_cnt), link_err_cnt == 0);
    check($sformatf("device packets %0d = received %0d", pkt_cnt, n_open + n_closed),
          int'(pkt_cnt) - (n_open + n_closed) <= 1);
    $display("dropped packets: %0d", drop_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
