// Testbench for stim_sequencer. Loads a biphasic setting through the shadow
// registers, transfers it, starts a 3-pulse train and checks every phase
// length in ticks, the flag (high in setup..phase 2, low while shorting), the
// pulse spacing set by the frequency and the end of the train. Then it loads a
// monophasic setting during a train and checks that it takes effect only at
// the next pulse.
module tb_stim_sequencer;
  import wand_pkg::*;
  logic tick;
  logic clk = 0, rst_n = 0, wr_en = 0, xfer = 0, start = 0, stop = 0;
  logic [2:0] wr_reg = 0;
  logic [15:0] wr_data = 0;
  stim_drive_t drive;
  logic stim_active, busy, pulse_fire;
  int checks = 0, failures = 0;

  stim_sequencer dut (.*);
  always #5 clk = ~clk;
  // one tick every 4 clocks
  int tc = 0;
  always @(posedge clk) begin tc <= (tc + 1) % 4; end
  assign tick = (tc == 0);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input stim_cfg_t c);
    logic [STIM_CFG_W-1:0] v = c;
    for (int r = 0; r < STIM_REGS; r++) begin
      @(negedge clk); wr_en = 1; wr_reg = 3'(r); wr_data = v[16*r +: 16];
    end
    @(negedge clk); wr_en = 0; xfer = 1;
    @(negedge clk); xfer = 0;
  endtask

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  // record phase durations in ticks
  stim_phase_e prev_ph = PH_IDLE;
  int ph_ticks = 0;
  int durations [$];
  stim_phase_e seq [$];
  int fire_tick [$];
  int tick_no = 0;
  always @(posedge clk) if (rst_n) begin
    if (tick) tick_no++;
    if (pulse_fire) fire_tick.push_back(tick_no);
    if (drive.phase != prev_ph) begin
      if (prev_ph != PH_IDLE) begin durations.push_back(ph_ticks); seq.push_back(prev_ph); end
      ph_ticks = 0;
      prev_ph = drive.phase;
    end
    if (tick && drive.phase != PH_IDLE) ph_ticks++;
    // flag rule
    checks++;
    if (stim_active != (drive.phase inside {PH_SETUP, PH_PHASE1, PH_IPG, PH_PHASE2})) failures++;
  end

  stim_cfg_t c1, c2;
  initial begin
    c1 = '0; c1.elec_a = 52; c1.elec_b = 53; c1.amplitude = 8; c1.step_sel = 0;
    c1.biphasic = 1; c1.setup_t = 3; c1.pulse_w = 8; c1.ipg = 2; c1.short_t = 2;
    c1.freq_hz = 250; c1.n_pulses = 3;
    c2 = c1; c2.biphasic = 0; c2.pulse_w = 5; c2.setup_t = 0; c2.amplitude = 20;
    repeat (3) @(negedge clk); rst_n = 1;
    load(c1);
    chk(drive.elec_a == 52 && drive.amplitude == 8, "xfer when idle");
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    chk(busy, "busy after start");
    wait (!busy);
    repeat (8) @(negedge clk);
    // 3 pulses x (setup, p1, ipg, p2, short)
    chk(seq.size() == 15, $sformatf("phase count %0d", seq.size()));
    for (int p = 0; p < 3 && seq.size() == 15; p++) begin
      chk(seq[5*p] == PH_SETUP && durations[5*p] == 3, "setup");
      chk(seq[5*p+1] == PH_PHASE1 && durations[5*p+1] == 8, "phase1");
      chk(seq[5*p+2] == PH_IPG && durations[5*p+2] == 2, "ipg");
      chk(seq[5*p+3] == PH_PHASE2 && durations[5*p+3] == 8, "phase2");
      chk(seq[5*p+4] == PH_SHORT && durations[5*p+4] == 2, "short");
    end
    // 250 Hz at 64000 ticks/s: 256 ticks apart
    chk(fire_tick.size() == 3, "3 pulses");
    if (fire_tick.size() == 3) begin
      chk(fire_tick[1] - fire_tick[0] == 256, $sformatf("spacing %0d", fire_tick[1] - fire_tick[0]));
      chk(fire_tick[2] - fire_tick[1] == 256, "spacing 2");
    end
    // update during a continuous train
    seq.delete(); durations.delete(); fire_tick.delete();
    c1.n_pulses = 0;
    load(c1);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (drive.phase == PH_PHASE1);
    load(c2);                                // mid-pulse: must not apply yet
    chk(drive.amplitude == 8, "no change mid-pulse");
    wait (drive.phase == PH_IDLE);
    repeat (2) @(negedge clk);
    chk(drive.amplitude == 20, "applied between pulses");
    wait (drive.phase == PH_PHASE1);
    wait (drive.phase != PH_PHASE1);
    chk(drive.phase == PH_SHORT, "monophasic goes to short");
    @(negedge clk); stop = 1; @(negedge clk); stop = 0;
    wait (!busy);
    chk(fire_tick.size() == 2, $sformatf("pulses before stop %0d", fire_tick.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
