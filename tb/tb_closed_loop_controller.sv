// Testbench for closed_loop_controller. THRESHOLD mode: 300 calculations with
// random band powers, compared against a reference of the policy (power and
// derivative thresholds, AND then OR, dead time of 3 calculations). RANDOM
// mode: every interval between triggers must lie in [min, max] ms.
module tb_closed_loop_controller;
  import wand_pkg::*;
  logic clk = 0, rst_n = 0, ms_tick = 0, calc_done = 0, combine_or = 0;
  cl_mode_e cl_mode = CL_OFF;
  logic [1:0] sig_use = 2'b11, sig_deriv = 2'b10;
  logic [1:0][31:0] thresh;
  logic [7:0] dead_calcs = 3;
  logic [15:0] rand_min_ms = 20, rand_max_ms = 40;
  logic [1:0][PWR_W-1:0] band_pwr = '0;
  logic trigger;
  logic [1:0] crossing;
  logic signed [1:0][PWR_W:0] ctrl_val;
  logic [15:0] trig_cnt, blocked_cnt;
  int checks = 0, failures = 0;

  closed_loop_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint prev [2];
  bit have_prev;
  int dead, ntrig, nblock;

  task automatic run_calcs(int n, bit use_or);
    for (int i = 0; i < n; i++) begin
      longint p [2], val [2];
      bit x [2], dec, exp_trig;
      for (int c = 0; c < 2; c++) p[c] = longint'($urandom_range(0, 2000)) << 16;
      for (int c = 0; c < 2; c++) begin
        val[c] = (c == 1) ? (have_prev ? p[c] - prev[c] : 0) : p[c];
        x[c] = val[c] > (longint'(signed'(thresh[c])) <<< 16);
      end
      dec = use_or ? (x[0] | x[1]) : (x[0] & x[1]);
      exp_trig = 0;
      if (dead > 0) begin dead--; end
      else if (dec) begin exp_trig = 1; dead = 3; end
      prev = p; have_prev = 1;
      @(negedge clk);
      band_pwr[0] = PWR_W'(p[0]); band_pwr[1] = PWR_W'(p[1]); calc_done = 1;
      @(negedge clk); calc_done = 0;
      checks++;
      if (trigger != exp_trig) begin failures++; $display("calc %0d trigger %0b exp %0b p %0d %0d val %0d %0d x %0b%0b rtlx %0b dead %0d rtlval %0d %0d", i, trigger, exp_trig, p[0]>>16, p[1]>>16, val[0]>>>16, val[1]>>>16, x[0], x[1], crossing, dead, ctrl_val[0]>>>16, ctrl_val[1]>>>16); end
      if (exp_trig) ntrig++;
      repeat (3) @(negedge clk);
      checks++;
      if (trigger) failures++;
    end
  endtask

  initial begin
    thresh[0] = 1000; thresh[1] = 200;
    repeat (3) @(negedge clk); rst_n = 1;
    cl_mode = CL_THRESHOLD;
    run_calcs(150, 0);
    @(negedge clk); combine_or = 1;
    run_calcs(150, 1);
    checks++;
    if (trig_cnt != 16'(ntrig) || ntrig < 5 || blocked_cnt == 0) begin
      failures++; $display("trig %0d exp %0d blocked %0d", trig_cnt, ntrig, blocked_cnt);
    end
    // random mode
    cl_mode = CL_OFF;
    repeat (3) @(negedge clk);
    cl_mode = CL_RANDOM;
    begin
      int last = -1, ms = 0, n = 0;
      for (ms = 0; ms < 2000; ms++) begin
        @(negedge clk); ms_tick = 1;
        @(negedge clk); ms_tick = 0;
        if (trigger) begin
          if (last >= 0) begin
            checks++;
            if (ms - last < 20 || ms - last > 40) begin failures++; $display("interval %0d", ms - last); end
          end
          last = ms; n++;
        end
      end
      checks++;
      if (n < 2000 / 41) begin failures++; $display("random triggers %0d", n); end
    end
    $display("threshold triggers %0d blocked %0d", ntrig, blocked_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
