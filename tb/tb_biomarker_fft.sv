// Testbench for biomarker_fft with a 64-point table (LOG2_NM = 6) and a
// 32-point window. The control channel carries two tones (bins 4 and 9) on an
// offset; the other channels carry noise. For every calculation the expected
// band powers are computed here with a floating-point DFT of the same window
// (demeaned with the same integer mean, scaled by 64, divided by N) and must
// agree within 1 %. The cadence (first result after N samples, then every N/2)
// and the number of spectrum bins streamed are checked too.
module tb_biomarker_fft;
  import wand_pkg::*;
  localparam int NCH = 4, LOG2 = 6, LN = 5, N = 1 << LN, CTRL = 2, FR = 4 * N;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [1:0] in_ch = 0;
  sample_t in_smp = '0;
  logic busy, calc_done, psd_valid;
  logic [1:0][PWR_W-1:0] band_pwr;
  logic [BIN_W-1:0] psd_bin;
  logic [PWR_W-1:0] psd_val;
  logic [15:0] overrun_cnt;
  logic [1:0][BIN_W-1:0] k_lo, k_hi;
  int checks = 0, failures = 0;
  int v [FR];

  biomarker_fft #(.NCH(NCH), .LOG2_NM(LOG2)) dut (
    .clk, .rst_n, .in_valid, .in_ch, .in_smp, .ctrl_ch(2'(CTRL)), .log2n(4'(LN)),
    .k_lo, .k_hi, .busy, .calc_done, .band_pwr, .psd_valid, .psd_bin, .psd_val, .overrun_cnt);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real band_ref(int last, int lo, int hi);
    int sum = 0, mean;
    real p = 0.0, re, im, x;
    for (int t = last - N + 1; t <= last; t++) sum += v[t];
    mean = sum / N;
    for (int k = lo; k <= hi; k++) begin
      re = 0.0; im = 0.0;
      for (int t = 0; t < N; t++) begin
        x = real'((v[last - N + 1 + t] - mean) * 64);
        re += x * $cos(2.0 * 3.141592653589793 * k * t / N);
        im -= x * $sin(2.0 * 3.141592653589793 * k * t / N);
      end
      p += (re * re + im * im) / (real'(N) * real'(N));
    end
    return p;
  endfunction

  int ncalc = 0, nbins = 0, sample_no = 0;
  int calc_at [$];
  always @(posedge clk) if (psd_valid) nbins++;
  always @(posedge clk) if (calc_done) calc_at.push_back(sample_no - 1);

  initial begin
    k_lo[0] = 3; k_hi[0] = 5; k_lo[1] = 8; k_hi[1] = 10;
    for (int t = 0; t < FR; t++)
      v[t] = 16384 + int'(3000.0 * $cos(2.0 * 3.141592653589793 * 4 * t / N))
                   + int'(1000.0 * $sin(2.0 * 3.141592653589793 * 9 * t / N))
                   + int'($urandom_range(0, 20));
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < FR; t++) begin
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        in_valid = 1; in_ch = 2'(c);
        in_smp.flag = 0;
        in_smp.value = (c == CTRL) ? ADC_W'(v[t]) : ADC_W'($urandom);
      end
      if (1) sample_no = t + 1;
      @(negedge clk); in_valid = 0;
      repeat (250) @(negedge clk);
      if (calc_done || calc_at.size() > ncalc) begin
        // result for the window ending at the last sample taken at start
        for (int b = 0; b < 2; b++) begin
          automatic real r = band_ref(calc_at[ncalc], b == 0 ? 3 : 8, b == 0 ? 5 : 10);
          automatic real g = real'(band_pwr[b]);
          checks++;
          if (g < 0.99 * r - 1000.0 || g > 1.01 * r + 1000.0) begin
            failures++;
            $display("calc %0d band %0d got %0.0f exp %0.0f", ncalc, b, g, r);
          end
        end
        ncalc++;
      end
    end
    // cadence: windows end at samples N-1, N-1+N/2, ...
    checks++;
    if (ncalc != (FR - N) / (N / 2) + 1) begin failures++; $display("ncalc %0d", ncalc); end
    for (int i = 0; i < calc_at.size(); i++) begin
      checks++;
      if (calc_at[i] != N - 1 + i * N / 2) begin failures++; $display("calc %0d at %0d", i, calc_at[i]); end
    end
    checks++;
    if (nbins != ncalc * N / 2 || overrun_cnt != 0) failures++;
    $display("calculations %0d bins %0d", ncalc, nbins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
