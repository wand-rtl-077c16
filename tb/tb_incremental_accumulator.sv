// Testbench for incremental_accumulator: random 5-bit codes on 4 channels,
// OSR 16. Expected sums and flags are accumulated independently; the sample
// rate (one sample per OSR conversions) and the s_rst pulse are checked.
module tb_incremental_accumulator;
  import wand_pkg::*;
  localparam int NCH = 4, OSRN = 16;
  logic clk = 0, rst_n = 0, conv = 0, stim_active = 0, s_rst, smp_valid;
  logic [SAR_W-1:0] sar_code [NCH];
  sample_t smp [NCH];
  int checks = 0, failures = 0;
  int exp_sum [NCH];
  bit exp_flag;
  int nconv = 0, nsmp = 0, last_conv_at_smp = 0;

  incremental_accumulator #(.NCH(NCH), .OSR_N(OSRN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (sar_code[i]) sar_code[i] = '0;
    foreach (exp_sum[i]) exp_sum[i] = 0;
    exp_flag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < OSRN * 6; k++) begin
      @(negedge clk);
      foreach (sar_code[i]) sar_code[i] = SAR_W'($urandom);
      stim_active = (k >= 20 && k < 23) || (k == 47);
      conv = 1;
      foreach (sar_code[i]) exp_sum[i] += sar_code[i];
      exp_flag |= stim_active;
      nconv++;
      @(negedge clk);
      conv = 0;
      stim_active = 0;
      // sample appears one clock after the last conversion
      if ((nconv % OSRN) == 0) begin
        checks++;
        if (!smp_valid || !s_rst) begin failures++; $display("no sample after conv %0d", nconv); end
        foreach (smp[i]) begin
          checks++;
          if (smp[i].value != ADC_W'(exp_sum[i]) || smp[i].flag != exp_flag) begin
            failures++;
            $display("ch%0d got %0d/%0b exp %0d/%0b", i, smp[i].value, smp[i].flag, exp_sum[i], exp_flag);
          end
          exp_sum[i] = 0;
        end
        exp_flag = 0;
        nsmp++;
      end else begin
        checks++;
        if (smp_valid) begin failures++; $display("early sample at conv %0d", nconv); end
      end
    end
    checks++;
    if (nsmp != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
