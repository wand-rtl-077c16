// Testbench for artifact_canceller: 4 channels, 400 frames of random-walk
// samples with flagged bursts of 1 to 9 samples at random places. A reference
// written over the whole recorded sequence (not a buffer model) gives the
// expected output; each output must equal the reference 8 frames earlier.
module tb_artifact_canceller;
  import wand_pkg::*;
  localparam int NCH = 4, D = 8, T = 400, K = 2;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, out_interp;
  logic [1:0] in_ch = 0, out_ch;
  sample_t in_smp = '0, out_smp;
  logic [15:0] art_cnt, ext_cnt;
  int checks = 0, failures = 0;
  int x [NCH][T];
  bit f [NCH][T];
  int y [NCH][T];
  bit yi [NCH][T];

  artifact_canceller #(.NCH(NCH), .DEPTH(D)) dut (
    .clk, .rst_n, .cancel_en(1'b1), .n_cancel(3'(K)), .in_valid, .in_ch, .in_smp,
    .out_valid, .out_ch, .out_smp, .out_interp, .art_cnt, .ext_cnt);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void reference(int c);
    bit active = 0; int start = 0, len = 0, pre = 0, post;
    for (int t = 0; t < T; t++) begin y[c][t] = x[c][t]; yi[c][t] = 0; end
    for (int t = 0; t < T; t++) begin
      if (!active) begin
        if (f[c][t]) begin active = 1; start = t; len = 1; pre = (t > 0) ? x[c][t-1] : 0; end
      end else if ((len < K || f[c][t]) && len < D - 1) begin
        len++;
      end else begin
        post = x[c][t];
        for (int k = 1; k <= len; k++) begin
          y[c][start + k - 1] = pre + ((post - pre) * k) / (len + 1);
          yi[c][start + k - 1] = 1;
        end
        active = 0;
      end
    end
  endfunction

  int n_out = 0, n_interp = 0;
  initial begin
    for (int c = 0; c < NCH; c++) begin
      automatic int v = 16000 + c * 1000, burst = 0;
      for (int t = 0; t < T; t++) begin
        v += int'($urandom_range(0, 200)) - 100;
        x[c][t] = v;
        if (burst == 0 && t > 3 && $urandom_range(0, 11) == 0)
          burst = ($urandom_range(0, 9) == 0) ? 9 : $urandom_range(1, 3);
        f[c][t] = (burst > 0);
        if (burst > 0) begin burst--; x[c][t] = v + 8000; end
      end
      reference(c);
    end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < T; t++) begin
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        in_valid = 1; in_ch = 2'(c); in_smp.value = ADC_W'(x[c][t]); in_smp.flag = f[c][t];
        @(posedge clk); #1;
        checks++;
        if (!out_valid || out_ch != 2'(c)) failures++;
        if (t >= D) begin
          checks++;
          n_out++;
          if (out_interp) n_interp++;
          if (int'(out_smp.value) != y[c][t-D] || out_interp != yi[c][t-D] || out_smp.flag != f[c][t-D]) begin
            failures++;
            if (failures < 10) $display("ch%0d t%0d got %0d/%0b exp %0d/%0b raw %0d flag %0b", c, t-D,
              out_smp.value, out_interp, y[c][t-D], yi[c][t-D], x[c][t-D], f[c][t-D]);
          end
        end
      end
      @(negedge clk); in_valid = 0;
    end
    checks++;
    if (art_cnt == 0 || ext_cnt == 0 || n_interp == 0) begin failures++; $display("no artifacts %0d %0d", art_cnt, ext_cnt); end
    $display("outputs %0d interpolated %0d artifacts %0d extended %0d", n_out, n_interp, art_cnt, ext_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
