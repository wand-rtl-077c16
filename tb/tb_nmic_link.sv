// Testbench for nmic_link with two chips of 4 channels and 2 clocks per bit.
// The testbench plays both NMICs: it serialises link words (start-of-frame
// marker on channel 0) on the two Data lines with different start offsets,
// and checks that the merged stream comes out in global channel order 0..7
// with the right samples and a frame_done on the last one. A stray word
// without marker must be dropped and counted in sync_err. Command words
// queued for each chip are decoded from its Cmd line and compared.
module tb_nmic_link;
  import wand_pkg::*;
  localparam int NN = 2, NCH = 4, BDIV = 2, FRAMES = 6;
  logic clk = 0, rst_n = 0;
  logic [NN-1:0] data_line = '1, cmd_line;
  logic smp_valid, frame_done, cmd_valid = 0, cmd_ready;
  logic [2:0] smp_ch;
  sample_t smp;
  logic [15:0] sync_err, overflow_cnt;
  logic cmd_nmic = 0;
  logic [31:0] cmd_word = '0;
  int checks = 0, failures = 0;
  nmic_link #(.NN(NN), .NCH(NCH), .BIT_DIVN(BDIV), .FIFO_D(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [15:0] val_of(int f, int n, int c);
    return 16'((f * 1000 + n * 100 + c * 7) ^ ((c == 2) ? 16'h8000 : 16'h0));
  endfunction

  task automatic send_word(int n, link_word_t w);
    logic [16:0] b = w;
    @(negedge clk);
    data_line[n] = 0; repeat (BDIV) @(negedge clk);
    for (int i = 16; i >= 0; i--) begin data_line[n] = b[i]; repeat (BDIV) @(negedge clk); end
    data_line[n] = 1; repeat (BDIV) @(negedge clk);
  endtask

  task automatic chip(int n);
    link_word_t w;
    repeat (n * 37) @(negedge clk);
    for (int f = 0; f < FRAMES; f++) begin
      if (n == 0 && f == 3) begin
        w.sof = 0; w.smp = sample_t'(16'h1234);   // stray word before the frame
        send_word(n, w);
      end
      for (int c = 0; c < NCH; c++) begin
        w.sof = (c == 0); w.smp = sample_t'(val_of(f, n, c));
        send_word(n, w);
      end
      repeat (30) @(negedge clk);
    end
  endtask

  // stream checker
  int exp_ch = 0, frame = 0, nframe_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (smp_valid) begin
      checks++;
      if (int'(smp_ch) != exp_ch || smp != sample_t'(val_of(frame, exp_ch / NCH, exp_ch % NCH))) begin
        failures++;
        $display("frame %0d: got ch%0d %h, exp ch%0d %h", frame, smp_ch, smp, exp_ch, val_of(frame, exp_ch / NCH, exp_ch % NCH));
      end
      checks++;
      if (frame_done != (exp_ch == NN * NCH - 1)) failures++;
      if (exp_ch == NN * NCH - 1) begin exp_ch = 0; frame++; end
      else exp_ch++;
    end
    if (frame_done) nframe_done++;
  end

  // command decoder on both Cmd lines
  logic [31:0] got [NN][$];
  for (genvar n = 0; n < NN; n++) begin : g_dec
    initial begin
      logic [31:0] w;
      forever begin
        @(negedge clk);
        if (rst_n && cmd_line[n] == 1'b0) begin
          for (int b = 31; b >= 0; b--) begin repeat (BDIV) @(negedge clk); w[b] = cmd_line[n]; end
          repeat (BDIV) @(negedge clk);
          checks++;
          if (cmd_line[n] !== 1'b1) failures++;
          got[n].push_back(w);
        end
      end
    end
  end

  logic [31:0] sent [NN][$];
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      chip(0);
      chip(1);
      begin
        for (int k = 0; k < 5; k++) begin
          automatic int n = k % 2;
          automatic logic [31:0] w = $urandom;
          @(negedge clk);
          while (!cmd_ready) @(negedge clk);
          cmd_valid = 1; cmd_nmic = 1'(n); cmd_word = w;
          sent[n].push_back(w);
          @(negedge clk); cmd_valid = 0;
        end
      end
    join
    repeat (500) @(negedge clk);
    checks++;
    if (frame != FRAMES || nframe_done != FRAMES) begin failures++; $display("frames %0d done %0d", frame, nframe_done); end
    checks++;
    if (sync_err != 1 || overflow_cnt != 0) begin failures++; $display("sync_err %0d ovf %0d", sync_err, overflow_cnt); end
    for (int n = 0; n < NN; n++) begin
      checks++;
      if (got[n] != sent[n]) begin failures++; $display("commands to chip %0d differ", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
