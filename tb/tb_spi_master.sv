// Testbench for spi_master (HALF = 3): a mode-0 slave model records MOSI on
// rising SCLK edges and returns its own bytes on MISO. 40 random bytes are sent
// back to back; sent and returned bytes and the SCLK period (2 * HALF clocks)
// are checked.
module tb_spi_master;
  localparam int HALF = 3, NB = 40;
  logic clk = 0, rst_n = 0, tx_valid = 0, rx_valid, sclk, mosi, miso, cs_n, tx_ready;
  logic [7:0] tx_byte = 0, rx_byte;
  int checks = 0, failures = 0;
  spi_master #(.HALF(HALF)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // slave
  logic [7:0] s_in, s_out [NB], m_bytes [NB];
  int s_bits = 0, s_cnt = 0, s_ocnt = 0;
  logic [7:0] s_sh;
  longint last_rise = -1;
  always @(posedge sclk) begin
    if (cs_n) begin failures++; end
    if (last_rise >= 0) begin
      checks++;
      if ($time - last_rise != 2 * HALF * 10 && $time - last_rise != 2 * HALF * 10 + 10) begin
        // gap between bytes may add one clock
        if (s_bits != 0) failures++;
      end
    end
    last_rise = $time;
    s_in = {s_in[6:0], mosi};
    s_bits++;
    if (s_bits == 8) begin
      checks++;
      if (s_in != m_bytes[s_cnt]) begin failures++; $display("mosi byte %0d %h exp %h", s_cnt, s_in, m_bytes[s_cnt]); end
      s_cnt++; s_bits = 0;
    end
  end
  // MISO: next bit after each falling edge; first bit when a byte starts
  always @(negedge sclk or negedge cs_n) begin
    if (s_bits == 0 && s_ocnt < NB) begin s_sh = s_out[s_ocnt]; s_ocnt++; end
    miso = s_sh[7 - s_bits];
  end
  int rcnt = 0;
  always @(posedge clk) if (rx_valid) begin
    checks++;
    if (rx_byte != s_out[rcnt]) begin failures++; $display("miso byte %0d %h exp %h", rcnt, rx_byte, s_out[rcnt]); end
    rcnt++;
  end
  initial begin
    foreach (s_out[i]) begin s_out[i] = 8'($urandom); m_bytes[i] = 8'($urandom); end
    s_sh = 0; miso = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NB; i++) begin
      @(negedge clk); tx_valid = 1; tx_byte = m_bytes[i];
      do @(posedge clk); while (!tx_ready);
      @(negedge clk); tx_valid = 0;
    end
    repeat (100) @(negedge clk);
    checks++;
    if (s_cnt != NB || rcnt != NB || !cs_n) begin failures++; $display("counts %0d %0d", s_cnt, rcnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
