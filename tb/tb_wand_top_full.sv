// System testbench of wand_top at its real size and rates: 20.48 MHz clock,
// 1 ms frames of 1024 conversions, 2.048 Mbps NMIC link, 3.41 MHz SPI,
// 64 kHz stimulator tick, 2048-point FFT capacity (the window is set to 16
// points over the radio so that several calculations fit in a short run).
// See tb_wand_body.svh for the models and the scenario.
module tb_wand_top_full;
  import wand_pkg::*;
  localparam int OSRN = OSR, CDIV = CONV_DIV, TDIV = TICK_DIV, BDIV = BIT_DIV, SPIH = 3;
  localparam int FRAMES_OL = 12, FRAMES_CL = 60;
  initial begin
    #2000000000;
    $display("watchdog");
    $display("TB_RESULT checks=0 failures=1"); $finish;
  end
`include "tb_wand_body.svh"
  wand_top dut (.*);
endmodule
