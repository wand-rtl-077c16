// System testbench of wand_top with a shortened frame: 64 conversions of 52
// clocks (3328 clocks), 2 clocks per link bit, 2-clock SPI bit, 26-clock
// stimulator tick and a 16-point maximum FFT. See tb_wand_body.svh for the
// models and the scenario.
module tb_wand_top;
  import wand_pkg::*;
  localparam int OSRN = 64, CDIV = 52, TDIV = 26, BDIV = 2, SPIH = 1;
  localparam int FRAMES_OL = 12, FRAMES_CL = 70;
  initial begin
    #50000000;
    $display("watchdog");
    $display("TB_RESULT checks=0 failures=1"); $finish;
  end
`include "tb_wand_body.svh"
  wand_top #(.OSR_N(OSRN), .CONV_DIVN(CDIV), .TICK_DIVN(TDIV), .BIT_DIVN(BDIV),
             .SPI_HALF(SPIH), .LOG2_NM(4)) dut (.*);
endmodule
