// spi_master: full-duplex SPI master (mode 0, MSB first) linking the FPGA to
// the radio SoC.
//
// Each uplink byte accepted on `tx_valid/tx_ready` is shifted out on MOSI
// while a downlink byte is shifted in from MISO; that byte appears on
// `rx_valid/rx_byte` when the transfer ends. SCLK is low when idle, MOSI
// changes on the falling edge and MISO is sampled on the rising edge. Each
// SCLK half period lasts HALF clocks: HALF = 3 at 20.48 MHz gives 3.41 MHz,
// the nearest this clock divides to the 3.08 MHz of the paper. Chip select is
// held low while bytes follow each other and released for one half period
// after the last. Downlink bytes therefore arrive only while uplink data is
// flowing, which is always the case while streaming.
module spi_master #(
  parameter int unsigned HALF = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_valid,
  input  logic [7:0] tx_byte,
  output logic       tx_ready,
  output logic       rx_valid,
  output logic [7:0] rx_byte,
  output logic       sclk,
  output logic       mosi,
  input  logic       miso,
  output logic       cs_n
);
  localparam int unsigned HW = $clog2(HALF + 1);

  logic [7:0]    sh_q;
  logic [3:0]    bit_q;     // rising edges still to come
  logic [HW-1:0] hcnt_q;
  logic          busy_q;

  assign tx_ready = !busy_q;
  assign mosi     = sh_q[7];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q     <= '0;
      bit_q    <= '0;
      hcnt_q   <= '0;
      busy_q   <= 1'b0;
      sclk     <= 1'b0;
      cs_n     <= 1'b1;
      rx_valid <= 1'b0;
      rx_byte  <= '0;
    end else begin
      rx_valid <= 1'b0;
      if (!busy_q) begin
        if (tx_valid) begin
          busy_q <= 1'b1;
          cs_n   <= 1'b0;
          sh_q   <= tx_byte;
          bit_q  <= 4'd8;
          hcnt_q <= HW'(HALF - 1);
        end else if (hcnt_q != 0) begin
          hcnt_q <= hcnt_q - 1'b1;
        end else begin
          cs_n <= 1'b1;
        end
      end else if (hcnt_q != 0) begin
        hcnt_q <= hcnt_q - 1'b1;
      end else begin
        hcnt_q <= HW'(HALF - 1);
        if (!sclk) begin
          sclk    <= 1'b1;                       // rising: sample MISO
          rx_byte <= {rx_byte[6:0], miso};
          bit_q   <= bit_q - 1'b1;
        end else begin
          sclk <= 1'b0;                          // falling: next bit
          sh_q <= {sh_q[6:0], 1'b0};
          if (bit_q == 0) begin
            busy_q   <= 1'b0;
            rx_valid <= 1'b1;
          end
        end
      end
    end
  end

endmodule
