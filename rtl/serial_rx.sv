// serial_rx: receiver matching serial_tx (start bit 0, W bits MSB first,
// stop bit 1, DIV clocks per bit).
//
// Both ends of the NMIC link run from the same board clock, so no clock
// recovery is needed: on the falling edge of the start bit the receiver waits
// half a bit, checks the start bit is still low, then samples each data bit in
// the middle of its bit time. `valid` pulses for one clock with the word after
// the last data bit is sampled. A start bit that is high again at mid-bit is
// ignored as a glitch. Framing is this design's own choice.
module serial_rx #(
  parameter int unsigned W   = 17,
  parameter int unsigned DIV = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         line,
  output logic         valid,
  output logic [W-1:0] data
);
  localparam int unsigned DW = $clog2(DIV) + 1;
  localparam int unsigned BW = $clog2(W + 1);

  logic          busy_q;
  logic          line_q;
  logic [DW-1:0] div_q;
  logic [BW-1:0] bits_q;    // data bits still to sample
  logic          start_q;   // checking the start bit

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      line_q  <= 1'b1;
      div_q   <= '0;
      bits_q  <= '0;
      start_q <= 1'b0;
      valid   <= 1'b0;
      data    <= '0;
    end else begin
      line_q <= line;
      valid  <= 1'b0;
      if (!busy_q) begin
        if (line_q && !line) begin          // falling edge: start bit
          busy_q  <= 1'b1;
          start_q <= 1'b1;
          div_q   <= DW'((DIV > 1) ? DIV / 2 - 1 : 0);  // mid start bit
          bits_q  <= BW'(W);
        end
      end else if (div_q != '0) begin
        div_q <= div_q - 1'b1;
      end else if (start_q) begin
        start_q <= 1'b0;
        div_q   <= DW'(DIV - 1);
        if (line) busy_q <= 1'b0;           // glitch, not a start bit
      end else begin
        data   <= {data[W-2:0], line};
        bits_q <= bits_q - 1'b1;
        div_q  <= DW'(DIV - 1);
        if (bits_q == BW'(1)) begin
          valid  <= 1'b1;
          busy_q <= 1'b0;
        end
      end
    end
  end

endmodule
