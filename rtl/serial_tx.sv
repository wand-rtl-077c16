// serial_tx: one-wire serialiser used on both directions of the NMIC link.
//
// A word is sent as a start bit (0), W data bits MSB first and a stop bit
// (1); the line idles at 1. Every bit lasts DIV clocks, so with the 20.48 MHz
// board clock and DIV = 10 the line runs at 2.048 Mbps. `valid`/`ready` is a
// plain handshake: the word is taken in the clock where both are high, and
// `ready` stays low until its stop bit has been sent (W + 2 bit times).
//
// The paper gives the interface's rate (2 Mbps) and that it carries samples up
// and commands down over the NMIC's Data and Cmd pins; the framing is this
// design's own.
module serial_tx #(
  parameter int unsigned W   = 17,
  parameter int unsigned DIV = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  input  logic [W-1:0] data,
  output logic         ready,
  output logic         line
);
  localparam int unsigned DW = $clog2(DIV);
  localparam int unsigned BW = $clog2(W + 2);

  logic [W:0]    sh_q;        // start bit + data
  logic [BW-1:0] bits_q;      // bits still to send incl. stop
  logic [DW-1:0] div_q;
  logic          busy_q;

  assign ready = !busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q   <= '1;
      bits_q <= '0;
      div_q  <= '0;
      busy_q <= 1'b0;
      line   <= 1'b1;
    end else if (!busy_q) begin
      line <= 1'b1;
      if (valid) begin
        busy_q <= 1'b1;
        sh_q   <= {1'b0, data};
        bits_q <= BW'(W + 2);
        div_q  <= '0;
      end
    end else begin
      if (div_q == '0) begin
        line   <= (bits_q == BW'(1)) ? 1'b1 : sh_q[W];
        sh_q   <= {sh_q[W-1:0], 1'b1};
        bits_q <= bits_q - 1'b1;
      end
      if (div_q == DW'(DIV - 1)) begin
        div_q <= '0;
        if (bits_q == '0) busy_q <= 1'b0;
      end else begin
        div_q <= div_q + 1'b1;
      end
    end
  end

endmodule
