// sync_fifo: single-clock first-in first-out buffer, DEPTH words of W bits.
//
// Write when `wr_en` and not `full`; read when `rd_en` and not `empty`. The
// head word is on `rd_data` whenever `empty` is low (first-word fall-through).
// A write to a full FIFO is dropped and raises `overflow` for one clock. Used
// as the hardware FIFOs of the NMIC link.
module sync_fifo #(
  parameter int unsigned W     = 17,
  parameter int unsigned DEPTH = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic         overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp_q, rp_q;

  assign empty   = (wp_q == rp_q);
  assign full    = (wp_q[AW-1:0] == rp_q[AW-1:0]) && (wp_q[AW] != rp_q[AW]);
  assign rd_data = mem[rp_q[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp_q[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q     <= '0;
      rp_q     <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= wr_en && full;
      if (wr_en && !full)  wp_q <= wp_q + 1'b1;
      if (rd_en && !empty) rp_q <= rp_q + 1'b1;
    end
  end

`ifndef SYNTHESIS
  // a read of an empty FIFO is a caller error
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
`endif

endmodule
