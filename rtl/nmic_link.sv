// nmic_link: FPGA side of the bidirectional interface to the NMICs.
//
// Uplink: each NMIC's Data line goes through a serial_rx into its own FIFO.
// A drain state machine then reads the FIFOs in order, NMIC 0 channels 0..63
// followed by NMIC 1 channels 0..63, and emits one sample per clock as a
// stream (`smp_valid`, global channel number `smp_ch`, `smp`), so downstream
// logic always sees whole 128-channel frames in channel order. `frame_done`
// pulses with the last sample of a frame. The first word of each chip's frame
// must carry the start-of-frame marker; words received while waiting for it are
// dropped and counted in `sync_err` (re-alignment after a lost word).
//
// Downlink: commands (`cmd_valid`, target `cmd_nmic`, 32-bit word) are queued
// in a per-NMIC FIFO and sent on that chip's Cmd line by a serial_tx.
//
// The FIFO depth of 128 words holds a whole chip frame, so NMIC 1 can run
// while NMIC 0 is drained. From the paper: a custom 2 Mbps interface in the
// FPGA fabric that aggregates data and commands in hardware FIFOs. The
// ordering and framing are this design's own.
module nmic_link
  import wand_pkg::*;
#(
  parameter int unsigned NN        = NUM_NMIC,
  parameter int unsigned NCH       = NMIC_CH,
  parameter int unsigned BIT_DIVN  = BIT_DIV,
  parameter int unsigned FIFO_D    = 128
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NN-1:0]         data_line,
  output logic [NN-1:0]         cmd_line,
  // sample stream
  output logic                  smp_valid,
  output logic [$clog2(NN*NCH)-1:0] smp_ch,
  output sample_t               smp,
  output logic                  frame_done,
  output logic [15:0]           sync_err,
  output logic [15:0]           overflow_cnt,
  // commands
  input  logic                  cmd_valid,
  input  logic [$clog2(NN)-1:0] cmd_nmic,
  input  logic [31:0]           cmd_word,
  output logic                  cmd_ready
);
  localparam int unsigned LW  = $bits(link_word_t);
  localparam int unsigned NW  = (NN > 1) ? $clog2(NN) : 1;
  localparam int unsigned IW  = $clog2(NCH);

  logic [NN-1:0]  rx_v, f_empty, f_full, f_ovf, f_rd;
  logic [LW-1:0]  rx_d   [NN];
  logic [LW-1:0]  f_dout [NN];

  logic [NN-1:0]  c_empty, c_full, c_ovf, c_rd, tx_ready;
  logic [31:0]    c_dout [NN];

  for (genvar n = 0; n < NN; n++) begin : g_nmic
    serial_rx #(.W(LW), .DIV(BIT_DIVN)) u_rx (
      .clk, .rst_n, .line(data_line[n]), .valid(rx_v[n]), .data(rx_d[n])
    );
    sync_fifo #(.W(LW), .DEPTH(FIFO_D)) u_fifo (
      .clk, .rst_n, .wr_en(rx_v[n]), .wr_data(rx_d[n]), .rd_en(f_rd[n]),
      .rd_data(f_dout[n]), .empty(f_empty[n]), .full(f_full[n]), .overflow(f_ovf[n])
    );
    sync_fifo #(.W(32), .DEPTH(8)) u_cfifo (
      .clk, .rst_n, .wr_en(cmd_valid && cmd_ready && cmd_nmic == NW'(n)), .wr_data(cmd_word),
      .rd_en(c_rd[n]), .rd_data(c_dout[n]), .empty(c_empty[n]), .full(c_full[n]),
      .overflow(c_ovf[n])
    );
    serial_tx #(.W(32), .DIV(BIT_DIVN)) u_tx (
      .clk, .rst_n, .valid(!c_empty[n]), .data(c_dout[n]), .ready(tx_ready[n]),
      .line(cmd_line[n])
    );
    assign c_rd[n] = !c_empty[n] && tx_ready[n];
  end

  assign cmd_ready = !c_full[cmd_nmic];

  // ---------------- drain: NMIC 0 then NMIC 1, channel order ----------------
  logic [NW-1:0] cur_q;
  logic [IW-1:0] idx_q;
  link_word_t    head;
  logic          take;
  logic [IW-1:0] idx_w;     // channel of the head word

  assign head = link_word_t'(f_dout[cur_q]);
  assign take = !f_empty[cur_q];
  assign idx_w = head.sof ? '0 : idx_q;

  always_comb begin
    f_rd = '0;
    f_rd[cur_q] = take;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_q        <= '0;
      idx_q        <= '0;
      smp_valid    <= 1'b0;
      smp_ch       <= '0;
      smp          <= '0;
      frame_done   <= 1'b0;
      sync_err     <= '0;
      overflow_cnt <= '0;
    end else begin
      smp_valid  <= 1'b0;
      frame_done <= 1'b0;
      if (|f_ovf) overflow_cnt <= overflow_cnt + 1'b1;
      if (take) begin
        if (!head.sof && idx_q == '0) begin
          // waiting for a start of frame: drop the word
          sync_err <= sync_err + 1'b1;
        end else begin
          if (head.sof && idx_q != '0) sync_err <= sync_err + 1'b1;  // short frame
          smp_valid <= 1'b1;
          smp_ch    <= {cur_q, idx_w};
          smp       <= head.smp;
          if (idx_w == IW'(NCH - 1)) begin
            idx_q <= '0;
            if (cur_q == NW'(NN - 1)) begin
              cur_q      <= '0;
              frame_done <= 1'b1;
            end else begin
              cur_q <= cur_q + 1'b1;
            end
          end else begin
            idx_q <= idx_w + 1'b1;
          end
        end
      end
    end
  end

endmodule
