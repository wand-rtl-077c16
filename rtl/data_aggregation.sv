// data_aggregation: builds the uplink radio packets, one per 1 ms frame.
//
// The cancelled 128-channel frame is written into one half of a ping-pong
// frame buffer while the other half is being sent. When the last channel of a
// frame arrives, the half just filled is handed to the packet sender if it is
// idle; if the previous packet is still being sent the new frame is dropped
// (counted in `drop_cnt`) and its half is refilled by the next frame.
//
// Packet format (bytes):
//   0      0xA5 sync
//   1      frame counter (mod 256)
//   2      mode: 0 = open-loop, 1 = closed-loop
//   open-loop:   NSEL samples, 2 bytes each MSB first, channels taken from a
//                selection table (`sel_we/sel_idx/sel_ch`, reset to 0..NSEL-1)
//                -> 3 + 192 = 195 bytes per ms = 1.56 Mbps
//   closed-loop: control-channel sample, stimulation-channel sample (2 bytes
//                each), then the two control values of the last biomarker
//                calculation, bits 47:16, 4 bytes each -> 15 bytes
// Each 16-bit sample keeps its artifact flag in bit 15. Bytes leave on a
// valid/ready stream (`tx_*`) to the radio SPI.
//
// From the paper: one packet holds 1 ms of all streamed channels; open-loop
// mode streams 96 channels; closed-loop mode streams the control channel, one
// stimulation channel and the computed biomarker; ~1.6 Mbps usable radio rate.
// Own choice: the packet layout, and sending the two control values instead of
// the full power spectrum (the spectrum is available on biomarker_fft's psd
// port but is not packetised).
module data_aggregation
  import wand_pkg::*;
#(
  parameter int unsigned NCH   = NUM_CH,
  parameter int unsigned NSELN = NSEL
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     stream_closed,
  input  logic [$clog2(NCH)-1:0]   ctrl_ch,
  input  logic [$clog2(NCH)-1:0]   stim_ch,
  input  logic signed [1:0][PWR_W:0] ctrl_val,
  input  logic                     sel_we,
  input  logic [$clog2(NSELN)-1:0] sel_idx,
  input  logic [$clog2(NCH)-1:0]   sel_ch,
  input  logic                     in_valid,
  input  logic [$clog2(NCH)-1:0]   in_ch,
  input  sample_t                  in_smp,
  output logic                     tx_valid,
  output logic [7:0]               tx_byte,
  input  logic                     tx_ready,
  output logic [15:0]              pkt_cnt,
  output logic [15:0]              drop_cnt
);
  localparam int unsigned CW = $clog2(NCH);
  localparam int unsigned PW = $clog2(3 + 2 * NSELN + 1);

  logic [15:0]   fbuf [2][NCH];
  logic [CW-1:0] sel  [NSELN];
  logic          wb_q;                // half being written
  logic          busy_q;
  logic          rb_q;                // half being sent
  logic          mode_q;
  logic [PW-1:0] pos_q, plen;
  logic [7:0]    fcnt_q;              // frames received
  logic [7:0]    pfc_q;               // frame number of the packet being sent
  logic [1:0][31:0] cv_q;

  logic          frame_end;
  assign frame_end = in_valid && in_ch == CW'(NCH - 1);

  always_ff @(posedge clk) if (in_valid) fbuf[wb_q][in_ch] <= in_smp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSELN; i++) sel[i] <= CW'(i);
    end else if (sel_we) begin
      sel[sel_idx] <= sel_ch;
    end
  end

  assign plen = mode_q ? PW'(15) : PW'(3 + 2 * NSELN);

  // byte at the current position
  logic [15:0] word;
  logic [PW-1:0] off;
  always_comb begin
    off  = pos_q - PW'(3);
    word = '0;
    tx_byte = 8'h00;
    if (pos_q == 0)      tx_byte = 8'hA5;
    else if (pos_q == 1) tx_byte = pfc_q;
    else if (pos_q == 2) tx_byte = {7'd0, mode_q};
    else if (!mode_q) begin
      word    = fbuf[rb_q][sel[off[PW-1:1]]];
      tx_byte = off[0] ? word[7:0] : word[15:8];
    end else begin
      if (off < 4) begin
        word    = fbuf[rb_q][off[1] ? stim_ch : ctrl_ch];
        tx_byte = off[0] ? word[7:0] : word[15:8];
      end else begin
        tx_byte = cv_q[(off - 4) >> 2][8 * (3 - ((off - 4) & 3)) +: 8];
      end
    end
  end
  assign tx_valid = busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_q     <= 1'b0;
      rb_q     <= 1'b0;
      busy_q   <= 1'b0;
      mode_q   <= 1'b0;
      pos_q    <= '0;
      fcnt_q   <= '0;
      pfc_q    <= '0;
      cv_q     <= '0;
      pkt_cnt  <= '0;
      drop_cnt <= '0;
    end else begin
      if (busy_q && tx_ready) begin
        if (pos_q == plen - 1'b1) begin
          busy_q  <= 1'b0;
          pkt_cnt <= pkt_cnt + 1'b1;
        end
        pos_q <= pos_q + 1'b1;
      end
      if (frame_end) begin
        fcnt_q <= fcnt_q + 1'b1;
        if (!busy_q || (tx_ready && pos_q == plen - 1'b1)) begin
          busy_q <= 1'b1;
          rb_q   <= wb_q;
          wb_q   <= !wb_q;
          pos_q  <= '0;
          pfc_q  <= fcnt_q;
          mode_q <= stream_closed;
          for (int c = 0; c < 2; c++) cv_q[c] <= ctrl_val[c][47:16];
        end else begin
          drop_cnt <= drop_cnt + 1'b1;
        end
      end
    end
  end

endmodule
