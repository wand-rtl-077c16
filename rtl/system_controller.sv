// system_controller: decodes downlink bytes from the radio into the device
// configuration and into NMIC commands.
//
// Downlink bytes form 5-byte records: an address byte and a 32-bit value, MSB
// first. A zero byte where an address is expected is idle fill and skipped.
//   0x01 / 0x02   NMIC command word for NMIC 0 / NMIC 1 (wand_pkg::nmic_cmd_t),
//                 queued through `cmd_*` (held until accepted)
//   0x10          [0] stream_closed [1] cancel_en [4:2] n_cancel [8:5] log2n
//                 [15:9] ctrl_ch [22:16] stim_ch [24:23] cl_mode
//                 [26:25] sig_use [28:27] sig_deriv [29] combine_or [30] trig_nmic
//   0x11          [3:0] trig_mask [11:4] dead_calcs
//   0x12 / 0x13   band 0 / 1: [10:0] k_lo [26:16] k_hi
//   0x14 / 0x15   threshold 0 / 1 (signed)
//   0x16          [15:0] rand_min_ms [31:16] rand_max_ms
//   0x20          stream selection: [14:8] table index, [6:0] channel
// Other addresses are ignored and counted in `bad_cnt`. A record arriving
// while a previous NMIC command still waits for the link is dropped and
// counted too.
//
// Reset state: open-loop streaming of channels 0..95, cancellation on with
// 2 samples per artifact, 512-sample window, beta band bins 7..15
// (13.7-29.3 Hz), signal 0 = power, signal 1 = derivative, AND, dead time 3,
// closed loop off. The paper's GUI configures all of this through the radio;
// the register map and record format are this design's own.
module system_controller
  import wand_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_valid,
  input  logic [7:0]  rx_byte,
  output host_cfg_t   cfg,
  output logic        sel_we,
  output logic [6:0]  sel_idx,
  output logic [6:0]  sel_ch,
  output logic        cmd_valid,
  output logic        cmd_nmic,
  output logic [31:0] cmd_word,
  input  logic        cmd_ready,
  output logic [15:0] bad_cnt
);
  logic [2:0]  n_q;         // bytes of the record received
  logic [7:0]  addr_q;
  logic [31:0] val_q;
  logic        rec_done;
  logic [31:0] v;

  assign v        = {val_q[23:0], rx_byte};
  assign rec_done = rx_valid && n_q == 3'd4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q       <= '0;
      addr_q    <= '0;
      val_q     <= '0;
      sel_we    <= 1'b0;
      sel_idx   <= '0;
      sel_ch    <= '0;
      cmd_valid <= 1'b0;
      cmd_nmic  <= 1'b0;
      cmd_word  <= '0;
      bad_cnt   <= '0;
      cfg                <= '0;
      cfg.cancel_en      <= 1'b1;
      cfg.n_cancel       <= 3'd2;
      cfg.log2n          <= 4'd9;
      cfg.cl_mode        <= CL_OFF;
      cfg.sig_use        <= 2'b11;
      cfg.sig_deriv      <= 2'b10;
      cfg.k_lo           <= {11'd7, 11'd7};
      cfg.k_hi           <= {11'd15, 11'd15};
      cfg.dead_calcs     <= 8'd3;
      cfg.rand_min_ms    <= 16'd500;
      cfg.rand_max_ms    <= 16'd1500;
      cfg.trig_mask      <= 4'b0001;
    end else begin
      sel_we <= 1'b0;
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (rx_valid) begin
        if (n_q == 0) begin
          if (rx_byte != 8'h00) begin
            addr_q <= rx_byte;
            n_q    <= 3'd1;
          end
        end else begin
          val_q <= v;
          n_q   <= (n_q == 3'd4) ? 3'd0 : n_q + 1'b1;
        end
      end
      if (rec_done) begin
        unique case (addr_q)
          8'h01, 8'h02: begin
            if (cmd_valid && !cmd_ready) bad_cnt <= bad_cnt + 1'b1;
            else begin
              cmd_valid <= 1'b1;
              cmd_nmic  <= (addr_q == 8'h02);
              cmd_word  <= v;
            end
          end
          8'h10: begin
            cfg.stream_closed <= v[0];
            cfg.cancel_en     <= v[1];
            cfg.n_cancel      <= v[4:2];
            cfg.log2n         <= v[8:5];
            cfg.ctrl_ch       <= v[15:9];
            cfg.stim_ch       <= v[22:16];
            cfg.cl_mode       <= cl_mode_e'(v[24:23]);
            cfg.sig_use       <= v[26:25];
            cfg.sig_deriv     <= v[28:27];
            cfg.combine_or    <= v[29];
            cfg.trig_nmic     <= v[30];
          end
          8'h11: begin
            cfg.trig_mask  <= v[3:0];
            cfg.dead_calcs <= v[11:4];
          end
          8'h12: begin cfg.k_lo[0] <= v[10:0]; cfg.k_hi[0] <= v[26:16]; end
          8'h13: begin cfg.k_lo[1] <= v[10:0]; cfg.k_hi[1] <= v[26:16]; end
          8'h14: cfg.thresh[0] <= v;
          8'h15: cfg.thresh[1] <= v;
          8'h16: begin cfg.rand_min_ms <= v[15:0]; cfg.rand_max_ms <= v[31:16]; end
          8'h20: begin sel_we <= 1'b1; sel_idx <= v[14:8]; sel_ch <= v[6:0]; end
          default: bad_cnt <= bad_cnt + 1'b1;
        endcase
      end
    end
  end

endmodule
