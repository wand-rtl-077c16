// artifact_canceller: real-time removal of stimulation artifacts by linear
// interpolation over the samples a stimulation pulse corrupts.
//
// Each channel keeps the last DEPTH = 8 samples (one per 1 ms frame). Samples
// arrive as a channel-serial stream; for each one the channel's line is read,
// shifted by one, possibly rewritten and written back in the same clock, and
// the sample shifted out (DEPTH frames old) is emitted. The latency is
// therefore exactly DEPTH frames (8 ms) whether cancellation is on or off.
//
// Per channel: the first flagged sample opens an artifact, and the clean
// sample before it is kept as `pre`. The window covers `n_cancel` samples
// (ceil(pulse length in ms) + 1, computed by wand_pkg::cancel_len), and is
// extended for as long as samples stay flagged, up to DEPTH - 1 samples. The
// first sample after the window is `post`; when it arrives the L samples of
// the window, all still in the line, are replaced by
//   pre + (post - pre) * k / (L + 1),   k = 1..L (integer division toward 0)
// and marked `interp`. Because `n_cancel` is fixed per pulse, samples that sit
// in the shorting phase (not flagged by the NMIC) are also replaced.
//
// Interface: `in_valid/in_ch/in_smp` one sample per clock at most;
// `out_valid/out_ch/out_smp/out_interp` one clock later. `art_cnt` counts
// cancelled artifacts, `ext_cnt` windows that were longer than `n_cancel`.
//
// From the paper: 8-frame buffer, detection on the first flagged frame,
// interpolation between the pre-artifact sample and the sample after the
// maximum artifact duration, up to 7 samples, 8 ms delay. Own choice: the
// extension of the window while flags persist (the paper also says cancelling
// happens "once the first clean frame is received"), the rounding, and
// keeping the original flag bit on replaced samples.
module artifact_canceller
  import wand_pkg::*;
#(
  parameter int unsigned NCH   = NUM_CH,
  parameter int unsigned DEPTH = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cancel_en,
  input  logic [2:0]             n_cancel,
  input  logic                   in_valid,
  input  logic [$clog2(NCH)-1:0] in_ch,
  input  sample_t                in_smp,
  output logic                   out_valid,
  output logic [$clog2(NCH)-1:0] out_ch,
  output sample_t                out_smp,
  output logic                   out_interp,
  output logic [15:0]            art_cnt,
  output logic [15:0]            ext_cnt
);
  localparam int unsigned LW = $clog2(DEPTH);

  typedef struct packed {
    logic    interp;
    sample_t s;
  } entry_t;

  typedef struct packed {
    logic             active;
    logic [LW-1:0]    len;      // samples in the window so far
    logic [ADC_W-1:0] pre;
  } chan_st_t;

  entry_t   line_q [NCH][DEPTH];
  chan_st_t st_q   [NCH];

  entry_t   cur [DEPTH];
  entry_t   nxt [DEPTH];
  chan_st_t st, st_n;
  logic     fin;
  logic [2:0] ncan;

  function automatic logic [ADC_W-1:0] interp(input logic [ADC_W-1:0] pre,
                                              input logic [ADC_W-1:0] post,
                                              input int k, input int den);
    int diff;
    diff = int'({1'b0, post}) - int'({1'b0, pre});
    return ADC_W'(int'({1'b0, pre}) + (diff * k) / den);
  endfunction

  assign ncan = (n_cancel == 3'd0) ? 3'd1 : n_cancel;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) cur[i] = line_q[in_ch][i];
    st     = st_q[in_ch];
    nxt[0] = '{interp: 1'b0, s: in_smp};
    for (int i = 1; i < DEPTH; i++) nxt[i] = cur[i-1];
    st_n = st;
    fin  = 1'b0;
    if (!st.active) begin
      if (in_smp.flag && cancel_en) begin
        st_n.active = 1'b1;
        st_n.len    = LW'(1);
        st_n.pre    = cur[0].s.value;
      end
    end else if ((32'(st.len) < 32'(ncan) || in_smp.flag) && 32'(st.len) < DEPTH - 1) begin
      st_n.len = st.len + 1'b1;
    end else begin
      fin         = 1'b1;
      st_n.active = 1'b0;
      for (int i = 1; i < DEPTH; i++) begin
        if (i <= 32'(st.len)) begin
          nxt[i].s.value = interp(st.pre, in_smp.value, 32'(st.len) + 1 - i, 32'(st.len) + 1);
          nxt[i].interp  = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        st_q[c] <= '0;
        for (int i = 0; i < DEPTH; i++) line_q[c][i] <= '0;
      end
      out_valid  <= 1'b0;
      out_ch     <= '0;
      out_smp    <= '0;
      out_interp <= 1'b0;
      art_cnt    <= '0;
      ext_cnt    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < DEPTH; i++) line_q[in_ch][i] <= nxt[i];
        st_q[in_ch] <= st_n;
        out_ch     <= in_ch;
        out_smp    <= cur[DEPTH-1].s;
        out_interp <= cur[DEPTH-1].interp;
        if (fin) art_cnt <= art_cnt + 1'b1;
        if (fin && 32'(st.len) > 32'(ncan)) ext_cnt <= ext_cnt + 1'b1;
      end
    end
  end

endmodule
