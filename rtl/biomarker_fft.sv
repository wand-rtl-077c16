// biomarker_fft: spectral biomarker of one recording channel: windowed,
// demeaned fixed-point FFT, magnitude squared, and the power integrated over
// two programmable bands (the two control signals of the closed-loop policy).
//
// Samples of the control channel `ctrl_ch` are picked out of the cancelled
// sample stream into a ring of NMAX = 2048 samples. The window length is
// N = 2^log2n (16..2048); a calculation starts when at least N samples have
// been seen and N/2 new ones have arrived since the last start, so successive
// windows overlap by N/2 (with N = 512 at 1 kS/s: one result every 256 ms).
//
// A calculation runs in four passes, one memory word per clock:
//   SUM   N clocks      add the window, mean = sum / N (a shift)
//   LOAD  N clocks      x = (v - mean) * 64 written to bit-reversed address
//   FFT   log2(N)*N/2   in-place radix-2 decimation-in-time butterflies, one
//                       per clock, each output halved (a 1/N overall scale,
//                       so the 32-bit data path cannot overflow)
//   MAG   N/2 clocks    p = re^2 + im^2 for bins 0..N/2-1, streamed on
//                       `psd_*` and summed into band_pwr[b] for
//                       k_lo[b] <= bin <= k_hi[b]
// `calc_done` pulses with the band powers valid. For N = 2048 this takes
// about 16 400 clocks, inside the 20 480-clock sample period, so the ring
// slot being overwritten by a new sample is never still needed.
//
// Twiddle factors are Q15, cos and sin of 2*pi*k/NMAX, computed at elaboration
// by a constant function; windows shorter than NMAX step through the table.
//
// From the paper: power spectrum of buffered windows by fixed-point FFT and
// magnitude squared, window demeaned and scaled by 64, N any power of 2 from 16
// to 2048, N/2 overlap, band power over a frequency band. Own choice: radix-2
// in-place architecture, 32-bit data, halving per stage, band limits given
// in bins (bin k is k * 1000 / N Hz), no window function (none is mentioned).
module biomarker_fft
  import wand_pkg::*;
#(
  parameter int unsigned NCH     = NUM_CH,
  parameter int unsigned LOG2_NM = LOG2_NMAX,
  parameter int unsigned DW      = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [$clog2(NCH)-1:0]    in_ch,
  input  sample_t                   in_smp,
  input  logic [$clog2(NCH)-1:0]    ctrl_ch,
  input  logic [3:0]                log2n,
  input  logic [1:0][BIN_W-1:0]     k_lo,
  input  logic [1:0][BIN_W-1:0]     k_hi,
  output logic                      busy,
  output logic                      calc_done,
  output logic [1:0][PWR_W-1:0]     band_pwr,
  output logic                      psd_valid,
  output logic [BIN_W-1:0]          psd_bin,
  output logic [PWR_W-1:0]          psd_val,
  output logic [15:0]               overrun_cnt
);
  localparam int unsigned NM = 1 << LOG2_NM;
  localparam int unsigned AW = LOG2_NM;

  typedef logic signed [15:0] q15_t;
  typedef logic signed [DW-1:0] d_t;

  function automatic logic [NM/2-1:0][15:0] gen_tw(input bit is_sin);
    logic [NM/2-1:0][15:0] t;
    real a, r;
    for (int k = 0; k < NM / 2; k++) begin
      a = 2.0 * 3.14159265358979323846 * real'(k) / real'(NM);
      r = (is_sin ? $sin(a) : $cos(a)) * 32767.0;
      t[k] = 16'((r >= 0.0) ? $rtoi(r + 0.5) : -$rtoi(-r + 0.5));
    end
    return t;
  endfunction

  localparam logic [NM/2-1:0][15:0] COS_T = gen_tw(1'b0);
  localparam logic [NM/2-1:0][15:0] SIN_T = gen_tw(1'b1);

  // ---------------- sample ring ----------------
  logic [ADC_W-1:0] ring [NM];
  logic [AW-1:0]    wp_q;
  logic [AW:0]      seen_q;      // samples seen, saturates at NM
  logic [AW:0]      fresh_q;     // new samples since the last start
  logic             take, want;
  logic [AW:0]      n_len;

  assign n_len = (AW+1)'(1) << log2n;
  assign take  = in_valid && in_ch == ctrl_ch;
  assign want  = seen_q >= n_len && fresh_q >= (n_len >> 1);

  always_ff @(posedge clk) if (take) ring[wp_q] <= in_smp.value;

  // ---------------- work memory ----------------
  d_t re [NM];
  d_t im [NM];

  typedef enum logic [2:0] {S_IDLE, S_SUM, S_LOAD, S_FFT, S_MAG} state_e;
  state_e st_q;

  logic [AW-1:0]     base_q;    // ring index of the window's first sample
  logic [AW:0]       i_q;       // pass counter
  logic [3:0]        stage_q;
  logic [ADC_W+AW:0] sum_q;
  logic [ADC_W-1:0]  mean_q;
  logic [AW-1:0]     rd_idx;

  assign rd_idx = base_q + i_q[AW-1:0];

  // bit reverse of i over log2n bits
  function automatic logic [AW-1:0] bitrev(input logic [AW-1:0] i, input logic [3:0] n);
    logic [AW-1:0] r;
    for (int b = 0; b < AW; b++) r[b] = i[AW-1-b];
    return r >> (AW - 32'(n));
  endfunction

  // butterfly addressing
  logic [AW-1:0] half, jj, ia, ib, kw;
  d_t            ar, ai, br, bi;
  logic signed [DW+16:0] pr, pi;
  d_t            tr, ti;
  q15_t          wc, ws;

  always_comb begin
    half = AW'(1) << stage_q;
    jj   = i_q[AW-1:0] & (half - 1'b1);
    ia   = ((i_q[AW-1:0] >> stage_q) << (stage_q + 1)) | jj;
    ib   = ia | half;
    kw   = jj << (AW - 1 - 32'(stage_q));
    wc   = q15_t'(COS_T[kw[AW-2:0]]);
    ws   = q15_t'(SIN_T[kw[AW-2:0]]);
    ar = re[ia]; ai = im[ia];
    br = re[ib]; bi = im[ib];
    // t = b * (cos - j sin)
    pr = (DW+17)'(br * wc) + (DW+17)'(bi * ws);
    pi = (DW+17)'(bi * wc) - (DW+17)'(br * ws);
    tr = d_t'(pr >>> 15);
    ti = d_t'(pi >>> 15);
  end

  logic [PWR_W-1:0] mag;
  d_t               mr, mi;
  always_comb begin
    mr  = re[i_q[AW-1:0]];
    mi  = im[i_q[AW-1:0]];
    mag = PWR_W'(mr * mr) + PWR_W'(mi * mi);
  end

  d_t x_in;
  assign x_in = d_t'((int'({1'b0, ring[rd_idx]}) - int'({1'b0, mean_q})) * 64);

  always_ff @(posedge clk) begin
    if (st_q == S_LOAD) begin
      re[bitrev(i_q[AW-1:0], log2n)] <= x_in;
      im[bitrev(i_q[AW-1:0], log2n)] <= '0;
    end else if (st_q == S_FFT) begin
      re[ia] <= (ar + tr) >>> 1;
      im[ia] <= (ai + ti) >>> 1;
      re[ib] <= (ar - tr) >>> 1;
      im[ib] <= (ai - ti) >>> 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q        <= '0;
      seen_q      <= '0;
      fresh_q     <= '0;
      st_q        <= S_IDLE;
      base_q      <= '0;
      i_q         <= '0;
      stage_q     <= '0;
      sum_q       <= '0;
      mean_q      <= '0;
      calc_done   <= 1'b0;
      band_pwr    <= '0;
      psd_valid   <= 1'b0;
      psd_bin     <= '0;
      psd_val     <= '0;
      overrun_cnt <= '0;
    end else begin
      calc_done <= 1'b0;
      psd_valid <= 1'b0;
      if (take) begin
        wp_q <= wp_q + 1'b1;
        if (seen_q < (AW+1)'(NM)) seen_q <= seen_q + 1'b1;
        if (fresh_q < (AW+1)'(NM)) fresh_q <= fresh_q + 1'b1;
      end
      unique case (st_q)
        S_IDLE: if (want) begin
          st_q    <= S_SUM;
          base_q  <= wp_q - n_len[AW-1:0];
          fresh_q <= (AW+1)'(take);
          i_q     <= '0;
          sum_q   <= '0;
        end
        S_SUM: begin
          sum_q <= sum_q + (ADC_W+AW+1)'(ring[rd_idx]);
          if (i_q == n_len - 1'b1) begin
            st_q   <= S_LOAD;
            i_q    <= '0;
            mean_q <= ADC_W'((sum_q + (ADC_W+AW+1)'(ring[rd_idx])) >> log2n);
          end else i_q <= i_q + 1'b1;
        end
        S_LOAD: begin
          if (i_q == n_len - 1'b1) begin
            st_q    <= S_FFT;
            i_q     <= '0;
            stage_q <= '0;
          end else i_q <= i_q + 1'b1;
        end
        S_FFT: begin
          if (i_q == (n_len >> 1) - 1'b1) begin
            i_q <= '0;
            if (stage_q == log2n - 1'b1) st_q <= S_MAG;
            else stage_q <= stage_q + 1'b1;
          end else i_q <= i_q + 1'b1;
        end
        S_MAG: begin
          psd_valid <= 1'b1;
          psd_bin   <= BIN_W'(i_q);
          psd_val   <= mag;
          for (int b = 0; b < 2; b++) begin
            if (i_q == '0) band_pwr[b] <= '0;
            if (BIN_W'(i_q) >= k_lo[b] && BIN_W'(i_q) <= k_hi[b])
              band_pwr[b] <= ((i_q == '0) ? '0 : band_pwr[b]) + mag;
          end
          if (i_q == (n_len >> 1) - 1'b1) begin
            st_q      <= S_IDLE;
            calc_done <= 1'b1;
          end else i_q <= i_q + 1'b1;
        end
        default: st_q <= S_IDLE;
      endcase
      if (st_q != S_IDLE && want && take) overrun_cnt <= overrun_cnt + 1'b1;
    end
  end

  assign busy = (st_q != S_IDLE);

endmodule
