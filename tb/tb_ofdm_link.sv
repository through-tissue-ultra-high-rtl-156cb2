// tb_ofdm_link: the platform carrying the link's OFDM waveform, demodulated in the bench.
//
// Builds, in the bench, the waveform the link was tested with: 4096-point
// OFDM at 2.5 MS/s with a 512-sample cyclic prefix and 3072 occupied
// subcarriers (bins -1536..1535, 610.35 Hz apart). Symbol 0 is a block-pilot
// symbol (known BPSK on every occupied bin); symbols 1 and 2 carry comb
// pilots on every 32nd occupied bin and 64-QAM (symbol 1) or 256-QAM
// (symbol 2) data elsewhere. The samples are played through the
// platform at its default sizes (DUC -> afe_model -> 16 decimators ->
// recorder -> DMA stream). The bench then takes each channel's recording,
// removes the cyclic prefix, runs a 4096-point FFT, estimates the channel by
// least squares on the block pilot, equalises the data symbols and measures
// the error vector magnitude per channel and after maximum ratio combining
// of the 16 channels. It checks that every channel and the combined signal
// stay below EVM limits, and that hard QAM decisions on every data bin are
// error free for both modulation orders. The rates are checked as well:
// the DUC consumes, and the recorder delivers, exactly one sample per
// 400 ns (2.5 MS/s).
module tb_ofdm_link;
  import uslink_pkg::*;
  timeunit 1ns;
  timeprecision 1fs;   // so the 120 MHz half period (25/6 ns) is not rounded to whole ps

  localparam int CH = 16, DMA_W = 128, BEATS = 4;
  localparam int LEN_W = $clog2(MAX_RECORD_SAMPLES + 1);
  localparam int N = 4096, CP = 512, SYM = N + CP, NSYM = 3, USED = 3072, COMB = 32;
  localparam int NTX = NSYM * SYM;
  localparam int NREC = NTX + 200;
  localparam real SCALE = 110.0;   // time-domain RMS about 6100 of 32767

  logic tx_clk = 0, rx_clk = 0, tx_rst_n = 0, rx_rst_n = 0;
  always #5 tx_clk = ~tx_clk;
  always #(25.0 / 6.0) rx_clk = ~rx_clk;

  logic tx_en = 0, tx_s_tvalid = 0, tx_s_tready, dac_valid, tx_underrun;
  cplx16_t tx_s_tdata;
  logic signed [DAC_BITS-1:0] dac_data;
  logic rx_sync = 0, afe_valid, rec_start = 0, rx_m_tready = 1;
  cplx16_t afe_data [CH];
  logic [LEN_W-1:0] rec_len = '0, rec_frames;
  logic [DMA_W-1:0] rx_m_tdata;
  logic rx_m_tvalid, rx_m_tlast, rec_busy, rec_done, rec_overflow;

  uslink_platform dut (.*);
  afe_model u_afe (.dac_clk(tx_clk), .adc_clk(rx_clk), .dac_code(dac_data), .valid(afe_valid), .data(afe_data));

  int checks = 0, failures = 0;

  initial begin
    #12ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- FFT on fre/fim (radix 2, in place) ----------------
  real fre [N], fim [N];
  task automatic fft(input bit inverse);
    int j = 0;
    for (int i = 1; i < N; i++) begin
      int bit_ = N >> 1;
      while ((j & bit_) != 0) begin j ^= bit_; bit_ >>= 1; end
      j |= bit_;
      if (i < j) begin
        real t;
        t = fre[i]; fre[i] = fre[j]; fre[j] = t;
        t = fim[i]; fim[i] = fim[j]; fim[j] = t;
      end
    end
    for (int len = 2; len <= N; len <<= 1) begin
      real ang;
      ang = (inverse ? 2.0 : -2.0) * 3.14159265358979 / real'(len);
      for (int i = 0; i < N; i += len)
        for (int k = 0; k < len / 2; k++) begin
          real wr, wi, ur, ui, vr, vi;
          wr = $cos(ang * real'(k)); wi = $sin(ang * real'(k));
          ur = fre[i + k]; ui = fim[i + k];
          vr = fre[i + k + len/2] * wr - fim[i + k + len/2] * wi;
          vi = fre[i + k + len/2] * wi + fim[i + k + len/2] * wr;
          fre[i + k] = ur + vr;           fim[i + k] = ui + vi;
          fre[i + k + len/2] = ur - vr;   fim[i + k + len/2] = ui - vi;
        end
    end
  endtask

  // ---------------- waveform ----------------
  real xre [NSYM][USED], xim [NSYM][USED];   // transmitted subcarrier values
  bit  pilot [NSYM][USED];
  cplx16_t txs [NTX];

  function automatic int bin_of(int u);       // occupied index -> FFT bin
    int k = u - USED / 2;
    return (k < 0) ? k + N : k;
  endfunction

  function automatic real qam_level(int v, int m);  // v in 0..m-1 -> odd levels
    return real'(2 * v - (m - 1));
  endfunction

  // ---------------- tx stream ----------------
  int tx_idx = 0, n_hs = 0, tx_cyc = 0, last_hs = -1, rate_bad = 0;
  realtime tx_t0 = 0;
  always @(negedge tx_clk) begin
    tx_s_tvalid <= tx_en && tx_idx < NTX;
    tx_s_tdata  <= (tx_idx < NTX) ? txs[tx_idx] : '0;
  end
  always @(posedge tx_clk) begin
    tx_cyc++;
    if (tx_s_tready && tx_s_tvalid) begin
      if (tx_idx == 0) tx_t0 = $realtime;
      if (last_hs >= 0 && tx_cyc - last_hs != TX_INTERP) rate_bad++;
      last_hs = tx_cyc;
      tx_idx++;
    end
  end

  // ---------------- rx sink ----------------
  cplx16_t rxf [NREC][CH];
  realtime rxt0 = 0, rxt_prev = 0;
  logic [CH*32-1:0] acc;
  int beat = 0, nf = 0, rx_rate_bad = 0;
  always @(posedge rx_clk) begin
    if (rx_rst_n && rx_m_tvalid && rx_m_tready) begin
      acc[beat*DMA_W +: DMA_W] = rx_m_tdata;
      if (beat == BEATS - 1) begin
        if (nf < NREC) for (int c = 0; c < CH; c++) rxf[nf][c] = acc[c*32 +: 32];
        if (nf == 0) rxt0 = $realtime;
        else if ($realtime - rxt_prev > 401.0 || $realtime - rxt_prev < 399.0) rx_rate_bad++;
        rxt_prev = $realtime;
        nf++;
        beat = 0;
      end else beat++;
    end
  end

  // ---------------- main ----------------
  real hre [CH][USED], him [CH][USED];
  initial begin
    int  j0;
    real evm_num [CH][NSYM], evm_den [NSYM], mrc_num [NSYM];
    int  serr [CH][NSYM], mrc_err [NSYM];
    int  order [NSYM];
    order[0] = 2; order[1] = 64; order[2] = 256;

    // symbols: subcarrier values of unit average power
    for (int s = 0; s < NSYM; s++) begin
      int m;
      real norm;
      m = (order[s] == 64) ? 8 : 16;
      norm = $sqrt(2.0 * real'(m * m - 1) / 3.0);
      for (int u = 0; u < USED; u++) begin
        pilot[s][u] = (s == 0) || (u % COMB == 0);
        if (pilot[s][u]) begin
          xre[s][u] = ($urandom_range(1) != 0) ? 1.0 : -1.0;
          xim[s][u] = 0.0;
        end else begin
          xre[s][u] = qam_level($urandom_range(m - 1), m) / norm;
          xim[s][u] = qam_level($urandom_range(m - 1), m) / norm;
        end
      end
      for (int b = 0; b < N; b++) begin fre[b] = 0.0; fim[b] = 0.0; end
      for (int u = 0; u < USED; u++) begin fre[bin_of(u)] = xre[s][u]; fim[bin_of(u)] = xim[s][u]; end
      fft(1);
      for (int n = 0; n < SYM; n++) begin
        int t;
        real vr, vi;
        t = (n < CP) ? n + N - CP : n - CP;
        vr = SCALE * fre[t]; vi = SCALE * fim[t];
        if (vr > 32767.0) vr = 32767.0;
        if (vr < -32767.0) vr = -32767.0;
        if (vi > 32767.0) vi = 32767.0;
        if (vi < -32767.0) vi = -32767.0;
        txs[s * SYM + n].re = 16'(int'(vr));
        txs[s * SYM + n].im = 16'(int'(vi));
      end
    end

    // play and record
    #20;
    tx_rst_n = 1; rx_rst_n = 1;
    repeat (5) @(posedge rx_clk);
    @(negedge rx_clk); rec_len = LEN_W'(NREC); rec_start = 1; @(negedge rx_clk); rec_start = 0;
    repeat (400) @(posedge rx_clk);
    @(negedge tx_clk); tx_en = 1;
    wait (rec_done);
    @(negedge tx_clk); tx_en = 0;
    check(!rec_overflow && nf == NREC, "recording complete");
    check(rate_bad == 0 && tx_idx == NTX, "DUC took one sample per 40 DAC clocks");
    check(rx_rate_bad == 0, "recorder delivered one frame per 400 ns");

    // frame f holds baseband sample j0 + f of the transmitted stream
    j0 = int'($floor((rxt0 - tx_t0) / 400.0 + 0.5));

    for (int s = 0; s < NSYM; s++) begin
      evm_den[s] = 0.0; mrc_num[s] = 0.0; mrc_err[s] = 0;
      for (int c = 0; c < CH; c++) begin evm_num[c][s] = 0.0; serr[c][s] = 0; end
    end
    // per channel: FFT of each symbol, 128 samples early into the CP
    begin
      real yre [CH][NSYM][USED], yim [CH][NSYM][USED];
      for (int c = 0; c < CH; c++)
        for (int s = 0; s < NSYM; s++) begin
          int start;
          start = s * SYM + CP - 128 - j0;
          for (int n = 0; n < N; n++) begin
            fre[n] = real'(rxf[start + n][c].re);
            fim[n] = real'(rxf[start + n][c].im);
          end
          fft(0);
          for (int u = 0; u < USED; u++) begin
            yre[c][s][u] = fre[bin_of(u)]; yim[c][s][u] = fim[bin_of(u)];
          end
        end
      // least-squares channel estimate on the block pilot
      for (int c = 0; c < CH; c++)
        for (int u = 0; u < USED; u++) begin
          hre[c][u] = yre[c][0][u] * xre[0][u];   // pilot is +-1
          him[c][u] = yim[c][0][u] * xre[0][u];
        end
      // equalise data symbols, single channel and MRC
      for (int s = 1; s < NSYM; s++) begin
        int m;
        real norm;
        m = (order[s] == 64) ? 8 : 16;
        norm = $sqrt(2.0 * real'(m * m - 1) / 3.0);
        for (int u = 0; u < USED; u++) begin
          real nr, ni, den;
          if (pilot[s][u]) continue;
          evm_den[s] += xre[s][u] ** 2 + xim[s][u] ** 2;
          nr = 0.0; ni = 0.0; den = 0.0;
          for (int c = 0; c < CH; c++) begin
            real h2, er, ei;
            h2 = hre[c][u] ** 2 + him[c][u] ** 2;
            er = (yre[c][s][u] * hre[c][u] + yim[c][s][u] * him[c][u]) / h2;
            ei = (yim[c][s][u] * hre[c][u] - yre[c][s][u] * him[c][u]) / h2;
            evm_num[c][s] += (er - xre[s][u]) ** 2 + (ei - xim[s][u]) ** 2;
            if (!same_point(er, ei, xre[s][u], xim[s][u], m, norm)) serr[c][s]++;
            nr += yre[c][s][u] * hre[c][u] + yim[c][s][u] * him[c][u];
            ni += yim[c][s][u] * hre[c][u] - yre[c][s][u] * him[c][u];
            den += h2;
          end
          nr /= den; ni /= den;
          mrc_num[s] += (nr - xre[s][u]) ** 2 + (ni - xim[s][u]) ** 2;
          if (!same_point(nr, ni, xre[s][u], xim[s][u], m, norm)) mrc_err[s]++;
        end
      end
    end
    for (int s = 1; s < NSYM; s++) begin
      real worst, mrc;
      worst = -1000.0;
      for (int c = 0; c < CH; c++) begin
        real e;
        e = 10.0 * $log10(evm_num[c][s] / evm_den[s]);
        if (e > worst) worst = e;
        check(e < -30.0, $sformatf("%0d-QAM channel %0d EVM %0.1f dB", order[s], c, e));
        check(serr[c][s] == 0, $sformatf("%0d-QAM channel %0d: %0d decision errors", order[s], c, serr[c][s]));
      end
      mrc = 10.0 * $log10(mrc_num[s] / evm_den[s]);
      check(mrc < -30.0 && mrc_err[s] == 0, $sformatf("%0d-QAM MRC EVM %0.1f dB, %0d errors", order[s], mrc, mrc_err[s]));
      $display("%0d-QAM: worst single-channel EVM %0.1f dB, MRC EVM %0.1f dB", order[s], worst, mrc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit same_point(real r, real i, real xr, real xi, int m, real norm);
    // nearest constellation level on each axis
    int a, b, ax, bx;
    a  = int'($floor((r * norm + real'(m - 1)) / 2.0 + 0.5));
    b  = int'($floor((i * norm + real'(m - 1)) / 2.0 + 0.5));
    ax = int'($floor((xr * norm + real'(m - 1)) / 2.0 + 0.5));
    bx = int'($floor((xi * norm + real'(m - 1)) / 2.0 + 0.5));
    if (a < 0) a = 0;
    if (a > m - 1) a = m - 1;
    if (b < 0) b = 0;
    if (b > m - 1) b = m - 1;
    return a == ax && b == bx;
  endfunction
endmodule
