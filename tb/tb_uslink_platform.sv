// tb_uslink_platform: end-to-end testbench of the platform logic at its default sizes.
//
// The transmitter plays a baseband waveform made of SEGS segments of SEG_LEN
// constant complex samples through the DUC; afe_model turns the DAC words
// into 16 channels of 7.5 MS/s complex baseband (each with its own gain);
// the receiver decimates them to 2.5 MS/s and records them through the DMA
// stream, which this bench collects. The first segment calibrates the
// complex gain of each channel (delay and attenuation between DAC and
// ADC); every later frame that falls well inside a segment must then equal
// that gain times the segment's value, within 0.3 % of full scale, on all 16
// channels, and the per-channel gains must follow the model's 1 - c/32.
// Mechanisms exercised and counted (each must occur at least once): input
// slots taken by the DUC at one per 40 DAC clocks, a DUC underrun, DMA
// backpressure, a completed recording with tlast, and a second recording
// whose long DMA stall overflows and drops frames. No parameter of the
// design is overridden.
module tb_uslink_platform;
  import uslink_pkg::*;
  timeunit 1ns;
  timeprecision 1fs;   // so the 120 MHz half period (25/6 ns) is not rounded to whole ps

  localparam int CH = 16, DMA_W = 128, BEATS = 4;
  localparam int LEN_W = $clog2(MAX_RECORD_SAMPLES + 1);
  localparam int SEGS = 6, SEG_LEN = 120, NREC = 800;

  logic tx_clk = 0, rx_clk = 0, tx_rst_n = 0, rx_rst_n = 0;
  always #5 tx_clk = ~tx_clk;                      // 100 MHz DAC clock
  always #(25.0 / 6.0) rx_clk = ~rx_clk;           // 120 MHz ADC / receiver clock

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
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- transmit side ----------------
  cplx16_t seg_val [SEGS];
  int  tx_idx = 0, n_slots = 0, n_under = 0, last_slot = -1, tx_cyc = 0, slot_bad = 0;
  int  drop_at = (SEGS - 1) * SEG_LEN + 10;  // one empty slot in the last, unchecked segment
  realtime tx_t0 = 0;

  always @(negedge tx_clk) begin
    tx_s_tvalid <= tx_en && (tx_idx != drop_at || n_under != 0) && tx_idx < SEGS * SEG_LEN;
    tx_s_tdata  <= seg_val[(tx_idx < SEGS * SEG_LEN ? tx_idx : 0) / SEG_LEN];
  end
  always @(posedge tx_clk) begin
    tx_cyc++;
    if (tx_underrun && tx_idx < SEGS * SEG_LEN) n_under++;  // slots after the stream ran out do not count
    if (tx_s_tready) begin
      if (last_slot >= 0 && tx_cyc - last_slot != TX_INTERP) slot_bad++;
      last_slot = tx_cyc;
      n_slots++;
      if (tx_s_tvalid) begin
        if (tx_idx == 0) tx_t0 = $realtime;
        tx_idx++;
      end
    end
  end

  // ---------------- receive side: DMA sink ----------------
  cplx16_t rxf [NREC][CH];
  realtime rxt [NREC];
  logic [CH*32-1:0] acc;
  int beat = 0, nf = 0, n_tlast = 0, n_bp = 0;
  bit collect = 1;
  always @(posedge rx_clk) begin
    if (rx_rst_n && rx_m_tvalid && !rx_m_tready) n_bp++;
    if (rx_rst_n && rx_m_tvalid && rx_m_tready) begin
      acc[beat*DMA_W +: DMA_W] = rx_m_tdata;
      if (rx_m_tlast) n_tlast++;
      if (beat == BEATS - 1) begin
        if (collect && nf < NREC) begin
          for (int c = 0; c < CH; c++) rxf[nf][c] = acc[c*32 +: 32];
          rxt[nf] = $realtime;
        end
        nf++;
        beat = 0;
      end else beat++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    real gre [CH], gim [CH];
    int  ncal [CH];
    int  n_checked, worst;
    n_checked = 0; worst = 0;
    seg_val[0] = '{re: 16'sd20000, im: 16'sd0};
    seg_val[1] = '{re: -16'sd15000, im: 16'sd9000};
    seg_val[2] = '{re: 16'sd0, im: -16'sd24000};
    seg_val[3] = '{re: 16'sd5000, im: 16'sd5000};
    seg_val[4] = '{re: -16'sd21000, im: -16'sd12000};
    seg_val[5] = '{re: 16'sd12000, im: -16'sd3000};
    #20;
    tx_rst_n = 1; rx_rst_n = 1;
    repeat (5) @(posedge rx_clk);
    @(negedge rx_clk); rx_sync = 1; @(negedge rx_clk); rx_sync = 0;
    @(negedge tx_clk); tx_en = 1;
    // start recording at once so that every segment is covered
    @(negedge rx_clk); rec_len = LEN_W'(NREC); rec_start = 1; @(negedge rx_clk); rec_start = 0;
    // a little backpressure on the DMA stream during the recording
    fork
      while (!rec_done) begin
        repeat ($urandom_range(200, 60)) @(negedge rx_clk);
        rx_m_tready = 0;
        repeat ($urandom_range(20, 3)) @(negedge rx_clk);
        rx_m_tready = 1;
      end
      wait (rec_done);
    join_any
    disable fork;
    rx_m_tready = 1;
    repeat (10) @(posedge rx_clk);
    check(rec_done && !rec_busy && !rec_overflow && rec_frames == LEN_W'(NREC) && nf == NREC,
          $sformatf("first recording complete without loss (done %0d busy %0d ovf %0d frames %0d received %0d)",
                    rec_done, rec_busy, rec_overflow, rec_frames, nf));
    wait (tx_idx == SEGS * SEG_LEN);
    @(negedge tx_clk); tx_en = 0;

    // ---- compare recorded frames with the transmitted segments ----
    for (int c = 0; c < CH; c++) begin gre[c] = 0; gim[c] = 0; ncal[c] = 0; end
    for (int f = 0; f < NREC; f++) begin
      real pos;
      int  s;
      pos = (rxt[f] - tx_t0) / (real'(SEG_LEN) * 400.0);   // segment position, 400 ns per sample
      s = int'($floor(pos));
      if (s < 0 || s >= SEGS - 1 || pos - real'(s) < 0.6) continue;  // skip the filters' delay and transients
      for (int c = 0; c < CH; c++) begin
        real zr, zi, er, ei, err;
        zr = real'(seg_val[s].re); zi = real'(seg_val[s].im);
        if (s == 0) begin
          // calibrate: G = rx / z
          gre[c] += real'(rxf[f][c].re) / zr;
          gim[c] += real'(rxf[f][c].im) / zr;
          ncal[c]++;
        end else begin
          real ar, ai;
          ar = gre[c] / real'(ncal[c]); ai = gim[c] / real'(ncal[c]);
          er = ar * zr - ai * zi;
          ei = ar * zi + ai * zr;
          err = $sqrt((er - real'(rxf[f][c].re)) ** 2 + (ei - real'(rxf[f][c].im)) ** 2);
          if (int'(err) > worst) worst = int'(err);
          checks++;
          if (err > 0.003 * 32768.0) begin
            failures++;
            if (failures < 10) $display("frame %0d ch %0d seg %0d: got (%0d,%0d) expected (%0.0f,%0.0f)",
                                        f, c, s, rxf[f][c].re, rxf[f][c].im, er, ei);
          end
          if (c == 0) n_checked++;
        end
      end
    end
    check(n_checked > 100, "enough frames compared");
    for (int c = 1; c < CH; c++) begin
      real m0, mc;
      m0 = $sqrt(gre[0] ** 2 + gim[0] ** 2) / real'(ncal[0]);
      mc = $sqrt(gre[c] ** 2 + gim[c] ** 2) / real'(ncal[c]);
      check(ncal[c] > 0 && mc / m0 > (1.0 - real'(c) / 32.0) - 0.01 && mc / m0 < (1.0 - real'(c) / 32.0) + 0.01,
            $sformatf("channel %0d gain relative to channel 0", c));
    end
    check(m0_ok(gre[0], gim[0], ncal[0]), "end-to-end gain close to 1");
    $display("worst error %0d LSB over %0d frames", worst, n_checked);

    // ---- second recording: a long DMA stall must overflow ----
    collect = 0;
    @(negedge rx_clk); rec_len = LEN_W'(20); rec_start = 1; @(negedge rx_clk); rec_start = 0;
    rx_m_tready = 0;
    repeat (48 * 6) @(negedge rx_clk);
    rx_m_tready = 1;
    wait (rec_done);
    repeat (10) @(posedge rx_clk);
    check(rec_overflow && rec_frames == LEN_W'(20), "stalled recording overflows and still ends");

    // ---- mechanism counts ----
    $display("DUC input slots %0d, underruns %0d, DMA backpressure clocks %0d, tlast %0d, overflow %0d",
             n_slots, n_under, n_bp, n_tlast, rec_overflow);
    check(n_slots >= SEGS * SEG_LEN && slot_bad == 0, "DUC takes one input every 40 clocks");
    check(n_under == 1, "DUC underrun happened once");
    check(n_bp > 0, "DMA backpressure happened");
    check(n_tlast == 2, "two recordings ended with tlast");
    check(rec_overflow, "overflow happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit m0_ok(real r, real i, int n);
    real m;
    if (n == 0) return 0;
    m = $sqrt(r * r + i * i) / real'(n);
    return m > 0.95 && m < 1.05;
  endfunction
endmodule

