// afe_model: behavioural model of the 16-channel receive analog front end, for simulation only.
//
// Stands in for everything between the transmit DAC and the receive FPGA
// fabric: the DAC's analog output, the water/tissue channel (a per-channel
// gain), the LNA/PGA, the ADCs clocked by adc_clk, the AFE's digital
// demodulator and the JESD204B link.
//   - The DAC waveform is rebuilt from dac_code by linear interpolation
//     between successive dac_clk samples (a stand-in for the reconstruction
//     filter; it delays the waveform by one DAC clock). A plain sample-and-hold
//     would not do: the 100 MHz and 120 MHz clocks slip past each other and
//     the hold would add a slowly wandering phase of up to 13 degrees.
//   - On each adc_clk edge the waveform is mixed with exp(-j*2*pi*FC*t), t
//     being the simulation time of the edge, and the product is kept in a
//     NTAP-long history.
//   - Every DECIM-th edge the history is low-pass filtered (NTAP-tap
//     Blackman-windowed sinc, cut-off FCUT, unity DC gain) and each channel
//     is output as a cplx16_t with valid high for one clock (7.5 MS/s at
//     120 MHz / 16). The filter keeps the 0.94 MHz signal band and removes
//     the mixing image at 2*FC and the DUC's interpolation images, as the
//     AFE's own decimation filters would.
// The scale maps a DAC tone of amplitude A to a baseband magnitude of 8*A,
// so a full-scale DAC tone returns the full-scale baseband value the DUC was
// given. Channel c is attenuated by 1 - c/32 so that each channel carries a
// distinct value. Not synthesizable: it uses real arithmetic and time.
module afe_model
  import uslink_pkg::*;
#(
  parameter int  CH    = RX_CHANNELS,
  parameter int  DECIM = 16,
  parameter real FC    = 3.75e6,
  parameter int  NTAP  = 1201,
  parameter real FCUT  = 1.3e6,
  parameter real FS    = 120.0e6
) (
  input  logic               dac_clk,
  input  logic               adc_clk,
  input  logic signed [13:0] dac_code,
  output logic               valid,
  output cplx16_t            data [CH]
);
  real h [NTAP];
  real hist_re [NTAP], hist_im [NTAP];   // circular history of mixed samples
  int  wp = 0;
  real v_prev = 0.0, v_cur = 0.0;
  realtime t_prev = 0, t_cur = 0;

  // DAC word is stable at the falling edge of its clock
  always @(negedge dac_clk) begin
    v_prev = v_cur;  t_prev = t_cur;
    v_cur  = real'(dac_code);  t_cur = $realtime;
  end
  int  k = 0;

  function automatic logic signed [15:0] to16(input real v);
    if (v > 32767.0)  return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return 16'(int'(v));
  endfunction

  initial begin
    real t, w, sum, pi;
    pi  = 3.14159265358979;
    sum = 0.0;
    for (int n = 0; n < NTAP; n++) begin
      t = real'(n) - real'(NTAP - 1) / 2.0;
      w = 0.42 - 0.5 * $cos(2.0 * pi * real'(n) / real'(NTAP - 1))
               + 0.08 * $cos(4.0 * pi * real'(n) / real'(NTAP - 1));
      h[n] = (t == 0.0) ? 2.0 * FCUT / FS : $sin(2.0 * pi * FCUT / FS * t) / (pi * t);
      h[n] = h[n] * w;
      sum += h[n];
      hist_re[n] = 0.0;
      hist_im[n] = 0.0;
    end
    for (int n = 0; n < NTAP; n++) h[n] = h[n] / sum;
    valid = 1'b0;
    for (int c = 0; c < CH; c++) data[c] = '0;
  end

  always @(posedge adc_clk) begin
    real x, a, g, yr, yi;
    if (t_cur > t_prev)
      x = v_prev + (v_cur - v_prev) * (($realtime - t_cur) / (t_cur - t_prev));
    else
      x = v_cur;
    // carrier phase from simulation time (ns), so a clock that is not exactly
    // FS (the simulator rounds the half period) adds no frequency error
    a = 2.0 * 3.14159265358979 * FC * ($realtime * 1.0e-9);
    hist_re[wp] = x * $cos(a);
    hist_im[wp] = -x * $sin(a);
    wp = (wp == NTAP - 1) ? 0 : wp + 1;
    k++;
    valid <= 1'b0;
    if (k == DECIM) begin
      yr = 0.0;
      yi = 0.0;
      for (int n = 0; n < NTAP; n++) begin
        yr += h[n] * hist_re[(wp + n) % NTAP];
        yi += h[n] * hist_im[(wp + n) % NTAP];
      end
      for (int c = 0; c < CH; c++) begin
        g = 1.0 - real'(c) / 32.0;
        data[c].re <= to16(8.0 * yr * g);
        data[c].im <= to16(8.0 * yi * g);
      end
      valid  <= 1'b1;
      k = 0;
    end
  end
endmodule
