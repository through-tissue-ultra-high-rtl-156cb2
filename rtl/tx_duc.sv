// tx_duc: digital up converter of the transmitter (complex baseband -> real passband).
//
// The transmitter plays a complex baseband waveform, streamed out of DDR3 by an
// AXI DMA at 2.5 MS/s, into a 14-bit DAC clocked at 100 MHz, with the signal
// centred on a 3.75 MHz carrier. The OFDM signal fills 1.875 MHz of the
// 2.5 MHz baseband band (75 %), so the interpolator must keep the band flat
// up to 0.94 MHz and reject the first image from 1.56 MHz on. This block does
// the up conversion in four steps, all in the DAC clock domain:
//   1. FIR interpolation by 2 (2.5 -> 5 MS/s) with a 64-tap Blackman-windowed
//      sinc low-pass (cut-off 1.25 MHz), coefficients round(2^16*h) built at
//      elaboration. It runs as two 32-tap polyphase branches on one
//      multiplier per branch and per I/Q, one tap per clock, so it needs
//      FIR_TAPS/2 + 2 <= INTERP clocks per input sample;
//   2. a CIC interpolator by INTERP/2 of ORDER stages (comb section at 5 MS/s,
//      zero stuffing, integrators at 100 MHz), whose gain (INTERP/2)^(ORDER-1)
//      is removed by a constant multiply;
//   3. a numerically controlled oscillator: a 32-bit phase accumulator advanced
//      by FTW per output sample, whose top LUT_AW bits address cosine and sine
//      tables of round(32767*cos/sin(2*pi*k/2^LUT_AW)), built at elaboration;
//   4. a real mixer, out = I*cos - Q*sin, rounded and saturated to OUT_W bits.
//      A sample of magnitude 32767 maps to the DAC's full scale of +-8191.
//
// Interface. s_* is an AXI4-Stream slave carrying one uslink_pkg::cplx16_t
// per beat. While en is high, one input slot opens every INTERP clocks,
// the first in the clock where en is first seen high; s_tready is high for
// that one clock. If s_tvalid is low in a slot, a zero sample is used and
// underrun pulses for one clock. While en is low, all filter state, the NCO
// phase and dac_data are held at zero, so each playback starts clean (and the
// filter tail is cut when en falls). dac_data carries one sample per clock;
// dac_valid rises INTERP + ORDER + 3 clocks after the clock that first sees
// en high, and output sample m uses NCO phase m*FTW.
//
// From the paper: the DUC itself, its place between the DMA stream and the DAC,
// the 100 MHz DAC rate, the 14-bit DAC, the 3.75 MHz carrier, the 2.5 MHz
// baseband rate (hence INTERP = 40) and the 1.875 MHz occupied bandwidth the
// filters must pass. Choices of this design: the FIR + CIC structure, the
// filter lengths and window, the NCO table size, the input slot handshake,
// the zero-fill on underrun, the clear-on-disable and the output scaling.
module tx_duc
  import uslink_pkg::*;
#(
  parameter int unsigned INTERP   = TX_INTERP,  // DAC rate / baseband rate (40)
  parameter int unsigned FIR_TAPS = 64,         // taps of the x2 interpolation FIR
  parameter int unsigned ORDER    = 3,          // CIC stages
  parameter int unsigned OUT_W    = DAC_BITS,   // DAC word width (14)
  parameter logic [31:0] FTW      = TX_FTW,     // carrier tuning word
  parameter int unsigned LUT_AW   = 10          // NCO table address bits
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  cplx16_t                 s_tdata,
  input  logic                    s_tvalid,
  output logic                    s_tready,
  output logic signed [OUT_W-1:0] dac_data,
  output logic                    dac_valid,
  output logic                    underrun
);

  localparam int unsigned HALF     = INTERP / 2;              // CIC rate change (20)
  localparam int unsigned NPH      = FIR_TAPS / 2;            // taps per FIR branch (32)
  localparam int unsigned CNT_W    = $clog2(INTERP);
  localparam int unsigned K_W      = $clog2(NPH);
  localparam int unsigned ACC_W    = 16 + ORDER * $clog2(HALF) + 1;
  localparam longint     CIC_GAIN  = longint'(HALF) ** (ORDER - 1);
  localparam int unsigned GAIN_SH  = $clog2(CIC_GAIN) + 16;
  localparam longint     GAIN_MUL  = ((longint'(1) << GAIN_SH) + CIC_GAIN / 2) / CIC_GAIN;
  localparam int unsigned MIX_SH   = 15 + 16 - OUT_W;
  localparam int unsigned LUT_N    = 1 << LUT_AW;
  localparam real         PI       = 3.14159265358979323846;

  typedef logic signed [15:0] lut_t  [LUT_N];
  typedef logic signed [17:0] coef_t [FIR_TAPS];

  function automatic lut_t make_lut(input bit sine);
    lut_t t;
    for (int i = 0; i < LUT_N; i++) begin
      real a;
      a = 2.0 * PI * real'(i) / real'(LUT_N);
      t[i] = 16'(int'(32767.0 * (sine ? $sin(a) : $cos(a))));
    end
    return t;
  endfunction

  // h[n] = 2 * sin(pi*t/2)/(pi*t) * blackman(n), t = n - (FIR_TAPS-1)/2
  function automatic coef_t make_coef();
    coef_t c;
    for (int n = 0; n < FIR_TAPS; n++) begin
      real t, s, w;
      t = real'(n) - real'(FIR_TAPS - 1) / 2.0;
      s = $sin(PI * t / 2.0) / (PI * t);
      w = 0.42 - 0.5 * $cos(2.0 * PI * real'(n) / real'(FIR_TAPS - 1))
               + 0.08 * $cos(4.0 * PI * real'(n) / real'(FIR_TAPS - 1));
      c[n] = 18'(int'(2.0 * s * w * 65536.0));
    end
    return c;
  endfunction

  localparam lut_t  COS_LUT = make_lut(1'b0);
  localparam lut_t  SIN_LUT = make_lut(1'b1);
  localparam coef_t COEF    = make_coef();

  function automatic logic signed [15:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sd32767;
    else if (v < -64'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

  // ---------------- input slot ----------------
  logic [CNT_W-1:0] cnt;
  logic             slot;
  assign slot     = en && (cnt == '0);
  assign s_tready = slot;

  // ---------------- FIR x2: delay line and sequential MAC ----------------
  logic signed [15:0] dl   [2][NPH];      // [I/Q][age], age 0 = newest
  logic signed [39:0] macc [2][2];        // [phase][I/Q]
  logic signed [15:0] fir_y[2][2];        // finished outputs [phase][I/Q]
  logic               mac_on;
  logic [K_W-1:0]     k;
  logic               cic_on;             // FIR outputs are flowing into the CIC

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      underrun <= 1'b0;
      mac_on   <= 1'b0;
      k        <= '0;
      cic_on   <= 1'b0;
      for (int q = 0; q < 2; q++) begin
        for (int i = 0; i < NPH; i++) dl[q][i] <= '0;
        for (int p = 0; p < 2; p++) begin
          macc[p][q]  <= '0;
          fir_y[p][q] <= '0;
        end
      end
    end else if (!en) begin
      cnt      <= '0;
      underrun <= 1'b0;
      mac_on   <= 1'b0;
      k        <= '0;
      cic_on   <= 1'b0;
      for (int q = 0; q < 2; q++) begin
        for (int i = 0; i < NPH; i++) dl[q][i] <= '0;
        for (int p = 0; p < 2; p++) begin
          macc[p][q]  <= '0;
          fir_y[p][q] <= '0;
        end
      end
    end else begin
      cnt      <= (cnt == CNT_W'(INTERP - 1)) ? '0 : cnt + 1'b1;
      underrun <= slot && !s_tvalid;
      if (slot) begin
        dl[0][0] <= s_tvalid ? s_tdata.re : '0;
        dl[1][0] <= s_tvalid ? s_tdata.im : '0;
        for (int i = 1; i < NPH; i++) begin
          dl[0][i] <= dl[0][i-1];
          dl[1][i] <= dl[1][i-1];
        end
        mac_on <= 1'b1;
        k      <= '0;
        for (int p = 0; p < 2; p++)
          for (int q = 0; q < 2; q++) macc[p][q] <= '0;
      end else if (mac_on) begin
        // y[2f+p] = sum_k x[f-k] * h[2k+p]
        for (int p = 0; p < 2; p++)
          for (int q = 0; q < 2; q++)
            macc[p][q] <= macc[p][q] + 40'(dl[q][k] * COEF[2 * k + p]);
        k <= k + 1'b1;
        if (k == K_W'(NPH - 1)) mac_on <= 1'b0;
      end
      if (cnt == CNT_W'(INTERP - 1)) begin
        cic_on <= 1'b1;
        for (int p = 0; p < 2; p++)
          for (int q = 0; q < 2; q++)
            fir_y[p][q] <= sat16((64'(macc[p][q]) + 64'sd32768) >>> 16);
      end
    end
  end

  // ---------------- CIC: comb section at 5 MS/s ----------------
  logic                    cic_slot;
  logic                    cic_ph;       // which FIR phase enters now
  logic signed [15:0]      x_in     [2];
  logic signed [ACC_W-1:0] comb_d   [2][ORDER];
  logic signed [ACC_W-1:0] comb_c   [2][ORDER+1];
  logic signed [ACC_W-1:0] comb_reg [2];
  logic signed [ACC_W-1:0] integ    [2][ORDER];
  logic [ORDER:0]          vpipe;

  assign cic_slot = cic_on && (cnt == '0 || cnt == CNT_W'(HALF));
  assign cic_ph   = (cnt != '0);

  always_comb begin
    x_in[0] = fir_y[cic_ph][0];
    x_in[1] = fir_y[cic_ph][1];
    for (int q = 0; q < 2; q++) begin
      comb_c[q][0] = ACC_W'(x_in[q]);
      for (int s = 0; s < ORDER; s++)
        comb_c[q][s+1] = comb_c[q][s] - comb_d[q][s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0;
      for (int q = 0; q < 2; q++) begin
        comb_reg[q] <= '0;
        for (int s = 0; s < ORDER; s++) begin
          comb_d[q][s] <= '0;
          integ[q][s]  <= '0;
        end
      end
    end else if (!en) begin
      vpipe <= '0;
      for (int q = 0; q < 2; q++) begin
        comb_reg[q] <= '0;
        for (int s = 0; s < ORDER; s++) begin
          comb_d[q][s] <= '0;
          integ[q][s]  <= '0;
        end
      end
    end else begin
      vpipe <= {vpipe[ORDER-1:0], cic_on};
      for (int q = 0; q < 2; q++) begin
        if (cic_slot) begin
          comb_reg[q] <= comb_c[q][ORDER];
          for (int s = 0; s < ORDER; s++) comb_d[q][s] <= comb_c[q][s];
        end else begin
          comb_reg[q] <= '0;  // zero stuffing between CIC input slots
        end
        integ[q][0] <= integ[q][0] + comb_reg[q];
        for (int s = 1; s < ORDER; s++) integ[q][s] <= integ[q][s] + integ[q][s-1];
      end
    end
  end

  // ---------------- gain removal ----------------
  cplx16_t            ys;
  logic               vs;
  logic signed [63:0] pr, pi;
  always_comb begin
    pr = 64'(integ[0][ORDER-1]) * GAIN_MUL + (64'sd1 <<< (GAIN_SH - 1));
    pi = 64'(integ[1][ORDER-1]) * GAIN_MUL + (64'sd1 <<< (GAIN_SH - 1));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ys <= '0;
      vs <= 1'b0;
    end else begin
      ys.re <= en ? sat16(pr >>> GAIN_SH) : '0;
      ys.im <= en ? sat16(pi >>> GAIN_SH) : '0;
      vs    <= en && vpipe[ORDER];
    end
  end

  // ---------------- NCO and mixer ----------------
  logic [31:0]        phase;
  logic signed [32:0] mix;
  logic               vm;
  logic [LUT_AW-1:0]  lut_addr;
  assign lut_addr = phase[31 -: LUT_AW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0;
      mix   <= '0;
      vm    <= 1'b0;
    end else begin
      mix   <= 33'(ys.re * COS_LUT[lut_addr]) - 33'(ys.im * SIN_LUT[lut_addr]);
      vm    <= en && vs;
      phase <= vs ? phase + FTW : '0;
    end
  end

  // ---------------- output rounding and saturation ----------------
  localparam logic signed [32:0] OMAX = 33'sd1 <<< (OUT_W - 1);
  logic signed [32:0] r;
  assign r = (mix + (33'sd1 <<< (MIX_SH - 1))) >>> MIX_SH;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_data  <= '0;
      dac_valid <= 1'b0;
    end else begin
      if (!vm)               dac_data <= '0;
      else if (r > OMAX - 1) dac_data <= OUT_W'(OMAX - 1);
      else if (r < -OMAX)    dac_data <= OUT_W'(-OMAX);
      else                   dac_data <= r[OUT_W-1:0];
      dac_valid <= vm;
    end
  end

  // The FIR must finish its taps within one input period.
  if (NPH + 2 > INTERP || INTERP % 2 != 0) begin : g_bad_size
    $error("tx_duc: INTERP must be even and at least FIR_TAPS/2 + 2");
  end

endmodule
