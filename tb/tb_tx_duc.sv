// tb_tx_duc: self-checking testbench of the transmit digital up converter.
//
// Streams random complex baseband samples into tx_duc at its default sizes
// (interpolation 40 = FIR x2 then CIC x20, 14-bit output, 3.75 MHz carrier
// at 100 MHz) and compares every DAC word with a floating-point model: the
// input interpolated by 2 through the 64-tap Blackman-windowed sinc
// (coefficients rounded to 2^-16), zero-stuffed by 20, convolved with three
// length-20 boxcars and divided by 400, mixed with cos/sin of the table
// phase (top 10 bits of m * round(2^32 * 3.75/100)) and scaled by
// 32767/2^17. It also checks that exactly one input is taken every 40
// clocks, the 46-clock latency from en to dac_valid, that a missing input
// gives one underrun pulse and a zero sample, and that the output is zero
// once en falls.
module tb_tx_duc;
  import uslink_pkg::*;

  localparam int R      = 40;
  localparam int NIN    = 64;          // input samples played
  localparam int NCYC   = NIN * R;     // clocks with en high
  localparam int C      = R / 2;       // CIC rate change
  localparam int HLEN   = 3 * (C - 1) + 1;
  localparam int NT     = 64;          // FIR taps
  localparam int UNDER  = 20;          // slot left empty on purpose
  localparam longint FTW = 161061274;  // round(2^32 * 3.75e6 / 100e6)

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  cplx16_t s_tdata;
  logic s_tvalid, s_tready, dac_valid, underrun;
  logic signed [13:0] dac_data;

  tx_duc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  cplx16_t src [NIN];
  int  u_re [NCYC], u_im [NCYC];
  int  outv [NCYC + 16];
  int  n_out = 0, t_en = 0, slot_no = 0, n_under = 0;
  int  first_valid = -1, last_hs = -1, rate_bad = 0, n_hs = 0;
  int  cyc = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input stream, driven on the falling edge
  int idx = 0;
  always @(negedge clk) begin
    s_tvalid <= en && (slot_no != UNDER) && (idx < NIN);
    s_tdata  <= (idx < NIN) ? src[idx] : '0;
  end

  always @(posedge clk) begin
    cyc++;
    if (underrun) n_under++;
    if (en) begin
      if (t_en < NCYC) begin
        u_re[t_en] = 0; u_im[t_en] = 0;
        if (s_tready) begin
          if (last_hs >= 0 && cyc - last_hs != R) rate_bad++;
          last_hs = cyc;
          slot_no++;
          if (s_tvalid) begin
            u_re[t_en] = int'(s_tdata.re); u_im[t_en] = int'(s_tdata.im);
            idx++; n_hs++;
          end
        end
      end
      t_en++;
    end
    if (dac_valid) begin
      if (first_valid < 0) first_valid = cyc;
      if (n_out < NCYC + 16) outv[n_out] = int'(dac_data);
      n_out++;
    end
  end

  function automatic real boxcar3(int j);  // taps of three cascaded length-C boxcars
    int s = 0;
    for (int a = 0; a < C; a++)
      for (int b = 0; b < C; b++)
        if (j - a - b >= 0 && j - a - b < C) s++;
    return real'(s);
  endfunction

  function automatic real fir_tap(int n);    // 2 * sinc(t/2)/2 * Blackman, to 2^-16
    real t, w, pi;
    pi = 3.14159265358979;
    t = real'(n) - 31.5;
    w = 0.42 - 0.5 * $cos(2.0 * pi * real'(n) / 63.0) + 0.08 * $cos(4.0 * pi * real'(n) / 63.0);
    return real'(int'(2.0 * $sin(pi * t / 2.0) / (pi * t) * w * 65536.0)) / 65536.0;
  endfunction

  real h [HLEN];
  real ft [NT];
  real vre [2 * NIN], vim [2 * NIN];       // FIR outputs at 5 MS/s
  real xs_re [NIN], xs_im [NIN];           // inputs taken, slot by slot
  int en_cycle;

  initial begin
    for (int i = 0; i < NIN; i++) begin
      src[i].re = 16'($signed($urandom_range(40000)) - 20000);
      src[i].im = 16'($signed($urandom_range(40000)) - 20000);
    end
    for (int j = 0; j < HLEN; j++) h[j] = boxcar3(j);
    for (int n = 0; n < NT; n++) ft[n] = fir_tap(n);
    s_tvalid = 0; s_tdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (R * 2 + 7) @(posedge clk);   // start at an arbitrary slot phase
    @(negedge clk);
    en = 1;
    en_cycle = cyc + 1;
    wait (t_en == NCYC);
    @(negedge clk);
    en = 0;
    repeat (3 * R) @(posedge clk);

    // latency: dac_valid rises on the 46th edge after the edge that samples
    // en, so this sampler (which sees values from before each edge) first
    // sees it 47 edges after en_cycle
    checks++;
    if (first_valid - en_cycle != 47) begin
      failures++; $display("latency %0d, expected 47", first_valid - en_cycle);
    end
    // one input slot every R clocks, one underrun
    checks++;
    if (rate_bad != 0 || n_hs != NIN - 1) begin
      failures++; $display("input rate wrong: bad intervals %0d, taken %0d", rate_bad, n_hs);
    end
    checks++;
    if (n_under != 1) begin failures++; $display("underrun pulses %0d", n_under); end
    checks++;
    // dac_valid is high from 46 clocks after en rises to one clock after it falls
    if (n_out != NCYC - 45) begin failures++; $display("outputs %0d expected %0d", n_out, NCYC - 45); end

    // FIR model: inputs per slot (zero where a slot was empty)
    begin
      int f = 0;
      for (int t = 0; t < NCYC; t += R) begin
        xs_re[f] = real'(u_re[t]); xs_im[f] = real'(u_im[t]); f++;
      end
    end
    for (int i = 0; i < 2 * NIN; i++) begin
      vre[i] = 0.0; vim[i] = 0.0;
      for (int kk = 0; kk < NT / 2; kk++)
        if (i / 2 - kk >= 0) begin
          vre[i] += xs_re[i / 2 - kk] * ft[2 * kk + i % 2];
          vim[i] += xs_im[i / 2 - kk] * ft[2 * kk + i % 2];
        end
    end
    // sample-by-sample comparison: output m sees CIC input v[i] at m = 20*i
    for (int m = 0; m < NCYC - R && m < n_out; m++) begin
      real yr, yi, a, e;
      longint ph;
      int ei, k;
      yr = 0.0; yi = 0.0;
      for (int j = 0; j < HLEN && j <= m; j++)
        if ((m - j) % C == 0) begin
          yr += h[j] * vre[(m - j) / C];
          yi += h[j] * vim[(m - j) / C];
        end
      yr = yr / 400.0; yi = yi / 400.0;
      ph = (longint'(m) * FTW) & 64'hFFFF_FFFF;
      k  = int'(ph >> 22);
      a  = 2.0 * 3.14159265358979 * real'(k) / 1024.0;
      e  = (yr * $cos(a) - yi * $sin(a)) * 32767.0 / 131072.0;
      if (e > 8191.0) e = 8191.0;
      if (e < -8192.0) e = -8192.0;
      ei = int'(e);
      checks++;
      if (outv[m] - ei > 2 || ei - outv[m] > 2) begin
        failures++;
        if (failures < 10) $display("sample %0d: dac %0d expected %0d", m, outv[m], ei);
      end
    end
    // output idle after en falls
    checks++;
    if (dac_data != 0 || dac_valid || s_tready) begin
      failures++; $display("output not idle after en fell");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
