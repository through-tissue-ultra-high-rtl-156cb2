// rx_decimator: per-channel complex decimator of the receiver.
//
// The AFE demodulates each of the 16 receive channels to complex baseband and
// delivers the samples to the FPGA over JESD204B. To stretch the 4 GB DDR4
// buffer to 25 s of recording, the FPGA lowers the rate further to 2.5 MS/s
// before the samples are written out. This block does that for one channel
// (I and Q) with a CIC decimator of ORDER stages and decimation DECIM:
//   - ORDER cascaded integrators update on every input sample (in_valid);
//   - every DECIM-th input (the last of each group of DECIM) the integrator
//     output goes through ORDER comb stages (differential delay 1);
//   - the comb result is multiplied by round(2^GAIN_SH / DECIM^ORDER),
//     rounded and saturated to 16 bits, giving unity DC gain.
// The impulse response is that of ORDER cascaded length-DECIM boxcars: with
// ORDER = 3, DECIM = 3 the taps are 1 3 6 7 6 3 1 over 27.
//
// Interface. One uslink_pkg::cplx16_t in per clock with in_valid high;
// out_valid pulses one clock after the in_valid that completes a group, with
// the filtered sample on out_data (held until the next out_valid). The group
// phase restarts at reset and at sync (a one-clock pulse), so all channels
// decimate in step.
//
// From the paper: that a decimator in the PL reduces the rate of the AFE's
// complex baseband output, and the 2.5 MHz output rate. Choices of this
// design: the CIC structure and order, the AFE output rate of 7.5 MS/s
// (120 MHz ADC / 16 in the AFE), hence DECIM = 3, and the sync input.
module rx_decimator
  import uslink_pkg::*;
#(
  parameter int unsigned DECIM = RX_DECIM,  // decimation factor (3)
  parameter int unsigned ORDER = 3          // CIC stages
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    sync,
  input  logic    in_valid,
  input  cplx16_t in_data,
  output logic    out_valid,
  output cplx16_t out_data
);

  localparam int unsigned CNT_W   = (DECIM > 1) ? $clog2(DECIM) : 1;
  localparam int unsigned ACC_W   = 16 + ORDER * CNT_W + 1;
  localparam longint     CIC_GAIN = longint'(DECIM) ** ORDER;
  localparam int unsigned GAIN_SH = $clog2(CIC_GAIN) + 14;
  localparam longint     GAIN_MUL = ((longint'(1) << GAIN_SH) + CIC_GAIN / 2) / CIC_GAIN;

  function automatic logic signed [15:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sd32767;
    else if (v < -64'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

  logic [CNT_W-1:0]        phase;
  logic                    last;
  logic signed [ACC_W-1:0] integ  [2][ORDER];
  logic signed [ACC_W-1:0] integ_n[2][ORDER];
  logic signed [ACC_W-1:0] comb_d [2][ORDER];
  logic signed [ACC_W-1:0] comb_c [2][ORDER+1];
  logic signed [15:0]      x      [2];

  logic signed [63:0]      pr, pi;
  assign pr = 64'(comb_c[0][ORDER]) * GAIN_MUL + (64'sd1 <<< (GAIN_SH - 1));
  assign pi = 64'(comb_c[1][ORDER]) * GAIN_MUL + (64'sd1 <<< (GAIN_SH - 1));
  assign last = (phase == CNT_W'(DECIM - 1));
  assign x[0] = in_data.re;
  assign x[1] = in_data.im;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      integ_n[p][0] = integ[p][0] + ACC_W'(x[p]);
      for (int k = 1; k < ORDER; k++) integ_n[p][k] = integ[p][k] + integ_n[p][k-1];
      comb_c[p][0] = integ_n[p][ORDER-1];
      for (int k = 0; k < ORDER; k++) comb_c[p][k+1] = comb_c[p][k] - comb_d[p][k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int p = 0; p < 2; p++)
        for (int k = 0; k < ORDER; k++) begin
          integ[p][k]  <= '0;
          comb_d[p][k] <= '0;
        end
    end else if (sync) begin
      phase     <= '0;
      out_valid <= 1'b0;
      for (int p = 0; p < 2; p++)
        for (int k = 0; k < ORDER; k++) begin
          integ[p][k]  <= '0;
          comb_d[p][k] <= '0;
        end
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        phase <= last ? '0 : phase + 1'b1;
        for (int p = 0; p < 2; p++) integ[p] <= integ_n[p];
        if (last) begin
          for (int p = 0; p < 2; p++)
            for (int k = 0; k < ORDER; k++) comb_d[p][k] <= comb_c[p][k];
          out_data.re <= sat16(pr >>> GAIN_SH);
          out_data.im <= sat16(pi >>> GAIN_SH);
        end
      end
    end
  end

endmodule
