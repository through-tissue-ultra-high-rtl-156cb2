// uslink_platform: programmable-logic part of the ultrasound video link test platform.
//
// The platform sends an OFDM waveform through tissue with a single miniature
// transducer and records it on a 16-element receive array. Waveform
// generation and all demodulation are done offline; the FPGA logic only has
// to play the baseband waveform out and record the received baseband data.
// The two halves live on separate boards and clocks and share nothing here:
//
//   transmitter (tx_clk = DAC clock, 100 MHz):
//     DMA stream (2.5 MS/s complex) -> tx_duc -> 14-bit DAC word per clock
//   receiver (rx_clk, any clock fast enough for the AFE sample rate):
//     JESD204B sample bus (16 channels, complex, 7.5 MS/s)
//       -> 16 x rx_decimator (by 3, to 2.5 MS/s) -> rx_capture -> DMA stream
//
// The processor systems, DDR memories, SD cards, AXI DMA engines, the DAC,
// the AFE (amplifiers, ADCs, demodulators) and the JESD204B link are outside
// this module; their signals are its ports. The AFE's sample bus is given as
// afe_valid with one cplx16_t per channel; rx_sync restarts the decimators'
// group phase so that all channels decimate in step (it is also applied on
// each recording start). Timing of each path is described in the submodules.
//
// From the paper: the split into a DUC on the transmitter and a decimator
// plus DMA recording on the receiver, the rates, the channel count and the
// 25 s record limit. Choices of this design: the port bundles, the decimation
// split between the AFE and the FPGA, and everything listed in the
// submodules.
module uslink_platform
  import uslink_pkg::*;
#(
  parameter int unsigned CH      = RX_CHANNELS,         // receive channels (16)
  parameter int unsigned INTERP  = TX_INTERP,           // DUC interpolation (40)
  parameter int unsigned DECIM   = RX_DECIM,            // FPGA decimation (3)
  parameter int unsigned DMA_W   = 128,                 // receive DMA stream width
  parameter int unsigned MAX_REC = MAX_RECORD_SAMPLES,  // frames per recording (62.5 M)
  localparam int unsigned LEN_W  = $clog2(MAX_REC + 1)
) (
  // transmitter
  input  logic                       tx_clk,
  input  logic                       tx_rst_n,
  input  logic                       tx_en,
  input  cplx16_t                    tx_s_tdata,
  input  logic                       tx_s_tvalid,
  output logic                       tx_s_tready,
  output logic signed [DAC_BITS-1:0] dac_data,
  output logic                       dac_valid,
  output logic                       tx_underrun,
  // receiver
  input  logic                       rx_clk,
  input  logic                       rx_rst_n,
  input  logic                       rx_sync,
  input  logic                       afe_valid,
  input  cplx16_t                    afe_data [CH],
  input  logic                       rec_start,
  input  logic [LEN_W-1:0]           rec_len,
  output logic [DMA_W-1:0]           rx_m_tdata,
  output logic                       rx_m_tvalid,
  input  logic                       rx_m_tready,
  output logic                       rx_m_tlast,
  output logic                       rec_busy,
  output logic                       rec_done,
  output logic                       rec_overflow,
  output logic [LEN_W-1:0]           rec_frames
);

  // ---------------- transmitter ----------------
  tx_duc #(.INTERP(INTERP)) u_duc (
    .clk      (tx_clk),
    .rst_n    (tx_rst_n),
    .en       (tx_en),
    .s_tdata  (tx_s_tdata),
    .s_tvalid (tx_s_tvalid),
    .s_tready (tx_s_tready),
    .dac_data (dac_data),
    .dac_valid(dac_valid),
    .underrun (tx_underrun)
  );

  // ---------------- receiver ----------------
  logic    dec_valid [CH];
  cplx16_t dec_data  [CH];
  logic    dec_sync;

  // Restart the decimators with each recording so frame 0 starts a fresh group.
  assign dec_sync = rx_sync || (rec_start && !rec_busy);

  for (genvar c = 0; c < CH; c++) begin : g_ch
    rx_decimator #(.DECIM(DECIM)) u_dec (
      .clk      (rx_clk),
      .rst_n    (rx_rst_n),
      .sync     (dec_sync),
      .in_valid (afe_valid),
      .in_data  (afe_data[c]),
      .out_valid(dec_valid[c]),
      .out_data (dec_data[c])
    );
  end

  rx_capture #(.CH(CH), .DMA_W(DMA_W), .MAX_REC(MAX_REC)) u_cap (
    .clk     (rx_clk),
    .rst_n   (rx_rst_n),
    .start   (rec_start),
    .rec_len (rec_len),
    .in_valid(dec_valid[0]),
    .in_data (dec_data),
    .m_tdata (rx_m_tdata),
    .m_tvalid(rx_m_tvalid),
    .m_tready(rx_m_tready),
    .m_tlast (rx_m_tlast),
    .busy    (rec_busy),
    .done    (rec_done),
    .overflow(rec_overflow),
    .frames  (rec_frames)
  );

endmodule
