// uslink_pkg: types and constants shared by the ultrasound-link FPGA platform.
//
// The platform moves complex baseband samples. A sample is carried as a packed
// struct of two 16-bit two's-complement words; being packed, the real (I) part
// sits in bits [31:16] and the imaginary (Q) part in bits [15:0] of a 32-bit
// word. The rates below are those of the test platform: a 100 MHz DAC clock on
// the transmitter, a 120 MHz ADC on the receiver, a 2.5 MHz complex baseband
// rate on both sides, a 3.75 MHz carrier and 16 receive channels. The
// 16-bit I/Q word layout and the 7.5 MHz rate at the AFE output are choices of
// this design; the rest are the platform's published numbers.
package uslink_pkg;

  typedef struct packed {
    logic signed [15:0] re;
    logic signed [15:0] im;
  } cplx16_t;

  localparam int unsigned SAMPLE_W     = 32;           // bits per complex sample
  localparam int unsigned RX_CHANNELS  = 16;           // receive channels
  localparam int unsigned DAC_BITS     = 14;           // transmit DAC resolution
  localparam longint unsigned DAC_FS_HZ = 100_000_000; // DAC sample rate
  localparam longint unsigned ADC_FS_HZ = 120_000_000; // ADC sample rate
  localparam longint unsigned BB_FS_HZ  = 2_500_000;   // recorded/played baseband rate
  localparam longint unsigned FC_HZ     = 3_750_000;   // carrier frequency
  localparam longint unsigned AFE_DECIM = 16;          // decimation inside the AFE demodulator (assumed)
  localparam int unsigned TX_INTERP    = int'(DAC_FS_HZ / BB_FS_HZ);              // 40
  localparam int unsigned RX_DECIM     = int'(ADC_FS_HZ / AFE_DECIM / BB_FS_HZ);  // 3
  localparam int unsigned RECORD_SECONDS = 25;
  localparam int unsigned MAX_RECORD_SAMPLES = RECORD_SECONDS * int'(BB_FS_HZ); // 62.5 M per channel
  // NCO tuning word for FC_HZ at DAC_FS_HZ with a 32-bit phase accumulator:
  // round(2^32 * 3.75 / 100).
  localparam logic [31:0] TX_FTW = 32'((64'(FC_HZ) * 64'h1_0000_0000 + DAC_FS_HZ / 2) / DAC_FS_HZ);

endpackage
