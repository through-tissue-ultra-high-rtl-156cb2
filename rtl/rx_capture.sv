// rx_capture: recorder front end of the receiver, from decimated samples to the DMA stream.
//
// The receiver records all 16 channels at 2.5 MS/s for a programmed length of
// up to 25 s (62.5 M samples per channel, 4 GB in all) into DDR4 through an AXI
// DMA. Each sample period the 16 decimators deliver one complex sample each
// (in_valid high for one clock); this block latches the 16 samples as one
// CH*32-bit frame and sends the frame to the DMA as CH*32/DMA_W beats of an
// AXI4-Stream. Channel 0 occupies the lowest 32 bits of the frame and the
// lowest-numbered bits go first, so with DMA_W = 128 beat 0 carries channels
// 0..3 with channel 0 in bits [31:0]; within a channel word I is in [31:16]
// and Q in [15:0].
//
// Control. A start pulse (while not busy) clears done, overflow and the frame
// counter and loads rec_len, the number of frames to record, clamped to
// MAX_REC; recording then begins with the next in_valid. m_tlast marks the last
// beat of the last frame; after it is accepted, busy falls and done rises and
// stays high until the next start. rec_len = 0 gives an empty recording that
// ends at once. If a new frame arrives while the previous one is still
// waiting for the DMA (m_tready low for longer than a sample period), the new
// frame is dropped and the sticky overflow flag is set; frames counts the
// frames actually sent. The stream obeys the AXI4-Stream rule that tdata and
// tlast hold while tvalid is high and tready low, which an assertion checks.
//
// From the paper: recording of 16 channels of 16-bit complex baseband at
// 2.5 MHz for up to 25 s into a 4 GB DDR4 through AXI DMA. Choices of this
// design: the frame layout, the 128-bit stream width, the length register,
// and dropping frames with an overflow flag under backpressure.
module rx_capture
  import uslink_pkg::*;
#(
  parameter int unsigned CH      = RX_CHANNELS,         // channels per frame (16)
  parameter int unsigned DMA_W   = 128,                 // stream width in bits
  parameter int unsigned MAX_REC = MAX_RECORD_SAMPLES,  // longest recording, frames (62.5 M)
  localparam int unsigned LEN_W  = $clog2(MAX_REC + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LEN_W-1:0] rec_len,
  input  logic             in_valid,
  input  cplx16_t          in_data [CH],
  output logic [DMA_W-1:0] m_tdata,
  output logic             m_tvalid,
  input  logic             m_tready,
  output logic             m_tlast,
  output logic             busy,
  output logic             done,
  output logic             overflow,
  output logic [LEN_W-1:0] frames
);

  localparam int unsigned FRAME_W = CH * SAMPLE_W;
  localparam int unsigned BEATS   = FRAME_W / DMA_W;
  localparam int unsigned BEAT_W  = (BEATS > 1) ? $clog2(BEATS) : 1;

  typedef enum logic [1:0] {IDLE, RECORD, FINISHED} state_t;
  state_t state;

  logic [FRAME_W-1:0] frame_q;
  logic [FRAME_W-1:0] frame_in;
  logic [BEAT_W-1:0]  beat;
  logic               sending;
  logic               last_frame;
  logic [LEN_W-1:0]   accept_left;
  logic               beat_hs, frame_end, accept;

  always_comb
    for (int c = 0; c < CH; c++) frame_in[c*SAMPLE_W +: SAMPLE_W] = in_data[c];

  assign m_tvalid  = sending;
  assign m_tdata   = frame_q[DMA_W-1:0];
  assign m_tlast   = sending && last_frame && (beat == BEAT_W'(BEATS - 1));
  assign beat_hs   = m_tvalid && m_tready;
  assign frame_end = beat_hs && (beat == BEAT_W'(BEATS - 1));
  assign accept    = (state == RECORD) && in_valid && (accept_left != '0) &&
                     (!sending || frame_end);
  assign busy      = (state == RECORD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= IDLE;
      frame_q     <= '0;
      beat        <= '0;
      sending     <= 1'b0;
      last_frame  <= 1'b0;
      accept_left <= '0;
      done        <= 1'b0;
      overflow    <= 1'b0;
      frames      <= '0;
    end else begin
      case (state)
        IDLE, FINISHED: begin
          if (start) begin
            done        <= (rec_len == '0);
            state       <= (rec_len == '0) ? FINISHED : RECORD;
            overflow    <= 1'b0;
            frames      <= '0;
            accept_left <= (rec_len > LEN_W'(MAX_REC)) ? LEN_W'(MAX_REC) : rec_len;
          end
        end
        RECORD: begin
          if (in_valid && accept_left != '0 && sending && !frame_end) overflow <= 1'b1;
          if (beat_hs) begin
            frame_q <= frame_q >> DMA_W;
            beat    <= (beat == BEAT_W'(BEATS - 1)) ? '0 : beat + 1'b1;
          end
          if (frame_end) begin
            frames  <= frames + 1'b1;
            sending <= 1'b0;
            if (last_frame) begin
              state <= FINISHED;
              done  <= 1'b1;
            end
          end
          if (accept) begin
            frame_q     <= frame_in;
            beat        <= '0;
            sending     <= 1'b1;
            last_frame  <= (accept_left == LEN_W'(1));
            accept_left <= accept_left - 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // AXI4-Stream: a beat offered and not taken stays unchanged.
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata) && $stable(m_tlast)));

endmodule
