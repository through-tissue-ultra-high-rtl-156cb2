// tb_rx_capture: self-checking testbench of the receive recorder front end.
//
// Drives rx_capture (16 channels, 128-bit stream) with 16-channel frames of
// random samples, one every FRAME_GAP clocks, and a DMA side whose tready
// drops at random. It rebuilds each frame from the stream beats (channel 0
// in the lowest bits of the first beat) and checks: the data of every frame,
// tlast on the last beat only, the frame and beat counts, busy/done, that a
// frame is sent in four back-to-back beats starting one clock after it
// arrives when tready is high, that a long stall drops frames and raises
// overflow, that rec_len = 0 gives an empty recording, and (on a second
// instance with MAX_REC = 4) that rec_len is clamped to the maximum.
module tb_rx_capture;
  import uslink_pkg::*;

  localparam int CH = 16, DMA_W = 128, BEATS = 4, FRAME_GAP = 20;
  localparam int LEN_W = $clog2(MAX_RECORD_SAMPLES + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic start = 0, in_valid = 0, m_tready = 1;
  logic [LEN_W-1:0] rec_len = '0;
  cplx16_t in_data [CH];
  logic [DMA_W-1:0] m_tdata;
  logic m_tvalid, m_tlast, busy, done, overflow;
  logic [LEN_W-1:0] frames;

  rx_capture dut (.clk, .rst_n, .start, .rec_len, .in_valid, .in_data, .m_tdata, .m_tvalid,
                  .m_tready, .m_tlast, .busy, .done, .overflow, .frames);

  // second instance with a tiny maximum, to see the clamp
  logic start2 = 0;
  logic [2:0] rec_len2 = '0;
  logic [DMA_W-1:0] t2_data;
  logic t2_valid, t2_last, busy2, done2, ovf2;
  logic [2:0] frames2;
  rx_capture #(.MAX_REC(4)) dut2 (.clk, .rst_n, .start(start2), .rec_len(rec_len2), .in_valid,
                                  .in_data, .m_tdata(t2_data), .m_tvalid(t2_valid), .m_tready(1'b1),
                                  .m_tlast(t2_last), .busy(busy2), .done(done2), .overflow(ovf2),
                                  .frames(frames2));

  int checks = 0, failures = 0;
  logic [CH*32-1:0] sent [$];     // frames offered, in order
  int  sent_cycle [$];
  logic [CH*32-1:0] rx_frame;
  int  beat = 0, n_beats = 0, n_last = 0, n_frames_rx = 0, cyc = 0, n_beats2 = 0;
  int  search = 0;                // index into sent[] for in-order matching
  int  first_beat_cycle = -1;
  bit  b2b_ok = 1, stall_mode = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stream receiver
  always @(posedge clk) begin
    cyc++;
    if (rst_n && t2_valid) n_beats2++;
    if (rst_n && m_tvalid && m_tready) begin
      rx_frame[beat*DMA_W +: DMA_W] = m_tdata;
      if (beat == 0) first_beat_cycle = cyc;
      n_beats++;
      if (m_tlast) n_last++;
      if (m_tlast && beat != BEATS - 1) begin failures++; $display("tlast mid-frame"); end
      if (beat == BEATS - 1) begin
        bit found;
        found = 0;
        if (!stall_mode && cyc - first_beat_cycle != BEATS - 1) b2b_ok = 0;
        while (search < sent.size() && !found) begin
          if (sent[search] == rx_frame) found = 1;
          search++;
        end
        checks++;
        if (!found) begin failures++; $display("frame %0d does not match a sent frame in order", n_frames_rx); end
        if (!stall_mode && found && cyc - sent_cycle[search-1] != BEATS) b2b_ok = 0;
        n_frames_rx++;
        beat = 0;
      end else beat++;
    end
  end

  task automatic send_frames(input int n);
    for (int f = 0; f < n; f++) begin
      logic [CH*32-1:0] fr;
      @(negedge clk);
      for (int c = 0; c < CH; c++) begin
        in_data[c].re = 16'($urandom);
        in_data[c].im = 16'($urandom);
        fr[c*32 +: 32] = {in_data[c].re, in_data[c].im};
      end
      in_valid = 1;
      sent.push_back(fr);
      sent_cycle.push_back(cyc + 1);
      @(negedge clk);
      in_valid = 0;
      repeat (FRAME_GAP - 2) @(negedge clk);
    end
  endtask

  task automatic do_start(input int len);
    @(negedge clk);
    rec_len = LEN_W'(len); start = 1;
    @(negedge clk);
    start = 0;
  endtask

  initial begin
    for (int c = 0; c < CH; c++) in_data[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1: clean recording of 6 frames, tready always high
    do_start(6);
    check(busy && !done, "busy after start");
    send_frames(8);    // two more than asked for
    repeat (10) @(posedge clk);
    check(done && !busy && !overflow, "done, not busy, no overflow");
    check(frames == 6 && n_frames_rx == 6 && n_beats == 6 * BEATS, "6 frames in 24 beats");
    check(n_last == 1, "one tlast");
    check(b2b_ok, "frames leave in back-to-back beats one clock after arrival");

    // 2: random short tready drops, still no loss
    stall_mode = 1; n_beats = 0; n_last = 0; n_frames_rx = 0;
    fork
      begin
        do_start(10);
        send_frames(10);
        repeat (30) @(posedge clk);
      end
      begin
        repeat (200 * FRAME_GAP / 10) begin
          @(negedge clk);
          m_tready = ($urandom_range(3) != 0);
        end
        m_tready = 1;
      end
    join
    repeat (10) @(posedge clk);
    check(done && !overflow && frames == 10 && n_frames_rx == 10 && n_last == 1,
          "recording with short tready drops is complete");

    // 3: long stall drops frames
    n_beats = 0; n_last = 0; n_frames_rx = 0;
    do_start(4);
    @(negedge clk); m_tready = 0;
    fork
      send_frames(7);
      begin repeat (3 * FRAME_GAP) @(negedge clk); m_tready = 1; end
    join
    repeat (10) @(posedge clk);
    check(overflow, "overflow after a long stall");
    check(done && frames == 4 && n_frames_rx == 4 && n_last == 1, "4 frames recorded despite drops");

    // 4: empty recording
    n_beats = 0;
    do_start(0);
    send_frames(2);
    check(done && !busy && n_beats == 0 && frames == 0 && !overflow, "rec_len 0 gives an empty recording");

    // 5: clamp on the small instance
    @(negedge clk); rec_len2 = 3'd7; start2 = 1; @(negedge clk); start2 = 0;
    send_frames(8);
    repeat (10) @(posedge clk);
    check(done2 && frames2 == 3'd4 && n_beats2 == 4 * BEATS, "rec_len clamped to MAX_REC");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
