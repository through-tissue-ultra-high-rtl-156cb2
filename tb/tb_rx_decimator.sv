// tb_rx_decimator: self-checking testbench of the per-channel receive decimator.
//
// Feeds random complex samples, with random idle clocks between them, into
// rx_decimator at its default sizes (decimate by 3, third-order CIC) and
// compares each output with the direct convolution of the input with the
// taps 1 3 6 7 6 3 1 divided by 27, taken at the last input of each group of
// three. Checks that out_valid follows the group's last in_valid by exactly
// one clock, that the output count is a third of the input count, that a
// sync pulse restarts the filter from an empty history, and that a
// full-scale constant comes out unchanged (unity DC gain).
module tb_rx_decimator;
  import uslink_pkg::*;

  localparam int NIN = 300;

  logic clk = 1'b0, rst_n = 1'b0, sync = 1'b0, in_valid = 1'b0, out_valid;
  cplx16_t in_data, out_data;

  rx_decimator dut (.*);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  int xr [$], xi [$];        // history since the last restart
  int n_out = 0, exp_out = 0, late = 0;
  bit pending = 0;
  int er = 0, ei = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int taps(int j);
    int t [7] = '{1, 3, 6, 7, 6, 3, 1};
    return t[j];
  endfunction

  function automatic int ref_out(ref int q [$]);
    longint s = 0;
    int n = q.size() - 1;
    for (int j = 0; j < 7; j++) if (n - j >= 0) s += longint'(taps(j)) * q[n - j];
    return int'($floor(real'(s) / 27.0 + 0.5));
  endfunction

  // checker: compares on the edge after the group completes
  always @(posedge clk) begin
    if (!rst_n) begin
      // registers are undefined until the first reset edge
    end else if (out_valid) begin
      n_out++;
      checks++;
      if (!pending) begin
        failures++; late++;
        $display("unexpected out_valid at %0t after %0d inputs", $time, xr.size());
      end else if (out_data.re - er > 1 || er - out_data.re > 1 ||
                   out_data.im - ei > 1 || ei - out_data.im > 1) begin
        failures++;
        if (failures < 10) $display("out %0d: got (%0d,%0d) expected (%0d,%0d)",
                                    n_out, out_data.re, out_data.im, er, ei);
      end
    end else if (pending) begin
      checks++; failures++; late++;
      $display("out_valid missing one clock after the group");
    end
    pending = 0;
  end

  task automatic push(input int r, input int i);
    @(negedge clk);
    in_valid = 1; in_data.re = 16'(r); in_data.im = 16'(i);
    xr.push_back(r); xi.push_back(i);
    @(posedge clk);
    if (xr.size() % 3 == 0) begin
      #1;
      pending = 1; er = ref_out(xr); ei = ref_out(xi); exp_out++;
    end
    @(negedge clk);
    in_valid = 0;
    repeat ($urandom_range(2)) @(negedge clk);
  endtask

  initial begin
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NIN; n++)
      push($signed($urandom_range(65535)) - 32768, $signed($urandom_range(65535)) - 32768);
    // restart mid-group
    push(1000, -1000);
    @(negedge clk); sync = 1; @(negedge clk); sync = 0;
    xr.delete(); xi.delete();
    for (int n = 0; n < 30; n++)
      push($signed($urandom_range(20000)) - 10000, $signed($urandom_range(20000)) - 10000);
    // full-scale constant: unity gain once the filter has filled
    for (int n = 0; n < 12; n++) push(32767, -32768);
    repeat (4) @(posedge clk);
    checks++;
    if (out_data.re != 32767 || out_data.im != -32768) begin
      failures++; $display("DC gain: got (%0d,%0d)", out_data.re, out_data.im);
    end
    checks++;
    if (n_out != exp_out || exp_out != NIN / 3 + 14) begin
      failures++; $display("outputs %0d, expected %0d", n_out, exp_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
