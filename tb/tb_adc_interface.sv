// tb_adc_interface: self-checking test of the ADC receiver.
//
// A serial ADC model on its own bit clock (period 7 ns against the 10 ns
// system clock) sends frames of LANES 12-bit samples, MSB first, with the
// frame clock high for the first half of each sample. Sample l of frame n is
// {l, n} so every word can be checked on its own: the test checks the tag,
// channel order, frame numbers, sample values, that nothing is captured while
// disabled, and that frames are dropped and counted, never corrupted, while
// the output is held off.
module tb_adc_interface;
  localparam int LANES = 8, BITS = 12;
  logic clk = 0, dco = 0, rst_n = 0;
  always #5 clk = ~clk;
  always #3.5 dco = ~dco;

  logic fco = 0, enable = 0, out_valid, out_ready = 1;
  logic [LANES-1:0] d = 0;
  logic [31:0] out_data, frames;
  logic [15:0] drops;

  adc_interface #(.LANES(LANES), .BITS(BITS), .FIFO_DEPTH(4)) dut (
    .adc_dco(dco), .adc_fco(fco), .adc_d(d), .clk, .rst_n, .enable,
    .out_valid, .out_ready, .out_data, .frames, .drops);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ADC model: bit b of the frame is driven after the falling dco edge
  int frame_idx = 0, bitn = 0;
  always @(negedge dco) begin
    if (rst_n) begin
      fco <= (bitn < BITS/2);
      for (int l = 0; l < LANES; l++) begin
        logic [BITS-1:0] smp;
        smp = BITS'({3'(l), 9'(frame_idx)});
        d[l] <= smp[BITS-1-bitn];
      end
      if (bitn == BITS-1) begin bitn <= 0; frame_idx <= frame_idx + 1; end
      else bitn <= bitn + 1;
    end
  end

  // checker
  int words = 0, nframes_seen = 0, last_idx = -1, bad = 0;
  int exp_ch = 0;
  logic [7:0] last_fnum = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      words++;
      if (out_data[31:28] != 4'hA) bad++;
      if (out_data[27:24] != 4'(exp_ch)) bad++;
      if (out_data[15:12] != 4'h0 || out_data[11:9] != 3'(exp_ch)) bad++;
      if (exp_ch == 0) begin
        if (last_idx >= 0 && out_data[8:0] == 9'(last_idx)) bad++;   // frames never repeat
        last_idx = int'(out_data[8:0]);
        last_fnum <= out_data[23:16];
      end else if (out_data[8:0] != 9'(last_idx) || out_data[23:16] != last_fnum) bad++;
      exp_ch = (exp_ch + 1) % LANES;
      if (exp_ch == 0) nframes_seen++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (300) @(posedge clk);
    check(words == 0 && frames == 0, "nothing captured while disabled");
    enable = 1;
    repeat (2000) @(posedge clk);
    check(nframes_seen > 100, $sformatf("frames flow (%0d)", nframes_seen));
    check(bad == 0, $sformatf("all words well formed (%0d bad)", bad));
    check(frames == 32'(nframes_seen), "frame counter");
    check(drops == 0, "no drops while output ready");
    // rate: one frame per BITS dco cycles, 7 ns each = 84 ns; 2000 clk cycles = 20 us
    check(nframes_seen >= 20000/84 - 6 && nframes_seen <= 20000/84 + 2,
          $sformatf("frame rate of one per %0d bit clocks (%0d frames)", BITS, nframes_seen));
    // hold the output off: the crossing FIFO fills, frames are dropped
    out_ready = 0;
    repeat (1000) @(posedge clk);
    out_ready = 1;
    repeat (1000) @(posedge clk);
    check(drops > 0, $sformatf("drops counted while held off (%0d)", drops));
    check(bad == 0, $sformatf("no corrupted words after the overflow (%0d bad)", bad));
    enable = 0;
    repeat (300) @(posedge clk);
    check(exp_ch == 0, "output stops on a frame boundary");
    check(32'(last_fnum) + 1 == (frames + 32'(drops)) % 256, "frame number counts delivered plus dropped frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
