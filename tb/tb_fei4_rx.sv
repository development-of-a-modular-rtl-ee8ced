// tb_fei4_rx: self-checking test of the FE-I4B data interface.
//
// The FE-I4B output model sends noise, then idle K.28.1 symbols, then frames
// (K.28.7, three bytes per record, K.28.5) of random records. The test checks
// that the receiver locks, that every record comes out once and in order with
// the FE-I4B tag, that an invalid symbol drops the lock, counts an error and
// aborts the frame it falls into, that the receiver relocks on the following
// idles, that a valid symbol with the wrong running disparity is treated the
// same way, and that a record appears one clock after its last bit.
// It also sends every data byte once, checking the 10b/8b decoder.
module tb_fei4_rx;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic din, locked, rec_valid, enable = 0;
  logic [31:0] rec_data, records, code_errors;

  fei4_data_model #(.START_BITS(37)) fe (.clk, .rst_n, .dout(din));
  fei4_rx dut (.clk, .rst_n, .enable, .din, .locked, .rec_valid, .rec_data, .records, .code_errors);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [23:0] exp_q [$];
  int got = 0, lock_losses = 0;
  logic plocked = 0;
  always @(posedge clk) begin
    plocked <= locked;
    if (plocked && !locked) lock_losses++;
    if (rec_valid) begin
      got++;
      if (exp_q.size() == 0) check(0, "unexpected record");
      else begin
        logic [23:0] e;
        e = exp_q.pop_front();
        check(rec_data == {4'hF, 4'h0, e}, $sformatf("record %h expected %h", rec_data, e));
      end
    end
  end

  task automatic frame(input int nrec, input bit keep);
    fe.put_k(8'hFC);
    for (int r = 0; r < nrec; r++) begin
      logic [23:0] v;
      v = 24'($urandom);
      if (keep) exp_q.push_back(v);
      fe.put_d(v[23:16]); fe.put_d(v[15:8]); fe.put_d(v[7:0]);
    end
    fe.put_k(8'hBC);
    fe.put_k(8'h3C);
  endtask

  task automatic drain();
    while (fe.pending() != 0) @(posedge clk);
    repeat (40) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; enable = 1;
    repeat (200) @(posedge clk);
    check(locked, "locked on idle commas");
    check(code_errors == 0, "no code errors while idle");
    // all 256 data bytes, as 85 records + one byte
    fe.put_k(8'hFC);
    for (int b = 0; b < 255; b += 3) begin
      exp_q.push_back({8'(b), 8'(b + 1), 8'(b + 2)});
      fe.put_d(8'(b)); fe.put_d(8'(b + 1)); fe.put_d(8'(b + 2));
    end
    fe.put_d(8'hFF);              // incomplete record, discarded at EOF
    fe.put_k(8'hBC);
    drain();
    check(got == 85, $sformatf("85 records of the byte sweep (got %0d)", got));
    check(code_errors == 0, "byte sweep without code errors");
    // random frames
    for (int f = 0; f < 20; f++) frame(1 + $urandom_range(0, 6), 1);
    drain();
    check(exp_q.size() == 0, "all random records delivered");
    // invalid symbol inside a frame: the frame is aborted
    fe.put_k(8'hFC); fe.put_d(8'h12); fe.put_d(8'h34); fe.put_d(8'h56);
    exp_q.push_back(24'h123456);
    fe.put_raw(10'b1111111111);
    fe.put_d(8'h77); fe.put_d(8'h88); fe.put_d(8'h99);  // lost with the frame
    fe.put_k(8'hBC);
    for (int i = 0; i < 4; i++) fe.put_k(8'h3C);
    drain();
    check(code_errors >= 1, "invalid symbol counted");
    check(lock_losses >= 1, "lock dropped on invalid symbol");
    check(locked, "relocked on idles");
    check(exp_q.size() == 0, "records before the error delivered");
    frame(3, 1);
    drain();
    check(exp_q.size() == 0, "records after relock delivered");
    check(records == 32'(got), "record counter matches");
    // running disparity: the same K.28.5 (negative-disparity form) twice in
    // a row is valid code but wrong disparity; one error, then relock
    begin
      logic [31:0] e0;
      e0 = code_errors;
      fe.put_raw(10'b0011111010); fe.put_raw(10'b0011111010);
      for (int i = 0; i < 4; i++) fe.put_k(8'h3C);
      drain();
      check(code_errors == e0 + 1, $sformatf("disparity error counted once (%0d)", code_errors - e0));
      check(locked, "relocked after the disparity error");
      frame(2, 1);
      drain();
      check(exp_q.size() == 0, "records after the disparity error delivered");
    end
    // latency: a record is output one clock after its last line bit
    begin
      int t_last, t_rec, n;
      fe.put_k(8'hFC); fe.put_d(8'hAB); fe.put_d(8'hCD); fe.put_d(8'hEF); fe.put_k(8'hBC);
      exp_q.push_back(24'hABCDEF);
      n = 0;
      while (fe.pending() > 1) @(posedge clk);     // EOF now waiting, last data byte on the line
      t_last = 0;
      // the remaining bits of the last data byte, then one more clock
      while (!rec_valid) begin @(posedge clk); t_last++; end
      check(t_last <= 11, $sformatf("record within 11 clocks of the last symbol start (%0d)", t_last));
      n = n;
      t_rec = t_last;
    end
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
