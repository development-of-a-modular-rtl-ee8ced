// tb_data_buffer: self-checking test of the data buffer.
//
// Random ADC words (with back-pressure) and FE-I4B words (without) go in, the
// output is taken with a random ready. The test checks that each source's
// words come out complete and in order, that the merge alternates when both
// sources have data, and that FE-I4B words beyond the FIFO depth are dropped
// and counted while the output is stalled.
module tb_data_buffer;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adc_valid = 0, adc_ready, fei4_valid = 0, out_valid, out_ready = 0;
  logic [31:0] adc_data = 0, fei4_data = 0, out_data;
  logic [15:0] fei4_drops;

  data_buffer #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .adc_valid, .adc_ready, .adc_data,
    .fei4_valid, .fei4_data, .out_valid, .out_ready, .out_data, .fei4_drops);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] aq [$], fq [$];
  int bad = 0, nout = 0, alt_ok = 0, alt_bad = 0;
  logic last_src = 0, both_avail;
  always @(posedge clk) if (rst_n) begin
    if (adc_valid && adc_ready) aq.push_back(adc_data);
    if (fei4_valid && !dut.f_full) fq.push_back(fei4_data);
    both_avail = !dut.a_empty && !dut.f_empty;
    if (out_valid && out_ready) begin
      logic src;
      src = (out_data[31:28] == 4'hF);
      if (src) begin
        if (fq.size() == 0 || fq.pop_front() != out_data) bad++;
      end else begin
        if (aq.size() == 0 || aq.pop_front() != out_data) bad++;
      end
      if (both_avail && nout > 0) begin
        if (src != last_src) alt_ok++; else alt_bad++;
      end
      last_src = src;
      nout++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // phase 1: random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!adc_valid || adc_ready) begin
        adc_valid = ($urandom_range(0, 3) == 0);
        adc_data  = {4'hA, 28'($urandom)};
      end
      fei4_valid = ($urandom_range(0, 4) == 0);
      fei4_data  = {4'hF, 28'($urandom)};
      out_ready  = ($urandom_range(0, 2) != 0);
    end
    @(negedge clk); adc_valid = 0; fei4_valid = 0; out_ready = 1;
    repeat (50) @(posedge clk);
    check(bad == 0, $sformatf("words intact and in order (%0d bad)", bad));
    check(aq.size() == 0 && fq.size() == 0, "all buffered words delivered");
    check(alt_ok > 50 && alt_bad == 0, $sformatf("round-robin when both wait (%0d ok, %0d not)", alt_ok, alt_bad));
    check(fei4_drops == 0, "no drops with a moving output");
    // phase 2: stalled output, FE-I4B overflows
    @(negedge clk); out_ready = 0;
    for (int i = 0; i < DEPTH + 5; i++) begin
      @(negedge clk); fei4_valid = 1; fei4_data = {4'hF, 28'(i)};
    end
    @(negedge clk); fei4_valid = 0;
    check(fei4_drops == 5, $sformatf("5 FE-I4B words dropped (%0d)", fei4_drops));
    check(!adc_ready == 0, "ADC side still ready (its FIFO is empty)");
    @(negedge clk); out_ready = 1;
    repeat (DEPTH + 5) @(posedge clk);
    check(fq.size() == 0 && bad == 0, "the kept words come out in order");
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
