// tb_fei4_config: self-checking test of the FE-I4B command serializer.
//
// A model of the chip samples cmd_data on every rising edge of cmd_clk. The
// test sends back-to-back words of 5, 32 and 9 bits and checks that the
// sampled bit stream equals the words' bits MSB first with no gaps, that
// zeros are sent when idle, and that cmd_clk runs at clk/DIV with 50% duty.
module tb_fei4_config;
  localparam int DIV = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic word_valid = 0, word_ready, busy, cmd_clk, cmd_data;
  logic [31:0] word_data = 0;
  logic [5:0]  word_bits = 0;

  fei4_config #(.DIV(DIV)) dut (.clk, .rst_n, .word_valid, .word_ready, .word_data, .word_bits,
    .busy, .cmd_clk, .cmd_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit   stream [$];
  logic pclk = 1;
  int   hi = 0, lo = 0;
  longint last_rise = -1, ncyc = 0, period_err = 0;
  always @(posedge clk) begin
    ncyc <= ncyc + 1;
    pclk <= cmd_clk;
    if (rst_n) begin
      if (cmd_clk) hi <= hi + 1; else lo <= lo + 1;
      if (cmd_clk && !pclk) begin
        stream.push_back(cmd_data);
        if (last_rise >= 0 && ncyc - last_rise != longint'(DIV)) period_err <= period_err + 1;
        last_rise <= ncyc;
      end
    end
  end

  task automatic send(input logic [31:0] d, input logic [5:0] n);
    word_valid <= 1; word_data <= d; word_bits <= n;
    @(posedge clk);
    while (!word_ready) @(posedge clk);
    word_valid <= 0;
  endtask

  bit expect_q [$];
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (20) @(posedge clk);
    stream.delete();
    // model side: align to the first rising edge after the words start
    send(32'h0000_001D, 6'd5);        // 11101
    send(32'hC0FF_EE01, 6'd0);        // 32 bits
    send(32'h0000_0155, 6'd9);        // 101010101
    @(posedge clk); while (busy) @(posedge clk);
    repeat (4*DIV) @(posedge clk);
    for (int i = 4; i >= 0; i--) expect_q.push_back(1'(32'h1D >> i));
    for (int i = 31; i >= 0; i--) expect_q.push_back(1'(32'hC0FFEE01 >> i));
    for (int i = 8; i >= 0; i--) expect_q.push_back(1'(32'h155 >> i));
    begin
      automatic int first = -1;
      automatic string got = "";
      for (int i = 0; i < stream.size(); i++) if (stream[i]) begin first = i; break; end
      check(first >= 0, "some command bits seen");
      // bits before the first one are idle zeros, the words follow without gaps
      for (int i = 0; i < 46 && first >= 0; i++)
        check(first + i < stream.size() && stream[first + i] == expect_q[i], $sformatf("bit %0d", i));
      for (int i = first + 46; i < stream.size(); i++)
        check(stream[i] == 0, "idle zeros after the words");
    end
    check(period_err == 0, "cmd_clk period is DIV cycles");
    check(hi - lo <= 4 && lo - hi <= 4, $sformatf("50%% duty (hi %0d lo %0d)", hi, lo));
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
