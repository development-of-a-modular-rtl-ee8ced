// tb_sensor_config: self-checking test of the sensor configuration port.
//
// A model of the sensor's two-phase shift register captures sin on each ck1
// rising edge and shifts on each ck2 rising edge; the ld strobe copies the
// register into a latch. The test sends a 32-bit word, a 7-bit word and a
// 13-bit word, then a load, and checks the latched bits, that ck1 and ck2
// never overlap, the number of shift clocks and the 4*DIV cycles per bit.
module tb_sensor_config;
  localparam int DIV = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic word_valid = 0, word_ready, load_req = 0, busy, sin, ck1, ck2, ld;
  logic [31:0] word_data = 0;
  logic [5:0]  word_bits = 0;

  sensor_config #(.DIV(DIV)) dut (.clk, .rst_n, .word_valid, .word_ready, .word_data, .word_bits,
    .load_req, .busy, .sin, .ck1, .ck2, .ld);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // sensor model
  logic [63:0] chain = 0, latched = 0;
  logic m = 0, p1 = 0, p2 = 0, pl = 0;
  int n_ck1 = 0, n_ck2 = 0, overlap = 0;
  longint ncyc = 0;
  always @(posedge clk) if (rst_n) begin
    ncyc <= ncyc + 1;
    p1 <= ck1; p2 <= ck2; pl <= ld;
    if (ck1 && !p1) begin m <= sin; n_ck1 <= n_ck1 + 1; end
    if (ck2 && !p2) begin chain <= {chain[62:0], m}; n_ck2 <= n_ck2 + 1; end
    if (ld && !pl) latched <= chain;
    if (ck1 && ck2) overlap <= overlap + 1;
  end

  task automatic send(input logic [31:0] d, input logic [5:0] n, output longint cyc);
    longint t0;
    @(posedge clk);
    while (!word_ready) @(posedge clk);
    word_valid <= 1; word_data <= d; word_bits <= n;
    @(posedge clk); word_valid <= 0; t0 = ncyc;
    @(posedge clk);
    while (busy) @(posedge clk);
    cyc = ncyc - t0;
  endtask

  longint cyc;
  logic [63:0] expect_v;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    send(32'hDEADBEEF, 6'd0, cyc);
    check(cyc >= 4*DIV*32 && cyc <= 4*DIV*32 + 2, $sformatf("32 bits take 4*DIV*32 cycles (got %0d)", cyc));
    send(32'hFFFF_FF55, 6'd7, cyc);          // only the low 7 bits (1010101) go out
    check(cyc >= 4*DIV*7 && cyc <= 4*DIV*7 + 2, $sformatf("7 bits take 4*DIV*7 cycles (got %0d)", cyc));
    send(32'h0000_1ABC, 6'd13, cyc);
    @(posedge clk);
    load_req <= 1; @(posedge clk); load_req <= 0;
    @(posedge clk); while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
    expect_v = {12'd0, 32'hDEADBEEF, 7'b1010101, 13'h1ABC};
    check(latched == expect_v, $sformatf("latched %h expected %h", latched, expect_v));
    check(n_ck1 == 52 && n_ck2 == 52, $sformatf("52 shift clocks (ck1 %0d ck2 %0d)", n_ck1, n_ck2));
    check(overlap == 0, "ck1 and ck2 never overlap");
    check(!ld && !ck1 && !ck2, "lines idle at end");
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
