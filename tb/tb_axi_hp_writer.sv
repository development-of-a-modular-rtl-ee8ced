// tb_axi_hp_writer: self-checking test of the DDR3 ring-buffer writer.
//
// An AXI slave memory model with random ready delays stores the bursts. The
// ring starts at an address that is not a multiple of the burst size, and a
// 4 KiB boundary falls
// inside it, between burst starts. The test streams numbered words and checks: every word lands at
// base + (n*4 mod size), bursts never cross 4 KiB and never exceed BURST
// beats, WLAST marks the last beat, a short tail is flushed after
// FLUSH_CYCLES, and the writer stops when the ring is full until the
// software's read counter advances.
module tb_axi_hp_writer;
  localparam int BURST = 16, FLUSH = 64;
  localparam logic [31:0] BASE = 32'h0000_0F08, SIZE = 32'h0000_0500;   // 1280 bytes = 320 words
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready;
  logic [31:0] in_data = 0, rcount = 0, wcount;
  logic [31:0] awaddr, wdata; logic [7:0] awlen; logic [2:0] awsize; logic [1:0] awburst;
  logic awvalid, awready = 0, wvalid, wready = 0, wlast, bvalid = 0, bready;
  logic [3:0] wstrb;

  axi_hp_writer #(.BURST(BURST), .FLUSH_CYCLES(FLUSH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .base(BASE), .size(SIZE), .rcount, .wcount,
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid),
    .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid),
    .m_wready(wready), .m_bresp(2'b00), .m_bvalid(bvalid), .m_bready(bready));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // memory model
  logic [31:0] mem [logic [31:0]];
  logic [31:0] cur_addr; int beats_left = 0, bursts = 0, cross4k = 0, toolong = 0, lastbad = 0; bit pend_b = 0;
  always @(posedge clk) begin
    awready <= ($urandom_range(0, 2) == 0) && beats_left == 0 && pend_b == 0;
    wready  <= ($urandom_range(0, 3) != 0);
    if (awvalid && awready) begin
      cur_addr = awaddr; beats_left = int'(awlen) + 1; bursts++;
      if ((awaddr & 32'hFFF) + (int'(awlen) + 1) * 4 > 32'h1000) cross4k++;
      if (int'(awlen) + 1 > BURST) toolong++;
      if (awsize != 3'd2 || awburst != 2'b01 || wstrb != 4'hF) toolong++;
    end
    if (wvalid && wready && beats_left > 0) begin
      mem[cur_addr] = wdata;
      cur_addr += 4; beats_left--;
      if (wlast != (beats_left == 0)) lastbad++;
      if (beats_left == 0) pend_b = 1;
    end
    if (bvalid && bready) begin bvalid <= 0; pend_b = 0; end
    else if (pend_b && !bvalid) bvalid <= ($urandom_range(0, 1) == 0);
  end

  task automatic push(input int n, inout int seq);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); in_valid = 1; in_data = 32'(seq);
      @(posedge clk); while (!in_ready) @(posedge clk);
      seq++;
    end
    @(negedge clk); in_valid = 0;
  endtask

  int seq = 0, t0, tw;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    push(100, seq);                          // 6 full bursts + 4 words tail
    repeat (FLUSH + 200) @(posedge clk);
    check(wcount == 400, $sformatf("100 words written, tail flushed (wcount %0d)", wcount));
    for (int n = 0; n < 100; n++) begin
      logic [31:0] a;
      a = BASE + (32'(n) * 4) % SIZE;
      check(mem.exists(a) && mem[a] == 32'(n), $sformatf("word %0d at %h", n, a));
    end
    // fill the ring: 320 words fit, software has read nothing yet
    rcount = 0;
    fork push(300, seq); join_none
    repeat (3000) @(posedge clk);
    check(wcount == SIZE, $sformatf("writer stops with the ring full (wcount %0d)", wcount));
    check(seq < 400, "input held off while the ring is full");
    rcount = 32'd800;                        // software frees 200 words
    repeat (2000) @(posedge clk);
    check(seq == 400, "input resumes after rcount advances");
    repeat (FLUSH + 200) @(posedge clk);
    check(wcount == 1600, $sformatf("all 400 words written (wcount %0d)", wcount));
    for (int n = 320; n < 400; n++) begin
      logic [31:0] a;
      a = BASE + (32'(n) * 4) % SIZE;
      check(mem.exists(a) && mem[a] == 32'(n), $sformatf("word %0d wrapped to %h", n, a));
    end
    check(cross4k == 0, "no burst crosses 4 KiB");
    check(toolong == 0, "burst length and attributes legal");
    check(lastbad == 0, "WLAST on the last beat only");
    check(bursts >= 25, $sformatf("bursts used (%0d)", bursts));
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
