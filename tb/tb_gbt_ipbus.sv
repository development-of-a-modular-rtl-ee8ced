// tb_gbt_ipbus: self-checking test of the GBT command path.
//
// Downlink frames carrying write and read commands are presented on the
// receive strobe; a register-file model acknowledges the resulting bus
// requests after a random delay and a packer model takes read responses
// after a random delay. The test checks the writes reach the registers,
// reads return the register contents with their index, non-command and
// non-data frames are ignored, and a command arriving while one is still in
// progress is dropped and counted.
module tb_gbt_ipbus;
  import caribou_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rx_strobe = 0, rx_isdata = 0, rsp_valid, rsp_ready = 0;
  logic [83:0] rx_data = 0;
  logic [7:0]  rsp_addr;
  logic [31:0] rsp_data;
  logic [15:0] lost;
  reg_req_t req;
  reg_rsp_t rsp;

  gbt_ipbus dut (.clk, .rst_n, .rx_strobe, .rx_data, .rx_isdata, .req, .rsp,
    .rsp_valid, .rsp_ready, .rsp_addr, .rsp_data, .lost);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] regs [256];
  int delay = 0, nreq = 0;
  always_comb begin
    rsp.ack = req.valid && delay == 0;
    rsp.rdata = regs[req.addr];
  end
  always @(posedge clk) begin
    if (req.valid && delay == 0) begin
      nreq++;
      if (req.we) regs[req.addr] <= req.wdata;
      delay <= $urandom_range(0, 5);
    end else if (req.valid) delay <= delay - 1;
    rsp_ready <= ($urandom_range(0, 3) == 0);
  end

  logic [39:0] rsp_q [$];
  always @(posedge clk) if (rsp_valid && rsp_ready) rsp_q.push_back({rsp_addr, rsp_data});

  task automatic frame(input logic [3:0] t, input logic [7:0] a, input logic [31:0] d, input bit isdata);
    @(negedge clk);
    rx_strobe = 1; rx_isdata = isdata; rx_data = {4'h0, t, 4'h0, a, 32'h0, d};
    @(negedge clk);
    rx_strobe = 0;
  endtask

  task automatic settle();
    repeat (30) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < 256; i++) regs[i] = 32'(i) * 32'h01010101;
    repeat (3) @(posedge clk); rst_n = 1;
    frame(GBT_WRITE, 8'h10, 32'hCAFE0010, 1); settle();
    check(regs[8'h10] == 32'hCAFE0010, "write reaches register");
    frame(GBT_READ, 8'h10, 0, 1); settle();
    check(rsp_q.size() == 1 && rsp_q[0] == {8'h10, 32'hCAFE0010}, "read returns register with index");
    frame(GBT_READ, 8'h22, 0, 1); settle();
    check(rsp_q.size() == 2 && rsp_q[1] == {8'h22, 32'h22222222}, "second read");
    frame(GBT_WRITE, 8'h30, 32'h1, 0); settle();
    check(regs[8'h30] == 32'h30303030, "frame with isdata low ignored");
    frame(GBT_DATA, 8'h31, 32'h1, 1); settle();
    check(regs[8'h31] == 32'h31313131 && nreq == 3, "non-command frame ignored");
    // two commands back to back: the second one is lost
    frame(GBT_WRITE, 8'h40, 32'hAAAA, 1);
    frame(GBT_WRITE, 8'h41, 32'hBBBB, 1);
    settle();
    check(regs[8'h40] == 32'hAAAA && regs[8'h41] == 32'h41414141, "command during a busy access dropped");
    check(lost == 1, $sformatf("lost counter (%0d)", lost));
    check(nreq == 4, $sformatf("one bus request per accepted command (%0d)", nreq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
