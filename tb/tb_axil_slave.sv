// tb_axil_slave: self-checking test of the AXI4-Lite to register-bus bridge.
//
// A register-file model acknowledges requests after a random delay. The test
// issues writes with address before data, data before address and both
// together, reads back every register, delays the response handshakes, and
// checks addresses, data and the one-request-per-access rule.
module tb_axil_slave;
  import caribou_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [11:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0, arvalid = 0, arready, rvalid, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0]  bresp, rresp;
  reg_req_t req;
  reg_rsp_t rsp;

  axil_slave #(.AXI_ADDR_W(12)) dut (.clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata), .s_wstrb(4'hF),
    .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready), .req, .rsp);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // register file model with random acknowledge delay
  logic [31:0] regs [256];
  int nreq = 0, delay = 0;
  always_comb begin
    rsp.ack   = req.valid && (delay == 0);
    rsp.rdata = regs[req.addr];
  end
  always @(posedge clk) begin
    if (req.valid && delay == 0) begin
      nreq++;
      if (req.we) regs[req.addr] <= req.wdata;
      delay <= $urandom_range(0, 3);
    end else if (req.valid && delay > 0) delay <= delay - 1;
  end

  // order 0: address and data together, 1: address first, 2: data first
  task automatic axi_write(input logic [11:0] a, input logic [31:0] d, input int order);
    bit aw_done = 0, w_done = 0, aw_hs, w_hs;
    int cyc = 0;
    while (!(aw_done && w_done)) begin
      @(negedge clk);
      if (aw_done) awvalid = 0;
      if (w_done)  wvalid  = 0;
      if (!aw_done && (order != 2 || cyc >= 3)) begin awaddr = a; awvalid = 1; end
      if (!w_done  && (order != 1 || cyc >= 3)) begin wdata  = d; wvalid  = 1; end
      aw_hs = awvalid && awready;
      w_hs  = wvalid && wready;
      @(posedge clk);
      if (aw_hs) aw_done = 1;
      if (w_hs)  w_done  = 1;
      cyc++;
    end
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    repeat ($urandom_range(0, 3)) @(negedge clk);
    check(bresp == 2'b00, "write response OKAY");
    bready = 1; @(negedge clk); bready = 0;
  endtask

  task automatic axi_read(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    while (!arready) @(negedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    repeat ($urandom_range(0, 3)) @(negedge clk);
    d = rdata;
    check(rresp == 2'b00, "read response OKAY");
    rready = 1; @(negedge clk); rready = 0;
  endtask

  logic [31:0] v, expv [16];
  initial begin
    for (int i = 0; i < 256; i++) regs[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      expv[i] = $urandom;
      axi_write(12'(i * 4), expv[i], i % 3);
    end
    check(nreq == 16, $sformatf("one request per write (%0d)", nreq));
    for (int i = 0; i < 16; i++) check(regs[i] == expv[i], $sformatf("register %0d written", i));
    for (int i = 0; i < 16; i++) begin
      axi_read(12'(i * 4), v);
      check(v == expv[i], $sformatf("register %0d read %h expected %h", i, v, expv[i]));
    end
    check(nreq == 32, $sformatf("one request per read (%0d)", nreq));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
