// tb_cmd_decode: self-checking test of the command decoder.
//
// Two register-bus masters (the AXI4-Lite and the GBT side) access the
// decoder; simple target models stand in for the controlled blocks. The test
// checks read/write registers, read-only status and counters, that commands
// for a busy target stall the access until the target takes them (and then
// reach it exactly once with the right bits), and that the AXI4-Lite side
// wins when both masters request in the same cycle.
module tb_cmd_decode;
  import caribou_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  reg_req_t axi_req = '0, gbt_req = '0;
  reg_rsp_t axi_rsp, gbt_rsp;
  logic adc_enable, fei4_enable, link_gbt;
  logic i2c_valid, i2c_ready = 1, i2c_rx_nack = 1;
  logic [12:0] i2c_cmd;
  logic [7:0] i2c_rx_data = 8'h5A;
  logic sens_valid, sens_ready = 1, sens_load, sens_busy = 0;
  logic [31:0] sens_data;
  logic [5:0] sens_bits, fei4c_bits;
  logic fei4c_valid, fei4c_ready = 1, fei4c_busy = 0;
  logic [31:0] fei4c_data;
  logic [31:0] ddr_base, ddr_size, ddr_rcount;

  cmd_decode dut (.clk, .rst_n, .axi_req, .axi_rsp, .gbt_req, .gbt_rsp,
    .adc_enable, .fei4_enable, .link_gbt,
    .i2c_valid, .i2c_ready, .i2c_cmd, .i2c_rx_data, .i2c_rx_nack,
    .sens_valid, .sens_ready, .sens_data, .sens_bits, .sens_load, .sens_busy,
    .fei4c_valid, .fei4c_ready, .fei4c_data, .fei4c_bits, .fei4c_busy,
    .adc_frames(32'd111), .adc_drops(16'd2), .fei4_locked(1'b1), .fei4_records(32'd333),
    .fei4_errors(32'd4), .fei4_drops(16'd5),
    .ddr_base, .ddr_size, .ddr_rcount, .ddr_wcount(32'h1234), .gbt_frames(32'd77), .gbt_lost(16'd5));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_i2c = 0, n_sens = 0, n_load = 0, n_fei4 = 0;
  logic [12:0] last_i2c; logic [31:0] last_sens, last_fei4;
  always @(posedge clk) begin
    if (i2c_valid && i2c_ready)     begin n_i2c++;  last_i2c  <= i2c_cmd;    end
    if (sens_valid && sens_ready)   begin n_sens++; last_sens <= sens_data;  end
    if (sens_load)                  n_load++;
    if (fei4c_valid && fei4c_ready) begin n_fei4++; last_fei4 <= fei4c_data; end
  end

  // one access on either port; returns the cycles until ack
  task automatic access(input bit gbt, input bit we, input logic [7:0] a, input logic [31:0] d,
                        output logic [31:0] rd, output int wait_cyc);
    reg_req_t r;
    r.valid = 1; r.we = we; r.addr = a; r.wdata = d;
    @(negedge clk);
    if (gbt) gbt_req = r; else axi_req = r;
    wait_cyc = 0;
    forever begin
      #1;
      if (gbt ? gbt_rsp.ack : axi_rsp.ack) break;
      @(negedge clk); wait_cyc++;
    end
    rd = gbt ? gbt_rsp.rdata : axi_rsp.rdata;
    @(posedge clk);
    @(negedge clk);
    if (gbt) gbt_req = '0; else axi_req = '0;
  endtask

  logic [31:0] v; int w;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    access(0, 0, REG_ID, 0, v, w);           check(v == FW_ID, "ID register");
    access(0, 1, REG_CTRL, 32'h5, v, w);
    check(adc_enable && !fei4_enable && link_gbt, "CTRL bits drive the enables");
    access(1, 0, REG_CTRL, 0, v, w);         check(v == 32'h5, "CTRL read back over GBT side");
    access(1, 1, REG_DDR_BASE, 32'h1000_0000, v, w);
    access(0, 1, REG_DDR_SIZE, 32'h0010_0000, v, w);
    access(0, 1, REG_DDR_RCOUNT, 32'h40, v, w);
    check(ddr_base == 32'h1000_0000 && ddr_size == 32'h0010_0000 && ddr_rcount == 32'h40, "ring registers");
    access(0, 0, REG_DDR_WCOUNT, 0, v, w);   check(v == 32'h1234, "write counter readable");
    access(0, 0, REG_ADC_FRAMES, 0, v, w);   check(v == 111, "ADC frame counter");
    access(0, 0, REG_FEI4_RECS, 0, v, w);    check(v == 333, "FE-I4B record counter");
    access(0, 0, REG_FEI4_ERRS, 0, v, w);    check(v == 4, "FE-I4B error counter");
    access(0, 0, REG_DROPS, 0, v, w);        check(v == {16'd5, 16'd2}, "drop counters");
    access(0, 0, REG_GBT_FRAMES, 0, v, w);   check(v == 77, "GBT frame counter");
    access(0, 0, REG_GBT_LOST, 0, v, w);     check(v == 5, "GBT lost-command counter");
    access(0, 0, REG_I2C_RX, 0, v, w);       check(v == {22'd0, 1'b0, 1'b1, 8'h5A}, "I2C receive register");
    access(0, 0, REG_STATUS, 0, v, w);       check(v[4] == 1'b1, "lock flag in status");
    // command to a busy I2C controller stalls until it is ready
    i2c_ready = 0;
    fork begin repeat (7) @(negedge clk); i2c_ready = 1; end join_none
    access(0, 1, REG_I2C_CMD, 32'h1A5, v, w);
    check(w >= 6, $sformatf("I2C command stalled while busy (%0d cycles)", w));
    check(n_i2c == 1 && last_i2c == 13'h1A5, "I2C command delivered once");
    access(1, 1, REG_SENS_BITS, 32'd20, v, w);
    access(1, 1, REG_SENS_DATA, 32'hABCDE, v, w);
    check(n_sens == 1 && last_sens == 32'hABCDE && sens_bits == 6'd20, "sensor word delivered");
    access(1, 1, REG_SENS_LOAD, 0, v, w);
    check(n_load == 1, "sensor load strobe");
    access(0, 1, REG_FEI4_BITS, 32'd5, v, w);
    fei4c_ready = 0;
    fork begin repeat (3) @(negedge clk); fei4c_ready = 1; end join_none
    access(0, 1, REG_FEI4_DATA, 32'h1D, v, w);
    check(w >= 2 && n_fei4 == 1 && last_fei4 == 32'h1D && fei4c_bits == 5, "FE-I4B word delivered after stall");
    // both masters at once: AXI4-Lite first
    @(negedge clk);
    axi_req = '{valid: 1'b1, we: 1'b0, addr: REG_ID, wdata: 0};
    gbt_req = '{valid: 1'b1, we: 1'b0, addr: REG_GBT_FRAMES, wdata: 0};
    #1;
    check(axi_rsp.ack && !gbt_rsp.ack && axi_rsp.rdata == FW_ID, "AXI4-Lite side has priority");
    @(negedge clk); axi_req = '0; #1;
    check(gbt_rsp.ack && gbt_rsp.rdata == 77, "GBT side served next");
    @(negedge clk); gbt_req = '0;
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
