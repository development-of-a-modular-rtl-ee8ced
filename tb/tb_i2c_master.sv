// tb_i2c_master: self-checking test of the I2C byte engine.
//
// A behavioural I2C slave at address 0x40 (the INA226 default) sits on the
// wired-AND bus: it acknowledges its address, stores written bytes, returns
// 0xA5, 0x3C on reads and stretches the clock once. The test writes two bytes,
// reads two with a repeated START, addresses an absent slave, and checks
// the data, the ACK/NACK results, the bus line levels at START/STOP and the
// command duration (4*DIV cycles per bit phase group).
module tb_i2c_master;
  localparam int DIV = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, cmd_start = 0, cmd_stop = 0, cmd_read = 0, cmd_write = 0, cmd_nack = 0;
  logic [7:0] cmd_data = 0, rx_data;
  logic done, rx_nack, scl_oe, sda_oe;
  logic scl, sda, s_sda_drv, s_scl_hold;

  assign scl = !scl_oe && !s_scl_hold;
  assign sda = !sda_oe && !s_sda_drv;

  i2c_master #(.DIV(DIV)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_start, .cmd_stop,
    .cmd_read, .cmd_write, .cmd_nack, .cmd_data, .done, .rx_data, .rx_nack,
    .scl_oe, .sda_oe, .scl_i(scl), .sda_i(sda));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- slave model ----------------
  logic prev_scl = 1, prev_sda = 1;
  int   st = 0, bitcnt = 0, nstarts = 0, nstops = 0, stretch = 0, stretched = 0;
  logic [7:0] sbyte = 0, tx = 0;
  logic rw = 0;
  logic [7:0] wr_log [$];
  logic [7:0] rd_vals [2] = '{8'hA5, 8'h3C};
  int   rd_idx = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      s_sda_drv <= 0; s_scl_hold <= 0;
    end else begin
      prev_scl <= scl; prev_sda <= sda;
      if (stretch > 0) begin stretch <= stretch - 1; s_scl_hold <= (stretch > 1); end
      if (scl && prev_scl && prev_sda && !sda) begin          // START
        st <= 1; bitcnt <= 0; sbyte <= 0; nstarts <= nstarts + 1;
      end else if (scl && prev_scl && !prev_sda && sda) begin // STOP
        st <= 0; nstops <= nstops + 1; s_sda_drv <= 0;
      end else if (scl && !prev_scl) begin                    // rising SCL
        if (bitcnt < 8) begin sbyte <= {sbyte[6:0], sda}; bitcnt <= bitcnt + 1; end
        else if (bitcnt == 8) begin
          bitcnt <= 9;
          if (st == 3 && sda) st <= 4;                        // master NACK: stop sending
        end
      end else if (!scl && prev_scl) begin                    // falling SCL
        if (bitcnt == 8) begin
          if (st == 1) begin
            if (sbyte[7:1] == 7'h40) begin s_sda_drv <= 1; rw <= sbyte[0]; end
            else st <= 4;
          end else if (st == 2) begin wr_log.push_back(sbyte); s_sda_drv <= 1; end
          else s_sda_drv <= 0;
        end else if (bitcnt == 9) begin
          bitcnt <= 0; sbyte <= 0;
          if (st == 1 && rw) begin
            st <= 3; tx = rd_vals[rd_idx]; rd_idx <= rd_idx + 1; s_sda_drv <= !tx[7];
          end else if (st == 3) begin
            tx = rd_vals[rd_idx]; rd_idx <= rd_idx + 1; s_sda_drv <= !tx[7];
          end else begin
            if (st == 1) st <= 2;
            s_sda_drv <= 0;
            if (st == 2 && stretched == 0) begin stretch <= 80; s_scl_hold <= 1; stretched <= 1; end
          end
        end else if (st == 3 && bitcnt >= 1 && bitcnt <= 7) begin
          s_sda_drv <= !tx[7 - bitcnt];
        end
      end
    end
  end

  longint ncyc = 0;
  always @(posedge clk) ncyc <= ncyc + 1;

  // ---------------- master commands ----------------
  task automatic do_cmd(input bit st_, sp, rd, wr, nk, input logic [7:0] d, output int cyc);
    longint t0;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 1; {cmd_start, cmd_stop, cmd_read, cmd_write, cmd_nack} <= {st_, sp, rd, wr, nk}; cmd_data <= d;
    @(posedge clk); cmd_valid <= 0;
    t0 = ncyc;
    while (!done) @(posedge clk);
    cyc = int'(ncyc - t0);
  endtask

  int cyc;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    check(scl && sda, "bus idle high after reset");
    // write 0x80 (addr 0x40, W), 0x12, 0x34 + STOP
    do_cmd(1, 0, 0, 1, 0, 8'h80, cyc);
    check(!rx_nack, "address ACKed");
    check(cyc >= 40*DIV && cyc <= 40*DIV + 4, $sformatf("START+byte takes 40*DIV cycles (got %0d)", cyc));
    do_cmd(0, 0, 0, 1, 0, 8'h12, cyc);
    check(!rx_nack, "data byte 1 ACKed");
    check(cyc >= 36*DIV && cyc <= 36*DIV + 4, $sformatf("byte takes 36*DIV cycles (got %0d)", cyc));
    do_cmd(0, 1, 0, 1, 0, 8'h34, cyc);
    check(!rx_nack, "data byte 2 ACKed");
    check(cyc >= 40*DIV + 50, $sformatf("clock stretch lengthens byte+STOP (got %0d)", cyc));
    check(scl && sda, "bus released after STOP");
    check(wr_log.size() == 2, "slave got two bytes");
    if (wr_log.size() == 2) begin
      check(wr_log[0] == 8'h12, $sformatf("byte 1 = %h", wr_log[0]));
      check(wr_log[1] == 8'h34, $sformatf("byte 2 = %h", wr_log[1]));
    end
    // read: START 0x81, read ACK, read NACK + STOP
    do_cmd(1, 0, 0, 1, 0, 8'h81, cyc);
    check(!rx_nack, "read address ACKed");
    do_cmd(0, 0, 1, 0, 0, 8'h00, cyc);
    check(rx_data == 8'hA5, $sformatf("read byte 1 = %h", rx_data));
    do_cmd(0, 1, 1, 0, 1, 8'h00, cyc);
    check(rx_data == 8'h3C, $sformatf("read byte 2 = %h", rx_data));
    // absent slave
    do_cmd(1, 1, 0, 1, 0, 8'h90, cyc);
    check(rx_nack, "absent slave NACKs");
    check(nstarts == 3, $sformatf("3 START conditions (got %0d)", nstarts));
    check(nstops == 3, $sformatf("3 STOP conditions (got %0d)", nstops));
    check(scl && sda, "bus idle at end");
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
