// tb_caribou_top: end-to-end test of the central-interface firmware at its
// default parameters.
//
// Around the firmware sit models of everything it talks to: the processing
// system's AXI4-Lite master (host commands over Ethernet) and a DDR3 memory
// behind the AXI-HP port, the GBT-FPGA core's user side (40 MHz frame strobe,
// received command frames, transmitted frames), an I2C slave on the CaR
// board, the sensor's two-phase shift register, the FE-I4B command input, the
// serial 8-channel 12-bit ADC (480 Mbit/s per lane) and the FE-I4B 8b/10b
// data output at 160 Mbit/s. The system clock is 160 MHz.
//
// The run: identify the firmware, configure power monitor, sensor and FE-I4B,
// take ADC and FE-I4B data into the DDR3 ring over the Ethernet path, switch
// to the GBT link with a command sent over GBT, take data in GBT frames and
// read a counter back over GBT, corrupt the FE-I4B stream to force a relock,
// then shrink the ring so the buffers overflow. Each mechanism is counted and
// a mechanism that never happened is a failure.
module tb_caribou_top;
  import caribou_pkg::*;
  logic clk = 0, rst_n = 0, dco = 0;
  always #3.125 clk = ~clk;       // 160 MHz
  always #1.042 dco = ~dco;       // 480 MHz ADC bit clock

  // ---------------- DUT ----------------
  logic [11:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0, arvalid = 0, arready, rvalid, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0]  bresp, rresp;
  logic [31:0] m_awaddr, m_wdata; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst;
  logic m_awvalid, m_awready = 0, m_wvalid, m_wready = 0, m_wlast, m_bvalid = 0, m_bready;
  logic [3:0] m_wstrb;
  logic gbt_tx_strobe = 0, gbt_tx_isdata, gbt_rx_strobe = 0, gbt_rx_isdata = 0;
  logic [83:0] gbt_tx_data, gbt_rx_data = 0;
  logic scl_oe, sda_oe, scl, sda, s_sda;
  logic sens_sin, sens_ck1, sens_ck2, sens_ld, fei4_cmd_clk, fei4_cmd_data;
  logic adc_fco = 0; logic [7:0] adc_d = 0;
  logic fei4_dout;

  assign scl = !scl_oe;
  assign sda = !sda_oe && !s_sda;

  caribou_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(4'hF), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen), .m_axi_awsize(m_awsize), .m_axi_awburst(m_awburst),
    .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready), .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb),
    .m_axi_wlast(m_wlast), .m_axi_wvalid(m_wvalid), .m_axi_wready(m_wready),
    .m_axi_bresp(2'b00), .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready),
    .gbt_tx_strobe, .gbt_tx_data, .gbt_tx_isdata, .gbt_rx_strobe, .gbt_rx_data, .gbt_rx_isdata,
    .i2c_scl_oe(scl_oe), .i2c_sda_oe(sda_oe), .i2c_scl_i(scl), .i2c_sda_i(sda),
    .sens_sin, .sens_ck1, .sens_ck2, .sens_ld, .fei4_cmd_clk, .fei4_cmd_data,
    .adc_dco(dco), .adc_fco, .adc_d, .fei4_dout);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int m_axil = 0, m_gbt_cmd = 0, m_gbt_rsp = 0, m_gbt_data = 0, m_i2c = 0, m_sens = 0, m_fei4cmd = 0;
  int m_ddr_burst = 0, m_ddr_short = 0, m_relock = 0, m_adc_drop = 0, m_link_switch = 0;

  // ---------------- I2C slave on the CaR board ----------------
  i2c_slave_model #(.ADDR(7'h40)) u_i2c (.clk, .rst_n, .scl, .sda, .sda_drv(s_sda));

  // ---------------- sensor shift register ----------------
  logic [63:0] s_chain = 0, s_latched = 0;
  logic s_m = 0, p1 = 0, p2 = 0, pl = 0;
  always @(posedge clk) begin
    p1 <= sens_ck1; p2 <= sens_ck2; pl <= sens_ld;
    if (sens_ck1 && !p1) s_m <= sens_sin;
    if (sens_ck2 && !p2) s_chain <= {s_chain[62:0], s_m};
    if (sens_ld && !pl) begin s_latched <= s_chain; m_sens++; end
  end

  // ---------------- FE-I4B command input ----------------
  logic [31:0] fcmd_hist = 0; logic pcc = 1;
  always @(posedge clk) begin
    pcc <= fei4_cmd_clk;
    if (fei4_cmd_clk && !pcc) begin
      fcmd_hist <= {fcmd_hist[30:0], fei4_cmd_data};
      if ({fcmd_hist[3:0], fei4_cmd_data} == 5'b11101) m_fei4cmd++;
    end
  end

  // ---------------- FE-I4B data output ----------------
  fei4_data_model #(.START_BITS(53)) u_fe (.clk, .rst_n, .dout(fei4_dout));

  // ---------------- ADC ----------------
  int a_frame = 0, a_bit = 0;
  always @(negedge dco) if (rst_n) begin
    adc_fco <= (a_bit < 6);
    for (int l = 0; l < 8; l++) begin
      logic [11:0] smp;
      smp = {3'(l), 9'(a_frame)};
      adc_d[l] <= smp[11 - a_bit];
    end
    if (a_bit == 11) begin a_bit <= 0; a_frame <= a_frame + 1; end else a_bit <= a_bit + 1;
  end

  // ---------------- data checkers (DDR3 and GBT) ----------------
  logic [23:0] fe_exp [$];
  int fe_got = 0, fe_bad = 0, adc_got = 0, adc_bad = 0, adc_ch = 0;
  task automatic check_word(input logic [31:0] w);
    if (w[31:28] == TAG_FEI4) begin
      fe_got++;
      if (fe_exp.size() == 0 || w[23:0] != fe_exp.pop_front() || w[27:24] != 0) fe_bad++;
    end else if (w[31:28] == TAG_ADC) begin
      adc_got++;
      if (w[27:24] != 4'(adc_ch) || w[11:9] != 3'(adc_ch) || w[15:12] != 0) adc_bad++;
      adc_ch = (adc_ch + 1) % 8;
    end else begin
      fe_bad++;
    end
  endtask

  // DDR3 behind AXI-HP
  logic [31:0] ddr [logic [31:0]];
  logic [31:0] cur; int beats = 0, ddr_words = 0; bit pend_b = 0;
  always @(posedge clk) begin
    m_awready <= (beats == 0) && !pend_b && ($urandom_range(0, 3) == 0);
    m_wready  <= ($urandom_range(0, 7) != 0);
    if (m_awvalid && m_awready) begin
      cur = m_awaddr; beats = int'(m_awlen) + 1; m_ddr_burst++;
      if (beats < 16) m_ddr_short++;
    end
    if (m_wvalid && m_wready && beats > 0) begin
      ddr[cur] = m_wdata; cur += 4; beats--; ddr_words++;
      check_word(m_wdata);
      if (beats == 0) pend_b = 1;
    end
    if (m_bvalid && m_bready) begin m_bvalid <= 0; pend_b = 0; end
    else if (pend_b && !m_bvalid) m_bvalid <= 1;
  end

  // GBT-FPGA user side: a frame strobe every 4 clocks (40 MHz)
  int gcnt = 0; logic pstb = 0;
  logic [39:0] gbt_rsp_q [$];
  always @(posedge clk) begin
    gcnt <= (gcnt + 1) % 4;
    gbt_tx_strobe <= (gcnt == 3);
    pstb <= gbt_tx_strobe;
    if (pstb && gbt_tx_isdata) begin
      if (gbt_tx_data[79:76] == GBT_DATA) begin
        m_gbt_data++;
        check_word(gbt_tx_data[63:32]);
        if (gbt_tx_data[75:72] == 2) check_word(gbt_tx_data[31:0]);
      end else if (gbt_tx_data[79:76] == GBT_RDRSP) begin
        m_gbt_rsp++;
        gbt_rsp_q.push_back({gbt_tx_data[71:64], gbt_tx_data[31:0]});
      end
    end
  end

  task automatic gbt_send(input gbt_type_e t, input logic [7:0] a, input logic [31:0] d);
    @(posedge clk); while (gcnt != 1) @(posedge clk);
    @(negedge clk);
    gbt_rx_strobe = 1; gbt_rx_isdata = 1; gbt_rx_data = {4'h0, t, 4'h0, a, 32'h0, d};
    @(negedge clk);
    gbt_rx_strobe = 0;
    m_gbt_cmd++;
    repeat (20) @(posedge clk);
  endtask

  // ---------------- AXI4-Lite master (processing system) ----------------
  task automatic axil_write(input logic [7:0] r, input logic [31:0] d);
    bit aw_done = 0, w_done = 0, aw_hs, w_hs;
    @(negedge clk);
    awaddr = {2'b00, r, 2'b00}; awvalid = 1; wdata = d; wvalid = 1;
    while (!(aw_done && w_done)) begin
      aw_hs = awvalid && awready;
      w_hs  = wvalid && wready;
      @(posedge clk);
      if (aw_hs) aw_done = 1;
      if (w_hs)  w_done  = 1;
      @(negedge clk);
      if (aw_done) awvalid = 0;
      if (w_done)  wvalid  = 0;
    end
    while (!bvalid) @(negedge clk);
    bready = 1; @(negedge clk); bready = 0;
    m_axil++;
  endtask

  task automatic axil_read(input logic [7:0] r, output logic [31:0] d);
    @(negedge clk);
    araddr = {2'b00, r, 2'b00}; arvalid = 1;
    while (!arready) @(negedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    rready = 1; @(negedge clk); rready = 0;
    m_axil++;
  endtask

  task automatic i2c(input logic [12:0] c);
    logic [31:0] v;
    axil_write(REG_I2C_CMD, 32'(c));
    do axil_read(REG_I2C_RX, v); while (v[9]);
    if (c[9]) check(!v[8], $sformatf("I2C byte %h acknowledged", c[7:0]));
  endtask

  task automatic fe_frame(input int nrec);
    u_fe.put_k(8'hFC);
    for (int r = 0; r < nrec; r++) begin
      logic [23:0] v;
      v = 24'($urandom);
      fe_exp.push_back(v);
      u_fe.put_d(v[23:16]); u_fe.put_d(v[15:8]); u_fe.put_d(v[7:0]);
    end
    u_fe.put_k(8'hBC);
  endtask

  logic [31:0] v, wc;
  initial begin
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (10) @(posedge clk);
    axil_read(REG_ID, v);
    check(v == FW_ID, "firmware ID over AXI4-Lite");
    // --- configuration: power monitor over I2C, sensor, FE-I4B ---
    i2c(13'h1280);                               // START, write 0x80 (INA226 at 0x40)
    i2c(13'h0205);                               // register pointer 0x05
    i2c(13'h0A12);                               // 0x12, STOP
    check(u_i2c.wr_log.size() == 2 && u_i2c.wr_log[0] == 8'h05 && u_i2c.wr_log[1] == 8'h12,
          "I2C bytes reached the slave");
    if (u_i2c.wr_log.size() == 2) m_i2c++;
    i2c(13'h1281);                               // START, read address
    i2c(13'h0D00);                               // read with NACK, STOP
    axil_read(REG_I2C_RX, v);
    check(v[7:0] == 8'h12, $sformatf("I2C read back %h", v[7:0]));
    axil_write(REG_SENS_BITS, 32'd24);
    axil_write(REG_SENS_DATA, 32'h00C0FFEE);
    axil_write(REG_SENS_BITS, 32'd8);
    axil_write(REG_SENS_DATA, 32'h0000005A);
    axil_write(REG_SENS_LOAD, 0);
    do axil_read(REG_STATUS, v); while (v[2]);
    repeat (40) @(posedge clk);
    check(s_latched[31:0] == 32'hC0FFEE5A, $sformatf("sensor latched %h", s_latched[31:0]));
    axil_write(REG_FEI4_BITS, 32'd5);
    axil_write(REG_FEI4_DATA, 32'h1D);
    repeat (60) @(posedge clk);
    check(m_fei4cmd == 1, "FE-I4B command bits on the command line");
    // --- data over the Ethernet path (DDR3 ring) ---
    axil_write(REG_DDR_BASE, 32'h1000_0000);
    axil_write(REG_DDR_SIZE, 32'h0010_0000);
    axil_write(REG_CTRL, 32'h3);                 // ADC and FE-I4B on, Ethernet
    repeat (300) @(posedge clk);
    axil_read(REG_STATUS, v);
    check(v[4], "FE-I4B receiver locked");
    for (int f = 0; f < 10; f++) fe_frame(4);
    while (u_fe.pending() != 0) @(posedge clk);
    repeat (300) @(posedge clk);
    axil_write(REG_CTRL, 32'h2);                 // ADC off
    repeat (2000) @(posedge clk);
    fe_frame(3);                                 // a 3-word tail, sent by the flush timer
    while (u_fe.pending() != 0) @(posedge clk);
    repeat (600) @(posedge clk);
    axil_read(REG_DDR_WCOUNT, wc);
    check(wc == 32'(ddr_words) * 4, $sformatf("write counter %0d equals the bytes in DDR3 (%0d words)", wc, ddr_words));
    check(fe_got == 43 && fe_exp.size() == 0, $sformatf("43 FE-I4B records in DDR3 (%0d)", fe_got));
    check(adc_got > 100 && adc_got % 8 == 0, $sformatf("whole ADC frames in DDR3 (%0d words)", adc_got));
    axil_read(REG_DROPS, v);
    m_adc_drop += int'(v[15:0]);
    // --- switch to the GBT link with a command sent over GBT ---
    gbt_send(GBT_WRITE, REG_CTRL, 32'h6);        // FE-I4B on, GBT selected
    axil_read(REG_CTRL, v);
    check(v == 32'h6, "link switched by a GBT command");
    if (v == 32'h6) m_link_switch++;
    for (int f = 0; f < 10; f++) fe_frame(3);
    while (u_fe.pending() != 0) @(posedge clk);
    repeat (300) @(posedge clk);
    check(fe_got == 73 && fe_exp.size() == 0, $sformatf("30 more records in GBT frames (%0d)", fe_got));
    gbt_send(GBT_READ, REG_FEI4_RECS, 0);
    repeat (40) @(posedge clk);
    check(gbt_rsp_q.size() == 1 && gbt_rsp_q[0] == {REG_FEI4_RECS, 32'd73}, "record counter read over GBT");
    // --- corrupted FE-I4B symbol: error, relock ---
    u_fe.put_raw(10'b0000000000);
    for (int i = 0; i < 6; i++) u_fe.put_k(8'h3C);
    while (u_fe.pending() != 0) @(posedge clk);
    repeat (100) @(posedge clk);
    axil_read(REG_FEI4_ERRS, v);
    axil_read(REG_STATUS, wc);
    if (v == 1 && wc[4]) m_relock++;
    check(v == 1 && wc[4], "code error counted and receiver relocked");
    fe_frame(2);
    while (u_fe.pending() != 0) @(posedge clk);
    repeat (200) @(posedge clk);
    check(fe_got == 75, "records after relock");
    // --- overflow: Ethernet path with a full ring, ADC running ---
    axil_read(REG_DDR_WCOUNT, wc);
    axil_write(REG_DDR_RCOUNT, wc);
    axil_write(REG_DDR_SIZE, 32'd256);
    axil_write(REG_CTRL, 32'h1);                 // ADC on, Ethernet
    repeat (8000) @(posedge clk);
    axil_read(REG_DDR_WCOUNT, v);
    check(v - wc == 256, $sformatf("writer stops at a full ring (%0d bytes)", v - wc));
    axil_read(REG_DROPS, v);
    m_adc_drop += int'(v[15:0]);
    check(v[15:0] > 0, "ADC frames dropped when the buffers are full");
    axil_write(REG_CTRL, 32'h0);
    axil_write(REG_DDR_RCOUNT, wc + 32'h0010_0000);   // software catches up
    axil_write(REG_DDR_SIZE, 32'h0010_0000);
    repeat (3000) @(posedge clk);
    check(fe_bad == 0 && adc_bad == 0, $sformatf("no corrupted words (%0d FE-I4B, %0d ADC)", fe_bad, adc_bad));
    // --- every mechanism happened ---
    check(m_axil > 0,        "mechanism: AXI4-Lite command path");
    check(m_gbt_cmd > 0,     "mechanism: GBT command path");
    check(m_gbt_rsp > 0,     "mechanism: GBT read response");
    check(m_gbt_data > 0,    "mechanism: data in GBT frames");
    check(m_i2c > 0,         "mechanism: I2C transaction");
    check(m_sens > 0,        "mechanism: sensor configuration load");
    check(m_fei4cmd > 0,     "mechanism: FE-I4B command");
    check(m_ddr_burst > 0,   "mechanism: AXI-HP bursts");
    check(m_ddr_short > 0,   "mechanism: flush of a short burst");
    check(m_relock > 0,      "mechanism: FE-I4B relock after a code error");
    check(m_adc_drop > 0,    "mechanism: overflow with dropped ADC frames");
    check(m_link_switch > 0, "mechanism: link switch");
    $display("mechanisms: axil %0d gbt_cmd %0d gbt_rsp %0d gbt_data %0d i2c %0d sensor_load %0d fei4_cmd %0d ddr_bursts %0d short_bursts %0d relock %0d adc_drops %0d link_switch %0d",
             m_axil, m_gbt_cmd, m_gbt_rsp, m_gbt_data, m_i2c, m_sens, m_fei4cmd, m_ddr_burst, m_ddr_short, m_relock, m_adc_drop, m_link_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
