// tb_fei4_scan: the data-taking loop of an FE-I4B tuning scan, run on the
// whole firmware at its default parameters.
//
// Threshold and ToT tuning are host software. For each injection the software
// sends the FE-I4B a calibration pulse command and a trigger, then reads back
// the hit records the chip returns. This test drives that loop through the
// firmware. It writes the FE-I4B CAL command (9 bits 101100100) and the LV1
// trigger (5 bits 11101) through the FE-I4B configure module. It watches the
// command line for each trigger. For each trigger the FE-I4B data model
// answers with one frame of HITS data records, {column, row, ToT1, ToT2},
// sent back to back at 160 Mbit/s with no idle symbols between them.
// The first half of the injections is read over the Ethernet path (DDR3
// ring). The second half is read over the GBT link. The link is switched by
// an AXI4-Lite write between the halves.
//
// Checks:
//   - every record arrives once, in order, unchanged;
//   - the receiver delivers one record every 30 clock cycles inside a frame
//     (three 10-bit symbols at one bit per 160 MHz cycle);
//   - no record is dropped and no code error is counted;
//   - the firmware's record counter and the DDR3 byte counter agree with
//     what arrived.
// The scan is scaled down: INJ injections of HITS hits each. A real tuning
// repeats this loop over the pixel matrix and the DAC settings.
module tb_fei4_scan;
  import caribou_pkg::*;
  localparam int INJ = 16, HITS = 64;
  logic clk = 0, rst_n = 0, dco = 0;
  always #3.125 clk = ~clk;       // 160 MHz
  always #1.042 dco = ~dco;       // ADC bit clock (ADC stays disabled)

  logic [11:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0, arvalid = 0, arready, rvalid, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0]  bresp, rresp;
  logic [31:0] m_awaddr, m_wdata; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst;
  logic m_awvalid, m_awready = 0, m_wvalid, m_wready = 0, m_wlast, m_bvalid = 0, m_bready;
  logic [3:0] m_wstrb;
  logic gbt_tx_strobe = 0, gbt_tx_isdata;
  logic [83:0] gbt_tx_data;
  logic scl_oe, sda_oe;
  logic sens_sin, sens_ck1, sens_ck2, sens_ld, fei4_cmd_clk, fei4_cmd_data;
  logic fei4_dout;

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
    .gbt_tx_strobe, .gbt_tx_data, .gbt_tx_isdata,
    .gbt_rx_strobe(1'b0), .gbt_rx_data(84'd0), .gbt_rx_isdata(1'b0),
    .i2c_scl_oe(scl_oe), .i2c_sda_oe(sda_oe), .i2c_scl_i(!scl_oe), .i2c_sda_i(!sda_oe),
    .sens_sin, .sens_ck1, .sens_ck2, .sens_ld, .fei4_cmd_clk, .fei4_cmd_data,
    .adc_dco(dco), .adc_fco(1'b0), .adc_d(8'd0), .fei4_dout);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- FE-I4B: command decoder and data output ----------------
  int n_cal = 0, n_lv1 = 0;
  logic [8:0] fcmd = 0; logic pcc = 1;
  always @(posedge clk) if (rst_n) begin
    pcc <= fei4_cmd_clk;
    if (fei4_cmd_clk && !pcc) begin
      fcmd <= {fcmd[7:0], fei4_cmd_data};
      if ({fcmd[7:0], fei4_cmd_data} == 9'b101100100) n_cal++;
      if ({fcmd[3:0], fei4_cmd_data} == 5'b11101) n_lv1++;
    end
  end

  fei4_data_model #(.START_BITS(41)) u_fe (.clk, .rst_n, .dout(fei4_dout));

  logic [23:0] exp_q [$];
  task automatic hit_frame(input int inj);
    u_fe.put_k(8'hFC);
    for (int h = 0; h < HITS; h++) begin
      logic [23:0] r;
      r = {7'(inj * 5 + h % 5), 9'(h * 5 + 1), 4'($urandom), 4'($urandom)};
      exp_q.push_back(r);
      u_fe.put_d(r[23:16]); u_fe.put_d(r[15:8]); u_fe.put_d(r[7:0]);
    end
    u_fe.put_k(8'hBC);
  endtask

  // record rate at the receiver output
  longint t_last = -1000; int gap_ok = 0, gap_bad = 0; longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.rec_valid) begin
      if (cyc - t_last < 30) gap_bad++;
      else if (cyc - t_last == 30) gap_ok++;
      t_last <= cyc;
    end
  end

  // ---------------- readout: DDR3 behind AXI-HP, GBT frames ----------------
  int got = 0, bad = 0, ddr_words = 0, gbt_words = 0;
  task automatic take(input logic [31:0] w);
    got++;
    if (w[31:24] != {TAG_FEI4, 4'h0} || exp_q.size() == 0 || w[23:0] != exp_q.pop_front()) bad++;
  endtask

  logic [31:0] cur; int beats = 0; bit pend_b = 0;
  always @(posedge clk) begin
    m_awready <= (beats == 0) && !pend_b && ($urandom_range(0, 3) == 0);
    m_wready  <= ($urandom_range(0, 3) != 0);
    if (m_awvalid && m_awready) begin cur = m_awaddr; beats = int'(m_awlen) + 1; end
    if (m_wvalid && m_wready && beats > 0) begin
      cur += 4; beats--; ddr_words++; take(m_wdata);
      if (beats == 0) pend_b = 1;
    end
    if (m_bvalid && m_bready) begin m_bvalid <= 0; pend_b = 0; end
    else if (pend_b && !m_bvalid) m_bvalid <= 1;
  end

  int gcnt = 0; logic pstb = 0;
  always @(posedge clk) begin
    gcnt <= (gcnt + 1) % 4;
    gbt_tx_strobe <= (gcnt == 3);
    pstb <= gbt_tx_strobe;
    if (pstb && gbt_tx_isdata && gbt_tx_data[79:76] == GBT_DATA) begin
      take(gbt_tx_data[63:32]); gbt_words++;
      if (gbt_tx_data[75:72] == 2) begin take(gbt_tx_data[31:0]); gbt_words++; end
    end
  end

  // ---------------- AXI4-Lite master ----------------
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
  endtask

  task automatic axil_read(input logic [7:0] r, output logic [31:0] d);
    @(negedge clk);
    araddr = {2'b00, r, 2'b00}; arvalid = 1;
    while (!arready) @(negedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    rready = 1; @(negedge clk); rready = 0;
  endtask

  task automatic inject(input int inj);
    int lv1_before;
    lv1_before = n_lv1;
    axil_write(REG_FEI4_BITS, 32'd9);
    axil_write(REG_FEI4_DATA, 32'b101100100);   // CAL
    axil_write(REG_FEI4_BITS, 32'd5);
    axil_write(REG_FEI4_DATA, 32'b11101);       // LV1
    while (n_lv1 == lv1_before) @(posedge clk);
    hit_frame(inj);
    while (u_fe.pending() != 0) @(posedge clk);
    repeat (100) @(posedge clk);
  endtask

  logic [31:0] v;
  initial begin
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (10) @(posedge clk);
    axil_write(REG_DDR_BASE, 32'h2000_0000);
    axil_write(REG_DDR_SIZE, 32'h0004_0000);
    axil_write(REG_CTRL, 32'h2);                  // FE-I4B receiver on, Ethernet
    repeat (300) @(posedge clk);
    axil_read(REG_STATUS, v);
    check(v[4], "FE-I4B receiver locked on idle symbols");
    for (int i = 0; i < INJ / 2; i++) inject(i);
    repeat (600) @(posedge clk);                  // flush timer empties the staging FIFO
    check(ddr_words == (INJ / 2) * HITS, $sformatf("Ethernet half: %0d records in DDR3", ddr_words));
    axil_read(REG_DDR_WCOUNT, v);
    check(v == 32'(ddr_words) * 4, "DDR3 byte counter");
    axil_write(REG_CTRL, 32'h6);                  // switch to the GBT link
    for (int i = INJ / 2; i < INJ; i++) inject(i);
    repeat (300) @(posedge clk);
    check(gbt_words == (INJ / 2) * HITS, $sformatf("GBT half: %0d records in GBT frames", gbt_words));
    check(n_cal == INJ && n_lv1 == INJ, $sformatf("%0d CAL and %0d LV1 commands on the line", n_cal, n_lv1));
    check(got == INJ * HITS && bad == 0 && exp_q.size() == 0,
          $sformatf("all records in order (%0d got, %0d bad)", got, bad));
    check(gap_bad == 0 && gap_ok == INJ * (HITS - 1),
          $sformatf("one record per 30 cycles inside frames (%0d ok, %0d short)", gap_ok, gap_bad));
    axil_read(REG_FEI4_RECS, v);
    check(v == INJ * HITS, $sformatf("record counter %0d", v));
    axil_read(REG_FEI4_ERRS, v);
    check(v == 0, "no code errors");
    axil_read(REG_DROPS, v);
    check(v == 0, "no dropped words");
    $display("scan: %0d injections x %0d hits, %0d over DDR3, %0d over GBT", INJ, HITS, ddr_words, gbt_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
