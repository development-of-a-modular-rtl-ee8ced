// tb_sensor_tdac: the configuration side of an AMS180v4 threshold tuning,
// run on the whole firmware at its default parameters, with every command
// sent over the GBT optical link.
//
// The tuning sets a 4-bit threshold DAC (TDAC) in every pixel. It then
// measures the pixels and corrects the TDACs, several times over. Each
// iteration rewrites the sensor's configuration shift register and pulses
// its load line. Here the host side is a model that sends GBT downlink
// frames (register writes and reads) and reads the uplink frames. It does
// the following:
//   1. selects the GBT link with a GBT write to CTRL;
//   2. writes the TDAC pattern of NPIX pixels as 32-bit words to SENS_DATA,
//      polling STATUS over GBT until the sensor port is idle before each
//      word, so that no command is lost while a write is stalled;
//   3. writes SENS_LOAD and waits for the port to go idle.
// A model of the two-phase shift register checks the following:
//   - the latched bits equal the pattern (MSB-first words, so pixel 0 goes
//     in first and ends at the far end of the register);
//   - the shift took 64 clock cycles per bit (four phases of 16 cycles);
//   - no GBT command was lost (GBT_LOST, read over GBT).
// Three iterations with different patterns are run. NPIX is a scaled-down
// matrix.
module tb_sensor_tdac;
  import caribou_pkg::*;
  localparam int NPIX = 64, NBITS = 4 * NPIX, NWORDS = NBITS / 32, ITER = 3;
  localparam int MIN_SHIFT_CYCLES = 64 * (NBITS - 1);
  logic clk = 0, rst_n = 0, dco = 0;
  always #3.125 clk = ~clk;       // 160 MHz
  always #1.042 dco = ~dco;

  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] rdata; logic [1:0] bresp, rresp;
  logic [31:0] m_awaddr, m_wdata; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst;
  logic m_awvalid, m_wvalid, m_wlast, m_bready; logic [3:0] m_wstrb;
  logic gbt_tx_strobe = 0, gbt_tx_isdata, gbt_rx_strobe = 0, gbt_rx_isdata = 0;
  logic [83:0] gbt_tx_data, gbt_rx_data = 0;
  logic scl_oe, sda_oe;
  logic sens_sin, sens_ck1, sens_ck2, sens_ld, fei4_cmd_clk, fei4_cmd_data;

  caribou_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(12'd0), .s_axil_awvalid(1'b0), .s_axil_awready(awready),
    .s_axil_wdata(32'd0), .s_axil_wstrb(4'h0), .s_axil_wvalid(1'b0), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(1'b0),
    .s_axil_araddr(12'd0), .s_axil_arvalid(1'b0), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(1'b0),
    .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen), .m_axi_awsize(m_awsize), .m_axi_awburst(m_awburst),
    .m_axi_awvalid(m_awvalid), .m_axi_awready(1'b0), .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb),
    .m_axi_wlast(m_wlast), .m_axi_wvalid(m_wvalid), .m_axi_wready(1'b0),
    .m_axi_bresp(2'b00), .m_axi_bvalid(1'b0), .m_axi_bready(m_bready),
    .gbt_tx_strobe, .gbt_tx_data, .gbt_tx_isdata, .gbt_rx_strobe, .gbt_rx_data, .gbt_rx_isdata,
    .i2c_scl_oe(scl_oe), .i2c_sda_oe(sda_oe), .i2c_scl_i(!scl_oe), .i2c_sda_i(!sda_oe),
    .sens_sin, .sens_ck1, .sens_ck2, .sens_ld, .fei4_cmd_clk, .fei4_cmd_data,
    .adc_dco(dco), .adc_fco(1'b0), .adc_d(8'd0), .fei4_dout(1'b0));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- sensor shift register ----------------
  logic [NBITS-1:0] chain = '0, latched = '0;
  logic s_m = 0, p1 = 0, p2 = 0, pl = 0;
  int n_shift = 0, n_load = 0;
  longint cyc = 0, t_first = -1, t_last = -1;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    p1 <= sens_ck1; p2 <= sens_ck2; pl <= sens_ld;
    if (sens_ck1 && !p1) s_m <= sens_sin;
    if (sens_ck2 && !p2) begin
      chain <= {chain[NBITS-2:0], s_m};
      n_shift++;
      if (t_first < 0) t_first <= cyc;
      t_last <= cyc;
    end
    if (sens_ld && !pl) begin latched <= chain; n_load++; end
  end

  // ---------------- GBT-FPGA user side ----------------
  int gcnt = 0; logic pstb = 0;
  logic [39:0] rsp_q [$];
  always @(posedge clk) begin
    gcnt <= (gcnt + 1) % 4;
    gbt_tx_strobe <= (gcnt == 3);
    pstb <= gbt_tx_strobe;
    if (pstb && gbt_tx_isdata && gbt_tx_data[79:76] == GBT_RDRSP)
      rsp_q.push_back({gbt_tx_data[71:64], gbt_tx_data[31:0]});
  end

  task automatic gbt_send(input gbt_type_e t, input logic [7:0] a, input logic [31:0] d);
    @(posedge clk); while (gcnt != 1) @(posedge clk);
    @(negedge clk);
    gbt_rx_strobe = 1; gbt_rx_isdata = 1; gbt_rx_data = {4'h0, t, 4'h0, a, 32'h0, d};
    @(negedge clk);
    gbt_rx_strobe = 0;
  endtask

  task automatic gbt_read(input logic [7:0] a, output logic [31:0] d);
    int waited = 0;
    gbt_send(GBT_READ, a, 0);
    while (rsp_q.size() == 0 && waited < 200) begin @(posedge clk); waited++; end
    if (rsp_q.size() == 0) begin d = 32'hFFFF_FFFF; check(0, "GBT read answered"); end
    else begin
      logic [39:0] r;
      r = rsp_q.pop_front();
      check(r[39:32] == a, "read response carries the register index");
      d = r[31:0];
    end
  endtask

  task automatic wait_sensor_idle();
    logic [31:0] st;
    do begin
      repeat (64) @(posedge clk);
      gbt_read(REG_STATUS, st);
    end while (st[2]);
  endtask

  logic [NBITS-1:0] pattern;
  logic [31:0] v;
  initial begin
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (10) @(posedge clk);
    gbt_send(GBT_WRITE, REG_CTRL, 32'h4);          // GBT link selected
    repeat (20) @(posedge clk);
    gbt_read(REG_CTRL, v);
    check(v == 32'h4, "GBT link selected over GBT");
    gbt_send(GBT_WRITE, REG_SENS_BITS, 32'd0);     // 32-bit words
    repeat (20) @(posedge clk);
    for (int it = 0; it < ITER; it++) begin
      int shifts0;
      longint t0;
      // one TDAC value per pixel: a different pattern each iteration
      for (int p = 0; p < NPIX; p++) pattern[NBITS - 4 * p - 1 -: 4] = 4'((p * 7 + it * 5 + 3) % 16);
      shifts0 = n_shift;
      t_first = -1;
      for (int w = 0; w < NWORDS; w++) begin
        wait_sensor_idle();
        gbt_send(GBT_WRITE, REG_SENS_DATA, pattern[NBITS - 32 * w - 1 -: 32]);
      end
      wait_sensor_idle();
      t0 = t_last;
      gbt_send(GBT_WRITE, REG_SENS_LOAD, 0);
      wait_sensor_idle();
      repeat (20) @(posedge clk);
      check(n_shift - shifts0 == NBITS, $sformatf("iteration %0d: %0d shift clocks", it, n_shift - shifts0));
      check(latched == pattern, $sformatf("iteration %0d: TDAC pattern latched", it));
      check(n_load == it + 1, $sformatf("iteration %0d: one load pulse", it));
      // bits inside one word are 64 cycles apart; words add host polling time
      check((t0 - t_first) >= longint'(MIN_SHIFT_CYCLES), $sformatf("iteration %0d: at least 64 cycles per bit", it));
    end
    gbt_read(REG_GBT_LOST, v);
    check(v == 0, $sformatf("no GBT command lost (%0d)", v));
    $display("TDAC tuning: %0d iterations of %0d pixels x 4 bits over GBT", ITER, NPIX);
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
