// caribou_top: FPGA firmware of the central interface board of the CaRIBOu
// test system, as set up for an AMS180v4 sensor read out through an FE-I4B
// chip.
//
// Front-end side: an I2C controller (power rails, monitors, bias voltages,
// ADC configuration), the sensor and FE-I4B configure modules, and two data
// interfaces, one for the CaR board's 8-channel serial ADC and one for the
// 160 Mbit/s 8b/10b FE-I4B stream. Their data go into the data buffer, which
// merges them into one stream. Host side: two links, selected by CTRL[2].
// Ethernet: commands arrive from the processing system over AXI4-Lite, data
// are written into DDR3 through AXI-HP for the software to send. GBT:
// commands arrive inside received GBT frames, data and read responses leave
// in transmitted GBT frames. Both command paths reach the command decoder,
// which controls every block. This structure follows the paper's firmware
// block diagram; the processing system, the GBT-FPGA core and the LVDS
// buffers are outside this module, their signals are ports.
//
// One system clock (160 MHz: one FE-I4B bit per cycle; FE-I4B command clock
// 40 MHz = clk/4) plus the ADC bit clock adc_dco, crossed inside
// adc_interface. Asynchronous active-low reset.
// The I2C controller's done pulse is left unconnected: the host learns that
// a byte has finished by polling the busy bit in I2C_RX.
module caribou_top
  import caribou_pkg::*;
#(
  parameter int unsigned I2C_DIV      = 400,   // SCL = clk/(4*I2C_DIV): 100 kHz
  parameter int unsigned SENS_DIV     = 16,    // sensor shift-clock phase, cycles
  parameter int unsigned FEI4_DIV     = 4,     // FE-I4B command clock = clk/FEI4_DIV
  parameter int unsigned ADC_LANES    = 8,
  parameter int unsigned ADC_BITS     = 12,
  parameter int unsigned BUF_DEPTH    = 1024,
  parameter int unsigned BURST        = 16,
  parameter int unsigned FLUSH_CYCLES = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave, from the processing system
  input  logic [11:0] s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [11:0] s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI-HP write master, to DDR3 through the processing system
  output logic [31:0] m_axi_awaddr,
  output logic [7:0]  m_axi_awlen,
  output logic [2:0]  m_axi_awsize,
  output logic [1:0]  m_axi_awburst,
  output logic        m_axi_awvalid,
  input  logic        m_axi_awready,
  output logic [31:0] m_axi_wdata,
  output logic [3:0]  m_axi_wstrb,
  output logic        m_axi_wlast,
  output logic        m_axi_wvalid,
  input  logic        m_axi_wready,
  input  logic [1:0]  m_axi_bresp,
  input  logic        m_axi_bvalid,
  output logic        m_axi_bready,
  // GBT-FPGA core user side
  input  logic        gbt_tx_strobe,
  output logic [83:0] gbt_tx_data,
  output logic        gbt_tx_isdata,
  input  logic        gbt_rx_strobe,
  input  logic [83:0] gbt_rx_data,
  input  logic        gbt_rx_isdata,
  // I2C (open drain; to the differential I2C buffer)
  output logic        i2c_scl_oe,
  output logic        i2c_sda_oe,
  input  logic        i2c_scl_i,
  input  logic        i2c_sda_i,
  // sensor configuration
  output logic        sens_sin,
  output logic        sens_ck1,
  output logic        sens_ck2,
  output logic        sens_ld,
  // FE-I4B command
  output logic        fei4_cmd_clk,
  output logic        fei4_cmd_data,
  // ADC
  input  logic                 adc_dco,
  input  logic                 adc_fco,
  input  logic [ADC_LANES-1:0] adc_d,
  // FE-I4B data
  input  logic        fei4_dout
);
  reg_req_t axi_req, gbt_req;
  reg_rsp_t axi_rsp, gbt_rsp;

  logic        adc_enable, fei4_enable, link_gbt;
  logic        i2c_valid, i2c_ready, i2c_rx_nack, i2c_done;
  logic [12:0] i2c_cmd;
  logic [7:0]  i2c_rx_data;
  logic        sens_valid, sens_ready, sens_load, sens_busy;
  logic [31:0] sens_data;
  logic [5:0]  sens_bits;
  logic        fei4c_valid, fei4c_ready, fei4c_busy;
  logic [31:0] fei4c_data;
  logic [5:0]  fei4c_bits;
  logic [31:0] adc_frames, fei4_records, fei4_errors, ddr_base, ddr_size, ddr_rcount, ddr_wcount, gbt_frames;
  logic [15:0] adc_drops, fei4_drops, gbt_lost;
  logic        fei4_locked;

  // ---------------- command paths ----------------
  axil_slave #(.AXI_ADDR_W(12)) u_axil (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .req(axi_req), .rsp(axi_rsp));

  logic        rsp_valid, rsp_ready;
  logic [7:0]  rsp_addr;
  logic [31:0] rsp_data;

  gbt_ipbus u_gbt_cmd (
    .clk, .rst_n, .rx_strobe(gbt_rx_strobe), .rx_data(gbt_rx_data), .rx_isdata(gbt_rx_isdata),
    .req(gbt_req), .rsp(gbt_rsp),
    .rsp_valid, .rsp_ready, .rsp_addr, .rsp_data, .lost(gbt_lost));

  cmd_decode u_cmd (
    .clk, .rst_n, .axi_req, .axi_rsp, .gbt_req, .gbt_rsp,
    .adc_enable, .fei4_enable, .link_gbt,
    .i2c_valid, .i2c_ready, .i2c_cmd, .i2c_rx_data, .i2c_rx_nack,
    .sens_valid, .sens_ready, .sens_data, .sens_bits, .sens_load, .sens_busy,
    .fei4c_valid, .fei4c_ready, .fei4c_data, .fei4c_bits, .fei4c_busy,
    .adc_frames, .adc_drops, .fei4_locked, .fei4_records, .fei4_errors, .fei4_drops,
    .ddr_base, .ddr_size, .ddr_rcount, .ddr_wcount, .gbt_frames, .gbt_lost);

  // ---------------- control modules ----------------
  i2c_master #(.DIV(I2C_DIV)) u_i2c (
    .clk, .rst_n,
    .cmd_valid(i2c_valid), .cmd_ready(i2c_ready),
    .cmd_start(i2c_cmd[12]), .cmd_stop(i2c_cmd[11]), .cmd_read(i2c_cmd[10]), .cmd_write(i2c_cmd[9]),
    .cmd_nack(i2c_cmd[8]), .cmd_data(i2c_cmd[7:0]),
    .done(i2c_done), .rx_data(i2c_rx_data), .rx_nack(i2c_rx_nack),
    .scl_oe(i2c_scl_oe), .sda_oe(i2c_sda_oe), .scl_i(i2c_scl_i), .sda_i(i2c_sda_i));

  sensor_config #(.DIV(SENS_DIV)) u_sens (
    .clk, .rst_n, .word_valid(sens_valid), .word_ready(sens_ready), .word_data(sens_data),
    .word_bits(sens_bits), .load_req(sens_load), .busy(sens_busy),
    .sin(sens_sin), .ck1(sens_ck1), .ck2(sens_ck2), .ld(sens_ld));

  fei4_config #(.DIV(FEI4_DIV)) u_fei4c (
    .clk, .rst_n, .word_valid(fei4c_valid), .word_ready(fei4c_ready), .word_data(fei4c_data),
    .word_bits(fei4c_bits), .busy(fei4c_busy), .cmd_clk(fei4_cmd_clk), .cmd_data(fei4_cmd_data));

  // ---------------- data interfaces ----------------
  logic        adc_valid, adc_ready;
  logic [31:0] adc_word;
  logic        rec_valid;
  logic [31:0] rec_data;

  adc_interface #(.LANES(ADC_LANES), .BITS(ADC_BITS)) u_adc (
    .adc_dco, .adc_fco, .adc_d,
    .clk, .rst_n, .enable(adc_enable),
    .out_valid(adc_valid), .out_ready(adc_ready), .out_data(adc_word),
    .frames(adc_frames), .drops(adc_drops));

  fei4_rx u_fei4rx (
    .clk, .rst_n, .enable(fei4_enable), .din(fei4_dout), .locked(fei4_locked),
    .rec_valid, .rec_data, .records(fei4_records), .code_errors(fei4_errors));

  // ---------------- data buffer and link selection ----------------
  logic        buf_valid, buf_ready, hp_ready, gbt_ready;
  logic [31:0] buf_data;

  data_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .adc_valid, .adc_ready, .adc_data(adc_word),
    .fei4_valid(rec_valid), .fei4_data(rec_data),
    .out_valid(buf_valid), .out_ready(buf_ready), .out_data(buf_data),
    .fei4_drops);

  assign buf_ready = link_gbt ? gbt_ready : hp_ready;

  axi_hp_writer #(.BURST(BURST), .FLUSH_CYCLES(FLUSH_CYCLES)) u_hp (
    .clk, .rst_n,
    .in_valid(buf_valid && !link_gbt), .in_ready(hp_ready), .in_data(buf_data),
    .base(ddr_base), .size(ddr_size), .rcount(ddr_rcount), .wcount(ddr_wcount),
    .m_awaddr(m_axi_awaddr), .m_awlen(m_axi_awlen), .m_awsize(m_axi_awsize), .m_awburst(m_axi_awburst),
    .m_awvalid(m_axi_awvalid), .m_awready(m_axi_awready),
    .m_wdata(m_axi_wdata), .m_wstrb(m_axi_wstrb), .m_wlast(m_axi_wlast),
    .m_wvalid(m_axi_wvalid), .m_wready(m_axi_wready),
    .m_bresp(m_axi_bresp), .m_bvalid(m_axi_bvalid), .m_bready(m_axi_bready));

  gbt_packer u_gbt_tx (
    .clk, .rst_n,
    .in_valid(buf_valid && link_gbt), .in_ready(gbt_ready), .in_data(buf_data),
    .rsp_valid, .rsp_ready, .rsp_addr, .rsp_data,
    .tx_strobe(gbt_tx_strobe), .tx_data(gbt_tx_data), .tx_isdata(gbt_tx_isdata),
    .frames(gbt_frames));
endmodule
